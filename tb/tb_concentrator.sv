// tb_concentrator: the concentrator tested with three TDlink chains of two
// real units each (one clock of link delay per hop), so that event building
// over several chains is exercised.
// Concentrator functions checked: start-up of all chains (node counts, hop
// delays, time alignment), global trigger counting and trigger commands,
// horizontal event building (event marker and word count, event numbers in
// order, packets in chain/node order, units that missed a trigger skipped),
// back-pressure on the output stream, vertical readout with per-packet
// source words, and the S-link time reset followed by a new start-up.
// Every mechanism is counted and a failure is counted for one that did not
// occur.
`timescale 1ns/1ps
module tb_concentrator;
  import fers_pkg::*;
  localparam int NL = 3;
  localparam int NU = 2;
  localparam int BD = 256;
  localparam int LD = 1;
  localparam int NTRG = 40;
  localparam int DWELL = 300;
  localparam int RUNC = 30000;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s @%0t", s, $time); end endtask

  ring_word_t ctx [NL], crx [NL];
  ring_word_t utx [NL][NU], urx [NL][NU];
  logic [FINE_BINS-1:0] trg_s [NL][NU][N_CH];
  logic [FINE_BINS-1:0] t0_s [NL][NU];
  logic t1 [NL][NU], hold [NL][NU], astart [NL][NU], avalid [NL][NU], tdcs [NL][NU], tdcp [NL][NU];
  logic t0o [NL][NU], t1o [NL][NU], tv [NL][NU];
  logic [4:0] msel [NL][NU];
  logic [CHARGE_W-1:0] adata [NL][NU][N_ASIC];
  logic [N_ASIC-1:0] qtrg [NL][NU];
  logic signed [15:0] temp [NL][NU];
  logic [16:0] hv [NL][NU];
  logic [31:0] utc [NL][NU], ulost [NL][NU];
  logic [TIME_W-1:0] udead [NL][NU], unow [NL][NU];
  logic init, cmd, gtrg, tvl, regwr, hmode, idone, serr, evv, evr, slm, trst, strst_i, strst_o;
  logic [31:0] cmdc, regd, tcount, ebuilt;
  logic [3:0] regl; logic [7:0] regn, rega;
  logic [23:0] vmax;
  logic [7:0] nn [NL]; logic [31:0] hop [NL];
  dword_t evw;
  logic [TIME_W-1:0] now;

  fersnet #(.N_LINKS(NL), .N_UNITS(NU), .BUF_DEPTH(BD)) dut (.clk, .rst_n,
    .conc_tx_o(ctx), .conc_rx_i(crx), .unit_tx_o(utx), .unit_rx_i(urx),
    .trg_samples_i(trg_s), .t0_samples_i(t0_s), .t1_i(t1), .hold_o(hold), .mux_sel_o(msel),
    .adc_start_o(astart), .adc_valid_i(avalid), .adc_data_i(adata), .qtrg_i(qtrg),
    .tdc_start_o(tdcs), .tdc_stop_o(tdcp), .t0_out_o(t0o), .t1_out_o(t1o),
    .temp_valid_i(tv), .temp_i(temp), .hv_vset_o(hv),
    .unit_trg_count_o(utc), .unit_lost_o(ulost), .unit_dead_time_o(udead), .unit_now_o(unow),
    .init_i(init), .cmd_i(cmd), .cmd_code_i(cmdc), .gtrg_i(gtrg), .trg_via_link_i(tvl),
    .reg_wr_i(regwr), .reg_link_i(regl), .reg_node_i(regn), .reg_addr_i(rega), .reg_data_i(regd),
    .hmode_i(hmode), .vmax_i(vmax), .init_done_o(idone), .sync_err_o(serr), .n_nodes_o(nn), .hop_o(hop),
    .trg_count_o(tcount), .events_built_o(ebuilt), .ev_valid_o(evv), .ev_word_o(evw), .ev_ready_i(evr),
    .slink_master_i(slm), .treset_i(trst), .slink_treset_i(strst_i), .slink_treset_o(strst_o), .now_o(now));

  // ---------------------------------------------------- links (LD clocks)
  function automatic ring_word_t idle_w(); return '{kind: RK_IDLE, data: 32'h0}; endfunction
  for (genvar l = 0; l < NL; l++) begin : g_l
    for (genvar u = 0; u <= NU; u++) begin : g_hop
      ring_word_t d [LD];
      ring_word_t src;
      if (u == 0) assign src = ctx[l]; else assign src = utx[l][u-1];
      always_ff @(posedge clk) begin
        d[0] <= src;
        for (int k = 1; k < LD; k++) d[k] <= d[k-1];
      end
      if (u == NU) assign crx[l] = d[LD-1]; else assign urx[l][u] = d[LD-1];
    end
    for (genvar u = 0; u < NU; u++) begin : g_u
      logic [FINE_BINS-1:0] s [N_CH];
      logic [CHARGE_W-1:0] ad [N_ASIC];
      fe_model fe (.clk, .trg_samples_o(s), .hold_i(hold[l][u]), .mux_sel_i(msel[l][u]),
        .adc_start_i(astart[l][u]), .adc_valid_o(avalid[l][u]), .adc_data_o(ad), .qtrg_o(qtrg[l][u]));
      assign trg_s[l][u] = s;
      assign adata[l][u] = ad;
      assign t0_s[l][u] = '0; assign t1[l][u] = 1'b0; assign tv[l][u] = 1'b0; assign temp[l][u] = 16'sd2500;
      initial begin
        #1;
        for (int c = 0; c < N_CH; c++) fe.set_charge(c, 16'((l * NU + u) * 256 + c), (c % 3) == 0);
      end
      // random self-trigger pulses while fire_en is set
      always @(posedge clk) if (fire_en && $urandom_range(0, 7) == 0) fe.fire($urandom_range(0, 63), $urandom_range(0, 12), 3);
    end
  end
  bit fire_en = 0;

  // ---------------------------------------------------------- receiver
  logic [31:0] words[$];
  bit          lasts[$];
  int n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (evv && evr) begin words.push_back(evw.data); lasts.push_back(evw.last); end
    if (evv && !evr) n_stall++;
  end
  bit rdy_rand = 1, rdy_block = 0;
  initial begin evr = 1; forever begin @(negedge clk); evr = !rdy_block && (!rdy_rand || $urandom_range(0, 3) != 0); end end

  task automatic do_cmd(logic [31:0] c); @(negedge clk) cmd = 1; cmdc = c; @(negedge clk) cmd = 0; endtask
  task automatic do_reg(int l, logic [7:0] n, logic [7:0] a, logic [31:0] d);
    @(negedge clk) regwr = 1; regl = 4'(l); regn = n; rega = a; regd = d; @(negedge clk) regwr = 0;
    repeat (2 * (NU + 1) * (LD + 1) + 20) @(negedge clk);
  endtask
  task automatic startup();
    @(negedge clk) init = 1; @(negedge clk) init = 0;
    while (!idone) @(negedge clk);
    @(negedge clk);
    chk(!serr, "sync error");
    for (int l = 0; l < NL; l++) begin
      chk(nn[l] == NU, $sformatf("chain %0d nodes %0d", l, nn[l]));
      chk(hop[l] == LD, $sformatf("chain %0d hop %0d", l, hop[l]));
      for (int u = 0; u < NU; u++) chk(unow[l][u] == now, $sformatf("unit %0d.%0d time %0d conc %0d", l, u, unow[l][u], now));
    end
  endtask

  int n_init = 0, n_events = 0, n_skip = 0, n_zs = 0, n_vpk = 0, n_overflow = 0, n_mode = 0, n_treset = 0;
  int got [NL][NU];

  initial begin
    init = 0; cmd = 0; gtrg = 0; tvl = 1; regwr = 0; hmode = 1; vmax = 24'd256; slm = 1; trst = 0; strst_i = 0;
    cmdc = 0; regd = 0; regl = 0; regn = 0; rega = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (10) @(negedge clk);
    // ================================================================ A
    startup(); n_init++;
    // ================================================================ B
    do_reg(NL - 1, 8'(NU - 1), REG_HOLD, 32'd250);                        // slow unit
    do_reg(0, 8'(NU - 1), REG_MODE, {12'h0, 4'h0, 1'b0, 1'b1, 7'd1, TSRC_LINK, SUB_STREAMING, MODE_SPECT}); // zs
    do_cmd(CMD_START);
    for (int k = 0; k < NTRG; k++) begin
      @(negedge clk) gtrg = 1; @(negedge clk) gtrg = 0;
      repeat ($urandom_range(1250, 1700)) @(negedge clk);
    end
    repeat (4000) @(negedge clk);
    do_cmd(CMD_STOP);
    repeat (200) @(negedge clk);
    chk(tcount == NTRG && ebuilt == NTRG, $sformatf("events built %0d triggers %0d", ebuilt, tcount));
    for (int l = 0; l < NL; l++) for (int u = 0; u < NU; u++) got[l][u] = 0;
    for (int e = 0; e < NTRG; e++) begin
      int left, pl, pn, plen, prev; longint ts0, ts;
      bit first;
      chk(words.size() >= 2, "event words");
      if (words.size() < 2) break;
      chk(words[0][31:24] == 8'hEB, "event marker");
      left = words[0][23:0] - 1;
      void'(words.pop_front()); void'(lasts.pop_front());
      chk(words[0] == 32'(e), $sformatf("event number %0d exp %0d", words[0], e));
      void'(words.pop_front()); void'(lasts.pop_front());
      prev = -1; first = 1;
      n_skip += NL * NU;
      while (left > 0) begin
        pl = words[0][31:24]; pn = words[0][23:16]; plen = words[0][11:0];
        chk(pl * 256 + pn > prev, "chain/node order");
        prev = pl * 256 + pn;
        void'(words.pop_front()); void'(lasts.pop_front());
        chk(words[0][31:28] == PKT_SPECT && words[0][27:16] == 12'(plen), "spect header");
        ts = {words[0][15:0], words[1]};
        if (first) ts0 = ts;
        first = 0;
        chk(ts - ts0 < 64 && ts0 - ts < 64, "time stamps of one event");
        if (pl < NL && pn < NU) got[pl][pn]++;
        if (pl == 0 && pn == NU - 1) begin
          chk(plen == 4 + 11 && {words[2], words[3]} == 64'h9249249249249249, "zs packet");
          n_zs++;
        end else begin
          chk(plen == 36, "full packet");
          chk(words[4] == {16'(((pl * NU + pn) * 256)), 16'(((pl * NU + pn) * 256) + 1)}, "charges of the unit");
        end
        n_skip--;
        for (int i = 0; i < plen; i++) begin
          chk(lasts[0] == (left == plen + 1 && i == plen - 1), "event last mark");
          void'(words.pop_front()); void'(lasts.pop_front());
        end
        left -= plen + 1;
      end
      n_events++;
    end
    for (int l = 0; l < NL; l++) for (int u = 0; u < NU; u++)
      chk(got[l][u] == int'(utc[l][u]) - int'(ulost[l][u]), $sformatf("unit %0d.%0d packets %0d trg %0d lost %0d", l, u, got[l][u], utc[l][u], ulost[l][u]));
    chk(words.size() == 0, "extra words after the events");
    // ================================================================ C
    for (int l = 0; l < NL; l++) begin
      do_reg(l, NODE_BROADCAST, REG_DWELL, 32'(DWELL));
      do_reg(l, NODE_BROADCAST, REG_MODE, {12'h0, 4'h0, 1'b0, 1'b0, 7'd1, TSRC_PERIODIC, SUB_STREAMING, MODE_COUNTING});
    end
    n_mode++;
    hmode = 0;
    words = {}; lasts = {};
    fire_en = 1;
    do_cmd(CMD_START);
    rdy_block = 1;
    repeat (RUNC / 2) @(negedge clk);
    rdy_block = 0;
    repeat (RUNC / 2) @(negedge clk);
    do_cmd(CMD_STOP);
    fire_en = 0;
    // drain: wait until the output has been quiet for a while
    begin
      int quiet = 0;
      while (quiet < 3000) begin @(negedge clk); if (evv) quiet = 0; else quiet++; end
    end
    begin
      int last_slot [NL][NU];
      for (int l = 0; l < NL; l++) for (int u = 0; u < NU; u++) begin got[l][u] = 0; last_slot[l][u] = -1; end
      while (words.size() > 0) begin
        int pl, pn, plen;
        pl = words[0][31:24]; pn = words[0][23:16]; plen = words[0][11:0];
        void'(words.pop_front()); void'(lasts.pop_front());
        chk(plen == 67 && words.size() >= plen, "mcs packet length");
        if (plen != 67 || words.size() < plen || pl >= NL || pn >= NU) break;
        chk(words[0][31:16] == mk_header(PKT_COUNTING, 12'd67), "mcs header");
        chk(int'(words[2]) > last_slot[pl][pn], "slot order");
        last_slot[pl][pn] = words[2];
        got[pl][pn]++;
        n_vpk++;
        for (int i = 0; i < plen; i++) begin
          chk(lasts[0] == (i == plen - 1), "packet last mark");
          void'(words.pop_front()); void'(lasts.pop_front());
        end
      end
      for (int l = 0; l < NL; l++) for (int u = 0; u < NU; u++) begin
        chk(got[l][u] + int'(ulost[l][u]) == int'(utc[l][u]), $sformatf("unit %0d.%0d slots %0d lost %0d trg %0d", l, u, got[l][u], ulost[l][u], utc[l][u]));
        n_overflow += ulost[l][u];
      end
    end
    // ================================================================ D
    repeat (100) @(negedge clk);
    @(negedge clk) trst = 1; @(negedge clk) trst = 0;
    @(negedge clk);
    chk(strst_o == 1'b0 && now < 8, $sformatf("time after reset %0d", now));
    if (now < 8) n_treset++;
    startup(); n_init++;
    // ======================================================== summary
    $display("init %0d events %0d skipped %0d zs %0d stalls %0d mode switches %0d vertical packets %0d overflow slots %0d time resets %0d",
      n_init, n_events, n_skip, n_zs, n_stall, n_mode, n_vpk, n_overflow, n_treset);
    chk(n_init == 2, "start-up twice");
    chk(n_events == NTRG, "events");
    chk(n_skip > 0, "missed-trigger skip happened");
    chk(n_zs > 0, "zero suppression happened");
    chk(n_stall > 0, "output stall happened");
    chk(n_mode > 0, "mode switch happened");
    chk(n_vpk > 0, "vertical readout happened");
    chk(n_overflow > 0, "buffer overflow happened");
    chk(n_treset > 0, "time reset happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
