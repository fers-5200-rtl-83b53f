// tb_fers_unit: one unit in stand-alone use, read out on the microcontroller
// stream (with random back-pressure), configured through its registers.
// Runs, in order:
//   spectroscopy, software trigger, no suppression: 36-word packets with the
//     full mask and the model's charges;
//   spectroscopy with zero suppression: mask = charge-discriminator bits,
//     only those charges;
//   majority trigger: fewer channels than the level give no trigger, enough
//     channels give one;
//   counting with the periodic trigger: per-slot counts equal the pulses
//     fired inside the slot, slot index increments;
//   timing streaming and ToT: hit channel, time-stamp differences and ToT
//     match the pulses fired.
// Each mode switch is counted and must have happened.
`timescale 1ns/1ps
module tb_fers_unit;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s @%0t", s, $time); end endtask

  logic [FINE_BINS-1:0] trg_s [N_CH];
  logic hold, astart, avalid, tdcs, tdcp, t0o, t1o, ucwr, ucvalid, ucready, running, hvv;
  logic [4:0] msel;
  logic [CHARGE_W-1:0] adata [N_ASIC];
  logic [N_ASIC-1:0] qtrg;
  ring_word_t ltx;
  logic [7:0] ucaddr, ucra, naddr;
  logic [31:0] ucdata, ucrd, tcount, lcount, hlost;
  dword_t ucword;
  logic [16:0] hvout;
  logic [TIME_W-1:0] now, rt, dt;

  fe_model fe (.clk, .trg_samples_o(trg_s), .hold_i(hold), .mux_sel_i(msel), .adc_start_i(astart),
    .adc_valid_o(avalid), .adc_data_o(adata), .qtrg_o(qtrg));

  fers_unit dut (.clk, .rst_n, .standalone_i(1'b1), .trg_samples_i(trg_s), .t0_samples_i(16'h0), .t1_i(1'b0),
    .hold_o(hold), .mux_sel_o(msel), .adc_start_o(astart), .adc_valid_i(avalid), .adc_data_i(adata),
    .qtrg_i(qtrg), .tdc_start_o(tdcs), .tdc_stop_o(tdcp), .t0_out_o(t0o), .t1_out_o(t1o),
    .link_rx_i('{kind: RK_IDLE, data: 32'h0}), .link_tx_o(ltx),
    .uc_wr_i(ucwr), .uc_addr_i(ucaddr), .uc_data_i(ucdata), .uc_rd_addr_i(ucra), .uc_rd_data_o(ucrd),
    .uc_valid_o(ucvalid), .uc_word_o(ucword), .uc_ready_i(ucready),
    .temp_valid_i(1'b0), .temp_i(16'sd2400), .hv_vset_o(hvout), .hv_vset_valid_o(hvv),
    .now_o(now), .running_o(running), .trg_count_o(tcount), .lost_count_o(lcount), .hits_lost_o(hlost),
    .real_time_o(rt), .dead_time_o(dt), .node_addr_o(naddr));

  // ------------------------------------------------------ packet receiver
  logic [31:0] pkts[$][$];
  logic [31:0] cur[$];
  always @(posedge clk) if (rst_n && ucvalid && ucready) begin
    cur.push_back(ucword.data);
    if (ucword.last) begin pkts.push_back(cur); cur = {}; end
  end
  initial begin ucready = 0; forever begin @(negedge clk); ucready = $urandom_range(0, 3) != 0; end end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); ucwr = 1; ucaddr = a; ucdata = d; @(negedge clk); ucwr = 0;
  endtask
  function automatic logic [31:0] mode_word(acq_mode_e m, trg_src_e s, int maj, bit zs, timing_sub_e ts = SUB_STREAMING);
    return {12'h0, 4'h0, 1'b0, zs, 7'(maj), s, ts, m};
  endfunction
  task automatic get_pkt(output logic [31:0] p[$], input int tmo = 20000);
    int t = 0;
    while (pkts.size() == 0 && t < tmo) begin @(negedge clk); t++; end
    chk(pkts.size() > 0, "packet timeout");
    if (pkts.size() > 0) p = pkts.pop_front(); else p = {};
  endtask

  int mode_switches = 0, n_spect = 0, n_zs = 0, n_cnt = 0, n_hits = 0, n_maj = 0;

  initial begin
    logic [31:0] p[$];
    logic [CHARGE_W-1:0] qv [N_CH];
    bit qtv [N_CH];
    ucwr = 0; ucaddr = 0; ucdata = 0; ucra = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    // ---------------------------------------------------- spectroscopy
    wr(REG_MODE, mode_word(MODE_SPECT, TSRC_SW, 1, 0)); mode_switches++;
    wr(REG_RUN, CMD_START);
    for (int e = 0; e < 4; e++) begin
      for (int c = 0; c < N_CH; c++) begin qv[c] = 16'($urandom); fe.set_charge(c, qv[c], 1); end
      wr(REG_SWTRG, 0);
      get_pkt(p);
      chk(p.size() == 36, $sformatf("spect size %0d", p.size()));
      if (p.size() == 36) begin
        chk(p[0][31:16] == mk_header(PKT_SPECT, 12'd36), "spect header");
        chk(p[2] == 32'hFFFFFFFF && p[3] == 32'hFFFFFFFF, "spect mask");
        for (int c = 0; c < N_CH; c++) chk((c % 2 == 0 ? p[4 + c/2][31:16] : p[4 + c/2][15:0]) == qv[c], "charge");
        n_spect++;
      end
    end
    // ------------------------------------------------ zero suppression
    wr(REG_MODE, mode_word(MODE_SPECT, TSRC_SW, 1, 1)); mode_switches++;
    for (int e = 0; e < 6; e++) begin
      logic [63:0] m; int k;
      m = {$urandom, $urandom};
      for (int c = 0; c < N_CH; c++) begin qv[c] = 16'($urandom); fe.set_charge(c, qv[c], m[c]); end
      wr(REG_SWTRG, 0);
      get_pkt(p);
      chk(p.size() == 4 + ($countones(m) + 1) / 2, "zs size");
      if (p.size() == 4 + ($countones(m) + 1) / 2) begin
        chk({p[2], p[3]} == m, "zs mask");
        k = 0;
        for (int c = 0; c < N_CH; c++) if (m[c]) begin
          chk((k % 2 == 0 ? p[4 + k/2][31:16] : p[4 + k/2][15:0]) == qv[c], "zs charge");
          k++;
        end
        n_zs++;
      end
    end
    for (int c = 0; c < N_CH; c++) fe.set_charge(c, 16'(c), 1);
    // ---------------------------------------------------- majority
    wr(REG_MODE, mode_word(MODE_SPECT, TSRC_MAJORITY, 3, 0)); mode_switches++;
    repeat (5) @(negedge clk);
    begin
      int t0c;
      t0c = tcount;
      fe.fire(5, 3, 20); fe.fire(9, 3, 20);
      repeat (30) @(negedge clk);
      chk(tcount == t0c, "two channels below majority 3");
      repeat (2000) @(negedge clk);
      fe.fire(5, 3, 20); fe.fire(9, 3, 20); fe.fire(40, 3, 20);
      repeat (30) @(negedge clk);
      chk(tcount == t0c + 1, "three channels reach majority 3");
      get_pkt(p);
      chk(p.size() == 36, "majority event");
      n_maj++;
    end
    wr(REG_RUN, CMD_STOP);
    // ------------------------------------------------------ counting
    wr(REG_DWELL, 600);
    wr(REG_MODE, mode_word(MODE_COUNTING, TSRC_PERIODIC, 1, 0)); mode_switches++;
    repeat (10) @(negedge clk);
    pkts = {};
    wr(REG_RUN, CMD_START);
    get_pkt(p);                               // slot 0 (nothing fired)
    for (int s = 0; s < 5; s++) begin
      int cnt [N_CH];
      logic [31:0] slot0;
      slot0 = p[2];
      for (int c = 0; c < N_CH; c++) cnt[c] = 0;
      // fire inside the slot that has just started
      for (int i = 0; i < 60; i++) begin
        int c = $urandom_range(0, 63);
        fe.fire(c, $urandom_range(0, 10), 3);
        cnt[c]++;
        repeat (4) @(negedge clk);
      end
      get_pkt(p);
      chk(p.size() == 67 && p[0][31:16] == mk_header(PKT_COUNTING, 12'd67), "mcs packet");
      if (p.size() == 67) begin
        chk(p[2] == slot0 + 1, "slot index");
        for (int c = 0; c < N_CH; c++) chk(p[3 + c] == 32'(cnt[c]), $sformatf("count ch %0d: %0d exp %0d", c, p[3 + c], cnt[c]));
        n_cnt++;
      end
    end
    wr(REG_RUN, CMD_STOP);
    // -------------------------------------------------- timing / ToT
    for (int tm = 0; tm < 2; tm++) begin
      repeat (200) @(negedge clk);
      pkts = {};
      wr(REG_PKTHITS, 8);
      wr(REG_MODE, mode_word(tm ? MODE_TOT : MODE_TIMING, TSRC_SW, 1, 0)); mode_switches++;
      wr(REG_RUN, CMD_START);
      begin
        int ch[$], tdel[$], wid[$];
        int tclk = 0;
        logic [31:0] ts[$], tots[$], chs[$];
        ch = {}; tdel = {}; wid = {}; ts = {}; tots = {}; chs = {}; tclk = 0;
        for (int i = 0; i < 24; i++) begin
          int c = i * 2 + $urandom_range(0, 1), b = $urandom_range(0, 15), w = $urandom_range(2, 40);
          fe.fire(c, b, w);
          ch.push_back(c); tdel.push_back(tclk * 16 + b); wid.push_back(w);
          repeat (10) @(negedge clk); tclk += 10;
        end
        repeat (100) @(negedge clk);
        wr(REG_RUN, CMD_STOP);
        repeat (100) @(negedge clk);
        while (pkts.size() > 0) begin
          p = pkts.pop_front();
          chk(p[0][31:28] == (tm ? PKT_TOT : PKT_TIMING), "timing type");
          for (int i = 1; i < p.size(); i += (tm ? 2 : 1)) begin
            chs.push_back(p[i][29:24]); ts.push_back(p[i][23:0]);
            if (tm) tots.push_back(p[i + 1]);
          end
        end
        chk(chs.size() == 24, $sformatf("hits %0d mode %0d", chs.size(), tm));
        if (chs.size() == 24)
          for (int i = 0; i < 24; i++) begin
            chk(chs[i] == 32'(ch[i]), "hit channel");
            chk(ts[i] - ts[0] == 32'(tdel[i] - tdel[0]), "hit time");
            if (tm) chk(tots[i] == 32'(wid[i]), "hit tot");
            n_hits++;
          end
      end
    end
    $display("spect %0d zs %0d majority %0d mcs slots %0d hits %0d mode switches %0d", n_spect, n_zs, n_maj, n_cnt, n_hits, mode_switches);
    chk(n_spect > 0 && n_zs > 0 && n_maj > 0 && n_cnt > 0 && n_hits > 0 && mode_switches >= 5, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
