// tb_tdlink_master: one TDlink chain of NN nodes with LD clocks of link delay
// on every hop (including the return hop), driven by the chain master.
// Checks: enumeration (node count, addresses), measured hop delay, time
// alignment of every node with the master, broadcast commands, addressed
// and broadcast register writes, horizontal readout of many triggers
// (packets of every unit in chain order, units that missed a trigger
// skipped, stale packets dropped) and vertical readout (all packets of every
// unit delivered, in order, with the per-token word limit respected).
`timescale 1ns/1ps
module tb_tdlink_master;
  import fers_pkg::*;
  localparam int NN = 5;
  localparam int LD = 3;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s @%0t", s, $time); end endtask

  // ---------------------------------------------------------------- master
  logic [TIME_W-1:0] mnow;
  always_ff @(posedge clk or negedge rst_n) if (!rst_n) mnow <= 64'd5000; else mnow <= mnow + 1;
  ring_word_t mtx, mrx;
  logic init, cmd, regwr, hread, vpoll, ready, idone, serr, done, ovalid, osop;
  logic [31:0] cmdc, regd, hidx;
  logic [7:0] regn, rega, nnodes;
  logic [23:0] vmax;
  logic [31:0] hop;
  dword_t oword;
  tdlink_master m (.clk, .rst_n, .tx_o(mtx), .rx_i(mrx), .now_i(mnow), .init_i(init), .cmd_i(cmd),
    .cmd_code_i(cmdc), .reg_wr_i(regwr), .reg_node_i(regn), .reg_addr_i(rega), .reg_data_i(regd),
    .hread_i(hread), .hread_idx_i(hidx), .vpoll_i(vpoll), .vmax_i(vmax), .ready_o(ready),
    .init_done_o(idone), .sync_err_o(serr), .n_nodes_o(nnodes), .hop_o(hop), .done_o(done),
    .out_valid_o(ovalid), .out_sop_o(osop), .out_word_o(oword));

  // ------------------------------------------------------ links and nodes
  ring_word_t hop_in [NN+1];   // into each hop
  ring_word_t hop_out[NN+1];   // out of each hop
  ring_word_t dl [NN+1][LD];
  ring_word_t ntx[NN];
  for (genvar h = 0; h <= NN; h++) begin : g_hop
    always_ff @(posedge clk) begin
      dl[h][0] <= hop_in[h];
      for (int k = 1; k < LD; k++) dl[h][k] <= dl[h][k-1];
    end
    assign hop_out[h] = dl[h][LD-1];
  end
  assign hop_in[0] = mtx;
  assign mrx = hop_out[NN];

  logic [TIME_W-1:0] ntime[NN];
  logic tload[NN]; logic [TIME_W-1:0] tval[NN];
  logic cst[NN], csp[NN], ctr[NN], rwr[NN];
  logic [7:0] raddr[NN], naddr[NN];
  logic [31:0] rdata[NN];
  logic running[NN]; logic [31:0] tcount[NN];
  logic pavail[NN], pop[NN]; logic [31:0] ptag[NN]; logic [11:0] plen[NN]; dword_t pword[NN];
  int ncst[NN], nctr[NN];

  // packet store of each unit: words queue and packet queue {tag, len}
  logic [31:0] qtag[NN][$];
  int          qlen[NN][$];
  logic [31:0] qw[NN][$];
  int          rdpos[NN];

  for (genvar n = 0; n < NN; n++) begin : g_node
    assign hop_in[n+1] = ntx[n];
    tdlink_node u (.clk, .rst_n, .rx_i(hop_out[n]), .tx_o(ntx[n]), .time_load_o(tload[n]),
      .time_load_val_o(tval[n]), .cmd_start_o(cst[n]), .cmd_stop_o(csp[n]), .cmd_trg_o(ctr[n]),
      .reg_wr_o(rwr[n]), .reg_addr_o(raddr[n]), .reg_data_o(rdata[n]), .addr_o(naddr[n]),
      .running_i(running[n]), .trg_count_i(tcount[n]), .pending_i(1'b0), .pending_tag_i(32'h0),
      .pkt_avail_i(pavail[n]), .pkt_tag_i(ptag[n]), .pkt_len_i(plen[n]), .rd_pop_o(pop[n]),
      .rd_word_i(pword[n]));
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) ntime[n] <= '0; else if (tload[n]) ntime[n] <= tval[n]; else ntime[n] <= ntime[n] + 1;
    always_comb begin
      pavail[n] = qtag[n].size() > 0;
      ptag[n]   = pavail[n] ? qtag[n][0] : 32'h0;
      plen[n]   = pavail[n] ? 12'(qlen[n][0]) : 12'h0;
      pword[n]  = '{data: (qw[n].size() > 0) ? qw[n][0] : 32'h0, last: pavail[n] && rdpos[n] == qlen[n][0] - 1};
    end
    always @(posedge clk) if (rst_n) begin
      if (cst[n]) ncst[n]++;
      if (ctr[n]) nctr[n]++;
      if (pop[n]) begin
        void'(qw[n].pop_front());
        rdpos[n]++;
        if (rdpos[n] == qlen[n][0]) begin rdpos[n] = 0; void'(qtag[n].pop_front()); void'(qlen[n].pop_front()); end
      end
    end
  end

  // -------------------------------------------------- expected output log
  logic [31:0] exp_q[$];   // expected words (SOP word and data words)
  logic        exp_sop[$];
  logic [31:0] exp_node_q[NN][$];   // vertical mode: per node
  int got_words = 0;
  bit vmode = 0;
  int cur_node = -1, cur_left = 0, vtok_words = 0, vtok_max_seen = 0;

  task automatic add_packet(int n, logic [31:0] tag, int len, bit expect_out);
    logic [31:0] w;
    qtag[n].push_back(tag); qlen[n].push_back(len);
    if (expect_out && !vmode) begin exp_q.push_back({8'(n), 12'h0, 12'(len)}); exp_sop.push_back(1); end
    if (expect_out && vmode) exp_node_q[n].push_back({8'(n), 12'h0, 12'(len)});
    for (int i = 0; i < len; i++) begin
      w = $urandom;
      qw[n].push_back(w);
      if (expect_out && !vmode) begin exp_q.push_back(w); exp_sop.push_back(0); end
      if (expect_out && vmode) exp_node_q[n].push_back(w);
    end
  endtask

  always @(posedge clk) if (rst_n && ovalid) begin
    got_words++;
    if (!vmode) begin
      chk(exp_q.size() > 0, "unexpected word");
      if (exp_q.size() > 0) begin
        chk(oword.data == exp_q[0] && osop == exp_sop[0], $sformatf("h word %h exp %h", oword.data, exp_q[0]));
        void'(exp_q.pop_front()); void'(exp_sop.pop_front());
      end
    end else begin
      if (osop) begin cur_node = oword.data[31:24]; vtok_words += int'(oword.data[11:0]); end
      chk(cur_node >= 0 && cur_node < NN && exp_node_q[cur_node].size() > 0, "v word node");
      if (cur_node >= 0 && cur_node < NN && exp_node_q[cur_node].size() > 0) begin
        chk(oword.data == exp_node_q[cur_node][0], "v word");
        void'(exp_node_q[cur_node].pop_front());
      end
    end
  end

  task automatic wait_ready(); do @(negedge clk); while (!ready); endtask

  int skips = 0, drops = 0;
  initial begin
    init = 0; cmd = 0; regwr = 0; hread = 0; vpoll = 0; cmdc = 0; regd = 0; hidx = 0; regn = 0; rega = 0; vmax = 24'd8;
    for (int n = 0; n < NN; n++) begin running[n] = 0; tcount[n] = 0; rdpos[n] = 0; ncst[n] = 0; nctr[n] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    // ---------------------------------------------------------- start-up
    init = 1; @(negedge clk); init = 0;
    while (!idone) @(negedge clk);
    chk(nnodes == NN, $sformatf("node count %0d", nnodes));
    chk(hop == LD, $sformatf("hop %0d", hop));
    chk(!serr, "sync error flag");
    for (int n = 0; n < NN; n++) begin
      chk(naddr[n] == 8'(n), "address");
      chk(ntime[n] == mnow, $sformatf("node %0d time %0d master %0d", n, ntime[n], mnow));
    end
    // ---------------------------------------------------------- commands
    @(negedge clk) cmd = 1; cmdc = CMD_START; @(negedge clk) cmd = 0;
    repeat (3) begin @(negedge clk) cmd = 1; cmdc = CMD_TRIGGER; @(negedge clk) cmd = 0; end
    repeat (60) @(negedge clk);
    for (int n = 0; n < NN; n++) chk(ncst[n] == 1 && nctr[n] == 3, "command pulses");
    // ---------------------------------------------------- register writes
    begin
      int hits[NN];
      for (int n = 0; n < NN; n++) hits[n] = 0;
      fork
        forever @(posedge clk) for (int n = 0; n < NN; n++) if (rwr[n]) begin
          hits[n]++;
          chk(raddr[n] == 8'h05 && rdata[n] == ((n == 2) ? 32'hCAFE0000 + 32'(hits[n]) : 32'hCAFE0002), "reg write value");
        end
        begin
          wait_ready(); regwr = 1; regn = 8'd2; rega = 8'h05; regd = 32'hCAFE0001; @(negedge clk) regwr = 0;
          repeat (60) @(negedge clk);
          wait_ready(); regwr = 1; regn = NODE_BROADCAST; regd = 32'hCAFE0002; @(negedge clk) regwr = 0;
          repeat (60) @(negedge clk);
        end
      join_any
      disable fork;
      chk(hits[2] == 2, "addressed write reached node 2 twice");
      for (int n = 0; n < NN; n++) if (n != 2) checks++;
      for (int n = 0; n < NN; n++) if (n != 2 && hits[n] != 1) begin failures++; $display("FAIL write count node %0d", n); end
    end
    // ------------------------------------------------ horizontal readout
    for (int n = 0; n < NN; n++) running[n] = 1;
    for (int k = 0; k < 200; k++) begin
      for (int n = 0; n < NN; n++) begin
        if ($urandom_range(0, 9) == 0) begin add_packet(n, 32'(k) - 32'd7, $urandom_range(1, 5), 0); drops++; end
        if ($urandom_range(0, 3) != 0) add_packet(n, 32'(k), $urandom_range(1, 12), 1);
        else skips++;
      end
      // the trigger reaches each unit a little later
      fork
        begin
          wait_ready(); hread = 1; hidx = 32'(k); @(negedge clk) hread = 0;
        end
        begin
          repeat ($urandom_range(0, 30)) @(negedge clk);
          for (int n = 0; n < NN; n++) tcount[n] = 32'(k + 1);
        end
      join
      while (!done) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0, $sformatf("%0d words missing", exp_q.size()));
    $display("horizontal: %0d words, %0d skips, %0d stale packets", got_words, skips, drops);
    // -------------------------------------------------- vertical readout
    for (int n = 0; n < NN; n++) running[n] = 0;
    vmode = 1;
    for (int n = 0; n < NN; n++) begin
      int np = (n == 3) ? 0 : $urandom_range(1, 20);
      for (int p = 0; p < np; p++) add_packet(n, 32'(1000 + p), $urandom_range(1, 6), 1);
    end
    fork
      forever begin
        @(posedge clk);
        if (rst_n && ovalid === 1'b0 && done) begin
          chk(vtok_words <= 8, "token word limit");
          vtok_words = 0;
        end
      end
      begin
        vpoll = 1;
        repeat (20000) @(negedge clk);
        vpoll = 0;
      end
    join_any
    disable fork;
    wait_ready();
    for (int n = 0; n < NN; n++) chk(exp_node_q[n].size() == 0 && qtag[n].size() == 0, $sformatf("vertical node %0d left %0d", n, exp_node_q[n].size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
