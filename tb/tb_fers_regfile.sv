// tb_fers_regfile: reset values, random writes from both ports (the link port
// wins when both write in the same clock), read-back, the decoded
// configuration and the command pulses.
`timescale 1ns/1ps
module tb_fers_regfile;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic lwr, uwr, swtrg, startp, stopp;
  logic [7:0] la, ua, ra;
  logic [31:0] ld, ud, rd, hvset, hvcoef;
  fers_cfg_t cfg;
  int checks = 0, failures = 0;
  fers_regfile dut (.clk, .rst_n, .link_wr_i(lwr), .link_addr_i(la), .link_data_i(ld), .uc_wr_i(uwr),
    .uc_addr_i(ua), .uc_data_i(ud), .rd_addr_i(ra), .rd_data_o(rd), .cfg_o(cfg), .sw_trg_o(swtrg),
    .start_o(startp), .stop_o(stopp), .hvset_o(hvset), .hvcoef_o(hvcoef));

  logic [31:0] m [0:15];
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask

  initial begin
    bit ew; logic [7:0] ea; logic [31:0] ed;
    {lwr, uwr} = '0; la = 0; ua = 0; ld = 0; ud = 0; ra = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    #1;
    chk(cfg.mode == MODE_SPECT && cfg.trg_src == TSRC_LINK && cfg.ch_enable == '1, "reset cfg");
    chk(cfg.hold_delay == 12 && cfg.dwell == 125000 && cfg.pkt_hits == 16 && hvset == 55000, "reset vals");
    for (int a = 0; a < 16; a++) begin ra = 8'(a); #1; m[a] = rd; end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      lwr = $urandom_range(0, 2) == 0; uwr = $urandom_range(0, 2) == 0;
      la = 8'($urandom_range(0, 11)); ua = 8'($urandom_range(0, 11));
      ld = $urandom; ud = $urandom;
      if ($urandom_range(0, 3) == 0) begin ld = 32'($urandom_range(0, 3)); ud = 32'($urandom_range(0, 3)); end
      ew = lwr || uwr; ea = lwr ? la : ua; ed = lwr ? ld : ud;
      @(posedge clk); #1;
      lwr = 0; uwr = 0;
      if (ew && ea <= 8'h09 && ea != REG_SWTRG) m[ea] = ed;
      chk(swtrg == (ew && ea == REG_SWTRG), "swtrg");
      chk(startp == (ew && ea == REG_RUN && ed == CMD_START), "start");
      chk(stopp == (ew && ea == REG_RUN && ed == CMD_STOP), "stop");
      ra = 8'($urandom_range(0, 12)); #1;
      chk(rd == ((ra <= 8'h09 && ra != REG_SWTRG) ? m[ra] : 32'h0), "readback");
      chk(cfg.mode == acq_mode_e'(m[0][1:0]) && cfg.trg_src == trg_src_e'(m[0][6:4]) &&
          cfg.maj_level == m[0][13:7] && cfg.zs_en == m[0][14] && cfg.dt_mode == m[0][15] &&
          cfg.ts_lsb == m[0][19:16] && cfg.tsub == timing_sub_e'(m[0][3:2]), "mode decode");
      chk(cfg.ch_enable == {m[2], m[1]} && cfg.dwell == m[3] && cfg.hold_delay == m[4][7:0] &&
          cfg.window == m[5][23:0] && cfg.pkt_hits == m[6][11:0] && hvset == m[8] && hvcoef == m[9], "cfg");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
