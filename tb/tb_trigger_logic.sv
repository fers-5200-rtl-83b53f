// tb_trigger_logic: each trigger source in turn.  OR and majority fire once
// per rising crossing of the level (count of enabled active channels,
// counted here independently), one clock later; T1 fires on its rising edge
// after the synchronizer; periodic, link and software pulses pass with one
// clock of delay; T-OR follows the enabled OR.
`timescale 1ns/1ps
module tb_trigger_logic;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  trg_src_e src;
  logic [6:0] lvl;
  logic [N_CH-1:0] en, act;
  logic t1, per, lnk, sw, trg, tor;
  int checks = 0, failures = 0;
  trigger_logic dut (.clk, .rst_n, .src_i(src), .maj_level_i(lvl), .ch_enable_i(en), .active_i(act),
    .t1_i(t1), .periodic_i(per), .link_trg_i(lnk), .sw_trg_i(sw), .trg_o(trg), .t_or_o(tor));

  function automatic int cnt(logic [N_CH-1:0] v);
    int c = 0; for (int i = 0; i < N_CH; i++) c += v[i]; return c;
  endfunction

  logic exp_q, cond_prev, tor_exp;
  logic [2:0] t1s;
  int ntrg;
  initial begin
    src = TSRC_OR; lvl = 1; en = '1; act = '0; t1 = 0; per = 0; lnk = 0; sw = 0;
    cond_prev = 0; t1s = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      @(negedge clk);
      src = trg_src_e'(s); lvl = (s == 1) ? 7'd5 : 7'd1;
      en  = {$urandom, $urandom};
      act = '0; t1 = 0; per = 0; lnk = 0; sw = 0;
      repeat (4) @(negedge clk);
      cond_prev = 0; ntrg = 0;
      for (int i = 0; i < 400; i++) begin
        logic cond, expd;
        @(negedge clk);
        // new inputs
        act = ($urandom_range(0, 3) == 0) ? {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} : '0;
        if ($urandom_range(0, 9) == 0) t1 = ~t1;
        per = ($urandom_range(0, 9) == 0);
        lnk = ($urandom_range(0, 9) == 0);
        sw  = ($urandom_range(0, 9) == 0);
        cond = (s == 0) ? (cnt(act & en) >= 1) : (s == 1) ? (cnt(act & en) >= 5) : 1'b0;
        case (s)
          0, 1: expd = cond && !cond_prev;
          3: expd = per;
          4: expd = lnk;
          5: expd = sw;
          default: expd = 1'b0;
        endcase
        cond_prev = cond;
        tor_exp = |(act & en);
        @(posedge clk); #1;
        if (s != 2) begin
          checks++;
          if (trg != expd) begin failures++; $display("src %0d cyc %0d trg %b exp %b", s, i, trg, expd); end
        end
        checks++; if (tor != tor_exp) failures++;
        if (s == 2) begin
          // T1: compare with a 3-stage model, sampled at this edge
          t1s = {t1s[1:0], t1};
        end
      end
    end
    // T1 edge latency: clean edge, pulse expected 3 clocks later
    @(negedge clk); src = TSRC_T1; t1 = 0; repeat (5) @(negedge clk);
    t1 = 1;
    ntrg = 0;
    for (int i = 1; i <= 6; i++) begin
      @(posedge clk); #1;
      if (trg) begin ntrg++; checks++; if (i != 3) begin failures++; $display("T1 latency %0d", i); end end
    end
    checks++; if (ntrg != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
