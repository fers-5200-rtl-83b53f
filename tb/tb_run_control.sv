// tb_run_control: random start/stop/trigger/busy/lost traffic compared with a
// reference model of the run counters and the start time.
`timescale 1ns/1ps
module tb_run_control;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic start, stop, trg, busy, lost, running, start_p;
  logic [TIME_W-1:0] now, st, rt, dt;
  logic [31:0] tid, tc, lc;
  int checks = 0, failures = 0;
  run_control dut (.clk, .rst_n, .start_i(start), .stop_i(stop), .trg_i(trg), .busy_i(busy), .lost_i(lost),
    .now_i(now), .running_o(running), .start_o(start_p), .start_time_o(st), .trg_id_o(tid),
    .trg_count_o(tc), .lost_count_o(lc), .real_time_o(rt), .dead_time_o(dt));

  bit m_run, m_sp; longint unsigned m_st, m_rt, m_dt; int unsigned m_tc, m_lc;

  initial begin
    {start, stop, trg, busy, lost} = '0; now = 64'd1000;
    m_run = 0; m_sp = 0; m_st = 0; m_rt = 0; m_dt = 0; m_tc = 0; m_lc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      now = now + 1;
      start = ($urandom_range(0, 400) == 0); stop = ($urandom_range(0, 400) == 0);
      trg = $urandom_range(0, 3) == 0; busy = $urandom_range(0, 1); lost = trg && $urandom_range(0, 1);
      if (i == 10) start = 1;
      @(posedge clk);
      // model
      m_sp = 0;
      if (start) begin m_run = 1; m_sp = 1; m_st = {now[59:0], 4'h0}; m_tc = 0; m_lc = 0; m_rt = 0; m_dt = 0; end
      else begin
        if (m_run) begin m_rt++; if (busy) m_dt++; if (trg) m_tc++; end
        if (lost) m_lc++;
        if (stop) m_run = 0;
      end
      #1;
      checks += 7;
      if (running != m_run || start_p != m_sp || st != m_st || tc != m_tc || tid != m_tc) begin failures++; if (failures < 5) $display("%0d run %b/%b sp %b/%b st %0d/%0d tc %0d/%0d", i, running, m_run, start_p, m_sp, st, m_st, tc, m_tc); end
      if (lc != m_lc || rt != m_rt || dt != m_dt) begin failures++; if (failures < 5) $display("cnt mismatch %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
