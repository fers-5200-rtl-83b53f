// tb_sync_fifo: random push/pop traffic (including push and pop on a full
// FIFO in the same clock, and clear) compared with a queue model: data order,
// first-word-fall-through output, empty/full flags, level and free counts.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic push, pop, clr, empty, full;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] level, free;
  int checks = 0, failures = 0;
  sync_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .clear_i(clr), .push_i(push), .din_i(din), .pop_i(pop),
    .dout_o(dout), .empty_o(empty), .full_o(full), .level_o(level), .free_o(free));
  logic [W-1:0] q[$];
  initial begin
    push = 0; pop = 0; clr = 0; din = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      checks += 4;
      if (empty != (q.size() == 0)) failures++;
      if (full != (q.size() == D)) failures++;
      if (int'(level) != q.size() || int'(free) != D - q.size()) failures++;
      if (q.size() > 0 && dout != q[0]) begin failures++; if (failures < 5) $display("dout %h exp %h", dout, q[0]); end
      clr = ($urandom_range(0, 999) == 0);
      pop = (q.size() > 0) && $urandom_range(0, 1);
      push = (q.size() < D || pop) && $urandom_range(0, 1);
      din = W'($urandom);
      @(posedge clk);
      if (clr) q = {};
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
