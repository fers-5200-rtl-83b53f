// tb_time_counter: the counter advances one per clock, takes a loaded value
// on the next clock, and clears; compared with a model counter.
`timescale 1ns/1ps
module tb_time_counter;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic clear, load;
  logic [TIME_W-1:0] val, now, model;
  int checks = 0, failures = 0;
  time_counter dut (.clk, .rst_n, .clear_i(clear), .load_i(load), .load_val_i(val), .now_o(now));
  initial begin
    clear = 0; load = 0; val = '0; model = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      checks++; if (now != model) begin failures++; $display("t=%0d now=%0d model=%0d", i, now, model); end
      load  = ($urandom_range(0, 49) == 0);
      clear = ($urandom_range(0, 79) == 0);
      val   = {$urandom, $urandom};
      @(posedge clk);
      model = load ? val : clear ? '0 : model + 1;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
