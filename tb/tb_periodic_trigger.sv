// tb_periodic_trigger: the distance between trigger pulses must be exactly
// the programmed dwell time, for several dwell values including the 1 us
// minimum (125 clocks of 8 ns); no pulse while disabled.
`timescale 1ns/1ps
module tb_periodic_trigger;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic en, trg;
  logic [31:0] dwell;
  int checks = 0, failures = 0;
  periodic_trigger dut (.clk, .rst_n, .enable_i(en), .dwell_i(dwell), .trg_o(trg));
  int dw [4] = '{125, 7, 1000, 300};
  initial begin
    en = 0; dwell = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (dw[k]) begin
      int last, cyc, n;
      @(negedge clk); dwell = dw[k]; en = 1;
      cyc = 0; last = 0; n = 0;
      while (n < 5) begin
        @(posedge clk); #1; cyc++;
        if (trg) begin
          checks++;
          if (cyc - last != dw[k]) begin failures++; $display("dwell %0d: gap %0d", dw[k], cyc - last); end
          last = cyc; n++;
        end
      end
      @(negedge clk); en = 0;
      repeat (3000) begin @(posedge clk); #1; if (trg) begin failures++; break; end end
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
