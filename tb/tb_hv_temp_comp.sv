// tb_hv_temp_comp: random set-points, coefficients and temperatures compared
// with a floor-division reference, including the clamp to the bias range.
`timescale 1ns/1ps
module tb_hv_temp_comp;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [16:0] vset, vout;
  logic signed [15:0] coef, tref, temp;
  logic tv, ov;
  int checks = 0, failures = 0;
  hv_temp_comp dut (.clk, .rst_n, .vset_i(vset), .coef_i(coef), .tref_i(tref), .temp_valid_i(tv),
    .temp_i(temp), .vout_o(vout), .vout_valid_o(ov));
  initial begin
    longint p, c, v;
    tv = 0; vset = 0; coef = 0; tref = 0; temp = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      vset = 17'($urandom_range(15000, 95000));
      coef = 16'($signed($urandom_range(0, 40000)) - 20000);
      tref = 16'($urandom_range(1500, 3500));
      temp = 16'($signed($urandom_range(0, 8000)) - 2000);
      tv = 1;
      p = (longint'(temp) - longint'(tref)) * longint'(coef);
      c = p / 25600; if (p < 0 && p % 25600 != 0) c--;
      v = longint'(vset) + c;
      if (v < 20000) v = 20000; if (v > 85000) v = 85000;
      @(posedge clk); #1;
      checks += 2;
      if (!ov) failures++;
      if (longint'(vout) != v) begin failures++; if (failures < 5) $display("vout %0d exp %0d", vout, v); end
      tv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
