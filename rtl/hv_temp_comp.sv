// hv_temp_comp: temperature compensation of the SiPM bias set-point.
//
// The gain of a SiPM drifts with temperature; the bias supply of the unit
// therefore runs a feedback loop on a temperature sensor.  This block gives
// the digital part of that loop: from the user's set-point vset_i (mV), the
// compensation coefficient coef_i (mV per degC, signed, 8 fractional bits)
// and the reference temperature tref_i, it computes on each new temperature
// reading (temp_valid_i, temp_i in 0.01 degC)
//     vout = vset + coef * (temp - tref) / 100 / 256
// rounded toward minus infinity and clamped to the supply's 20..85 V range
// (20000..85000 mV).  The result is registered one clock after the reading.
// The feedback loop and the 20-85 V range are the system's; the linear law,
// number formats and clamping are this design's.
module hv_temp_comp #(
  parameter int VMIN_MV = 20000,
  parameter int VMAX_MV = 85000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic        [16:0] vset_i,       // mV
  input  logic signed [15:0] coef_i,       // mV/degC, Q8.8
  input  logic signed [15:0] tref_i,       // 0.01 degC
  input  logic               temp_valid_i,
  input  logic signed [15:0] temp_i,       // 0.01 degC
  output logic        [16:0] vout_o,       // mV
  output logic               vout_valid_o
);
  logic signed [16:0] dtemp;
  logic signed [33:0] prod;
  logic signed [33:0] corr;
  logic signed [34:0] v;

  always_comb begin
    dtemp = 17'(temp_i) - 17'(tref_i);
    prod  = 34'(dtemp) * 34'(coef_i);          // 0.01 degC * mV/degC * 256
    corr  = prod / 34'sd25600;                 // mV
    if (prod < 0 && (prod % 34'sd25600) != 0) corr = corr - 1;
    v     = 35'($signed({1'b0, vset_i})) + 35'(corr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vout_o <= '0; vout_valid_o <= 1'b0;
    end else begin
      vout_valid_o <= temp_valid_i;
      if (temp_valid_i) begin
        if (v < 35'(VMIN_MV))      vout_o <= 17'(VMIN_MV);
        else if (v > 35'(VMAX_MV)) vout_o <= 17'(VMAX_MV);
        else                       vout_o <= v[16:0];
      end
    end
  end
endmodule
