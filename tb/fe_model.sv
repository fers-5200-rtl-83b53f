// fe_model: test model of the analog front end of one unit: two 32-channel
// ASICs with their self-trigger outputs seen through the 2 GS/s serializers,
// and the two multiplexed ADCs.
//   * fire(ch, bin, width) (task) puts a pulse on channel ch starting in
//     0.5 ns bin `bin` of the next clock word and lasting `width` bins.
//   * set_charge(ch, q, qt) sets the charge the channel holds and its charge
//     discriminator bit.
//   * The ADC answers an adc_start with the charges of the multiplexer
//     channel of both ASICs after a few clocks.  Charges are only reported
//     while hold is high (outside hold the model returns 16'hDEAD so that a
//     conversion outside the hold window is visible).
`timescale 1ns/1ps
module fe_model
  import fers_pkg::*;
(
  input  logic                 clk,
  output logic [FINE_BINS-1:0] trg_samples_o [N_CH],
  input  logic                 hold_i,
  input  logic [4:0]           mux_sel_i,
  input  logic                 adc_start_i,
  output logic                 adc_valid_o,
  output logic [CHARGE_W-1:0]  adc_data_o [N_ASIC],
  output logic [N_ASIC-1:0]    qtrg_o
);
  // pending pulse bits per channel: bit i = sample i counted from the next word
  bit [1023:0] pend [N_CH];
  logic [CHARGE_W-1:0] q [N_CH];
  bit                  qt [N_CH];

  initial begin
    for (int c = 0; c < N_CH; c++) begin pend[c] = '0; q[c] = 16'(c * 100); qt[c] = 1; end
    for (int c = 0; c < N_CH; c++) trg_samples_o[c] = '0;
    adc_valid_o = 0; adc_data_o[0] = '0; adc_data_o[1] = '0; qtrg_o = '0;
  end

  function automatic void fire(int ch, int bin, int width);
    for (int i = 0; i < width; i++) pend[ch][bin + i] = 1'b1;
  endfunction

  function automatic void set_charge(int ch, logic [CHARGE_W-1:0] qq, bit t);
    q[ch] = qq; qt[ch] = t;
  endfunction

  always @(posedge clk) begin
    #1;
    for (int c = 0; c < N_CH; c++) begin
      trg_samples_o[c] = pend[c][FINE_BINS-1:0];
      pend[c] = pend[c] >> FINE_BINS;
    end
  end

  initial forever begin
    @(posedge clk);
    if (adc_start_i) begin
      int ch;
      ch = mux_sel_i;
      repeat (4) @(posedge clk);
      #1;
      adc_valid_o = 1;
      adc_data_o[0] = hold_i ? q[ch] : 16'hDEAD;
      adc_data_o[1] = hold_i ? q[32 + ch] : 16'hDEAD;
      qtrg_o = {qt[32 + ch], qt[ch]};
      @(posedge clk); #1 adc_valid_o = 0;
    end
  end
endmodule
