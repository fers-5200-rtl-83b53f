// tdc_channel: 0.5 ns TDC for one self-trigger input, built in FPGA logic.
//
// The front-end ASIC gives one digital self-trigger per channel and has no
// TDC of its own; the unit measures the trigger edges in the FPGA with a
// 0.5 ns bin.  The input is sampled by the FPGA's serializer at 2 GS/s and
// arrives here as 16 samples per 8 ns clock (samples[0] is the earliest).
// Each clock the channel looks for the first rising and the first falling
// transition in the word, counting the last sample of the previous word as
// the sample before samples[0].  A time in 0.5 ns units is {coarse, bin},
// with coarse the 64-bit absolute time of the clock whose word holds the edge.
//
// Outputs, all registered (one clock after the word):
//   lead_o / lead_time_o   rising edge seen, its time
//   active_o               any sample of the word was high (for OR/majority)
//   hit_o                  a falling edge closed a pulse: hit_time_o is its
//                          leading edge and hit_tot_o the time over threshold
//                          in 0.5 ns bins, saturated to 16 bits.
// The 0.5 ns bin is the system's figure; the oversampling scheme, the
// "first edge in a word" rule and saturation of the ToT are this design's.
module tdc_channel
  import fers_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [FINE_BINS-1:0]  samples_i,
  input  logic [TIME_W-1:0]     now_i,        // absolute time of this clock
  output logic                  active_o,
  output logic                  lead_o,
  output logic [TIME_W-1:0]     lead_time_o,  // 0.5 ns units
  output logic                  hit_o,
  output logic [TIME_W-1:0]     hit_time_o,
  output logic [TOT_W-1:0]      hit_tot_o
);

  logic                 prev_q;       // last sample of the previous word (pulse open)
  logic [TIME_W-1:0]    open_lead_q;  // its time

  logic                 rise, fall;
  logic [FINE_W-1:0]    rise_bin, fall_bin, lrise_bin;
  logic [TIME_W-1:0]    rise_t, fall_t, lrise_t;
  logic [TIME_W-1:0]    tot_full;

  // first rising / falling transition inside the word
  always_comb begin
    logic p;
    rise = 1'b0; fall = 1'b0;
    rise_bin = '0; fall_bin = '0; lrise_bin = '0;
    p = prev_q;
    for (int i = 0; i < FINE_BINS; i++) begin
      if (!p && samples_i[i] && !rise) begin
        rise = 1'b1; rise_bin = FINE_W'(i);
      end
      if (!p && samples_i[i]) lrise_bin = FINE_W'(i);
      if (p && !samples_i[i] && !fall) begin
        fall = 1'b1; fall_bin = FINE_W'(i);
      end
      p = samples_i[i];
    end
    rise_t = {now_i[TIME_W-FINE_W-1:0], rise_bin};
    fall_t = {now_i[TIME_W-FINE_W-1:0], fall_bin};
    lrise_t = {now_i[TIME_W-FINE_W-1:0], lrise_bin};
  end

  // The pulse that a fall closes: if the fall comes before the rise in the
  // same word it closes the pulse already open, otherwise the one just opened.
  logic              closes;
  logic [TIME_W-1:0] closed_lead;
  always_comb begin
    closes      = 1'b0;
    closed_lead = open_lead_q;
    if (fall) begin
      if (rise && (rise_bin < fall_bin)) begin
        closes      = 1'b1;
        closed_lead = rise_t;
      end else if (prev_q) begin
        closes      = 1'b1;
        closed_lead = open_lead_q;
      end
    end
    tot_full = fall_t - closed_lead;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q      <= 1'b0;
      open_lead_q <= '0;
      active_o    <= 1'b0;
      lead_o      <= 1'b0;
      lead_time_o <= '0;
      hit_o       <= 1'b0;
      hit_time_o  <= '0;
      hit_tot_o   <= '0;
    end else begin
      prev_q   <= samples_i[FINE_BINS-1];
      active_o <= |samples_i;
      lead_o   <= rise;
      if (rise) lead_time_o <= rise_t;
      hit_o    <= closes;
      if (closes) begin
        hit_time_o <= closed_lead;
        hit_tot_o  <= (tot_full > TIME_W'({TOT_W{1'b1}})) ? {TOT_W{1'b1}} : tot_full[TOT_W-1:0];
      end
      // a pulse still open at the end of the word began at its last rise
      if (rise) open_lead_q <= lrise_t;
    end
  end

endmodule
