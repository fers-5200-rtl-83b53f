// periodic_trigger: internal trigger with a programmable dwell time.
//
// In counting mode the counting intervals are usually set by an internal
// periodic signal with a dwell time from 1 us to 10 s.  At 8 ns per clock
// that is 125 to 1.25e9 clocks, so the period register is 32 bits wide.
// While enable_i is high a one-clock pulse trg_o is produced every dwell_i
// clocks, the first one dwell_i clocks after enable rises.  A dwell_i of 0 or
// 1 gives a pulse on every clock.  The counter restarts whenever enable_i is low.
module periodic_trigger (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable_i,
  input  logic [31:0] dwell_i,   // period in clocks
  output logic        trg_o
);
  logic [31:0] cnt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      trg_o <= 1'b0;
    end else if (!enable_i) begin
      cnt_q <= '0;
      trg_o <= 1'b0;
    end else if (cnt_q + 32'd1 >= dwell_i) begin
      cnt_q <= '0;
      trg_o <= 1'b1;
    end else begin
      cnt_q <= cnt_q + 32'd1;
      trg_o <= 1'b0;
    end
  end
endmodule
