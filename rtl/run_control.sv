// run_control: run state and the unit's bookkeeping counters.
//
// A start command (from the TDlink or a register) sets running_o and gives a
// one-clock start_o pulse on which the acquisition engines clear themselves;
// it also records the run start time (0.5 ns units, the origin of absolute
// timing-mode stamps).  A stop command clears running_o.
// While running, every trigger is numbered: trg_id_o is the index the
// current trigger gets (0 for the first of the run) and trg_count_o the
// number seen so far -- including triggers lost because the unit was busy, so
// that indices stay aligned across the units of a network.  real_time_o
// counts running clocks (the clock of the stop included), dead_time_o
// running clocks with busy_i high (a
// conversion in progress or the acquisition paused by a full buffer), and
// lost_count_o the lost triggers.  Real and dead time counters and the
// dead-time sources come from the system description; the counter widths
// (64 bits for times, 32 for counts) are this design's.
module run_control
  import fers_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic              stop_i,
  input  logic              trg_i,
  input  logic              busy_i,
  input  logic              lost_i,
  input  logic [TIME_W-1:0] now_i,
  output logic              running_o,
  output logic              start_o,
  output logic [TIME_W-1:0] start_time_o,
  output logic [31:0]       trg_id_o,
  output logic [31:0]       trg_count_o,
  output logic [31:0]       lost_count_o,
  output logic [TIME_W-1:0] real_time_o,
  output logic [TIME_W-1:0] dead_time_o
);
  assign trg_id_o = trg_count_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_o <= 1'b0; start_o <= 1'b0; start_time_o <= '0;
      trg_count_o <= '0; lost_count_o <= '0; real_time_o <= '0; dead_time_o <= '0;
    end else begin
      start_o <= 1'b0;
      if (start_i) begin
        running_o    <= 1'b1;
        start_o      <= 1'b1;
        start_time_o <= {now_i[TIME_W-FINE_W-1:0], {FINE_W{1'b0}}};
        trg_count_o  <= '0;
        lost_count_o <= '0;
        real_time_o  <= '0;
        dead_time_o  <= '0;
      end else begin
        // the clock of the stop still belongs to the run
        if (stop_i) running_o <= 1'b0;
        if (running_o) begin
          real_time_o <= real_time_o + 1'b1;
          if (busy_i) dead_time_o <= dead_time_o + 1'b1;
          if (trg_i)  trg_count_o <= trg_count_o + 1'b1;
        end
        // a refusal is reported one clock after its trigger
        if (lost_i) lost_count_o <= lost_count_o + 1'b1;
      end
    end
  end
endmodule
