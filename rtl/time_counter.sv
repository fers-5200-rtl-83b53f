// time_counter: the unit's 64-bit absolute time, one count per 8 ns clock.
//
// Every unit of a network keeps its own copy.  The TDlink synchronization
// loads it with the value the link master's time has at that moment
// (load_i/load_val_i, taking effect on the next clock), so all copies read the
// same number on the same clock edge.  clear_i (a time-reset command or the
// S-link time reset) sets it to zero.  Load has priority over clear.
// The 64-bit width and 8 ns step follow the system description; the
// load/clear interface is this design's.
module time_counter
  import fers_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_i,
  input  logic              load_i,
  input  logic [TIME_W-1:0] load_val_i,
  output logic [TIME_W-1:0] now_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       now_o <= '0;
    else if (load_i)  now_o <= load_val_i;
    else if (clear_i) now_o <= '0;
    else              now_o <= now_o + 1'b1;
  end
endmodule
