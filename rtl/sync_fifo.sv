// sync_fifo: single-clock first-in first-out memory.
//
// A circular buffer of DEPTH entries of W bits, written as a memory array so
// that an FPGA tool maps it to block RAM.  push_i writes din_i when the FIFO
// is not full (or is popped on the same clock); pop_i removes the head when it is not empty.  The head is read
// combinationally (dout_o, first-word-fall-through).  level_o counts the
// entries; free_o the free places.  Pushing when full or popping when empty is
// ignored (and flagged by the assertions).
module sync_fifo #(
  parameter int unsigned W     = 33,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear_i,
  input  logic                       push_i,
  input  logic [W-1:0]               din_i,
  input  logic                       pop_i,
  output logic [W-1:0]               dout_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH+1)-1:0] level_o,
  output logic [$clog2(DEPTH+1)-1:0] free_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [CW-1:0] cnt_q;
  logic          do_push, do_pop;

  assign empty_o = (cnt_q == 0);
  assign full_o  = (cnt_q == CW'(DEPTH));
  assign level_o = cnt_q;
  assign free_o  = CW'(DEPTH) - cnt_q;
  assign dout_o  = mem[rp_q];
  assign do_push = push_i && (!full_o || pop_i);
  assign do_pop  = pop_i && !empty_o;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q] <= din_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0; rp_q <= '0; cnt_q <= '0;
    end else if (clear_i) begin
      wp_q <= '0; rp_q <= '0; cnt_q <= '0;
    end else begin
      if (do_push) wp_q <= incr(wp_q);
      if (do_pop)  rp_q <= incr(rp_q);
      cnt_q <= cnt_q + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push_i |-> !full_o || pop_i);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> !empty_o);
endmodule
