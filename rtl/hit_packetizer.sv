// hit_packetizer: groups the hits of the timing modes into packets.
//
// Hits from timing_acq wait in a FIFO of HIT_DEPTH entries.  As soon as
// pkt_hits_i of them are there (or, with flush_i, at least one), and the
// event buffer has room, one packet is written, one word per clock:
//   word 0   {header = {PKT_TIMING or PKT_TOT, length}, number of hits}
//   then per hit  {2'b0, channel[5:0], time stamp[23:0]}
//   and in ToT mode a second word {16'h0, ToT[15:0]}.
// A packet of n hits is 1+n words (timing) or 1+2n words (ToT).  The tag of
// the packet is its index since the run start.  in_ready_o falls when the
// FIFO is full, which pauses the hit collection upstream.  The packet size is
// programmable as the system describes; the FIFO size, word layout and the
// flush at the end of a run are this design's.
module hit_packetizer
  import fers_pkg::*;
#(
  parameter int unsigned HIT_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_i,       // run start: clears FIFO and index
  input  logic        tot_mode_i,
  input  logic [11:0] pkt_hits_i,
  input  logic        flush_i,       // emit a partial packet
  input  logic        in_valid_i,
  input  hit_t        in_hit_i,
  output logic        in_ready_o,
  input  logic [12:0] buf_free_i,
  output logic        wr_o,
  output dword_t      wr_word_o,
  output logic [31:0] wr_tag_o
);
  localparam int unsigned LW = $clog2(HIT_DEPTH+1);

  hit_t          head;
  logic          f_empty, f_full, pop;
  logic [LW-1:0] level;
  logic [11:0]   target, n, n_q, sent_q;
  logic [12:0]   need;
  logic          busy_q, phase_q, go;
  logic [31:0]   idx_q;

  sync_fifo #(.W($bits(hit_t)), .DEPTH(HIT_DEPTH)) u_hits (
    .clk, .rst_n, .clear_i(start_i),
    .push_i(in_valid_i && !f_full), .din_i(in_hit_i),
    .pop_i(pop), .dout_o(head),
    .empty_o(f_empty), .full_o(f_full), .level_o(level), .free_o());

  assign in_ready_o = !f_full;

  always_comb begin
    target = (pkt_hits_i == 0) ? 12'd1 :
             (pkt_hits_i > 12'(HIT_DEPTH)) ? 12'(HIT_DEPTH) : pkt_hits_i;
    n      = (12'(level) >= target) ? target : 12'(level);
    need   = tot_mode_i ? 13'd1 + {n, 1'b0} : 13'd1 + {1'b0, n};
    go     = !busy_q && !f_empty && ((12'(level) >= target) || flush_i) && (buf_free_i >= need);
  end

  // one hit leaves the FIFO with its last word
  assign pop = busy_q && (sent_q != 0) && (!tot_mode_i || phase_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0; phase_q <= 1'b0; n_q <= '0; sent_q <= '0; idx_q <= '0;
    end else if (start_i) begin
      busy_q <= 1'b0; phase_q <= 1'b0; idx_q <= '0;
    end else if (go) begin
      busy_q  <= 1'b1;
      n_q     <= n;
      sent_q  <= '0;
      phase_q <= 1'b0;
    end else if (busy_q) begin
      // sent_q = 0: header; then hits 1..n (phase_q = ToT word)
      if (sent_q == 0) sent_q <= 12'd1;
      else if (tot_mode_i && !phase_q) phase_q <= 1'b1;
      else begin
        phase_q <= 1'b0;
        if (sent_q == n_q) begin
          busy_q <= 1'b0;
          idx_q  <= idx_q + 1'b1;
        end else sent_q <= sent_q + 1'b1;
      end
    end
  end

  always_comb begin
    wr_o           = busy_q;
    wr_tag_o       = idx_q;
    wr_word_o.last = (sent_q == n_q) && (sent_q != 0) && (!tot_mode_i || phase_q);
    if (sent_q == 0)
      wr_word_o.data = {mk_header(tot_mode_i ? PKT_TOT : PKT_TIMING,
                                  tot_mode_i ? 12'd1 + {n_q[10:0], 1'b0} : 12'd1 + n_q),
                        4'h0, n_q};
    else if (phase_q)
      wr_word_o.data = {16'h0, head.tot};
    else
      wr_word_o.data = {2'b00, head.ch, head.ts};
  end
endmodule
