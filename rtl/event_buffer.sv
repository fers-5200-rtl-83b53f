// event_buffer: the unit's local memory buffer for packets awaiting readout.
//
// The acquisition engines write whole packets of 32-bit words; each word
// carries an end-of-packet mark.  With the last word the writer also gives a
// 32-bit tag (the trigger index in spectroscopy mode, the slot index in
// counting mode) which goes with the packet length into a second, small
// FIFO.  A packet is therefore visible to the reader (pkt_avail_o, its tag
// and length at pkt_tag_o / pkt_len_o) only once it is complete, so a reader
// never waits in the middle of a packet.  The reader pops words one per clock
// with rd_pop_i; the packet's entry leaves the tag FIFO with its last word.
// free_o tells writers how many words fit; writers check it before they
// start a packet and never write into a full buffer.
// The system description says only that events go to a local memory buffer;
// its size (DEPTH words, TAGS packets) and this organisation are assumed.
module event_buffer
  import fers_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned TAGS  = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear_i,
  // write side
  input  logic                       wr_i,
  input  dword_t                     wr_word_i,
  input  logic [31:0]                wr_tag_i,     // sampled with the last word
  output logic [$clog2(DEPTH+1)-1:0] free_o,
  // read side
  output logic                       pkt_avail_o,
  output logic [31:0]                pkt_tag_o,
  output logic [11:0]                pkt_len_o,
  input  logic                       rd_pop_i,
  output dword_t                     rd_word_o,
  output logic [$clog2(TAGS+1)-1:0]  pkt_count_o
);
  logic [11:0] len_q;       // words of the packet being written
  logic        d_empty, d_full, t_empty, t_full;
  logic [43:0] tag_dout;
  logic [$clog2(DEPTH+1)-1:0] dfree;
  logic        tag_push, rd_last;

  assign tag_push = wr_i && wr_word_i.last;
  assign rd_last  = rd_pop_i && !d_empty && rd_word_o.last;

  sync_fifo #(.W($bits(dword_t)), .DEPTH(DEPTH)) u_data (
    .clk, .rst_n, .clear_i,
    .push_i(wr_i), .din_i(wr_word_i),
    .pop_i(rd_pop_i), .dout_o(rd_word_o),
    .empty_o(d_empty), .full_o(d_full), .level_o(), .free_o(dfree));

  sync_fifo #(.W(44), .DEPTH(TAGS)) u_tags (
    .clk, .rst_n, .clear_i,
    .push_i(tag_push), .din_i({len_q + 12'd1, wr_tag_i}),
    .pop_i(rd_last), .dout_o(tag_dout),
    .empty_o(t_empty), .full_o(t_full), .level_o(pkt_count_o), .free_o());

  // a writer sees no room once the tag FIFO is full
  assign free_o      = t_full ? '0 : dfree;
  assign pkt_avail_o = !t_empty;
  assign pkt_tag_o   = tag_dout[31:0];
  assign pkt_len_o   = tag_dout[43:32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                len_q <= '0;
    else if (clear_i)          len_q <= '0;
    else if (wr_i)             len_q <= wr_word_i.last ? 12'd0 : len_q + 12'd1;
  end

  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n) wr_i |-> !d_full);
  a_pop_complete:  assert property (@(posedge clk) disable iff (!rst_n) rd_pop_i |-> !t_empty);
endmodule
