// mcs_counters: photon counting (multichannel scaler) mode.
//
// One 32-bit counter per channel counts the leading edges of that channel's
// self-trigger (up to one per clock, i.e. far above the 20 Mcps the front end
// can deliver).  A trigger -- usually the internal periodic signal that sets
// the dwell time, or LEMO T1 -- closes a counting interval ("slot"): on that
// clock all counters are copied into a shadow bank and restart from zero, an
// edge on that very clock being the first count of the new slot, so there is
// no dead time between slots.  The shadow bank is then written into the
// event buffer as one packet:
//   word 0        {header = {PKT_COUNTING, 67}, time stamp[47:32]}
//   word 1        time stamp[31:0]   (8 ns units, time of the trigger)
//   word 2        slot index (counts every slot since the run start)
//   word 3..66    counter of channel 0..63
// The packet takes 67 clocks, well inside the shortest 1 us dwell time.  If
// the buffer has no room for it, or a trigger comes while the previous slot
// is still being written, that slot's packet is dropped (lost_o pulses) but
// counting and slot numbering go on.  rd_sel_i / rd_val_o read a running
// counter on the fly.  Counting, latching on the trigger, reset per slot,
// the slot index, the 48-bit stamp and the 64 words are the system's; the
// 32-bit counter and word layout are this design's.
module mcs_counters
  import fers_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run_i,        // counting enabled
  input  logic              start_i,      // run start: clear counters and slot index
  input  logic [N_CH-1:0]   ch_enable_i,
  input  logic [N_CH-1:0]   lead_i,       // leading edges from the TDCs
  input  logic              trg_i,        // closes the slot
  input  logic [TIME_W-1:0] now_i,
  input  logic [12:0]       buf_free_i,
  output logic              wr_o,
  output dword_t            wr_word_o,
  output logic [31:0]       wr_tag_o,
  output logic              lost_o,
  input  logic [5:0]        rd_sel_i,
  output logic [CNT_W-1:0]  rd_val_o
);
  localparam int unsigned PKT_LEN = 3 + N_CH;

  logic [CNT_W-1:0] cnt_q    [N_CH];
  logic [CNT_W-1:0] shadow_q [N_CH];
  logic [31:0]      slot_q, pkt_slot_q;
  logic [TS_W-1:0]  ts_q;
  logic             busy_q;
  logic [6:0]       idx_q;     // word being written
  logic             take;

  assign rd_val_o = cnt_q[rd_sel_i];
  assign take     = run_i && trg_i && !busy_q && (buf_free_i >= 13'(PKT_LEN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) cnt_q[i] <= '0;
    end else begin
      for (int i = 0; i < N_CH; i++) begin
        logic inc;
        inc = run_i && lead_i[i] && ch_enable_i[i];
        if (start_i || (run_i && trg_i)) cnt_q[i] <= CNT_W'(inc);
        else if (inc)                    cnt_q[i] <= cnt_q[i] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take)
      for (int i = 0; i < N_CH; i++) shadow_q[i] <= cnt_q[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= '0; pkt_slot_q <= '0; ts_q <= '0;
      busy_q <= 1'b0; idx_q <= '0; lost_o <= 1'b0;
    end else begin
      lost_o <= 1'b0;
      if (start_i) begin
        slot_q <= '0;
      end else if (run_i && trg_i) begin
        slot_q <= slot_q + 1'b1;
        if (take) begin
          pkt_slot_q <= slot_q;
          ts_q       <= now_i[TS_W-1:0];
          busy_q     <= 1'b1;
          idx_q      <= '0;
        end else begin
          lost_o <= 1'b1;
        end
      end
      if (busy_q) begin
        idx_q <= idx_q + 1'b1;
        if (idx_q == 7'(PKT_LEN-1)) busy_q <= 1'b0;
      end
    end
  end

  always_comb begin
    wr_o      = busy_q;
    wr_tag_o  = pkt_slot_q;
    wr_word_o.last = (idx_q == 7'(PKT_LEN-1));
    unique case (idx_q)
      7'd0:    wr_word_o.data = {mk_header(PKT_COUNTING, 12'(PKT_LEN)), ts_q[47:32]};
      7'd1:    wr_word_o.data = ts_q[31:0];
      7'd2:    wr_word_o.data = pkt_slot_q;
      default: wr_word_o.data = 32'(shadow_q[6'(idx_q - 7'd3)]);
    endcase
  end
endmodule
