// timing_acq: hit collection of the timing and timing+ToT modes.
//
// In these modes the 64 channels acquire independently: every self-trigger
// pulse becomes a hit made of the channel number, a 24-bit time stamp and
// (ToT mode) its time over threshold.  The TDC of each channel delivers a hit
// when the pulse ends (hit_i, leading-edge time in 0.5 ns units, ToT).
//
// Stage 1, collection: each channel has a one-hit holding register; a
// round-robin arbiter moves one held hit per clock into a candidate FIFO.
// A hit that finds its channel's register still full is lost (lost_o).
// Stage 2, selection, on the head of the candidate FIFO, using the last two
// reference pulses (T0, given as a time by its own TDC):
//   streaming     every hit is taken;
//   common start  taken if a reference r has r <= t <= r + window;
//   common stop   taken if a reference r has t <= r <= t + window; the head
//                 waits until such a reference arrives or the window has
//                 passed (then it is dropped).
// Stage 3, time stamp: t minus the run start time (absolute mode) or minus
// the reference (delta-T mode: the opening/closing reference, or the last
// reference before the hit in streaming), shifted right by ts_lsb and cut to
// 24 bits.  With ts_lsb = 0 the LSB is 0.5 ns and the range 8.4 ms.
// The result goes out on a valid/ready port.  While the output is refused
// the stages stall and paused_o is high: the acquisition is paused and that
// time counts as dead time.
// The modes, windows, 0.5 ns LSB, 24-bit stamp and programmable LSB follow
// the system description; arbitration, holding registers, the two-reference
// history and the order of hits (arbitration order, not time order) are
// this design's.
module timing_acq
  import fers_pkg::*;
#(
  parameter int unsigned CAND_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run_i,
  input  logic              start_i,        // run start: clears state
  input  timing_sub_e       tsub_i,
  input  logic              dt_mode_i,
  input  logic [3:0]        ts_lsb_i,
  input  logic [23:0]       window_i,       // 0.5 ns units
  input  logic [N_CH-1:0]   ch_enable_i,
  input  logic [N_CH-1:0]   hit_i,
  input  logic [TIME_W-1:0] hit_time_i [N_CH],
  input  logic [TOT_W-1:0]  hit_tot_i  [N_CH],
  input  logic              ref_i,
  input  logic [TIME_W-1:0] ref_time_i,
  input  logic [TIME_W-1:0] start_time_i,   // run start, 0.5 ns units
  input  logic [TIME_W-1:0] now_i,          // clock ticks
  output logic              out_valid_o,
  output hit_t              out_hit_o,
  input  logic              out_ready_i,
  output logic              lost_o,
  output logic              paused_o
);
  typedef struct packed {
    logic [5:0]        ch;
    logic [TIME_W-1:0] t;
    logic [TOT_W-1:0]  tot;
  } cand_t;

  // ---------------------------------------------------------- collection
  logic [N_CH-1:0] held_q;
  cand_t           held_d_q [N_CH];
  logic [5:0]      rr_q, pick;
  logic            pick_ok;
  logic            c_push, c_pop, c_empty, c_full;
  cand_t           c_head;

  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = 0; k < N_CH; k++) begin
      logic [5:0] idx;
      idx = rr_q + 6'(k);
      if (!pick_ok && held_q[idx]) begin
        pick_ok = 1'b1;
        pick    = idx;
      end
    end
  end
  assign c_push = pick_ok && !c_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_q <= '0; rr_q <= '0; lost_o <= 1'b0;
    end else begin
      logic lost;
      lost = 1'b0;
      if (start_i) held_q <= '0;
      else begin
        if (c_push) begin
          held_q[pick] <= 1'b0;
          rr_q <= pick + 6'd1;
        end
        for (int i = 0; i < N_CH; i++) begin
          if (run_i && hit_i[i] && ch_enable_i[i]) begin
            if (held_q[i] && !(c_push && pick == 6'(i))) lost = 1'b1;
            else held_q[i] <= 1'b1;
          end
        end
      end
      lost_o <= lost;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_CH; i++)
      if (hit_i[i] && (!held_q[i] || (c_push && pick == 6'(i))))
        held_d_q[i] <= '{ch: 6'(i), t: hit_time_i[i], tot: hit_tot_i[i]};
  end

  sync_fifo #(.W($bits(cand_t)), .DEPTH(CAND_DEPTH)) u_cand (
    .clk, .rst_n, .clear_i(start_i),
    .push_i(c_push), .din_i(held_d_q[pick]),
    .pop_i(c_pop), .dout_o(c_head),
    .empty_o(c_empty), .full_o(c_full), .level_o(), .free_o());

  // ----------------------------------------------------------- selection
  logic [TIME_W-1:0] ref_q [2];     // [0] latest, [1] the one before
  logic [1:0]        refv_q;
  logic [TIME_W-1:0] now_fine;
  logic              take, drop;
  logic [TIME_W-1:0] rsel;          // reference used for delta-T
  logic [TIME_W-1:0] dt;

  assign now_fine = {now_i[TIME_W-FINE_W-1:0], {FINE_W{1'b0}}};

  always_comb begin
    logic in_start [2];
    logic in_stop  [2];
    logic is_before[2];
    for (int k = 0; k < 2; k++) begin
      in_start[k] = refv_q[k] && (ref_q[k] <= c_head.t) && (c_head.t - ref_q[k] <= TIME_W'(window_i));
      in_stop[k]  = refv_q[k] && (ref_q[k] >= c_head.t) && (ref_q[k] - c_head.t <= TIME_W'(window_i));
      is_before[k]   = refv_q[k] && (ref_q[k] <= c_head.t);
    end
    take = 1'b0; drop = 1'b0; rsel = start_time_i;
    unique case (tsub_i)
      SUB_COMMON_START: begin
        take = in_start[0] || in_start[1];
        drop = !take;
        rsel = in_start[0] ? ref_q[0] : ref_q[1];
      end
      SUB_COMMON_STOP: begin
        take = in_stop[0] || in_stop[1];
        drop = !take && (now_fine > c_head.t + TIME_W'(window_i) + TIME_W'(2*FINE_BINS));
        rsel = in_stop[1] ? ref_q[1] : ref_q[0];
      end
      default: begin
        take = 1'b1;
        rsel = is_before[0] ? ref_q[0] : ref_q[1];
      end
    endcase
    if (!dt_mode_i) rsel = start_time_i;
    // delta-T is |t - r| (the stop reference comes after the hit)
    dt = (c_head.t >= rsel) ? c_head.t - rsel : rsel - c_head.t;
  end

  // output register
  logic out_free;
  assign out_free = !out_valid_o || out_ready_i;
  assign c_pop    = !c_empty && ((take && out_free) || drop);
  assign paused_o = run_i && out_valid_o && !out_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_q[0] <= '0; ref_q[1] <= '0; refv_q <= '0;
      out_valid_o <= 1'b0; out_hit_o <= '0;
    end else begin
      if (start_i) refv_q <= '0;
      else if (ref_i) begin
        ref_q[1] <= ref_q[0];
        ref_q[0] <= ref_time_i;
        refv_q   <= {refv_q[0], 1'b1};
      end
      if (out_ready_i) out_valid_o <= 1'b0;
      if (!c_empty && take && out_free) begin
        out_valid_o   <= 1'b1;
        out_hit_o.ch  <= c_head.ch;
        out_hit_o.ts  <= HIT_TS_W'(dt >> ts_lsb_i);
        out_hit_o.tot <= c_head.tot;
      end
      if (start_i) out_valid_o <= 1'b0;
    end
  end
endmodule
