// pha_sequencer: spectroscopy (PHA) mode acquisition of one unit.
//
// On an accepted trigger the sequencer latches the 48-bit time stamp and the
// trigger index and raises hold_o hold_delay + 2 clocks after the trigger
// pulse (two clocks of pipeline plus the programmed delay), which makes the
// two front-end ASICs freeze the peak of their slow shapers.  It then steps
// the ASICs' analog multiplexers through channels 0..31: at the start of each
// STEP_CLKS-clock step it pulses adc_start_o with mux_sel_o set, and the two
// ADCs (one per ASIC) answer with adc_valid_i, a 16-bit charge each and the
// charge-discriminator bit of that channel (qtrg_i).  With 32 steps of 39
// clocks the conversion takes 1248 clocks, the ~10 us the system quotes, and
// limits the trigger rate to about 100 kHz.  Then hold_o drops and the event
// is written to the buffer:
//   word 0  {header = {PKT_SPECT, length}, time stamp[47:32]}
//   word 1  time stamp[31:0]
//   word 2  channel mask[63:32]       word 3  channel mask[31:0]
//   word 4.. charges of the channels in the mask, in channel order, two per
//           word (lower channel in bits 31:16), the last half zero if odd.
// A channel is in the mask if it is enabled and, with zero suppression on,
// its charge discriminator fired.  Without suppression the event has 36
// words (144 bytes).  The writer scans one channel per clock up to the last
// channel in the mask, so writing adds at most 69 clocks of dead time.  busy_o is high from the accepted
// trigger to the last word; triggers meanwhile, or when the buffer cannot take a
// full event, are refused (lost_o).  pending_o/pending_tag_o tell the TDlink
// node that the event of that trigger index is still being built.
// The hold/multiplex/convert/suppress sequence and packet fields are the
// system's; the step length, ADC handshake and word layout are this design's.
module pha_sequencer
  import fers_pkg::*;
#(
  parameter int unsigned STEP_CLKS = 39
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run_i,
  input  logic              trg_i,
  input  logic [31:0]       trg_id_i,      // index of this trigger
  input  logic [TIME_W-1:0] now_i,
  input  logic [N_CH-1:0]   ch_enable_i,
  input  logic              zs_en_i,
  input  logic [7:0]        hold_delay_i,
  // front end / ADC
  output logic              hold_o,
  output logic [4:0]        mux_sel_o,
  output logic              adc_start_o,
  input  logic              adc_valid_i,
  input  logic [CHARGE_W-1:0] adc_data_i [N_ASIC],
  input  logic [N_ASIC-1:0] qtrg_i,
  // buffer
  input  logic [12:0]       buf_free_i,
  output logic              wr_o,
  output dword_t            wr_word_o,
  output logic [31:0]       wr_tag_o,
  // status
  output logic              busy_o,
  output logic              lost_o,
  output logic              pending_o,
  output logic [31:0]       pending_tag_o
);
  localparam int unsigned MAX_LEN = 4 + N_CH/2;
  localparam int unsigned SW = $clog2(STEP_CLKS+1);

  typedef enum logic [2:0] {S_IDLE, S_DELAY, S_CONV, S_MASK, S_HDR, S_DATA} state_e;
  state_e state_q;

  logic [CHARGE_W-1:0] charge_q [N_CH];
  logic [N_CH-1:0]     qtrg_q, mask_q;
  logic [TS_W-1:0]     ts_q;
  logic [31:0]         tag_q;
  logic [7:0]          dly_q;
  logic [4:0]          step_q;
  logic [SW-1:0]       tick_q;
  logic [1:0]          hidx_q;      // header word
  logic [6:0]          ch_q;        // channel scanned
  logic                half_q;      // a charge waits in hi_q
  logic [15:0]         hi_q;
  logic [6:0]          nkept, done_q, done_n;
  logic [11:0]         pkt_len;
  logic                take;

  assign take = run_i && trg_i && (state_q == S_IDLE) && (buf_free_i >= 13'(MAX_LEN));
  assign lost_o = run_i && trg_i && !take;
  assign busy_o = (state_q != S_IDLE) || wr_o;   // until the last word is written
  assign pending_o = busy_o;
  assign pending_tag_o = tag_q;
  assign wr_tag_o = tag_q;
  assign mux_sel_o = step_q;

  always_comb begin
    nkept = '0;
    for (int i = 0; i < N_CH; i++) nkept += 7'(mask_q[i]);
    pkt_len = 12'd4 + ((12'(nkept) + 12'd1) >> 1);
    done_n  = done_q + 7'd1;
  end

  always_ff @(posedge clk) begin
    if (state_q == S_CONV && adc_valid_i) begin
      for (int a = 0; a < N_ASIC; a++)
        charge_q[a*CH_PER_ASIC + int'(step_q)] <= adc_data_i[a];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; ts_q <= '0; tag_q <= '0; dly_q <= '0; step_q <= '0;
      tick_q <= '0; hidx_q <= '0; ch_q <= '0; half_q <= 1'b0; hi_q <= '0;
      qtrg_q <= '0; mask_q <= '0; done_q <= '0; hold_o <= 1'b0; adc_start_o <= 1'b0;
      wr_o <= 1'b0; wr_word_o <= '0;
    end else begin
      adc_start_o <= 1'b0;
      wr_o        <= 1'b0;
      wr_word_o.last <= 1'b0;
      unique case (state_q)
        S_IDLE: if (take) begin
          ts_q    <= now_i[TS_W-1:0];
          tag_q   <= trg_id_i;
          dly_q   <= hold_delay_i;
          qtrg_q  <= '0;
          state_q <= S_DELAY;
        end
        S_DELAY: begin
          if (dly_q == 0) begin
            hold_o      <= 1'b1;
            step_q      <= '0;
            tick_q      <= '0;
            adc_start_o <= 1'b1;
            state_q     <= S_CONV;
          end else dly_q <= dly_q - 1'b1;
        end
        S_CONV: begin
          if (adc_valid_i)
            for (int a = 0; a < N_ASIC; a++)
              qtrg_q[a*CH_PER_ASIC + int'(step_q)] <= qtrg_i[a];
          if (tick_q == SW'(STEP_CLKS-1)) begin
            tick_q <= '0;
            if (step_q == 5'(CH_PER_ASIC-1)) begin
              hold_o  <= 1'b0;
              state_q <= S_MASK;
            end else begin
              step_q      <= step_q + 1'b1;
              adc_start_o <= 1'b1;
            end
          end else tick_q <= tick_q + 1'b1;
        end
        S_MASK: begin
          mask_q  <= ch_enable_i & (zs_en_i ? qtrg_q : '1);
          hidx_q  <= '0;
          state_q <= S_HDR;
        end
        S_HDR: begin
          wr_o   <= 1'b1;
          hidx_q <= hidx_q + 1'b1;
          unique case (hidx_q)
            2'd0:    wr_word_o.data <= {mk_header(PKT_SPECT, pkt_len), ts_q[47:32]};
            2'd1:    wr_word_o.data <= ts_q[31:0];
            2'd2:    wr_word_o.data <= mask_q[63:32];
            default: wr_word_o.data <= mask_q[31:0];
          endcase
          if (hidx_q == 2'd3) begin
            wr_word_o.last <= (nkept == 0);
            state_q <= (nkept == 0) ? S_IDLE : S_DATA;
            ch_q    <= '0;
            half_q  <= 1'b0;
            done_q  <= '0;
          end
        end
        S_DATA: begin
          if (mask_q[6'(ch_q)]) begin
            done_q <= done_n;
            if (half_q) begin
              wr_o <= 1'b1;
              wr_word_o.data <= {hi_q, charge_q[6'(ch_q)]};
              wr_word_o.last <= (done_n == nkept);
              half_q <= 1'b0;
            end else if (done_n == nkept) begin
              wr_o <= 1'b1;
              wr_word_o.data <= {charge_q[6'(ch_q)], 16'h0};
              wr_word_o.last <= 1'b1;
            end else begin
              hi_q   <= charge_q[6'(ch_q)];
              half_q <= 1'b1;
            end
            if (done_n == nkept) state_q <= S_IDLE;
          end
          ch_q <= ch_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
