// fers_unit: the FPGA logic of one A5202 FERS unit (64 SiPM channels).
//
// The unit reads two 32-channel front-end ASICs.  Their 64 self-triggers
// reach the FPGA through 2 GS/s serializers (16 samples per 8 ns clock each)
// and go to one 0.5 ns TDC per channel; the LEMO T0 input has its own TDC and
// serves as the timing reference.  From the TDC outputs the unit runs one of
// four acquisition modes, chosen by the configuration register:
//   counting (MCS)    64 counters, latched and cleared at every trigger;
//   spectroscopy      trigger -> hold -> 32-step multiplexed conversion of
//                     the 64 charges by two ADCs -> zero suppression;
//   timing / ToT      per-hit channel, 24-bit time stamp (and ToT) with
//                     common-start / common-stop / streaming selection,
//                     grouped into packets.
// All modes write packets into one local event buffer.  The buffer is read
// out either through the TDlink node (network use: horizontal token readout
// in spectroscopy mode, vertical block readout otherwise) or, with
// standalone_i high, on a valid/ready stream to the local microcontroller
// that bridges USB and Ethernet (whole packets, in order).
// The trigger comes from the OR or majority of the self-triggers, LEMO T1,
// the periodic generator, a TDlink trigger command or a register write.
// T0-OUT carries the unit's T-OR and T1-OUT the acquisition trigger; the
// external 50 ps TDC gets T-OR as start and the T0 level as stop.  The bias
// set-point is corrected for temperature.  Run start/stop come from the
// TDlink or from a register.  Clock: one 125 MHz domain (8 ns), as the 8 ns
// time-stamp granularity implies.
// The block structure, modes and interfaces follow the system description
// (Fig. 7 of the unit scheme: TRG[63:0], OR, Gate/hold, MUX, ADC, TDC
// start/stop, T0/T1 in/out, TDlink, uC); port protocols are this design's.
module fers_unit
  import fers_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 4096,
  parameter int unsigned STEP_CLKS = 39
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 standalone_i,
  // front end
  input  logic [FINE_BINS-1:0] trg_samples_i [N_CH],
  input  logic [FINE_BINS-1:0] t0_samples_i,
  input  logic                 t1_i,
  output logic                 hold_o,
  output logic [4:0]           mux_sel_o,
  output logic                 adc_start_o,
  input  logic                 adc_valid_i,
  input  logic [CHARGE_W-1:0]  adc_data_i [N_ASIC],
  input  logic [N_ASIC-1:0]    qtrg_i,
  output logic                 tdc_start_o,
  output logic                 tdc_stop_o,
  output logic                 t0_out_o,
  output logic                 t1_out_o,
  // TDlink
  input  ring_word_t           link_rx_i,
  output ring_word_t           link_tx_o,
  // microcontroller
  input  logic                 uc_wr_i,
  input  logic [7:0]           uc_addr_i,
  input  logic [31:0]          uc_data_i,
  input  logic [7:0]           uc_rd_addr_i,
  output logic [31:0]          uc_rd_data_o,
  output logic                 uc_valid_o,
  output dword_t               uc_word_o,
  input  logic                 uc_ready_i,
  // bias
  input  logic                 temp_valid_i,
  input  logic signed [15:0]   temp_i,
  output logic [16:0]          hv_vset_o,
  output logic                 hv_vset_valid_o,
  // status
  output logic [TIME_W-1:0]    now_o,
  output logic                 running_o,
  output logic [31:0]          trg_count_o,
  output logic [31:0]          lost_count_o,
  output logic [31:0]          hits_lost_o,
  output logic [TIME_W-1:0]    real_time_o,
  output logic [TIME_W-1:0]    dead_time_o,
  output logic [7:0]           node_addr_o
);
  localparam int unsigned FW = $clog2(BUF_DEPTH+1);

  fers_cfg_t cfg;

  // ------------------------------------------------------------ time
  logic              tload;
  logic [TIME_W-1:0] tload_val, now;
  time_counter u_time (.clk, .rst_n, .clear_i(1'b0), .load_i(tload), .load_val_i(tload_val), .now_o(now));
  assign now_o = now;

  // ------------------------------------------------------------ TDCs
  logic [N_CH-1:0]   ch_active, ch_lead, ch_hit;
  logic [TIME_W-1:0] ch_lead_t [N_CH];
  logic [TIME_W-1:0] ch_hit_t  [N_CH];
  logic [TOT_W-1:0]  ch_tot    [N_CH];
  for (genvar c = 0; c < N_CH; c++) begin : g_tdc
    tdc_channel u_tdc (.clk, .rst_n, .samples_i(trg_samples_i[c]), .now_i(now),
      .active_o(ch_active[c]), .lead_o(ch_lead[c]), .lead_time_o(ch_lead_t[c]),
      .hit_o(ch_hit[c]), .hit_time_o(ch_hit_t[c]), .hit_tot_o(ch_tot[c]));
  end
  logic              t0_active, t0_lead, t0_hit;
  logic [TIME_W-1:0] t0_lead_t, t0_hit_t;
  logic [TOT_W-1:0]  t0_tot;
  tdc_channel u_t0 (.clk, .rst_n, .samples_i(t0_samples_i), .now_i(now),
    .active_o(t0_active), .lead_o(t0_lead), .lead_time_o(t0_lead_t),
    .hit_o(t0_hit), .hit_time_o(t0_hit_t), .hit_tot_o(t0_tot));

  // ------------------------------------------------------- link node
  logic        n_start, n_stop, n_trg, n_regwr;
  logic [7:0]  n_regaddr;
  logic [31:0] n_regdata;
  logic        pkt_avail, buf_pop, node_pop;
  logic [31:0] pkt_tag;
  logic [11:0] pkt_len;
  dword_t      rd_word;
  logic        pha_pending;
  logic [31:0] pha_pending_tag, trg_count;
  logic        running;

  tdlink_node u_node (.clk, .rst_n, .rx_i(link_rx_i), .tx_o(link_tx_o),
    .time_load_o(tload), .time_load_val_o(tload_val),
    .cmd_start_o(n_start), .cmd_stop_o(n_stop), .cmd_trg_o(n_trg),
    .reg_wr_o(n_regwr), .reg_addr_o(n_regaddr), .reg_data_o(n_regdata), .addr_o(node_addr_o),
    .running_i(running), .trg_count_i(trg_count),
    .pending_i(pha_pending), .pending_tag_i(pha_pending_tag),
    .pkt_avail_i(pkt_avail && !standalone_i), .pkt_tag_i(pkt_tag), .pkt_len_i(pkt_len),
    .rd_pop_o(node_pop), .rd_word_i(rd_word));

  // ------------------------------------------------------- registers
  logic        sw_trg, r_start, r_stop;
  logic [31:0] hvset, hvcoef;
  fers_regfile u_regs (.clk, .rst_n,
    .link_wr_i(n_regwr), .link_addr_i(n_regaddr), .link_data_i(n_regdata),
    .uc_wr_i, .uc_addr_i, .uc_data_i, .rd_addr_i(uc_rd_addr_i), .rd_data_o(uc_rd_data_o),
    .cfg_o(cfg), .sw_trg_o(sw_trg), .start_o(r_start), .stop_o(r_stop),
    .hvset_o(hvset), .hvcoef_o(hvcoef));

  hv_temp_comp u_hv (.clk, .rst_n, .vset_i(hvset[16:0]), .coef_i(hvcoef[15:0]),
    .tref_i(hvcoef[31:16]), .temp_valid_i, .temp_i, .vout_o(hv_vset_o), .vout_valid_o(hv_vset_valid_o));

  // ------------------------------------------------------- run control
  logic              trg, t_or, periodic, start_p, busy, lost;
  logic [TIME_W-1:0] start_time;
  logic [31:0]       trg_id;
  run_control u_run (.clk, .rst_n, .start_i(n_start | r_start), .stop_i(n_stop | r_stop),
    .trg_i(trg), .busy_i(busy), .lost_i(lost), .now_i(now),
    .running_o(running), .start_o(start_p), .start_time_o(start_time),
    .trg_id_o(trg_id), .trg_count_o(trg_count), .lost_count_o(lost_count_o),
    .real_time_o(real_time_o), .dead_time_o(dead_time_o));
  assign running_o   = running;
  assign trg_count_o = trg_count;

  // ---------------------------------------------------------- trigger
  periodic_trigger u_per (.clk, .rst_n, .enable_i(running && cfg.trg_src == TSRC_PERIODIC),
    .dwell_i(cfg.dwell), .trg_o(periodic));
  trigger_logic u_trg (.clk, .rst_n, .src_i(cfg.trg_src), .maj_level_i(cfg.maj_level),
    .ch_enable_i(cfg.ch_enable), .active_i(ch_active), .t1_i, .periodic_i(periodic),
    .link_trg_i(n_trg), .sw_trg_i(sw_trg), .trg_o(trg), .t_or_o(t_or));

  assign t0_out_o    = t_or;
  assign t1_out_o    = trg;
  assign tdc_start_o = t_or;
  assign tdc_stop_o  = t0_active;

  // ------------------------------------------------------- buffer
  logic [FW-1:0] free_full;
  logic [12:0]   free;
  logic          wr;
  dword_t        wr_word;
  logic [31:0]   wr_tag;
  event_buffer #(.DEPTH(BUF_DEPTH)) u_buf (.clk, .rst_n, .clear_i(start_p),
    .wr_i(wr), .wr_word_i(wr_word), .wr_tag_i(wr_tag), .free_o(free_full),
    .pkt_avail_o(pkt_avail), .pkt_tag_o(pkt_tag), .pkt_len_o(pkt_len),
    .rd_pop_i(buf_pop), .rd_word_o(rd_word), .pkt_count_o());
  assign free = (FW > 13 && free_full > FW'(8191)) ? 13'd8191 : 13'(free_full);

  // stand-alone readout: whole packets to the microcontroller
  assign uc_valid_o = standalone_i && pkt_avail;
  assign uc_word_o  = rd_word;
  assign buf_pop    = standalone_i ? (uc_valid_o && uc_ready_i) : node_pop;

  // ------------------------------------------------------- modes
  logic        m_wr, p_wr, h_wr;
  dword_t      m_word, p_word, h_word;
  logic [31:0] m_tag, p_tag, h_tag;
  logic        m_lost, p_lost, p_busy;
  logic        is_cnt, is_pha, is_tim;
  assign is_cnt = running && cfg.mode == MODE_COUNTING;
  assign is_pha = running && cfg.mode == MODE_SPECT;
  assign is_tim = running && (cfg.mode == MODE_TIMING || cfg.mode == MODE_TOT);

  mcs_counters u_mcs (.clk, .rst_n, .run_i(is_cnt), .start_i(start_p), .ch_enable_i(cfg.ch_enable),
    .lead_i(ch_lead), .trg_i(trg), .now_i(now), .buf_free_i(free),
    .wr_o(m_wr), .wr_word_o(m_word), .wr_tag_o(m_tag), .lost_o(m_lost),
    .rd_sel_i(uc_rd_addr_i[5:0]), .rd_val_o());

  pha_sequencer #(.STEP_CLKS(STEP_CLKS)) u_pha (.clk, .rst_n, .run_i(is_pha), .trg_i(trg),
    .trg_id_i(trg_id), .now_i(now), .ch_enable_i(cfg.ch_enable), .zs_en_i(cfg.zs_en),
    .hold_delay_i(cfg.hold_delay), .hold_o, .mux_sel_o, .adc_start_o, .adc_valid_i,
    .adc_data_i, .qtrg_i, .buf_free_i(free), .wr_o(p_wr), .wr_word_o(p_word), .wr_tag_o(p_tag),
    .busy_o(p_busy), .lost_o(p_lost), .pending_o(pha_pending), .pending_tag_o(pha_pending_tag));

  logic  h_valid, h_ready, t_lost, t_paused;
  hit_t  h_hit;
  timing_acq u_tim (.clk, .rst_n, .run_i(is_tim), .start_i(start_p), .tsub_i(cfg.tsub),
    .dt_mode_i(cfg.dt_mode), .ts_lsb_i(cfg.ts_lsb), .window_i(cfg.window),
    .ch_enable_i(cfg.ch_enable), .hit_i(ch_hit), .hit_time_i(ch_hit_t), .hit_tot_i(ch_tot),
    .ref_i(t0_lead), .ref_time_i(t0_lead_t), .start_time_i(start_time), .now_i(now),
    .out_valid_o(h_valid), .out_hit_o(h_hit), .out_ready_i(h_ready),
    .lost_o(t_lost), .paused_o(t_paused));

  hit_packetizer u_pkt (.clk, .rst_n, .start_i(start_p), .tot_mode_i(cfg.mode == MODE_TOT),
    .pkt_hits_i(cfg.pkt_hits), .flush_i(!running), .in_valid_i(h_valid), .in_hit_i(h_hit),
    .in_ready_o(h_ready), .buf_free_i(free), .wr_o(h_wr), .wr_word_o(h_word), .wr_tag_o(h_tag));

  always_comb begin
    unique case (cfg.mode)
      MODE_COUNTING: begin wr = m_wr; wr_word = m_word; wr_tag = m_tag; end
      MODE_SPECT:    begin wr = p_wr; wr_word = p_word; wr_tag = p_tag; end
      default:       begin wr = h_wr; wr_word = h_word; wr_tag = h_tag; end
    endcase
  end

  assign busy = p_busy | t_paused;
  assign lost = m_lost | p_lost;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       hits_lost_o <= '0;
    else if (start_p) hits_lost_o <= '0;
    else if (t_lost)  hits_lost_o <= hits_lost_o + 1'b1;
  end
endmodule
