// fersnet: a FERSnet -- one concentrator reading N_LINKS TDlink chains of
// N_UNITS FERS units each (8 x 16 = 128 units, 8192 SiPM channels).
//
// Each chain is a ring: concentrator -> unit 0 -> unit 1 -> ... -> unit
// N_UNITS-1 -> concentrator.  The optical links and their transceivers are
// not part of this logic: every ring word the concentrator or a unit sends
// leaves on a *_tx_o port and the word it receives enters on a *_rx_i port,
// so a board-level model (or the transceivers) closes the rings:
//   conc_tx_o[l]        -> unit_rx_i[l][0]
//   unit_tx_o[l][u]     -> unit_rx_i[l][u+1]
//   unit_tx_o[l][last]  -> conc_rx_i[l]
// Likewise the front-end signals of every unit (serialized self-trigger
// samples, T0/T1, hold / multiplexer / ADC handshake, temperature) are
// ports, indexed [link][unit].  The host side of the concentrator
// (commands, slow control, built events) and the S-link are ports too.
// The units run in network mode (their microcontroller ports are idle) and
// their LEMO outputs are brought out.  The system gives the 8 x 16 tree; the
// port grouping is this design's.
module fersnet
  import fers_pkg::*;
#(
  parameter int unsigned N_LINKS   = 8,
  parameter int unsigned N_UNITS   = 16,
  parameter int unsigned BUF_DEPTH = 4096,
  parameter int unsigned STEP_CLKS = 39
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // rings
  output ring_word_t           conc_tx_o [N_LINKS],
  input  ring_word_t           conc_rx_i [N_LINKS],
  output ring_word_t           unit_tx_o [N_LINKS][N_UNITS],
  input  ring_word_t           unit_rx_i [N_LINKS][N_UNITS],
  // front ends
  input  logic [FINE_BINS-1:0] trg_samples_i [N_LINKS][N_UNITS][N_CH],
  input  logic [FINE_BINS-1:0] t0_samples_i  [N_LINKS][N_UNITS],
  input  logic                 t1_i          [N_LINKS][N_UNITS],
  output logic                 hold_o        [N_LINKS][N_UNITS],
  output logic [4:0]           mux_sel_o     [N_LINKS][N_UNITS],
  output logic                 adc_start_o   [N_LINKS][N_UNITS],
  input  logic                 adc_valid_i   [N_LINKS][N_UNITS],
  input  logic [CHARGE_W-1:0]  adc_data_i    [N_LINKS][N_UNITS][N_ASIC],
  input  logic [N_ASIC-1:0]    qtrg_i        [N_LINKS][N_UNITS],
  output logic                 tdc_start_o   [N_LINKS][N_UNITS],
  output logic                 tdc_stop_o    [N_LINKS][N_UNITS],
  output logic                 t0_out_o      [N_LINKS][N_UNITS],
  output logic                 t1_out_o      [N_LINKS][N_UNITS],
  input  logic                 temp_valid_i  [N_LINKS][N_UNITS],
  input  logic signed [15:0]   temp_i        [N_LINKS][N_UNITS],
  output logic [16:0]          hv_vset_o     [N_LINKS][N_UNITS],
  // unit status
  output logic [31:0]          unit_trg_count_o [N_LINKS][N_UNITS],
  output logic [31:0]          unit_lost_o      [N_LINKS][N_UNITS],
  output logic [TIME_W-1:0]    unit_dead_time_o [N_LINKS][N_UNITS],
  output logic [TIME_W-1:0]    unit_now_o       [N_LINKS][N_UNITS],
  // concentrator host side
  input  logic                 init_i,
  input  logic                 cmd_i,
  input  logic [31:0]          cmd_code_i,
  input  logic                 gtrg_i,
  input  logic                 trg_via_link_i,
  input  logic                 reg_wr_i,
  input  logic [3:0]           reg_link_i,
  input  logic [7:0]           reg_node_i,
  input  logic [7:0]           reg_addr_i,
  input  logic [31:0]          reg_data_i,
  input  logic                 hmode_i,
  input  logic [23:0]          vmax_i,
  output logic                 init_done_o,
  output logic                 sync_err_o,
  output logic [7:0]           n_nodes_o [N_LINKS],
  output logic [31:0]          hop_o     [N_LINKS],
  output logic [31:0]          trg_count_o,
  output logic [31:0]          events_built_o,
  output logic                 ev_valid_o,
  output dword_t               ev_word_o,
  input  logic                 ev_ready_i,
  input  logic                 slink_master_i,
  input  logic                 treset_i,
  input  logic                 slink_treset_i,
  output logic                 slink_treset_o,
  output logic [TIME_W-1:0]    now_o
);

  concentrator #(.N_LINKS(N_LINKS)) u_conc (
    .clk, .rst_n, .link_tx_o(conc_tx_o), .link_rx_i(conc_rx_i),
    .init_i, .cmd_i, .cmd_code_i, .gtrg_i, .trg_via_link_i,
    .reg_wr_i, .reg_link_i, .reg_node_i, .reg_addr_i, .reg_data_i,
    .hmode_i, .vmax_i, .init_done_o, .sync_err_o, .n_nodes_o, .hop_o,
    .trg_count_o, .events_built_o, .ev_valid_o, .ev_word_o, .ev_ready_i,
    .slink_master_i, .treset_i, .slink_treset_i, .slink_treset_o, .now_o);

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
      logic [31:0] uc_rd_data, hits_lost;
      logic        uc_valid, running, hv_valid;
      dword_t      uc_word;
      logic [TIME_W-1:0] real_time;
      logic [7:0]  node_addr;
      fers_unit #(.BUF_DEPTH(BUF_DEPTH), .STEP_CLKS(STEP_CLKS)) u_unit (
        .clk, .rst_n, .standalone_i(1'b0),
        .trg_samples_i(trg_samples_i[l][u]), .t0_samples_i(t0_samples_i[l][u]), .t1_i(t1_i[l][u]),
        .hold_o(hold_o[l][u]), .mux_sel_o(mux_sel_o[l][u]), .adc_start_o(adc_start_o[l][u]),
        .adc_valid_i(adc_valid_i[l][u]), .adc_data_i(adc_data_i[l][u]), .qtrg_i(qtrg_i[l][u]),
        .tdc_start_o(tdc_start_o[l][u]), .tdc_stop_o(tdc_stop_o[l][u]),
        .t0_out_o(t0_out_o[l][u]), .t1_out_o(t1_out_o[l][u]),
        .link_rx_i(unit_rx_i[l][u]), .link_tx_o(unit_tx_o[l][u]),
        .uc_wr_i(1'b0), .uc_addr_i(8'h0), .uc_data_i(32'h0), .uc_rd_addr_i(8'h0),
        .uc_rd_data_o(uc_rd_data), .uc_valid_o(uc_valid), .uc_word_o(uc_word), .uc_ready_i(1'b0),
        .temp_valid_i(temp_valid_i[l][u]), .temp_i(temp_i[l][u]),
        .hv_vset_o(hv_vset_o[l][u]), .hv_vset_valid_o(hv_valid),
        .now_o(unit_now_o[l][u]), .running_o(running), .trg_count_o(unit_trg_count_o[l][u]),
        .lost_count_o(unit_lost_o[l][u]), .hits_lost_o(hits_lost), .real_time_o(real_time),
        .dead_time_o(unit_dead_time_o[l][u]), .node_addr_o(node_addr));
    end
  end
endmodule
