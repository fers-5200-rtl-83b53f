// concentrator: the readout logic of a DT5215 concentrator board.
//
// The board is master of N_LINKS TDlink chains (8, each of up to 16 units)
// and keeps the network's reference time.  Its jobs here:
//   * start-up: init_i starts node counting, delay measurement and time
//     synchronization on all chains (tdlink_master); init_done_o when all
//     are done, sync_err_o if any chain came back misaligned;
//   * commands: cmd_i broadcasts a command on every chain; a start resets
//     the global trigger count; while running, each gtrg_i pulse (the global
//     trigger the board distributes, by LEMO or, with trg_via_link_i, as a
//     TDlink trigger command) is counted;
//   * slow control: reg_wr_i writes a unit register on chain reg_link_i;
//   * horizontal readout (hmode_i, spectroscopy): for every counted trigger
//     N, in order, the token HREAD(N) goes round all chains at once; their
//     packets are gathered in one FIFO per chain and then appended, chain
//     0 first, into one built event on the output stream:
//        {8'hEB, 24'(words that follow)}, N, then per unit packet
//        {chain[7:0], node[7:0], 4'h0, length[11:0]} and its words;
//     the event's last word is marked.  Units that missed trigger N simply
//     contribute nothing, so the events stay aligned;
//   * vertical readout (!hmode_i): every chain polls its units with VREAD
//     blocks of vmax_i words; the packets, each after its
//     {chain, node, length} word, are passed on chain by chain, whole
//     packets at a time, with no relation between chains;
//   * S-link: with slink_master_i, treset_i clears the board's time and is
//     sent on slink_treset_o; otherwise slink_treset_i clears the time and is
//     forwarded, so a chain of boards shares the time zero.  After a time
//     reset, init_i re-aligns the units.
// The system description gives these functions; how they are done (FIFO
// sizes, event word layout, in-order trigger loop) is this design's.
module concentrator
  import fers_pkg::*;
#(
  parameter int unsigned N_LINKS   = 8,
  parameter int unsigned LINK_FIFO = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  output ring_word_t        link_tx_o [N_LINKS],
  input  ring_word_t        link_rx_i [N_LINKS],
  // host side
  input  logic              init_i,
  input  logic              cmd_i,
  input  logic [31:0]       cmd_code_i,
  input  logic              gtrg_i,
  input  logic              trg_via_link_i,
  input  logic              reg_wr_i,
  input  logic [3:0]        reg_link_i,
  input  logic [7:0]        reg_node_i,
  input  logic [7:0]        reg_addr_i,
  input  logic [31:0]       reg_data_i,
  input  logic              hmode_i,
  input  logic [23:0]       vmax_i,
  output logic              init_done_o,
  output logic              sync_err_o,
  output logic [7:0]        n_nodes_o [N_LINKS],
  output logic [31:0]       hop_o     [N_LINKS],
  output logic [31:0]       trg_count_o,
  output logic [31:0]       events_built_o,
  output logic              ev_valid_o,
  output dword_t            ev_word_o,
  input  logic              ev_ready_i,
  // synchronization between boards
  input  logic              slink_master_i,
  input  logic              treset_i,
  input  logic              slink_treset_i,
  output logic              slink_treset_o,
  output logic [TIME_W-1:0] now_o
);
  localparam int unsigned LW = $clog2(LINK_FIFO+1);
  localparam int unsigned CW = (N_LINKS > 1) ? $clog2(N_LINKS) : 1;

  // ------------------------------------------------------------ time
  logic tclear;
  assign tclear = slink_master_i ? treset_i : slink_treset_i;
  time_counter u_time (.clk, .rst_n, .clear_i(tclear), .load_i(1'b0), .load_val_i('0), .now_o(now_o));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) slink_treset_o <= 1'b0; else slink_treset_o <= tclear;

  // ------------------------------------------------------------ run / triggers
  logic running_q;
  logic cmd_now;
  logic [31:0] cmd_code_now;
  always_comb begin
    cmd_now      = cmd_i || (gtrg_i && trg_via_link_i && running_q);
    cmd_code_now = cmd_i ? cmd_code_i : CMD_TRIGGER;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= 1'b0; trg_count_o <= '0;
    end else begin
      if (cmd_i && cmd_code_i == CMD_START) begin
        running_q <= 1'b1; trg_count_o <= '0;
      end else if (cmd_i && cmd_code_i == CMD_STOP) running_q <= 1'b0;
      else if (running_q && gtrg_i) trg_count_o <= trg_count_o + 1'b1;
    end
  end

  // ------------------------------------------------------------ masters
  logic [N_LINKS-1:0] m_ready, m_idone, m_serr, m_done, m_valid, m_sop, vpoll;
  dword_t             m_word [N_LINKS];
  logic               hread;
  logic [31:0]        hidx_q;
  logic [N_LINKS-1:0] f_empty;
  logic [33:0]        f_dout [N_LINKS];
  logic [LW-1:0]      f_level [N_LINKS];
  logic [LW-1:0]      f_free  [N_LINKS];
  logic [N_LINKS-1:0] f_pop;

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    tdlink_master u_m (.clk, .rst_n, .tx_o(link_tx_o[l]), .rx_i(link_rx_i[l]), .now_i(now_o),
      .init_i, .cmd_i(cmd_now), .cmd_code_i(cmd_code_now),
      .reg_wr_i(reg_wr_i && reg_link_i == 4'(l)), .reg_node_i, .reg_addr_i, .reg_data_i,
      .hread_i(hread), .hread_idx_i(hidx_q), .vpoll_i(vpoll[l]), .vmax_i,
      .ready_o(m_ready[l]), .init_done_o(m_idone[l]), .sync_err_o(m_serr[l]),
      .n_nodes_o(n_nodes_o[l]), .hop_o(hop_o[l]), .done_o(m_done[l]),
      .out_valid_o(m_valid[l]), .out_sop_o(m_sop[l]), .out_word_o(m_word[l]));

    // unit packets; SOP words become {chain, node, 4'h0, length}
    logic [33:0] din;
    assign din = m_sop[l] ? {1'b1, {8'(l), m_word[l].data[31:24], 4'h0, m_word[l].data[11:0]}, 1'b0}
                          : {1'b0, m_word[l]};
    sync_fifo #(.W(34), .DEPTH(LINK_FIFO)) u_f (.clk, .rst_n, .clear_i(1'b0),
      .push_i(m_valid[l]), .din_i(din), .pop_i(f_pop[l]), .dout_o(f_dout[l]),
      .empty_o(f_empty[l]), .full_o(), .level_o(f_level[l]), .free_o(f_free[l]));

    // vertical polling only while the FIFO can take a full block
    assign vpoll[l] = !hmode_i && init_done_o && (32'(f_free[l]) > 32'(vmax_i) + 32'd64);
  end

  assign init_done_o = &m_idone;
  assign sync_err_o  = |m_serr;

  // ------------------------------------------------------------ event builder
  typedef enum logic [2:0] {E_IDLE, E_WAIT, E_HDR0, E_HDR1, E_DRAIN, E_VDRAIN} estate_e;
  estate_e            est_q;
  logic [N_LINKS-1:0] back_q;
  logic [CW-1:0]      lk_q;
  logic [23:0]        total_q, left_q;
  logic               out_ok;

  // a trigger counted but not yet read out, and every chain idle
  assign hread  = (est_q == E_IDLE) && hmode_i && (hidx_q != trg_count_o) && (&m_ready);
  assign out_ok = !ev_valid_o || ev_ready_i;

  always_comb begin
    f_pop = '0;
    if (out_ok && !f_empty[lk_q] &&
        ((est_q == E_DRAIN && left_q != 0) || est_q == E_VDRAIN)) f_pop[lk_q] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est_q <= E_IDLE; back_q <= '0; lk_q <= '0; total_q <= '0; left_q <= '0;
      hidx_q <= '0; events_built_o <= '0; ev_valid_o <= 1'b0; ev_word_o <= '0;
    end else begin
      if (ev_ready_i) ev_valid_o <= 1'b0;
      if (cmd_i && cmd_code_i == CMD_START) begin
        hidx_q <= '0;
      end
      unique case (est_q)
        E_IDLE: begin
          if (hread) begin
            back_q <= '0;
            est_q  <= E_WAIT;
          end else if (!hmode_i && !f_empty[lk_q] && f_dout[lk_q][33]) begin
            est_q <= E_VDRAIN;          // a packet starts on this chain
          end else if (!hmode_i) begin
            lk_q <= (lk_q == CW'(N_LINKS-1)) ? '0 : lk_q + 1'b1;
          end
        end
        E_WAIT: begin
          back_q <= back_q | m_done;
          if (&(back_q | m_done)) begin
            logic [23:0] t;
            t = '0;
            for (int l = 0; l < N_LINKS; l++) t += 24'(f_level[l]);
            total_q <= t;
            est_q   <= E_HDR0;
          end
        end
        E_HDR0: if (out_ok) begin
          ev_valid_o <= 1'b1;
          ev_word_o  <= '{data: {8'hEB, total_q + 24'd1}, last: 1'b0};
          est_q      <= E_HDR1;
        end
        E_HDR1: if (out_ok) begin
          ev_valid_o <= 1'b1;
          ev_word_o  <= '{data: hidx_q, last: (total_q == 0)};
          lk_q       <= '0;
          left_q     <= total_q;
          est_q      <= (total_q == 0) ? E_IDLE : E_DRAIN;
          if (total_q == 0) begin
            hidx_q <= hidx_q + 1'b1;
            events_built_o <= events_built_o + 1'b1;
          end
        end
        E_DRAIN: begin
          if (f_pop[lk_q]) begin
            ev_valid_o <= 1'b1;
            ev_word_o  <= '{data: f_dout[lk_q][32:1], last: (left_q == 24'd1)};
            left_q     <= left_q - 1'b1;
            if (left_q == 24'd1) begin
              est_q  <= E_IDLE;
              hidx_q <= hidx_q + 1'b1;
              events_built_o <= events_built_o + 1'b1;
            end
          end else if (f_empty[lk_q] && left_q != 0) begin
            lk_q <= (lk_q == CW'(N_LINKS-1)) ? '0 : lk_q + 1'b1;
          end
        end
        E_VDRAIN: begin
          if (f_pop[lk_q]) begin
            ev_valid_o <= 1'b1;
            ev_word_o  <= '{data: f_dout[lk_q][32:1], last: f_dout[lk_q][0]};
            if (f_dout[lk_q][0]) begin
              est_q <= E_IDLE;
              lk_q  <= (lk_q == CW'(N_LINKS-1)) ? '0 : lk_q + 1'b1;
            end
          end
        end
        default: est_q <= E_IDLE;
      endcase
    end
  end
endmodule
