// tdlink_master: master of one TDlink daisy chain (ring) of up to 16 units.
//
// Network start-up (init_i; a request that comes during a readout is kept
// and served when the token is back):
//   1. ENUM(0) goes round the ring; each node takes the next address, so
//      the word comes back as ENUM(N) with N the number of nodes.
//   2. CAL(0) goes round; its round trip R clocks is (N+1) hops of link delay
//      L plus one clock in each node: L = (R - N) / (N + 1), found by
//      repeated subtraction.  All hops are taken as equally long.
//   3. HOPSET(L) tells every node its link delay.
//   4. TSYNC(t) carries the master's time; each node loads t + L + 1 and
//      forwards its own time, so all nodes end up counting in step with the
//      master.  The word that comes back must hold the master's time minus
//      L; otherwise sync_err_o is set.
// After start-up the master broadcasts commands (cmd_i, highest priority),
// writes unit registers (reg_wr_i: REGA then REGD) and runs readouts:
//   hread_i(N)  sends the horizontal token for trigger N and forwards the
//               returning packets of all units; done_o pulses when the token
//               is back.
//   vpoll_i     while high, vertical readout: VREAD(k, vmax_i) to node k;
//               a node that reports more data left is read again at once,
//               otherwise the master moves to the next node,
//               so busy units get priority and silent ones cost one token
//               round trip.
// Returning unit data leave on out_* one word per clock: out_sop_o marks the
// SOP word {node, length}, out_word_o the packet words (last marked).
// The start-up procedure (node count, delay, common time zero), command
// broadcast and the two readout orders are the system's; this procedure's
// details and the vertical priority rule are this design's.
module tdlink_master
  import fers_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  output ring_word_t        tx_o,
  input  ring_word_t        rx_i,
  input  logic [TIME_W-1:0] now_i,
  // control
  input  logic              init_i,
  input  logic              cmd_i,
  input  logic [31:0]       cmd_code_i,
  input  logic              reg_wr_i,
  input  logic [7:0]        reg_node_i,
  input  logic [7:0]        reg_addr_i,
  input  logic [31:0]       reg_data_i,
  input  logic              hread_i,
  input  logic [31:0]       hread_idx_i,
  input  logic              vpoll_i,
  input  logic [23:0]       vmax_i,
  output logic              ready_o,       // idle: init, reg_wr and reads accepted
  output logic              init_done_o,
  output logic              sync_err_o,
  output logic [7:0]        n_nodes_o,
  output logic [31:0]       hop_o,
  output logic              done_o,        // a read token came back
  // data from the chain
  output logic              out_valid_o,
  output logic              out_sop_o,
  output dword_t            out_word_o
);
  typedef enum logic [3:0] {
    M_IDLE, M_ENUM, M_ENUM_W, M_CAL, M_CAL_W, M_DIV, M_HOP, M_HOP_W,
    M_TSYNC, M_TSYNC_W, M_REGD, M_TOKEN, M_TOKEN_W
  } mstate_e;

  mstate_e     st_q;
  ring_word_t  tok_q;
  logic [TIME_W-1:0] t_sent_q;
  logic [31:0] rem_q, quo_q;
  logic [31:0] reg_data_q;
  logic [7:0]  vnode_q;
  logic        vmode_q;
  logic        init_req_q;   // start-up requested while a readout was running

  assign ready_o = (st_q == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= M_IDLE; tok_q <= '0; t_sent_q <= '0; rem_q <= '0; quo_q <= '0;
      reg_data_q <= '0; vnode_q <= '0; vmode_q <= 1'b0; init_req_q <= 1'b0;
      tx_o <= '0; init_done_o <= 1'b0; sync_err_o <= 1'b0;
      n_nodes_o <= '0; hop_o <= '0; done_o <= 1'b0;
      out_valid_o <= 1'b0; out_sop_o <= 1'b0; out_word_o <= '0;
    end else begin
      logic slot;   // the tx slot of this clock is still free
      slot   = 1'b1;
      done_o <= 1'b0;
      tx_o   <= '{kind: RK_IDLE, data: '0};

      // returning data
      out_valid_o <= (rx_i.kind inside {RK_DATA, RK_DATA_LAST, RK_SOP});
      out_sop_o   <= (rx_i.kind == RK_SOP);
      out_word_o  <= '{data: rx_i.data, last: rx_i.kind == RK_DATA_LAST};

      if (init_i) begin
        init_req_q  <= 1'b1;
        init_done_o <= 1'b0;
      end

      if (cmd_i) begin
        tx_o <= '{kind: RK_CMD, data: cmd_code_i};
        slot = 1'b0;
      end

      unique case (st_q)
        M_IDLE: begin
          if (init_i || init_req_q) begin
            st_q <= M_ENUM; init_done_o <= 1'b0; sync_err_o <= 1'b0; init_req_q <= 1'b0;
          end else if (reg_wr_i && slot) begin
            tx_o <= '{kind: RK_REGA, data: {16'h0, reg_node_i, reg_addr_i}};
            reg_data_q <= reg_data_i;
            st_q <= M_REGD;
          end else if (hread_i) begin
            tok_q   <= '{kind: RK_HREAD, data: hread_idx_i};
            vmode_q <= 1'b0;
            st_q    <= M_TOKEN;
          end else if (vpoll_i && n_nodes_o != 0) begin
            tok_q    <= '{kind: RK_VREAD, data: {vnode_q, vmax_i}};
            vmode_q  <= 1'b1;
            st_q     <= M_TOKEN;
          end
        end
        M_REGD: if (slot) begin
          tx_o <= '{kind: RK_REGD, data: reg_data_q};
          st_q <= M_IDLE;
        end
        M_ENUM: if (slot) begin
          tx_o <= '{kind: RK_ENUM, data: 32'd0};
          st_q <= M_ENUM_W;
        end
        M_ENUM_W: if (rx_i.kind == RK_ENUM) begin
          n_nodes_o <= rx_i.data[7:0];
          st_q      <= M_CAL;
        end
        M_CAL: if (slot) begin
          tx_o     <= '{kind: RK_CAL, data: 32'd0};
          t_sent_q <= now_i + 1'b1;
          st_q     <= M_CAL_W;
        end
        M_CAL_W: if (rx_i.kind == RK_CAL) begin
          rem_q <= 32'(now_i - t_sent_q) - rx_i.data;
          quo_q <= '0;
          st_q  <= M_DIV;
        end
        M_DIV: begin
          if (rem_q >= 32'(n_nodes_o) + 32'd1) begin
            rem_q <= rem_q - (32'(n_nodes_o) + 32'd1);
            quo_q <= quo_q + 32'd1;
          end else begin
            hop_o <= quo_q;
            st_q  <= M_HOP;
          end
        end
        M_HOP: if (slot) begin
          tx_o <= '{kind: RK_HOPSET, data: hop_o};
          st_q <= M_HOP_W;
        end
        M_HOP_W: if (rx_i.kind == RK_HOPSET) st_q <= M_TSYNC;
        M_TSYNC: if (slot) begin
          tx_o <= '{kind: RK_TSYNC, data: 32'(now_i + 1'b1)};
          st_q <= M_TSYNC_W;
        end
        M_TSYNC_W: if (rx_i.kind == RK_TSYNC) begin
          sync_err_o  <= (rx_i.data != 32'(now_i - TIME_W'(hop_o)));
          init_done_o <= 1'b1;
          vnode_q     <= '0;
          st_q        <= M_IDLE;
        end
        M_TOKEN: if (slot) begin
          tx_o     <= tok_q;
          st_q     <= M_TOKEN_W;
        end
        M_TOKEN_W: if (rx_i.kind == tok_q.kind) begin
          done_o <= 1'b1;
          st_q   <= M_IDLE;
          // vertical priority: stay on a node that still has data
          if (vmode_q && !rx_i.data[0])
            vnode_q <= (vnode_q + 8'd1 >= n_nodes_o) ? 8'd0 : vnode_q + 8'd1;
        end
        default: st_q <= M_IDLE;
      endcase
    end
  end
endmodule
