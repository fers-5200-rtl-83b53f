// tdlink_node: the TDlink end of a FERS unit (a link slave in a chain).
//
// Units of a chain form a ring: the master sends words to unit 0, each unit
// passes them on to the next, and the last unit's output returns to the
// master.  Every clock carries one ring word {kind, 32-bit data}; IDLE words
// fill the gaps.  The node's output is registered, so it adds one clock.
//
// Words passing through (they always have priority over the unit's own data,
// as the link's control traffic does):
//   ENUM(a)    the node takes address a and forwards ENUM(a+1), so the master
//              gets back the number of nodes;
//   CAL(n)     forwarded as CAL(n+1) (used by the master to measure delay);
//   HOPSET(h)  the node stores h, the link delay into it in clocks;
//   TSYNC(t)   t is the sender's time on the clock the word left it; the node
//              loads its time counter with t + h + 1 so that it reads the
//              same value as the master, and forwards TSYNC(t + h + 1);
//   CMD(c)     start / stop / trigger pulses to the unit;
//   REGA/REGD  register write: REGA {node, reg} addresses this node (or all
//              with node = 0xFF), the next REGD gives the data.
// Tokens (read requests) are captured instead of forwarded:
//   HREAD(N)   horizontal readout of trigger N.  The node waits while the
//              unit has not yet seen trigger N or is still converting it,
//              drops older packets, sends its packet of trigger N if it has
//              one (nothing if it missed the trigger), then passes HREAD(N)
//              on.  The master thus gets the packets of trigger N from every
//              unit in chain order, followed by the token.
//   VREAD(a,m) vertical readout, data = {a[7:0], m[23:0]}: node a sends
//              whole packets while the words sent stay within m (always at
//              least one packet if it has one), then passes the token on.
//              The token returns as VREAD(a, more), more = 1 if packets are
//              left.  Other nodes forward it.
// Each packet the node sends is preceded by SOP {node address, length};
// its words go out as DATA words, the last as DATA_LAST.
// Ring topology, token passing, skipping of missed triggers, time alignment
// with delay compensation and broadcast commands follow the system
// description; the word format and the equal-hop delay scheme are this
// design's.
module tdlink_node
  import fers_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ring_word_t        rx_i,
  output ring_word_t        tx_o,
  // time
  output logic              time_load_o,
  output logic [TIME_W-1:0] time_load_val_o,
  // commands and slow control
  output logic              cmd_start_o,
  output logic              cmd_stop_o,
  output logic              cmd_trg_o,
  output logic              reg_wr_o,
  output logic [7:0]        reg_addr_o,
  output logic [31:0]       reg_data_o,
  output logic [7:0]        addr_o,
  // acquisition status
  input  logic              running_i,
  input  logic [31:0]       trg_count_i,
  input  logic              pending_i,
  input  logic [31:0]       pending_tag_i,
  // event buffer
  input  logic              pkt_avail_i,
  input  logic [31:0]       pkt_tag_i,
  input  logic [11:0]       pkt_len_i,
  output logic              rd_pop_o,
  input  dword_t            rd_word_i
);
  typedef enum logic [2:0] {T_NONE, T_DECIDE, T_SOP, T_SEND, T_DISCARD, T_RELEASE} tok_state_e;

  tok_state_e  st_q;
  ring_word_t  tok_q;
  logic [7:0]  addr_q;
  logic [31:0] hop_q;
  logic        rega_q;
  logic [7:0]  rega_reg_q;
  logic [23:0] sent_q;

  logic        capture, pass, slot_free;
  ring_word_t  fwd;
  logic [31:0] tdiff;

  assign addr_o = addr_q;

  // capture tokens for this node
  always_comb begin
    capture = 1'b0;
    if (st_q == T_NONE) begin
      if (rx_i.kind == RK_HREAD) capture = 1'b1;
      if (rx_i.kind == RK_VREAD && rx_i.data[31:24] == addr_q) capture = 1'b1;
    end
    pass      = (rx_i.kind != RK_IDLE) && !capture;
    slot_free = !pass;
  end

  // forwarded word
  always_comb begin
    fwd = rx_i;
    unique case (rx_i.kind)
      RK_ENUM:  fwd.data = rx_i.data + 32'd1;
      RK_CAL:   fwd.data = rx_i.data + 32'd1;
      RK_TSYNC: fwd.data = rx_i.data + hop_q + 32'd1;
      default: ;
    endcase
  end

  assign time_load_o     = (rx_i.kind == RK_TSYNC);
  assign time_load_val_o = TIME_W'(rx_i.data) + TIME_W'(hop_q) + TIME_W'(1);

  // HREAD decision
  logic wait_trg, tag_match, tag_old;
  assign tdiff     = pkt_tag_i - tok_q.data;
  assign tag_match = pkt_avail_i && (tdiff == 0);
  assign tag_old   = pkt_avail_i && tdiff[31];
  assign wait_trg  = (running_i && $signed(trg_count_i - tok_q.data) <= 0) ||
                     (pending_i && pending_tag_i == tok_q.data);

  assign rd_pop_o = ((st_q == T_SEND) && slot_free) || (st_q == T_DISCARD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= T_NONE; tok_q <= '0; addr_q <= 8'hFE; hop_q <= '0;
      rega_q <= 1'b0; rega_reg_q <= '0; sent_q <= '0;
      tx_o <= '0;
      cmd_start_o <= 1'b0; cmd_stop_o <= 1'b0; cmd_trg_o <= 1'b0;
      reg_wr_o <= 1'b0; reg_addr_o <= '0; reg_data_o <= '0;
    end else begin
      cmd_start_o <= 1'b0; cmd_stop_o <= 1'b0; cmd_trg_o <= 1'b0;
      reg_wr_o    <= 1'b0;

      // ------------------------------------------- pass-through handling
      unique case (rx_i.kind)
        RK_ENUM:   addr_q <= rx_i.data[7:0];
        RK_HOPSET: hop_q  <= rx_i.data;
        RK_CMD: begin
          cmd_start_o <= (rx_i.data == CMD_START);
          cmd_stop_o  <= (rx_i.data == CMD_STOP);
          cmd_trg_o   <= (rx_i.data == CMD_TRIGGER);
        end
        RK_REGA: begin
          rega_q     <= (rx_i.data[15:8] == addr_q) || (rx_i.data[15:8] == NODE_BROADCAST);
          rega_reg_q <= rx_i.data[7:0];
        end
        RK_REGD: begin
          if (rega_q) begin
            reg_wr_o   <= 1'b1;
            reg_addr_o <= rega_reg_q;
            reg_data_o <= rx_i.data;
          end
          rega_q <= 1'b0;
        end
        default: ;
      endcase

      // ----------------------------------------------------- output word
      tx_o <= '{kind: RK_IDLE, data: '0};
      if (pass) tx_o <= fwd;
      else if (st_q == T_SOP)
        tx_o <= '{kind: RK_SOP, data: {addr_q, 12'h0, pkt_len_i}};
      else if (st_q == T_SEND)
        tx_o <= '{kind: rd_word_i.last ? RK_DATA_LAST : RK_DATA, data: rd_word_i.data};
      else if (st_q == T_RELEASE)
        tx_o <= (tok_q.kind == RK_VREAD) ? '{kind: RK_VREAD, data: {tok_q.data[31:24], 23'h0, pkt_avail_i}}
                                         : tok_q;

      // ------------------------------------------------------ token FSM
      unique case (st_q)
        T_NONE: if (capture) begin
          tok_q  <= rx_i;
          sent_q <= '0;
          st_q   <= T_DECIDE;
        end
        T_DECIDE: begin
          if (tok_q.kind == RK_HREAD) begin
            if (tag_old)        st_q <= T_DISCARD;
            else if (wait_trg)  st_q <= T_DECIDE;
            else if (tag_match) st_q <= T_SOP;
            else                st_q <= T_RELEASE;
          end else begin
            if (pkt_avail_i && (sent_q == 0 || sent_q + 24'(pkt_len_i) <= tok_q.data[23:0])) begin
              st_q   <= T_SOP;
              sent_q <= sent_q + 24'(pkt_len_i);
            end else st_q <= T_RELEASE;
          end
        end
        T_SOP:     if (slot_free) st_q <= T_SEND;
        T_SEND:    if (slot_free && rd_word_i.last) st_q <= (tok_q.kind == RK_HREAD) ? T_RELEASE : T_DECIDE;
        T_DISCARD: if (rd_word_i.last) st_q <= T_DECIDE;
        T_RELEASE: if (slot_free) st_q <= T_NONE;
        default:   st_q <= T_NONE;
      endcase
    end
  end

  a_send_has_packet: assert property (@(posedge clk) disable iff (!rst_n) rd_pop_o |-> pkt_avail_i);
endmodule
