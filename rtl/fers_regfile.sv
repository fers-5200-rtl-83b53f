// fers_regfile: configuration registers of a FERS unit.
//
// The unit is configured either over the TDlink (slow-control writes routed
// by the link node) or, in stand-alone use, by the local microcontroller
// that bridges USB and Ethernet.  Both write the same 32-bit registers; on a
// clash in the same clock the link write wins.  The registers are decoded
// into the configuration struct cfg_o (see fers_pkg for the map).  A write to
// REG_SWTRG gives a one-clock software trigger pulse sw_trg_o; writing
// CMD_START / CMD_STOP to REG_RUN gives start_o / stop_o (stand-alone runs).  rd_addr_i /
// rd_data_o read a register back combinationally.
// Reset values: spectroscopy mode, link trigger, all channels on, no zero
// suppression, 1 ms dwell, hold 12 clocks (~100 ns), 1 us window, 16 hits per
// packet, 55 V bias without compensation.  Slow control over the link and
// the local interface are the system's; the map and defaults are this
// design's.
module fers_regfile
  import fers_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        link_wr_i,
  input  logic [7:0]  link_addr_i,
  input  logic [31:0] link_data_i,
  input  logic        uc_wr_i,
  input  logic [7:0]  uc_addr_i,
  input  logic [31:0] uc_data_i,
  input  logic [7:0]  rd_addr_i,
  output logic [31:0] rd_data_o,
  output fers_cfg_t   cfg_o,
  output logic        sw_trg_o,
  output logic        start_o,
  output logic        stop_o,
  output logic [31:0] hvset_o,
  output logic [31:0] hvcoef_o
);
  logic [31:0] r_mode, r_chen_lo, r_chen_hi, r_dwell, r_hold, r_window, r_pkthits;
  logic        wr;
  logic [7:0]  addr;
  logic [31:0] data;

  assign wr   = link_wr_i || uc_wr_i;
  assign addr = link_wr_i ? link_addr_i : uc_addr_i;
  assign data = link_wr_i ? link_data_i : uc_data_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_mode    <= {12'h0, 4'd0, 1'b0, 1'b0, 7'd1, TSRC_LINK, SUB_STREAMING, MODE_SPECT};
      r_chen_lo <= '1;
      r_chen_hi <= '1;
      r_dwell   <= 32'd125000;
      r_hold    <= 32'd12;
      r_window  <= 32'd2000;
      r_pkthits <= 32'd16;
      hvset_o   <= 32'd55000;
      hvcoef_o  <= 32'h0960_0000;  // Tref 24.00 degC, coefficient 0
      sw_trg_o  <= 1'b0;
      start_o   <= 1'b0;
      stop_o    <= 1'b0;
    end else begin
      sw_trg_o <= wr && (addr == REG_SWTRG);
      start_o  <= wr && (addr == REG_RUN) && (data == CMD_START);
      stop_o   <= wr && (addr == REG_RUN) && (data == CMD_STOP);
      if (wr) begin
        unique case (addr)
          REG_MODE:    r_mode    <= data;
          REG_CHEN_LO: r_chen_lo <= data;
          REG_CHEN_HI: r_chen_hi <= data;
          REG_DWELL:   r_dwell   <= data;
          REG_HOLD:    r_hold    <= data;
          REG_WINDOW:  r_window  <= data;
          REG_PKTHITS: r_pkthits <= data;
          REG_HVSET:   hvset_o   <= data;
          REG_HVCOEF:  hvcoef_o  <= data;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    cfg_o.mode       = acq_mode_e'(r_mode[1:0]);
    cfg_o.tsub       = timing_sub_e'(r_mode[3:2]);
    cfg_o.trg_src    = trg_src_e'(r_mode[6:4]);
    cfg_o.maj_level  = r_mode[13:7];
    cfg_o.zs_en      = r_mode[14];
    cfg_o.dt_mode    = r_mode[15];
    cfg_o.ts_lsb     = r_mode[19:16];
    cfg_o.ch_enable  = {r_chen_hi, r_chen_lo};
    cfg_o.dwell      = r_dwell;
    cfg_o.hold_delay = r_hold[7:0];
    cfg_o.window     = r_window[23:0];
    cfg_o.pkt_hits   = r_pkthits[11:0];
  end

  always_comb begin
    unique case (rd_addr_i)
      REG_MODE:    rd_data_o = r_mode;
      REG_CHEN_LO: rd_data_o = r_chen_lo;
      REG_CHEN_HI: rd_data_o = r_chen_hi;
      REG_DWELL:   rd_data_o = r_dwell;
      REG_HOLD:    rd_data_o = r_hold;
      REG_WINDOW:  rd_data_o = r_window;
      REG_PKTHITS: rd_data_o = r_pkthits;
      REG_HVSET:   rd_data_o = hvset_o;
      REG_HVCOEF:  rd_data_o = hvcoef_o;
      default:     rd_data_o = '0;
    endcase
  end
endmodule
