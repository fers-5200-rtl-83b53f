// fers_pkg: constants and types shared by the FERS-5200 readout logic.
//
// The numbers that come from the system description are the 64 channels of a
// unit (two 32-channel front-end ASICs), the 48-bit trigger time stamp with
// 8 ns granularity (so one system clock of 125 MHz), the 64-bit absolute time,
// the 0.5 ns TDC bin (16 bins per clock), the 24-bit timing-mode time stamp,
// the 16-bit charge and the 16-unit daisy chains of 8 links each.
// Everything else here -- the 32-bit word width of the readout path, packet
// header layout, TDlink word kinds, command codes and register map -- is this
// design's own choice.
package fers_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_CH        = 64;  // channels per unit
  localparam int unsigned N_ASIC      = 2;   // front-end ASICs per unit
  localparam int unsigned CH_PER_ASIC = 32;
  localparam int unsigned TIME_W      = 64;  // absolute time (clock ticks)
  localparam int unsigned TS_W        = 48;  // trigger time stamp
  localparam int unsigned FINE_BINS   = 16;  // 0.5 ns bins per 8 ns clock
  localparam int unsigned FINE_W      = 4;
  localparam int unsigned HIT_TS_W    = 24;  // timing-mode time stamp
  localparam int unsigned TOT_W       = 16;  // time over threshold, 0.5 ns units
  localparam int unsigned CHARGE_W    = 16;
  localparam int unsigned WORD_W      = 32;  // readout word

  // ------------------------------------------------------ acquisition modes
  typedef enum logic [1:0] {
    MODE_COUNTING = 2'd0,   // photon counting (MCS)
    MODE_SPECT    = 2'd1,   // spectroscopy (PHA)
    MODE_TIMING   = 2'd2,   // time stamping
    MODE_TOT      = 2'd3    // time stamping + time over threshold
  } acq_mode_e;

  typedef enum logic [1:0] {
    SUB_STREAMING    = 2'd0,
    SUB_COMMON_START = 2'd1,
    SUB_COMMON_STOP  = 2'd2
  } timing_sub_e;

  typedef enum logic [2:0] {
    TSRC_OR       = 3'd0,   // OR of the 64 self-triggers
    TSRC_MAJORITY = 3'd1,   // at least maj_level self-triggers
    TSRC_T1       = 3'd2,   // LEMO T1 input
    TSRC_PERIODIC = 3'd3,   // internal dwell-time generator
    TSRC_LINK     = 3'd4,   // trigger command on the TDlink
    TSRC_SW       = 3'd5    // register write
  } trg_src_e;

  // ---------------------------------------------------------- packet types
  localparam logic [3:0] PKT_SPECT    = 4'h1;
  localparam logic [3:0] PKT_COUNTING = 4'h2;
  localparam logic [3:0] PKT_TIMING   = 4'h3;
  localparam logic [3:0] PKT_TOT      = 4'h4;

  // header: {type[3:0], length in words including the header [11:0]}
  function automatic logic [15:0] mk_header(logic [3:0] ptype, logic [11:0] len);
    return {ptype, len};
  endfunction

  // One readout word with its end-of-packet mark.
  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic              last;
  } dword_t;

  // One time-stamped hit of the timing modes.
  typedef struct packed {
    logic [5:0]          ch;
    logic [HIT_TS_W-1:0] ts;
    logic [TOT_W-1:0]    tot;
  } hit_t;

  // ------------------------------------------------------------- TDlink
  typedef enum logic [3:0] {
    RK_IDLE      = 4'd0,
    RK_DATA      = 4'd1,   // payload word of a unit packet
    RK_DATA_LAST = 4'd2,   // last payload word of a unit packet
    RK_ENUM      = 4'd3,   // data = address of the next node
    RK_CAL       = 4'd4,   // data = number of nodes crossed
    RK_HOPSET    = 4'd5,   // data = link delay per hop (clocks)
    RK_TSYNC     = 4'd6,   // data = sender's time when the word leaves it
    RK_CMD       = 4'd7,   // data = command code
    RK_HREAD     = 4'd8,   // token: horizontal read of trigger index data
    RK_VREAD     = 4'd9,   // token: vertical read, data = {addr, max words}
    RK_REGA      = 4'd10,  // register write address {node[7:0], reg[7:0]}
    RK_REGD      = 4'd11,  // register write data
    RK_SOP       = 4'd12   // start of a unit packet: {node[7:0], 12'h0, length[11:0]}
  } ring_kind_e;

  typedef struct packed {
    ring_kind_e        kind;
    logic [WORD_W-1:0] data;
  } ring_word_t;

  localparam logic [WORD_W-1:0] CMD_START   = 32'd1;
  localparam logic [WORD_W-1:0] CMD_STOP    = 32'd2;
  localparam logic [WORD_W-1:0] CMD_TRIGGER = 32'd3;

  localparam logic [7:0] NODE_BROADCAST = 8'hFF;

  // ------------------------------------------------------- configuration
  typedef struct packed {
    acq_mode_e          mode;
    timing_sub_e        tsub;
    trg_src_e           trg_src;
    logic [6:0]         maj_level;   // majority level
    logic [N_CH-1:0]    ch_enable;
    logic               zs_en;       // zero suppression (spectroscopy)
    logic [31:0]        dwell;       // periodic trigger period, clocks
    logic [7:0]         hold_delay;  // trigger to hold, clocks
    logic [3:0]         ts_lsb;      // timing LSB = 0.5 ns * 2^ts_lsb
    logic               dt_mode;     // timing: delta-T from T0
    logic [23:0]        window;      // timing window, 0.5 ns units
    logic [11:0]        pkt_hits;    // hits per timing packet
  } fers_cfg_t;

  // register map (32-bit registers)
  localparam logic [7:0] REG_MODE     = 8'h00; // [1:0] mode [3:2] tsub [6:4] trg_src [13:7] maj [14] zs [15] dt [19:16] lsb
  localparam logic [7:0] REG_CHEN_LO  = 8'h01;
  localparam logic [7:0] REG_CHEN_HI  = 8'h02;
  localparam logic [7:0] REG_DWELL    = 8'h03;
  localparam logic [7:0] REG_HOLD     = 8'h04;
  localparam logic [7:0] REG_WINDOW   = 8'h05;
  localparam logic [7:0] REG_PKTHITS  = 8'h06;
  localparam logic [7:0] REG_SWTRG    = 8'h07; // write: software trigger pulse
  localparam logic [7:0] REG_HVSET    = 8'h08; // bias set-point, mV
  localparam logic [7:0] REG_HVCOEF   = 8'h09; // [15:0] mV/degC * 256 (signed) [31:16] Tref in 0.01 degC
  localparam logic [7:0] REG_RUN      = 8'h0A; // write CMD_START or CMD_STOP (stand-alone use)

endpackage
