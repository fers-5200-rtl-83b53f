// trigger_logic: chooses what triggers the acquisition of a unit.
//
// The trigger of a unit can be local -- the OR or a majority of its 64
// self-triggers -- or external: the LEMO T1 input, a trigger command sent on
// the TDlink by the concentrator, the internal periodic generator, or a
// software write.  For OR and majority the enabled self-trigger levels of the
// current clock are counted and the trigger fires on the clock where the
// count first reaches the level (OR = level 1).  T1 goes through a two-stage
// synchronizer and fires on its rising edge.  trg_o is a one-clock pulse,
// registered, one clock after the condition (three after a T1 edge).
// t_or_o is the OR of the enabled self-triggers (the unit's T-OR), also
// registered.  The list of sources follows the system description; edge
// detection and synchronizer depth are this design's choices.
module trigger_logic
  import fers_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  trg_src_e        src_i,
  input  logic [6:0]      maj_level_i,
  input  logic [N_CH-1:0] ch_enable_i,
  input  logic [N_CH-1:0] active_i,      // self-trigger levels from the TDCs
  input  logic            t1_i,          // LEMO T1, asynchronous
  input  logic            periodic_i,
  input  logic            link_trg_i,
  input  logic            sw_trg_i,
  output logic            trg_o,
  output logic            t_or_o
);
  logic [6:0] nact;
  logic       cond, cond_q;
  logic [2:0] t1_sync;

  always_comb begin
    nact = '0;
    for (int i = 0; i < N_CH; i++) nact += 7'(active_i[i] & ch_enable_i[i]);
  end

  always_comb begin
    unique case (src_i)
      TSRC_OR:       cond = (nact != 0);
      TSRC_MAJORITY: cond = (nact >= maj_level_i) && (maj_level_i != 0);
      default:       cond = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cond_q  <= 1'b0;
      t1_sync <= '0;
      trg_o   <= 1'b0;
      t_or_o  <= 1'b0;
    end else begin
      cond_q  <= cond;
      t1_sync <= {t1_sync[1:0], t1_i};
      t_or_o  <= |(active_i & ch_enable_i);
      unique case (src_i)
        TSRC_OR, TSRC_MAJORITY: trg_o <= cond & ~cond_q;
        TSRC_T1:       trg_o <= t1_sync[1] & ~t1_sync[2];
        TSRC_PERIODIC: trg_o <= periodic_i;
        TSRC_LINK:     trg_o <= link_trg_i;
        TSRC_SW:       trg_o <= sw_trg_i;
        default:       trg_o <= 1'b0;
      endcase
    end
  end
endmodule
