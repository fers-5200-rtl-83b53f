// tb_pha_sequencer: spectroscopy events with a model of the two front-end
// ASICs and their ADCs.  For each event the model answers every conversion
// start with two charges and charge-trigger bits chosen by the testbench.
// Checked: hold rises hold_delay+2 clocks after the trigger and lasts exactly
// 32 steps of STEP_CLKS clocks (1248 clocks, ~10 us at the default); the
// packet carries header, time stamp, mask and the charges of the kept
// channels (all enabled ones, or only those whose charge trigger fired
// with zero suppression); triggers during the conversion are refused.
`timescale 1ns/1ps
module tb_pha_sequencer;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  localparam int STEP = 39;
  logic run, trg, zs, hold, astart, avalid, wr, busy, lost, pend;
  logic [31:0] trg_id, tag, ptag;
  logic [TIME_W-1:0] now;
  logic [N_CH-1:0] en;
  logic [7:0] hd;
  logic [4:0] msel;
  logic [CHARGE_W-1:0] adata [N_ASIC];
  logic [N_ASIC-1:0] qtrg;
  dword_t word;
  int checks = 0, failures = 0;

  pha_sequencer #(.STEP_CLKS(STEP)) dut (.clk, .rst_n, .run_i(run), .trg_i(trg), .trg_id_i(trg_id),
    .now_i(now), .ch_enable_i(en), .zs_en_i(zs), .hold_delay_i(hd), .hold_o(hold), .mux_sel_o(msel),
    .adc_start_o(astart), .adc_valid_i(avalid), .adc_data_i(adata), .qtrg_i(qtrg),
    .buf_free_i(13'd4096), .wr_o(wr), .wr_word_o(word), .wr_tag_o(tag), .busy_o(busy), .lost_o(lost),
    .pending_o(pend), .pending_tag_o(ptag));

  // per-event truth
  logic [CHARGE_W-1:0] q [N_CH];
  logic [N_CH-1:0]     qfire;
  always @(posedge clk) now <= now + 1;

  // ADC model: answers 3..30 clocks after a start
  initial begin
    avalid = 0; adata[0] = '0; adata[1] = '0; qtrg = '0;
    forever begin
      @(posedge clk);
      if (astart) begin
        int ch;
        ch = msel;
        repeat ($urandom_range(2, 29)) @(posedge clk);
        #1;
        avalid = 1; adata[0] = q[ch]; adata[1] = q[32 + ch]; qtrg = {qfire[32 + ch], qfire[ch]};
        @(posedge clk); #1 avalid = 0;
      end
    end
  end

  int unsigned exp_q[$];
  int nwords = 0, npk = 0;
  always @(posedge clk) if (rst_n && wr) begin
    int unsigned e;
    checks++;
    e = exp_q.pop_front();
    if (word.data != e) begin failures++; $display("pkt %0d: %h exp %h", npk, word.data, e); end
    if (word.last != (exp_q.size() == 0)) begin failures++; $display("last"); end
    if (word.last) npk++;
  end

  task automatic one_event(input bit zs_on, input logic [N_CH-1:0] ena, input logic [31:0] id);
    logic [N_CH-1:0] mask;
    logic [TIME_W-1:0] ts;
    int nk, hold_rise, hold_len, t;
    logic [15:0] ch_list [$];
    foreach (q[i]) q[i] = 16'($urandom);
    qfire = {$urandom, $urandom};
    zs = zs_on; en = ena; trg_id = id;
    mask = ena & (zs_on ? qfire : '1);
    nk = $countones(mask);
    ts = now;
    trg = 1;
    exp_q.push_back({4'(PKT_SPECT), 12'(4 + (nk + 1) / 2), 16'(ts >> 32)});
    exp_q.push_back(32'(ts));
    exp_q.push_back(mask[63:32]);
    exp_q.push_back(mask[31:0]);
    for (int i = 0; i < N_CH; i++) if (mask[i]) ch_list.push_back(q[i]);
    if (nk % 2) ch_list.push_back(16'h0);
    for (int i = 0; i < ch_list.size(); i += 2) exp_q.push_back({ch_list[i], ch_list[i+1]});
    @(negedge clk) trg = 0;
    t = 1; hold_rise = -1; hold_len = 0;
    while (busy) begin
      if (hold && hold_rise < 0) hold_rise = t;
      if (hold) hold_len++;
      // a trigger in the middle of the conversion must be refused
      if (t == 600) begin
        trg = 1; #1;
        checks++; if (!lost) begin failures++; $display("trigger not refused"); end
        checks++; if (!pend || ptag != id) failures++;
      end else trg = 0;
      @(negedge clk); t++;
    end
    checks += 3;
    if (hold_rise != hd + 2) begin failures++; $display("hold rise at %0d", hold_rise); end
    if (hold_len != 32 * STEP) begin failures++; $display("hold length %0d", hold_len); end
    if (exp_q.size() != 0) begin failures++; $display("words missing %0d", exp_q.size()); end
    $display("event %0d: dead time %0d clocks (%0d words)", id, t, 4 + (nk + 1) / 2);
    checks++; if (t > hd + 32 * STEP + 80) failures++;
  endtask

  initial begin
    run = 0; trg = 0; zs = 0; en = '1; hd = 12; trg_id = 0; now = 1000;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1; run = 1;
    @(negedge clk);
    one_event(0, '1, 0);
    one_event(1, '1, 1);
    one_event(1, {$urandom, $urandom}, 2);
    one_event(0, 64'h0000_0000_0000_0001, 3);
    one_event(1, '0, 4);
    hd = 3;
    one_event(1, '1, 5);
    checks++; if (npk != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
