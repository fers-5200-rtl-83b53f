// tb_mcs_counters: random self-trigger edges on all channels and triggers at
// irregular intervals (>= 1 us).  A model counts the edges of each slot --
// an edge on the trigger clock opening the new slot -- and every packet must
// carry header, time stamp, slot index and the 64 counts of its slot, in 67
// consecutive clocks.  Summed over slots no edge may be lost (no dead time).
`timescale 1ns/1ps
module tb_mcs_counters;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic run, start, trg, wr, lost;
  logic [N_CH-1:0] en, lead;
  logic [TIME_W-1:0] now;
  dword_t word;
  logic [31:0] tag, rdv;
  int checks = 0, failures = 0;
  mcs_counters dut (.clk, .rst_n, .run_i(run), .start_i(start), .ch_enable_i(en), .lead_i(lead),
    .trg_i(trg), .now_i(now), .buf_free_i(13'd4096), .wr_o(wr), .wr_word_o(word), .wr_tag_o(tag),
    .lost_o(lost), .rd_sel_i(6'd5), .rd_val_o(rdv));

  int unsigned model [N_CH];
  int unsigned exp_q [$];    // expected packet words
  int idx = 0, npk = 0, first_cyc = 0, cyc = 0;
  longint total_in = 0, total_out = 0;
  int unsigned slot = 0;

  always @(posedge clk) begin
    cyc++;
    now <= now + 1;
  end

  initial begin
    run = 0; start = 0; trg = 0; en = '1; lead = '0; now = 100;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    en = '1; en[7] = 1'b0;
    @(negedge clk) start = 1; run = 1;
    @(negedge clk) start = 0;
    foreach (model[i]) model[i] = 0;
    for (int s = 0; s < 20; s++) begin
      int dwell;
      dwell = $urandom_range(125, 300);
      for (int c = 0; c < dwell; c++) begin
        lead = {$urandom, $urandom} & {$urandom, $urandom};
        trg  = (c == dwell - 1);
        if (trg) begin
          // packet of this slot
          exp_q.push_back({4'(PKT_COUNTING), 12'd67, 16'(now >> 32)});
          exp_q.push_back(32'(now));
          exp_q.push_back(slot);
          for (int i = 0; i < N_CH; i++) begin exp_q.push_back(model[i]); total_out += model[i]; end
          slot++;
          foreach (model[i]) model[i] = 0;
        end
        for (int i = 0; i < N_CH; i++) if (lead[i] && en[i]) begin model[i]++; total_in++; end
        @(negedge clk);
        // on-the-fly read of channel 5 (value after this clock's edge)
      end
    end
    lead = '0; trg = 0;
    repeat (100) @(negedge clk);
    foreach (model[i]) total_out += model[i];
    checks++; if (total_in != total_out) failures++;
    checks++; if (rdv != model[5]) begin failures++; $display("on-the-fly %0d %0d", rdv, model[5]); end
    checks++; if (npk != 20) begin failures++; $display("packets %0d", npk); end
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && wr) begin
    int unsigned e;
    checks++;
    e = exp_q.pop_front();
    if (idx == 0) first_cyc = cyc;
    if (word.data != e) begin failures++; $display("pkt %0d word %0d: %h exp %h", npk, idx, word.data, e); end
    if (cyc - first_cyc != idx) begin failures++; $display("gap in packet"); end
    if (word.last != (idx == 66)) failures++;
    idx++;
    if (word.last) begin idx = 0; npk++; end
  end
  always @(posedge clk) if (rst_n && lost) begin failures++; $display("slot lost"); end

  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
