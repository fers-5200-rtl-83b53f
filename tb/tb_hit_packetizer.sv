// tb_hit_packetizer: random hits in timing and ToT mode with several packet
// sizes.  Every packet must hold pkt_hits hits (the last one fewer, after the
// flush), a header with type, length and hit count, and the hits in arrival
// order in the documented word layout; packets are written without gaps.
`timescale 1ns/1ps
module tb_hit_packetizer;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic start, totm, flush, ivalid, iready, wr;
  logic [11:0] nh;
  hit_t ih;
  dword_t word;
  logic [31:0] tag;
  int checks = 0, failures = 0;
  hit_packetizer #(.HIT_DEPTH(64)) dut (.clk, .rst_n, .start_i(start), .tot_mode_i(totm), .pkt_hits_i(nh),
    .flush_i(flush), .in_valid_i(ivalid), .in_hit_i(ih), .in_ready_o(iready), .buf_free_i(13'd4096),
    .wr_o(wr), .wr_word_o(word), .wr_tag_o(tag));

  hit_t sent[$];
  int in_pkt = 0, pkt_n = 0, pkt_len = 0, widx = 0, npk = 0, hits_out = 0, exp_tag = 0;
  int unsigned hdr;
  hit_t cur;

  always @(posedge clk) if (rst_n && wr) begin
    if (widx == 0) begin
      hdr = word.data;
      pkt_n = word.data[11:0];
      pkt_len = word.data[27:16];
      checks += 3;
      if (word.data[31:28] != (totm ? PKT_TOT : PKT_TIMING)) begin failures++; $display("type"); end
      if (pkt_len != 1 + pkt_n * (totm ? 2 : 1)) begin failures++; $display("len %0d n %0d", pkt_len, pkt_n); end
      if (!(pkt_n == nh || (flush && pkt_n < nh && pkt_n > 0))) begin failures++; $display("n %0d", pkt_n); end
      if (tag != 32'(exp_tag)) failures++;
    end else begin
      if (!totm || widx % 2 == 1) begin
        cur = sent.pop_front();
        checks++;
        if (word.data != {2'b00, cur.ch, cur.ts}) begin failures++; $display("hit word %h", word.data); end
        hits_out++;
      end else begin
        checks++;
        if (word.data != {16'h0, cur.tot}) begin failures++; $display("tot word"); end
      end
    end
    checks++;
    if (word.last != (widx == pkt_len - 1)) begin failures++; $display("last at %0d", widx); end
    widx++;
    if (word.last) begin widx = 0; npk++; exp_tag++; end
  end

  task automatic run_case(bit tm, int n, int nhits);
    totm = tm; nh = 12'(n); flush = 0; exp_tag = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    hits_out = 0;
    for (int i = 0; i < nhits; i++) begin
      ih = '{ch: 6'($urandom), ts: 24'($urandom), tot: 16'($urandom)};
      ivalid = 1;
      @(posedge clk);
      while (!iready) @(posedge clk);
      sent.push_back(ih);
      @(negedge clk); ivalid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    flush = 1;
    repeat (100) @(negedge clk);
    flush = 0;
    checks++; if (hits_out != nhits) begin failures++; $display("hits %0d of %0d", hits_out, nhits); end
  endtask

  initial begin
    start = 0; totm = 0; flush = 0; ivalid = 0; nh = 4; ih = '0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    run_case(0, 4, 37);
    run_case(1, 5, 33);
    run_case(0, 16, 100);
    run_case(1, 1, 7);
    $display("packets %0d", npk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
