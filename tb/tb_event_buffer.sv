// tb_event_buffer: random packets are written while a reader pops at random;
// every word, end mark, tag and length must come out in order, a packet must
// become visible only when complete, and the free count must match.
`timescale 1ns/1ps
module tb_event_buffer;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  localparam int DEPTH = 64;
  logic wr, avail, pop;
  dword_t wword, rword;
  logic [31:0] wtag, rtag;
  logic [11:0] rlen;
  logic [6:0] free;
  logic [4:0] pcount;
  int checks = 0, failures = 0;
  event_buffer #(.DEPTH(DEPTH), .TAGS(16)) dut (.clk, .rst_n, .clear_i(1'b0),
    .wr_i(wr), .wr_word_i(wword), .wr_tag_i(wtag), .free_o(free),
    .pkt_avail_o(avail), .pkt_tag_o(rtag), .pkt_len_o(rlen), .rd_pop_i(pop), .rd_word_o(rword),
    .pkt_count_o(pcount));

  // reference queues
  int unsigned qw[$];      // words
  int unsigned qt[$];      // tags
  int unsigned ql[$];      // lengths
  int words_in = 0, npk_done = 0, npk_read = 0, rd_pos = 0;

  // writer: packets of 1..12 words, only when there is room
  initial begin
    wr = 0; wword = '0; wtag = '0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      int len; int unsigned tag;
      len = $urandom_range(1, 12); tag = $urandom;
      while (free < len) @(negedge clk);
      for (int w = 0; w < len; w++) begin
        wr = 1; wword.data = $urandom; wword.last = (w == len - 1); wtag = tag;
        qw.push_back(wword.data);
        if (w == len - 1) begin qt.push_back(tag); ql.push_back(len); end
        @(negedge clk);
      end
      wr = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    wait (npk_read == 300);
    repeat (2) @(negedge clk);
    checks++; if (avail) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // packets whose last word has been written (counted at the write edge)
  int complete = 0;
  always @(posedge clk) if (rst_n && wr && wword.last) complete++;

  // reader, at the falling edge: check visibility, then pop at random
  initial pop = 0;
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (avail != (complete > npk_read)) begin failures++; $display("avail %b complete %0d read %0d", avail, complete, npk_read); end
    pop = avail && ($urandom_range(0, 2) != 0);
    if (pop) begin
      int unsigned exp;
      checks += 3;
      exp = qw.pop_front();
      if (rword.data != exp) begin failures++; $display("data %h exp %h", rword.data, exp); end
      if (rtag != qt[0] || rlen != 12'(ql[0])) begin failures++; $display("tag/len"); end
      rd_pos++;
      if (rword.last != (rd_pos == ql[0])) begin failures++; $display("last"); end
      if (rword.last) begin
        void'(qt.pop_front()); void'(ql.pop_front()); rd_pos = 0; npk_read++;
      end
    end
  end

  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
