// tb_tdc_channel: random pulses with known edges (in 0.5 ns bins) are cut
// into 16-sample words; the leading edge, the hit time and the ToT reported
// by the TDC must equal the edges the pulses were built with.
`timescale 1ns/1ps
module tb_tdc_channel;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [FINE_BINS-1:0] samples;
  logic [TIME_W-1:0]    now;
  logic active, lead, hit;
  logic [TIME_W-1:0] lead_t, hit_t;
  logic [TOT_W-1:0]  tot;
  int checks = 0, failures = 0;

  tdc_channel dut (.clk, .rst_n, .samples_i(samples), .now_i(now), .active_o(active),
    .lead_o(lead), .lead_time_o(lead_t), .hit_o(hit), .hit_time_o(hit_t), .hit_tot_o(tot));

  localparam int NP = 200;
  longint lead_b [NP];
  longint trail_b[NP];
  int nlead = 0, nhit = 0;

  function automatic logic level_at(longint bin);
    for (int p = 0; p < NP; p++) if (bin >= lead_b[p] && bin < trail_b[p]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    longint b;
    b = 40;
    for (int p = 0; p < NP; p++) begin
      lead_b[p]  = b + $urandom_range(0, 40);
      trail_b[p] = lead_b[p] + $urandom_range(1, 300);
      b = trail_b[p] + $urandom_range(20, 120);
    end
  end

  // stimulus: word k holds bins 16k .. 16k+15, now = k
  initial begin
    samples = '0; now = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (longint k = 0; k < (trail_b[NP-1] / 16) + 10; k++) begin
      @(negedge clk);
      now = TIME_W'(k);
      for (int i = 0; i < 16; i++) samples[i] = level_at(16*k + i);
    end
    @(negedge clk); samples = '0;
    repeat (5) @(posedge clk);
    checks++; if (nlead != NP) begin failures++; $display("lead count %0d", nlead); end
    checks++; if (nhit != NP) begin failures++; $display("hit count %0d", nhit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (lead) begin
      checks++;
      if (nlead >= NP || lead_t != TIME_W'(lead_b[nlead])) begin
        failures++; $display("lead %0d: got %0d", nlead, lead_t);
      end
      nlead++;
    end
    if (hit) begin
      checks += 2;
      if (nhit >= NP || hit_t != TIME_W'(lead_b[nhit])) begin failures++; $display("hit time %0d", nhit); end
      if (nhit >= NP || tot != TOT_W'(trail_b[nhit] - lead_b[nhit])) begin
        failures++; $display("tot %0d: got %0d", nhit, tot);
      end
      nhit++;
    end
  end

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
