// tb_timing_acq: hits on random channels with known leading-edge times and
// ToT, in each sub-mode.  The testbench decides independently which hits a
// window accepts and what stamp each must get (absolute from the run start,
// or delta-T from the reference, shifted by the LSB setting); order does not
// matter (arbitration order).  Also checked: a second hit on a channel whose
// register is still full is lost, and a refused output pauses the
// acquisition (paused_o) without losing hits that fit in the FIFOs.
`timescale 1ns/1ps
module tb_timing_acq;
  import fers_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic run, start, dtm, ref_p, ovalid, oready, lost, paused;
  timing_sub_e sub;
  logic [3:0] lsb;
  logic [23:0] win;
  logic [N_CH-1:0] en, hit;
  logic [TIME_W-1:0] ht [N_CH];
  logic [TOT_W-1:0] tot [N_CH];
  logic [TIME_W-1:0] rtime, stime, now;
  hit_t oh;
  int checks = 0, failures = 0;

  timing_acq dut (.clk, .rst_n, .run_i(run), .start_i(start), .tsub_i(sub), .dt_mode_i(dtm),
    .ts_lsb_i(lsb), .window_i(win), .ch_enable_i(en), .hit_i(hit), .hit_time_i(ht), .hit_tot_i(tot),
    .ref_i(ref_p), .ref_time_i(rtime), .start_time_i(stime), .now_i(now),
    .out_valid_o(ovalid), .out_hit_o(oh), .out_ready_i(oready), .lost_o(lost), .paused_o(paused));

  always @(posedge clk) now <= now + 1;

  // expected hits: key = channel
  logic [HIT_TS_W-1:0] exp_ts  [int];
  logic [TOT_W-1:0]    exp_tot [int];
  int got = 0, nlost = 0, npaused = 0;
  always @(posedge clk) if (rst_n) begin
    if (ovalid && oready) begin
      checks++;
      if (!exp_ts.exists(int'(oh.ch))) begin failures++; $display("unexpected hit ch %0d", oh.ch); end
      else begin
        if (oh.ts != exp_ts[int'(oh.ch)] || oh.tot != exp_tot[int'(oh.ch)]) begin
          failures++; $display("ch %0d ts %h exp %h", oh.ch, oh.ts, exp_ts[int'(oh.ch)]);
        end
        exp_ts.delete(int'(oh.ch));
      end
      got++;
    end
    if (lost) nlost++;
    if (paused) npaused++;
  end

  function automatic logic [TIME_W-1:0] nowf(); return {now[59:0], 4'h0}; endfunction

  // inject one hit on channel c at leading time t (one clock pulse)
  task automatic inject(int c, logic [TIME_W-1:0] t, logic [TOT_W-1:0] w);
    hit = '0; hit[c] = 1'b1; ht[c] = t; tot[c] = w;
    @(negedge clk); hit = '0;
  endtask

  task automatic phase(timing_sub_e s, bit dt, int l);
    logic [TIME_W-1:0] R;
    int chs[$];
    int d [N_CH];
    sub = s; dtm = dt; lsb = 4'(l); win = 24'd400;
    exp_ts.delete(); exp_tot.delete();
    repeat (20) @(negedge clk);
    for (int c = 0; c < N_CH; c += 3) chs.push_back(c);
    if (s == SUB_COMMON_START || s == SUB_STREAMING) begin
      R = nowf() - 200;
      rtime = R; ref_p = 1; @(negedge clk); ref_p = 0;
      foreach (chs[k]) begin
        int c = chs[k];
        logic [TIME_W-1:0] t, base;
        d[c] = $urandom_range(0, 900) - 300;     // -300 .. 600 around R
        t = R + TIME_W'(longint'(d[c]));
        base = dt ? R : stime;
        if (s == SUB_STREAMING && dt && d[c] < 0) base = R;   // earlier ref is far away
        if (s == SUB_STREAMING || (d[c] >= 0 && d[c] <= 400)) begin
          logic [TIME_W-1:0] diff;
          diff = (t >= base) ? t - base : base - t;
          exp_ts[c] = HIT_TS_W'(diff >> l); exp_tot[c] = 16'(c * 7);
        end
        inject(c, t, 16'(c * 7));
      end
    end else begin
      // common stop: hits first (stamped with the current time), the
      // reference afterwards; the first hits are too old for the window
      logic [TIME_W-1:0] tq [int];
      foreach (chs[k]) begin
        int c = chs[k];
        tq[c] = nowf() - 16;
        inject(c, tq[c], 16'(c * 7));
        if (k == 7) repeat (40) @(negedge clk);
      end
      R = nowf();
      foreach (chs[k]) begin
        int c = chs[k];
        if (R - tq[c] <= 400) begin
          logic [TIME_W-1:0] diff;
          diff = dt ? R - tq[c] : tq[c] - stime;
          exp_ts[c] = HIT_TS_W'(diff >> l); exp_tot[c] = 16'(c * 7);
        end
      end
      rtime = R; ref_p = 1; @(negedge clk); ref_p = 0;
    end
    repeat (200) @(negedge clk);
    checks++;
    if (exp_ts.size() != 0) begin failures++; $display("sub %0d: %0d hits missing", s, exp_ts.size()); end
  endtask

  initial begin
    run = 0; start = 0; sub = SUB_STREAMING; dtm = 0; ref_p = 0; oready = 1; lsb = 0; win = 400;
    en = '1; hit = '0; rtime = '0; now = 64'd5000; stime = 64'd12345;
    foreach (ht[i]) begin ht[i] = '0; tot[i] = '0; end
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0; run = 1;
    phase(SUB_STREAMING, 0, 0);
    phase(SUB_STREAMING, 0, 3);
    phase(SUB_COMMON_START, 1, 0);
    phase(SUB_COMMON_START, 0, 1);
    phase(SUB_COMMON_STOP, 1, 0);
    phase(SUB_COMMON_STOP, 0, 2);
    // pause: output refused, hits wait in the FIFOs
    sub = SUB_STREAMING; dtm = 0; lsb = 0;
    exp_ts.delete(); exp_tot.delete();
    oready = 0;
    for (int c = 0; c < 10; c++) begin
      exp_ts[c] = HIT_TS_W'(nowf() - stime); exp_tot[c] = 16'(c);
      inject(c, nowf(), 16'(c));
    end
    repeat (30) @(negedge clk);
    checks++; if (npaused == 0) begin failures++; $display("never paused"); end
    oready = 1;
    repeat (30) @(negedge clk);
    checks++; if (exp_ts.size() != 0) begin failures++; $display("paused hits missing"); end
    // loss: two hits on channel 63 in consecutive clocks while the arbiter is busy
    oready = 0;
    for (int c = 40; c < 64; c++) begin hit[c] = 1; ht[c] = nowf(); end
    @(negedge clk);
    hit = '0; hit[63] = 1; @(negedge clk); hit = '0;
    repeat (5) @(negedge clk);
    checks++; if (nlost == 0) begin failures++; $display("no hit lost"); end
    $display("hits out %0d, lost %0d, paused clocks %0d", got, nlost, npaused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
