// tb_ogress_pcm_chain: the flight configuration end to end. Two TMIF units at
// their default parameters (as flown, one per detector) feed a model of the
// range PCM encoder (tb_pcm_encoder: 120 words x 16 bits per minor frame,
// 32 minor frames, 8 Mb/s, two 375 ns strobes at 50 kHz offset in time,
// randomized NRZ-L output). A ground-station model in this file
// derandomizes the bit stream, finds frame lock on the 32-bit sync pattern,
// decommutates each minor frame and rebuilds the photon events of both
// detectors from their word pairs.
//
// Detector 1 runs at 2.5 MHz / 60 = 41.7 kHz (below the strobe rate: spare
// strobes are sent as zero words) with counting x/y/pulse-height events;
// detector 2 at 2.5 MHz / 45 = 55.6 kHz (above it: a backlog builds in its
// FIFO while both run, then drains) with the walking-one (powers of two)
// pattern, the first event being 0x00000001 after one step from 0x80000000.
// Checks: frame lock found once and never lost, the SFID word counts 0..31
// cyclically, every event written into each FIFO arrives at the ground
// exactly once and in order, nothing else arrives but zero words, detector 2's
// backlog exceeded one event, and after the detectors stop every event has
// been delivered.
`timescale 1ns/1ps
module tb_ogress_pcm_chain;
  import tmif_pkg::*;

  localparam int unsigned N = 120, M = 32, W = 16;
  localparam logic [31:0] FS = 32'hFE6B_2840;

  logic clk_c = 0, clk_cp = 0, clk_b = 0, rst_n = 0;
  logic det_en = 0;
  logic r1, r2, dclk1, dclk2, hb1, hb2, full1, full2, dm1, dm2;
  logic [EVENT_W-1:0] mask1, mask2;
  photon_event_t d1, d2, o1, o2;
  logic q1, q2, nrz, rnrz;

  int checks = 0, failures = 0;
  photon_event_t exp1[$], exp2[$];
  int got1 = 0, got2 = 0, zero1 = 0, zero2 = 0, frames = 0, max_backlog2 = 0;
  int wr1 = 0, wr2 = 0;

  always #200  clk_c  = ~clk_c;                            // C, 2.5 MHz
  always #5    clk_cp = ~clk_cp;                           // C', 100 MHz
  initial begin #17.3; forever #62.5 clk_b = ~clk_b; end   // B, 8 Mb/s

  tb_detector_sim #(.PERIOD(60)) u_det1 (.clk_c(dclk1), .rst_n, .enable(det_en), .burst(1'b0), .r(r1), .data(d1));
  tb_detector_sim #(.PERIOD(45), .POW2(1'b1)) u_det2 (.clk_c(dclk2), .rst_n, .enable(det_en), .burst(1'b0), .r(r2), .data(d2));

  tmif_top u_tmif1 (.clk_c, .clk_cp, .rst_n, .det_clk(dclk1), .det_r(r1), .det_data(d1),
                    .enc_q(q1), .enc_data(o1), .heartbeat(hb1), .fifo_full(full1),
                    .dup_masked(dm1), .data_mask(mask1));
  tmif_top u_tmif2 (.clk_c, .clk_cp, .rst_n, .det_clk(dclk2), .det_r(r2), .det_data(d2),
                    .enc_q(q2), .enc_data(o2), .heartbeat(hb2), .fifo_full(full2),
                    .dup_masked(dm2), .data_mask(mask2));

  tb_pcm_encoder #(.N(N), .M(M), .W(W), .FS(FS)) u_enc (
    .clk_b, .rst_n, .par1(o1), .par2(o2), .q1, .q2, .nrz, .rnrz
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at %0t", msg, $realtime);
    end
  endtask

  // scoreboards: what each FIFO accepts
  always @(posedge clk_c) begin
    if (rst_n && r1) begin check(!full1, "unit 1 FIFO never full"); exp1.push_back(d1); wr1++; end
    if (rst_n && r2) begin check(!full2, "unit 2 FIFO never full"); exp2.push_back(d2); wr2++; end
    if (exp2.size() > max_backlog2) max_backlog2 = exp2.size();
  end

  // ---------------- ground station model ----------------
  logic [14:0] dr = '0;
  logic [31:0] window = '0;
  logic [W-1:0] cur;
  logic [W-1:0] frame [N];
  bit locked = 0;
  int bitpos = 0, widx = 0, prev_sfid = -1, lock_events = 0;

  task automatic take_event(input int unit, input photon_event_t e);
    photon_event_t x;
    if (e == '0) begin
      if (unit == 1) zero1++; else zero2++;
      return;
    end
    if (unit == 1) begin
      check(exp1.size() > 0, $sformatf("unit 1 event %h never written", e));
      if (exp1.size() > 0) begin x = exp1.pop_front(); check(e == x, $sformatf("unit 1 got %h expected %h", e, x)); end
      got1++;
    end else begin
      check(exp2.size() > 0, $sformatf("unit 2 event %h never written", e));
      if (exp2.size() > 0) begin x = exp2.pop_front(); check(e == x, $sformatf("unit 2 got %h expected %h", e, x)); end
      got2++;
    end
  endtask

  task automatic decommutate();
    int sfid;
    frames++;
    check({frame[N-2], frame[N-1]} == FS,
          $sformatf("frame sync pattern at end of minor frame: %h%h", frame[N-2], frame[N-1]));
    sfid = int'(frame[2]);
    if (prev_sfid >= 0)
      check(sfid == (prev_sfid + 1) % M, $sformatf("SFID %0d after %0d", sfid, prev_sfid));
    prev_sfid = sfid;
    for (int k = 0; k < N / 10; k++) begin
      take_event(1, photon_event_t'({frame[10*k],     frame[10*k + 1]}));
      take_event(2, photon_event_t'({frame[10*k + 5], frame[10*k + 6]}));
    end
  endtask

  always @(negedge clk_b) begin
    if (rst_n) begin
      logic d;
      d = rnrz ^ dr[13] ^ dr[14];       // derandomize
      dr = {dr[13:0], rnrz};
      window = {window[30:0], d};
      if (!locked) begin
        if (window == FS) begin locked = 1; lock_events++; bitpos = 0; widx = 0; end
      end else begin
        cur = {cur[W-2:0], d};
        if (bitpos == W - 1) begin
          frame[widx] = cur;
          bitpos = 0;
          if (widx == N - 1) begin
            decommutate();
            widx = 0;
          end else widx++;
        end else bitpos++;
      end
    end
  end

  initial begin : watchdog
    #60ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000 rst_n = 1;
    wait (lock_events == 1);      // start the detectors once the ground is locked
    det_en = 1;
    #15.36ms;                     // two major frames with both detectors running
    det_en = 0;
    #7.68ms;                      // one more major frame to drain
    check(lock_events == 1, $sformatf("frame lock acquired %0d times", lock_events));
    check(frames >= 3 * M - 2, $sformatf("%0d minor frames decommutated", frames));
    check(exp1.size() == 0 && exp2.size() == 0,
          $sformatf("undelivered events: unit 1 %0d, unit 2 %0d", exp1.size(), exp2.size()));
    check(got1 == wr1 && got2 == wr2, "every written event received");
    check(zero1 > 0, "unit 1 sent zero words on spare strobes");
    check(max_backlog2 > 1, $sformatf("unit 2 backlog reached %0d", max_backlog2));
    $display("frames=%0d unit1: written=%0d received=%0d zero=%0d  unit2: written=%0d received=%0d zero=%0d max_backlog=%0d",
             frames, wr1, got1, zero1, wr2, got2, zero2, max_backlog2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
