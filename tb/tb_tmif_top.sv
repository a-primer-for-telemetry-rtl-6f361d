// tb_tmif_top: end-to-end test of one TMIF unit at its default (flight)
// parameters: 32 x 4,096 FIFO, C = 2.5 MHz, C' = 100 MHz, 60 Hz heartbeat.
//
// Set-up, as in a laboratory chain: a detector simulator on C emits photon
// events with the handshake R; a strobe generator on a bit clock B = 8 Mb/s
// (asynchronous to C and C') produces the encoder strobe Q, three bit periods
// long. An encoder model latches the TMIF output at every falling edge of Q.
// A scoreboard records every event the FIFO accepts (R sampled on the same
// edge as the delayed write request, unless the FIFO is full) and checks
// that the encoder receives exactly those events, in order, each once;
// any other latched word must be the all-zero mask.
//
// Phases:
//   A  events at 50 kHz, strobes at 62.5 kHz (the rates of the published
//      simulation): every event delivered, idle strobes masked.
//   B  events at 50 kHz, strobes at 50 kHz (flight strobe rate).
//   C  strobes placed just before a write reaches the FIFO: the strobe sees
//      the FIFO still empty and is masked; the event goes out on the next
//      strobe (read during write).
//   D  overflow: events every C cycle with strobes stopped fill the FIFO and
//      the excess is dropped; fast strobes (1 MHz) then drain all 4,096.
// Throughout: heartbeat toggles every 833,333 C' cycles (8.333 ms).
// Mechanism counters (reads, masks, read-during-write, drops, heartbeat
// toggles) must each be non-zero. The output must be settled within 100 ns
// of the rising edge of Q, long before the 375 ns strobe ends.
`timescale 1ns/1ps
module tb_tmif_top;
  import tmif_pkg::*;

  logic clk_c = 0, clk_cp = 0, clk_b = 0, rst_n = 0;
  logic det_clk, r, heartbeat, fifo_full, dup_masked;
  photon_event_t det_data, enc_data;
  logic [EVENT_W-1:0] data_mask;
  logic q, q_gen, q_man = 0, man_mode = 0;
  logic det_en = 0, det_burst = 0, sg_en = 0;
  logic [15:0] sg_period = 16'd128;

  int checks = 0, failures = 0;
  int n_reads = 0, n_masks = 0, n_race = 0, n_drops = 0, n_hb = 0, n_written = 0;
  photon_event_t exp_q[$];
  realtime t_qrise, t_hb_last;

  always #200   clk_c  = ~clk_c;    // 2.5 MHz
  always #5     clk_cp = ~clk_cp;   // 100 MHz
  initial begin #3.7; forever #62.5 clk_b = ~clk_b; end  // 8 MHz, own phase

  assign q = man_mode ? q_man : q_gen;

  tb_detector_sim #(.PERIOD(50)) u_det (
    .clk_c(det_clk), .rst_n, .enable(det_en), .burst(det_burst), .r, .data(det_data)
  );

  tb_strobe_gen u_sg (.clk_b, .rst_n, .enable(sg_en), .period(sg_period), .q(q_gen));

  tmif_top dut (
    .clk_c, .clk_cp, .rst_n,
    .det_clk, .det_r(r), .det_data,
    .enc_q(q), .enc_data,
    .heartbeat, .fifo_full, .dup_masked, .data_mask
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at %0t", msg, $realtime);
    end
  endtask

  // scoreboard, write side: the FIFO write happens on the C edge after R
  always @(posedge clk_c) begin
    if (rst_n && r) begin
      if (!fifo_full) begin exp_q.push_back(det_data); n_written++; end
      else n_drops++;
    end
  end

  // encoder model
  always @(posedge q) begin
    t_qrise = $realtime;
    #100;
    fork begin
      photon_event_t early;
      early = enc_data;
      @(negedge q);
      check(enc_data == early, "output settled within 100 ns of Q");
    end join_none
  end

  always @(negedge q) begin
    if (rst_n) begin
      if (enc_data == '0) begin
        n_masks++;
        if (exp_q.size() > 0) n_race++;
      end else begin
        photon_event_t e;
        check(exp_q.size() > 0, $sformatf("encoder latched %h with nothing written", enc_data));
        if (exp_q.size() > 0) begin
          e = exp_q.pop_front();
          check(enc_data == e, $sformatf("encoder latched %h, expected %h", enc_data, e));
        end
        n_reads++;
      end
    end
  end

  // heartbeat period
  always @(heartbeat) begin
    if (rst_n) begin
      if (n_hb > 0)
        check($realtime - t_hb_last > 8333320.0 && $realtime - t_hb_last < 8333340.0,
              $sformatf("heartbeat half period %0t", $realtime - t_hb_last));
      t_hb_last = $realtime;
      n_hb++;
    end
  end

  initial begin : watchdog
    #40ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic settle_and_check(input string phase);
    det_en = 0;
    #200us;              // let the strobes take what is left
    check(exp_q.size() == 0, $sformatf("%s: %0d events not delivered", phase, exp_q.size()));
  endtask

  initial begin
    #1000 rst_n = 1;
    #2000;
    check(enc_data == '0 && !fifo_full, "reset state");

    // A: 50 kHz events, 62.5 kHz strobes
    sg_period = 16'd128; sg_en = 1; det_en = 1;
    #2ms;
    settle_and_check("A");
    $display("A: reads=%0d masks=%0d", n_reads, n_masks);

    // B: flight strobe rate 50 kHz
    sg_period = 16'd160; det_en = 1;
    #2ms;
    settle_and_check("B");

    // C: strobe arrives 20 ns before the write edge
    sg_en = 0; #50us; man_mode = 1; det_en = 1;
    for (int i = 0; i < 10; i++) begin
      int races_before;
      races_before = n_race;
      @(posedge r);                    // R launched; write on the next C edge
      #380;                            // 20 ns before the write edge
      q_man = 1; #375; q_man = 0;
      #1;
      check(n_race == races_before + 1, "strobe during write was masked");
      #3000;
      q_man = 1; #375; q_man = 0;      // next strobe delivers the event
      #3000;
      check(exp_q.size() == 0, "event delivered on the strobe after the race");
    end
    det_en = 0; man_mode = 0;

    // D: overflow, then drain with fast strobes
    det_en = 1; det_burst = 1;
    repeat (5000) @(posedge clk_c);
    det_burst = 0; det_en = 0;
    check(n_drops > 0, "events dropped while the FIFO was full");
    check(exp_q.size() == FIFO_DEPTH, $sformatf("FIFO held %0d events", exp_q.size()));
    sg_period = 16'd8; sg_en = 1;
    #4500us;
    check(exp_q.size() == 0, $sformatf("D: %0d events left after drain", exp_q.size()));
    sg_period = 16'd160;

    // keep running at flight rates until the heartbeat has toggled twice
    det_en = 1;
    wait (n_hb >= 2);
    settle_and_check("end");

    check(n_reads > 0,   "mechanism: FIFO read on strobe");
    check(n_masks > 0,   "mechanism: empty strobe masked");
    check(n_race >= 10,  "mechanism: read during write");
    check(n_drops > 0,   "mechanism: overflow drop");
    check(n_hb >= 2,     "mechanism: heartbeat");
    $display("written=%0d reads=%0d masks=%0d read_during_write=%0d drops=%0d heartbeat_toggles=%0d",
             n_written, n_reads, n_masks, n_race, n_drops, n_hb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
