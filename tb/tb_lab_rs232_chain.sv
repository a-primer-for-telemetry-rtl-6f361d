// tb_lab_rs232_chain: the laboratory test chain without a PCM encoder.
// A detector simulator model drives a TMIF unit (default parameters); a
// strobe generator on a 10 Mb/s bit clock strobes it at 62.5 kHz (3 bit
// periods high); a parallel-to-serial model (tb_rs232_p2s, on a 50 MHz
// board clock) takes each non-zero TMIF word and sends it over RS-232 at
// 115,200 baud. A UART receiver in this file samples each bit at its middle,
// checks start, even parity and stop bits, rebuilds the 32-bit words and
// compares them with the events the TMIF FIFO accepted: all must arrive, in
// order, once. Events come at 1 kHz, slow enough for the serial link
// (4 bytes x 11 bits x 1 kHz = 44 kbaud).
`timescale 1ns/1ps
module tb_lab_rs232_chain;
  import tmif_pkg::*;

  localparam int unsigned DIV = 434;
  localparam realtime BIT_NS = DIV * 20.0;

  logic clk_c = 0, clk_cp = 0, clk_b = 0, clk_50 = 0, rst_n = 0;
  logic det_en = 0, r, dclk, hb, full, dm, q, txd;
  logic [EVENT_W-1:0] mask;
  photon_event_t d, o;
  int words_queued;

  int checks = 0, failures = 0, written = 0, received = 0;
  photon_event_t exp_q[$];

  always #200  clk_c  = ~clk_c;                           // C, 2.5 MHz
  always #5    clk_cp = ~clk_cp;                          // C', 100 MHz
  initial begin #7.1; forever #50 clk_b = ~clk_b; end     // B, 10 Mb/s
  initial begin #3.3; forever #10 clk_50 = ~clk_50; end   // 50 MHz board clock

  tb_detector_sim #(.PERIOD(2500)) u_det (.clk_c(dclk), .rst_n, .enable(det_en), .burst(1'b0), .r, .data(d));
  tmif_top u_tmif (.clk_c, .clk_cp, .rst_n, .det_clk(dclk), .det_r(r), .det_data(d),
                   .enc_q(q), .enc_data(o), .heartbeat(hb), .fifo_full(full),
                   .dup_masked(dm), .data_mask(mask));
  tb_strobe_gen u_sg (.clk_b, .rst_n, .enable(1'b1), .period(16'd160), .q);
  tb_rs232_p2s #(.DIV(DIV)) u_p2s (.clk(clk_50), .rst_n, .q, .data(o), .txd, .words_queued);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at %0t", msg, $realtime);
    end
  endtask

  always @(posedge clk_c) begin
    if (rst_n && r) begin exp_q.push_back(d); written++; end
  end

  // UART receiver
  initial begin
    logic [7:0] by;
    logic [31:0] word;
    logic par;
    int nbytes;
    nbytes = 0;
    wait (rst_n);
    forever begin
      @(negedge txd);
      #(BIT_NS / 2);
      check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        #(BIT_NS);
        by[i] = txd;
      end
      #(BIT_NS); par = txd;
      check(par == ^by, "even parity");
      #(BIT_NS);
      check(txd == 1'b1, "stop bit");
      word = {word[23:0], by};
      nbytes++;
      if (nbytes % 4 == 0) begin
        photon_event_t e;
        check(exp_q.size() > 0, $sformatf("word %h never written", word));
        if (exp_q.size() > 0) begin
          e = exp_q.pop_front();
          check(word == e, $sformatf("received %h expected %h", word, e));
        end
        received++;
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
    #3000 det_en = 1;
    #20ms;
    det_en = 0;
    #2ms;
    check(written >= 19, $sformatf("%0d events written", written));
    check(received == written && exp_q.size() == 0,
          $sformatf("%0d of %0d events received over RS-232", received, written));
    check(words_queued == written, "one serial word per event, none for empty strobes");
    $display("written=%0d received=%0d", written, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
