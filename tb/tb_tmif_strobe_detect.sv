// tb_tmif_strobe_detect: self-checking test of strobe detection. C' runs at
// 100 MHz; the strobe Q is driven asynchronously (edges at random offsets,
// not on the C' grid) with high and low times from 3 to 60 C' periods, plus
// a run of flight-like strobes (375 ns high, 20 us period). Checks: one
// Q_edge pulse per rising edge of Q, each exactly one C' cycle long, and
// arriving 2 to 4 C' rising edges after the edge of Q; none while Q is
// held low or held high.
`timescale 1ns/1ps
module tb_tmif_strobe_detect;
  logic clk = 0, rst_n = 0, q = 0;
  logic q_edge;
  int checks = 0, failures = 0;
  int rises = 0, pulses = 0;
  realtime t_rise;
  int edges_since_rise;
  bit waiting = 0;

  always #5 clk = ~clk;

  tmif_strobe_detect dut (.clk_cp(clk), .rst_n, .q_async(q), .q_edge);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", msg, $realtime); end
  endtask

  logic q_edge_d = 0;
  always @(posedge clk) begin
    if (waiting) edges_since_rise++;
    if (q_edge) begin
      pulses++;
      check(waiting, "Q_edge without a rising edge of Q");
      check(edges_since_rise >= 2 && edges_since_rise <= 4,
            $sformatf("Q_edge latency %0d cycles", edges_since_rise));
      check(!q_edge_d, "Q_edge longer than one cycle");
      waiting = 0;
    end
    q_edge_d <= q_edge;
  end

  task automatic pulse(input real hi_ns, input real lo_ns);
    q = 1; rises++; waiting = 1; edges_since_rise = 0;
    #(hi_ns);
    q = 0;
    #(lo_ns);
  endtask

  initial begin : watchdog
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #23 rst_n = 1;
    #107.3;
    // nothing while Q is low
    check(pulses == 0, "no Q_edge while Q low");
    for (int i = 0; i < 200; i++)
      pulse(30.0 + $urandom_range(0, 570) + $urandom_range(0, 99) / 100.0,
            30.0 + $urandom_range(0, 570) + $urandom_range(0, 99) / 100.0);
    // flight-like strobes: 3 bit periods at 8 Mb/s, 50 kHz
    for (int i = 0; i < 10; i++) pulse(375.0, 19625.0);
    // Q held high: one edge only
    q = 1; rises++; waiting = 1; edges_since_rise = 0;
    #3000;
    q = 0;
    #200;
    check(pulses == rises, $sformatf("%0d Q_edge pulses for %0d rising edges", pulses, rises));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
