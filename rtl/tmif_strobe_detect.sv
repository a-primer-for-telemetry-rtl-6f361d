// tmif_strobe_detect: strobe detection. The PCM encoder's parallel deck
// raises the strobe Q (three bit periods long, 375 ns at 8 Mb/s) each time it
// is about to latch the TMIF output, but gives no clock. This module samples
// Q with the fast clock C' (100 MHz) and produces Q_edge, high for exactly one
// C' cycle per rising edge of Q, which then serves as the FIFO read request
// on the C' side.
//
// How it works: Q passes through a two-flop synchronizer (Q is asynchronous
// to C'), a third flop holds its previous value, and Q_edge is registered
// as "synchronized Q high and previous value low".
// Timing: Q_edge rises on the third C' edge after Q goes high (20-30 ns at
// 100 MHz). A Q pulse must stay high and then low for at least two C' periods
// to be seen; the 375 ns strobe is 37 periods long.
// Detecting the rising edge of Q with C' and emitting a one-cycle pulse
// follows the paper; the synchronizer depth is this design's choice.
module tmif_strobe_detect (
  input  logic clk_cp,     // fast clock C'
  input  logic rst_n,      // active-low reset, synchronous to clk_cp release
  input  logic q_async,    // strobe Q from the PCM encoder
  output logic q_edge      // one C' cycle per rising edge of Q
);

  logic q_sync, q_prev;

  tmif_sync2 #(.W(1)) u_sync (
    .clk  (clk_cp),
    .rst_n(rst_n),
    .d    (q_async),
    .q    (q_sync)
  );

  always_ff @(posedge clk_cp or negedge rst_n) begin
    if (!rst_n) begin
      q_prev <= 1'b0;
      q_edge <= 1'b0;
    end else begin
      q_prev <= q_sync;
      q_edge <= q_sync && !q_prev;
    end
  end

endmodule
