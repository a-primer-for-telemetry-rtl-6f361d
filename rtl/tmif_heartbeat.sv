// tmif_heartbeat: heartbeat of a TMIF unit, a square wave of about 60 Hz that
// the ground station shows as a flashing lamp, proving the unit is running.
//
// How it works: a counter on clock clk counts to HALF_PERIOD-1, where
// HALF_PERIOD = CLK_HZ / (2 * HB_HZ), and toggles the output each time it
// wraps. With the defaults (C' = 100 MHz, 60 Hz) the output toggles every
// 833,333 cycles, i.e. every 8.33 ms. Reset (active low) clears the counter
// and the output.
// Only the existence of the heartbeat and its rate are from the paper; the
// clock it runs on, the counter and the output polarity are this design's
// choice.
module tmif_heartbeat #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned HB_HZ  = 60
) (
  input  logic clk,
  input  logic rst_n,
  output logic heartbeat
);

  localparam int unsigned HALF_PERIOD = CLK_HZ / (2 * HB_HZ);
  localparam int unsigned CW = (HALF_PERIOD > 1) ? $clog2(HALF_PERIOD) : 1;

  logic [CW-1:0] count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      heartbeat <= 1'b0;
    end else if (count == CW'(HALF_PERIOD - 1)) begin
      count     <= '0;
      heartbeat <= !heartbeat;
    end else begin
      count     <= count + 1'b1;
    end
  end

endmodule
