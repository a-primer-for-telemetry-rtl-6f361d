// tmif_sync2: two-flop synchronizer for a single-bit or gray-coded bus that
// crosses into the clock domain of clk. The output follows the input two
// rising edges of clk later. Reset (active low, asynchronous) clears both
// stages to RESET_VAL. Used for the strobe Q, for the FIFO's gray pointers and
// by the reset synchronizers; a standard construction, not specific to TMIF.
module tmif_sync2 #(
  parameter int unsigned     W         = 1,
  parameter logic [W-1:0]    RESET_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RESET_VAL;
      q    <= RESET_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end

endmodule
