// tmif_reset_sync: reset synchronizer. Asserts rst_n_out asynchronously with
// rst_n_in (active low) and releases it two rising edges of clk after
// rst_n_in is released, so each clock domain of the TMIF leaves reset cleanly
// on its own edge. The reset scheme as a whole is this design's choice: the
// flight unit's reset is not described.
module tmif_reset_sync (
  input  logic clk,
  input  logic rst_n_in,
  output logic rst_n_out
);

  tmif_sync2 #(.W(1), .RESET_VAL(1'b0)) u_sync (
    .clk  (clk),
    .rst_n(rst_n_in),
    .d    (1'b1),
    .q    (rst_n_out)
  );

endmodule
