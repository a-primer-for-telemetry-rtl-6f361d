// tmif_read_ctrl: read control and output register of the telemetry
// interface, in the fast clock C' domain.
//
// On each strobe edge (q_edge, one C' cycle per rising edge of the encoder
// strobe Q) one of two things happens:
//   * FIFO not empty: the FIFO read request fifo_rd_en is raised for that
//     cycle. The word appears on fifo_rd_data one cycle later and is loaded
//     into the output register on the following edge; the data mask is set
//     to all ones at the same time.
//   * FIFO empty: no read is made and the data mask is cleared to all zeros,
//     so the output reads 0x00000000. Without this the encoder, which latches
//     the output at every strobe, would latch the previous photon event a
//     second time.
// The output data_out is the stored word ANDed with the mask; both are held
// in registers (data_out itself is registered) and stay constant between
// strobes, which is what the encoder's parallel deck needs.
// Timing: data_out changes two C' cycles after q_edge (read) or one cycle
// after it (mask). Read-when-not-empty, the output register and the zero
// mask follow the paper; the mask register named "data mask" follows its
// simulated timing diagram. A strobe that arrives while a write is in
// progress sees the FIFO's registered empty flag, which still reads empty, so
// the output is masked and the new word goes out at the next strobe.
module tmif_read_ctrl #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk_cp,
  input  logic             rst_n,
  input  logic             q_edge,        // strobe edge, one C' cycle
  input  logic             fifo_empty,
  input  logic [WIDTH-1:0] fifo_rd_data,  // valid one cycle after fifo_rd_en
  output logic             fifo_rd_en,
  output logic [WIDTH-1:0] data_out,      // to the encoder's parallel deck
  output logic [WIDTH-1:0] data_mask,     // all ones after a read, zero after an empty strobe
  output logic             masked         // one C' cycle: strobe found the FIFO empty
);

  logic rd_pending;

  assign fifo_rd_en = q_edge && !fifo_empty;

  always_ff @(posedge clk_cp or negedge rst_n) begin
    if (!rst_n) begin
      rd_pending <= 1'b0;
      data_out   <= '0;
      data_mask  <= '1;
      masked     <= 1'b0;
    end else begin
      rd_pending <= fifo_rd_en;
      masked     <= q_edge && fifo_empty;
      if (rd_pending) begin
        data_out  <= fifo_rd_data;
        data_mask <= '1;
      end else if (q_edge && fifo_empty) begin
        data_out  <= '0;
        data_mask <= '0;
      end
    end
  end

  // Input protocol: a strobe edge lasts exactly one C' cycle, so one strobe
  // can cause at most one read.
  a_q_edge_one_cycle: assert property (@(posedge clk_cp) q_edge |=> !q_edge);

endmodule
