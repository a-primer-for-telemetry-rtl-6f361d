// tmif_top: one telemetry interface (TMIF) unit, as flown with each of the
// two photon-counting detectors of a sounding-rocket payload.
//
// The detector's converter presents a 32-bit photon event (12-bit x, 12-bit y,
// 8-bit pulse height) together with a one-cycle handshake R, both synchronous
// to the detector clock C that this unit supplies. The PCM encoder's parallel
// deck, on its own time base, raises a strobe Q each time it latches the
// unit's 32-bit output into the telemetry stream. The unit bridges the two:
//
//   R --(delay 1/2 C cycle)--> write request --+
//   det_data ------------------------------> dual-clock FIFO (32 x 4096)
//                                              |  read on C'
//   Q --> strobe detection (C') --> Q_edge --> read control --> enc_data
//
// * Write side (C): the write request is R delayed by half a cycle of C
//   (captured on the falling edge), so it is sampled at the rising edge after
//   the one that launched R, when the data bus has settled; each R writes
//   exactly one word. When the FIFO is full the event is dropped and fifo_full
//   shows it.
// * Read side (C'): each rising edge of Q reads one word if the FIFO is not
//   empty and places it in the output register; if the FIFO is empty the
//   output is masked to zero, so the encoder never sees a duplicate event.
// * det_clk forwards C to the detector; heartbeat is a ~60 Hz square wave on
//   C' for ground monitoring. fifo_full, dup_masked and data_mask are status
//   outputs of this design (not named in the paper) for test and monitoring.
//
// Clocks: clk_c is C (2.5 MHz) and clk_cp is C' (100 MHz), both produced by a
// PLL from the board's 25 MHz oscillator outside this module. rst_n is an
// asynchronous active-low reset, synchronized into each domain here (the
// reset scheme is this design's choice). The structure, the half-cycle write
// delay, read-when-not-empty and the zero mask follow the paper; the FIFO is
// a generic gray-pointer FIFO in place of the vendor core.
module tmif_top
  import tmif_pkg::*;
#(
  parameter int unsigned FIFO_WORDS = tmif_pkg::FIFO_DEPTH,
  parameter int unsigned CP_CLK_HZ  = tmif_pkg::CP_HZ,
  parameter int unsigned HB_RATE_HZ = tmif_pkg::HEARTBEAT_HZ
) (
  input  logic          clk_c,      // detector clock C
  input  logic          clk_cp,     // fast strobe-search clock C'
  input  logic          rst_n,
  // detector side
  output logic          det_clk,    // C, forwarded to the detector electronics
  input  logic          det_r,      // handshake R, one C cycle per event
  input  photon_event_t det_data,   // event bus, changes with R
  // encoder side
  input  logic          enc_q,      // strobe Q
  output photon_event_t enc_data,   // output register, latched by the encoder
  // monitoring
  output logic          heartbeat,
  output logic          fifo_full,  // C domain: events are being dropped
  output logic          dup_masked, // C' domain, one cycle: a strobe found the FIFO empty
  output logic [tmif_pkg::EVENT_W-1:0] data_mask // C' domain: mask applied to the output
);

  logic rst_c_n, rst_cp_n;
  logic wr_req;
  logic q_edge, fifo_empty, fifo_rd_en;
  logic [EVENT_W-1:0] fifo_rd_data, data_out;

  assign det_clk = clk_c;

  tmif_reset_sync u_rst_c  (.clk(clk_c),  .rst_n_in(rst_n), .rst_n_out(rst_c_n));
  tmif_reset_sync u_rst_cp (.clk(clk_cp), .rst_n_in(rst_n), .rst_n_out(rst_cp_n));

  // Write request: R delayed by half a cycle of C.
  always_ff @(negedge clk_c or negedge rst_c_n) begin
    if (!rst_c_n) wr_req <= 1'b0;
    else          wr_req <= det_r;
  end

  tmif_async_fifo #(.WIDTH(EVENT_W), .DEPTH(FIFO_WORDS)) u_fifo (
    .wr_clk  (clk_c),
    .wr_rst_n(rst_c_n),
    .wr_en   (wr_req),
    .wr_data (det_data),
    .wr_full (fifo_full),
    .rd_clk  (clk_cp),
    .rd_rst_n(rst_cp_n),
    .rd_en   (fifo_rd_en),
    .rd_data (fifo_rd_data),
    .rd_empty(fifo_empty)
  );

  tmif_strobe_detect u_strobe (
    .clk_cp (clk_cp),
    .rst_n  (rst_cp_n),
    .q_async(enc_q),
    .q_edge (q_edge)
  );

  tmif_read_ctrl #(.WIDTH(EVENT_W)) u_rdctl (
    .clk_cp      (clk_cp),
    .rst_n       (rst_cp_n),
    .q_edge      (q_edge),
    .fifo_empty  (fifo_empty),
    .fifo_rd_data(fifo_rd_data),
    .fifo_rd_en  (fifo_rd_en),
    .data_out    (data_out),
    .data_mask   (data_mask),
    .masked      (dup_masked)
  );

  assign enc_data = photon_event_t'(data_out);

  tmif_heartbeat #(.CLK_HZ(CP_CLK_HZ), .HB_HZ(HB_RATE_HZ)) u_hb (
    .clk      (clk_cp),
    .rst_n    (rst_cp_n),
    .heartbeat(heartbeat)
  );

endmodule
