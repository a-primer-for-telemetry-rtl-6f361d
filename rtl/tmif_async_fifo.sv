// tmif_async_fifo: dual-clock FIFO, the central buffer of the telemetry
// interface. Photon events are written on the detector clock C and read on
// the fast clock C', whose phase bears no relation to C.
//
// How it works: a DEPTH-word memory array with binary write and read
// pointers one bit wider than the address. Each pointer is also kept in gray
// code and passed through a two-flop synchronizer into the other clock
// domain. Empty is computed in the read domain (next read pointer equals the
// synchronized write pointer), full in the write domain (next write pointer
// equals the synchronized read pointer with its two top bits inverted). Both
// flags are registered, so they are pessimistic: empty stays high for two or
// three read-clock edges after a write, full stays high for a while after a
// read. This is what makes a read request that coincides with a write safe:
// the word just written is simply not yet visible and is read on the next
// request.
//
// Interface and timing (legacy, not show-ahead, read mode):
//   write side: wr_en with wr_data is taken at a rising edge of wr_clk unless
//               wr_full; a write while full is dropped (the data are lost, as
//               happens when photons arrive faster than the strobe rate).
//   read side:  rd_en at a rising edge of rd_clk, while not rd_empty, puts
//               the oldest word on rd_data at that same edge (one cycle after
//               the request is raised); rd_data then holds until the next
//               read. rd_en while rd_empty is ignored.
// Width 32 and depth 4,096 are the flight configuration. The flight unit used
// a vendor FIFO core; this gray-pointer FIFO is this design's own stand-in
// with the same ports and behaviour. DEPTH must be a power of two.
module tmif_async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4096
) (
  // write side (detector clock C)
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,
  // read side (fast clock C')
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wr_bin, wr_gray, wr_bin_next, wr_gray_next, rd_gray_sync;
  logic [AW:0] rd_bin, rd_gray, rd_bin_next, rd_gray_next, wr_gray_sync;
  logic        wr_do, rd_do;

  // ---------------- write domain ----------------
  assign wr_do        = wr_en && !wr_full;
  assign wr_bin_next  = wr_bin + (AW+1)'(wr_do);
  assign wr_gray_next = (wr_bin_next >> 1) ^ wr_bin_next;

  always_ff @(posedge wr_clk) begin
    if (wr_do) mem[wr_bin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wr_bin  <= '0;
      wr_gray <= '0;
      wr_full <= 1'b0;
    end else begin
      wr_bin  <= wr_bin_next;
      wr_gray <= wr_gray_next;
      wr_full <= (wr_gray_next == {~rd_gray_sync[AW:AW-1], rd_gray_sync[AW-2:0]});
    end
  end

  tmif_sync2 #(.W(AW+1)) u_sync_rd2wr (
    .clk  (wr_clk),
    .rst_n(wr_rst_n),
    .d    (rd_gray),
    .q    (rd_gray_sync)
  );

  // ---------------- read domain ----------------
  assign rd_do        = rd_en && !rd_empty;
  assign rd_bin_next  = rd_bin + (AW+1)'(rd_do);
  assign rd_gray_next = (rd_bin_next >> 1) ^ rd_bin_next;

  always_ff @(posedge rd_clk) begin
    if (rd_do) rd_data <= mem[rd_bin[AW-1:0]];
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rd_bin   <= '0;
      rd_gray  <= '0;
      rd_empty <= 1'b1;
    end else begin
      rd_bin   <= rd_bin_next;
      rd_gray  <= rd_gray_next;
      rd_empty <= (rd_gray_next == wr_gray_sync);
    end
  end

  tmif_sync2 #(.W(AW+1)) u_sync_wr2rd (
    .clk  (rd_clk),
    .rst_n(rd_rst_n),
    .d    (wr_gray),
    .q    (wr_gray_sync)
  );

  // ---------------- checks ----------------
  initial begin
    assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("tmif_async_fifo: DEPTH must be a power of two >= 4");
  end

endmodule
