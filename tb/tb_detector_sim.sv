// tb_detector_sim: model of the laboratory detector simulator used to drive
// a TMIF unit in simulation. On clock C a counter counts to PERIOD-1; at the
// wrap the model raises the handshake R for one C cycle and steps the photon
// event: the 12-bit x and y registers increment together (so accumulated
// events plot as a line) and the 8-bit pulse height increments. All outputs
// change on the rising edge of C. With PERIOD = 50 and C = 2.5 MHz events come
// at 50 kHz. The counters start at 1 so that no event is all zeros (an
// all-zero word is what a masked TMIF output looks like). `enable` lets a
// testbench pause the source; `burst` makes it emit one event every C cycle.
// With POW2 = 1 the event word is instead a single one bit that moves up one
// position per event (1, 2, 4, ... 0x80000000, 1, ...), the powers-of-two
// pattern used in the laboratory to spot lost or repeated words by eye.
module tb_detector_sim #(
  parameter int unsigned PERIOD = 50,
  parameter bit          POW2   = 1'b0
) (
  input  logic                   clk_c,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic                   burst,
  output logic                   r,
  output tmif_pkg::photon_event_t data
);

  logic [$clog2(PERIOD+1)-1:0] count;

  always_ff @(posedge clk_c or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      r     <= 1'b0;
      data  <= POW2 ? tmif_pkg::photon_event_t'(32'h8000_0000)
                    : '{x: 12'd1, y: 12'd1, ph: 8'd1};
    end else begin
      r <= 1'b0;
      if (enable && (burst || count == $bits(count)'(PERIOD - 1))) begin
        count   <= '0;
        r       <= 1'b1;
        if (POW2) begin
          data <= {data[30:0], data[31]};
        end else begin
          data.x  <= (data.x == 12'hfff) ? 12'd1 : data.x + 12'd1;
          data.y  <= (data.y == 12'hfff) ? 12'd1 : data.y + 12'd1;
          data.ph <= (data.ph == 8'hff)  ? 8'd1  : data.ph + 8'd1;
        end
      end else if (enable) begin
        count <= count + 1'b1;
      end
    end
  end

endmodule
