// tb_rs232_p2s: behavioural model of the laboratory parallel-to-serial
// transmitter that reads a TMIF unit in place of the PCM encoder and sends
// its data to a computer over RS-232. It is test equipment, not part of the
// TMIF.
//
// On each falling edge of the strobe q (the moment the encoder would latch)
// the 32-bit TMIF output is sampled; non-zero words (real events) are pushed
// into a queue that is 32 bits wide on input and read out one byte at a
// time, most significant byte first. A baud tick generator divides clk by
// DIV; the transmitter sends each byte as a start bit (0), eight data bits
// LSB first, an even parity bit and a stop bit (1), idling high. Dropping
// zero words, the byte order, even parity and the baud rate are assumptions.
module tb_rs232_p2s #(
  parameter int unsigned DIV = 434        // 50 MHz / 434 = 115,200 baud
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        q,
  input  logic [31:0] data,
  output logic        txd,
  output int          words_queued
);

  logic [7:0] bytes[$];
  logic q_d;
  int unsigned div_cnt;
  logic tick;
  logic [10:0] shreg;       // bits still to send after the start bit, LSB first
  int unsigned bits_left;

  assign tick = (div_cnt == DIV - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_d <= 1'b0; div_cnt <= 0; txd <= 1'b1; bits_left <= 0; shreg <= '1;
      words_queued <= 0;
    end else begin
      q_d <= q;
      if (q_d && !q && data != '0) begin
        bytes.push_back(data[31:24]); bytes.push_back(data[23:16]);
        bytes.push_back(data[15:8]);  bytes.push_back(data[7:0]);
        words_queued <= words_queued + 1;
      end
      div_cnt <= tick ? 0 : div_cnt + 1;
      if (tick) begin
        if (bits_left != 0) begin
          txd       <= shreg[0];
          shreg     <= {1'b1, shreg[10:1]};
          bits_left <= bits_left - 1;
        end else if (bytes.size() > 0) begin
          logic [7:0] b;
          b = bytes.pop_front();
          txd       <= 1'b0;                     // start bit
          shreg     <= {1'b1, 1'b1, ^b, b};      // data LSB first, parity, stop
          bits_left <= 10;
        end else begin
          txd <= 1'b1;
        end
      end
    end
  end

endmodule
