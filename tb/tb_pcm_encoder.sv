// tb_pcm_encoder: behavioural model of the range PCM encoder as seen by two
// TMIF units, for the flight-configuration test. It is not the real
// encoder's design, which is not public; it only reproduces the frame
// organisation and strobe timing used in flight.
//
// Frame: minor frames of N = 120 words of W = 16 bits, M = 32 minor frames per
// major frame, sent MSB first at the bit clock clk_b (8 Mb/s in flight). Words
// are numbered 0..119 here:
//   words 10k, 10k+1     (k = 0..11)  unit 1 event, high half then low half
//   words 10k+5, 10k+6                unit 2 event, high half then low half
//   word 2                            subframe ID (SFID, 0..31)
//   words 118, 119                    32-bit frame sync pattern FS
//   every other word                  zero (other decks, not modelled)
// Strobes: q1 is high for the first three bit periods of words 10k+9, q2 of
// words 10k+4, i.e. 3/B long, twelve per minor frame (50 kHz at 8 Mb/s), the
// two offset in time. The unit's output is latched at the fourth bit of
// that word (the edge after the strobe falls) and sent in the next two words.
// Which words the flight encoder used, the latch instant, the half order and
// the FS value (0xFE6B2840, a standard 32-bit pattern) are assumptions.
//
// Line coding: nrz is the NRZ-L bit; rnrz is the same stream randomized with
// the 15-stage self-synchronizing scrambler of the range standard
// (out = in ^ s[13] ^ s[14], the output shifted into s). Both change on the
// rising edge of clk_b.
module tb_pcm_encoder #(
  parameter int unsigned N  = 120,
  parameter int unsigned M  = 32,
  parameter int unsigned W  = 16,
  parameter logic [31:0] FS = 32'hFE6B_2840
) (
  input  logic        clk_b,
  input  logic        rst_n,
  input  logic [31:0] par1,
  input  logic [31:0] par2,
  output logic        q1,
  output logic        q2,
  output logic        nrz,
  output logic        rnrz
);

  int unsigned b, w, sfid;
  logic [31:0] hold1, hold2;
  logic [W-1:0] word;
  logic [14:0] s;
  logic bit_now, rbit_now;

  always_comb begin
    if (w % 10 == 0)      word = hold1[31:16];
    else if (w % 10 == 1) word = hold1[15:0];
    else if (w % 10 == 5) word = hold2[31:16];
    else if (w % 10 == 6) word = hold2[15:0];
    else if (w == 2)      word = W'(sfid);
    else if (w == N - 2)  word = FS[31:16];
    else if (w == N - 1)  word = FS[15:0];
    else                  word = '0;
    bit_now  = word[W-1-b];
    rbit_now = bit_now ^ s[13] ^ s[14];
  end

  assign q1 = rst_n && (b < 3) && (w % 10 == 9);
  assign q2 = rst_n && (b < 3) && (w % 10 == 4);

  always_ff @(posedge clk_b or negedge rst_n) begin
    if (!rst_n) begin
      b <= 0; w <= 0; sfid <= 0;
      hold1 <= '0; hold2 <= '0;
      s <= '0; nrz <= 1'b0; rnrz <= 1'b0;
    end else begin
      nrz  <= bit_now;
      rnrz <= rbit_now;
      s    <= {s[13:0], rbit_now};
      if (b == 3 && w % 10 == 9) hold1 <= par1;
      if (b == 3 && w % 10 == 4) hold2 <= par2;
      if (b == W - 1) begin
        b <= 0;
        if (w == N - 1) begin
          w    <= 0;
          sfid <= (sfid == M - 1) ? 0 : sfid + 1;
        end else begin
          w <= w + 1;
        end
      end else begin
        b <= b + 1;
      end
    end
  end

endmodule
