// tb_strobe_gen: model of the laboratory strobe generator that stands in for
// the PCM encoder's parallel deck. Running on a clock at the bit rate B, it
// raises Q for three bit periods every `period` bit periods (period = 160 at
// 8 Mb/s gives the flight strobe rate of 50 kHz; 160 at 10 Mb/s gives
// 62.5 kHz). The period is an input so a testbench can change the strobe
// rate on the fly; `enable` low holds Q low. Q is registered on clk_b.
module tb_strobe_gen (
  input  logic        clk_b,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [15:0] period,
  output logic        q
);

  logic [15:0] count;

  always_ff @(posedge clk_b or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      q     <= 1'b0;
    end else begin
      count <= (count >= period - 16'd1) ? 16'd0 : count + 16'd1;
      q     <= enable && (count < 16'd3);
    end
  end

endmodule
