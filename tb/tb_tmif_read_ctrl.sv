// tb_tmif_read_ctrl: self-checking test of the read control and output
// register. The testbench plays the FIFO (a queue with an empty flag and
// data one cycle after a read request) and issues one-cycle strobe edges.
// Checks, against values computed here: a read request exactly on a strobe
// edge with data present and never otherwise; the output takes the word read
// two cycles after the strobe edge, with the mask all ones; a strobe on an
// empty FIFO clears output and mask to zero one cycle later; the output holds
// between strobes; reset state is output 0, mask all ones.
`timescale 1ns/1ps
module tb_tmif_read_ctrl;
  localparam int unsigned W = 32;
  logic clk = 0, rst_n = 0;
  logic q_edge = 0, fifo_empty;
  logic [W-1:0] fifo_rd_data;
  logic fifo_rd_en, masked;
  logic [W-1:0] data_out, data_mask;
  int checks = 0, failures = 0;
  int n_reads = 0, n_masks = 0;
  logic [W-1:0] q[$];
  logic [W-1:0] expected_out;

  always #5 clk = ~clk;

  tmif_read_ctrl #(.WIDTH(W)) dut (
    .clk_cp(clk), .rst_n, .q_edge, .fifo_empty, .fifo_rd_data,
    .fifo_rd_en, .data_out, .data_mask, .masked
  );

  // The empty flag is updated explicitly wherever the queue changes.
  initial fifo_empty = 1'b1;

  // FIFO model: legacy read mode
  always @(posedge clk) begin
    if (fifo_rd_en && q.size() > 0) begin
      fifo_rd_data <= q.pop_front();
      fifo_empty   <= (q.size() == 0);
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", msg, $realtime); end
  endtask

  task automatic strobe();
    bit was_empty;
    logic [W-1:0] head;
    @(negedge clk);
    was_empty = fifo_empty;
    head = was_empty ? '0 : q[0];
    q_edge = 1;
    #1;
    check(fifo_rd_en == !was_empty, "read request iff strobe with data");
    @(negedge clk);
    q_edge = 0;
    #1;
    check(fifo_rd_en == 0, "no read request without strobe");
    if (was_empty) begin
      check(data_out == '0 && data_mask == '0, "masked to zero one cycle after empty strobe");
      check(masked == 1'b1, "masked pulse");
      n_masks++;
      expected_out = '0;
    end else begin
      check(data_out == expected_out, $sformatf("output unchanged one cycle after read strobe: %h vs %h", data_out, expected_out));
      @(negedge clk);
      check(data_out == head, $sformatf("output %h, expected %h", data_out, head));
      check(data_mask == '1, "mask all ones after read");
      n_reads++;
      expected_out = head;
    end
    repeat ($urandom_range(2, 20)) begin
      @(negedge clk);
      check(data_out == expected_out, "output holds between strobes");
    end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fifo_rd_data = '0;
    #22 rst_n = 1;
    expected_out = '0;
    @(negedge clk);
    check(data_out == '0 && data_mask == '1, "reset state");
    strobe();                         // empty
    q.push_back(32'hA5FF_2600);
    q.push_back(32'h69FF_2E00);
    fifo_empty = 1'b0;
    strobe(); strobe(); strobe();     // read, read, empty
    strobe();                         // empty again
    for (int i = 0; i < 60; i++) begin
      if ($urandom_range(0, 1) != 0) begin
        q.push_back($urandom | 32'h1);
        fifo_empty = 1'b0;
      end
      strobe();
    end
    check(n_reads > 10 && n_masks > 10, $sformatf("reads=%0d masks=%0d", n_reads, n_masks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
