// tb_tmif_async_fifo: self-checking test of the dual-clock FIFO at a reduced
// depth of 16 (the logic is the same at 4,096). Write clock 400 ns period
// (detector clock C), read clock 10 ns (C') in most phases.
// Phases: (1) after reset the FIFO reads empty and not full; (2) with the
// reader stopped the writer fills the FIFO: full must rise after exactly
// DEPTH accepted words and further writes are dropped; (3) the reader drains
// it: words come out in order, one cycle after each read request, and
// empty rises after the last; (4) random writes and reads on both sides,
// every word compared with a queue kept by the testbench.
`timescale 1ns/1ps
module tb_tmif_async_fifo;
  localparam int unsigned W = 32;
  localparam int unsigned D = 16;

  logic wr_clk = 0, rd_clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic wr_full, rd_empty;

  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  int accepted = 0, dropped = 0, read_cnt = 0;
  logic pending = 0;

  always #200 wr_clk = ~wr_clk;
  always #5   rd_clk = ~rd_clk;

  tmif_async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk, .wr_rst_n(rst_n), .wr_en, .wr_data, .wr_full,
    .rd_clk, .rd_rst_n(rst_n), .rd_en, .rd_data, .rd_empty
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // write-side scoreboard: what the FIFO accepts goes into the model queue
  always @(posedge wr_clk) begin
    if (rst_n && wr_en) begin
      if (!wr_full) begin model.push_back(wr_data); accepted++; end
      else dropped++;
    end
  end

  // read-side scoreboard: data appear one rd_clk after an accepted request
  always @(posedge rd_clk) begin
    if (rst_n) begin
      if (pending) begin
        logic [W-1:0] exp;
        exp = model.pop_front();
        check(rd_data == exp, $sformatf("read %0d: got %h expected %h", read_cnt, rd_data, exp));
        read_cnt++;
      end
      pending <= rd_en && !rd_empty;
    end
  end

  task automatic write_word(input logic [W-1:0] d);
    @(negedge wr_clk); wr_en = 1; wr_data = d;
    @(negedge wr_clk); wr_en = 0;
  endtask

  initial begin : watchdog
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge wr_clk);
    rst_n = 1;
    repeat (4) @(posedge wr_clk);
    check(rd_empty == 1'b1, "empty after reset");
    check(wr_full  == 1'b0, "not full after reset");

    // (2) fill with the reader stopped
    @(negedge wr_clk);
    for (int i = 0; i < D + 4; i++) begin
      wr_en = 1; wr_data = 32'h1000_0000 + i;
      @(negedge wr_clk);
    end
    wr_en = 0;
    check(accepted == D, $sformatf("accepted %0d words, expected %0d", accepted, D));
    check(dropped == 4, $sformatf("dropped %0d words, expected 4", dropped));
    check(wr_full == 1'b1, "full after DEPTH writes");
    check(rd_empty == 1'b0, "not empty after fill");

    // (3) drain
    @(negedge rd_clk);
    while (!rd_empty) begin
      rd_en = 1; @(negedge rd_clk);
    end
    rd_en = 0;
    repeat (3) @(posedge rd_clk);
    check(read_cnt == D, $sformatf("read %0d words after drain, expected %0d", read_cnt, D));
    check(model.size() == 0, "model empty after drain");
    repeat (4) @(posedge wr_clk);
    check(wr_full == 1'b0, "full clears after drain");

    // (4) random traffic on both sides
    fork
      begin
        for (int i = 0; i < 300; i++) begin
          @(negedge wr_clk);
          wr_en   = ($urandom_range(0, 2) != 0);
          wr_data = $urandom;
        end
        @(negedge wr_clk); wr_en = 0;
      end
      begin
        for (int i = 0; i < 300 * 40; i++) begin
          @(negedge rd_clk);
          rd_en = ($urandom_range(0, 60) == 0);
        end
      end
    join
    // drain what is left
    repeat (4) @(posedge wr_clk);
    @(negedge rd_clk);
    while (!rd_empty) begin
      rd_en = 1; @(negedge rd_clk);
    end
    rd_en = 0;
    repeat (3) @(posedge rd_clk);
    check(model.size() == 0, $sformatf("%0d words lost", model.size()));
    check(dropped > 4, "random phase overflowed the FIFO at least once");
    $display("accepted=%0d dropped=%0d read=%0d", accepted, dropped, read_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
