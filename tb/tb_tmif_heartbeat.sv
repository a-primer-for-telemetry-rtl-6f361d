// tb_tmif_heartbeat: self-checking test of the heartbeat generator, scaled
// to CLK_HZ = 1200 and HB_HZ = 60, so the output must toggle every 10 clock
// cycles (period 20 cycles). Checks the reset level, the exact number of
// cycles between toggles over 30 toggles, and that reset restarts the count.
`timescale 1ns/1ps
module tb_tmif_heartbeat;
  logic clk = 0, rst_n = 0, hb;
  int checks = 0, failures = 0;
  int cyc = 0, last_toggle = 0, toggles = 0;
  logic hb_d;

  always #5 clk = ~clk;

  tmif_heartbeat #(.CLK_HZ(1200), .HB_HZ(60)) dut (.clk, .rst_n, .heartbeat(hb));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", msg, $realtime); end
  endtask

  always @(posedge clk) begin
    cyc++;
    #1;
    if (rst_n && hb != hb_d) begin
      toggles++;
      if (toggles > 1) check(cyc - last_toggle == 10, $sformatf("toggle after %0d cycles", cyc - last_toggle));
      else check(cyc == 10, $sformatf("first toggle at cycle %0d", cyc));
      last_toggle = cyc;
    end
    hb_d = hb;
  end

  initial begin : watchdog
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hb_d = 0;
    #2;
    check(hb == 0, "low in reset");
    @(negedge clk);
    rst_n = 1; cyc = 0;
    wait (toggles == 30);
    check(1, "30 toggles seen");
    @(negedge clk);
    rst_n = 0;
    #1 check(hb == 0, "reset clears output");
    hb_d = 0;
    @(negedge clk);
    rst_n = 1; cyc = 0; toggles = 0;
    wait (toggles == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
