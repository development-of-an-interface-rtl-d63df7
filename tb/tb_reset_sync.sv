// tb_reset_sync: self-checking testbench of reset control.
// Reset must assert as soon as the button is pressed, between clock edges,
// and release exactly two rising edges after the button is let go.
module tb_reset_sync;
  logic clk = 0, arst_n = 1, rst;
  int checks = 0, failures = 0;

  reset_sync #(.STAGES(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1 arst_n = 0;
    #1 check(rst == 1, "reset while button held");
    repeat (3) @(posedge clk);
    for (int i = 0; i < 5; i++) begin
      #2 arst_n = 1;             // release between edges
      @(posedge clk); #1 check(rst == 1, "still in reset after 1 edge");
      @(posedge clk); #1 check(rst == 0, "released after 2 edges");
      repeat ($urandom_range(2, 6)) @(posedge clk);
      #3 arst_n = 0;             // press between edges
      #1 check(rst == 1, "asserted without a clock edge");
      repeat (2) @(posedge clk);
      #1 check(rst == 1, "held while button pressed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
