// tb_freq_gen: self-checking testbench of the rate coder.
// With CLK_HZ scaled to 100000 clocks per "second", each value must give
// exactly that many spikes per second, evenly spaced (intervals within one
// clock of CLK_HZ/value); values above MAX_FREQ_HZ are clamped; 0 stops.
module tb_freq_gen;
  localparam int unsigned CLK_HZ = 100_000;

  logic clk = 0, rst = 1;
  logic [15:0] value = 0;
  logic spike;
  int checks = 0, failures = 0;

  freq_gen #(.CLK_HZ(CLK_HZ), .VALUE_W(16), .MAX_FREQ_HZ(1000)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // count spikes and interval extremes over one second
  task automatic measure(input int v, input int exp_n);
    int n, last, mn, mx;
    n = 0; last = -1; mn = 1 << 30; mx = 0;
    value <= 16'(v);
    @(posedge clk);
    for (int c = 0; c < int'(CLK_HZ); c++) begin
      @(posedge clk);
      if (spike) begin
        if (last >= 0) begin
          if (c - last < mn) mn = c - last;
          if (c - last > mx) mx = c - last;
        end
        last = c; n++;
      end
    end
    check(n == exp_n,
          $sformatf("value %0d: %0d spikes in one second, expected %0d", v, n, exp_n));
    if (exp_n >= 2) begin
      int ideal;
      ideal = int'(CLK_HZ) / exp_n;
      check(mn >= ideal - 1 && mx <= ideal + 1,
            $sformatf("value %0d: intervals %0d..%0d, ideal %0d", v, mn, mx, ideal));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    measure(0, 0);
    measure(1, 1);
    measure(10, 10);
    measure(7, 7);
    measure(1000, 1000);
    measure(5000, 1000);   // clamped
    measure(333, 333);
    // exact count over 4 seconds at 10 Hz (phase carried over)
    begin
      int n;
      n = 0;
      value <= 16'd10;
      repeat (4 * CLK_HZ) begin @(posedge clk); if (spike) n++; end
      check(n == 40, $sformatf("40 spikes in 4 s at 10 Hz, got %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
