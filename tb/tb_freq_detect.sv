// tb_freq_detect: self-checking testbench of frequency detection.
// With a 1000-clock gate, address events for the watched address and for
// others are applied at known rates; spike_count must count only the watched
// address, and freq_hz at each gate end the watched events in that gate.
module tb_freq_detect;
  localparam int unsigned GATE = 1000;

  logic clk = 0, rst = 1;
  logic addr_valid = 0;
  logic [15:0] addr = 0;
  logic [31:0] spike_count;
  logic [15:0] freq_hz;
  logic freq_valid;
  int checks = 0, failures = 0;

  freq_detect #(.ADDR_W(16), .WATCH_ADDR(6), .GATE_CYCLES(GATE), .CNT_W(32), .FREQ_W(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model: count watched events per gate
  int cyc = 0, win = 0, total = 0, gates = 0, exp_freq = 0;
  always @(posedge clk) begin
    if (rst) begin cyc = 0; win = 0; total = 0; end
    else begin
      if (freq_valid) begin
        gates++;
        check(freq_hz == 16'(exp_freq), $sformatf("gate %0d: freq %0d exp %0d", gates, freq_hz, exp_freq));
      end
      check(spike_count == 32'(total), $sformatf("spike_count %0d exp %0d", spike_count, total));
      // events applied in this clock take effect now
      if (addr_valid && addr == 6) total++;
      if (cyc == GATE - 1) begin
        exp_freq = win;
        win = (addr_valid && addr == 6) ? 1 : 0;
        cyc = 0;
      end else begin
        if (addr_valid && addr == 6) win++;
        cyc++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // several gates at different rates, mixed with other addresses
    for (int g = 0; g < 8; g++) begin
      int period;
      period = 10 + 17 * g;
      for (int c = 0; c < int'(GATE); c++) begin
        addr_valid <= (c % period == 0) || (c % 7 == 3);
        addr       <= (c % period == 0) ? 16'd6 : 16'(c % 5);
        @(posedge clk);
      end
    end
    addr_valid <= 0;
    repeat (GATE + 2) @(posedge clk);
    check(gates >= 8, "gates closed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
