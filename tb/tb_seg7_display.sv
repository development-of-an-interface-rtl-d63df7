// tb_seg7_display: self-checking testbench of the seven-segment display.
// For each selection it scans all eight digits, decodes the active-low
// segment pattern with its own table and rebuilds the shown 32-bit value; it
// also checks that exactly one digit is lit and the digit dwell time.
module tb_seg7_display;
  localparam int unsigned CLK_HZ = 80_000;   // 10 clocks per digit at 1 kHz
  logic clk = 0, rst = 1;
  logic [1:0] sel = 0;
  logic [31:0] val0 = 32'h0123_4567, val1 = 32'h89AB_CDEF, val2 = 32'd54, val3 = 32'h6;
  logic [7:0] an;
  logic [6:0] seg;
  logic dp;
  int checks = 0, failures = 0;

  seg7_display #(.CLK_HZ(CLK_HZ), .DIGITS(8), .REFRESH_HZ(1000)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // active-high {g..a} patterns of 0..F
  localparam logic [6:0] PAT [16] = '{7'h3F, 7'h06, 7'h5B, 7'h4F, 7'h66, 7'h6D, 7'h7D, 7'h07,
                                      7'h7F, 7'h6F, 7'h77, 7'h7C, 7'h39, 7'h5E, 7'h79, 7'h71};

  function automatic int seg2hex(input logic [6:0] s);
    for (int i = 0; i < 16; i++) if (PAT[i] == ~s) return i;
    return -1;
  endfunction

  initial begin
    logic [31:0] expv [4];
    expv = '{32'h0123_4567, 32'h89AB_CDEF, 32'd54, 32'h6};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int s = 0; s < 4; s++) begin
      logic [31:0] got;
      bit seen [8];
      int dwell;
      sel <= 2'(s);
      got = '0;
      seen = '{default: 0};
      repeat (2) @(posedge clk);
      for (int c = 0; c < 200; c++) begin
        @(posedge clk); #1;
        check($countones(~an) == 1 && dp == 1'b1, "one digit lit, dp off");
        for (int d = 0; d < 8; d++) if (!an[d]) begin
          int h;
          h = seg2hex(seg);
          check(h >= 0, "legal digit pattern");
          got[4*d +: 4] = 4'(h);
          seen[d] = 1;
        end
      end
      for (int d = 0; d < 8; d++) check(seen[d], "every digit scanned");
      check(got == expv[s], $sformatf("sel %0d shows %h exp %h", s, got, expv[s]));
      // dwell time of one digit: CLK_HZ / (1000 * 8) = 10 clocks
      @(an); dwell = 0;
      begin
        logic [7:0] a0;
        a0 = an;
        while (an == a0) begin @(posedge clk); #1; dwell++; end
      end
      check(dwell == 10, $sformatf("digit dwell %0d clocks", dwell));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
