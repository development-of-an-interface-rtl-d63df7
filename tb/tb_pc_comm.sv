// tb_pc_comm: self-checking testbench of the PC link.
// A behavioural UART on the PC side (10 clocks per bit) sends set-value
// frames, with junk bytes in between, and decodes every report frame the
// design sends back; reports must arrive as tag + big-endian value, a newer
// report must replace one still waiting, waiting reports must be served
// round-robin, and the bit time must be CLK/BAUD.
module tb_pc_comm;
  localparam int unsigned CLK_HZ = 1_000_000;
  localparam int unsigned BAUD   = 100_000;
  localparam int unsigned DIV    = CLK_HZ / BAUD;

  logic clk = 0, rst = 1;
  logic uart_rxd = 1, uart_txd;
  logic set_valid;
  logic [15:0] set_value;
  logic rep_value_valid = 0, rep_addr_valid = 0, rep_freq_valid = 0;
  logic [15:0] rep_value = 0, rep_addr = 0, rep_freq = 0;
  int checks = 0, failures = 0;

  pc_comm #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pc_send(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd <= f[i];
      repeat (DIV) @(posedge clk);
    end
  endtask

  // set values seen
  logic [15:0] sets [$];
  always @(posedge clk) if (!rst && set_valid) sets.push_back(set_value);

  // PC-side receiver: sample mid-bit, check the stop bit
  logic [7:0] rx_bytes [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      repeat (DIV / 2) @(posedge clk);
      check(uart_txd == 0, "start bit low at mid-bit");
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (DIV) @(posedge clk);
      check(uart_txd == 1, "stop bit high");
      rx_bytes.push_back(b);
    end
  end

  // shortest low run on the line is one bit time
  int min_low = 1 << 30;
  initial begin
    forever begin
      int t;
      @(negedge uart_txd);
      t = 0;
      while (uart_txd == 0) begin @(posedge clk); t++; end
      if (t < min_low) min_low = t;
    end
  end

  task automatic expect_frame(input logic [7:0] tag, input logic [15:0] v);
    int t;
    t = 0;
    while (rx_bytes.size() < 3 && t < 2000) begin @(posedge clk); t++; end
    if (rx_bytes.size() < 3) begin check(0, "report frame missing"); return; end
    check(rx_bytes[0] == tag && rx_bytes[1] == v[15:8] && rx_bytes[2] == v[7:0],
          $sformatf("frame %h %h %h exp %h %h", rx_bytes[0], rx_bytes[1], rx_bytes[2], tag, v));
    void'(rx_bytes.pop_front()); void'(rx_bytes.pop_front()); void'(rx_bytes.pop_front());
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    // PC -> FPGA frames, with a junk byte in front of the second
    pc_send(8'h53); pc_send(8'h03); pc_send(8'hE8);
    pc_send(8'h11);
    pc_send(8'h53); pc_send(8'h00); pc_send(8'h0A);
    repeat (20) @(posedge clk);
    check(sets.size() == 2, $sformatf("two set values, got %0d", sets.size()));
    if (sets.size() == 2) check(sets[0] == 16'd1000 && sets[1] == 16'd10, "set values 1000, 10");
    // one report of each kind at once: served V, A, F
    rep_value <= 16'h1234; rep_addr <= 16'h0006; rep_freq <= 16'h000A;
    rep_value_valid <= 1; rep_addr_valid <= 1; rep_freq_valid <= 1;
    @(posedge clk);
    rep_value_valid <= 0; rep_addr_valid <= 0; rep_freq_valid <= 0;
    expect_frame(8'h56, 16'h1234);
    expect_frame(8'h41, 16'h0006);
    expect_frame(8'h46, 16'h000A);
    check(min_low >= int'(DIV) - 1 && min_low <= int'(DIV) + 1, $sformatf("bit time %0d", min_low));
    // overwrite: two address reports while a value report is on the line
    rep_value <= 16'h00FF; rep_value_valid <= 1; @(posedge clk); rep_value_valid <= 0;
    repeat (5) @(posedge clk);
    rep_addr <= 16'h0001; rep_addr_valid <= 1; @(posedge clk);
    rep_addr <= 16'h0002; @(posedge clk); rep_addr_valid <= 0;
    expect_frame(8'h56, 16'h00FF);
    expect_frame(8'h41, 16'h0002);
    repeat (400) @(posedge clk);
    check(rx_bytes.size() == 0, "overwritten report not sent");
    // round robin: the last frame served was an A, so when A and F wait
    // together F goes first; a new A arriving meanwhile replaces the waiting
    // one -> F 0x22, A 0x33 (a fixed V, A, F priority would send A 0x11 first)
    rep_addr <= 16'h0011; rep_freq <= 16'h0022;
    rep_addr_valid <= 1; rep_freq_valid <= 1; @(posedge clk);
    rep_addr_valid <= 0; rep_freq_valid <= 0;
    repeat (5) @(posedge clk);
    rep_addr <= 16'h0033; rep_addr_valid <= 1; @(posedge clk); rep_addr_valid <= 0;
    expect_frame(8'h46, 16'h0022);
    expect_frame(8'h41, 16'h0033);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
