// tb_fpga_interface_full: one complete operation of the interface with every
// parameter at its default (100 MHz clock, 115200 baud, one-second gate).
// The PC sets the value 1000 over the UART shortly after reset; the rate
// coder then sends a spike every 100000 clocks (1 kHz), the board model
// answers each with address 6, and at the end of the first one-second gate
// the measured frequency must equal the number of answers that arrived in
// it: spikes at t0 + k*100000 clocks, k = 1..999, where t0 (the end of the
// set-value frame, about 26000 clocks) is less than one spike period. The
// PC must then receive the 'F' report with the same value.
module tb_fpga_interface_full;
  localparam int unsigned DIV = (100_000_000 + 115_200 / 2) / 115_200;

  logic clk = 0, arst_n = 0;
  logic sensor_valid = 0;
  logic [15:0] sensor_value = 0;
  logic uart_rxd = 1, uart_txd;
  logic [6:0] lin_data, lout_data;
  logic lin_ack, lout_ack;
  logic [1:0] disp_sel = 2'd2;
  logic [7:0] an;
  logic [6:0] seg;
  logic dp;
  logic ctrl_valid;
  logic [15:0] ctrl_freq_hz, rx_addr;
  logic [31:0] spike_count;
  logic tx_spike, tx_dropped, link_err;
  int n_in, n_in_bad, n_out, n_stalls;
  int checks = 0, failures = 0;

  fpga_interface_top dut (.*);

  spinn3_model board (
    .lin_data, .lin_ack, .lout_data, .lout_ack, .resync(!arst_n), .stall(1'b0), .inject_bad(1'b0),
    .n_in, .n_in_bad, .n_out, .n_stalls
  );

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

  logic [7:0] rx_bytes [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      repeat (DIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (DIV) @(posedge clk);
      rx_bytes.push_back(b);
    end
  end

  int n_drop = 0, n_err = 0;
  always @(posedge clk) if (arst_n && !dut.rst) begin
    if (tx_dropped) n_drop++;
    if (link_err) n_err++;
  end

  initial begin
    int f, sc;
    repeat (5) @(posedge clk);
    arst_n <= 1;
    repeat (5) @(posedge clk);
    pc_send(8'h53); pc_send(8'h03); pc_send(8'hE8);   // set value 1000
    @(posedge clk iff ctrl_valid);
    f = int'(ctrl_freq_hz);
    sc = int'(spike_count);
    $display("info: first gate measured %0d Hz, spike_count %0d, board in %0d out %0d",
             f, sc, n_in, n_out);
    check(f == 999, $sformatf("first gate %0d Hz, expected 999", f));
    check(sc == f, "spike counter equals the gate count");
    check(rx_addr == 16'd6, "received address 6");
    check(n_drop == 0 && n_err == 0 && n_in_bad == 0, "no drops or link errors");
    // the F report follows within a few frames
    begin
      bit seen;
      seen = 0;
      repeat (40 * 10 * DIV) begin
        @(posedge clk);
        while (rx_bytes.size() >= 3) begin
          logic [7:0] t, h, l;
          t = rx_bytes.pop_front(); h = rx_bytes.pop_front(); l = rx_bytes.pop_front();
          if (t == 8'h46) begin
            seen = 1;
            check({h, l} == 16'(f), $sformatf("F report %0d", {h, l}));
          end
        end
        if (seen) break;
      end
      check(seen, "F report received");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (101_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
