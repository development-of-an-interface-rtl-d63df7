// tb_workload_closed_loop: the closed-loop experiment of the interface, run
// on a scaled clock (10000 clocks per second of the design, 1000 baud).
//
// Neuron address 0 is driven first at 1 Hz, then at 10 Hz, for ten seconds
// in all; the board model relays each spike one-to-one back as address 6,
// as the network with a one-to-one input/output relation does. The switch
// time is chosen so that the rate coder emits 54 spikes in the ten seconds:
// its accumulated phase is 1 Hz * t1 + 10 Hz * (10 s - t1) = 54 for
// t1 = 46/9 s, i.e. 51111 clocks (phase 54.0001). After the ten seconds the
// value is set to 0 and the final counter value must be 54 with the
// received address 6, and the full one-second gates must read 1 Hz before
// the switch and 10 Hz after it.
module tb_workload_closed_loop;
  localparam int unsigned CLK_HZ = 10_000;
  localparam int unsigned BAUD   = 1_000;
  localparam int unsigned T1     = 51_111;    // clocks at 1 Hz
  localparam int unsigned T      = 100_000;   // ten seconds

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

  fpga_interface_top #(.CLK_HZ(CLK_HZ), .BAUD(BAUD), .GATE_CYCLES(CLK_HZ)) dut (.*);

  spinn3_model board (
    .lin_data, .lin_ack, .lout_data, .lout_ack, .resync(!arst_n), .stall(1'b0), .inject_bad(1'b0),
    .n_in, .n_in_bad, .n_out, .n_stalls
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // gate readings with the time they were taken
  int gate_f [$];
  int gate_t [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (ctrl_valid && arst_n && !dut.rst) begin gate_f.push_back(int'(ctrl_freq_hz)); gate_t.push_back(cyc); end
  end

  initial begin
    int t_start;
    repeat (5) @(posedge clk);
    arst_n <= 1;
    repeat (5) @(posedge clk);
    t_start = cyc;
    sensor_value <= 16'd1; sensor_valid <= 1; @(posedge clk); sensor_valid <= 0;
    repeat (T1 - 1) @(posedge clk);
    sensor_value <= 16'd10; sensor_valid <= 1; @(posedge clk); sensor_valid <= 0;
    repeat (T - T1 - 1) @(posedge clk);
    sensor_value <= 16'd0; sensor_valid <= 1; @(posedge clk); sensor_valid <= 0;
    repeat (2000) @(posedge clk);
    $display("info: final Spike_Counter %0d, Received_Neuron_Address %0d, sent %0d", spike_count, rx_addr, n_in);
    check(n_in == 54, $sformatf("54 spikes sent, got %0d", n_in));
    check(spike_count == 32'd54, $sformatf("counter 54, got %0d", spike_count));
    check(rx_addr == 16'd6, "received address 6");
    foreach (gate_f[i]) begin
      // gate i covers clocks (gate_t - CLK_HZ, gate_t]; relative to t_start
      int a, b;
      a = gate_t[i] - int'(CLK_HZ) - t_start; b = gate_t[i] - t_start;
      if (a > 200 && b < int'(T1)) check(gate_f[i] == 1, $sformatf("gate %0d at 1 Hz read %0d", i, gate_f[i]));
      if (a > int'(T1) + 1000 && b < int'(T)) check(gate_f[i] == 10, $sformatf("gate %0d at 10 Hz read %0d", i, gate_f[i]));
    end
    check(gate_f.size() >= 9, "gates closed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
