// tb_fpga_interface_top: end-to-end testbench of the whole interface, at a
// scaled clock (CLK_HZ = 100000, so one second of the design is 100000
// clocks, and a UART bit is 10 clocks), connected to a behavioural SpiNN-3
// link model that answers each spike with one spike of address 6.
//
// Steps and what is checked:
//  1. PC set value 10 over the UART -> 10 spikes/s go out, come back as
//     address 6; the measured frequency of a full gate is 10; the PC gets
//     'V', 'A' and 'F' reports with the right values.
//  2. Sensor value 100 -> measured 100.
//  3. Sensor value 5000 -> clamped, measured 1000.
//  4. The model withholds its acknowledge for a while: the link stalls and
//     the mapper drops spikes; traffic resumes afterwards.
//  5. The model sends a packet with bad parity: link_err, not counted.
//  6. Display selection 3 shows the received address 6, selection 0 the
//     value.
//  7. Reset button mid-run: counters and value return to zero.
// Each of these mechanisms is counted; one that never happened is a failure.
module tb_fpga_interface_top;
  localparam int unsigned CLK_HZ = 100_000;
  localparam int unsigned BAUD   = 10_000;
  localparam int unsigned DIV    = CLK_HZ / BAUD;

  logic clk = 0, arst_n = 0;
  logic sensor_valid = 0;
  logic [15:0] sensor_value = 0;
  logic uart_rxd = 1, uart_txd;
  logic [6:0] lin_data, lout_data;
  logic lin_ack, lout_ack;
  logic [1:0] disp_sel = 0;
  logic [7:0] an;
  logic [6:0] seg;
  logic dp;
  logic ctrl_valid;
  logic [15:0] ctrl_freq_hz, rx_addr;
  logic [31:0] spike_count;
  logic tx_spike, tx_dropped, link_err;
  logic stall = 0, inject_bad = 0;
  int n_in, n_in_bad, n_out, n_stalls;
  int checks = 0, failures = 0;

  fpga_interface_top #(.CLK_HZ(CLK_HZ), .BAUD(BAUD), .GATE_CYCLES(CLK_HZ)) dut (.*);

  spinn3_model #(.IN_KEY(32'h0001_0000), .OUT_KEY(32'h0000_0006), .ACK_NS(3), .RESP_NS(200)) board (
    .lin_data, .lin_ack, .lout_data, .lout_ack, .resync(!arst_n), .stall, .inject_bad,
    .n_in, .n_in_bad, .n_out, .n_stalls
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_pc_set = 0, m_sensor = 0, m_clamp = 0, m_stall = 0, m_drop = 0, m_err = 0;
  int m_disp = 0, m_reset = 0, m_rep_v = 0, m_rep_a = 0, m_rep_f = 0, m_gate = 0;
  int n_tx_spike = 0;
  always @(posedge clk) if (arst_n && !dut.rst) begin
    if (tx_dropped) m_drop++;
    if (link_err) m_err++;
    if (ctrl_valid) m_gate++;
    if (tx_spike) n_tx_spike++;
  end

  // ---------------- PC side UART ----------------
  task automatic pc_send(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd <= f[i];
      repeat (DIV) @(posedge clk);
    end
  endtask

  task automatic pc_set(input logic [15:0] v);
    pc_send(8'h53); pc_send(v[15:8]); pc_send(v[7:0]);
    m_pc_set++;
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

  // decode report frames as they arrive
  logic [15:0] last_v, last_a, last_f;
  initial begin
    forever begin
      logic [7:0] t, h, l;
      wait (rx_bytes.size() >= 3);
      t = rx_bytes.pop_front(); h = rx_bytes.pop_front(); l = rx_bytes.pop_front();
      case (t)
        8'h56: begin m_rep_v++; last_v = {h, l}; end
        8'h41: begin m_rep_a++; last_a = {h, l}; end
        8'h46: begin m_rep_f++; last_f = {h, l}; end
        default: check(0, $sformatf("unknown report tag %h", t));
      endcase
    end
  end

  // wait for the next gate end and return the measured frequency
  task automatic next_gate(output int f);
    @(posedge clk iff ctrl_valid);
    f = int'(ctrl_freq_hz);
  endtask

  // run one partial gate, then check the following full gate
  task automatic expect_freq(input int exp_f);
    int f;
    next_gate(f);
    next_gate(f);
    check(f == exp_f, $sformatf("measured %0d Hz, expected %0d", f, exp_f));
  endtask

  // read the display for the current selection
  task automatic read_display(output logic [31:0] v);
    localparam logic [6:0] PAT [16] = '{7'h3F, 7'h06, 7'h5B, 7'h4F, 7'h66, 7'h6D, 7'h7D, 7'h07,
                                        7'h7F, 7'h6F, 7'h77, 7'h7C, 7'h39, 7'h5E, 7'h79, 7'h71};
    v = '0;
    repeat (200) begin
      @(posedge clk); #1;
      for (int d = 0; d < 8; d++) if (!an[d])
        for (int i = 0; i < 16; i++) if (PAT[i] == ~seg) v[4*d +: 4] = 4'(i);
    end
  endtask

  initial begin
    int f, sc0, n0;
    logic [31:0] dv;
    repeat (5) @(posedge clk);
    arst_n <= 1;
    repeat (5) @(posedge clk);

    // 1. PC set value
    pc_set(16'd10);
    expect_freq(10);
    check(rx_addr == 16'd6, "received address 6");
    // let a spike still in flight finish its round trip
    for (int i = 0; i < 2000 && !(n_in == n_tx_spike && spike_count == 32'(n_out)); i++)
      @(posedge clk);
    check(spike_count == 32'(n_out), $sformatf("spike_count %0d = packets returned %0d", spike_count, n_out));
    check(n_in == n_tx_spike && n_in_bad == 0, $sformatf("all %0d spikes reached the board (%0d)", n_tx_spike, n_in));
    repeat (1000) @(posedge clk);
    check(last_v == 16'd10, "report V = 10");
    check(last_a == 16'd6, "report A = 6");
    check(last_f == 16'd10, $sformatf("report F = %0d", last_f));

    // 2. sensor value
    sensor_value <= 16'd100; sensor_valid <= 1; @(posedge clk); sensor_valid <= 0;
    m_sensor++;
    expect_freq(100);

    // 3. clamp
    sensor_value <= 16'd5000; sensor_valid <= 1; @(posedge clk); sensor_valid <= 0;
    expect_freq(1000);
    if (ctrl_freq_hz == 16'd1000) m_clamp++;

    // 4. link stall -> dropped spikes
    n0 = n_in;
    stall <= 1;
    repeat (3000) @(posedge clk);
    check(n_stalls > 0 && n_in - n0 <= 2, "no spikes pass while the link is stalled");
    if (n_stalls > 0) m_stall++;
    stall <= 0;
    repeat (2000) @(posedge clk);
    check(m_drop > 0, "spikes dropped during the stall");
    check(n_in - n0 > 10, "traffic resumes after the stall");

    // 5. bad packet from the board
    sc0 = m_err;
    inject_bad <= 1; repeat (2) @(posedge clk); inject_bad <= 0;
    repeat (500) @(posedge clk);
    check(m_err == sc0 + 1, "bad parity packet flagged");
    check(spike_count == 32'(n_out - 1), $sformatf("bad packet not counted: %0d vs %0d", spike_count, n_out - 1));

    // 6. display
    disp_sel <= 2'd3;
    read_display(dv);
    check(dv == 32'h6, $sformatf("display sel 3 shows %h", dv));
    disp_sel <= 2'd0;
    read_display(dv);
    check(dv == 32'd5000, $sformatf("display sel 0 shows %h", dv));
    m_disp++;

    // 7. reset mid-run
    stall <= 1;       // freeze the board so no packet is left half-sent
    repeat (500) @(posedge clk);
    arst_n <= 0;
    repeat (5) @(posedge clk);
    check(spike_count == 0 && rx_addr == 0, "counters cleared by reset");
    arst_n <= 1;
    repeat (5) @(posedge clk);
    check(dut.cur_value == 0, "value cleared by reset");
    m_reset++;

    // mechanism summary
    check(m_pc_set > 0, "PC set value used");
    check(m_sensor > 0, "sensor value used");
    check(m_clamp > 0, "rate clamped");
    check(m_stall > 0, "link stalled");
    check(m_drop > 0, "spike dropped");
    check(m_err > 0, "link error seen");
    check(m_disp > 0, "display switched");
    check(m_reset > 0, "reset applied");
    check(m_rep_v > 0 && m_rep_a > 0 && m_rep_f > 0, "all report kinds sent");
    check(m_gate > 0, "frequency gates closed");
    $display("info: pc_set=%0d sensor=%0d clamp=%0d stall=%0d drop=%0d err=%0d disp=%0d reset=%0d rep V/A/F=%0d/%0d/%0d gates=%0d spikes out=%0d back=%0d",
             m_pc_set, m_sensor, m_clamp, n_stalls, m_drop, m_err, m_disp, m_reset, m_rep_v, m_rep_a, m_rep_f, m_gate, n_in, n_out);
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
