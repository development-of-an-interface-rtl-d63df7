// fpga_interface_top: bidirectional FPGA interface between conventional
// sensors / a PC and a SpiNNaker neuromorphic board.
//
// Forward path: the value to encode (the latest sensor reading or PC set
// value) drives the rate coder (freq_gen), whose spikes become address
// events of one neuron (aer_mapper_tx), packed as SpiNNaker multicast
// packets and sent over the 2-of-7 self-timed link (spinn_link_tx, wires
// Lin[6:0] / LinACK).
// Return path: packets arriving on Lout[6:0] / LoutACK (spinn_link_rx) are
// decoded back to neuron addresses (aer_mapper_rx); the spikes of the
// watched neuron are counted and their rate measured (freq_detect). The
// measured frequency is the control data for the device to be controlled,
// brought out on ctrl_*.
// Monitoring: all values go to the PC over the UART (pc_comm), and one of
// them, chosen by disp_sel, to the seven-segment display.
//
// Ports are plain board signals. The sensor interface is a parallel value
// with a strobe, since the sensor and its protocol are left open; the
// clock comes from the board's clock manager; the link wires go to the
// level translators of the connector. spike_count and rx_addr are the two
// signals observed on the logic analyser in the reference experiment.
//
// The block structure and the data flow follow the interface's data-flow
// chart; which value feeds the rate coder (last writer wins) is a choice of
// this design.
module fpga_interface_top
  import spinn_pkg::*;
#(
  parameter int unsigned CLK_HZ         = 100_000_000,
  parameter int unsigned BAUD           = 115_200,
  parameter int unsigned GATE_CYCLES    = CLK_HZ,
  parameter int unsigned MAX_FREQ_HZ    = 1000,
  parameter int unsigned REFRESH_HZ     = 1000,
  parameter int unsigned TX_NEURON_ADDR = 0,
  parameter int unsigned WATCH_ADDR     = 6,
  parameter logic [31:0] TX_KEY_BASE    = 32'h0001_0000,
  parameter logic [31:0] RX_KEY_BASE    = 32'h0000_0000,
  parameter logic [31:0] RX_KEY_MASK    = 32'hFFFF_0000
) (
  input  logic        clk,
  input  logic        arst_n,
  // sensor side
  input  logic        sensor_valid,
  input  logic [15:0] sensor_value,
  // PC
  input  logic        uart_rxd,
  output logic        uart_txd,
  // SpiNNaker link, FPGA -> SpiNN-3
  output logic [6:0]  lin_data,
  input  logic        lin_ack,
  // SpiNNaker link, SpiNN-3 -> FPGA
  input  logic [6:0]  lout_data,
  output logic        lout_ack,
  // seven-segment display
  input  logic [1:0]  disp_sel,
  output logic [7:0]  an,
  output logic [6:0]  seg,
  output logic        dp,
  // control data and status
  output logic        ctrl_valid,
  output logic [15:0] ctrl_freq_hz,
  output logic [31:0] spike_count,
  output logic [15:0] rx_addr,
  output logic        tx_spike,
  output logic        tx_dropped,
  output logic        link_err
);

  localparam int unsigned ADDR_W = 16;

  logic rst;
  reset_sync u_rst (.clk, .arst_n, .rst);

  // ---------------- value to encode ----------------
  logic        set_valid;
  logic [15:0] set_value;
  logic [15:0] cur_value;
  logic        cur_upd;

  always_ff @(posedge clk) begin
    cur_upd <= 1'b0;
    if (rst) begin
      cur_value <= '0;
    end else if (sensor_valid) begin
      cur_value <= sensor_value;
      cur_upd   <= 1'b1;
    end else if (set_valid) begin
      cur_value <= set_value;
      cur_upd   <= 1'b1;
    end
  end

  // ---------------- forward path ----------------
  logic spike;
  freq_gen #(.CLK_HZ(CLK_HZ), .VALUE_W(16), .MAX_FREQ_HZ(MAX_FREQ_HZ)) u_fgen (
    .clk, .rst, .value(cur_value), .spike
  );
  assign tx_spike = spike;

  logic tx_pkt_valid, tx_pkt_ready;
  pkt_t tx_pkt;
  aer_mapper_tx #(.ADDR_W(ADDR_W), .KEY_BASE(TX_KEY_BASE), .NEURON_ADDR(TX_NEURON_ADDR)) u_map_tx (
    .clk, .rst, .spike, .pkt_valid(tx_pkt_valid), .pkt_ready(tx_pkt_ready), .pkt(tx_pkt),
    .dropped(tx_dropped)
  );

  spinn_link_tx u_link_tx (
    .clk, .rst, .pkt_valid(tx_pkt_valid), .pkt_ready(tx_pkt_ready), .pkt(tx_pkt),
    .lin_data, .lin_ack
  );

  // ---------------- return path ----------------
  logic rx_pkt_valid;
  pkt_t rx_pkt;
  spinn_link_rx u_link_rx (
    .clk, .rst, .lout_data, .lout_ack, .pkt_valid(rx_pkt_valid), .pkt(rx_pkt), .err(link_err)
  );

  logic              ev_valid;
  logic [ADDR_W-1:0] ev_addr;
  aer_mapper_rx #(.ADDR_W(ADDR_W), .KEY_BASE(RX_KEY_BASE), .KEY_MASK(RX_KEY_MASK)) u_map_rx (
    .clk, .rst, .pkt_valid(rx_pkt_valid), .pkt(rx_pkt),
    .addr_valid(ev_valid), .addr(ev_addr), .last_addr(rx_addr)
  );

  freq_detect #(.ADDR_W(ADDR_W), .WATCH_ADDR(WATCH_ADDR), .GATE_CYCLES(GATE_CYCLES),
                .CNT_W(32), .FREQ_W(16)) u_fdet (
    .clk, .rst, .addr_valid(ev_valid), .addr(ev_addr),
    .spike_count, .freq_hz(ctrl_freq_hz), .freq_valid(ctrl_valid)
  );

  // ---------------- monitoring ----------------
  pc_comm #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_pc (
    .clk, .rst, .uart_rxd, .uart_txd,
    .set_valid, .set_value,
    .rep_value_valid(cur_upd),   .rep_value(cur_value),
    .rep_addr_valid(ev_valid),   .rep_addr(ev_addr),
    .rep_freq_valid(ctrl_valid), .rep_freq(ctrl_freq_hz)
  );

  seg7_display #(.CLK_HZ(CLK_HZ), .DIGITS(8), .REFRESH_HZ(REFRESH_HZ)) u_disp (
    .clk, .rst, .sel(disp_sel),
    .val0({16'h0, cur_value}), .val1({16'h0, ctrl_freq_hz}), .val2(spike_count),
    .val3({16'h0, rx_addr}),
    .an, .seg, .dp
  );

endmodule
