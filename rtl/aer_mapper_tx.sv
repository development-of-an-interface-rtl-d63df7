// aer_mapper_tx: AER mapper, FPGA -> SpiNN-3.
//
// Every spike of the rate coder becomes an address event of the configured
// neuron, wrapped in a short (40-bit, no payload) SpiNNaker multicast packet
// whose routing key is KEY_BASE | NEURON_ADDR. Only the neuron address is
// carried, no sensor value or other information, so the packet stream is a
// pure rate code. The packet is held in a one-entry buffer until the link
// transmitter takes it (valid/ready); a spike that arrives while the buffer
// is still full is counted as lost with a one-cycle 'dropped' pulse.
//
// The packet itself is a constant set by the parameters (the parity bit is
// filled in by the link transmitter); only pkt_valid and dropped change.
//
// Timing: pkt_valid rises the clock after the spike.
//
// Sending only the address and neuron address 0 follow the interface
// description; the key value and the one-entry buffer are choices of this
// design (the key must match the one configured for the external device on
// the SpiNNaker side).
module aer_mapper_tx
  import spinn_pkg::*;
#(
  parameter int unsigned ADDR_W      = 16,
  parameter logic [31:0] KEY_BASE    = 32'h0001_0000,
  parameter int unsigned NEURON_ADDR = 0
) (
  input  logic clk,
  input  logic rst,
  input  logic spike,
  output logic pkt_valid,
  input  logic pkt_ready,
  output pkt_t pkt,
  output logic dropped
);

  localparam logic [31:0] KEY = KEY_BASE | 32'(NEURON_ADDR[ADDR_W-1:0]);

  always_comb begin
    pkt             = '0;
    pkt.ptype       = PKT_MC;
    pkt.key         = KEY;
    pkt.has_payload = 1'b0;
  end

  always_ff @(posedge clk) begin
    dropped <= 1'b0;
    if (rst) begin
      pkt_valid <= 1'b0;
    end else begin
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (spike) begin
        if (pkt_valid && !pkt_ready) dropped <= 1'b1;
        else                         pkt_valid <= 1'b1;
      end
    end
  end

endmodule
