// aer_mapper_rx: AER mapper, SpiNN-3 -> FPGA.
//
// Turns each received multicast packet back into an address event: the
// packet is accepted when its routing key matches KEY_BASE under KEY_MASK,
// and the neuron address is the key bits outside the mask, truncated to
// ADDR_W. Other packet types and non-matching keys are ignored. The last
// accepted address is also held in last_addr (the received neuron address
// observed on the logic analyser of the interface, where a spike of neuron 0
// of the answering population arrived as address 6).
//
// Timing: one register stage; addr_valid is a one-cycle pulse one clock after
// pkt_valid.
//
// Decoding "in the same way" as the sending side follows the interface
// description; the key, the mask and the truncation are choices of this
// design.
module aer_mapper_rx
  import spinn_pkg::*;
#(
  parameter int unsigned ADDR_W   = 16,
  parameter logic [31:0] KEY_BASE = 32'h0000_0000,
  parameter logic [31:0] KEY_MASK = 32'hFFFF_0000
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              pkt_valid,
  input  pkt_t              pkt,
  output logic              addr_valid,
  output logic [ADDR_W-1:0] addr,
  output logic [ADDR_W-1:0] last_addr
);

  logic        match;
  logic [31:0] nkey;

  assign match = (pkt.ptype == PKT_MC) && ((pkt.key & KEY_MASK) == KEY_BASE);
  assign nkey  = pkt.key & ~KEY_MASK;

  always_ff @(posedge clk) begin
    addr_valid <= 1'b0;
    if (rst) begin
      addr      <= '0;
      last_addr <= '0;
    end else if (pkt_valid && match) begin
      addr_valid <= 1'b1;
      addr       <= nkey[ADDR_W-1:0];
      last_addr  <= nkey[ADDR_W-1:0];
    end
  end

endmodule
