// spinn_link_tx: SpiNNaker link transmitter (FPGA -> SpiNN-3).
//
// Takes one packet at a time through a valid/ready handshake, fills in its
// odd parity bit and sends it on the seven Lin wires as 2-of-7 NRZ symbols:
// each symbol toggles the two wires of its code, nibble 0 first, and the
// packet ends with the EOP symbol. After each symbol the transmitter waits
// for the receiver to toggle LinACK before it sends the next one, so the
// link runs at the speed of the slower side. LinACK comes from another
// clock domain and passes a two-flop synchroniser first.
//
// Timing: pkt_ready is high only in IDLE; a 40-bit packet takes 11 symbols,
// each lasting one clock plus the acknowledge round trip plus 2 clocks of
// synchroniser latency.
//
// The wire names and widths (Lin[6:0], LinACK) are those of the connector of
// the interface; the symbol coding follows the public SpiNNaker link
// specification. Resetting the data wires to zero and taking the present
// LinACK level as the reference after reset are choices of this design.
module spinn_link_tx
  import spinn_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             pkt_valid,
  output logic             pkt_ready,
  input  pkt_t             pkt,
  output logic [SYM_W-1:0] lin_data,
  input  logic             lin_ack
);

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT} state_e;

  state_e            state;
  logic [LONG_LEN-1:0] shreg;     // packet bits still to send, nibble 0 at bit 0
  logic [4:0]        nib_left;    // data symbols still to send (EOP not counted)
  logic              ack_s1, ack_s2, ack_ref;
  logic              eop_sent;    // the symbol awaiting its acknowledge is the EOP

  always_ff @(posedge clk) begin
    ack_s1 <= lin_ack;
    ack_s2 <= ack_s1;
  end

  assign pkt_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (rst || state == S_IDLE) eop_sent <= 1'b0;
    else if (state == S_SEND)   eop_sent <= (nib_left == 0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      lin_data <= '0;
      shreg    <= '0;
      nib_left <= '0;
      ack_ref  <= ack_s2;
    end else begin
      unique case (state)
        S_IDLE: if (pkt_valid) begin
          pkt_t p;
          p        = pkt;
          p.parity = odd_parity(pkt);
          shreg    <= pkt2bits(p);
          nib_left <= p.has_payload ? 5'(LONG_NIB) : 5'(SHORT_NIB);
          state    <= S_SEND;
        end
        S_SEND: begin
          // one symbol: toggle the two wires of its code
          if (nib_left != 0) begin
            lin_data <= lin_data ^ nib2sym(shreg[3:0]);
            shreg    <= shreg >> 4;
            nib_left <= nib_left - 5'd1;
          end else begin
            lin_data <= lin_data ^ SYM_EOP;
          end
          state <= S_WAIT;
        end
        S_WAIT: if (ack_s2 != ack_ref) begin
          ack_ref <= ack_s2;
          // the EOP was the last symbol when nothing is left and shreg ran out
          state   <= (nib_left == 0 && eop_sent) ? S_IDLE : S_SEND;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The data wires change only when a symbol is sent, and then two of them.
  assert property (@(posedge clk) disable iff (rst)
                   $past(!rst) && (lin_data != $past(lin_data)) |-> $countones(lin_data ^ $past(lin_data)) == 2);

endmodule
