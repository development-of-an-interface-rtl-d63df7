// spinn_link_rx: SpiNNaker link receiver (SpiNN-3 -> FPGA).
//
// The seven Lout wires pass a two-flop synchroniser. The receiver keeps the
// wire levels of the last accepted symbol; when the present levels differ
// from them in a pattern that is a legal 2-of-7 code (or EOP), the symbol is
// accepted, the levels become the new reference and LoutACK toggles to let
// the sender continue. A difference in only one wire is a symbol still
// arriving and is waited for. A difference that is not a legal code is
// accepted too (so the link does not stall), and marks the packet bad.
// Data nibbles fill the packet from bit 0 up; at EOP a packet of exactly 10
// or 18 nibbles with odd parity is delivered with a one-cycle pkt_valid,
// anything else raises err for one cycle. The receiver never pushes back.
//
// Timing: a symbol is acknowledged 3 clocks after its second wire changes
// (2 synchroniser stages + 1 register); pkt_valid follows the EOP by the
// same 3 clocks.
//
// Wire names follow the connector of the interface (Lout[6:0], LoutACK);
// the code follows the public SpiNNaker link specification. Error handling
// and the reference taken at reset are choices of this design.
module spinn_link_rx
  import spinn_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic [SYM_W-1:0] lout_data,
  output logic             lout_ack,
  output logic             pkt_valid,
  output pkt_t             pkt,
  output logic             err
);

  logic [SYM_W-1:0]    d_s1, d_s2, ref_lvl;
  logic [LONG_LEN-1:0] bits;
  logic [4:0]          nib_cnt;
  logic                bad;
  logic [SYM_W-1:0]    diff;
  sym_dec_t            dec;
  logic                two_or_more;

  always_ff @(posedge clk) begin
    d_s1 <= lout_data;
    d_s2 <= d_s1;
  end

  assign diff        = d_s2 ^ ref_lvl;
  assign dec         = sym2nib(diff);
  assign two_or_more = ($countones(diff) >= 2);

  always_ff @(posedge clk) begin
    pkt_valid <= 1'b0;
    err       <= 1'b0;
    if (rst) begin
      ref_lvl  <= d_s2;
      lout_ack <= 1'b0;
      bits     <= '0;
      nib_cnt  <= '0;
      bad      <= 1'b0;
      pkt      <= '0;
    end else if (two_or_more) begin
      ref_lvl  <= d_s2;
      lout_ack <= ~lout_ack;
      if (dec.eop) begin
        if (!bad && ^bits &&
            ((nib_cnt == 5'(SHORT_NIB) && !bits[1]) ||
             (nib_cnt == 5'(LONG_NIB)  &&  bits[1]))) begin
          pkt       <= pkt_t'(bits);
          pkt_valid <= 1'b1;
        end else begin
          err <= 1'b1;
        end
        bits    <= '0;
        nib_cnt <= '0;
        bad     <= 1'b0;
      end else if (dec.ok && nib_cnt < 5'(LONG_NIB)) begin
        bits[4*nib_cnt +: 4] <= dec.nib;
        nib_cnt <= nib_cnt + 5'd1;
      end else begin
        bad <= 1'b1;   // illegal code or too many nibbles
      end
    end
  end

endmodule
