// spinn_pkg: types and constants shared by the SpiNNaker link transmitter,
// receiver and the two AER mappers.
//
// A SpiNNaker packet is 40 bits (header + 32-bit routing key) or 72 bits
// (with a 32-bit payload). Header byte, bit 0: odd parity over the whole
// packet; bit 1: payload present; bits 7:6: packet type (00 = multicast).
// On the wire each 4-bit nibble, least significant first, is one symbol of
// a 2-of-7 non-return-to-zero code: exactly two of the seven data wires
// toggle. A seventeenth code marks end-of-packet (EOP). The code table and
// header layout follow the public SpiNNaker link specification; the
// interface design itself only names the link protocol.
package spinn_pkg;

  localparam int unsigned SYM_W     = 7;   // data wires per direction
  localparam int unsigned SHORT_LEN = 40;  // bits in a packet without payload
  localparam int unsigned LONG_LEN  = 72;  // bits in a packet with payload
  localparam int unsigned SHORT_NIB = SHORT_LEN / 4;  // 10 symbols + EOP
  localparam int unsigned LONG_NIB  = LONG_LEN / 4;   // 18 symbols + EOP

  typedef enum logic [1:0] {
    PKT_MC = 2'b00,   // multicast
    PKT_P2P = 2'b01,  // point to point
    PKT_NN = 2'b10,   // nearest neighbour
    PKT_FR = 2'b11    // fixed route
  } pkt_type_e;

  typedef struct packed {
    logic [31:0] payload;   // valid when hdr_payload is set
    logic [31:0] key;       // routing key
    pkt_type_e   ptype;     // header bits 7:6
    logic [1:0]  seq;       // header bits 5:4 (emergency routing / sequence)
    logic [1:0]  tstamp;    // header bits 3:2 (time phase)
    logic        has_payload; // header bit 1
    logic        parity;    // header bit 0
  } pkt_t;

  localparam logic [SYM_W-1:0] SYM_EOP = 7'h60;

  // 2-of-7 code of one nibble.
  function automatic logic [SYM_W-1:0] nib2sym(input logic [3:0] n);
    unique case (n)
      4'h0: return 7'h11;
      4'h1: return 7'h12;
      4'h2: return 7'h14;
      4'h3: return 7'h18;
      4'h4: return 7'h21;
      4'h5: return 7'h22;
      4'h6: return 7'h24;
      4'h7: return 7'h28;
      4'h8: return 7'h41;
      4'h9: return 7'h42;
      4'hA: return 7'h44;
      4'hB: return 7'h48;
      4'hC: return 7'h03;
      4'hD: return 7'h06;
      4'hE: return 7'h0C;
      default: return 7'h09;  // 4'hF
    endcase
  endfunction

  // Decoded symbol: data nibble, EOP, or not a legal code.
  typedef struct packed {
    logic       ok;    // a legal data code
    logic       eop;   // the end-of-packet code
    logic [3:0] nib;
  } sym_dec_t;

  function automatic sym_dec_t sym2nib(input logic [SYM_W-1:0] s);
    sym_dec_t d;
    d = '{ok: 1'b1, eop: 1'b0, nib: 4'h0};
    unique case (s)
      7'h11: d.nib = 4'h0;
      7'h12: d.nib = 4'h1;
      7'h14: d.nib = 4'h2;
      7'h18: d.nib = 4'h3;
      7'h21: d.nib = 4'h4;
      7'h22: d.nib = 4'h5;
      7'h24: d.nib = 4'h6;
      7'h28: d.nib = 4'h7;
      7'h41: d.nib = 4'h8;
      7'h42: d.nib = 4'h9;
      7'h44: d.nib = 4'hA;
      7'h48: d.nib = 4'hB;
      7'h03: d.nib = 4'hC;
      7'h06: d.nib = 4'hD;
      7'h0C: d.nib = 4'hE;
      7'h09: d.nib = 4'hF;
      7'h60: begin d.ok = 1'b0; d.eop = 1'b1; end
      default: d.ok = 1'b0;
    endcase
    return d;
  endfunction

  // Packet as the 72-bit vector that goes on the wire, bit 0 first.
  function automatic logic [LONG_LEN-1:0] pkt2bits(input pkt_t p);
    return {p.payload, p.key, p.ptype, p.seq, p.tstamp, p.has_payload, p.parity};
  endfunction

  // Parity bit that makes the total number of ones in the packet odd.
  function automatic logic odd_parity(input pkt_t p);
    logic [LONG_LEN-1:0] b;
    b = pkt2bits(p);
    if (!p.has_payload) b[LONG_LEN-1:SHORT_LEN] = '0;
    b[0] = 1'b0;
    return ~(^b);
  endfunction

endpackage
