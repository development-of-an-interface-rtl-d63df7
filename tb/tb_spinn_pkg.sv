// tb_spinn_pkg: reference model of the SpiNNaker link coding for the
// testbenches, written separately from the design: the 2-of-7 code table as a
// list of wire numbers, odd parity, and packet-to-nibbles conversion.
package tb_spinn_pkg;

  // wires toggled for nibble 0..15 and for EOP (index 16)
  localparam int WIRE_A [17] = '{0, 1, 2, 3, 0, 1, 2, 3, 0, 1, 2, 3, 0, 1, 2, 3, 5};
  localparam int WIRE_B [17] = '{4, 4, 4, 4, 5, 5, 5, 5, 6, 6, 6, 6, 1, 2, 3, 0, 6};

  function automatic logic [6:0] code(input int idx);
    logic [6:0] c;
    c = '0;
    c[WIRE_A[idx]] = 1'b1;
    c[WIRE_B[idx]] = 1'b1;
    return c;
  endfunction

  // index 0..15 for a data code, 16 for EOP, -1 for anything else
  function automatic int decode(input logic [6:0] c);
    for (int i = 0; i < 17; i++) if (code(i) == c) return i;
    return -1;
  endfunction

  // build a packet as a bit vector: header {type, seq, ts, payload flag, parity}
  function automatic logic [71:0] make_pkt(input logic [31:0] key, input logic has_pl,
                                           input logic [31:0] payload);
    logic [71:0] b;
    int ones;
    b = '0;
    b[1] = has_pl;
    b[39:8] = key;
    if (has_pl) b[71:40] = payload;
    ones = 0;
    for (int i = 1; i < 72; i++) ones += int'(b[i]);
    b[0] = (ones % 2 == 0);   // make the count odd
    return b;
  endfunction

endpackage
