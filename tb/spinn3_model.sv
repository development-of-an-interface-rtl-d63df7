// spinn3_model: behavioural model of the link side of a SpiNN-3 board, for
// system testbenches only (not synthesizable, uses delays).
//
// Receive side (Lin): every 2-of-7 symbol is decoded with the reference code
// table and acknowledged on LinACK after ACK_NS, unless 'stall' is high, in
// which case the acknowledge is withheld until it drops. A complete packet
// with odd parity and key IN_KEY counts as one input spike.
// Network: the modelled network relays each input spike one-to-one: after
// RESP_NS it sends back one multicast packet with key OUT_KEY (the address
// under which the answering neuron's spikes arrive).
// Send side (Lout): each symbol waits for a LoutACK toggle before the next.
// A rising edge on 'inject_bad' queues one packet with wrong parity.
// While 'resync' is high the receive side follows the Lin levels as they
// are (the FPGA is in reset).
module spinn3_model
  import tb_spinn_pkg::*;
#(
  parameter logic [31:0] IN_KEY  = 32'h0001_0000,
  parameter logic [31:0] OUT_KEY = 32'h0000_0006,
  parameter int          ACK_NS  = 3,
  parameter int          RESP_NS = 200
) (
  input  logic [6:0] lin_data,
  output logic       lin_ack,
  output logic [6:0] lout_data,
  input  logic       lout_ack,
  input  logic       resync,     // high while the FPGA is in reset
  input  logic       stall,
  input  logic       inject_bad,
  output int         n_in,       // good packets with IN_KEY received
  output int         n_in_bad,   // packets with bad parity, length or key
  output int         n_out,      // packets sent back
  output int         n_stalls    // symbols whose acknowledge was held back
);

  logic [71:0] out_q [$];

  initial begin
    lin_ack = 0; lout_data = '0;
    n_in = 0; n_in_bad = 0; n_out = 0; n_stalls = 0;
  end

  // receive side
  initial begin
    logic [6:0] ref_lvl;
    logic [71:0] bits;
    int n;
    ref_lvl = lin_data; bits = '0; n = 0;
    forever begin
      @(lin_data);
      #1;
      if (resync) begin
        // the FPGA side is being reset: its wire levels are the new reference
        ref_lvl = lin_data; bits = '0; n = 0;
        continue;
      end
      if ($countones(lin_data ^ ref_lvl) >= 2) begin
        int d;
        d = decode(lin_data ^ ref_lvl);
        ref_lvl = lin_data;
        if (d == 16) begin
          if (n == 10 && (^bits) == 1'b1 && bits[39:8] == IN_KEY) begin
            n_in++;
            fork
              begin
                #(RESP_NS);
                out_q.push_back(make_pkt(OUT_KEY, 0, 0));
              end
            join_none
          end else n_in_bad++;
          bits = '0; n = 0;
        end else if (d >= 0 && n < 18) begin
          bits[4*n +: 4] = 4'(d);
          n++;
        end else n_in_bad++;
        if (stall) begin
          n_stalls++;
          wait (!stall);
        end
        #(ACK_NS) lin_ack = ~lin_ack;
      end
    end
  end

  always @(posedge inject_bad) begin
    logic [71:0] b;
    b = make_pkt(OUT_KEY, 0, 0);
    b[0] = ~b[0];
    out_q.push_back(b);
  end

  // send side
  initial begin
    forever begin
      logic [71:0] b;
      wait (out_q.size() != 0);
      b = out_q.pop_front();
      for (int i = 0; i <= 10; i++) begin
        logic a0;
        a0 = lout_ack;
        lout_data = lout_data ^ code(i == 10 ? 16 : int'(b[4*i +: 4]));
        wait (lout_ack != a0);
        #(ACK_NS);
      end
      n_out++;
    end
  end

endmodule
