// tb_spinn_link_tx: self-checking testbench of the link transmitter.
// A behavioural receiver decodes the Lin wires with the reference code table,
// acknowledges each symbol after a random delay and rebuilds each packet;
// packets (short and long, random keys) must arrive intact with odd parity.
// It also checks that no symbol is sent while the acknowledge is withheld,
// and the symbol rate with a fixed acknowledge delay.
module tb_spinn_link_tx;
  import spinn_pkg::*;
  import tb_spinn_pkg::*;

  logic clk = 0, rst = 1;
  logic pkt_valid = 0, pkt_ready;
  pkt_t pkt = '0;
  logic [6:0] lin_data;
  logic lin_ack = 0;
  int checks = 0, failures = 0;

  spinn_link_tx dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural receiver
  logic [71:0] rx_q [$];
  int ack_delay = -1;        // -1: random 0..4 cycles
  bit ack_hold = 0;
  int syms = 0;
  initial begin
    logic [6:0] ref_lvl;
    logic [71:0] bits;
    int n;
    n = 0; bits = '0;
    @(negedge rst);
    ref_lvl = lin_data;
    forever begin
      @(posedge clk);
      if ($countones(lin_data ^ ref_lvl) >= 2) begin
        int d;
        d = decode(lin_data ^ ref_lvl);
        ref_lvl = lin_data;
        syms++;
        if (d == 16) begin
          check(n == 10 || n == 18, $sformatf("packet length %0d nibbles", n));
          rx_q.push_back(bits);
          bits = '0; n = 0;
        end else if (d >= 0) begin
          bits[4*n +: 4] = 4'(d);
          n++;
        end else check(0, $sformatf("illegal symbol %h", lin_data ^ ref_lvl));
        while (ack_hold) @(posedge clk);
        repeat (ack_delay >= 0 ? ack_delay : $urandom_range(0, 4)) @(posedge clk);
        lin_ack <= ~lin_ack;
      end
    end
  end

  task automatic send(input logic [31:0] key, input logic has_pl, input logic [31:0] pl);
    pkt_t p;
    p = '0;
    p.key = key; p.has_payload = has_pl; p.payload = pl; p.ptype = PKT_MC;
    p.parity = $urandom_range(0, 1);  // must be overwritten by the DUT
    pkt <= p; pkt_valid <= 1;
    do @(posedge clk); while (!pkt_ready);
    pkt_valid <= 0;
  endtask

  task automatic expect_pkt(input logic [31:0] key, input logic has_pl, input logic [31:0] pl);
    logic [71:0] exp, got;
    int t;
    t = 0;
    while (rx_q.size() == 0 && t < 5000) begin @(posedge clk); t++; end
    exp = make_pkt(key, has_pl, pl);
    if (rx_q.size() == 0) begin check(0, "packet not received"); return; end
    got = rx_q.pop_front();
    check(got == exp, $sformatf("packet got %h exp %h", got, exp));
    check((^got) == 1'b1, "odd parity");
  endtask

  initial begin
    logic [31:0] k, pl;
    logic lp;
    repeat (5) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    // fixed and random packets
    send(32'h0001_0000, 0, 0);
    expect_pkt(32'h0001_0000, 0, 0);
    for (int i = 0; i < 40; i++) begin
      k = $urandom; pl = $urandom; lp = $urandom_range(0, 1);
      send(k, lp, pl);
      expect_pkt(k, lp, pl);
    end
    // stall: with the acknowledge withheld the wires must not move again
    begin
      logic [6:0] w;
      int changes;
      changes = 0;
      ack_hold = 1;
      send(32'hCAFE_0001, 0, 0);
      repeat (20) @(posedge clk);
      w = lin_data;
      repeat (200) begin @(posedge clk); if (lin_data != w) changes++; end
      check(changes == 0, "no symbol while acknowledge withheld");
      ack_hold = 0;
      expect_pkt(32'hCAFE_0001, 0, 0);
    end
    // rate: fixed 0-cycle acknowledge -> symbol period = 1 (send) + 1 (ack
    // flop) + 2 (synchroniser) + 1 (compare) clocks
    begin
      int t0, t1;
      ack_delay = 0;
      repeat (10) @(posedge clk);
      syms = 0;
      t0 = $time;
      send(32'h1234_5678, 0, 0);
      expect_pkt(32'h1234_5678, 0, 0);
      t1 = $time;
      check(syms == 11, $sformatf("11 symbols per short packet, got %0d", syms));
      $display("short packet took %0d clocks", (t1 - t0) / 10);
      check((t1 - t0) / 10 <= 11 * 6 + 4, "short packet within 11 symbol periods of <= 6 clocks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
