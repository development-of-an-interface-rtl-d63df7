// tb_spinn_link_rx: self-checking testbench of the link receiver.
// A behavioural sender drives the Lout wires with the reference code table,
// sometimes changing the two wires of a symbol one clock apart, and waits for
// each LoutACK toggle. Good packets (short and long, random keys) must come
// out intact; packets with bad parity, a wrong length or an illegal symbol
// must raise err and not pkt_valid. The acknowledge latency is checked.
module tb_spinn_link_rx;
  import spinn_pkg::*;
  import tb_spinn_pkg::*;

  logic clk = 0, rst = 1;
  logic [6:0] lout_data = '0;
  logic lout_ack, pkt_valid, err;
  pkt_t pkt;
  int checks = 0, failures = 0;
  int n_valid = 0, n_err = 0;
  logic [71:0] last_bits;
  int max_ack_lat = 0;

  spinn_link_rx dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (pkt_valid) begin n_valid++; last_bits = pkt2bits(pkt); end
    if (err) n_err++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_sym(input int idx, input bit skew);
    logic [6:0] c;
    logic a0;
    int lat;
    c = (idx < 0) ? 7'h07 : code(idx);    // 7'h07 toggles 3 wires: illegal
    a0 = lout_ack;
    if (skew) begin
      // first wire, then the rest one clock later
      lout_data[WIRE_A[idx < 0 ? 0 : idx]] <= ~lout_data[WIRE_A[idx < 0 ? 0 : idx]];
      @(posedge clk);
      lout_data <= lout_data ^ c ^ (7'b1 << WIRE_A[idx < 0 ? 0 : idx]);
    end else begin
      lout_data <= lout_data ^ c;
    end
    lat = 0;
    do begin @(posedge clk); lat++; end while (lout_ack == a0 && lat < 100);
    check(lout_ack != a0, "symbol acknowledged");
    if (lat > max_ack_lat) max_ack_lat = lat;
  endtask

  task automatic send_bits(input logic [71:0] b, input int nibs, input int bad_at);
    for (int i = 0; i < nibs; i++)
      send_sym(i == bad_at ? -1 : int'(b[4*i +: 4]), $urandom_range(0, 1) == 1);
    send_sym(16, 0);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    logic [71:0] b;
    int v0, e0;
    repeat (5) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      logic lp;
      lp = $urandom_range(0, 1);
      b = make_pkt($urandom, lp, $urandom);
      v0 = n_valid; e0 = n_err;
      send_bits(b, lp ? 18 : 10, -1);
      check(n_valid == v0 + 1 && n_err == e0, "one good packet delivered");
      check(last_bits == b, $sformatf("packet got %h exp %h", last_bits, b));
    end
    // bad parity
    b = make_pkt(32'h0000_0006, 0, 0); b[0] = ~b[0];
    v0 = n_valid; e0 = n_err;
    send_bits(b, 10, -1);
    check(n_valid == v0 && n_err == e0 + 1, "bad parity rejected");
    // wrong length (9 nibbles)
    b = make_pkt(32'h0000_0006, 0, 0);
    v0 = n_valid; e0 = n_err;
    send_bits(b, 9, -1);
    check(n_valid == v0 && n_err == e0 + 1, "short length rejected");
    // illegal symbol inside a packet
    v0 = n_valid; e0 = n_err;
    send_bits(b, 10, 4);
    check(n_valid == v0 && n_err == e0 + 1, "illegal symbol rejected");
    // link still works afterwards
    v0 = n_valid;
    send_bits(b, 10, -1);
    check(n_valid == v0 + 1 && last_bits == b, "recovers after errors");
    // acknowledge latency: 2 synchroniser stages + 1 register
    check(max_ack_lat <= 4, $sformatf("ack latency %0d <= 4 clocks", max_ack_lat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
