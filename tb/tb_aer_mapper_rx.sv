// tb_aer_mapper_rx: self-checking testbench of the incoming AER mapper.
// Random multicast packets with matching and non-matching keys and packets
// of other types are applied; only matching multicast packets may produce an
// address event, one clock later, with the address taken from the key.
module tb_aer_mapper_rx;
  import spinn_pkg::*;

  localparam logic [31:0] KB = 32'h1200_0000;
  localparam logic [31:0] KM = 32'hFF00_0000;

  logic clk = 0, rst = 1;
  logic pkt_valid = 0, addr_valid;
  pkt_t pkt = '0;
  logic [15:0] addr, last_addr;
  int checks = 0, failures = 0;

  aer_mapper_rx #(.ADDR_W(16), .KEY_BASE(KB), .KEY_MASK(KM)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n_match;
    n_match = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      pkt_t p;
      bit want;
      p = '0;
      p.key = $urandom;
      if ($urandom_range(0, 1)) p.key[31:24] = 8'h12;
      p.ptype = ($urandom_range(0, 3) == 0) ? PKT_NN : PKT_MC;
      want = (p.ptype == PKT_MC) && (p.key[31:24] == 8'h12);
      pkt <= p; pkt_valid <= 1;
      @(posedge clk);
      pkt_valid <= 0;
      #1;
      check(addr_valid == want, $sformatf("event for key %h type %0d", p.key, p.ptype));
      if (want) begin
        n_match++;
        check(addr == p.key[15:0] && last_addr == p.key[15:0], "address from key");
      end
      @(posedge clk); #1;
      check(!addr_valid, "one-cycle event");
    end
    check(n_match > 50, "enough matching packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
