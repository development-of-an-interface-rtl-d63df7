// tb_aer_mapper_tx: self-checking testbench of the outgoing AER mapper.
// Each spike must yield exactly one short multicast packet with key
// KEY_BASE | NEURON_ADDR; a spike while a packet is still waiting must be
// reported as dropped; pkt_valid must follow the spike by one clock.
module tb_aer_mapper_tx;
  import spinn_pkg::*;

  localparam logic [31:0] KB = 32'h00AB_0000;
  localparam int unsigned NA = 37;

  logic clk = 0, rst = 1;
  logic spike = 0, pkt_valid, pkt_ready = 0, dropped;
  pkt_t pkt;
  int checks = 0, failures = 0;
  int n_taken = 0, n_drop = 0;

  aer_mapper_tx #(.ADDR_W(16), .KEY_BASE(KB), .NEURON_ADDR(NA)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (pkt_valid && pkt_ready) begin
      n_taken++;
      check(pkt.key == (KB | NA), $sformatf("key %h", pkt.key));
      check(pkt.ptype == PKT_MC && !pkt.has_payload, "short multicast packet");
    end
    if (dropped) n_drop++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check(!pkt_valid, "idle after reset");
    // spike with the consumer ready: one packet, one clock later
    pkt_ready <= 1;
    spike <= 1; @(posedge clk); spike <= 0;
    #1 check(pkt_valid, "pkt_valid one clock after spike");
    @(posedge clk); #1;
    check(!pkt_valid && n_taken == 1, "packet taken once");
    // consumer busy: first spike waits, second is dropped
    pkt_ready <= 0;
    spike <= 1; @(posedge clk); spike <= 0;
    repeat (3) @(posedge clk);
    spike <= 1; @(posedge clk); spike <= 0;
    @(posedge clk); #1;
    check(n_drop == 1, "spike dropped while busy");
    check(pkt_valid, "first packet still waiting");
    pkt_ready <= 1;
    repeat (3) @(posedge clk); #1;
    check(n_taken == 2 && !pkt_valid, "waiting packet delivered, dropped one not");
    // 50 random spikes with a ready consumer
    for (int i = 0; i < 50; i++) begin
      spike <= 1; @(posedge clk); spike <= 0;
      repeat ($urandom_range(1, 4)) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    check(n_taken == 52, $sformatf("52 packets, got %0d", n_taken));
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
