// freq_detect: frequency detection on the received address events.
//
// Watches the address events of one neuron (WATCH_ADDR) and keeps two
// integer measures of its spike train:
//  * spike_count, a running total since reset (saturating), the spike
//    counter read out on the logic analyser of the interface;
//  * freq_hz, the number of spikes seen during the last gate of GATE_CYCLES
//    clocks. With the gate one second long this is the frequency in Hz.
// freq_valid pulses for one clock when a gate closes and freq_hz updates.
//
// Timing: spike_count increments one clock after a matching addr_valid; the
// first gate closes GATE_CYCLES clocks after reset. A spike in the clock the
// gate closes is counted in the new gate.
//
// Counting address 6, integer arithmetic and the role of the block follow
// the interface description; the gated-count method and widths are choices
// of this design.
module freq_detect #(
  parameter int unsigned ADDR_W      = 16,
  parameter int unsigned WATCH_ADDR  = 6,
  parameter int unsigned GATE_CYCLES = 100_000_000,
  parameter int unsigned CNT_W       = 32,
  parameter int unsigned FREQ_W      = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              addr_valid,
  input  logic [ADDR_W-1:0] addr,
  output logic [CNT_W-1:0]  spike_count,
  output logic [FREQ_W-1:0] freq_hz,
  output logic              freq_valid
);

  localparam int unsigned GATE_W = $clog2(GATE_CYCLES);

  logic              hit;
  logic [GATE_W-1:0] gate;
  logic [FREQ_W-1:0] win_cnt;

  assign hit = addr_valid && (addr == ADDR_W'(WATCH_ADDR));

  always_ff @(posedge clk) begin
    freq_valid <= 1'b0;
    if (rst) begin
      spike_count <= '0;
      freq_hz     <= '0;
      gate        <= '0;
      win_cnt     <= '0;
    end else begin
      if (hit && spike_count != '1) spike_count <= spike_count + 1'b1;
      if (gate == GATE_W'(GATE_CYCLES - 1)) begin
        gate       <= '0;
        freq_hz    <= win_cnt;
        freq_valid <= 1'b1;
        win_cnt    <= hit ? FREQ_W'(1) : '0;
      end else begin
        gate <= gate + 1'b1;
        if (hit && win_cnt != '1) win_cnt <= win_cnt + 1'b1;
      end
    end
  end

endmodule
