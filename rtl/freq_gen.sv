// freq_gen: frequency generation (rate coder).
//
// Converts a value into a spike train of that many spikes per second. It is
// a phase accumulator in integer arithmetic: each clock the accumulator gains
// 'value' and, when it reaches CLK_HZ, loses CLK_HZ and a one-cycle spike is
// emitted. Over any whole second the number of spikes is exactly 'value' and
// spikes are spaced evenly to within one clock; a value of 0 stops the
// train. Values above MAX_FREQ_HZ are clamped, because the neuromorphic
// board runs a 1 ms simulation step and cannot resolve faster input.
//
// Interface: 'value' may change at any time; the new rate applies from the
// next clock, keeping the accumulated phase.
//
// The purpose (value -> rate, no floating point, 1 kHz limit) follows the
// interface description; value = Hz and the accumulator are choices of this
// design.
module freq_gen #(
  parameter int unsigned CLK_HZ      = 100_000_000,
  parameter int unsigned VALUE_W     = 16,
  parameter int unsigned MAX_FREQ_HZ = 1000
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [VALUE_W-1:0] value,
  output logic               spike
);

  localparam int unsigned ACC_W = $clog2(CLK_HZ) + 1;

  logic [ACC_W-1:0] acc, inc, nxt;

  always_comb begin
    inc = (32'(value) > MAX_FREQ_HZ) ? ACC_W'(MAX_FREQ_HZ) : ACC_W'(value);
    nxt = acc + inc;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc   <= '0;
      spike <= 1'b0;
    end else if (nxt >= ACC_W'(CLK_HZ)) begin
      acc   <= nxt - ACC_W'(CLK_HZ);
      spike <= 1'b1;
    end else begin
      acc   <= nxt;
      spike <= 1'b0;
    end
  end

endmodule
