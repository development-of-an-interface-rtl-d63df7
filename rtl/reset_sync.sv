// reset_sync: reset control.
//
// The board's reset button (active low, asynchronous) asserts the internal
// reset at once and releases it synchronously, STAGES clocks after the
// button is let go, so that every register of the interface leaves reset in
// the same clock. While reset is active the whole data flow is held.
//
// Holding the data flow while reset is active follows the interface's data
// flow chart; the synchroniser itself is a choice of this design.
module reset_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic arst_n,
  output logic rst
);

  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) sr <= '1;
    else         sr <= {sr[STAGES-2:0], 1'b0};
  end

  assign rst = sr[STAGES-1];

endmodule
