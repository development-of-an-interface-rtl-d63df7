// seg7_display: visual feedback on the board's seven-segment display.
//
// One of four 32-bit values, chosen by 'sel', is shown as eight hexadecimal
// digits. The display is multiplexed: one digit is lit at a time, the
// digit index advancing every CLK_HZ/(REFRESH_HZ*DIGITS) clocks so that each
// digit is refreshed REFRESH_HZ times per second. Anodes ('an') and segments
// ('seg' = {g,f,e,d,c,b,a}, 'dp') are active low, as on common-anode
// displays. Digit 0 (an[0]) shows the least significant nibble; the decimal
// point is off.
//
// A switchable seven-segment read-out follows the interface description;
// the four values, the hexadecimal format and the refresh rate are choices
// of this design.
module seg7_display #(
  parameter int unsigned CLK_HZ     = 100_000_000,
  parameter int unsigned DIGITS     = 8,
  parameter int unsigned REFRESH_HZ = 1000
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [1:0]        sel,
  input  logic [31:0]       val0,
  input  logic [31:0]       val1,
  input  logic [31:0]       val2,
  input  logic [31:0]       val3,
  output logic [DIGITS-1:0] an,
  output logic [6:0]        seg,
  output logic              dp
);

  localparam int unsigned TICK  = (CLK_HZ / (REFRESH_HZ * DIGITS)) > 0 ?
                                  (CLK_HZ / (REFRESH_HZ * DIGITS)) : 1;
  localparam int unsigned TICK_W = $clog2(TICK) + 1;
  localparam int unsigned DIG_W  = (DIGITS > 1) ? $clog2(DIGITS) : 1;

  logic [TICK_W-1:0] tick;
  logic [DIG_W-1:0]  digit;
  logic [31:0]       shown;
  logic [3:0]        nib;

  always_ff @(posedge clk) begin
    if (rst) begin
      tick  <= '0;
      digit <= '0;
    end else if (tick == TICK_W'(TICK - 1)) begin
      tick  <= '0;
      digit <= (digit == DIG_W'(DIGITS - 1)) ? '0 : digit + 1'b1;
    end else begin
      tick <= tick + 1'b1;
    end
  end

  always_comb begin
    unique case (sel)
      2'd0: shown = val0;
      2'd1: shown = val1;
      2'd2: shown = val2;
      default: shown = val3;
    endcase
    nib = (32'(digit) < 8) ? shown[4*digit +: 4] : 4'h0;
    an  = ~(DIGITS'(1) << digit);
    dp  = 1'b1;
    // active-low {g,f,e,d,c,b,a}
    unique case (nib)
      4'h0: seg = 7'b1000000;
      4'h1: seg = 7'b1111001;
      4'h2: seg = 7'b0100100;
      4'h3: seg = 7'b0110000;
      4'h4: seg = 7'b0011001;
      4'h5: seg = 7'b0010010;
      4'h6: seg = 7'b0000010;
      4'h7: seg = 7'b1111000;
      4'h8: seg = 7'b0000000;
      4'h9: seg = 7'b0010000;
      4'hA: seg = 7'b0001000;
      4'hB: seg = 7'b0000011;
      4'hC: seg = 7'b1000110;
      4'hD: seg = 7'b0100001;
      4'hE: seg = 7'b0000110;
      default: seg = 7'b0001110;  // F
    endcase
  end

endmodule
