// uart_tx: 8N1 UART transmitter used by the PC link.
//
// Accepts a byte through a valid/ready handshake and shifts out a start bit,
// eight data bits LSB first and a stop bit, each CLK_HZ/BAUD clocks long.
// The line idles high. 'ready' is high only while idle.
//
// The 8N1 format and the baud rate are choices of this design: the interface
// description only says the PC link is a USB-UART.
module uart_tx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       valid,
  output logic       ready,
  input  logic [7:0] data,
  output logic       txd
);

  localparam int unsigned DIV   = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CNT_W = $clog2(DIV) + 1;

  logic [9:0]       shreg;   // stop, data[7:0], start; bit 0 goes out first
  logic [3:0]       bits_left;
  logic [CNT_W-1:0] cnt;

  assign ready = (bits_left == 0) && (cnt == 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg     <= '1;
      bits_left <= '0;
      cnt       <= '0;
      txd       <= 1'b1;
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;                 // current bit still on the line
    end else if (bits_left != 0) begin
      txd       <= shreg[0];             // next bit, for DIV clocks
      shreg     <= {1'b1, shreg[9:1]};
      cnt       <= CNT_W'(DIV - 1);
      bits_left <= bits_left - 1'b1;
    end else if (valid) begin
      shreg     <= {1'b1, data, 1'b0};
      bits_left <= 4'd10;
    end
  end

endmodule
