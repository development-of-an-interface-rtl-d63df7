// uart_rx: 8N1 UART receiver used by the PC link.
//
// The serial input passes a two-flop synchroniser. A falling edge starts a
// frame; the line is sampled in the middle of the start bit (which must still
// be low, or the start is treated as a glitch), then in the middle of each of
// the eight data bits, LSB first, and of the stop bit. A byte with a high
// stop bit is delivered with a one-cycle 'valid'; a low stop bit raises
// 'frame_err' instead.
//
// Timing: CLK_HZ/BAUD clocks per bit (rounded); 'valid' comes about 9.5 bit
// times after the falling edge of the start bit.
//
// The 8N1 format and the baud rate are choices of this design: the interface
// description only says the PC link is a USB-UART.
module uart_rx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);

  localparam int unsigned DIV   = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CNT_W = $clog2(DIV) + 1;

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} state_e;

  state_e           state;
  logic             s1, s2;
  logic [CNT_W-1:0] cnt;
  logic [2:0]       bit_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= 1'b1;
      s2 <= 1'b1;
    end else begin
      s1 <= rxd;
      s2 <= s1;
    end
  end

  always_ff @(posedge clk) begin
    valid     <= 1'b0;
    frame_err <= 1'b0;
    if (rst) begin
      state   <= R_IDLE;
      cnt     <= '0;
      bit_idx <= '0;
      data    <= '0;
    end else begin
      unique case (state)
        R_IDLE: if (!s2) begin
          state <= R_START;
          cnt   <= CNT_W'(DIV / 2);
        end
        R_START: if (cnt == 0) begin
          if (!s2) begin
            state   <= R_DATA;
            cnt     <= CNT_W'(DIV - 1);
            bit_idx <= '0;
          end else begin
            state <= R_IDLE;
          end
        end else cnt <= cnt - 1'b1;
        R_DATA: if (cnt == 0) begin
          data    <= {s2, data[7:1]};
          cnt     <= CNT_W'(DIV - 1);
          bit_idx <= bit_idx + 1'b1;
          if (bit_idx == 3'd7) state <= R_STOP;
        end else cnt <= cnt - 1'b1;
        R_STOP: if (cnt == 0) begin
          state <= R_IDLE;
          if (s2) valid     <= 1'b1;
          else    frame_err <= 1'b1;
        end else cnt <= cnt - 1'b1;
        default: state <= R_IDLE;
      endcase
    end
  end

endmodule
