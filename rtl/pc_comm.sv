// pc_comm: PC communication over a USB-UART.
//
// The PC is the control unit of the interface: it can send a set value,
// and it receives all data the interface produces.
//
// PC -> FPGA: a frame of three bytes, 'S' (0x53), value[15:8], value[7:0].
// A byte other than 'S' where a frame should start is skipped. A complete
// frame gives a one-cycle set_valid with set_value.
//
// FPGA -> PC: reports of three bytes, a tag and a 16-bit value, high byte
// first: 'V' (0x56) the value now driving the rate coder, 'A' (0x41) a
// received neuron address, 'F' (0x46) a detected frequency. Each source
// has a one-entry mailbox; a new report overwrites one still waiting, so
// the newest value always gets through when events come faster than the
// serial line can carry (about 260 us per report at 115200 baud). Waiting
// mailboxes are served round-robin (V, A, F, V, ...), so a busy source
// cannot starve the others.
//
// The frame formats, tags and the mailbox policy are choices of this
// design; the interface description gives only the direction of the data.
module pc_comm #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        uart_rxd,
  output logic        uart_txd,
  output logic        set_valid,
  output logic [15:0] set_value,
  input  logic        rep_value_valid,
  input  logic [15:0] rep_value,
  input  logic        rep_addr_valid,
  input  logic [15:0] rep_addr,
  input  logic        rep_freq_valid,
  input  logic [15:0] rep_freq
);

  localparam logic [7:0] CMD_SET = 8'h53;  // 'S'
  localparam logic [7:0] TAG_VAL = 8'h56;  // 'V'
  localparam logic [7:0] TAG_ADR = 8'h41;  // 'A'
  localparam logic [7:0] TAG_FRQ = 8'h46;  // 'F'

  // ---------------- receive path ----------------
  logic       rx_valid, rx_err;
  logic [7:0] rx_data;

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_rx (
    .clk, .rst, .rxd(uart_rxd), .valid(rx_valid), .data(rx_data), .frame_err(rx_err)
  );

  typedef enum logic [1:0] {P_CMD, P_HI, P_LO} parse_e;
  parse_e     pstate;
  logic [7:0] hi_byte;

  always_ff @(posedge clk) begin
    set_valid <= 1'b0;
    if (rst) begin
      pstate    <= P_CMD;
      hi_byte   <= '0;
      set_value <= '0;
    end else if (rx_err) begin
      pstate <= P_CMD;                   // a broken byte restarts framing
    end else if (rx_valid) begin
      unique case (pstate)
        P_CMD: if (rx_data == CMD_SET) pstate <= P_HI;
        P_HI:  begin hi_byte <= rx_data; pstate <= P_LO; end
        P_LO:  begin
          set_value <= {hi_byte, rx_data};
          set_valid <= 1'b1;
          pstate    <= P_CMD;
        end
        default: pstate <= P_CMD;
      endcase
    end
  end

  // ---------------- transmit path ----------------
  logic [2:0]  pend;          // mailbox full: [0] V, [1] A, [2] F
  logic [15:0] mbox [3];
  logic [23:0] frame;         // tag, hi, lo: tag goes first
  logic [1:0]  bytes_left;
  logic        tx_valid, tx_ready;
  logic [7:0]  tx_data;
  logic [2:0]  take;          // mailbox emptied into the frame this clock

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_tx (
    .clk, .rst, .valid(tx_valid), .ready(tx_ready), .data(tx_data), .txd(uart_txd)
  );

  assign tx_valid = (bytes_left != 0);
  assign tx_data  = frame[23:16];

  // round-robin over the waiting mailboxes, starting after the last served
  logic [2:0] last_take;
  always_comb begin
    take = '0;
    if (bytes_left == 0) begin
      unique case (last_take)
        3'b001:  take = pend[1] ? 3'b010 : pend[2] ? 3'b100 : pend[0] ? 3'b001 : 3'b000;
        3'b010:  take = pend[2] ? 3'b100 : pend[0] ? 3'b001 : pend[1] ? 3'b010 : 3'b000;
        default: take = pend[0] ? 3'b001 : pend[1] ? 3'b010 : pend[2] ? 3'b100 : 3'b000;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst)            last_take <= 3'b100;
    else if (take != 0) last_take <= take;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pend       <= '0;
      mbox       <= '{default: '0};
      frame      <= '0;
      bytes_left <= '0;
    end else begin
      // empty the chosen mailbox into the frame register
      if (take[0]) begin frame <= {TAG_VAL, mbox[0]}; bytes_left <= 2'd3; end
      if (take[1]) begin frame <= {TAG_ADR, mbox[1]}; bytes_left <= 2'd3; end
      if (take[2]) begin frame <= {TAG_FRQ, mbox[2]}; bytes_left <= 2'd3; end
      if (tx_valid && tx_ready) begin
        frame      <= {frame[15:0], 8'h00};
        bytes_left <= bytes_left - 2'd1;
      end
      // new reports fill (or overwrite) the mailboxes
      pend <= (pend & ~take) | {rep_freq_valid, rep_addr_valid, rep_value_valid};
      if (rep_value_valid) mbox[0] <= rep_value;
      if (rep_addr_valid)  mbox[1] <= rep_addr;
      if (rep_freq_valid)  mbox[2] <= rep_freq;
    end
  end

endmodule
