# An FPGA gateway between conventional sensors and a SpiNNaker board

Neuromorphic boards such as the SpiNN-3 (four SpiNNaker chips) run spiking
neural networks. They talk to the outside world only in spikes, which
travel as address events over a self-timed SpiNNaker link. Ordinary sensors
and actuators deliver and expect numbers. This design is the logic of an
FPGA that sits between the two and converts in both directions:

* **forward**: a number from a sensor, or a set value from a PC, becomes a
  spike train whose *rate* carries the value (rate coding). Each spike is
  sent to the board as an address event of one fixed input neuron.
* **backward**: the spikes that the network sends back are decoded into
  neuron addresses. Those of one watched neuron are counted, and their rate
  is measured. The measured rate is the control value for a device.
* **monitoring**: every value moving through the interface is reported to a
  PC over a UART. One value at a time, chosen by switches, is shown on the
  board's seven-segment display.

No floating point is used anywhere. All conversions are integer counters and
accumulators.

The RTL is SystemVerilog-2017 and synthesizable. It is written for a
100 MHz clock (a Nexys-A7 class board), but the clock rate is a parameter.

## Data flow

```
 sensor_value/valid ─┐
                     ├─► value ─► freq_gen ─► aer_mapper_tx ─► spinn_link_tx ─► Lin[6:0]  ─► SpiNN-3
 PC ─ uart_rxd ─► pc_comm (set value)                 (key)        (2-of-7)     ◄─ LinACK

 SpiNN-3 ─► Lout[6:0] ─► spinn_link_rx ─► aer_mapper_rx ─► freq_detect ─► ctrl_freq_hz/valid
          ◄─ LoutACK        (2-of-7)         (address)      (count, Hz)    spike_count, rx_addr

 value, addresses, frequency ─► pc_comm ─► uart_txd ─► PC
 value, frequency, count, address ─► seg7_display ─► an/seg/dp
```

| module | role |
|---|---|
| `fpga_interface_top` | wires everything; chooses which value drives the rate coder |
| `reset_sync` | reset button: asserted at once, released in step with the clock |
| `freq_gen` | rate coder: value → spikes per second |
| `aer_mapper_tx` | spike → multicast packet with the input neuron's routing key |
| `spinn_link_tx` | packet → 2-of-7 symbols on Lin, paced by LinACK |
| `spinn_link_rx` | 2-of-7 symbols on Lout → packet; acknowledges each symbol on LoutACK |
| `aer_mapper_rx` | routing key → neuron address, with a key filter |
| `freq_detect` | spike counter and gated frequency meter for one address |
| `pc_comm` (+ `uart_rx`, `uart_tx`) | set-value commands in, reports out |
| `seg7_display` | multiplexed 8-digit hexadecimal display |
| `spinn_pkg` | packet type, 2-of-7 code table, parity |

### Which value is encoded

The rate coder has two possible sources: the sensor port (`sensor_valid`
with `sensor_value`) and set-value frames from the PC. The newest write from
either source wins. If both arrive in the same clock, the sensor wins. Every
change is reported to the PC.

## The SpiNNaker link

This is the least obvious part of the design. It is also where an error
shows up only when the real board is attached.

### Wires and handshake

Each direction has seven data wires and one acknowledge wire. The link is
self-timed and uses non-return-to-zero coding. A symbol is sent by
*toggling* exactly two of the seven wires. No wire returns to a rest level.
The receiver finds a new symbol by comparing the wire levels with the levels
it saw after the previous symbol. It answers each symbol by toggling its
acknowledge wire. The sender does not send the next symbol until it has
seen that toggle. The link therefore runs at the speed of the slower side,
and either side can stall it simply by not acknowledging.

On the FPGA, all incoming link wires (LinACK and Lout[6:0]) pass a two-flop
synchroniser. The two wires of a symbol may reach the receiver one clock
apart. A change in only one wire is treated as a symbol still arriving, and
the receiver waits for the second wire.

### Symbols and packets

Each 4-bit nibble is one symbol. A seventeenth symbol marks end-of-packet
(EOP). The table below gives the wires toggled for each symbol (value =
bit mask over wires 6..0):

| nibble | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | A | B | C | D | E | F | EOP |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| wires | 11 | 12 | 14 | 18 | 21 | 22 | 24 | 28 | 41 | 42 | 44 | 48 | 03 | 06 | 0C | 09 | 60 |

A packet is 40 bits long (an 8-bit header and a 32-bit routing key), or
72 bits with a 32-bit payload. It is sent least significant nibble first
and ends with EOP, so a short packet takes 11 symbols. The header fields
are:

| bits | field |
|---|---|
| 0 | parity: makes the number of ones in the whole packet odd |
| 1 | payload present |
| 3:2 | time phase (0 here) |
| 5:4 | emergency routing / sequence (0 here) |
| 7:6 | packet type, 00 = multicast |

These packet fields are the `pkt_t` struct in `spinn_pkg`. The transmitter
computes the parity bit itself and ignores whatever bit 0 it is given. The
receiver delivers a packet only if:

* it has exactly 10 or 18 nibbles;
* the length agrees with the payload flag;
* its parity is odd;
* it contains no illegal symbol.

Any other packet raises `err` for one clock and is dropped. An illegal
symbol is still acknowledged, so the link never hangs on noise.

### Timing

The transmitter spends one clock sending a symbol, then waits for the
acknowledge. That wait is the far end's response time, plus two clocks of
synchroniser, plus one clock. If the far side acknowledges at once, a short
packet takes about 55 clocks (0.55 µs at 100 MHz). The receiver
acknowledges a symbol 3 clocks after its second wire changes. A packet
appears on `pkt_valid` 3 clocks after its EOP.

### Reset

After reset both sides drive 0 on their outgoing data wires. Each side
takes the present level of its incoming wires as the reference. When the
FPGA is reset while the board keeps running, the board side must do the
same. A packet that was only half sent at that moment is lost.

### Connector

The board has two link connectors; the interface uses one of them. Each
is a 2×17-pin header. The wire-to-pin assignment is given below
so that the top-level ports can be constrained. The odd pins 1–17 and the
even pins 18–34 are ground.

| signal | direction (FPGA view) | pins |
|---|---|---|
| `lin_data[6:0]` (Lin[6]..Lin[0]) | out | 2, 4, 6, 8, 10, 12, 14 |
| `lin_ack` (LinACK) | in | 16 |
| `lout_ack` (LoutACK) | out | 19 |
| `lout_data[0..6]` (Lout[0]..Lout[6]) | in | 21, 23, 25, 27, 29, 31, 33 |

The board's link I/O runs at 1.8 V and the FPGA's at 3.3 V. Two 8-bit
level translators between them carry each wire unchanged. The
board-to-FPGA signals must be translated, otherwise the FPGA never sees an
acknowledge and the link stops after its first symbol.

## Address events and routing keys

Outgoing, `aer_mapper_tx` sends one short multicast packet per spike, with
key `KEY_BASE | NEURON_ADDR`. The defaults are 0x00010000 and neuron 0.
Nothing else is sent, neither the sensor value nor its resolution: the
information is entirely in the rate. The network on the board must define
an external input population with the same key.

The mapper holds one packet. A spike that arrives while the previous packet
is still waiting for the link produces a `tx_dropped` pulse instead of a
packet. At the 1 kHz limit there is one spike every 100 000 clocks and a
packet takes under a hundred, so this happens only when the board stalls
the link.

Incoming, `aer_mapper_rx` accepts a multicast packet when
`(key & KEY_MASK) == KEY_BASE`. The defaults are mask 0xFFFF0000 and base 0.
The neuron address is the key's remaining bits, cut to 16 bits. The last
address received is held on `rx_addr`. In the reference network, neuron 0
of the answering population arrives as address 6, so `WATCH_ADDR`
defaults to 6. All three key parameters must match the keys that the
network software assigns.

## Rate coding in integers

`freq_gen` is a phase accumulator. Each clock it adds `value` to an
accumulator. When the sum reaches `CLK_HZ`, it subtracts `CLK_HZ` and emits
a one-clock spike. One LSB of `value` is therefore exactly 1 Hz:

* over any whole second exactly `value` spikes are emitted;
* consecutive spikes are `CLK_HZ/value` clocks apart, give or take one;
* a change of value keeps the accumulated phase, so the rate changes
  without a jump or a burst.

Values above `MAX_FREQ_HZ` = 1000 are clamped. The board advances its
network in 1 ms steps, so it cannot tell two input spikes apart within one
step.

`freq_detect` does the opposite. It counts events of `WATCH_ADDR` over a
gate of `GATE_CYCLES` clocks (one second by default). At the end of each
gate it publishes the count as `freq_hz` and pulses `freq_valid`. A spike in
the very clock a gate closes counts toward the next gate. `spike_count` is a
separate running total since reset, which saturates. A one-second gate
resolves 1 Hz and reports once a second. A shorter gate reports faster but
counts in units of `CLK_HZ/GATE_CYCLES` Hz.

## PC protocol

The serial format is 8N1 at 115200 baud by default. All multi-byte values
are big-endian.

| direction | frame | meaning |
|---|---|---|
| PC → FPGA | `'S'` (0x53), hi, lo | new set value for the rate coder |
| FPGA → PC | `'V'` (0x56), hi, lo | value now driving the rate coder |
| FPGA → PC | `'A'` (0x41), hi, lo | a received neuron address (any key that passed the filter) |
| FPGA → PC | `'F'` (0x46), hi, lo | frequency measured in the gate that just closed |

The receiver skips any byte that does not start a frame. A framing error
restarts the parser. Each report kind has a one-entry mailbox. A new report
replaces one that has not been sent yet, so the PC always gets the newest
value. Waiting mailboxes are served round-robin. A report frame takes about
260 µs, so at received-spike rates above about 1 kHz some 'A' reports are
replaced before they are sent. The counters on the FPGA stay exact.

## Display

`disp_sel` chooses what is shown, as eight hexadecimal digits:

| `disp_sel` | value |
|---|---|
| 0 | value driving the rate coder |
| 1 | measured frequency |
| 2 | spike counter |
| 3 | last received address |

The digits are multiplexed, each refreshed 1000 times a second. Anodes and
segments are active low, and the decimal point stays off.

## Top-level ports and parameters

Apart from the link, UART and display pins, the top has these ports:

* `sensor_valid` and `sensor_value`: the sensor input;
* `ctrl_valid` and `ctrl_freq_hz`: the control output, the measured
  frequency;
* `spike_count` and `rx_addr`: the two signals used to check the link;
* `tx_spike`, `tx_dropped` and `link_err`: status pulses.

The sensor's own protocol and the controlled device's protocol are not
part of this design. Attach them to these ports. The clock comes from the
board clock manager, and `arst_n` is the reset button.

| parameter | default | notes |
|---|---|---|
| `CLK_HZ` | 100 000 000 | clock rate; sets the rate coder's unit and the UART divider |
| `BAUD` | 115 200 | PC UART |
| `GATE_CYCLES` | `CLK_HZ` | frequency-meter gate (1 s) |
| `MAX_FREQ_HZ` | 1000 | rate-coder ceiling |
| `REFRESH_HZ` | 1000 | display refresh per digit |
| `TX_NEURON_ADDR` | 0 | input neuron addressed on the board |
| `WATCH_ADDR` | 6 | address counted and measured |
| `TX_KEY_BASE` | 0x00010000 | outgoing routing key base |
| `RX_KEY_BASE`, `RX_KEY_MASK` | 0, 0xFFFF0000 | incoming key filter |

At the defaults the design synthesises to roughly 570 flip-flops and a few
hundred word-level cells (before technology mapping).

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the
module against its own reference model, such as an independent 2-of-7
table in `tb_spinn_pkg`, and ends with a line
`TB_RESULT checks=N failures=M`. The testbenches are:

* `tb_spinn_link_tx` and `tb_spinn_link_rx`: random short and long packets
  pass intact. Skewed symbol wires are tolerated. Bad parity, a wrong
  length and illegal symbols are rejected, and the link recovers afterwards.
  While the acknowledge is withheld the wires do not move. The symbol
  latency is also checked.
* `tb_freq_gen`: exact spike counts per second and even spacing. Also
  covers the clamp and the phase-continuous 4-second count.
* `tb_freq_detect`: counts and gate readings against a cycle-level
  reference model, with other addresses mixed in.
* `tb_aer_mapper_tx` and `tb_aer_mapper_rx`: the routing keys, the drop on
  a full buffer and the key filtering.
* `tb_pc_comm`: frames in both directions, resynchronisation after stray
  bytes, mailbox overwrite and the bit time.
* `tb_seg7_display`: segment decoding of every digit, one digit lit at a
  time, and the dwell time.
* `tb_reset_sync`: asynchronous assertion and release two clocks later.
* `tb_fpga_interface_top`: the whole design against the behavioural board
  model `tb/spinn3_model.sv`, at a scaled clock (100 000 clocks per
  second). It covers the PC set value, the sensor value, the clamp to
  1 kHz, a link stall with dropped spikes, a bad packet from the board,
  both display selections, the reports, and a mid-run reset. It counts
  each mechanism and fails if one never happened.
* `tb_workload_closed_loop`: the closed-loop experiment. Neuron 0 runs at
  1 Hz, then at 10 Hz, for ten seconds. The board answers one-to-one on
  address 6, and the final counter must read 54. The 1 Hz gates must read 1
  and the 10 Hz gates 10.
* `tb_fpga_interface_full`: every parameter at its default (100 MHz,
  115200 baud, 1 s gate). The PC sets 1000 Hz; the first gate must measure
  999 spikes, and the PC must receive that in an 'F' report. It simulates
  10⁸ clocks and takes about 80 s.

The board model acknowledges after a fixed delay and relays every input
spike after 200 ns. It checks the link protocol, not neuron dynamics. A
real board answers within its 1 ms simulation step, which the design
tolerates because nothing in it waits for an answer.

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/spinn_pkg.sv tb/tb_spinn_pkg.sv tb/tb_fpga_interface_top.sv --top-module tb_fpga_interface_top
./obj_dir/Vtb_fpga_interface_top
```

Uninitialised variables are randomised in simulation. The testbenches
pass with `+verilator+rand+reset+2` and different seeds.

## Relation to the original interface, and what is assumed

The following are taken from the interface as published:

* the overall structure and data flow: sensor and PC → frequency
  generation → AER mapper → SpiNNaker link sender, and back through the
  receiver, AER mapper and frequency detection to the control output,
  display and PC;
* rate coding, with only the neuron address sent;
* integer-only arithmetic;
* the 1 kHz ceiling;
* input neuron 0, and counting address 6 with its counter;
* the link wire names and connector pins;
* a UART to the PC;
* a switchable seven-segment read-out;
* a reset that holds the data flow.

The SpiNNaker link logic is not described there; the original used
existing library modules for it. The link here is an independent
implementation of the public SpiNNaker link protocol, written from its
specification, not from those modules. It has been checked only against
the testbench model, which follows the same reading of the specification.
Test it against a real board before relying on it.

Choices made in this design, where the published description is silent:

* the value-to-rate mapping (1 LSB = 1 Hz) and the phase-accumulator
  method;
* the gated-count frequency meter and its 1 s gate;
* all routing-key values, and the key filter;
* the one-entry packet buffer and its drop policy;
* the UART format, baud rate, frame layout, tags and mailbox policy;
* the four display selections and the hexadecimal format;
* the reset synchroniser;
* "newest write wins" between the sensor and the PC;
* the 16-bit value, address and frequency widths and the 32-bit counter.

Not included: the sensor front-end and the controlled-device output (no
specific sensor, device or protocol is defined), the FPGA clock manager,
the level translators and the on-chip logic analyser. Their signals are
top-level ports.
