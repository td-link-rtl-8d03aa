# TD-Link: one fibre ring for detector data and deterministic time

TD-Link joins up to sixteen front-end boards (FERS-5200) into an optical daisy-chain ring
driven by one port of a data concentrator. A concentrator has eight such ports. The same
3.125 Gb/s stream does four jobs:

- it carries the detector data up the ring;
- it carries register and command traffic down the ring;
- it distributes the 156.25 MHz clock, recovered and re-cleaned at every board;
- it distributes a common time zero (T0), so that every board's time stamp counter agrees
  with every other's.

The hard part is the timing. Every hop through a board must take a fixed, known number of
clock cycles, whatever data the board adds. The eight transmit lanes of the concentrator must
leave at the same phase, even though each transceiver quad's PLL wakes up with a random phase.
Cascaded concentrators must share one phase reference.

This repository gives synthesizable SystemVerilog for the logic of this system, seen at
the level of 16-bit link symbols, and testbenches for every block. The transceiver's analog
and serialization parts are left out. So are the external PLLs and the DRAM.

## The ring protocol

### Symbols

The transceiver's 8b/10b coder is vendor hard IP. The RTL works on the symbols on either side
of it: `sym_t = {k, d[15:0]}`, one per 156.25 MHz cycle, where `k` marks a control symbol.
32-bit words travel as two data symbols, high half first. The code points are in
`rtl/tdl_pkg.sv`:

| symbol | value | meaning |
|---|---|---|
| HEADER | K 0x8000 | start of a train |
| TRAILER | K 0xC000 | end of the payload of a train |
| LAST_COMMA | K 0xFCBC | closes a train |
| IDLE | K 0xBC50 | filler |
| DUAL_COMMA | K 0xBCBC | keep-alive marker |
| control start | K {0xA, type, board} | downstream packet; board 0xFF = all boards |
| data sub-packet | K {0x9, board, n_symbols} | a board's payload in a train |
| read response | K {0xB, board, 4} | a board's answer to a register read |

Every packet and sub-packet ends with a K symbol carrying its CRC-16. The CRC is
CCITT: polynomial 0x1021, initial value 0xFFFF. It is computed over the start word and
the payload.

### Trains: fixed latency despite appended data

The concentrator (`conc_link_tx`) sends an empty train: HEADER, TRAILER, LAST_COMMA. It then
keeps the line idle for `TRAIN_GAP` cycles. Each board (`fers_train_node`) forwards every
symbol one cycle after it arrives. When the TRAILER reaches a board that has data, the board
does this:

1. It puts its own sub-packet on the line in place of the TRAILER. The sub-packet holds an
   optional read response, then up to `frag_words` 32-bit event words, then the CRC.
2. It parks the symbols still arriving (the TRAILER first) in a small holdback FIFO.
3. It drains that FIFO by dropping incoming idles.

Once the FIFO is empty again, the board is back on its one-cycle path. The train grows by
each board's sub-packet in ring order. Data larger than the fragment size simply waits for
the next train.

Because control packets are only sent while no train is in flight, a T0 packet always
crosses every board on that one-cycle path. This is the "T0 bypass" of the board datapath:
the per-hop delay of T0 is a constant, and the testbench measures it as exactly one cycle
per board.

`TRAIN_GAP` defaults to 16 boards x (2 x 127 + 8) + 16 = 4208 cycles. That is enough for
every board of a full ring to add a maximum fragment. A fragment is 127 words: two symbols
per word, plus headers and CRCs.

### Back at the concentrator

`conc_link_rx` parses the returning train, word by word:

- It checks every sub-packet's CRC and counts errors per board, so a bad hop can be found.
- It hands data words, tagged with their board number, to the buffer write port.
- It reports read responses.
- It flags framing errors, such as a train without TRAILER and LAST_COMMA.

`occupancy_irq` keeps the write address and occupancy of the per-port buffer, which is
64 Mword by default. It raises an interrupt while the occupancy is at or above a
programmable threshold. Writes to a full buffer are dropped and counted.

### Downstream control packets

| type | payload | board action |
|---|---|---|
| 1 register write | addr (2 symbols), data (2) | write register |
| 2 register read | addr (2) | answer in its read-response sub-packet on the next train |
| 3 timed command | code, time stamp (3 symbols) | fire `code` when the local time equals time stamp + CMD_CORR |
| 4 T0 | none | time stamp := T0_CORR |
| 5 ping | none | ignored; the concentrator times its return (`rtt_cycles`) |

`fers_ctrl_rx` decodes a packet only if its CRC matches. Its strobes come a fixed number of
cycles after the start word.

The board registers live in `fers_node`. Addresses are byte offsets:

| address | register |
|---|---|
| 0x00 | fragment size in words, default 32, maximum 127 |
| 0x04 / 0x08 | T0 correction, low / high |
| 0x0C / 0x10 | command correction, low / high |
| 0x14 | scratch |
| 0x18 / 0x1C | time stamp (read-only) |
| 0x20 | status (read-only) |

The status word holds: link lost, T0 done, holdback overflow, late commands, CRC errors.

### Aligning time stamps

The procedure (see `tb_tdlink_system`) is:

1. Send T0 with no correction.
2. Read the resulting per-hop offset (one cycle per board here).
3. Write T0_CORR = position x hop delay to each board.
4. Send T0 again.

After that, all time stamps on a ring read the same value in the same cycle. In the
simulation this also holds across lanes, within one count. A broadcast timed command then
fires on every board within one clock period. `fers_timebase` holds up to four pending
commands. A command whose time has already passed is counted as late and dropped.

### Keep-alive

`link_keepalive` asks for a dual comma every `PERIOD` cycles: 1,500,000, i.e. 9.6 ms. If
none is received within 1.125 x `PERIOD`, it raises `link_lost` and pulses a CDR reset.
Boards watch the commas in the symbol stream. The concentrator watches them in the raw
receive words, which `comma_align40` aligns:

- It looks for K28.5 with RD+ followed by K28.5 with RD-, across two consecutive 20-bit
  words.
- Because the pair is 20 bits long and not symmetric, this also resolves which 10-bit half
  is which.
- Bit 0 of a raw word is the first bit on the line.

## Lane-to-lane phase: the TX buffer as a phase detector

Each transceiver lane has a transmit elastic buffer, written by the shared fabric clock and
read by the lane's own serializer clock (XCLK). Its write-to-read distance depends on the
phase between the two clocks.

`tx_elastic_buffer` is a dual-clock FIFO. Its pointers cross the clock domains in Gray
code. It outputs `half_full = (WA - RA >= DEPTH/2)`, compared in the write domain. That is
the transceiver's `txbufstatus[0]`.

This one bit tells on which side of a fixed boundary the clock phase sits.
`txbuf_align_fsm` uses it as follows:

- If the flag starts at 1, it steps the lane's phase interpolator down until the flag reads 0.
- It then steps the interpolator up until the flag reads 1 again.
- It then stops and never moves again, so nothing dithers.

After each step it waits `SETTLE` cycles for the flag to pass through the synchronizers.
Every lane runs its own copy of the FSM. Every lane ends at the same boundary, so all lanes
leave with the same phase to within a few steps.

In the RTL the same FIFO module is also the receive elastic buffer, from XCLK back to
the fabric clock.

## Phase measurement between concentrators: DDMTD

`ddmtd` samples two clocks of about 156.25 MHz with a third clock slightly offset from
them (`clk_dmtd`). Sampling at the offset turns each clock into a slow beat signal, and the
delay between the two beats is the phase difference, magnified. The block works like this:

- The sampled bits pass a two-flop synchronizer.
- A deglitcher then accepts an edge only after `DEGLITCH` equal samples.
- A free counter tags the edges.
- `phase = tag_B - tag_A` is given in offset-clock counts.
- `period` is the beat period.

In the simulation the offset clock is 6.45 ns against 6.4 ns, which gives a period of 128
counts, i.e. 50 ps per count.

One DDMTD per quad compares the quad's first XCLK with the fabric clock. It is for
monitoring. A second DDMTD compares the master concentrator's reference with the local
clock. `ddmtd_servo` runs that loop:

- It averages 16 readings.
- It takes the error against a setpoint, wrapped the short way round the beat period.
- It issues one step of the external PLL's programmable input delay per average, until the
  error sits inside a dead band.
- After 4 averages in the band it reports lock.

`delay_dir = 1` means "delay the local clock".

## Files

| module | role |
|---|---|
| `tdl_pkg` | symbol type, code points, CRC step, packet lengths |
| `tdlink_system` | top: 8 lanes in 2 quads, a ring of 16 `fers_node` per lane, quad DDMTDs, external DDMTD + servo |
| `conc_lane` | one concentrator port: `conc_link_tx`, TX/RX `tx_elastic_buffer`, `txbuf_align_fsm`, `conc_link_rx`, `occupancy_irq`, `comma_align40`, `link_keepalive`, round-trip counter |
| `fers_node` | one board: event FIFO (`sync_fifo`), `fers_ctrl_rx`, registers, `fers_timebase`, `fers_train_node`, `link_keepalive` |
| `ddmtd`, `ddmtd_deglitch`, `ddmtd_servo` | phase measurement and the master/slave loop |
| `reset_sync` | reset into the XCLK and DDMTD domains |

Every file starts with a comment giving its interface and timing. It also says which parts
follow the published description and which are choices of this design.

In the top level, the ring is closed at symbol level. Board n's `sym_out` is board n+1's
`sym_in`, in the lane's XCLK domain. The last board feeds the lane's receive elastic
buffer. The boards are clocked by their lane's XCLK, which stands for the recovered and
re-cleaned clock. The clock trees, the PI and the PLL delay come in as ports:
`xclk`, `clk_dmtd`, `clk_master_ref`, `pi_step/pi_dir`, `pll_delay_step/dir`.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
      --top-module tb_tdlink_system -y rtl -y tb +libext+.sv -Irtl \
      rtl/tdl_pkg.sv tb/tb_tdlink_system.sv
    obj_dir/Vtb_tdlink_system

The testbenches:

- `tb_<block>`: one per block.
- `tb_tdlink_system`: the whole system, reduced to 4 lanes of 3 boards, with a short gap,
  keep-alive and buffer. It runs in under a second.
- `tb_tdlink_full`: the same sequence at the default size, 8 x 16 boards.

The system testbenches model the physical parts:

- Each lane's XCLK is the fabric clock shifted 200 ps per PI step.
- The master reference moves 100 ps per PLL delay step.
- The raw receive words carry dual commas.

Each mechanism is counted, and the test fails if any of them never happened: PI steps on
every lane, fragmentation, read response, ping round trip, interrupt, constant hop latency,
T0 alignment, timed command, keep-alive loss, quad DDMTD readings, servo lock.

`tb_tdlink_full` leaves out the keep-alive loss, because it needs 19 ms of simulated time.

## Where this departs from, or adds to, the published design

- **Symbol level.** 8b/10b coding, serializers, CDR, QPLL, the optics and the external PLLs
  are not modelled in RTL. The K-symbol values other than HEADER 0x8000 and TRAILER 0xC000
  are this design's own, and so are the packet and sub-packet formats, the CRC polynomial,
  the register map and the ping packet.
- **Per-board CRC.** The published scheme recomputes one CRC at each hop. Here each board
  closes its own sub-packet with its own CRC, so that errors can be blamed on a board.
- **Board elastic buffers.** The published board disables its elastic buffers while T0
  propagates. Here the board has no elastic buffer on the ring path at all. Its only queue
  is the holdback FIFO, and that is empty whenever no train is passing.
- **Half-full comparison.** One drawing of the buffer asks "WA-RA <= M/2?". The equation
  uses `>= M/2` for the flag's 1 state, and the RTL follows the equation.
- **DDMTD offset clock.** The offset clock is given both as f·N/(N+1) and as f + Δf. The
  RTL takes the offset clock as an input and works with either.
- **Own choices.** Buffer depth 16, `SETTLE`, the servo's averaging, dead band and lock
  count, the keep-alive window of 1.125 periods, the 4-entry command queue and the 8-deep
  holdback FIFO.
- **Round-trip measurement.** The published scheme times round trips towards each board.
  Here a ping times the whole ring, and each board's T0 offset is found from the per-hop delay
  that a first, uncorrected T0 reveals. Both give the same corrections when every hop is equal.
- **Not built.** The event pointer table of the DRAM buffer, the DRAM controller and the
  host software that computes the corrections.
- **Full-size synthesis.** The top at full size (128 boards, each with a 256 x 32 event
  FIFO) is large. Coarse synthesis of it takes longer than ten minutes. The sub-blocks
  synthesize on their own.
- **Known limit.** A board fires one timed command per cycle; a second command queued for the same cycle fires one cycle later. Control packets wait for a slot between trains, so the train period must be longer than a full train plus `TRAIN_GAP`.
