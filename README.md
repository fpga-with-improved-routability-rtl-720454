# An 8×8-tile SRAM FPGA with Wilton routing: synthesizable RTL model

This is a small island-style FPGA, built so that an open-source CAD flow (VTR: Odin,
ABC, VPR) can target it and a home-made bitstream generator can program it. The
fabric has 64 logic blocks, each a 6-input LUT with an optional flip-flop. They sit
in an 8×8 grid of tiles, joined by routing channels of connection blocks and
**Wilton switch blocks**. Wilton switch blocks were chosen for routability: a net
that turns a corner lands on a different track number, so fewer tracks are needed
than with the plain "disjoint" pattern. All switches are transmission gates. Each
routing track carries a tri-state driver and a keeper. The whole configuration,
about 26 kbit, sits in **12-transistor SRAM cells** that need no precharge and no
clock. It is loaded and read back over an **asynchronous, byte-wide bus that
works like the interface of an asynchronous DRAM**: row strobe, column strobe,
write and read enables.

The silicon this describes is a 130 nm CMOS prototype: 2.25 mm², 52-pin package,
16 GPIO and 8 host-interface pins. The SystemVerilog here gives the logic of that
chip: configuration memory, decoders, configuration control, LUTs, CLBs, connection
blocks, switch blocks and I/O blocks. The I/O level converter is a timed
behavioural model. The clock tree, the package and the bitstream software are not
modelled.

Contents:

1. [The fabric: tiles, positions and the macroblock matrix](#1-the-fabric-tiles-positions-and-the-macroblock-matrix)
2. [Routing: tracks, connection blocks, Wilton switch blocks](#2-routing-tracks-connection-blocks-wilton-switch-blocks)
3. [The logic block](#3-the-logic-block)
4. [Configuration: bit layouts and the bus](#4-configuration-bit-layouts-and-the-bus)
5. [Pads](#5-pads)
6. [How far to trust it](#6-how-far-to-trust-it)
7. [Simulating and changing it](#7-simulating-and-changing-it)

## 1. The fabric: tiles, positions and the macroblock matrix

A **tile** has four parts: a CLB, the vertical connection block (VCB) above it, the
horizontal connection block (HCB) to its right, and the switch block (SB) at its
upper right. The names follow what each connection block connects *to*. A VCB lies
on a horizontal channel and reaches the CLBs above and below it. An HCB lies on a
vertical channel and reaches the CLBs left and right of it.

Put 8×8 tiles together, add one more row and column of routing to close the grid,
and you get a 17×17 array of **positions** (i = row from the top, j = column from
the left):

```
 j:    0    1    2    3    4  ...  16
i=0    SB  VCB   SB  VCB   SB  ...  SB        (even, even) switch block
i=1   HCB  CLB  HCB  CLB  HCB  ... HCB        (odd,  odd)  CLB
i=2    SB  VCB   SB  VCB   SB  ...  SB        (even, odd)  VCB, horizontal channel
i=3   HCB  CLB  HCB  CLB  HCB  ... HCB        (odd,  even) HCB, vertical channel
...
i=16   SB  VCB   SB  VCB   SB  ...  SB
```

A ring of I/O positions around this array makes the **19×19 macroblock matrix**.
Every macroblock owns 9 configuration words of 8 bits (72 bits), so position (i, j)
is configured by macroblock (i+1, j+1). 19 × 19 × 9 bytes = 3249 bytes = 25,992
configuration bits. The chip's "26 KB" of programming SRAM is read here as 26 kbit,
because the matrix gives that number.

I/O blocks sit in the ring next to the edge connection blocks: GPIO0–7 on the left
(next to HCB (2k+1, 0)), GPIO8–15 on the right (next to HCB (2k+1, 16)) and
HIP0–7 on top (next to VCB (0, 2k+1)). That is 3 × 8 = 24 positions for the 24 user
pins. The bottom ring has no pads. The other ring macroblocks (corners, and those
next to switch blocks) hold memory but configure nothing.

The module `fpga_core` builds all of this with generate loops over (i, j). Every
macroblock, used or not, gets a `config_macroblock`.

## 2. Routing: tracks, connection blocks, Wilton switch blocks

Each channel has **W = 5 tracks**. A **segment** is one track of one connection
block. It spans one tile, from the SB at one end (end 0: left or top) to the SB at
the other end (end 1: right or bottom).

**Connection block** (`conn_block`, configuration bits in brackets):

* Three input pins go to the CLB on side A: the CLB below a VCB, or left of an HCB.
  Each pin connects to one track through a one-hot set of switches [3 × 5 bits].
  A CLB gets inputs 2:0 from the VCB above it and inputs 5:3 from the HCB to its
  right.
* Two tri-state drivers per track. One puts the side-A block's output on the track
  [5 bits]. The other puts the side-B block's output on it [5 bits]. Side B is the
  CLB on the other side, or the I/O block at the edge. So a CLB output can reach
  the tracks of all four connection blocks around it.

**Wilton switch block** (`wilton_sb`). There are six side pairs (L–T, L–R, L–B,
T–R, T–B, R–B). Each pair has one switch per track [6 × 5 = 30 bits], so each
incoming track can reach exactly one track on each of the other three sides.
Straight through, a track keeps its number. On a turn, the Wilton permutation
moves it to another track. The permutation is the one VPR calls "wilton":

| pair | track t on the first side meets track |
|------|----------------------------------------|
| L–R, T–B | t |
| L–T | (W − t) mod W |
| L–B | (t − 1) mod W |
| T–R | (t + 1) mod W |
| R–B | (2W − 2 − t) mod W |

`fpga_pkg::wilton_track` computes it. Bit p·W + t closes the switch of pair p
that starts at track t of the pair's first side.

**How the bidirectional switches are modelled.** This is the least obvious part
of the RTL. In silicon, a routed net is one piece of metal made of segments
joined by transmission gates. The single enabled tri-state driver on it sets its
value everywhere. RTL cannot describe a resistive bidirectional switch. The model
therefore works as follows:

* A segment's value is the OR of whatever drives it. That can be the SB at either
  end, or a connection-block driver. A legal configuration enables at most one
  driver per net. An undriven segment reads 0; this stands in for the keeper, and
  the keeper's actual rest level is not modelled.
* Each segment offers to each end SB its value **without that SB's own
  contribution** (`end0_out = end1_in | cb_drive`, and the mirror for end 1).
* An SB drives a side with the OR of what the sides switched to it offer
  (`side_out`).

A value therefore spreads outward from its driver through every closed switch,
and never comes back to hold itself up. For any net routed as a tree, which is
what a router produces, this gives the same result as the transmission gates. The
netlist still has combinational loops: Verilator reports UNOPTFLAT, and synthesis
reports logic loops. A programmable fabric has these loops by construction, and a
legal configuration opens them all. A configuration that closes a ring of
switches with a driver on it latches at 1. The real chip would behave differently
there, but that is an illegal configuration on both.

Until configuration completes (CDONE), all connection-block drivers and pads are
forced off. Half-written configuration memory therefore cannot make the fabric
oscillate.

## 3. The logic block

`clb` = `lut6` + D flip-flop + 2:1 output mux.

* `lut6`: each input first passes an AND gate with a mask bit. Unused inputs are
  forced to 0 instead of following whatever their pins pick up. The six masked
  inputs then steer a six-stage 2:1 mux tree over the 64 table bits, with input s
  driving stage s. Output = `lut[in & mask]`.
* The flip-flop runs on GCLK. It is cleared while the fabric is in reset: RESET_n
  low, or configuration not complete. The output mux picks the registered value
  (bit 70 = 1) or the LUT output directly.

Latency: 0 cycles combinational, 1 cycle registered.

## 4. Configuration: bit layouts and the bus

### What the 72 bits of a macroblock mean

Word w of a macroblock holds bits 8w+7 … 8w.

| block | bits | meaning |
|---|---|---|
| CLB | 63:0 | LUT table, bit n = output for masked input value n |
| | 69:64 | input mask, 1 = input used |
| | 70 | 1 = registered output |
| VCB / HCB | 14:0 | pin p one-hot track select at bits 5p+4 … 5p |
| | 19:15 | side-A driver enable, one bit per track |
| | 24:20 | side-B driver enable, one bit per track |
| SB | 29:0 | switch of pair p (L–T, L–R, L–B, T–R, T–B, R–B), track t at bit 5p+t |
| I/O | 4:0 | one-hot track select for the pad output |
| | 5 | output enable |
| | 6 | input enable (pad value enters the fabric) |

Unlisted bits are unused. The CLB layout uses 71 of the 72 bits, which suggests
that one macroblock per CLB is the intended packing. The layout itself is this
design's own.

### The bus

Pins: CPROG, CDONE, RAS_n, BAS_n, CAS_n, WE_n, RE_n, CDATA0–7, RESET_n. Nothing on
the bus uses GCLK. `config_ctrl` latches addresses from CDATA on falling strobe
edges, as an asynchronous DRAM would:

```
CPROG   ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾   (high for the whole load)
CDATA    <row>     <word>     <col>    <data byte>
RAS_n   ‾‾‾‾‾\_______________________________________________/‾‾‾
BAS_n   ‾‾‾‾‾‾‾‾‾‾‾‾\________________________________/‾‾‾‾‾‾‾‾‾‾
CAS_n   ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\___________________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
WE_n    ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
```

1. With CPROG high, put the macroblock row (0–18) on CDATA and drop RAS_n. The
   row is latched on the falling edge.
2. Put the word number (0–8) on CDATA and drop BAS_n.
3. Put the column (0–18) on CDATA and drop CAS_n.
4. With CAS_n low, put the data on CDATA and pulse WE_n low. The cells are
   transparent while WE_n is low and keep the value when it rises.
   Alternatively, pull RE_n low: the chip then drives the stored byte on CDATA
   (`cdata_oe` high).

Addresses stay latched, so the bus can run in page mode: one RAS_n per row, one
CAS_n per column, then BAS_n plus WE_n for each word. Writes and reads need
CPROG high. When CPROG falls, CDONE rises and the fabric leaves reset. Raising
CPROG again drops CDONE, holds the flip-flops in reset and turns the pads off
until the next CPROG fall. This allows reprogramming without power cycling.
RESET_n low clears the address latches and CDONE.

Decoding: `sram_row_decoder` makes one-hot row lines. `sram_col_decoder` makes
one-hot column lines and word lines. A word is written when its row, column and
word lines and the write strobe are all high. Out-of-range addresses select
nothing.

### Memory cells

`sram12t_cell` models the 12T cell as a latch with a separate read port: Write,
W_en and its complement, R_en and its complement, Read. One instance with
`WIDTH = 8` is one configuration word. A disabled read port gives 0, so the read
lines of all words and macroblocks are ORed into the readback bus.

## 5. Pads

`io_block` connects one pad to the fabric. The pad output is one track of the
adjacent edge CB. The pad input enters that CB as its side-A or side-B "block
output", which the CB can drive onto any track. The output is enabled only when
all three of these are set: the block's own enable bit, the chip's **OE** pin
(used here as a global output enable), and CDONE.

`io_level_converter` is a **behavioural model** of the 1.2 V/3.3 V cell. Data and
enable take 2.2 ns to reach the pad. The pad takes 1 ns to reach the core. A
keeper holds the last driven pad value while the driver is off. The Schmitt
trigger's hysteresis, slew control and drive strength are not modelled.
Bidirectional pins appear on `fpga_top` as `*_in` (value on the pin), `*_out`
(value the chip drives) and `*_oe` (the chip is driving).

## 6. How far to trust it

**Taken from the published design:**

* 8×8 tiles and 64 CLBs with 6-input LUTs.
* The CLB structure: SRAM and mux tree, mask AND gates, flip-flop with reset,
  sync/async output mux.
* The tile composition of CLB, HCB, VCB and Wilton SB.
* Transmission-gate switches, and tri-state drivers with keepers in the
  connection blocks.
* The 19×19 matrix of 9 × 8-bit macroblocks.
* An asynchronous byte-wide configuration bus modelled on DRAM, with row and
  column decoders and readback.
* The pin list: GCLK, RESET_n, OE, CPROG, CDONE, RAS_n, BAS_n, CAS_n, WE_n, RE_n,
  CDATA0–7, GPIO0–15 and HIP0–7.
* The level converter's delays.

**This design's own choices, where the published description is silent:**

* Channel width W = 5, read from the track numbering of the switch-block drawing.
* The Wilton permutation, taken from VPR.
* Three input pins per connection block, with one-hot selection.
* Which block outputs a connection block can drive.
* Segment length of one tile.
* Position coordinates, the I/O ring placement and the roles of GPIO and HIP.
* Every bit layout.
* The meaning of BAS_n (word strobe), the strobe order and the CPROG/CDONE
  behaviour.
* Holding the fabric in reset and its drivers off until CDONE.
* OE as a global pad enable.
* Flip-flop reset polarity.

Because the channel width and bit layouts are guesses, **bitstreams for the real
chip will not load correctly into this model**. Routing results from VPR would
need the same architecture description to be regenerated for it.

**Departures by necessity:**

* Bidirectional routing is modelled as explained in section 2. Contention
  between two enabled drivers shows up as an OR, not as an electrical fight.
* Two-state logic: the tri-state read lines and pads are shown as value plus
  enable.
* The H-tree-plus-grid clock network is a wire.
* Async resets need an edge or a running clock to take effect in simulation.
  The testbenches keep GCLK running during configuration.

**Not modelled:** the clock network, the package and supplies, and the
bitstream generator (host software).

**Workloads.** The chip was measured running a 4-bit counter (4 CLBs), ASCII
encryption (24), a gene sequence detector (43), a stopwatch (60) and a thermal
sensor (64). By CLB count, all of them fit the 64 CLBs here. Whether they route at
W = 5 is unknown, because their netlists are not available. The 4-bit counter is
placed, routed and run end to end in `tb_fpga_top`. At a 100 MHz GCLK its outputs
toggle at 50, 25, 12.5 and 6.25 MHz, as on the chip. `tb_full_utilization` uses
all 64 CLBs, standing in for the 64-CLB design. It builds a 64-stage shift register
that snakes through the whole array: down columns through connection blocks alone,
up columns through one switch block per stage, and across columns through a switch
block at the top or bottom. A random bit stream entering on HIP0 must leave on GPIO8
exactly 64 cycles later.

## 7. Simulating and changing it

Every file starts with a header comment on what the module does and its timing.
Files:

* `rtl/fpga_pkg.sv`: sizes, bit layout constants, Wilton function.
* `rtl/fpga_top.sv`: the chip.
* `rtl/fpga_core.sv`: fabric and configuration memory.
* The blocks: `clb`, `lut6`, `conn_block`, `wilton_sb`, `io_block`,
  `config_macroblock`, `sram12t_cell`, `sram_row_decoder`, `sram_col_decoder`,
  `config_ctrl`, `io_level_converter`.
* `tb/bitstream_pkg.sv`: a small class for building configuration images by hand.
  It sets CLB, CB, SB and I/O fields, and `sb()` closes a switch and returns the
  track reached on the far side, so a route can be followed hop by hop.

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fpga_pkg.sv tb/bitstream_pkg.sv \
          tb/tb_fpga_top.sv --top-module tb_fpga_top -Mdir obj_top -j 8
obj_top/Vtb_fpga_top
```

Replace `tb_fpga_top` with any other `tb/tb_<block>.sv`. The block testbenches
compare against reference models written in the testbench. For example,
`tb_wilton_sb` holds the W = 5 permutation as a hand-written table.

`tb_fpga_top` runs the full-size chip through its pins. It writes all 3249 bytes
in page mode, reads all of them back, and runs the counter and a combinational
path that turns through three Wilton switch blocks. The path's LUT relies on the
input mask. The testbench then switches OE, reprograms one macroblock row, and
pulses RESET_n. It counts each of these mechanisms. Building it takes about 30 s
and running it about 3 s.

`tb_full_utilization` also drives the full-size chip through its pins. It loads
the 64-stage shift register described in section 6. It checks that only GPIO8
drives, that each input bit comes out exactly 64 cycles later, and that the output
does not also match the stream delayed by 63 cycles. It builds in about 30 s and runs in about 1 s.

**Changing it.** `NTILES` (on `fpga_top` or `fpga_core`) sets the array size. The
matrix becomes 2·NTILES+3 on a side and there are 3·NTILES I/O positions. Keep
2·NTILES+3 ≤ 32 for the 5-bit addresses, or widen `ADDR_W`. The channel width is
`CHAN_W` in `fpga_pkg`; change it there (not only the `W` parameters) so that the
bit-layout constants follow. A switch block needs 6W bits of its 72, so W ≤ 12.
`CB_PINS` sets the pins per connection block. The CLB takes 2·CB_PINS inputs, so
keep it equal to LUT_K / 2.
