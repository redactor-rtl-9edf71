# An embedded FPGA fabric for redacting DNN-accelerator controllers

A foundry that builds a chip sees its whole netlist. eFPGA redaction protects the
most valuable part of a design by not fabricating it as fixed logic. Instead, a
small embedded FPGA (eFPGA) takes the place of that block. The chip leaves the fab
with a generic, unprogrammed fabric. The block's function exists only as a
bitstream, which the owner loads into the fabric after manufacture.

In a CNN accelerator the natural targets are the controllers that order the
dataflow. Examples are the on-chip weight-memory controller, which decides when
weights move from the weight memory to the processing elements, and the
controllers that sequence the convolution and the processing-element (PE)
registers. These blocks are small, so a fabric of a few tiles can hold one. They
also matter: a wrong bitstream corrupts every weight or every partial sum
downstream.

This repository holds the RTL of such a fabric. It is an island-style eFPGA built
from 4-input look-up tables, with regular or fracturable LUTs. Parameters size it
to any of the fabrics used in the study it follows. By default it builds the
smallest regular-LUT fabric used for the weight-memory controller: 2 x 2 tiles
with two 4-LUTs per tile and 18 routing tracks per channel. The accelerator
around the fabric and the redacted controllers themselves are not part of this
RTL. Their logic is not public. To the fabric they are only a bitstream and the
pads it connects to.

## The fabric at a glance

```
           N I/O (x=0)     N I/O (x=1)
         +-------------+-------------+
 W I/O   | tile (0,1)  | tile (1,1)  |  E I/O
 (y=1)   |             |             |  (y=1)
         +-------------+-------------+
 W I/O   | tile (0,0)  | tile (1,0)  |  E I/O
 (y=0)   |             |             |  (y=0)
         +-------------+-------------+
           S I/O (x=0)     S I/O (x=1)
```

| parameter     | default | meaning |
|---------------|---------|---------|
| `ROWS`,`COLS` | 2, 2    | tile grid |
| `K`           | 4       | LUT inputs |
| `N`           | 2       | BLEs (LUT + flip-flop) per logic block |
| `FRAC`        | 0       | 1 = fracturable LUTs |
| `W`           | 18      | tracks per routing channel, 9 each way |
| `FC_IN`       | 3       | tracks each logic-block input can pick from (about 15 % of W) |
| `IO_PER_SIDE` | 3       | pads per I/O block; 24 pads in all |
| `L`           | 4       | routing wire length, in tiles |

Derived sizes at the defaults: 6 inputs and 2 outputs per logic block, 90
configuration bits per tile, 15 per I/O block, and 480 bits in the whole
bitstream.

## Logic: BLE, fracturable LUT and logic block

**BLE** (`ble`). The basic logic element is one K-input LUT whose output goes
two ways: straight to the output mux, and into a D flip-flop. One
configuration bit picks which of the two leaves the BLE: 0 for the LUT
(combinational), 1 for the flip-flop (registered). The flip-flops reset
asynchronously to 0 on `rst_n`.

**Fracturable LUT** (`klut`, `FRAC = 1`). A 4-LUT is a 16-entry table read
by a tree of 2:1 muxes. The last mux stage chooses between the two 8-entry halves
using input 3. A fracturable LUT adds a mode bit. In 4-LUT mode it behaves as
above. In fractured mode the last stage is bypassed. Output 0 then reads the
lower half and output 1 the upper half, both addressed by inputs 0..2. One
physical LUT thus gives two independent 3-input functions of the same three
signals. Each output has its own flip-flop and output mux in the BLE.

**Logic block** (`clb`, `clb_xbar`). A logic block groups N BLEs. It has
I = K(N+1)/2 input pins, the usual sizing rule for clusters (6 pins for K = 4,
N = 2). A full local crossbar feeds the BLEs. Each of the N*K BLE inputs is a
mux over all I pins and all BLE outputs of the block. This feedback lets a block
chain two LUTs or keep a state bit without using global routing. The block's
outputs are the BLE outputs themselves: N of them, or 2N with fracturable LUTs.

## Routing: connection blocks and switch blocks

Each tile (`efpga_tile`) follows the classic layout. The logic block's inputs
come from two connection blocks, one on the horizontal channel and one on the
vertical channel. Its outputs enter the routing at a switch block in the tile
corner.

All routing wires are **unidirectional** and span L = 4 tiles. A channel of width
W carries W/2 tracks in each direction. Each tile therefore has, on each side
d ∈ {N=0, E=1, S=2, W=3}, W/2 tracks arriving (`trk_in[d]`) and W/2 tracks
leaving (`trk_out[d]`). Adjacent tiles are wired output to input. At the edge of
the grid the I/O blocks drive the arriving tracks and take the leaving ones.

**Connection block** (`conn_block`). The horizontal connection block sees the
channel `{trk_in[E], trk_in[W]}`, 18 tracks at the defaults. The vertical one
sees `{trk_in[N], trk_in[S]}`. The first ceil(I/2) logic-block inputs hang on
the horizontal block and the rest on the vertical one. Pin p of a block is a
mux over FC_IN tracks:

```
candidate j (select value j) = track (p + j * floor(W / FC_IN)) mod W
```

At the defaults this gives pin 0 → tracks 0, 6, 12; pin 1 → 1, 7, 13; and pin 2
→ 2, 8, 14. Track indices below W/2 belong to the first-named half. Select
values ≥ FC_IN give 0.

**Wire starts.** A wire can only be switched in the tile where it starts.
Starts are staggered over the tracks, so every tile has some wires starting
in each direction. Let p be the tile's position along the direction of travel:
y going north, x going east, ROWS-1-y going south and COLS-1-x going west.
Track t leaving towards side d starts a wire in this tile when
(p + t) mod L = 0. In every other tile that track is the middle of a wire and
simply continues: `trk_out[d][t] = trk_in[opposite][t]`, with no
configuration bits. Wires that reach the edge of the grid are cut short. In
the south-west tile of the default grid, wires start on tracks 0, 4, 8 going
north and east, and on tracks 3, 7 going south and west.

**Switch block** (`switch_block`). Each leaving track t on side d where a wire
starts is a 4-input mux:

| select | source |
|--------|--------|
| 0 | arriving track t from the opposite side (straight on) |
| 1 | arriving track t from side (d+1) mod 4 |
| 2 | arriving track t from side (d+3) mod 4 |
| 3 | logic-block output (t/L + d) mod O |

At a wire start, every arriving track can therefore continue to three places
(Fs = 3, same-index "disjoint" pattern). A signal keeps its track index for
its whole journey. It changes direction at a switch block and enters the
logic at a connection block. Each logic-block output reaches 5 of the 36
leaving tracks of a default tile. Example: in the default grid, a signal
driven east from tile (0,0) on track 4 runs on through tile (1,0) unswitched
and reaches the east I/O block. A signal driven north on track 4 enters tile
(0,1) on `trk_in[S][4]`, where a wire east on track 4 starts, so select 1 of
`trk_out[E][4]` turns it east.

**I/O block** (`io_block`). Each I/O block sits on one tile edge and holds
`IO_PER_SIDE` pads. Arriving track t is hard-wired to pad input
t mod IO_PER_SIDE, so each pad enters the fabric on several tracks. Each pad
output is a mux over the W/2 tracks leaving the fabric there, plus an
output-enable bit, `pad_oe`. Pad number = `io_index(side, position) *
IO_PER_SIDE + p`. I/O blocks are numbered north x = 0..COLS-1, then east
y = 0..ROWS-1, south x, and west y.

## The bitstream

The whole configuration is one scan chain of flip-flops (`cfg_chain`), running
`prog_din` → tile 0 → tile 1 → … → I/O block 0 → … → `prog_dout`. Tiles are
chained in row-major order, index y*COLS + x. The bitstream is a vector whose
bit 0 ends up in the first flip-flop of tile 0. Send it **most significant bit
first**, one bit per clock, with `prog_en` high for exactly `CFG_BITS` clocks.
Bits sent again come out of `prog_dout` in the same order, so a second load
reads the previous bitstream back.

Default layout (bit offsets, LSB first):

| range | contents |
|-------|----------|
| tile t: `90*t + 0 … 5`      | horizontal CB, 3 pins × 2-bit select |
| `+ 6 … 11`                  | vertical CB, 3 pins × 2-bit select |
| `+ 12 … 35`                 | crossbar: BLE b input k at `12 + (b*4+k)*3`, 3-bit select (0..5 pins, 6..7 BLE outputs) |
| `+ 36 … 52`, `+ 53 … 69`    | BLE 0, BLE 1: 16-bit truth table, then the register-select bit (a FLUT BLE adds the mode bit before one register bit per output) |
| `+ 70 … 89`                 | switch block: one 2-bit select per wire starting here, in order of d*9+t (`sb_field`) |
| I/O block j: `360 + 15*j …` | pad p at `+5p`: 4-bit track select, then output enable |

Every tile of the default 2x2 grid has 10 wire starts and hence 90 bits. On
other grids the count varies from tile to tile, and `tile_base` gives each
tile's offset.

The truth table is indexed by the BLE inputs read as a binary number, with
input 0 as the LSB. All of these offsets come from functions in `efpga_pkg`
(`tile_off_*`, `clb_cfg_bits`, `io_index`, …). The testbenches build their
bitstreams with the same functions, which is the quickest way to write new
ones.

## Programming and running

1. Hold `prog_en` high from power-up. While it is high, every BLE output is
   forced to 0. A half-shifted bitstream can otherwise close a loop through an
   inverting LUT and oscillate.
2. Shift the bitstream in, MSB first, one bit per `clk`.
3. Drop `prog_en`, then pulse `rst_n` low to clear the user flip-flops.
4. The configured circuit now runs on `clk`. Pad-to-pad paths through LUTs and
   routing are combinational. Registered BLEs add one clock each.

Any FPGA fabric can be programmed into a combinational loop, and the
configurable routing contains loops as a structure. Lint tools therefore report
circular logic through the logic-block outputs, the crossbar and the switch
blocks. It is inherent, not a wiring error. Whether a loop is actually closed
depends only on the bitstream, and the bitstreams in the testbenches close none.
Static timing of such a fabric needs the loops cut by hand, for example with a
buffer cell whose timing arc is disabled.

## Sizing the fabric for a block

The study behind this design picks, for each redacted controller, the smallest
fabric that is fully used (100 % of the BLEs, over 90 % of the pads). The
parameters reproduce each of its fabrics. Set `FC_IN` to ceil(0.15*W) in each
case (3, 4, 5 and 1 for W = 18, 26, 30 and 6). The bit counts are this
design's bitstream length, with the published fabric's in brackets:

| redacted block | I/Os | regular-LUT fabric | bits | fracturable-LUT fabric | bits |
|----------------|------|--------------------|------|------------------------|------|
| weight-memory controller | 20 | `ROWS=2 COLS=2 N=2 W=18` (default) | 480 (614) | `ROWS=2 COLS=2 N=1 FRAC=1 W=18` | 356 (458) |
| PE-multiplexer dataflow controller | 15 | `ROWS=1 COLS=1 N=6 W=26 IO_PER_SIDE=4` | 362 (440) | `ROWS=1 COLS=1 N=3 FRAC=1 W=18 IO_PER_SIDE=4` | 225 (256) |
| on-chip-memory dataflow controller | 26 | `ROWS=2 COLS=2 N=4 W=30 IO_PER_SIDE=4` | 920 (1160) | `ROWS=2 COLS=2 N=3 FRAC=1 W=30 IO_PER_SIDE=4` | 788 (1059) |
| PE dataflow controller | 5 | `ROWS=1 COLS=1 N=1 W=6 IO_PER_SIDE=2` | 65 (66) | `ROWS=1 COLS=1 N=1 FRAC=1 W=14 IO_PER_SIDE=2` | 87 (79) |

The bitstreams of the six larger fabrics come out 12 to 26 % shorter than the
published ones; the two smallest are within 10 %. The published fabrics'
routing multiplexers are not known, and this design's are its own.

The default fabric has 8 BLEs and 24 pads. By capacity it holds the
weight-memory, PE-multiplexer and PE controllers, but not the 16-BLE,
26-I/O on-chip-memory controller. Whether a given netlist also *routes* on this
routing pattern needs a placer and router, which is outside this RTL. Any `W`
must be even and at least `2*IO_PER_SIDE`. `FC_IN` should be about
ceil(0.15*W). All eight rows of the table are built and programmed in
`efpga_fabric_sizes_tb`.

## How this departs from the published fabrics

- **Wire pattern.** The published fabrics use length-4 wires, as here. How
  their wire starts are staggered is not published; the rule above is this
  design's own.
- **Logic-block outputs into routing.** In the published fabrics each output
  reaches about 10 % of the channel's tracks. Here each output reaches about
  14 % of a tile's leaving tracks.
- **Bitstream size.** The default fabric needs 480 bits, against 614 for the
  published fabric with the same K, N, grid and channel width. The mux sizes
  and patterns are this design's own, not those of a fabric generator.
- **Pads per I/O block.** The count (3) is a choice of this design; the
  published study tuned it per block without stating it. Its 2x2 fabric for
  the 20-I/O weight-memory controller used 94 % of its pads, so it had about
  21. Here pads come in equal groups on the 8 edge segments. 24 is the
  smallest such count that holds 20 I/Os, which is 83 % use.
- **Programming.** The chain shifts on the user clock with an enable, and
  logic outputs are held at 0 during programming. There is no separate
  programming clock.
- The study attacks the fabric's bitstream with a SAT-based tool on a
  gate-level netlist. That is analysis, not hardware, and has no counterpart
  here.

## Verifying and simulating

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. The fabric testbenches follow the usual
redaction check: the same stimulus drives the programmed fabric and a reference
model of the original logic, and the outputs must agree on every cycle.

| testbench | what it shows |
|-----------|---------------|
| `klut_tb`, `ble_tb` | every truth-table entry in both LUT modes; registered vs combinational output; reset; the hold during programming |
| `clb_xbar_tb`, `conn_block_tb`, `switch_block_tb`, `io_block_tb` | every mux against its documented pattern, with random selects; for the switch block also which tracks start a wire and which pass through |
| `cfg_chain_tb` | load, hold, and read-back through `dout` |
| `clb_tb` | an XOR and a set/reset/enable register with crossbar feedback in one block |
| `efpga_tile_tb` | a tile programmed through its chain: logic from both connection blocks, straight and turning routes, wires passing through |
| `efpga_fabric_tb` | the default fabric end to end: a 3-input XOR, a set/reset register with enable, and two pad-to-pad routes. They use straight and turning switches and wires that cross a tile unswitched. The test also reloads and reads back the bitstream, and counts each mechanism |
| `efpga_fabric_frac_tb` | the 2x2 fracturable fabric: two 3-input functions from one fractured LUT, then the same LUT reloaded as a 4-input XOR |
| `efpga_fabric_sizes_tb` | all eight fabric sizes of the table above, each built with its own parameters (through `fabric_size_check`), programmed with a 2-input XOR that runs first combinationally and then registered, and read back; plus a 4x4 grid in which the output crosses all four columns on one length-4 wire |

Run one with Verilator, for example:

```
verilator --binary --timing -Wno-fatal --top-module efpga_fabric_tb -y rtl -y tb +libext+.sv \
          rtl/efpga_pkg.sv tb/efpga_fabric_tb.sv -o sim && ./obj_dir/sim
```

`-Wno-fatal` is needed because Verilator reports the fabric's configurable
loops (see above) as warnings.

All simulations take well under a second. The package must come first on
the command line. The fabric's default size is tiny, so every test runs at the
defaults except where a testbench chooses a fracturable configuration.

## Files

`rtl/efpga_pkg.sv` holds the shared sizes, field offsets and routing
patterns. `rtl/cfg_mux.sv` is the programmable mux used everywhere.
`rtl/cfg_chain.sv` is the scan-chain segment. Then come `klut`, `ble`,
`clb_xbar`, `clb`, `conn_block`, `switch_block` and `io_block`, bottom up, and
`efpga_tile` and `efpga_fabric`, the top. Each file opens with a description of
its behaviour, interface and timing.
