# A convolution accelerator that keeps every partial sum on chip

Most of the energy of a CNN accelerator goes to moving data rather than to arithmetic. For a
fixed amount of on-chip memory, the off-chip traffic of a convolutional layer is smallest when
that memory holds a block of *partial sums* (Psums) that is as large as possible. Only thin
slices of inputs and weights need to stream past it. Each Psum then leaves the chip exactly
once, finished. Each input and each weight is fetched from DRAM once per output block. An
input in the on-chip buffer is shared by all the sliding windows that overlap it.

This RTL builds an accelerator around that rule:

* 16 × 16 processing elements (PEs). Each PE is one multiply-accumulate unit with 128 local
  registers (LRegs) for Psums. Together they hold 32768 16-bit Psums, which is 64 KB.
* Very small global buffers: 2 KB for inputs and 0.5 KB for weights.
* Register files (GRegs) with multiplexers that hand every PE its operand each cycle. No data
  moves between PEs.
* One global finite-state machine that drives every address and select line. All PEs run in
  lock step.

The design is written in synthesizable SystemVerilog (IEEE 1800-2017). It compiles lint-clean
with Verilator 5 and with the slang front end of Yosys, apart from harmless warnings explained
below. It is verified by self-checking testbenches against a reference convolution.

## 1. The schedule: tiles, iterations, passes

A layer has B images and Ci input channels of Hi × Wi. It has Co kernels of Wk × Hk and
stride D, and produces B × Co × Ho × Wo outputs.

**Tiles.** The outputs are cut into *tiles* of b images × z channels × y rows × x columns. A tile
is computed completely before the next one starts. Its b·z·y·x Psums never leave the PE array
until they are final.

**Iterations.** Within a tile, the input channels are taken one at a time. One input channel is
called an *iteration*. For an iteration the accelerator needs two things:

* The b input planes of that channel that the tile's windows touch. Each plane is y' × x',
  where x' = (x−1)·D + Wk and y' likewise.
* The z × Wk × Hk weights of that channel.

**Passes.** An iteration is split into Wk·Hk *passes*, one per kernel position (ky, kx). In a
pass every Psum of the tile receives exactly one product: the input at the window position
(ky, kx) times the weight of (channel, ky, kx).

So a tile costs ci · Wk · Hk passes. Inputs arrive once per iteration and weights once per
pass.

## 2. Mapping a tile onto the PE array

The tile is divided between the PE rows and the PE columns.

**PE rows.** The tile's b·y·x output positions are cut into b · nby · nbx rectangular blocks of
ys rows × xs columns. Block `r` goes to PE row `r`. Block columns `bx` count fastest, then block
rows `by`, then images `bi`. So y = nby·ys and x = nbx·xs.

**PE columns.** The z output channels are dealt round-robin. PE column `c` owns channels
c, c+16, c+32, … — zs of them. So z ≤ 16·zs.

**One PE.** Every PE therefore accumulates xs·ys·zs Psums, one per LReg. This needs
xs·ys·zs ≤ 128. The LReg address of output (channel step j, row oy, column ox) is
`(j·ys + oy)·xs + ox`.

### Operand delivery: the GRegs and their multiplexers

All PEs in a PE row need the same inputs, and all PEs in a PE column need the same weights.
Instead of passing operands from PE to PE, each operand sits in a register file with a
multiplexer, and every PE reads it there.

**Weight GReg row** (`wgreg_row`):

* It holds 256 weights, which are the z weights of the current pass.
* Sixteen 16-to-1 multiplexers read it, one per PE column.
* Multiplexer `c`, input `i`, is entry `c + 16·i`. This round-robin wiring is what lets column
  `c` reach channels c, c+16, ….
* All multiplexers share one select, `j`. Only selects 0 … zs−1 are used, so a small z only
  touches the first z entries.

**Input GReg column** (`igreg_column`):

* It has 16 segments of 64 entries, one segment per PE row.
* Segment `r` holds the (xs'·ys') input window of block `r` in row-major order, where
  xs' = (xs−1)·D + Wk and ys' likewise. This needs xs'·ys' ≤ 64.
* Each segment has a 64-to-1 multiplexer. All of them share one select:
  `(oy·D + ky)·xs' + ox·D + kx`.

Inputs are therefore never unfolded. One stored input serves every window that overlaps it,
in every pass of the iteration.

**Grouping** (`pe_array`). Driving one register file across the whole array would need long
wires. So the PEs are grouped in 4 × 4 blocks:

* Each group row of 4 PE rows has its own copy of the weight GReg row, giving 4 copies.
* Each group column of 4 PE columns has its own copy of the input GReg column, giving 4 copies.
* PE(r, c) takes its weight from copy r/4, multiplexer c. It takes its input from copy c/4,
  segment r.
* All copies are written through one shared write port, so they always hold the same data.

The GRegs total 4·256·2 B + 4·16·64·2 B = 10 KB.

**The PE** (`pe`) does one thing each cycle:

```
LReg[addr] <= sat16( (first ? 0 : LReg[addr]) + ((in_a * in_w) >>> 8) )
```

The values are 16-bit fixed point with 8 fraction bits, and the sum saturates. `first` is high
during the first pass of a tile, so a new tile overwrites the previous tile's Psums without a
clearing cycle. The LRegs are read combinationally for draining.

## 3. The controller (the hard part)

`controller` is the only place where the schedule of Section 1 exists. Everything else just
follows the address and select lines it drives. It has two parts: a sequencer, and two fill
engines that run beside it.

### Sequencer states

```
IDLE ──start──► LOAD_IN ─► LOAD_W ─► COMPUTE ─┬─(next pass)──────► LOAD_W
                  ▲                            ├─(next iteration)─► LOAD_IN
                  │                            └─(last pass of tile)► DRAIN
                  └────────────(next tile)──────────────────────────── DRAIN ─(last tile)─► IDLE (done)
```

* **LOAD_IN.** Copies the IGBuf into the input GReg segments, one word per cycle. For each PE
  row block `r` = (bi, by, bx), window entry (ry, rx) is read from IGBuf address
  `bi·x'·y' + (by·ys·D + ry)·x' + bx·xs·D + rx`. It is written to segment `r`, entry
  `ry·xs' + rx`. PE rows with no block (b·nby·nbx < 16) are skipped.
* **LOAD_W.** Copies the z weights of the pass from the WGBuf into the weight GReg rows.
  WGBuf entry `n` is weight GReg entry `n`.
* **COMPUTE.** Runs for xs·ys·zs cycles with `mac_en` high. It walks j, then oy, then ox (ox
  fastest) and drives the three shared selects given in Section 2.
* **DRAIN.** After the tile's last pass, the controller walks PE row, then PE column, then j,
  then oy, then ox. It sends one Psum per cycle through the output multiplexer into the output
  FIFO. Channels c + 16·j ≥ z do not exist, so their (column, j) combinations are skipped.
  DRAIN waits while the output FIFO is full.

The GBufs are synchronous SRAMs with one cycle of read latency. Each copy is therefore a
one-stage pipeline: the address goes out in one cycle and the GReg write happens in the next.
A load state ends only once its last read has been written.

### Fill engines and prefetch

As soon as LOAD_IN has issued the last IGBuf read of an iteration, the IGBuf is free. The input
fill engine immediately starts refilling it from the input FIFO with the next iteration's
b·x'·y' inputs. The weight fill engine does the same for the WGBuf after each LOAD_W, fetching
the next pass's z weights.

Both fills run during COMPUTE and DRAIN. They overlap the next tile as well, because the fill
count runs over the whole layer: n_tiles·ci input sets and n_tiles·ci·Wk·Hk weight sets. The
engines never take data beyond that count. The sequencer stalls in LOAD_IN or LOAD_W only while
the buffer it needs is not yet full.

### Data order on the DRAM side

The GBufs hold data in exactly the order it arrives. The DRAM side therefore has to send:

* **Inputs:** for each tile, for each input channel, for each image of the tile, y' rows of x'
  values. The values are the input region the tile's windows cover, including any zero
  padding at image borders.
* **Weights:** for each tile, for each input channel, for each ky, for each kx, the weights of
  the tile's output channels 0 … z−1.
* **Outputs:** these come out in drain order. Each output carries a tag holding its image,
  channel, row and column inside the tile. The output's DRAM address is the tile origin plus
  the tag.

The accelerator does not know where a tile lies in the layer, or where the layer's edges are.
Edge tiles are simply sent padded, and outputs that fall outside the image are dropped on the
DRAM side.

### Cycle budget

When no stream is starved, a tile takes:

* LOAD_IN: n_act·xs'·ys' + 2 cycles per iteration, where n_act = b·nby·nbx is the number of
  PE rows in use.
* LOAD_W: z + 2 cycles per pass.
* COMPUTE: xs·ys·zs cycles per pass.
* DRAIN: b·y·x·z cycles per tile.

With the GRegs loaded one word per cycle, LOAD_W at z = 256 (258 cycles) takes about twice as long as a 128-cycle pass.
This is the main throughput limit of this implementation (see Section 6).

## 4. Configuration and ports

The top is `cla_accel`. It has three valid/ready streams, which are the DRAM's three transfer
paths:

| port group | direction | content |
| --- | --- | --- |
| `in_valid/in_ready/in_data` | in | input stream, 16 bit |
| `w_valid/w_ready/w_data` | in | weight stream, 16 bit |
| `out_valid/out_ready/out_data/out_tag` | out | finished outputs with `out_tag_t` {img, chan, oy, ox} |
| `start`, `cfg`, `busy`, `done` | | run control |

`cfg` is a `cla_pkg::layer_cfg_t` and must stay stable while `busy` is high. Its fields:

* `n_tiles`: number of tiles to compute.
* `ci`: input channels, which is the number of iterations per tile.
* `wk`, `hk`, `stride`: kernel size and stride D.
* `xs`, `ys`: block width and height handled by one PE row.
* `zs`: output channels per PE.
* `z`: valid output channels of the tile.
* `nbx`, `nby`, `nb`: blocks across and down the tile, and images per tile (b).

`done` pulses for one cycle when the last output has entered the output FIFO. The controller
asserts at `start` that the tiling fits:

* xs'·ys' ≤ 64
* xs·ys·zs ≤ 128
* zs ≤ 16 and z ≤ 16·zs
* b·x'·y' ≤ 1024
* b·nby·nbx ≤ 16

Parameters of `cla_accel`, with their defaults:

* P = Q = 16
* PG = QG = 4
* LREG_DEPTH = 128
* WG_DEPTH = 256
* IG_DEPTH = 1024
* SEG_DEPTH = 64
* FIFO_DEPTH = 16

Every VGG-16 convolution layer fits at these defaults with b = 1, nbx = nby = 4 and 16 PE rows in
use. The tilings per output-channel count are:

| layer channels | z | zs | xs × ys | LRegs used | segment entries used | IGBuf entries used |
| --- | --- | --- | --- | --- | --- | --- |
| 64 | 64 | 4 | 8 × 4 | 128 | 60 | 612 |
| 128 | 128 | 8 | 4 × 4 | 128 | 36 | 324 |
| 256 and 512 | 256 | 16 | 4 × 2 | 128 | 24 | 180 |

The last row's 512-channel layers run as two channel tiles.

## 5. Files

| file | block |
| --- | --- |
| `rtl/cla_pkg.sv` | data type, saturating MAC, `layer_cfg_t`, `out_tag_t` |
| `rtl/sync_fifo.sv` | valid/ready FIFO (input, weight and output FIFOs) |
| `rtl/gbuf.sv` | 1-write/1-read synchronous SRAM (IGBuf 1024 × 16, WGBuf 256 × 16) |
| `rtl/wgreg_row.sv` | weight GReg row with round-robin 16-to-1 MUXes |
| `rtl/igreg_column.sv` | input GReg column: 16 segments × 64 with 64-to-1 MUXes |
| `rtl/pe.sv` | MAC + 128 LRegs |
| `rtl/pe_array.sv` | 16 × 16 PEs, GReg copies per 4 × 4 group, output MUX |
| `rtl/controller.sv` | sequencer, fill engines, drain |
| `rtl/cla_accel.sv` | top level |

Each testbench in `tb/` is self-checking and prints `TB_RESULT checks=N failures=M`. The
unit testbenches are `tb_<module>.sv`.

`tb/conv_tb_core.sv` is the end-to-end driver used by the two top-level testbenches. It:

* draws random layers and computes the reference convolution with the same saturating
  arithmetic, in the hardware's accumulation order;
* streams padded inputs and weights in tile order, with random gaps;
* back-pressures the output stream;
* checks every output by its tag;
* counts each mechanism: IGBuf stall, WGBuf stall, prefetch during COMPUTE, output-FIFO full,
  Psum restart, skipped drain columns, and MAC cycles;
* checks that the MAC cycle count is exactly tiles · ci · Wk · Hk · xs · ys · zs.

There are two top-level testbenches:

* `tb_cla_accel` runs a reduced array (4 × 4 PEs) through several small layers: stride 1 and
  stride 2, a 1 × 1 kernel, batch 2, and z not a multiple of the column count. Every mechanism
  must happen at least once.
* `tb_cla_accel_full` runs the design at its default parameters. The layer is one full tile:
  1 image, 2 input channels, 256 output channels, 8 × 16 outputs and a 3 × 3 kernel, so all
  32768 Psums are used. It runs in under a minute.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cla_pkg.sv tb/tb_cla_accel.sv --top-module tb_cla_accel
./obj_dir/Vtb_cla_accel
```

## 6. Where this RTL departs from, or adds to, the source design

The block set and sizes follow the source design:

* PE count and grouping;
* GBuf, GReg and LReg sizes;
* the round-robin weight multiplexers;
* the segmented input GRegs;
* the single global FSM;
* the FIFOs to DRAM.

The following are this implementation's choices, because the source gives no detail.

* **Number format.** The data are 16-bit fixed point, as in the source. Placing 8 bits after
  the binary point and saturating sums is this implementation's choice.
* **Psum start.** Psums start at zero through the `first` control.
* **Controller.** The FSM states, data orders, one-word-per-cycle copies, fill engines, drain
  order and output tags are all this implementation's. The source only says that one FSM
  generates every control signal.
* **Interfaces and buffers.** The FIFO depth (16), the valid/ready handshakes and the one-cycle
  SRAM read latency are this implementation's.
* **Throughput.** The GRegs are reloaded through one word per cycle, and the reload does not
  overlap computation. LOAD_W therefore costs z + 2 cycles per pass, and LOAD_IN costs
  n_act·xs'·ys' + 2 cycles per iteration. At z = 256 with 128-cycle passes, the PEs are busy
  only about a third of the time.

  The source does not say how wide the GBuf-to-GReg path is or whether the GRegs are double
  buffered. The remedies are a wider copy path, or a second weight GReg row loaded during
  COMPUTE.
* **Draining.** Draining reads one Psum per cycle and does not overlap the next tile's
  computation. That costs b·y·x·z cycles per tile, which is small against ci·Wk·Hk passes for
  deep layers.
* **Tile placement.** Tile placement, border padding and cropping are done on the DRAM side.
* **Other configurations.** The source also evaluates larger arrays: 32 × 16, 32 × 32 and
  64 × 32 PEs, with 64 B or 128 B of LRegs per PE. These are reachable by changing P, Q and
  LREG_DEPTH, but were not simulated. Their GReg sizes imply grouping details the source does
  not give.

### Lint notes

Verilator reports a few warnings, all harmless:

* **UNUSEDSIGNAL.** The `nb` field of the latched configuration is not read on its own. The
  number of images enters only through the products the controller latches at `start`.
* **UNUSEDSIGNAL (status).** `wait_igbuf`, `wait_wgbuf` and `drain_skip` in the controller are
  status signals read only by the testbenches, to count stalls and skipped drain columns.
* **SYNCASYNCNET.** Reset is used asynchronously by the flip-flops and synchronously by the
  `disable iff` of the FIFO and controller assertions.

The netlist has no latches, combinational loops or multiply-driven nets.
