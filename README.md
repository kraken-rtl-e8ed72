# Kraken: a 7 x 96 engine with one dataflow for convolution and fully-connected layers

Kraken is a DNN inference accelerator built around one idea: every layer of a
CNN (convolutions of any kernel size and stride, 1 x 1 layers, fully-connected
layers, matrix products) is run through the same datapath. Only the way the
data is laid out in DRAM changes. The processing elements are as small as they
can be: a multiplier, an accumulator and a two-way multiplexer, with no local
SRAM or register file. Data reuse comes from three places:

* **Outputs.** Each output pixel is accumulated to completion inside one PE.
* **Weights.** A whole iteration's kernel sits in a global on-chip SRAM and is
  replayed ("rotated") once for every input column and block.
* **Inputs.** A pixel shifter reuses pixels vertically. Neighbouring cores
  pass partial sums sideways, which reuses pixels horizontally.

This repository holds synthesizable SystemVerilog for the accelerator core:

* the 7 x 96 PE array ("engine");
* the pixel shifter that feeds its rows;
* the weights rotator with its two 2048-row SRAM banks that feeds its cores;
* the output pipe that collects finished sums.

It also holds a self-checking testbench for each block and an end-to-end
testbench at full size.

## Terms

| symbol | meaning |
|---|---|
| R, C | rows and cores of the PE array (7 and 96) |
| K_H, K_W, S_H, S_W | kernel height/width, vertical/horizontal stride |
| C_i | input channels of a layer |
| W | input width (columns) |
| N*L | number of R-row blocks processed per iteration (batch N times L row-blocks per image) |
| F | pixel shift factor, ceil(K_H/S_H) - 1 |
| G | elastic group size, K_W + S_W - 1 cores |
| E | number of elastic groups, floor(C/G) |
| iteration | one pass that produces E*S_W output channels for all N*L blocks |

## How a convolution is mapped

**Rows (vertical convolution).** Row r of the array computes output row r of
the current block. The pixel shifter holds R + F pixels of one input channel
and one input column. Each clock it presents its first R registers to the R
rows, then shifts by one. For a stride S_H the pixels of a column are loaded
interleaved: load j (0 <= j < S_H) holds input rows j, j+S_H, j+2S_H, ... of
the block. After m shifts, register r holds row r*S_H + j + m*S_H. That is tap
k_h = j + m*S_H of output row r. So K_H clocks per channel visit every tap in
the order 0, S_H, 2S_H, ..., 1, 1+S_H, ... For stride 1 this is a single load
shifted K_H - 1 times. The kernel stream uses the same tap order.

**Cores (output channels and horizontal convolution).** The C cores are
divided into E elastic groups of G cores. Every core receives one weight per
clock, broadcast to its R PEs. Within a group, at input column w, core g works
on output channel c = (g - w) mod S_W of the group and on horizontal tap
k_w = g - c. If that tap does not exist (k_w >= K_W), its weight is zero. At
the start of every input column the multipliers pause for one clock and every
accumulator takes the sum of its left neighbour. A sum therefore walks one core
to the right per input column and picks up one horizontal tap each time. When
it reaches tap K_W - 1 it is a complete output pixel. The first core of each
group starts from zero. For K_W = 1, including fully-connected layers, G = 1
and no shift clock is spent: the first product of a column simply restarts the
sum. For S_W > 1 the extra S_W - 1 cores of a group let S_W channels
interleave, so the discarded strided columns are never computed.

**Which sums are complete.** At the end of each column (after
C_i*K_H clocks), the cores holding finished sums are:

* with S_W = 1, the last core of every group;
* at the last column of a block, also the cores whose missing taps fall on the
  zero padding at the right edge (tap >= floor(K_W/2));
* with S_W > 1, the S_W cores of each group whose channel completes on this
  column.

Sums centred left of the image (the first floor(K_W/2) columns) are dropped.
The left padding is implicit: a sum simply starts later.

**Iteration and weight reuse.** One iteration produces E*S_W output channels.
Its kernel, C_i*K_H*S_W rows of C words, is read from one SRAM bank once per
input column of every block: N*L*W times in all. Meanwhile the kernel of the
next iteration streams slowly into the other bank. The banks swap at the
boundary without a pause.

## The blocks

| module | role |
|---|---|
| `kraken_pkg` | sizes, header layout (`cfg_t`), beat tags (`ktag_t`, `ecfg_t`) |
| `kraken_pe` | multiplier, accumulator, addend mux (own / left / zero) |
| `kraken_eg_map` | G, E and each core's position in its group, from K_W, S_W |
| `kraken_engine` | R x C PEs, shift clock, column copy to the output pipe |
| `kraken_axis_adapter` | AXI-Stream width converter with TKEEP/TLAST |
| `kraken_pixel_shifter` | X^ header, adapter bank 8 -> R+F for F in {0,2,3,4}, shift bank |
| `kraken_sram` | one C-word x 2048-row bank, one-clock read |
| `kraken_weights_rotator` | two banks (write / read), 8 -> C adapter, rotation counters, 2-entry register FIFO |
| `kraken_output_pipe` | capture bank, drain bank, full-sum mask, R-word output stream |
| `kraken_top` | all of the above, three AXI-Stream ports and event pulses |

All block-to-block links are valid/ready streams. A beat moves when both
valid and ready are high.

### Configuration travels with the data

There is no central controller. Each X^ packet (pixels) and each K^ packet
(kernel) starts with a 64-bit header. The bit layout below is this design's
choice.

| bits | field |
|---|---|
| 3:0 | K_H |
| 7:4 | K_W |
| 10:8 | S_H |
| 13:11 | S_W |
| 25:14 | C_i |
| 28:26 | F |
| 39:29 | W |
| 51:40 | N*L |
| 63:52 | zero |

The pixel shifter uses K_H, S_H, F and C_i. The weights rotator uses all the
fields, W and N*L included, to know how often to replay the kernel. The
rotator attaches a tag to each weight beat:

* first and last beat of a column;
* first and last column of a block;
* last column of the iteration;
* w and w mod S_W;
* K_W and S_W.

The engine and the output pipe act only on these tags. A new layer therefore
takes effect in each block exactly when its first beat arrives. Layers follow
each other back to back.

### Timing

* **Engine.** One (c_i, k_h) beat per clock. For K_W > 1 there is one extra
  clock per input column, so a column takes C_i*K_H + 1 clocks. The end-to-end
  test checks this: a gap-free iteration of 144 beats over 4 columns takes
  147 clocks from its first to its last multiply. The first column's shift
  clock comes just before the first multiply.
* **Column copy.** `snap_valid` is high one clock after the last beat of a
  column. The engine accepts a column's last beat only while the output pipe's
  capture bank is free. That is the only way the output side can stall the
  array.
* **Output pipe.** One core (R words) per clock. A column copy moves from the
  capture bank to the drain bank as soon as the drain bank sends its last
  marked core.
* **Weights rotator.** The SRAM has a one-clock read latency, which the
  2-entry FIFO hides: a row is read only when the FIFO will have room for it,
  so a full-rate consumer gets one row per clock. The K^ stream must deliver
  C_i*K_H*S_W*C/8 beats within one iteration for the engine not to wait.
* **Pixel shifter.** It needs (R+F)*S_H words per channel every K_H clocks.

### Data formats

* **Pixels and weights** are signed 8-bit.
* **Accumulators and outputs** are 32-bit. No rounding, activation or
  requantisation is applied.
* **DRAM-side beats** are 8 bytes, with a per-byte keep, so a packet can end
  in a partial beat.
* **X^ order:** header, then for each block, column w, channel c_i and
  vertical phase j, the R+F pixels of rows j, j+S_H, ... The rows already
  contain the top and bottom zero padding: row index minus floor((K_H-1)/2)
  of the image.
* **K^ order:** header, then rows (c_i, k_h in tap order, s_w) of C words. In
  that row, core j of group e = j div G at group position g holds
  K[e*S_W + c][c_i][k_h][g - c] with c = (g - s_w) mod S_W, or zero.
* **Y^:** one beat per finished core. Beats come in column order and, within
  a column, lowest core first. `m_y_last` marks the last beat of an
  iteration. Reordering into the next layer's X^ layout is left to the DRAM
  writer.

## Where this RTL departs from the original design

* **Output pipe.** The original has a first bank that shifts along C and a
  multiplexer bank feeding a second bank of R*floor(C/3) words. Here the
  second bank is as large as the first (R*C words), and a priority encoder
  picks the marked cores. This keeps K_W = 1 layers, which finish all C cores
  at once, on the same path. It costs about 14 k more flip-flops (R*(C - floor(C/3))*32) than the
  original bank size.
* **Back-pressure.** The original claims the output side never stalls the
  engine. Here a slow output consumer does stall it, at column ends. The
  end-to-end test exercises this deliberately.
* **Horizontal stride (a property of the dataflow, not a departure).** With
  S_W > 1, output pixels are centred at columns c with
  c = floor(K_W/2) (mod S_W). Equivalently, the windows start at multiples of
  S_W. For K_W = 5 and S_W = 2 the centres are 0, 2, 4, ..., as in the
  original worked example. For K_W = 3 or 7 with S_W = 2 they are 1, 3, 5, ...
  Other padding conventions need the input shifted by one column by the DMA.
* **Fully-connected layers.** An FC layer runs as K = 1 with C_i inputs and
  the R rows carrying R batch items. It must fit in one iteration:
  C_i <= 2048 rows, with 12 bits of C_i in the header. The first two FC
  layers of AlexNet and VGG-16 (C_i = 9216, 25088, 4096) do not fit. Splitting
  C_i and adding partial sums is not built.
* **Not included:**
  * the AXI-4 memory-mapped side (DMA and protocol converters);
  * the DRAM;
  * the transposition of outputs into the next layer's input layout.

  The top exposes the three AXI-Stream ports where those would connect.

## Trust and verification

Every block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

`tb_kraken_top` runs the full-size top (R = 7, C = 96, 2048-row banks, no
parameter overrides). It covers nine iterations:

* K = 3, 5, 7 and 11 at strides 1, 2 and 4;
* a K = 1 layer;
* a fully-connected layer;
* a gap-free rate iteration.

The testbench builds the X^ and K^ packets the way a DMA would and randomises
gaps on both input streams and on the output ready. It checks every output
beat (2170 beats of 7 sums) against a directly computed, zero-padded
convolution. It also counts each mechanism and fails if any never happened:

* shift-accumulate clocks;
* K_W = 1 bypass;
* pixel shifts;
* each shift factor F in {0, 2, 3, 4};
* bank swaps;
* kernel waits;
* output stalls;
* multi-core releases;
* layer switches;
* strided columns;
* FC mode.

It simulates in a few seconds.

Each block testbench has also been run against a copy of its block with one
deliberate bug, such as a wrong group size, a missing TKEEP or an extra
shift, and it fails.

To simulate, for example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/kraken_pkg.sv \
        tb/tb_kraken_top.sv --top-module tb_kraken_top
    ./obj_dir/Vtb_kraken_top

The same works for any `tb/tb_kraken_<block>.sv`.

## Changing the design

* **Array size.** `R`, `C` and `DEPTH` are parameters of `kraken_top`.
* **Shift factors.** The set of F values that get an adapter is `FSET` in
  `kraken_pixel_shifter`. Keep `MAXF` equal to its largest value.
* **Accumulator width.** Set by `WY` in `kraken_pkg`.
* **Header widths.** The field widths in `kraken_pkg` bound the largest layer
  (K <= 15, S <= 7, C_i <= 4095, W <= 2047).
