# A multiplication-free, bit-serial CNN accelerator

This is the RTL of a CNN inference engine built on one idea. If every weight is
a signed power of two, then a multiply by a weight is a shift. If data travel
bit-serially, LSB first, then a shift by k is a delay of k clock cycles. So no
systolic cell needs a multiplier. A cell picks the stream delayed by the right
number of cycles and adds it, bit by bit, to the partial sum passing through.
That cell is called a Selector-Accumulator (SAC). It is one multiplexer, two
full adders and a few flip-flops. This lets a 128 × 64 array of them fit where
only a much smaller multiply-accumulate array would.

The design follows the accelerator in "Full-stack Optimization for Accelerating
CNNs with FPGA Validation" (Kung, McDanel, Zhang, Dong, Chen). That paper
co-designs the network, its quantisation and the hardware. The networks are
shallow stacks of "shift + 1×1 convolution + batch-norm + ReLU" layers. Their
sparse weights are packed by *column combining*, so that up to 8 input
channels share one array column. The RTL here is an independent
implementation. Where the paper gives a block's inside, it is followed. Where
the paper only names a block or gives its function, the simplest circuit that
does the job was chosen. The section "Departures and limits" lists those
choices.

The default configuration is the paper's FPGA one:

| parameter | default | meaning |
|---|---|---|
| `ROWS` | 128 | array rows = filters computed at once (one weight tile) |
| `COLS` | 64 | array columns; each carries 8 input channels (512 lanes) |
| `ACC_W` | 32 | bits per bit-serial word (accumulator width) |
| `DEPTH` | 4096 | bytes per data-buffer bank (this design's choice) |
| `LANES`, `DW`, `NSHIFT`, `FRAC` | 8, 8, 7, 6 | channels per column, data bits, weight levels, fraction bits |

## Numbers

**Data** are unsigned 8-bit activations. Each one travels as a 32-bit
two's-complement word, LSB first, one bit per clock. Bits 8 to 31 are zero on
input, which leaves room for the shifts and the sums.

**Weights** take one of 15 values: 0, or ±2^-6 … ±2^0. Each weight is packed
with the channel it applies to in one byte (`accel_pkg::wcode_t`):

```
  [7:5] idx   which of the column's 8 channels this cell uses
  [4]   sign  1 = positive, 0 = negative
  [3:0] mag   0 = zero weight; k = 1..7 means 2^(k-7); 8..15 are treated as zero
```

**Scale.** A product x·2^(k-7) is formed as x·2^(k-1), a left shift by k-1.
Every partial sum therefore carries a factor 2^6 (`FRAC`). Biases must be
given in that same scale, and the quantiser removes it with an arithmetic
shift right by 6. A 32-bit word holds 8 data bits, 6 shift bits and the
growth from summing 64 columns and a bias with a wide margin. The controller
asserts `ACC_W >= DW + NSHIFT + 1` at elaboration time.

## The SAC cell and the shared register chain

Each array column has one register chain (`register_chain`). The column's
input bundle enters at tap 0, and tap k is that bundle k cycles later. The
bundle (`lane_t`) holds:
- one data bit for each of the 8 channels;
- one zero flag per channel, which says that channel's whole word is zero;
- a `start` flag that marks bit 0 of a word.

Row r of the array reads taps r … r+6 of every column chain. Its taps are
offset by r because row r sees every word r cycles later than row 0.

A SAC cell (`sac_cell`) holds one packed weight:
- **Selector.** `z = win[mag-1].d[idx]`. It picks the chain tap that applies
  the weight's shift, and within it the channel named by `idx`.
- **Accumulator** (`sac_acc`). A serial two's-complement negator, controlled
  by the sign, feeds a serial full adder. The adder adds `z` to the partial-sum
  bit `y_in` from the left neighbour. Both carries reset on the `start` bit of
  a word, and the sum bit is registered. So the cell passes the word one cycle
  later with `±x·2^(mag-1)` added.

A word's low bits arrive at the cell before its high bits. A tap k stages up
the chain therefore gives the word multiplied by 2^k, with zeros shifted in
from the previous word's high bits. Those high bits are always zero, because
inputs use only bits 0..7.

### Zero-skipping

A cell does nothing useful if its weight is zero or its selected input word
is zero. In either case its accumulator is frozen by a clock enable, and the
partial sum is forwarded through a one-bit bypass register instead. An output
multiplexer, driven by a registered copy of the skip decision, chooses between
that register and the accumulator. The total delay stays one cycle either way.

The skip decision is made once per word, from the zero flag that travels with
the word's `start` bit. It then holds for the word's 32 cycles. `cell_active`
reports, for every cell and cycle, whether it is computing. On the FPGA the
paper gates the clock. Here the gated clock is a clock enable, which has the
same effect on the logic.

## Array timing

```
 column c input is skewed by c cycles (done by the channel shifter)
 word issued by the controller at T
   -> bit 0 at column c's chain input        T + 2 + c
   -> bit 0 at cell (r, c)                   T + 2 + c + r
   -> bit 0 leaves row r at the right edge   T + 2 + COLS + r
```

The bias of row r enters as a serial stream at the row's left end. It starts
when the word's `start` flag reaches tap r of column 0 (`bias_start`). That
stream comes from the row's `bias_shifter`, which reloads its 32-bit bias from
the parameter buffer at every weight load.

A new word enters every `ACC_W` = 32 cycles, so the array finishes one output
pixel of all 128 filters every 32 cycles. A tile with P output pixels takes
P·32 cycles of issue plus a fixed drain. That drain covers the skew across the
columns and rows, the word length and the output pipeline. Its length is
`COLS + ROWS + ACC_W + 8`.

## Around the array

**Channel shifter** (`channel_shifter`). Every layer starts with a *shift*: each
input channel moves by one pixel in its own direction: none, up, down, left
or right (`shdir_e`). This lets a 1×1 convolution see neighbouring pixels.
For each output pixel the controller issues its input coordinates, doubled for
a stride-2 layer. The block gives each of the 512 banks the address of the
centre pixel or of the neighbour its direction selects, and uses 0 for a
neighbour outside the map. It loads the returned bytes into parallel-to-serial
registers and sets the zero flags. It then delays column c by c cycles.
Directions are written per column, three bits per lane.

Which banks feed a column depends on the layer's column grouping g, the
number of input channels combined into one column (8, 4, 2 or 1). The
instruction's `col_split` field holds log2(8/g). Lane l of column c reads bank
c·g + l when l < g. Its other lanes carry a zero, which their cells skip. A
layer with C input channels and grouping g therefore uses ceil(C/g) columns,
and its weights are packed with the same c·g + l order.

**ReLU & quantisation** (`relu_quant`, one per row). It collects the row's
32-bit result, shifts it right by 6 (arithmetic, truncating) and clips it to
0…255. A negative value becomes 0, which is the ReLU. The 8-bit result is
written back to the data buffer.

**Output accumulator** (`output_accumulator`, one per row). It is used only in
the final linear layer. Global average pooling is folded into that layer's
weights, so a class score is the sum of a row's results over all pixels. The
unit adds each finished 32-bit word to a running sum. The sums appear on
`score` when `score_valid` pulses. Biases are added once per pixel, so the
host should load bias/P for a P-pixel map.

**Batch normalisation** needs no hardware of its own. Training quantises its
scale to a power of two as well, so after training the scale is folded into
the power-of-two weights (they stay powers of two) and the offset into the
bias.

## Memories

**Data buffer** (`data_buffer`, `buffer_bank`). There are two halves, and each
has 512 one-byte-wide banks of `DEPTH` bytes. One half holds the current
layer's input and is read by the channel shifter. The other half receives that
layer's output from the quantisers. The halves swap (`cur`) after a layer's
last tile, so a layer's output becomes the next layer's input without leaving
the chip.

A map of C channels and H×W pixels is stored as follows. Channel ch goes to
bank ch mod 512 at address (ch div 512)·H·W + pixel, with pixels in raster
order. When a tile writes its 128 output channels, it uses bank group
(tile mod 4) and the address block (tile div 4). While busy is low, the host
can write either half's input side (`raw_*`, `img_*`) and read it (`hr_*`).

**Parameter buffer** (`parameter_buffer`) holds one tile:
- 128 rows of 64 packed weights;
- 128 biases;
- 512 shift directions.

The host writes it through `pb_*`, one weight row, one bias or one column's
directions per cycle. The host may write the next tile's parameters while the
array multiplies with the current one, because the array holds its own copy of
the weights.

## Input reshaping

An RGB image has only 3 channels, which would leave most of the 512 lanes
idle in the first layer. The input reshaper (`input_reshaper`) maps an
image pixel (y, x) of colour c to a channel and a pixel of a smaller map:
- Each F×F block of pixels is split into F² groups. The group is
  g = (y mod F)·F + (x mod F), and the channel is g·3 + c.
- The new pixel index is (y div F)·(W/F) + (x div F).

So a 3×224×224 image becomes 48×56×56 with F = 4, and a 3×8×8 image becomes
12×4×4 with F = 2. The host writes the image pixel by pixel through `img_*`,
with F = 2^`img_log2f`.

## Instructions and control

`accel_controller` executes one instruction at a time, with a valid/ready
handshake. The layout of `accel_pkg::instr_t` is:

```
 [0] load     load the parameter buffer's tile into the array
 [1] matmul   multiply the input map by the loaded tile
 [2] strided  stride 2 (read (2h, 2w); output size rounded up)
 [3] linear   final fully connected layer: accumulate, no write-back
 [10:4]  sa_w    columns used - 1
 [17:11] sa_h    rows used - 1
 [25:18] in_w    input width - 1
 [33:26] in_h    input height - 1
 [34]    last_tile   last tile of the layer: swap buffer halves afterwards
 [36:35] col_split   log2(8/g): channels per column g = 8, 4, 2 or 1
```

A layer with f filters runs as ceil(f/128) pairs of load and matmul; both bits
may be set in one word. Weights outside the used rows and columns are masked
to zero, so they skip.

Busy times, counted from the cycle `instr_valid` is sampled:
- A load is busy for ROWS + 1 cycles.
- A matrix multiply is busy for P·ACC_W + COLS + ROWS + ACC_W + 12 cycles.

A network therefore runs as follows:
1. Write the image, through `img_*` (reshaped) or `raw_*`.
2. For every layer and tile, write the parameters, then issue load+matmul.
   Set `last_tile` on the layer's final tile.
3. For the last layer, set `linear` and read `score`.

## What fits

Per layer, the built array takes:
- at most 64 columns, that is ceil(C/g) ≤ 64 for C input channels combined g
  to a column, so at most 512 input channels, in one block;
- any number of filters, 128 at a time;
- maps up to `DEPTH` bytes per channel block.

For the paper's networks this means:
- **ImageNet-Small/56.** The input is reshaped to 48×56×56. All 18
  convolution layers fit. The widest layers need exactly 64 columns, and the
  largest map is 56·56 = 3136 bytes per bank.
- **CIFAR-10.** All convolution layers fit.
- **ImageNet-Small/224.** Its 224×224 maps exceed the bank depth chosen here.
- **ImageNet-Large/56.** It needs 128 columns in several layers, and more than
  512 input channels.
- **The fully connected layers** (1024 or 4096 inputs) need more than 64
  columns. This design has no horizontal tiling, so they cannot run. The
  linear mode works for layers of up to 512 inputs.

## Departures and limits

- **Throughput.** One pixel is issued per 32-cycle word. The ImageNet-Small/56
  convolution layers take about 1.06 M cycles, which is 6.3 ms at 170 MHz. The
  paper reports 2.28 ms per image. It does not say how its FPGA closes this
  gap, for example by shorter words or by overlapping them.
- **The sign encoding** (1 = positive) and the magnitude code are taken from the
  paper's worked example. The `start` flag and zero flags in the lane bundle
  are this design's way of marking words and zero inputs.
- **Zero-skipping** uses a clock enable rather than a gated clock.
- **Quantisation** truncates the 6 fraction bits; the paper does not state a
  rounding mode.
- **The host interfaces** (`pb_*`, `img_*`, `raw_*`, `hr_*`) stand in for the
  off-chip DRAM and its transfers, which are not modelled. The bank depth,
  the memory layout, the `last_tile` and `col_split` bits and the "size − 1" fields are this
  design's own choices.
- **No horizontal tiling**, so no layer with more than 512 input channels. The
  paper implies tiles of that kind exist but does not describe them.
- The paper prints a 128×128 array in one figure. The main configuration and
  the defaults here are 128×64.

## Files

`rtl/`, one unit per file:

| file | unit |
|---|---|
| `accel_pkg.sv` | widths, weight code, lane bundle, instruction word, enums |
| `sac_acc.sv`, `sac_cell.sv` | serial accumulator; Selector-Accumulator cell with zero-skipping |
| `register_chain.sv`, `systolic_array.sv` | column tap chain; ROWS × COLS array |
| `bias_shifter.sv`, `channel_shifter.sv` | per-row bias stream; shift, serialise, skew |
| `relu_quant.sv`, `output_accumulator.sv` | per-row output units |
| `buffer_bank.sv`, `data_buffer.sv`, `parameter_buffer.sv` | memories |
| `input_reshaper.sv`, `accel_controller.sv`, `accel_top.sv` | reshaping, control, top |

Each file in `tb/` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.
- There is one testbench per unit.
- `tb_accel_top` runs a three-layer network end to end on an 8 × 4 array:
  - a reshaped image;
  - two vertical tiles;
  - a stride-2 layer using every shift direction;
  - a linear layer.

  It checks every output byte and score against an integer model, and checks
  the multiply latency. It also counts how often each mechanism occurs:
  skipping, clipping, buffer swaps, and parameter writes during a multiply.
- `tb_accel_full` runs the same kind of check on the full 128 × 64 array at
  default parameters. It uses all 512 lanes, two tiles of a stride-2 layer,
  and a linear layer.

To simulate with Verilator 5, give the package first and every other file
once:

```
verilator --binary --timing rtl/accel_pkg.sv $(ls rtl/*.sv | grep -v accel_pkg) \
          tb/tb_accel_top.sv --top-module tb_accel_top -o sim && obj_dir/sim
```

The full-size testbench takes several minutes to compile, because it
elaborates 8192 SAC cells.
