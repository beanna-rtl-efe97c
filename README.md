# BEANNA in SystemVerilog: one systolic array for bfloat16 and binary layers

Binarized neural networks keep weights and activations at ±1, which turns a
multiply into an XNOR and a dot product into a popcount. Accuracy holds up
only if the first and last layers stay at high precision. So an accelerator
for such "hybrid" networks has to run both kinds of layer well. BEANNA
(Binary-Enabled Architecture for Neural Network Acceleration, Terrill and Chu)
does this with a single 16x16 weight-stationary systolic array. Every
processing element (PE) holds two arithmetic units:

- a **bfloat16 multiply-add** for the high-precision layers;
- a **16-bit XNOR-add** for the binary layers.

A mode signal picks one of the two. In binary mode each PE consumes 16 binary
inputs per cycle, so the same array acts as a 256x16 binary array.

This repository is an RTL implementation of that architecture: array, PEs,
memories, the three DMA controllers, the activation/normalization units, the
control module and an AXI4-Lite register file. The block structure, the PE,
the dataflow and the sizes the paper states (16x16 array, bfloat16, 16-bit
XNOR, batch up to 256) follow the paper. The paper does not describe
interfaces, memory layouts, register map, rounding or the off-chip port, so
those are this design's own. Each is marked below and in the opening comment
of each file.

## Number formats

**bfloat16** is 1 sign bit, 8 exponent bits (bias 127) and 7 stored mantissa
bits. It has the range of fp32 with a much smaller multiplier. All bf16
arithmetic goes through one unit, `bf16_fma`, which computes `round(a*b + c)`:

- It rounds once, to nearest with ties to even. The 8x8-bit significand
  product is exact. Product and addend are aligned in a 48-bit window, with
  the shifted-out bits folded into a sticky bit.
- Subnormal inputs count as zero, and subnormal results are flushed to a
  signed zero.
- Overflow gives infinity. A NaN input, inf·0 or inf−inf gives the quiet NaN
  `0x7FC0`.

`bf16_fma` is used three times: in every PE; in the accumulators as an adder
(`b = 1.0`); and in the normalization unit as `x*scale + shift`.

**Binary values**: bit 1 means +1 and bit 0 means −1. A 16-bit word carries 16
binary values. The XNOR of two words marks the positions where the two agree.
With `p` such positions, the 16-term dot product is `2p − 16`.

**Partial sums** are 16 bits wide in both modes. In bf16 mode they are bf16
values, rounded at every PE. In binary mode they are 16-bit two's-complement
integers. A 1024-input binary layer stays within ±1024.

## The processing element (`processing_element`)

The PE holds a weight register, the two arithmetic units, a 2:1 multiplexer
and two output flip-flops:

- `act_out` is `act_in` delayed by one cycle, going right.
- `psum_out` is the selected result, one cycle later, going down.

The inputs of the unit that is not selected are forced to zero, so that it
does not toggle. The paper names this as a power optimization. A valid bit
travels with the activation and another with the partial sum. `w_load`
latches a new weight.

## How a layer maps onto the array

This is the central part of the design.

Take a fully connected layer `Y[b][n] = sum_k X[b][k] · W[k][n]` over a batch
of B input vectors. The array holds one **tile** of the weight matrix:
`W[16·kt + r][16·nt + c]` sits in PE(r, c) for bf16, or
`W[256·kt + 16·r + i][16·nt + c]` in bit i of PE(r, c) for binary.

- A **k-tile** is the slice of the input a tile covers: 16 bf16 features or
  256 binary features.
- An **n-tile** is a group of 16 output neurons, one per column.

For one tile (nt, kt), the B input vectors are streamed through the array.
Vector b's word r enters row r. Partial sums start at zero above row 0 and
flow down. Column c then delivers `sum_r X[b][·] W[·][c]` at the bottom.

**Stagger.** The word for row r must arrive one cycle after the word for row
r−1. Only then does it meet the partial sum of the same vector coming down
from the row above. The activation memory does this: row r's output passes
through r extra registers. If row 0 sees vector b at cycle t, column c
delivers its result at cycle `t + 16 + c`. The array testbench checks this
cycle exactly. Each column therefore runs one cycle behind its left
neighbour. The accumulator handles this skew by counting each column's
results on their own: the n-th result of a column belongs to vector n.

**Block matrix multiply.** An n-tile needs every k-tile of the input. The
control module runs the k-tiles one after another:

1. Load tile (nt, kt).
2. Stream all B vectors through the array.
3. The per-column accumulator stores the result (kt = 0) or adds it to what
   it already holds (kt > 0). The add is a bf16 add or an integer add.

After the last k-tile, DMA controller 2 sends the 16×B sums through the
activation/normalization units and into the activations memory. It is laid
out there as the input of the next layer.

## Activation and normalization (`act_norm`)

Each layer output goes through `hardtanh`, which clamps to [−1, 1], and then
through batch normalization. This is the order the paper trained with. At
inference, batch norm reduces to one multiply-add per neuron,
`y = h·scale + shift`, using a table of (scale, shift) pairs per neuron.
After a binary layer the integer sum becomes exactly −1.0, 0 or +1.0 before
normalization. If the next layer is binary, only the sign of y is kept:
bit 1 for y ≥ 0, bit 0 for y < 0. There is one lane per column, with a
latency of two cycles.

## Memories and data layouts

**Activations BRAM** (`activation_bram`) has one memory per array row. Each
memory is split into two halves used ping-pong: layer L reads half `L mod 2`
and writes the other half. This is needed because later n-tiles still read
the input after earlier ones have produced output. A word address is
`{half, tile[5:0], batch entry[7:0]}`, so each half holds 64 tiles × 256
vectors. Row r, tile t holds:

| next layer | content of the word in row r, tile t, entry b |
|---|---|
| bf16   | feature 16t + r of vector b |
| binary | features 256t + 16r … 256t + 16r + 15 of vector b, bit i = feature 256t + 16r + i |

DMA controller 2 writes these two layouts differently:

- A **bf16** n-tile writes one word into every row: column c goes to row c,
  tile nt.
- A **binary** n-tile packs its 16 sign bits into a single word: row
  nt mod 16, tile nt / 16.

Either way, the next layer reads whole k-tiles with one address.

**Weights BRAM** (`weight_bram`) holds one 16x16 tile of 16-bit words. DMA
controller 0 writes it word by word. DMA controller 1 (`dma1`) reads it one
row per cycle and loads the PEs, taking 17 cycles.

**Partial-sum BRAMs** (`psum_accumulator`) hold 256 entries per column.

## A run

Software writes the registers and sets CTRL.start. The control module
(`control`) then works through the steps below, the order the paper gives.
DMA0, DMA1 and DMA2 are DMA controllers 0, 1 and 2.

1. DMA0 loads the input vectors into half 0.
2. For each layer, DMA0 loads the layer's normalization table. Then, for each
   n-tile and each k-tile:
   1. DMA0 loads the weight tile.
   2. DMA1 moves the tile into the PEs.
   3. The batch is streamed through the array and accumulated.
3. After the last k-tile of each n-tile, DMA2 writes that n-tile's outputs.
4. After the last layer, DMA0 stores the last layer's outputs off-chip.

The array mode changes only between layers, when the array is empty.

### Register map (AXI4-Lite, byte addresses)

| addr | name | content |
|---|---|---|
| 0x00 | CTRL | write 1 to bit 0: start (ignored while busy) |
| 0x04 | STATUS | bit 0 busy, bit 1 done (cleared by start) |
| 0x08 | BATCH | vectors, 1..256 |
| 0x0C | NUM_LAYERS | 1..8 |
| 0x10 | IN_TILES | k-tiles of the input vectors |
| 0x14 | IN_ADDR | off-chip word address of the inputs |
| 0x18 | OUT_ADDR | off-chip word address for the results |
| 0x1C | CYCLES | cycles of the last run (read only) |
| 0x40+16i | LAYER i | [6:0] k-tiles, [14:8] n-tiles, [16] binary mode, [17] binary output |
| 0x44+16i | W_ADDR i | weight tiles of layer i |
| 0x48+16i | NORM_ADDR i | scale/shift table of layer i |

### Off-chip memory layout and port

The off-chip port is a 16-bit word port. A request is taken when `valid` and
`ready` are both high. Each read returns one `rsp_valid` word, in order, any
number of cycles later. Writes get no response. The layouts, in off-chip word
addresses:

- **Inputs**: vector b, tile t, row r at `IN_ADDR + (b·IN_TILES + t)·16 + r`.
- **Results**: the same layout from `OUT_ADDR`, with the last layer's n-tiles
  in place of IN_TILES.
- **Weights**: tiles are stored n-tile major. Tile (nt, kt) starts at
  `W_ADDR + (nt·K + kt)·256`, and word (r, c) of the tile is at offset
  `r·16 + c`.
- **Normalization**: neuron n has its scale at `NORM_ADDR + 2n` and its shift
  at `NORM_ADDR + 2n + 1`.

Pad a layer to whole tiles with zero bf16 weights. Binary layers should use
multiples of 256 inputs. A padding bit is not neutral in a binary layer: it
adds ±1 to the sum.

## Sizes, timing and how they compare with the paper

The defaults give 16x16 PEs, batch up to 256, 64 tiles per activation half
and 64 n-tiles of normalization entries. With these, the paper's MNIST
network fits with any batch up to 256, in both its hybrid and its all-bf16
form. The network is 784 → 1024 → 1024 → 1024 → 10, with the hybrid form
running the three hidden layers in binary.

The paper's peak rates are 52.8 and 820 GOps/s at 100 MHz. They correspond
to the array running flat out: 256 bf16 multiply-adds, or 4096 XNOR-adds,
per cycle.

This implementation does **not** reach the paper's inference rates, which
are 409 inferences/s at batch 1 and 20,338/s at batch 256. Here, every weight
tile is fetched through the 16-bit off-chip port (256 cycles), then loaded
(17 cycles), then used, one step after the other. An estimate is about
1.2 M cycles per batch-1 inference and about 2.3 M cycles per batch of 256.
The paper does not describe how it overlaps weight traffic with compute, or
how wide its memory path is. A wider port, or prefetching the next tile into
a second weights buffer, is where a faster version would start.

## Departures from the paper and choices of this design

- The accumulators are read all at once by DMA controller 2. The paper's
  array figure draws them as a chain (ACM1 → ACM2 → …).
- The paper's figures draw 4x4 examples; the RTL uses the 16x16 the text
  gives.
- The FPGA specifics of the paper are not modelled: BRAM primitives, DSP
  slices and the ZCU106 board. The memories are plain arrays that a
  synthesis tool can map to block RAM.
- The following are not given by the paper and were chosen here:
  - accumulating in bf16 (rather than a wider format);
  - bf16 partial sums between PEs;
  - the rounding and subnormal rules;
  - the sign rule sgn(0) = +1;
  - the register map, memory layouts and off-chip port;
  - one weight tile of buffering.

## Files

`rtl/beanna_pkg.sv` holds the shared types. The blocks, bottom-up, are:

- `bf16_fma`
- `bin_xnor_add`
- `processing_element`
- `systolic_array`
- `activation_bram`
- `weight_bram`
- `psum_accumulator`
- `act_norm`
- `dma0`
- `dma1`
- `dma2`
- `axi_regs`
- `control`
- `beanna_top`

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. The helper files
in `tb/` are:

- `bf16_ref_pkg.sv`: reference bf16 arithmetic built from the simulator's
  doubles, independent of the RTL algorithm. It is exact as long as product
  and addend exponents differ by less than about 37, and the tests keep their
  operands in such ranges.
- `offchip_mem.sv`: a memory model with random back-pressure and fixed read
  latency.

`tb_beanna_top` runs the whole accelerator at its default parameters. It
takes a three-layer hybrid network, bf16 32→256 (binarized) → binary 256→32
→ bf16 32→16, over a batch of 5, in about 16,000 cycles. It checks every
result and every intermediate layer-2 value against the reference. It also
checks that each mechanism occurred: mode switches, k-tile accumulation,
binarized and bf16 outputs, hardtanh clamping, memory stalls and the number
of weight tiles.

To simulate a block with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/beanna_pkg.sv tb/bf16_ref_pkg.sv \
    rtl/*.sv tb/offchip_mem.sv tb/tb_beanna_top.sv --top-module tb_beanna_top
./obj_dir/Vtb_beanna_top
```

Replace the testbench and top-module names for another block. Extra source
files that a block does not use are harmless.
