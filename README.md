# A zero-weight-skipping CNN accelerator in SystemVerilog

This is register-transfer-level SystemVerilog for the convolutional neural
network (CNN) inference accelerator of "FPGA-Based CNN Inference Accelerator
Synthesized from Multi-Threaded C Software". The original was built with
high-level synthesis (HLS) on an Intel Arria 10 SoC. This version is written
by hand from the published description. It keeps that design's structure and
dataflow. Where the description stops, the missing details are filled in
here, and each such choice is marked as this design's own.

The main idea is that **a weight equal to zero should cost no clock cycle**.

- Feature maps are cut into 4×4 tiles. One tile (16 values) is one memory
  word.
- A convolution is computed one output tile at a time. The output tile stays
  in its accumulators until every input channel has been applied
  ("output-stationary").
- A filter is given to the hardware as a list of its *non-zero* weights. Each
  weight comes with its (y, x) position inside the 4×4 weight tile. Zero
  weights are removed offline, before inference.
- Each cycle one weight is multiplied with 16 input values at once. Its
  position chooses which 16 of the 64 values in a 2×2 block of input tiles
  those are.

A filter with n non-zero weights per channel therefore takes n cycles per
channel instead of 9 (for a 3×3 kernel) or 16. The only floor is the four
cycles needed to fetch the four input tiles.

## Contents

1. Number format and tiles
2. The accelerator (one instance)
3. Convolution with zero-weight skipping
4. Padding and max-pooling
5. Host interface: instructions and DMA
6. Memory layout the host must prepare
7. Performance
8. Where this design departs from the paper, and how far to trust it
9. Simulating and changing it

## 1. Number format and tiles

**Values.** A value is a 9-bit sign-magnitude number, `{sign, mag[7:0]}`,
type `cnn_pkg::sm_t`. Weights and activations both use this format.

**Tiles.** A tile `tile_t` holds 16 values. Value X_i, with
i = 4·row + column, is at bits `[9*i +: 9]`, so a tile is 144 bits.

**Feature maps in memory.** A feature map of H×W tiles is stored tile by tile
in row-major order. Tile (y, x) of channel c is at
`base + c·H·W + y·W + x`. A map whose side is not a multiple of 4 occupies
the upper-left part of its last tiles.

**Products and sums.** Products are 17-bit two's complement. The
accumulators are 32 bits wide (`ACC_W`). When an output tile is finished,
its sum goes through three steps:

1. an arithmetic right shift by the instruction's `shift` field;
2. ReLU (negative values become 0);
3. saturation to magnitude 255.

The result is a sign-magnitude value again. The shift stands for the
fixed-point scaling of a reduced-precision network.

## 2. The accelerator (one instance)

`cnn_accelerator` has four *lanes* j = 0..3. Each lane contains:

| block | file | role |
|---|---|---|
| SRAM bank j | `sram_bank.sv` | 16384 tiles. Port A reads, port B writes. 1-cycle read latency |
| weight scratchpad | `weight_scratchpad.sv` | 4096 packed weight words of 57 bits |
| convolution controller | `conv_staging.sv` | convolution half of the data-staging/control unit |
| pad/pool controller | `poolpad_staging.sv` | padding/pooling half of the data-staging/control unit |
| convolution unit j | `conv_unit.sv` | 4 weights × 16 values = 64 multiplies per cycle |
| accumulator j | `accumulator.sv` | one 16-value output tile, for output channel f = j of the current group |
| pool/pad unit j | `pool_pad_unit.sv` (+ 4 × `max_unit.sv`) | streaming padding / max-pooling |
| 2 result queues | `fifo_queue.sv` | accumulator → writer and pool/pad → writer, depth 4 |
| write-to-memory j | `write2mem.sv` | drains both queues into port B of bank j |

Shared by the four lanes:

- `main_controller.sv`: host registers and instruction dispatch.
- `barrier.sv`: end-of-tile synchronisation of the four convolution
  controllers.

One instance performs 4 × 64 = 256 multiply-accumulates per cycle.
`cnn_soc` (the top) holds `NUM_INST = 2` instances, for 512 per cycle. It also
holds one `dma` that moves tiles and weights between system DRAM and the
banks. The two instances are meant to work on different horizontal stripes
of the same layer.

The host CPU, its interconnect, the SDRAM controller and the DRAM are not
part of this RTL. `cnn_soc` exposes their connection points as ports:

- one 32-bit Avalon-MM register slave per instance;
- one register slave for the DMA;
- the DMA's 256-bit Avalon-MM master.

## 3. Convolution with zero-weight skipping

This is the hardest part of the design to follow.

### 3.1 Which lane does what

Input channels are spread over the banks: channel c lives in bank c mod 4.
Output channels are computed four at a time, as a *group* g. Output channel
4g + f is produced by accumulator f and written to bank f, as output plane g.
A convolution's output is therefore already spread over the banks the way
the next layer's input must be.

For each output tile position (ty, tx) of group g, the four convolution
controllers work in parallel:

- Controller j goes through the input channels in its own bank, one after the
  other.
- For each channel, it reads the 2×2 block of padded-input tiles A = (ty, tx),
  B = (ty, tx+1), C = (ty+1, tx) and D = (ty+1, tx+1).
- It then streams that channel's packed weight words from its scratchpad, one
  word per cycle.

A **packed word** (`wword_t`) carries one weight for each of the four filters
of the group:

```
{ last, lane[3], lane[2], lane[1], lane[0] }      lane[f] = { valid, w[8:0], off[3:0] }
```

- `off` is the weight's position in the weight tile, 4·wy + wx.
- `valid = 0` means filter f has no weight left for this channel. This can
  happen because the four filters of a group can have different numbers of
  non-zero weights; the shorter ones leave bubbles in the word stream.
- `last` marks the final word of the channel.

Each channel must have at least one word. All four lanes of that word may be
invalid.

### 3.2 Convolution unit (`conv_unit`)

For every lane f and output position p = (r, c), the convolution unit
multiplies w by the input value at (r + wy, c + wx) of the 8×8 window formed
by A B / C D.

In hardware this is a 16-to-1 multiplexer per output value, whose select is
the weight's offset, followed by one multiplier. Sixty-four such pairs make
up one unit. The products are registered once, so the unit has one cycle of
latency. Its output is 4 × 16 products (`prod_tile_t [3:0]`) plus a
registered end-of-tile marker that carries the output address.

### 3.3 Accumulator (`accumulator`)

Accumulator f adds the lane-f products of **all four** convolution units into
its 16 sums, because every input channel contributes to every output.

When the barrier opens, the accumulator does three things in the same cycle:

- it pushes the finished tile (shifted, ReLU, saturated) into its result
  queue;
- it clears its sums;
- it keeps accepting products, so the next tile position can start
  immediately.

### 3.4 Barrier (`barrier`)

Different lanes finish a tile position at different times, because their
channels have different numbers of non-zero weights. Each lane signals
arrival with the end-of-tile marker that leaves its convolution unit, so by
then all of that lane's products have reached the accumulators.

`release` rises in the cycle the last lane arrives. It is combinational from
that arrival, which means no cycle is lost. It then clears all arrival flags.

### 3.5 The controller's timing (`conv_staging`)

A channel needs four tile reads, and the bank gives one tile per cycle. While
one channel's weights are applied, the next channel's four tiles are read
into a second buffer. When the current channel ends, the buffers swap. The
fourth tile is still arriving from the bank at that moment, so it is
forwarded directly into the working buffer.

The result is that a channel with n words takes at most **max(4, n)
cycles**. It can take fewer (but never fewer than n) when its tiles were
already loaded while an earlier, longer channel ran. The
largest possible saving from skipping zeros is therefore (16 − 4)/16 = 75 %
of the cycles.

For a tile position the loop is:

```
for group g: for ty: for tx:
    for each channel c in this bank:       max(4, words(c)) cycles
    wait for the barrier                   (0 .. slowest lane's lead)
```

The loader keeps its own tile-position counter and runs ahead of the
applier. While the last channel of a position is being applied, it already
loads the first channel of the next position. After the last word of a
position, the controller also fetches the next position's first weight word
while it waits at the barrier. It injects nothing new until the barrier has
opened, because the accumulators must be flushed first.

The weight stream of a group is read from the scratchpad in sequence. It
restarts at the group's first word for every tile position. The next group's
words follow directly after.

Each controller counts three things:

- words injected (`n_apply`);
- cycles stalled waiting for tiles (`n_stall`);
- cycles spent waiting at the barrier (`n_bar_wait`).

## 4. Padding and max-pooling

A pool/pad unit takes one input tile and one micro-instruction (`ppop_t`)
per cycle:

```
{ max_sel[3:0][15:0], upd[15:0], src[15:0][1:0], clear, emit }
```

Its steps are:

1. MAX unit k returns the largest of the input values chosen by the mask
   `max_sel[k]`. The comparison is signed. An empty mask gives +0.
2. Output value p is replaced by MAX output `src[p]` if `upd[p]` is set.
   Otherwise it keeps its old value.
3. `clear` first sets the output tile to zero.
4. `emit` sends the finished tile, with its address, to the result queue.

Padding is the same unit with one-value masks: each MAX unit "finds the
maximum" of a single value, which copies it.

`poolpad_staging` generates two micro-instruction sequences.

**Max-pool 2×2, stride 2** (`OP_POOL`):

- Output tile (oy, ox) covers input tiles (2oy..2oy+1, 2ox..2ox+1).
- Each input tile fills one quadrant of the output, so there are 4 ops per
  output tile.
- In the op for quadrant (qy, qx), MAX unit k takes window k of the input
  tile.
- Input tiles beyond the edge of the map (odd tile counts, as for 14×14 →
  7×7) are not read. Their quadrant stays zero.

**Zero padding by P = 0..3 pixels** (`OP_PAD`):

- Output row r of an output tile gets its values from at most two
  neighbouring input tiles, one per "half". That makes 8 ops per tile, one
  per (row, half).
- MAX unit k copies the value for output column k.
- Positions outside the input, as given by the pixel size `ifm_hpx × ifm_wpx`,
  keep the zero from `clear`.

## 5. Host interface: instructions and DMA

### 5.1 Accelerator registers (`main_controller`)

Each instance has 32-bit registers with read latency 0:

| addr | name | meaning |
|---|---|---|
| 0 | CTRL | write bit 0 = start. Read: bit 0 busy, bit 1 done |
| 1 | OP | 0 nop, 1 convolution, 2 max-pool 2×2/2, 3 pad |
| 2 | IFM_ADDR | first tile of input channel 0 in every bank |
| 3, 4 | IFM_H, IFM_W | input size in tiles (for convolution: the padded input) |
| 5, 6 | IFM_HPX, IFM_WPX | input size in pixels (padding) |
| 7 | DEPTH | input channels **per bank** |
| 8 | OFM_ADDR | first tile of output plane 0 in every bank |
| 9, 10 | OFM_H, OFM_W | output size in tiles |
| 11 | GROUPS | convolution: number of groups of 4 output channels |
| 12 | WT_ADDR | convolution: first packed word in every scratchpad |
| 13 | SHIFT | convolution: right shift before ReLU/saturation |
| 14 | PAD | padding: pixels added on each side |
| 15 | CYCLES | read only: clock cycles taken by the last instruction |

**Running an instruction.**

1. The host writes the fields, then writes start.
2. The controller sends the instruction to all four convolution controllers,
   or to all four pad/pool controllers.
3. It waits until those controllers, the accumulators, the queues and the
   writers have all been quiet for four cycles.
4. It sets *done*.

Banks and scratchpads are only open to the DMA while the instance is idle.

### 5.2 DMA (`dma`)

The DMA has one 256-bit Avalon-MM master and moves one bank word per bus
beat. A tile occupies bits 143:0 of the beat and a weight word bits 56:0.
The other bits are written as zero.

Its registers are:

| addr | name | meaning |
|---|---|---|
| 0 | CTRL | write bit 0 = start. Read: bit 0 busy, bit 1 done |
| 1 | DRAM | byte address, 32-byte aligned. It advances 32 per word |
| 2 | TARGET | bits 2:0: bank 0..3 or scratchpad 4..7. Bits 7:3: instance |
| 3 | LOCAL | first word address in the bank or scratchpad |
| 4 | COUNT | number of words |
| 5 | DIR | 0: DRAM → FPGA, 1: FPGA → DRAM |

The DMA has one transfer outstanding at a time. It honours `waitrequest`, and
on reads it waits for `readdatavalid`.

## 6. Memory layout the host must prepare

The accelerator sees only tile addresses. The host (software) is responsible
for the following:

- **Convolution input.** The input must already be padded and be **one tile
  larger than the output in each direction**, because the 2×2 tile block of
  the last output tile reaches one tile further. For a 3×3 "same"
  convolution, run `OP_PAD` with PAD = 1 into a region of
  (T+1)×(T+1) tiles first, where T is the output size in tiles. The tiles
  beyond the padded map must be zero; `OP_PAD` writes them as zero.
- **Weights.** For each group g, then each channel in bank j (in bank order),
  write that channel's packed words. Each filter's 3×3 kernel lies at offsets
  (wy, wx) ∈ {0..2}², so the output at (y, x) is
  Σ w(wy,wx) · in_padded(y+wy, x+wx). The weights of bank j go into
  scratchpad j.
- **Channel counts.** Every bank needs the same number of channels. A layer
  with 3 input channels (an RGB image) gets a fourth channel of zeros, with
  one all-invalid word per group.
- **Bias.** Biases are not applied. A bias would have to be folded in by the
  host, or added as a constant channel.
- **Striping.** A layer that does not fit in the banks is cut into horizontal
  stripes of output tile rows, with a one-tile-row overlap of input. The two
  instances take different stripes.

With the default sizes, a bank holds 16384 tiles. A 224×224 layer with 64
channels needs 16 × 56 × 56 = 50176 output tiles per bank, so most VGG-16
layers need 2–12 stripes. The later 28×28 and 14×14 layers fit whole.
Separately, a scratchpad holds 4096 words. An unpruned 512-channel layer with
3×3 kernels needs 9 × 128 = 1152 words per group in each scratchpad, so only
3 groups of 4 outputs fit at a time. The host runs such a layer as a series
of convolution instructions with different `GROUPS`, `WT_ADDR` and
`OFM_ADDR`.

## 7. Performance

| configuration | multiply-accumulates per cycle |
|---|---|
| one instance | 256 |
| `cnn_soc`, two instances | 512 |

The number of cycles per output tile position, per group, is

```
  max over lanes j of  Σ_c max(4, words_j(c))   +  about 3
```

The "about 3" comes from the product/end-of-tile pipeline register, the
barrier, and the cycle in which the controller leaves its barrier wait.

For an unpruned 3×3 layer with C input channels, the efficiency is
9·C/4 ÷ (9·C/4 + 3):

| layer type | efficiency |
|---|---|
| 64-channel | 98 % |
| 512-channel | > 99 % |
| first layer | 75 %. It has 1 channel per bank (3 channels padded to 4), so the fixed cost weighs more |

Zero skipping shortens a channel from 9 cycles to as few as 4, a speed-up of
at most 2.25× for 3×3 kernels.

The end-to-end test measures this. For example, a layer with 8 input and 8
output channels on 8×8 pixels, whose filters keep 10–90 % of their weights
(one channel pruned away completely), takes 161 cycles, against 140 for the
ideal count of max(4, words) per channel.

## 8. Where this design departs from the paper, and how far to trust it

**Follows the paper:**

- Four lanes of data-staging/control, convolution, accumulator, pool/pad and
  write-to-memory units around four dual-port banks (reads on one port,
  writes on the other), plus a main controller.
- 4×4 tiles stored in row-major order; one tile read per cycle.
- Sign-magnitude values with 8-bit magnitude.
- 4 filters × 16 values per convolution unit per cycle, selected by the
  weight's offset in the tile.
- Packed non-zero weights with offsets, read into a scratchpad.
- Preloading of the next input tiles, giving a 4-cycle floor per channel.
- Barrier synchronisation at every output tile position.
- A pool/pad unit with 4 MAX units and 16 output multiplexers that can keep
  the old value.
- Splitting the control unit into a convolution controller and a pad/pool
  controller.
- Two instances (512 MACs/cycle) and a DMA on a 256-bit bus.

**Choices of this design** (the paper does not give them):

- The bank depth (16384) and the scratchpad depth (4096).
- The packed-word format.
- The register maps.
- The instruction fields beyond type, addresses, size and depth.
- The loop order.
- Where ReLU and rescaling happen: in the accumulator's output stage.
- The 32-bit accumulators.
- The micro-instruction encoding and the two sequences the pad/pool
  controller generates.
- The DMA's inner workings.
- The rule that OFM 4g+f goes to bank f.

**Known differences:**

- **Accumulate location.** The paper's figure draws the accumulating adder
  inside the convolution unit. Here the convolution unit only multiplies, and
  all accumulation is in the accumulator units. The arithmetic is the same.
- **Queues.** The paper connects every pair of units through FIFO queues.
  Here only the two result paths into each write-to-memory unit are FIFOs.
  The controller → compute paths are direct, registered connections, because
  the compute units accept an input every cycle.
- **Overhead per tile position.** The barrier costs about 3 cycles per tile
  position, as measured in simulation. The paper reports throughput within about 10 % of ideal for
  unpruned VGG-16 but gives no cycle-level data, so this cannot be compared
  exactly.
- **Pooling and padding patterns.** Only the 2×2/stride-2 max-pool and zero
  padding of up to 3 pixels are generated. The pool/pad unit itself can do
  other windows, given other micro-instruction sequences.
- **Not built:** fully connected layers, biases, and the HPS side (CPU,
  interconnect, SDRAM controller). The paper's HLS-specific variants
  (16-unopt, 256-unopt) are not built either. 256-opt corresponds to one
  instance.

**How it was verified.** Every module has a self-checking testbench in
`tb/`. Each compares against a model written independently inside the
testbench, and ends with a line `TB_RESULT checks=N failures=M`.

- The convolution-controller test checks that every tile position takes
  between Σ n and Σ max(4, n) cycles, and that it forwards the landing tile
  (a channel of exactly 4 words).
- The accelerator test compares sparse 8→8-channel convolutions, pooling and
  padding against reference results.
- The top-level test `tb_cnn_soc` runs at the default sizes. It sends both
  instances through DMA in → pad → convolution → pool → DMA out, against a
  behavioural DRAM with random wait states. It checks every output word.
- `tb_vgg_layer` runs the per-layer sequence pad → 3×3 convolution → 2×2
  pool on a 14×14 map (the size of VGG-16's last block) with 32 input and 8
  output channels, once with dense and once with pruned filters. It checks
  every pooled value. The dense convolution takes 2349 cycles against an
  ideal 2304. The pruned one (about 30 % of weights kept) takes 1213 against
  1168, a 1.93× speed-up from zero-skipping.
- It also counts that each mechanism happened at least once: DMA loads and
  stores, DRAM waits, invalid weight lanes (bubbles), channels shorter than 4
  words, barrier waits, ReLU clipping, saturation, and both instances busy at
  once.

The design has not been run on an FPGA, and no timing closure was attempted.

## 9. Simulating and changing it

Every file is plain SystemVerilog-2017. The only shared definitions are in
`rtl/cnn_pkg.sv`. To build and run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/cnn_pkg.sv tb/tb_cnn_soc.sv --top-module tb_cnn_soc -o sim
./obj_dir/sim
```

Replace `tb_cnn_soc` with any other `tb_<module>` to test a single block.
Each testbench stops itself with a watchdog if the design hangs.

Things that are easy to change:

- **Memory sizes.** Change `BANK_DEPTH` / `WT_DEPTH` on `cnn_soc` or
  `cnn_accelerator`. The address widths follow from them.
- **Number of instances.** Change `NUM_INST` on `cnn_soc`.
- **Accumulator width.** Change `ACC_W` in `cnn_pkg`.
- **More pooling shapes.** Add a sequence in `poolpad_staging`. The pool/pad
  unit does not need to change.

The lane count (4), the filters per group (4) and the tile size (4×4) are
built into the packed types and the wiring. They are not parameters.
