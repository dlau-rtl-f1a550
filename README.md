# DLAU: a tiled, pipelined accelerator for fully connected neural-network layers

DLAU speeds up the matrix-vector product at the heart of deep neural networks:
one fully connected layer, `y[n][j] = f( sum_i w[i][j] * x[n][i] )`, for a batch
of input vectors `x[n]`. Profiling in the original DLAU paper (Wang et al., "DLAU: A
Scalable Deep Learning Accelerator Unit on FPGA") puts about 98–99 % of the run
time of feed-forward, RBM and back-propagation in this product, and most of the
rest in the activation function.

The main idea is **tiling**. The datapath only handles `TILE` input neurons at a
time (32 by default). The inputs of a layer are cut into tiles of `TILE`
neurons. For each tile the accelerator computes, for every output neuron, a
partial dot product (a *Part Sum*). A second unit adds up the Part Sums of all
tiles. The hardware cost therefore depends on the tile size, not on the layer
size, and one datapath serves layers of any width.

This repository gives synthesizable SystemVerilog for the accelerator, for its
DMA engine and for its AXI4-Lite control slave, plus self-checking testbenches.
It is an independent implementation. The paper describes the units at block
level; every detail it leaves open was decided here, and the
[departures](#where-this-rtl-departs-from-or-adds-to-the-paper) are listed below.

## Data flow

```
            AXI4-Lite (host)                       memory (DDR via interconnect)
                  |                                   ^            |
             dlau_ctrl ---- sizes, start, tables      | results    | weights, nodes
                  |                                   |            v
                  +------------------------------> dlau_dma ---------+
                                                      ^              |
                                                      |            [FIFO]
   [FIFO] <- AFAU <- [FIFO][FIFO] <- PSAU <- [FIFO][FIFO] <- TMMU <- [FIFO]
     |                                                                 
     +--> dlau_dma (write back)
```

Three processing units form a stream pipeline:

| unit | job | rate |
|------|-----|------|
| **TMMU**, Tiled Matrix Multiplication Unit (`tmmu`) | holds the weight matrix; produces one Part Sum (a TILE-wide dot product) per cycle | 1 Part Sum / cycle |
| **PSAU**, Part Sum Accumulation Unit (`psau`) | adds the Part Sums of all tiles for each output neuron | 1 Part Sum / cycle |
| **AFAU**, Activation Function Acceleration Unit (`afau`) | piecewise linear sigmoid | 1 value / cycle |

Every unit has an input FIFO and an output FIFO (`dlau_fifo`, 16 words). They
absorb short differences in rate, so no data is lost. All links use a
valid/ready handshake in the style of AXI-Stream. A word moves when both
signals are high at a rising clock edge. Every unit stalls its whole pipeline
while its output is refused.

All data are IEEE-754 single precision (`fp32_t` in `dlau_pkg`). The paper says
the adders and multipliers are floating point. `fp_mul` and `fp_add` are
single-cycle combinational units. They round to nearest even and flush
subnormals to zero.

## How a layer is laid out and processed

The host writes one contiguous input stream to memory, starting at word
address `SRC`:

1. the weights, row by row: `w[0][0..no-1], w[1][0..no-1], …, w[ni-1][0..no-1]`;
2. the node vectors, one after the other: `x[0][0..ni-1], …, x[batch-1][0..ni-1]`.

The results come back to `DST` as `y[0][0..no-1], y[1][0..no-1], …`, i.e.
`batch*no` words.

Because the results of vector `n` come out in the same order as the node
values of vector `n` go in, layers chain without copying. Place the next
layer's weights at `SRC2`. Run the current layer with `DST = SRC2 + ni2*no2`.
Its outputs then sit exactly where the next layer expects its node vectors,
and the next run uses `SRC = SRC2`. This is how the paper reuses the output
neurons of one layer as the input neurons of the next.

The DMA streams the whole input into the TMMU. Processing follows the loop
nest of the paper's Algorithm 1 (vector `n`, tile `k`, output neuron `j`, tile
lane `i`). The innermost loop over the TILE lanes runs in parallel, and the
loop over `j` runs at one step per cycle:

```
for n in 0..batch-1                      (one node vector)
  for k in 0..ceil(ni/TILE)-1            (one tile: TMMU register set)
    for j in 0..no-1                     (one cycle each)
      PartSum = sum_{lanes l} w[k*TILE+l][j] * x[n][k*TILE+l]     -- TMMU
      acc[j]  = (k == 0) ? PartSum : acc[j] + PartSum             -- PSAU
      if k is the last tile: emit sigmoid(acc[j])                 -- AFAU
```

## TMMU: weight banks, Reg_a/Reg_b and the adder tree

This unit holds most of the design, and most of its area.

**Weight banks.** The TMMU has `TILE` separate weight memories (BRAMs). Weight
row `i` goes to bank `i % TILE`, as the paper prescribes. Inside a bank, row `i`
column `j` is stored at address `(i / TILE) * no + j`. One address, applied to
all banks at once, therefore returns the `TILE` weights that tile `k` needs for
output neuron `j`. The whole matrix is loaded once at the start of a run, at one
word per cycle, and is then reused for every vector of the batch. The capacity
rule is `ceil(ni/TILE) * no <= WDEPTH`. With the default `WDEPTH = 2048`, a
256×256 layer fills the banks exactly.

**Node registers.** The node values of one tile sit in one of two register
sets, Reg_a and Reg_b. The TMMU multiplies one set against the weights of all
`no` output neurons, taking `no` cycles. Meanwhile it reads the next tile's
values from the input FIFO into the other set, one value per cycle. A full flag
per set hands the sets back and forth. This keeps the pipeline busy as long as
`no >= TILE`. With fewer output neurons, the unit waits for the next tile to
arrive. A last tile with fewer than `TILE` inputs is allowed: the lanes beyond
`ni` are forced to a product of zero.

**Pipeline.** The pipeline has `2 + log2(TILE)` stages, 7 for TILE = 32:

1. bank read, with the node values of the active set copied alongside;
2. `TILE` multipliers;
3. one stage per level of a binary adder tree (16, 8, 4, 2, 1 adders for TILE = 32).

The tree is stored in heap order (`tree[0]` is the root and the leaves are
`tree[TILE-1 .. 2*TILE-2]`), so every level is one register rank. The adder
tree sums in a different order than a sequential loop would. Results can
therefore differ from a sequential float reference in the last bits. The
testbenches compare with a tolerance.

## PSAU: accumulation in one memory

The PSAU reads the stored sum of neuron `j` from its accumulator memory (1024
words by default, so `no <= 1024`). It adds the incoming Part Sum and writes the
sum back. In the last tile round it also sends the sum on to the AFAU. For the
first tile the stored value is ignored, so the memory never needs clearing.
The unit knows `j`, the tile number and the vector number by counting from the
sizes given at start; the stream carries no tags. When `no = 1`, the same
neuron comes back in the very next cycle, before its write has landed. A bypass
register then supplies the sum instead. Latency is 2 cycles, at one Part Sum
per cycle.

## AFAU: the piecewise linear sigmoid

The AFAU evaluates the paper's Eq. (1):

| input | output |
|-------|--------|
| `x <= -8` | 0 |
| `-8 < x <= 0` | `1 + a[m]*x - b[m]`, with `m = floor(-x/k)` |
| `0 < x <= 8` | `a[m]*x + b[m]`, with `m = floor(x/k)` |
| `x > 8` | 1 |

Only the positive half needs tables, because `1 - sigmoid(|x|) = sigmoid(x)`.
The unit computes `t = a[m]*|x| + b[m]` and returns `t` or `1 - t`. The slopes
`a` and intercepts `b` live in two small memories that the host loads through
the control slave. Their contents are not fixed in hardware. The testbenches
load the chords of the sigmoid over each segment:
`a[m] = (s((m+1)k) - s(mk)) / k` and `b[m] = s(mk) - a[m]*m*k`. With these
tables the chord error is at most about k²/8 · max|s''| ≈ 0.003; the
testbenches require 0.01.

The segment width is `k = 2^-KSHIFT`, with default `k = 0.5` and `NSEG = 16`
segments, so 0..8 is covered. The index is computed directly from the float's
exponent and mantissa. `x = 8` uses the last segment. Both +0 and -0 take the
`x <= 0` line. The pipeline has 3 stages and delivers one value per cycle.

## DMA and the memory port

`dlau_dma` has a read engine and a write engine. After start, the read engine
requests `rd_len = ni*no + batch*ni` words in order from `SRC`. The write engine
writes the result stream, `wr_len = batch*no` words, from `DST`.

The memory port is a plain word-addressed interface (`mem_rd_*`, `mem_rsp_*`,
`mem_wr_*` on `dlau_top`):

- a read request moves on valid and ready;
- the data comes back in order, any number of cycles later, on `mem_rsp_valid`;
- a response cannot be refused.

A read buffer of `FIFO_DEPTH` words receives the responses. A request is issued
only while that buffer has room for every outstanding response. With a memory
latency below 16 cycles, reads therefore run at one word per cycle.
In the original system this port sits behind an AXI interconnect and a DDR3
controller, which are not part of this RTL. A bridge to AXI4 would be needed
there.

## Control registers

`dlau_ctrl` is an AXI4-Lite slave with 32-bit data. The address and data
channels of a write are taken together. Responses are always OKAY.

| byte address | name | meaning |
|------|------|---------|
| 0x00 | CTRL | write bit 0 = 1: start (ignored while busy). Read: bit 0 busy, bit 1 done |
| 0x04 | NI | input neurons (16 bits) |
| 0x08 | NO | output neurons (16 bits) |
| 0x0C | BATCH | number of node vectors |
| 0x10 | SRC | word address of the input stream |
| 0x14 | DST | word address of the results |
| 0x18 | TBL_ADDR | AFAU table index (bits 7:0); bit 8 selects table b |
| 0x1C | TBL_DATA | writing stores the word in the selected table and advances the index |
| 0x20 | CYCLES | read only: cycles from start to the last result written |

A run, as the host sees it:

1. Load the 2×16 table words: write TBL_ADDR = 0 and then 16 TBL_DATA words; write TBL_ADDR = 0x100 and then 16 more.
2. Write NI, NO, BATCH, SRC and DST.
3. Write CTRL = 1.
4. Poll CTRL until bit 1 is set.

The tables survive between runs.

## Timing

With a memory that accepts one word per cycle, a run takes about
`ni*no` cycles to load the weights, plus `batch*ceil(ni/TILE)*no` cycles of
Part Sums, plus a fixed latency of a few tens of cycles. Measured in simulation
at batch 4:

| layer | tile | cycles | weight load | Part Sums |
|-------|------|--------|-------------|-----------|
| 64×64 | 32 | 4 665 | 4 096 | 512 |
| 128×128 | 32 | 18 489 | 16 384 | 2 048 |
| 256×256 | 32 | 73 785 | 65 536 | 8 192 |
| 128×128 | 16 | 20 520 | 16 384 | 4 096 |
| 128×128 | 8 | 24 607 | 16 384 | 8 192 |

For small batches the weight load dominates. The paper does not say how the
weight transfer overlaps with its measurements, so these numbers cannot be
compared directly with its reported speedups. The paper's clock is 200 MHz; no
timing closure has been attempted here. The combinational float units sit
between single pipeline registers, and an FPGA build at that clock would
probably need them split over more stages.

## Parameters

| parameter (on `dlau_top`) | default | meaning |
|---------------------------|---------|---------|
| `TILE` | 32 | lanes of the TMMU (the paper's tile size; must be a power of two) |
| `WDEPTH` | 2048 | words per TMMU weight bank; `ceil(ni/TILE)*no` must not exceed it |
| `ACC_DEPTH` | 1024 | PSAU accumulator words; `no` must not exceed it |
| `NSEG`, `KSHIFT` | 16, 1 | AFAU segments and segment width `2^-KSHIFT` |
| `FIFO_DEPTH` | 16 | depth of every unit FIFO and of the DMA read buffer |
| `CW`, `MAW` | 16, 32 | width of the size registers and of memory word addresses |

The tile size, 32, is the paper's. The other values are choices made for this
implementation.

## Where this RTL departs from, or adds to, the paper

- **Float format and rounding.** The paper only says "floating point". This RTL
  uses binary32 with round to nearest even and no subnormals.
- **Weight storage.** The paper's resource table lists 32 BRAMs for the TMMU.
  Storing a whole 256×256 matrix takes 64 Xilinx 36 Kb BRAMs at 32 bits per word,
  so this build's weight banks (32 × 2048 words) are twice that. The paper
  does not explain how it fits the larger layers, for example whether it
  reloads weights per tile or uses narrower words.
- **Stream order and sequencing.** The order of weights and nodes in memory,
  Part Sums that carry no tags, the first-tile rule and the `no = 1` bypass in
  the PSAU, and the masking of a partial last tile are all this design's own.
- **AFAU tables.** The segment width, the number of segments and the table
  contents are not in the paper. Only the sigmoid is provided.
- **Control.** The paper draws a separate AXI-Lite link to each unit. This
  design has a single slave with its own register map.
- **Memory side.** The DMA engine and its memory port are minimal stand-ins.
  The paper's DMA internals are not described.
- **Not included.** These are outside the accelerator and are not part of this RTL:
  - the ARM processor;
  - the JTAG-UART;
  - the DDR3 controller and the DDR3 memory;
  - the AXI interconnect;
  - clock generation.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp_mul`, `tb_fp_add` | bit-exact against a correctly rounded real-number reference (`tb_fp_pkg`), plus zeros, infinities, NaN, overflow, cancellation |
| `tb_dlau_fifo` | random traffic against a queue model; flags, count, one word per cycle |
| `tb_tmmu` | Part Sums of partial and full tiles under random gaps and back-pressure; one Part Sum per cycle and total run time at full rate |
| `tb_psau` | bit-exact accumulation over 1 to 8 tiles, the `no = 1` bypass, one Part Sum per cycle |
| `tb_afau` | bit-exact Eq. (1) from the loaded tables, the boundary values, distance from the true sigmoid, all four regions, one value per cycle |
| `tb_dlau_dma` | data and addresses through a behavioural memory with latency and refused requests, credit flow, write-back, full-rate reads |
| `tb_dlau_ctrl` | AXI4-Lite register writes and reads, start pulse, table index increment, busy/done, cycle counter |
| `tb_dlau_top` | the whole accelerator at default parameters: 40×24 (partial tile, memory back-pressure), 64×64, 128×128, 256×256 (run time checked), 33×1, a slowly drained 32×96 layer, and two chained layers 96→48→10 |
| `tb_dlau_tiles` | the 128×128 layer built with tiles of 8, 16 and 32 lanes |

`tb_dlau_top` also counts, and requires at least once, each of these events:

- a Reg_a/Reg_b swap;
- a partial tile;
- a TMMU output stall;
- a PSAU bypass;
- DMA read throttling;
- a refused memory request;
- a chained pair of layers;
- each of the four sigmoid regions.

`tb_mem_model` is a behavioural memory for the DMA port; it is not
synthesizable.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dlau_pkg.sv tb/tb_fp_pkg.sv tb/tb_dlau_top.sv --top-module tb_dlau_top
./obj_dir/Vtb_dlau_top
```

The end-to-end test takes about 15 seconds. The unit tests take under a second each.
Verilator has no X state, so the testbenches reset or load everything they read.
Memory contents are deliberately left unreset in the RTL.

## Files

- `rtl/dlau_pkg.sv`: data type, constants, register map
- `rtl/fp_mul.sv`, `rtl/fp_add.sv`: binary32 arithmetic
- `rtl/dlau_fifo.sv`: unit FIFO
- `rtl/tmmu.sv`, `rtl/psau.sv`, `rtl/afau.sv`: the three processing units
- `rtl/dlau_dma.sv`, `rtl/dlau_ctrl.sv`: DMA engine and AXI4-Lite slave
- `rtl/dlau_top.sv`: the accelerator top level
- `tb/`: testbenches, `tb_fp_pkg` (reference float helpers) and `tb_mem_model`
