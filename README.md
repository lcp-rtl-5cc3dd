# A latency-tailored systolic accelerator for narrow-branch CNN inference

This is synthesizable SystemVerilog for the small inference accelerator that Hadidi et al. describe
in "LCP: A Low-Communication Parallelization Method for Fast Neural Network Inference in Image
Recognition". This RTL is an independent implementation from that description. Where the
description stops, the design makes its own choices, and each one is named below.

## The idea

LCP cuts a CNN into several narrow branches. The branches do not talk to each other except at the
input and at the last layer, so each edge device runs one branch alone. Each device then runs a
single image at a time. What matters is the latency of one inference, not throughput over a batch.

The accelerator is a TPU-style weight-stationary array, changed in three ways to favour latency:

1. **Adder trees instead of a MAC chain.** A cell only multiplies. The 32 products of an array row
   go to that row's own adder tree, which has five pipeline stages. A dot product therefore takes
   log2(32) additions instead of 32 hops of accumulation.
2. **Self-describing data.** Memory pushes a stream of blocks, and the array works on data as it
   arrives. Each block carries its index and length, so every result knows its own (row, column)
   coordinates. The last slice of a layer starts pooling and activation by itself.
3. **A stationary buffer in every cell.** Each cell keeps several weights, not just one. A layer
   with more weights than the array holds, or the next layer of the branch, can switch to weights
   that are already loaded instead of reloading them from memory.

The array is 32 cells wide and 64 rows deep. The paper implements it on a ZYNQ-7020 FPGA and as a
0.107 mm² ASIC at 7 nm, connected to an LPDDR2 memory (933 Mb/s per pin, 3.7 GB/s).

## How a matrix product runs on the array

The array computes `Y = X · Wᵀ`:

- `X` is the *streaming* operand: im2col activations, one row per output pixel.
- `W` is the *stationary* operand: the weights, one row per output channel.

Both are cut into tiles that the host lays out in memory ahead of time:

- **Streaming block.** Up to 65535 rows of `X`, restricted to one 32-wide slice `k` of the
  reduction dimension. Each row is one 32-element *vector*.
- **Stationary block `i`.** 64 output channels (columns `64·i … 64·i+63` of `Y`), restricted to
  the same slice `k`: a 64 × 32 tile of `W`.

A vector enters row 0 of the array and moves down one row per clock through the cells' `R1`
registers. Array row `r` holds row `r` of the stationary tile. So after one vector has passed
through the array, all 64 rows have produced its dot product with 64 weight rows. The results
leave as 64 lanes, skewed by one cycle per row:

```
result (row, col) = Σ_c  X[row][32k + c] · W[64i + r][32k + c],   col = (i << 6) + r
```

Reduction dimensions wider than 32 are handled one slice at a time:

- The first slice writes its sums to a *partial-sum* region of memory.
- Each later slice reads the partial sum back and adds it.
- The last slice (`k_idx = k_cnt−1`) sends its sum to pooling, activation and requantisation, and
  writes it to the *output* region.

The partial-sum read is issued one pipeline stage before the sum is ready. A memory with one cycle
of read latency therefore returns the value just in time.

A typical order for one layer with `K` slices and `N` output blocks:

```
for k in 0..K-1:
  for i in 0..N-1:
    stationary block (i, k)         -> slot i mod 4
    streaming block  (i, k): X rows -> results for columns 64i..64i+63
```

If a layer's stationary tiles all fit in the four slots, the stationary blocks are sent once and
then reused by several streaming blocks.

## Block stream format

One stream word is `COLS × 16 = 512` bits. In a data word, element `c` sits in bits
`[16c +: 16]`. A block is one header word followed by `length` data words. The header (`blk_hdr_t`
in `lcp_pkg`) sits in the low bits of its word, packed MSB first:

| field       | bits | meaning |
|-------------|------|---------|
| `relu`      | 1    | apply ReLU to final results |
| `pool_log2` | 2    | max-pool over 1, 2, 4 or 8 consecutive rows |
| `k_cnt`     | 10   | number of reduction slices of the layer |
| `k_idx`     | 10   | this block's slice (0 = no partial sum to add) |
| `length`    | 16   | number of data words |
| `blk`       | 8    | block index `i`: column block, and buffer slot `i mod DEPTH` |
| `t`         | 1    | 1 = stationary (initialisation), 0 = streaming (processing) |

A stationary block is always 64 words long, and its words are sent **last array row first**. Its
streaming fields are ignored.

Pooling treats consecutive rows of a block as one window. A window also closes at the end of the
block, so a block whose length is not a multiple of the window ends with a shorter window. For a
2-D pooling window, the host orders the streamed pixels so that the members of each window are
consecutive. Pooled result `p` goes to output row `p = row >> pool_log2`.

## Stationary buffers and the slot hazard

Each cell has `DEPTH = 4` weight slots. Slot `s` of all 64 cells in a column forms a shift chain.
While a stationary block is loaded, every word pushes slot `s` one row down the whole column.
After 64 words, the first word has reached row 63. The other slots are not touched, so a block can
be loaded while vectors that read *other* slots are still moving down the array. This is the
fast layer switch the buffers exist for.

Loading a slot that vectors in the array still read would change the weights under those vectors.
The array reports, as `slot_busy`, the slots that vectors in its `R1` chain use. The stream decoder
holds a stationary word (`stall`, `s_ready` low) until its slot is free, which takes at most 64
cycles. The paper does not discuss this hazard; the stall is this design's own rule.

## Pipeline and timing

| stage | where | cycles |
|---|---|---|
| input FIFO | `lcp_fifo` | 1 |
| decoder routes the word into row 0's `R1` | `lcp_stream_decoder` | 1 |
| vector moves down to row `r` | `lcp_cell` R1 chain | `r` |
| adder tree | `lcp_adder_tree` | 5 |
| accumulate, pool, activate, register | `lcp_act_pool` | 1 |

A vector accepted on `s_*` is written by row 0 after **7 cycles** and by row 63 after **70**. The
array takes one vector per clock and does 2048 multiplies per vector. At the paper's numbers (two
operations per multiply-add, 2-byte operands) this is 64 operations per byte streamed in. The
paper quotes the same reuse figure, and it is also why the operands here are 16 bits wide.

## Arithmetic

- Operands are 16-bit signed integers in 3.13 fixed point. The paper reports that 3.13
  quantisation loses no accuracy.
- Products are 32 bits. The adder trees grow one bit per level, to 37 bits.
- Partial sums are 40 bits. They are written back unrounded, so slices add up exactly.
- Final results are shifted right arithmetically by 13 bits (truncation), then saturated to 16
  bits. They are written to memory sign-extended.

## Memory side

The LPDDR2 device and its controller are outside this RTL. `lcp_top` brings their side out as
ports:

- `s_valid/s_ready/s_data`: the block stream, with a valid/ready handshake. The FPGA version in the
  paper uses AXI-Stream. An assertion in `lcp_fifo` checks that a word is held until it is
  accepted.
- `rd_en/rd_addr/rd_data[64]`: one partial-sum read port per array row. `rd_data` must be valid on
  the clock after `rd_en`.
- `wr_en/wr_addr/wr_data[64]`: one write port per array row. Writes are always accepted.
- `psum_base`, `out_base`, `row_pitch`: the address map. A result at (row, col) goes to
  `base + row·row_pitch + col`, in word units.

The paper does not say how the 64 result lanes share the LPDDR2 bus. A real system would need a
write-combining stage between these ports and the DRAM controller.

Status outputs:

- `stall`: a stationary word is waiting for its slot.
- `blk_done`: the last vector of a streaming block has been accepted.
- `idle`: nothing is buffered or in flight. Change the address map only while `idle` is high.

## Modules

| file | block |
|---|---|
| `lcp_pkg.sv` | widths, header and tag types, requantisation function |
| `lcp_stat_buffer.sv` | per-cell weight slots with column load chain |
| `lcp_cell.sv` | `R1`, weight buffer, multiplier |
| `lcp_adder_tree.sv` | 5-stage pipelined adder tree of one row |
| `lcp_systolic_array.sv` | 32 × 64 cells, 64 adder trees, tag pipeline, `slot_busy` |
| `lcp_indexing.sv` | row counter against block length, last-of-layer detection, column rule `(i<<6)+r` |
| `lcp_act_pool.sv` | per-row partial-sum add, last-slice select, max-pool, ReLU, requantise |
| `lcp_mem_if.sv` | (row, col) → address for reads and writes |
| `lcp_stream_decoder.sv` | header decode, routing by type, slot-hazard stall |
| `lcp_fifo.sv` | input FIFO |
| `lcp_top.sv` | the whole accelerator |

Module parameters: `COLS` (32), `ROWS` (64), `DEPTH` (4 slots), `FIFO_DEPTH` (4). `ROWS` and
`COLS` must be powers of two. The column rule shifts by `log2(ROWS)`, which gives the paper's `<< 6`
for 64 rows. Operand, accumulator and header widths are package constants.

## What follows the paper, and what does not

These parts follow the paper:

- the 32 × 64 array, with only its first row fed from memory;
- multiplier-only cells with a streaming register `R1`;
- a five-stage adder tree per row;
- a stationary buffer in each cell, selected by the block index and loaded through a chain down the
  column;
- a data-driven stream of blocks that carry index, type and length;
- the indexing rule `row = i++ until length, col = (i << 6) + r`;
- an adder with memory feedback, a last-of-layer select, pooling, activation, and a memory
  interface that places results by their indices.

These are this design's own choices:

- the number of buffer slots (4) and the per-slot chain;
- the header layout, including the slice index and count used for the last-of-layer test;
- the slot-hazard stall;
- max pooling over consecutive rows, and ReLU;
- truncating requantisation with saturation;
- the 40-bit partial sums;
- the address map;
- the one-cycle read latency and the write ports that never stall;
- the input FIFO (the paper only mentions FIFOs used for pipelining);
- an asynchronous active-low reset that clears all state.

Not covered:

- The LPDDR2 memory and its PHY.
- The host software that tiles the layers and reorders data.
- The paper's FPGA and ASIC results. Those come from a Vivado-HLS implementation running at 100 MHz
  on the FPGA and 800 MHz on the ASIC. The latency and speedup figures are properties of that
  whole system and are not reproduced here.
- Residual additions (ResNet) and batch normalisation. They have no unit of their own. A shortcut
  can be added by preloading it, scaled by 2¹³, into the partial-sum region and starting the
  layer's slice index at 1.

The size limits of the default widths:

- 256 column blocks, i.e. 16384 output channels;
- 65535 rows per block;
- 1023 reduction slices, i.e. a reduction depth of 32736.

These cover the largest layers of the networks the paper runs on this hardware: CifarNet, VGG-S,
AlexNet, VGG16 and ResNet-50. VGG16's first fully-connected layer, with a reduction depth of 25088,
is the deepest.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one compares the module with a
reference model written independently in the testbench. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/lcp_pkg.sv tb/tb_lcp_top.sv --top-module tb_lcp_top
./obj_dir/Vtb_lcp_top
```

Replace `lcp_top` with any other module name to run that module's testbench.

`tb_lcp_top` runs the full-size design: 32 × 64 cells, 4 slots. It acts as the memory and runs
three layers:

- Layer A: a 64-deep reduction in two slices, 128 output channels in two blocks, 2-row pooling and
  ReLU.
- Layer B: large operands, so that results saturate, and 4-row pooling cut short at the end of the
  block.
- Layer C: it reuses B's buffer slot straight after B's stream, so it stalls.

The testbench checks every partial sum and final result against an integer reference, and checks
the 7-cycle and 70-cycle latencies and the one-vector-per-cycle rate. It also fails if any of
these mechanisms never happened: partial-sum reads, slot stall, load during streaming, FIFO
back-pressure, pooling, truncated window, ReLU clamp, saturation. It finishes in well under a
second.

`tb_lcp_cifarnet_conv1` runs a real layer shape on the full-size design: the first convolution of
CifarNet (32 × 32 × 3 image, 64 filters of 5 × 5 × 3, padding 2), with random data. The host's part
is modelled in the testbench:

- the 75-element receptive fields are cut into three 32-wide slices;
- output pixels are streamed so that the four pixels of each 2 × 2 window come back to back;
- each pass of 1024 vectors runs against one 64-filter stationary block.

All 16384 pooled, activated outputs are compared with a direct convolution.

`tb_lcp_vgg16_fc6` runs VGG16's first fully-connected layer for a single image. The layer reduces
25088 inputs, which is 784 slices of 32. Only output block 0 (neurons 0 to 63) is simulated. For
each slice the testbench sends a 64 × 32 weight block and then one input vector. The first 783
slices go through the partial-sum memory. The last slice applies ReLU. All 64 outputs are compared
with direct dot products.

The run takes about 102,000 cycles, about 130 per slice. Roughly half of those are stall cycles.
Every slice of one output block uses the same buffer slot, so each weight load waits until the
previous slice's single vector has left the array. At batch size one, fully-connected layers are
therefore limited by weight loading.

The other testbenches run the blocks at the paper's sizes. The exceptions are the array test
(8 × 8 with 2 slots) and the decoder test (4 × 4); both keep the structure and only shrink the
dimensions.
