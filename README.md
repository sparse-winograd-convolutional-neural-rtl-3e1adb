# Sparse Winograd convolution on clusters of 4x4 systolic arrays

This is RTL for a convolution-layer accelerator built on the design in
"Sparse Winograd Convolutional neural networks on small-scale systolic arrays"
(Shi, Li, Gao, Kuschner, Zhu). The accelerator combines three ideas:

* **Winograd F(2x2, 3x3).** A 4x4 input tile `d` and a 3x3 filter `g` give a
  2x2 output tile as `Y = A^T [ (G g G^T) .* (B^T d B) ] A`. This takes 16
  multiplications instead of 36. Summed over the input channels, the
  element-wise product splits into **16 independent matrix products**, one
  for each position `e = (u,v)` of the 4x4 transformed tile:
  `M_e(tile b, filter k) = sum_c V_e(b, c) * U_e(c, k)`.
* **Pruned transformed weights.** The weights `U = G g G^T` are computed and
  pruned off-chip. They are stored in a block-compressed format, so that
  4x4 weight blocks holding only zeros are never fetched and never multiplied.
* **One small array size for everything.** The input transform and the
  matrix products both run on 4x4 systolic arrays. The transform arrays have
  no multipliers: the transform matrix only holds 0 and +-1.

In the default configuration, 16 transform arrays (256 adder PEs) and
8 clusters of four MAC arrays (512 multiplier PEs) process one layer of
16 input channels on a 10x10 map with 16 filters.

## Data flow of one layer

`winograd_accel` runs four phases one after another:

1. **Transform.** For every channel, the transform engine reads overlapping
   4x4 tiles (stride 2) from the input buffer and computes `V = B^T d B` for
   16 tiles at a time.
2. **Scatter.** Each V tile is spread over the 16 matrices: element (u,v) of
   the tile at index `b = ty*TW + tx` in channel `c` becomes entry (b, c) of
   `V_e`, with `e = 4u + v`. Each matrix buffer takes one write per cycle,
   so a V tile is scattered in one cycle.
3. **Multiply.** The 8 clusters compute `M_e = V_e x U_e`. The first
   iteration handles e = 0..7 and the second e = 8..15.
4. **Inverse.** For every (b, k), the 16 values `M_e(b,k)` form a 4x4 tile.
   The inverse transform `A^T M A` turns it into a 2x2 output tile, which
   passes the ReLU/pooling comparators and is written to the output buffer.

The phases are not overlapped. The published design streams its three
stages as a pipeline, so a layer here takes longer than it would there (see
"Departures").

## The input transform: two passes through one array

The hardest part to follow is how a single 4x4 array computes `B^T d B`,
which is a product on both sides.

Each transform PE (`wt_pe`) holds a stationary coefficient `R_B` from B. Its
data register `R_D` passes the west input east. Its sum register `R_C`
passes south, and holds the north sum plus, minus or ignoring the data,
depending on `R_B`. Lane k of the array carries rows of a matrix X, skewed
by k cycles. Column j of the south edge then emits `(X B)[s][j]` at cycle
`s + j + 4`.

`wt_unit` uses the array twice:

* **Pass 1.** Lane k carries row k of the tile. The array therefore sees
  `X = d^T`, and the south edge yields `Y = d^T B`. Y is captured into a
  4x4 register tile.
* **Pass 2.** The captured tile is fed back with lane k carrying row k of
  Y. The array now sees `Y^T = B^T d`, and the south edge yields
  `B^T d B`.

The capture tile does the corner turn between the passes. A tile takes
22 cycles: 4 cycles of input, pass 1 captured by cycle 10, pass 2 fed in
cycles 11-14 and captured in cycles 15-21. `done` follows in cycle 22.

**Overlap forwarding.** Vertically adjacent tiles share r-1 = 2 rows. In a
chain of arrays (`wt_engine`, 4 chains of 4 arrays), only the first array
reads all four rows. Array n > 0 reads its two new rows from the strip. It
takes the two shared rows from the east edge of array n-1, where they
arrive already skewed. Those lanes pass 4 PEs and carry 2 lanes of skew, so
array n must run exactly 6 cycles after array n-1. The engine delays the
strip and the start signal in steps of 6. A chain of 4 therefore finishes
23 + 18 = 41 cycles after its start. Each chain covers one column of
4 tiles, a 10-row by 4-column strip, and the 4 chains work on 4 tile
columns side by side.

## Sparse matrix products in a cluster

### Storage formats

* **Z-Morton tiles** (`morton_addr`). Matrices are cut into 4x4 tiles. Tile
  (row, col) is stored at the address made by interleaving the bits of row
  and col, with the row bit above the column bit in each pair. In a 4x4
  grid of tiles the order is 0 1 4 5 / 2 3 6 7 / 8 9 12 13 / 10 11 14 15.
  `V_e` and `M_e` are stored this way: one tile per buffer word, with a
  write enable per element.
* **BCOO** (block coordinates). `U_e` is a C x K matrix of 4x4 blocks, and
  only blocks with at least one nonzero are stored, in Z-Morton order. Each
  stored block n has:
  * a record `{BN, BI}`, where `BN` is its Z-Morton block number and `BI`
    its first entry;
  * entries `BI[n] .. BI[n+1]-1`, each `{A_I, A_J, A_N}`: the row and column
    inside the block, and the value.

  A final record after the last block carries the end index in `BI`. The
  host also writes `nnzb`, the number of stored blocks.

### Cluster organisation (`mm_cluster`, `mm_half`)

A cluster holds four output-stationary 4x4 MAC arrays (`mm_systolic_array`).
Each array keeps one 4x4 block of C in its accumulators. For block rows `ib`
and `ib2 = ib + RB/2`, the arrays own four output blocks:
`C(ib,jb)`, `C(ib2,jb)`, `C(ib,jb+JB/2)` and `C(ib2,jb+JB/2)`. In a 4x4 grid
of blocks these are C0, C8, C4 and C12, then C1, C9, C5, C13, and so on.

The four arrays form two **halves**. Each half owns one block column of C.
Each half has:

* a **circular FIFO** (`circular_fifo`) of tile pairs
  `{A(ib,kb), A(ib2,kb)}`. It is loaded once per block-row pair and then
  rotated, so the feature-map tiles are reused for every block column
  without re-reading the buffer;
* a **BCOO decompressor** (`bcoo_decompressor`). It expands one weight block
  in as many cycles as the block has nonzeros.

For its column, a half walks the BCOO block list in stored order. Blocks of
other columns are skipped at one cycle each. For each matching block
`B(kb, jb)`, the half:

1. decompresses the block;
2. rotates its FIFO until the pair with tag kb is at the head;
3. issues the weight block to both of its arrays in 4 cycles: one array gets
   `A(ib,kb)`, the other `A(ib2,kb)`.

An empty block costs nothing beyond its absence from the list. Both halves
advance independently, so the feature-map supply is split in two. When all
blocks are present, both halves consume the same kb in step, which is the
dense case. When both halves are done, the four result blocks are drained
(8 cycles) and written to the `M_e` buffer in 4 cycles. The next block
columns then start with the same FIFO contents.

## Inverse transform and output

`inv_transform` applies `A^T = [1 1 1 0; 0 1 -1 -1]` to the columns and
then the rows of the M tile, using only adders and one register stage.

`relu_pool` clamps negative values when `relu_en` is set. When `pool_en` is
set, it replaces element 0 with the maximum of the tile, which is 2x2
stride-2 max pooling aligned with the output tiles.

The output buffer holds one 4-value word per (k, b) at address
`k*TH*TW + b`. Element `2p+q` is output pixel `(2ty+p, 2tx+q)` of filter k.

## Sizes and measured cycle counts

| parameter | default | origin |
|---|---|---|
| m, r, l | 2, 3, 4 | published design |
| transform arrays | 16, as 4 chains of 4 | count published; grouping chosen here |
| MAC clusters / arrays per cluster | 8 / 4 | published design |
| data / accumulator width | 16 / 32 bit | 16-bit mode published; accumulator chosen here |
| C, K, TH x TW tiles | 16, 16, 4 x 4 (10x10 input) | chosen here |

Layer shapes are fixed when the top is elaborated (parameters `C`, `K`,
`TH`, `TW`). `TH` must be a multiple of `CHAIN_LEN` and `TW` a multiple of
`NUM_CHAINS`. Each of
TH\*TW/4, C/4 and K/4 must be a power of two, at least 2.

Measured on the default configuration (cycles from `start` to `done`):

* weights fully dense (every block stored): 2128 cycles;
* 119 of the 256 weight blocks empty (46%): 1798 cycles.

In both runs, the multiply phase issues each stored block once per
block-row pair.

The dense layer holds 16 x 16 x 9 x 64 = 147456 multiply-accumulates of
direct convolution, so 2128 cycles give about 139 equivalent operations per
cycle. The published 16-bit figure, 230.4 Gop/s at 150 MHz, is 1536
operations per cycle, with every PE busy in every cycle. This build falls
short of that because its phases run in sequence and its layer is small. The VGG16 layers of the published evaluation are far larger
than one compile-time layer of this build. Running them would need larger
buffers and a runtime layer shape.

## Departures from the published design

* **Phases are not overlapped**, and in a transform unit pass 2 waits for
  pass 1 to complete. Throughput is therefore well below the published
  figures, although every arithmetic result is exact.
* **C blocks are complete before they are spilled.** The published example
  spills C0, C4, C8 and C12 after two inner blocks, although the same text
  lists two more inner blocks for C0. Here each C block is accumulated over
  all inner blocks and then written once.
* **The scatter is a parallel write.** The published design shifts each
  transformed tile out through shift registers. Here all 16 values of a
  tile are written in one cycle, one to each matrix buffer.
* **The weight side has no circular FIFO.** The decompressors read the BCOO
  arrays directly.
* **Spilling is a parallel read.** The accumulators are read at once after a
  drain, not shifted out.
* **Arithmetic is integer.** There is no fixed-point scaling, and U is
  whatever the host provides. The factors 1/2 in G can be absorbed by
  loading `4 G g G^T`, which yields 4x the convolution.
* **Buffers are simplified.** They are register arrays with asynchronous
  reads and as many read ports as the datapath needs. On an FPGA they would
  be block RAMs with registered reads. Their sizes are not published.
* **Transform PEs are adders.** The published design counts the 256
  transform PEs among its DSP blocks. Here each one is an add/subtract
  selected by `R_B`, which suffices for `B` with entries in {0, +1, -1}.
* **A host port replaces the external memory.** The top has host load and
  read ports where off-chip memory would connect. The weight transform and
  the pruning happen outside the chip, as in the published design.

## Simulating

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each testbench prints `TB_RESULT checks=N failures=F`. Compile the package
first, for example:

```
verilator --binary --timing --assert -Irtl rtl/wino_pkg.sv rtl/*.sv \
    tb/tb_mm_cluster.sv --top-module tb_mm_cluster -Mdir obj -o sim
./obj/sim
```

`tb_winograd_accel` runs the whole top at its default parameters, in two
runs:

* dense weights derived from random 3x3 filters, checked against a direct
  convolution;
* pruned weights with ReLU and pooling, checked against a Winograd-domain
  reference.

The testbench also counts overlap forwarding, FIFO rotations, skipped list
entries, empty blocks, the second cluster iteration, ReLU clamps and
pooling, and fails if any of them never happens. Compiling the top takes
about 3-4 minutes with Verilator. The simulation itself is under a second.

## Files

* `rtl/wino_pkg.sv`: constants, types, B and A^T, Z-Morton functions.
* Transform: `wt_pe`, `wt_systolic_array`, `wt_unit`, `wt_engine`.
* Multiply: `mm_pe`, `mm_systolic_array`, `circular_fifo`,
  `bcoo_decompressor`, `mm_half`, `mm_cluster`, `morton_addr`.
* Output: `inv_transform`, `relu_pool`.
* Buffers: `fm_buffer`, `ram_nr1w`.
* Top: `winograd_accel`.
