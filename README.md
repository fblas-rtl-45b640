# Streaming BLAS on an FPGA fabric: RTL for the modules and their compositions

Dense linear algebra on an FPGA is usually limited by memory bandwidth rather
than by arithmetic. This design shows the alternative in RTL. Each BLAS routine
is a hardware module that consumes and produces *streams*. Modules are
connected through small on-chip FIFO channels, so the result of one routine
flows into the next without a round trip to DRAM.

Every module has one pipeline that accepts one beat per cycle, so its
initiation interval is 1. A beat is a vector of `W` single-precision elements.
Two knobs set the size and speed of a module:

- the vectorization width `W`;
- for the matrix routines, the tile size (`TN x TM`, or `TR x TC` for GEMM).

The RTL contains:

- the level-1 modules SCAL, AXPY and DOT;
- the level-2 modules GEMV, GEMV on the transpose (called GEMV-T below) and GER;
- a tiled systolic-array GEMM;
- three streaming compositions that chain them: AXPYDOT, BICG and GEMVER;
- a top level, `fblas_top`, that holds one instance of each.

All code is synthesizable SystemVerilog-2017.

## 1. Numbers and streams

**Arithmetic** (`fblas_pkg`). Elements are IEEE-754 binary32 (`fp32_t`).
`fp_mul` and `fp_add` are combinational functions:

- rounding is to nearest, ties to even;
- subnormal inputs and results are flushed to zero;
- overflow gives infinity;
- NaN inputs are not told apart from infinity.

Each module places its own pipeline registers after this logic. `LAT_M`
registers follow a multiply and `LAT_A` follow an add, so the cycle counts
below follow the usual work/depth model of a pipelined circuit. Both default
to 6. That number is this design's choice and not a measured property of any
device. The registers sit after the logic and are not retimed into it, so a
real implementation would need register retiming or hardened
floating-point DSPs to close timing.

**Streams.** Every stream uses a valid/ready handshake:

- `<name>_valid`, `<name>_ready` and `<name>_data`;
- a beat moves on a rising clock edge where both valid and ready are high;
- a producer holds its data while valid is high and ready is low.

All modules stall completely when an output is not taken. No module drops or
duplicates a beat. Scalars (`alpha`, `beta`) and sizes (`n_beats`, `tiles_*`,
`k_len`) are plain inputs. They must be held stable for the whole call.
Reset is asynchronous and active low.

**Channels** (`channel_fifo`) are circular buffers with first-word
fall-through. An assertion checks that the FIFO never overflows. Two helpers
complete the set:

- `stall_pipe`: a pipeline of `DEPTH` registers with a valid bit per stage;
  it advances whenever its last stage is empty or is being taken;
- `stream_fork`: copies one stream to two consumers, and moves a beat only
  when both can take it.

## 2. Level-1 modules

| module | computes | circuit | cycles for N elements |
|---|---|---|---|
| `scal` | `alpha*x` | W multipliers | `LAT_M + N/W` |
| `axpy` | `alpha*x + y` | W multiply-add lanes | `LAT_M + LAT_A + N/W` |
| `dot`  | `x^T y` | W multipliers, a log2(W)-level adder tree, one accumulator | `LAT_M + log2(W)*LAT_A + N/W` (+1 for the result register) |

`dot` works on `n_beats` beats. It gives one scalar result per call and then
starts the next call by itself. The accumulator adds one tree result per
cycle. Its add is combinational, so no interleaving of partial sums is
needed. The testbench checks this cycle count exactly.

## 3. Level-2 modules and the replay of vectors

A GEMV on an `N x M` matrix `A` cannot keep both vectors on chip when `N` and
`M` are large. The matrix therefore arrives in tiles:

- tile rows come one after another;
- within a tile row, tiles arrive left to right;
- within a tile, elements arrive row by row, `W` per beat.

This order is called *tiles by rows*. With this order, one of the two vectors
has to be sent more than once. That is called *replay*.

- **`gemv`** computes `y = alpha*A*x + beta*y`. For each tile row it
  1. keeps `beta*y` for the `TN` rows in a buffer;
  2. takes `x` again for every tile;
  3. reduces each beat through a `W`-wide dot-product tree into a row
     accumulator;
  4. at the end of each row, adds `alpha` times the row sum into the buffer.

  So `x` is replayed `N/TN` times, and the I/O per call is
  `NM + MN/TN + 2N` elements. The testbench checks this count.
- **`gemv_t`** computes `y = alpha*A^T*x + beta*y` with the *same* input
  order. It keeps `alpha*x` for the tile row and a `TM`-wide partial `y` for
  the current tile. For each tile:
  1. it reads the partial `y` back in;
  2. the first tile row scales `y` by `beta`; later rows take back what was
     sent out before;
  3. it updates the partial `y` beat by beat;
  4. it sends it out again.

  So here `y` is replayed: it goes out and comes back `N/TN` times. This is
  what lets GEMV and GEMV-T share one stream of `A` (see BICG).
- **`ger`** computes `A + alpha*x*y^T`. It is a map over the streamed matrix.
  It keeps the `TN` elements of `x` for the tile row and `alpha*y` for the
  current tile, and it emits the updated matrix in the same tile order it
  received.

All three run their phases one after another: load the vector, then stream
the tile. Loading does not overlap computing. This costs `TM/W` cycles per
tile, against `TN*TM/W` cycles of matrix streaming. `N` and `M` must be whole
multiples of the tile sizes, and the tile counts are 16-bit inputs.

## 4. The systolic GEMM

`gemm_systolic` computes `C = A*B` on a grid of `PR x PC` processing elements
(`gemm_pe`). C is produced in memory tiles of `TR x TC`. Each PE owns
`E = (TR/PR)*(TC/PC)` elements of the tile: 288 with the defaults 40 x 80 PEs
and 960 x 960 tiles. The parts are:

- a chain of `PR` A-feeders down the left edge;
- a chain of `PC` B-feeders along the top;
- the PE grid;
- a chain of `PC` drainers above the top row, leading to the output stream.

These are the same parts and connections as the classic FPGA GEMM array. The
read and store helpers that talk to DRAM are outside the design: their places
are taken by the `a`, `b` and `c` streams.

**Input order.** For each C tile (tile rows outer, tile columns inner), and
for each `k` from 0 to `k_len-1`:

- `TR/PR` A-beats of `PR` elements: beat `ti` carries
  `A[tile_row*TR + ti*PR + r][k]`;
- `TC/PC` B-beats of `PC` elements: beat `tj` carries
  `B[k][tile_col*TC + tj*PC + c]`.

The set of beats for one `k` is called a *k-slab*. A is therefore read once
per tile column and B once per tile row. `k_len` is any value up to 65535.

**Feeders and double buffering.** A load beat travels down the feeder chain,
one feeder per cycle, and feeder `r` keeps element `r` of it. Each beat is
tagged with a bank and a slot, so the next k-slab can load into the other bank
while the current one is used. The controller issues `E` *steps* per slab. A
step `(ti, tj)` asks every A-feeder for slot `ti` and every B-feeder for slot
`tj`. The step goes ahead only when both banks are full. Otherwise the array
waits. The load side also waits while the bank it would write is still in
use. An assertion guards against overwriting a bank that is in use.

**Skew.** Feeder `r` delays its answer by `r` extra cycles, and B-feeder `c`
delays by `c`. A moves right one PE per cycle, and B moves down one PE per
cycle. So the A element and the B element of a step meet in PE `(r, c)`
exactly `r + c` cycles after that PE's row and column started. The control
fields travel with the A value:

- `first`: the first `k`, which overwrites instead of accumulating;
- `e`: which of the PE's `E` accumulators to use.

A PE therefore needs no counters of its own.

**Flush and drain.** After the last slab of a tile:

1. The controller waits `PR + PC + 2` cycles until the last step has reached
   the far corner.
2. It drains. For each local element `e`, all PEs copy accumulator `e` into a
   drain register at once.
3. The columns shift upward `PR` times. Each shift hands the top row's value
   to the column's drainer.
4. The drainers form a combinational chain that assembles one output beat of
   `PC` elements: row `ti*PR + r` of the tile, columns `tj*PC .. tj*PC+PC-1`,
   where `e = ti*(TC/PC) + tj`.

The drain takes `E*PR` beats: 11,520 at the defaults. Compute does not
continue while the array drains, so a tile costs about
`k_len*E + PR + PC + E*(PR+1)` cycles.

`alpha` and `beta` scaling of C is left to the store side. The multiply-add
of a PE is one combinational step on fp32 values; rounding happens after the
multiply and again after the add, not as a fused multiply-add.

## 5. Compositions

**AXPYDOT** (`axpydot`) computes `z = w - alpha*v` and `r = z^T u`. An `axpy`
with the scalar negated feeds a channel, and the channel feeds a `dot`. `z`
never leaves the chip. The latency of the chain is about the sum of the two
module latencies plus `N/W` cycles. The testbench checks that count.

**BICG** (`bicg`) computes `q = A p` and `s = A^T r` while reading `A` only
once:

- a `stream_fork` splits `A` into two channels;
- one channel feeds a `gemv` and the other a `gemv_t`;
- both take the matrix in tiles by rows;
- `p` is replayed into the GEMV, and the partial `s` is replayed through the
  GEMV-T.

When one branch stalls, the fork stalls the other, and the channels absorb
short differences in pace.

**GEMVER** (`gemver`) computes `B = A + u1 v1^T + u2 v2^T`,
`x = beta B^T y + z` and `w = alpha B x`. It runs as two components.

- **Component 1.** `A` streams through two chained `ger` modules. The result,
  `B`, is forked: one copy goes out to memory and the other goes through a
  channel into a `gemv_t` that builds `x`. The partial `x` is replayed, with
  `z` as the starting value.
- **Component 2.** It starts once B and x are complete in memory. A `gemv`
  computes `w`.

The split is needed because `w` needs the whole of `x`, and `x` is complete
only after the last row of B. A single streaming graph would need channels as
large as a tile row of B. Matrix traffic is about `3N^2` instead of `8N^2`.
The two components have separate ports. The host (here, the testbench)
sequences them.

**Top** (`fblas_top`) instantiates SCAL, AXPYDOT, BICG, GEMVER and the
systolic GEMM side by side, with no shared state. Its ports are flat:
`<kernel>_<stream>_{valid,ready,data}` plus the scalars and sizes of each
kernel. Through the compositions, every module appears at least once:

| module | where it is used |
|---|---|
| `axpy`, `dot` | AXPYDOT |
| `gemv`, `gemv_t` | BICG and GEMVER |
| `ger` | GEMVER |
| `channel_fifo`, `stream_fork` | the compositions |

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `W` | 16 | elements per beat in all vector and matrix streams |
| `TN`, `TM` | 1024 | GEMV/GEMV-T/GER tile size |
| `LAT_M`, `LAT_A` | 6 | pipeline registers after a multiply and after an add (assumed) |
| `FIFO_DEPTH` | 64 | channel depth in the compositions (assumed) |
| `PR x PC` | 40 x 80 | systolic array |
| `TR x TC` | 960 x 960 | GEMM memory tile (multiples of `PR`, `PC`) |
| `CW` | 16 | width of the size and tile counters (assumed) |

Problem sizes must be whole multiples of the tiles. For example, an 8192 x 8192
GEMM does not divide into 960-tiles and must be padded by the host to
8640 x 8640.

## 7. Where this RTL departs from the original architecture

- The original routines are HLS kernels with an adjustable latency. Here, the
  operator latencies are fixed parameters, and arithmetic is combinational
  followed by registers.
- GEMV, GEMV-T and GER do not overlap vector loading with matrix streaming.
- Only the tiles-by-rows schedule is built. The tiles-by-columns variants of
  GEMV and GEMV-T, and their replay patterns, are not.
- The GEMM does not overlap the drain of one tile with the computation of the
  next. It also does not apply `alpha`/`beta` to C.
- Only single precision is built. Level-1 routines other than SCAL, AXPY and
  DOT, and level-2/3 routines other than GEMV, GER and GEMM, are not built.
  Neither are the DRAM interface modules and the host side.
- Reading and writing memory is left to whoever drives the streams. In the
  testbenches, that is the testbench itself.

## 8. Simulating

Each testbench in `tb/` is self-checking:

- it prints `TB_RESULT checks=N failures=M`;
- a watchdog ends it if it hangs;
- it compares against double-precision references computed in the
  testbench, with a relative tolerance of about 1e-5 of the sum of the
  magnitudes of the terms;
- one GEMM call uses small integers and is compared exactly.

For example, with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/fblas_pkg.sv tb/tb_fp_pkg.sv tb/tb_gemm_systolic.sv --top-module tb_gemm_systolic
./obj_dir/Vtb_gemm_systolic
```

| testbench | what it checks |
|---|---|
| `tb_scal`, `tb_axpy` | every element, with random gaps and back-pressure, plus the pipeline latency |
| `tb_dot` | several calls back to back, plus the exact cycle count `LAT_M + log2(W)*LAT_A + N/W` |
| `tb_channel_fifo` | order, full and empty behaviour under random traffic |
| `tb_gemv`, `tb_gemv_t`, `tb_ger` | multi-tile calls, plus the I/O counts of section 3 |
| `tb_gemm_systolic` | 2 x 2 tiles on a 2 x 3 array; counts load waits and compute waits, and requires both |
| `tb_axpydot`, `tb_bicg`, `tb_gemver` | the compositions. AXPYDOT latency; BICG reads A exactly once and its fork stalls |
| `tb_fblas_top` | all five kernels at reduced size, running at the same time |
| `tb_fblas_top_large` | the top with the vector units at full size (below) |

In `tb_fblas_top`, one mechanism counter per behaviour must be non-zero:

- back-pressure;
- a full channel;
- a fork stall;
- x replay and y replay;
- GEMM load wait and compute wait;
- GEMM drain;
- the switch to GEMVER's second component.

`tb_fblas_top_large` is the largest configuration that has been simulated.
Every parameter is at its default except the GEMM array, which uses 8 x 16
PEs and 96 x 96 tiles. It performs:

- SCAL and AXPYDOT on 1024 elements;
- BICG and both GEMVER components on one 1024 x 1024 tile;
- a 2 x 2-tile GEMM with `k_len = 3`.

The full 40 x 80 array has not been simulated. Verilator turns its 3200 PEs
into several hundred megabytes of C++, and that does not compile in
reasonable time. The array is regular and its parameters are generic, so the
PR, PC, TR and TC values tested at small sizes cover the same code.

The stimulus of both top-level tests is shared in `tb/fblas_top_body.svh`. The
smaller tests set their own parameters so that they finish in seconds.
