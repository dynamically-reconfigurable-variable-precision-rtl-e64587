# FADES: one datapath for dense and sparse matrix products in TensorFlow Lite

FADES computes `C = A x B` for the fully-connected and 1x1-convolution layers of
a TensorFlow Lite model. `A` holds the layer's weights (N filters by M inputs). It
arrives either as a plain dense matrix (GEMM mode) or in compressed sparse row
form (SPMM mode). `B` holds the activations (M x P, dense). `C` is N x P.

The main idea is that dense and sparse products share one pipeline.

- Only the *streaming* of A differs between the two modes. A dense row is sent as
  every one of its words; a sparse row is sent as its (column index, value)
  pairs.
- Each streamed element names the row of B it multiplies. That row is read
  from an on-chip copy of a block of B, so the irregular accesses of the sparse
  case never reach external memory.
- The arithmetic comes in two interchangeable variants: four int8
  multiply-accumulates per cycle per processing element (PE), or one float32 MAC
  per cycle per PE. On an FPGA one variant would be swapped for the other by
  partial reconfiguration; in this RTL the `PRECISION` parameter chooses it.
  A third build, `PREC_VFX`, holds both datapaths side by side and picks one
  per run with a multiplexer. This costs roughly twice the multipliers but
  switches precision without reconfiguring.

The RTL in `rtl/` is synthesizable SystemVerilog. The testbenches in `tb/` are
self-checking and compare every element of `C` against a reference model.

## The four stages

A core (`fades_core`) is a chain of four stages joined by FIFOs. All four work
at the same time on different parts of the product.

| Stage | Module | Work |
|---|---|---|
| 1 READ | `read_unit` | Loads a B tile, streams A as elements, streams per-row scaling parameters |
| 2 COMPUTE | `compute_unit` | One PE per B-tile column; every element goes to all PEs in the same cycle |
| 3 SCALE | `scale_unit` | int8 requantisation and clamping; float values pass through unchanged |
| 4 WRITE | `write_unit` | Writes each value to its address in C, column-major by default |

The FIFOs between stages are `stream_fifo`s: first-word-fall-through, with
valid/ready on both sides. Their default depth is 16.

- The element FIFO carries `{col, a, last}` from stage 1 to stage 2.
- The parameter FIFO carries `{qm, shift, bias}` from stage 1 to stage 3.
- Each PE has its own result FIFO into stage 3.
- The output FIFO carries `{value, row, col}` from stage 3 to stage 4.

## Tiles of B and why A is streamed more than once

Stage 2 has `PES` processing elements (32 by default). PE `j` owns column
`col0 + j` of C. The block `B(0..MW-1, col0..col0+PES-1)` sits in `b_buffer`,
where `MW` is the number of 32-bit words in one column of B (see the int8
packing below).

`b_buffer` is `DEPTH` rows of `PES` words. It is written one word per cycle by
stage 1. Stage 2 reads one whole row per cycle, with one cycle of latency.

A product with P columns is done in `ceil(P / PES)` tiles. For each tile:

1. Stage 1 loads the tile's B block. This takes `MW * tc` word reads, where
   `tc = min(PES, P - col0)`. Once the block is complete it raises `tile_ready`
   with `tile_cols = tc`.
2. Stage 1 streams the whole of A. Stage 2 consumes it at one element per
   cycle, reads B row `col` for that element, and feeds all PEs.
3. When all N rows of the tile have produced results, stage 2 pulses
   `tile_done` and stage 1 starts the next tile.

There is a single B buffer, so loading the next tile does not overlap with
computing the current one. A is read again from memory for every tile. In the
last tile, lanes at or above `tc` still compute but never write their result
FIFOs.

## Streaming A: dense words and CSR pairs

Stage 1 produces a stream of elements `{col, a, last}`.

- **GEMM mode:** for each of the N rows, words `0..MW-1` of that row, with
  `col = k`, and `last` set on the final word.
- **SPMM mode:** A is in compressed sparse row form with three arrays:
  - `row_ptr[0..N]`
  - `column_index[]`
  - the non-zero `A_values[]`

  Stage 1 first reads `row_ptr[0]` and `row_ptr[N]` to find the range of
  non-zeros, then streams `column_index` and `A_values` over that range in
  parallel. It uses `row_ptr` again to cut the stream into rows.

  An empty row (`row_ptr[i] == row_ptr[i+1]`) still needs a result. It is sent
  as one zero element with `last` set. `row_ptr[0]` need not be zero.

Every array has its own memory read port, built from a `read_channel`. Each
channel issues a 2-D address pattern (`base + o*stride + i`) and keeps a credit
count so that it never has more requests in flight than its output FIFO can
take. Memory may therefore answer late but never needs backpressure. The B
block, for example, is read with `base = col0`, `inner = tc`, `outer = MW`,
`stride = P` (B is row-major in memory).

Inside a tile the element stream runs at one element per cycle, including
across row boundaries. The only exception is a one-non-zero row that directly
follows another row, which costs one extra cycle.

## The processing elements

### int8 (`pe_int8`)

A 32-bit word carries four int8 values along M, lowest byte first. Both A words
and B words are packed this way, so `MW = M/4` and `column_index` addresses
words. Each cycle the PE computes

```
acc += sum_{z=0..3} A.byte[z] * (B.byte[z] - zero_point_rhs)
```

in 32-bit wrap-around arithmetic. The element marked `last` completes the row.
One cycle later the sum appears on `res` and the accumulator clears, so rows
follow each other without a gap.

### float32 (`pe_float`)

Here `MW = M`: one fp32 value per word. Each product is
`a * (b - float(zero_point_rhs))`. Accumulating a long row on one floating-point
adder would stall for the adder's latency on every element, so the PE
**interleaves** `FADD_LATENCY` (6) partial sums instead:

- Element `e` of a row adds into `part[e mod 6]`, behind a pipeline of the
  adder's latency.
- A slot is only read again after its previous sum has been written back, so
  one element per cycle is accepted.

After a row's last element the PE:

1. stops accepting input;
2. waits for the pipeline to empty;
3. adds `part[0..5]` one after another into the row result;
4. clears the slots.

This end-of-row **drain** costs about `2*FADD_LATENCY + 3` cycles per row. In
float mode stage 2 therefore holds the next row until the PEs have returned
the previous row's result. This is the main throughput cost of the float
variant on short (very sparse) rows.

`fp_add` and `fp_mul` are plain combinational IEEE-754 single-precision
operators:

- round to nearest even;
- subnormal inputs and results flushed to zero;
- NaN and infinity handled.

The adder pipeline depth is modelled by the registers in `pe_float`.

### Both at once (`PREC_VFX`)

In the VFX build every lane holds one `pe_int8` and one `pe_float`. Both see
the same A word and B word, but only the selected one gets `in_valid`. Its
`in_ready` and results are multiplexed back into the lane. The selection is
sampled with the rest of the configuration on `start`, and it also decides:

- whether words are read as int8 quartets (`MW = M/4`) or as single floats;
- whether stage 3 requantises or passes values through.

## Requantisation (`scale_unit`)

Stage 3 reads the result FIFOs in the order tile, row, lane, so C leaves in a
fixed order: one value per cycle when nothing stalls. In the int8 build with
`SCALE=1`, row `i` is filter `i`, and each accumulator `x` becomes

```
v = x + bias[i]                                    (bias only if bias_count != 0)
v = RoundingDivideByPOT(SaturatingRoundingDoublingHighMul(v << max(shift,0), QM[i]),
                        max(-shift,0))
y = clamp(v, clamp_min, clamp_max)                 (sign-extended into a 32-bit word)
```

These are TensorFlow Lite's fixed-point helpers:

- the doubling high multiply rounds half away from zero and saturates the one
  overflow case;
- the divide by a power of two rounds half away from zero.

The row's `{QM, shift, bias}` word is popped after the row's last column. A row
spanning two tiles therefore reads its parameters twice. In the float build,
or with `SCALE=0`, the raw accumulator is forwarded unchanged. No output zero
point is added, because the configuration has no port for one.

## Writing C (`write_unit`)

Each `{value, row, col}` becomes a write request `{valid, addr, data}`, held
until `c_wr_ready`.

- `TRANS=1` (the default) uses address `col*N + row`. This is the column-major
  layout the TensorFlow Lite caller expects.
- `TRANS=0` uses address `row*P + col`.

The unit sustains one write per cycle. `done` rises after N*P writes have been
accepted and stays high until the next `start`.

## Interface and configuration

`fades_top` holds `NCORES` independent cores. Every memory port is an array
with one entry per core. The host divides A into blocks of rows, one block per
core (`n[c]` rows for core `c`). It gives each core its own A, row_ptr,
column_index and parameter arrays and its own region for C, and it lets all
cores read the same B. `done` is the AND of all the cores' done signals.

Run-time configuration is sampled on a one-cycle `start` pulse:

| Signal | Meaning |
|---|---|
| `mode` | `MODE_GEMM` (0) or `MODE_SPMM` (1) |
| `n`, `m`, `p` | matrix sizes in elements; `m` must be a multiple of 4 in int8 |
| `bias_count` | 0 = no bias, otherwise a bias word is read per row |
| `clamp_min`, `clamp_max` | int8 output range |
| `zero_point_rhs` | zero point subtracted from every B value |
| `prec_fp` | `PREC_VFX` build only: 1 = float run, 0 = int8 run |

The memory protocol is the same on every read port:

- A request `{valid, addr}` (word address) is accepted when `*_req_ready` is
  high.
- Data returns on `*_rsp {valid, data}` in request order, any number of cycles
  later, and is always accepted.

C leaves on `c_wr`/`c_wr_ready`. The reset `rst_n` is synchronous and active
low.

Build-time parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NCORES` | 1 | Cores; 4 cores of 32 PEs gives the (4,32) configuration |
| `PES` | 32 | PEs per core, which is also the B tile width |
| `PRECISION` | `PREC_INT8` | Arithmetic variant: `PREC_INT8`, `PREC_FP32`, or `PREC_VFX` (both, chosen per run by `prec_fp`) |
| `DEPTH` | 1024 | B tile rows; must be at least `M/4` (int8) or `M` (float) |
| `FADD_LATENCY` | 6 | Interleaved float partial sums |
| `EN_SPMM`, `EN_GEMM` | 1, 1 | Which A formats the build accepts |
| `TRANS` | 1 | Column-major C |
| `SCALE` | 1 | int8 requantisation |

### Performance model

Per core and per tile, stage 2 is busy for one cycle per element of A:

- `N*MW` elements in GEMM mode;
- `nnz + (number of empty rows)` in SPMM mode.

Loading the B block adds `MW*tc` cycles on top of that.

For the largest MobileNet layer the design was run on (N=1024, M=1024, P=49,
int8), one core of 32 PEs took:

| Mode | Cycles | Speed-up |
|---|---|---|
| dense | 565,003 | 1.0 |
| SPMM, 90% of weights zero | 74,918 | 7.5 |

These figures come from simulation, with memories that refuse 5% of requests.
In float mode, add the row drain for every row.

C is written at one word per cycle, so a tile also needs at least `N*tc`
cycles. When a row of A is shorter than the tile is wide (`MW < PES`, i.e.
`M < 128` in int8 on 32 PEs), writing C sets the pace and sparsity helps
little. Cycles simulated for the MobileNet layers on one core of 32 PEs (int8):

| N x M x P | dense | 90% sparse | speed-up |
|---|---|---|---|
| 128x64x3136 | 435,772 | 426,812 | 1.02 |
| 128x128x3136 | 527,113 | 482,967 | 1.09 |
| 256x128x784 | 241,660 | 227,193 | 1.06 |
| 256x256x784 | 483,716 | 253,891 | 1.91 |
| 512x256x196 | 254,583 | 117,652 | 2.16 |
| 512x512x196 | 509,086 | 134,167 | 3.79 |
| 1024x512x49 | 282,458 | 59,090 | 4.78 |
| 1024x1024x49 | 565,101 | 74,694 | 7.57 |

On a 128-PE build, the int8 squares took:

| Size | Cycles |
|---|---|
| 128 | 21,626 |
| 256 | 84,673 |
| 512 | 344,671 |

The small squares are bound by the C writes.

Wide cores and many cores behave differently once A gets sparse. The
1024x1024x49 layer was run on one 128-PE core and on four 32-PE cores. Each
of the four cores takes a quarter of A's rows and has its own memory ports:

| Sparsity | 1 core x 128 PEs | 4 cores x 32 PEs |
|---|---|---|
| dense | 289,056 | 151,316 |
| 50% | 150,898 | 82,634 |
| 70% | 96,106 | 54,852 |
| 90% | 66,123 | 28,525 |

The single wide core covers all 49 columns of B in one tile, so it reads A
only once. But it has one write port for all 50,176 words of C, and one read
port for A. As A thins out, these ports dominate the run time. The four
cores split that traffic four ways.

The published measurements name only "a large matrix" for this comparison,
so the 1024x1024x49 shape is an assumption. They show the four cores clearly
ahead only when A is sparse (about 2.5x at 90%, and near parity when dense).
Here the four cores also win the dense case, by about 1.9x. The cause is the
shape, not the datapath: with P = 49, the 128-wide core leaves 79 of its 128
lanes idle. Each 32-PE core instead runs two tiles, with 32 and 17 of its
lanes busy.

## How this RTL departs from the published design

- **Memory interface.** The original moves data through HLS-generated master
  ports. Here each array has a simple request/response port with in-order data.
  Bursts and the bus protocol are left to a wrapper.
- **Floating point.** The original uses the FPGA vendor's floating-point
  operators. Here they are replaced by plain RTL that flushes subnormals to
  zero. The adder latency is only modelled, as pipeline registers of
  `FADD_LATENCY` cycles around a combinational adder, so the real timing of a
  200 MHz adder is not reproduced.
- **Float row drain.** The end-of-row reduction of the interleaved partial sums
  is a serial sum that stalls the PE for about 15 cycles per row. The original
  does not say how it overlaps this step.
- **Empty sparse rows** are sent as one zero element. **Row-pointer prologue:**
  `row_ptr[0]` and `row_ptr[N]` are read before streaming.
- **Parallel rows** (several rows of A per cycle) are fixed at one. The
  original allows two, but every configuration it reports uses one.
- **Systolic variant:** the systolic-array alternative to the broadcast PE array
  is not built.
- **Not built as RTL:** the host processor, the external memory and the
  reconfiguration mechanism itself. The int8 and float variants are two builds
  of the same RTL, chosen by `PRECISION`.
- **Output zero point:** none is applied. The scaled result is written
  sign-extended into a 32-bit word of C.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

- The shared reference arithmetic is in `tb/tb_ref_pkg.sv`:
  - requantisation done with 64-bit integer division;
  - float conversions through `real`.
- `tb/tb_fades_harness.sv` builds random A and B matrices, loads them into
  memory models that stall and delay at random (`tb_mem_port`), runs a product,
  and compares all of C.

The testbenches:

- **Unit tests.** Each block on its own: FIFO ordering and full/empty, 2-D
  address patterns and credits, B-buffer lanes, exact int8 dot products and a
  latency of one cycle, float rounding against a double-precision model,
  interleaved float sums, a stage-2 rate of one element per cycle, requantised
  values and their order, and C addresses in both layouts.
- **`tb_fades_core`.** One core with GEMM and SPMM. It checks that dense run
  times fall between `tiles*N*MW` and that figure plus the B loads, and that a
  sparse run beats the same product done dense.
- **`tb_fades_top`.** Three builds: int8 with two cores of 8 PEs, float with
  4 PEs, and a 4-PE VFX build that switches precision between runs. It fails
  if any mechanism never occurs:
  - dense and sparse;
  - both precisions;
  - multi-tile and partial tiles;
  - empty rows;
  - bias;
  - clamping;
  - result-FIFO backpressure;
  - float drain stalls;
  - multi-core;
  - int8 and float runs of the VFX build.
- **`tb_fades_workloads`.** The layer and square shapes above, with every
  element of C checked, and each dense run time checked against the
  compute, write and load model. It also runs the 1024x1024x49 layer on one
  128-PE core and on four 32-PE cores at 0, 50, 70 and 90% sparsity, and
  checks that the four cores are faster at 90%.
- **`tb_fades_full`.** The default build (1 core, 32 PEs, DEPTH 1024) runs the
  1024x1024x49 layer in SPMM mode at 90% sparsity and in GEMM mode, about
  640,000 cycles in total.

To run one of them with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fades_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_fades_top.sv --top-module tb_fades_top -Mdir obj -o sim
./obj/sim
```

The int8 results are bit-exact with the reference. The float results are
checked against a real-number sum of the same small-integer values, which fp32
represents exactly, so rounding-order differences do not show up. The
arithmetic operators have their own rounding tests.
