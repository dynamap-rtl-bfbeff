# DYNAMAP overlay in SystemVerilog

A CNN layer can be computed in several ways. You can unfold the input into a
Toeplitz matrix (im2col), run K1·K2 unit 1×1 convolutions and add their
shifted results (kn2row), or use Winograd minimal filtering. The resulting
matrix product can also be run on a systolic array in several dataflows. No
single choice is best for every layer. This design is an FPGA-style overlay
built around one idea: **one systolic array of INT8 multiply-accumulators
serves all three algorithms and three dataflows, and the choice can change
from layer to layer at almost no cost.** Small auxiliary units around the
array supply what each algorithm needs beyond the matrix product:

- Winograd transforms;
- a Pad-and-Accumulate unit for kn2row;
- a max-pool unit;
- an address-generator-driven store that writes each layer's output in the
  layout the next layer wants.

The array geometry defaults to 92 × 66, the configuration reported for
GoogleNet at 286 MHz on a 6 k-DSP FPGA. The algorithm and dataflow for each
layer would be chosen by an offline optimiser. That optimiser is not hardware
and is not part of this RTL.

```
            load port ──┬─ raw words ───────────────┐
                        └─ Winograd input / kernel  │
                           transforms (saturate)    │
                                                    v
        input buffer (blocked layout)      kernel buffer (blocked layout)
                 │  P_SA1 per cycle            │ P_SA2 (NS) / P_SA1 (preload)
                 v                             v
            ┌────────────────────────────────────────┐
 gemm_ctrl ─│  Computing Unit: P_SA1 × P_SA2 PEs      │  NS / WS / IS
            └────────────────────────────────────────┘
                 │ P_SA2 result lanes
                 v
          partial-sum accumulators (WS) ─┬─> output buffer group A/B
                                         └─> Pad-and-Accumulate (kn2row) ─┘
          output buffer ─> Winograd output transform ─> output buffer
          output buffer ─> max pool ─> output buffer
          output buffer ─> DLT store (LTU + burst buffer) ─> external memory
```

## The Computing Unit

`systolic_array` is a grid of `pe`. Row `i1` takes a moving operand from its
left edge, and column `i2` takes a moving operand or a partial-sum injection
from its top edge. Results leave at the bottom, one lane per column.

The array skews its inputs internally and deskews its outputs:

- row `i1` is delayed by `i1` cycles on the way in;
- column `i2` is delayed by `i2` cycles on the way in;
- result lane `i2` is delayed by `P_SA2-1-i2` cycles on the way out.

So the array's edge ports carry plain aligned vectors. Every PE does one
8×8-bit multiply-accumulate per cycle into 32 bits. The PE works in two ways:

**Non-stationary (NS).** Both operands move, and each PE accumulates one dot
product `X[i1,:]·W[:,i2]`. The moving operand carries the tags
`first`/`last`:

- `first` clears the accumulator;
- `last` hands the finished sum to the result chain, which shifts down the
  column.

A plain output-stationary array must drain before the next GEMM pass can
start. Here the PE never waits. If the chain is busy when a sum finishes, the
sum is parked in a one-entry hold register. It enters the chain at the first
free slot, and the PE has already started its next dot product. If the chain
brings a result from above, that result goes first.

A pass with reduction length `b ≥ P_SA1` therefore streams out one result row
per cycle with no idle cycle between passes. For shorter reductions the
sequencer stretches the pass to `P_SA1` cycles. The reason: rows of results
finish every `b` cycles, but the chain can carry them away only one row per
cycle per PE. A `congest` flag reports a parked result that was overwritten;
the testbenches require it to stay low.

**Stationary (WS, and IS by symmetry).** Each PE holds one weight and adds
`x·w` to the partial sum that moves down its column. One P_SA1-wide input
vector then yields one P_SA2-wide vector of partial sums `P_SA1+P_SA2-1`
cycles later.

Weights reach the PEs through a separate shift chain along each row:

1. `P_SA2` shifts of one tile column each fill the chain.
2. `pl_latch` copies the chain into one of two ping-pong registers.

Each input carries a `bank` bit that picks the register it multiplies with.
So the next weight block is shifted in while the current one is in use, and
the switch happens between two consecutive pixels without a gap.

Cost, in cycles, of a GEMM `Z(a×c) = X(a×b)·W(b×c)`. This is the cost model
the mapping optimiser uses:

| dataflow | cycles |
|---|---|
| NS | ⌈a/P_SA1⌉·⌈c/P_SA2⌉·max(b, P_SA1) |
| WS | ⌈b/P_SA1⌉·⌈c/P_SA2⌉·(a + small per-pass gap) |
| IS | ⌈b/P_SA1⌉·⌈a/P_SA2⌉·(c + small per-pass gap) |

## Why the buffers use a diagonal ("blocked") layout

NS reads the weight tile one row at a time: fixed reduction index `k`, all
P_SA2 output channels. WS preload reads the same tile one column at a time:
fixed channel, all P_SA1 values of `k`. A plain row-major split into banks
serves one of those patterns in one cycle and serialises the other.

`blocked_layout_map` places element `(i, j)` of a P_SA1 × P_SA2 tile in
bank `x` at slot `y`:

```
x = (i + j) mod P_SA1
y = i mod P_SA2            if i + j <  P_SA1
y = i - (P_SA1 - P_SA2)    otherwise
```

With this placement:

- the P_SA2 elements of any row lie in different banks;
- the P_SA1 elements of any column lie in different banks;
- the mapping is a bijection onto P_SA1 banks × P_SA2 slots.

The testbench proves all three exhaustively at 92 × 66 and reproduces the
small 5 × 4 example by hand. `blocked_buffer` stores tiles in this layout. It
reads a row or a column in one cycle and rotates the bank outputs back into
element order (read latency 1 cycle).

Both buffers instantiate it:

- **Kernel buffer:** P_SA1 × P_SA2 tiles. Element `(k, n)` lives in tile
  `w_base + (k div P_SA1)·⌈c/P_SA2⌉ + n div P_SA2`.
- **Input buffer:** square P_SA1 × P_SA1 tiles, so that NS (a column: fixed
  `k`, P_SA1 pixels) and WS (a row: one pixel, P_SA1 values of `k`) both get
  a full vector. Element `(pixel p, k)` lives in tile
  `x_base + (p div P_SA1)·⌈b/P_SA1⌉ + k div P_SA1`.

## Running a GEMM (`gemm_ctrl`)

**NS.** Loops run over channel tile, then pixel tile, then reduction step
`s`. Each cycle the controller reads one input-buffer column and one
kernel-buffer row, and tags the step `first` (s = 0) and `last` (s = b-1).
Pixel rows beyond `a` are computed but not written back. Lanes beyond `c` are
masked at the output buffer.

**WS.** Loops run over channel tile, then reduction block. For each block:

1. Preload `P_SA2` columns, from column P_SA2-1 down to 0.
2. Latch into ping-pong bank `pass mod 2`.
3. Stream all `a` pixels, one input-buffer row each.

While one block streams, the next block is shifted in. A bank is latched
again only after the pass that last used it has left the array
(`P_SA1+P_SA2` cycles after its last input). In the last, partly filled
reduction block, rows `k ≥ b` are zeroed through `rows_valid`. Buffer
contents outside the GEMM therefore never leak into the sums.

**IS.** This is WS with the operand roles swapped. For each tile of P_SA2
pixels and each reduction block:

1. Preload the P_SA2 pixels, one input-buffer row per shift.
2. Stream the `c` weight columns, one kernel-buffer column read each.

The result lanes are pixels, so the output is `Zᵀ`. The top writes it as word
`dst_base + (p div P_SA2)·c + n`, lane `p mod P_SA2`. IS wins when `c` is
large and `a` small, as in the late layers of a network.

`psum_accumulator` adds the `⌈b/P_SA1⌉` passes of a round:

- the first pass writes its vectors into a FIFO;
- middle passes read, add and write back;
- the last pass sends the sum on.

All lanes share one set of pointers. NS bypasses it.

All array-side controls are registered once so that they line up with the
one-cycle buffer read.

## The three algorithms on one array

- **im2col:** the caller loads the Toeplitz matrix as X. One GEMM produces the
  output map, written to the output buffer at
  `dst_base + (n div P_SA2)·a + p`.
- **kn2row:** each kernel position `(k1, k2)` is a 1×1 convolution, a GEMM
  with the same X and a `Cin × Cout` weight slice. Its output goes to
  `pad_accumulate`, which:
  - adds input pixel `(u, v)` into output pixel `(u - (k1-K1/2), v - (k2-K2/2))`;
  - drops pixels that land outside the map. Dropping them is the zero padding.

  The centre patch must come first with `init` set. It covers every output
  pixel exactly once, so it writes instead of adds and the buffer never needs
  clearing. Reads, adds and writes are pipelined over two cycles at one pixel
  per cycle. `OP_PA_DRAIN` copies the result to the output buffer.
- **Winograd F(2×2, 3×3):** on the load port, each 4×4 input tile goes through
  `V = BᵀdB` and each 3×3 kernel through `U = GgGᵀ`. Each of the 16 transform
  components `e` is written to its own buffer tile (`base + e·stride`), at the
  row of the tile (or input channel) and the column of the channel. Sixteen
  ordinary GEMMs then run, one per component, in any dataflow.
  `OP_WINO_OUT` gathers the 16 results of each tile and applies `Y = AᵀMA`
  (one transform per lane). It writes the 2×2 outputs to the other output
  group.

  To stay in integers, the kernel transform computes `4·GgGᵀ`, and the output
  transform shifts right by 2. The shift is exact because every product then
  carries the factor 4. Transformed values are saturated to INT8 before they
  enter the buffers. With full-range INT8 data the transformed kernel can
  exceed that range, so Winograd layers are exact only when the caller's
  quantisation keeps `|g| ≤ 14` and `|d| ≤ 31`.

## Layout transformation and the store path

Each algorithm wants its input in a different order: 3-D tensor, Toeplitz
rows, or Winograd tiles. Producing that order while storing a layer avoids a
separate reorder pass. The **Layout Transformation Unit** (`ltu`) is a
three-state address generator:

1. **S1**, once per window or tile: load `B` and `D` from start registers, then
   advance the start registers by `step_b`/`step_d`.
2. **S2**: emit the tuple `(B, D)` and step by `inc_b2`/`inc_d2`, `n_row`
   times per row.
3. **S3**: at a row end, step by `inc_b3`/`inc_d3` instead, `n_rows` times.

`B` is the on-chip address and `D` is the external one. Example configurations:

| transformation | setting |
|---|---|
| 3-D → Toeplitz, K×K kernel, stride 1 | `n_row = K, inc_b2 = 1, n_rows = K, inc_b3 = W - K + 1, step_b = 1, step_d = K², inc_d2 = inc_d3 = 1` |

`dlt_store` runs the LTU against the output buffer:

- each tuple reads all P_SA2 channel lanes of one address;
- values are requantised (`>>> shift`, saturated to INT8);
- tuples collect in a buffer of `BL` entries;
- the buffer is written as one burst (`ddr_wr_valid/ready/addr/last`);
- a partial burst is flushed at the end.

## Max pooling

`maxpool` is P_SA2 `pool_unit`s in lockstep. Each is a horizontal unit (a
`K`-deep shift register that emits a row maximum every `S` pixels once `K`
pixels are in) followed by a vertical unit. The vertical unit is a ring of
`K-1` line buffers that holds the last rows of horizontal maxima. Only
windows entirely inside the map are produced, one result per cycle. Average
pooling is meant to run as a convolution on the array, with a constant
kernel.

## Top-level interface (`dynamap_top`)

- **Load port** (`ld_valid/ld_ready`, `ld_kind`):
  - raw INT8 words into either buffer at (tile, i, j);
  - or a 4×4 input tile / 3×3 kernel (`ld_blk`) through a transform. This
    produces 16 writes, and the port is busy for 17 cycles.
- **Command port** (`cmd_valid/cmd_ready`, `cmd_t`, `cmd_done`). Commands run
  one at a time:

  | command | what it does |
  |---|---|
  | `OP_GEMM` | One GEMM, results to the output buffer or P&A (P&A needs `c ≤ P_SA2`) |
  | `OP_PA_DRAIN` | Copy the P&A buffer to the output buffer |
  | `OP_WINO_OUT` | Winograd output transform of `n` tiles |
  | `OP_POOL` | Max pooling of an `n`-word map, `pool_w` wide |
  | `OP_STORE` | LTU-driven store of one bank group |

  The output buffer has two bank groups, so one stage can read group A while
  writing group B.
- **External write port** `ddr_wr_*`, where a memory controller connects.
- **`stats`**: event counters (NS passes, WS bank switches, dataflow switches,
  accumulation rounds, P&A drops, transform writes, Winograd tiles, bursts,
  congestion).

Parameters and defaults:

| parameter | default | meaning |
|---|---|---|
| `P_SA1`, `P_SA2` | 92, 66 | array rows and columns (GoogleNet configuration; 95, 64 for Inception-v4) |
| `XTILES`, `WTILES` | 64, 64 | input and kernel buffer capacity in tiles |
| `OB_DEPTH` | 4096 | output-buffer words per lane and group |
| `PA_DEPTH` | 4096 | P&A buffer words |
| `ACC_DEPTH` | 1024 | WS accumulator FIFO; limits `a` per WS GEMM |
| `BL` | 16 | store burst length |
| `POOL_K`, `POOL_W` | 3, 64 | largest pooling window and map width |

All buffer capacities are this design's own choices.

Larger layers run as several GEMM calls, split by pixels or channels. For
example, the 3×3 layer with 192 outputs on a 56×56 map in GoogleNet has
`a = 3136`, `b = 576`, `c = 192`. That needs 245 input tiles against the 64
built, so it runs in about four pixel slices.

## Where this RTL departs from the published design

- **Short reductions.** The published PE widens the result wires of lower rows
  so that passes with `b < P_SA1` never congest. Here the sequencer stretches
  such passes to `P_SA1` cycles instead. That costs `P_SA1 - b` cycles per pass.
- **Bank count.** The text says the input and kernel buffers have P_SA1 and
  P_SA2 banks. The blocked-layout equation and its figure use P_SA1 banks for
  a P_SA1 × P_SA2 tile. This RTL follows the equation. The figure also names
  the last bank `Bank_{P_SA1}`, where the equation numbers banks `0..P_SA1-1`.
- **Accumulator FIFO depth.** The description sizes the FIFOs at `P_SA1 + c`.
  Here a FIFO holds one full pass of `a` vectors (`ACC_DEPTH`).
- **LTU table values.** Under the state-machine reading above, the published
  example configuration for 3-D → Winograd reproduces exactly. The row for
  3-D → Toeplitz needs `inc_b3 = W - K + 1` where `W·S` is printed, and the
  row for the kn2row/im2col output needs `step_d = 1` and
  `inc_b3 = W - (m+r-1) + 1`. The configuration is a run-time input, so any
  values can be loaded.
- **Store chain.** One store LTU is built. The two-LTU chain (output → 3-D
  tensor in bank group B → Toeplitz to memory) is not. The Winograd output
  transform uses the two groups instead.
- **IS output layout.** IS results land transposed in the output buffer. The
  store's address generator, or the caller, must account for that. IS results
  cannot go to Pad-and-Accumulate.
- **Load side.** There is no load-side layout transformer and no DDR reader.
  The load port writes buffer words directly, and layer-to-layer reuse of
  on-chip data is left to whatever drives that port.
- **Own choices, not described in the paper:** the INT8 saturation after the
  transforms and the requantisation in the store, the 32-bit accumulators, the
  x4 Winograd kernel scale, and the command/load interfaces.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`, stops on a watchdog and uses `$urandom`
data.

| testbench | what it checks |
|---|---|
| `tb_pe` | NS dot products, chain priority, hold register and `congest`; preload into both banks; WS `r_in + x·w` |
| `tb_systolic_array` (5×4) | Two back-to-back NS passes; WS with a ping-pong switch between pixels; latency `P_SA1+P_SA2-1` |
| `tb_blocked_layout_map` | The 5×4 example, and bijection plus row/column conflict-freedom at 92×66 |
| `tb_blocked_buffer`, `tb_output_buffer`, `tb_psum_accumulator` | Storage, rotation, masks, multi-pass rounds |
| `tb_wino_*` | Transforms against matrix products. The output transform test checks the whole chain against direct convolution |
| `tb_pad_accumulate` | A full 3×3 kn2row on a 4×5 map against direct convolution, including drops |
| `tb_ltu` | Toeplitz and Winograd address streams with back-pressure |
| `tb_dlt_store` | Addresses, requantised data, burst sizes 16/16/4 and `last` flags |
| `tb_maxpool` | k3s2, k3s1 and k2s2 against a reference |
| `tb_gemm_ctrl` | The full NS and WS read schedules cycle by cycle, and the NS cycle count `⌈a/P_SA1⌉⌈c/P_SA2⌉max(b,P_SA1)` |
| `tb_dynamap_top` | End to end at 4×3 (below) |
| `tb_dynamap_top_full` | The default 92×66 build with all default sizes: an NS GEMM and a WS GEMM (a = 100, b = 100, c = 70) and a store. Under Verilator it builds and runs in about four minutes |

`tb_dynamap_top` runs, at 4×3:

- NS, WS and IS GEMMs;
- a kn2row 3×3 convolution through Pad-and-Accumulate;
- a Winograd convolution from raw tiles to the 2×2 outputs;
- max pooling;
- a store with back-pressure.

It counts each mechanism and fails if one never occurs: gap-free NS passes,
WS bank switches, dataflow switches, accumulation rounds, border drops,
transform writes, bursts, write stalls.

To run one with Verilator:

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
    rtl/dynamap_pkg.sv tb/tb_dynamap_top.sv --top-module tb_dynamap_top
./obj_dir/Vtb_dynamap_top
```
