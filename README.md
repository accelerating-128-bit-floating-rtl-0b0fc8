# A binary128 matrix-multiply systolic array

This is synthesizable SystemVerilog for an accelerator that computes
`C' = A·B` in IEEE 754 binary128 (quadruple precision). Quad-precision GEMM
is the inner kernel of high-precision solvers such as semidefinite
programming and blocked LU decomposition, where double precision loses too
much. CPUs have no binary128 hardware, so a dedicated array of quad-precision
multiply-add units, fed from the board memory, is much faster.

The array is a `P_R × P_C` grid of processing elements (PEs), by default
8 × 16, each with one binary128 multiplier and one binary128 adder. A values
move right along the PE rows, B values move down the PE columns, and every PE
keeps its partial sums locally. A buffer of A (the *memory tile*) in front of
the array lets every A column be used many times, so the memory only has to
supply one row segment of B per cycle. `alpha`, `beta` and transposes are left
to the host: the array computes the plain product, and the host scales and
adds.

## Data flow

```
 A port ─ Read A ─ memory tile ─ Feed A_0 ─ Feed A_1 ─ … ─ Feed A_{P_R-1}
                                    │          │                 │
 B port ─ Read B ─ B queue ─ Feed B_0 … Feed B_{P_C-1}           │
                                    ▼          ▼                 ▼
                           PE(0,0) → PE(0,1) → … → PE(0,P_C-1)      (A moves right)
                              ↓          ↓                ↓         (B moves down)
                           PE(1,0) → …                              (results move up)
                              ⋮
                   Drain C_0 ← Drain C_1 ← … ← Drain C_{P_C-1}
                      │
                   Store C ─ C port
```

| Module | File | Job |
|---|---|---|
| `fp128_mul`, `fp128_add` | `rtl/fp128_mul.sv`, `rtl/fp128_add.sv` | correctly rounded binary128 multiply and add, one per cycle, 4 cycles latency |
| `pe` | `rtl/pe.sv` | multiply-add into M_TILE accumulators, forwards A and B, buffers and forwards results |
| `memory_tile` | `rtl/memory_tile.sv` | holds up to M_TILE columns of A (P_R words each), hands each out M_TILE times |
| `feed_a`, `feed_b` | `rtl/feed_a.sv`, `rtl/feed_b.sv` | one register stage per PE row / column: gives the systolic skew |
| `read_a`, `read_b` | `rtl/read_a.sv`, `rtl/read_b.sv` | address generation and credit-based reads of A columns and B row segments |
| `drain_c` | `rtl/drain_c.sv` | merges one PE column's results with those of the columns to its right |
| `store_c` | `rtl/store_c.sv` | turns the result order back into addresses, drops padding |
| `gemm_top` | `rtl/gemm_top.sv` | the whole accelerator |
| helpers | `fp128_pkg`, `gemm_pkg`, `sync_fifo`, `ordered_merge` | types, float arithmetic functions, FIFO, fixed-order two-input merge |

## Blocking: who computes which element

C is cut into blocks of `P_R` rows by `P_C·M_TILE` columns (8 × 8192 at the
defaults). Blocks are processed row block by row block, and within a row block
column block by column block. Inside a block, PE `(i, j)` owns the `M_TILE`
elements

    row = rb·P_R + i,   col = cb·P_C·M_TILE + t·P_C + j,   t = 0 … M_TILE-1

in `M_TILE` accumulators indexed by `t`. The array works through the block in
steps ordered by `p` (the k index) outermost and `t` innermost. At each step
the column `A(rb·P_R … rb·P_R+P_R-1, p)` enters the A chain and the segment
`B(p, cb·P_C·M_TILE + t·P_C … +P_C-1)` enters the B chain. So an A column
stays in front of the array for `M_TILE` steps, one for each `t`, and B is
read exactly once per row block. This is where `M_TILE` buys bandwidth: per
step the memory supplies `P_C` words of B and only `P_R/M_TILE` words of A.

Every A element travels with tags: `valid`, `first` (p = 0), `last`
(p = k-1) and `t`. When a term with `first` reaches the adder, the adder's
other input is `-0` instead of the accumulator, which restarts the sum; when
the term with `last` leaves the adder, the sum goes into the PE's result
buffer. Because PE `(i, j)` sees the term `i + j` steps after it entered the
chains, and the accumulator for a given `t` is touched once every `M_TILE`
steps, the multiply-add pipeline never reads an accumulator that is still
being updated as long as `M_TILE > ADD_LAT + 1`.

Rows beyond `m` and columns beyond `n` are filled with zeros by the readers;
their results run through the array and are dropped by `store_c`.

## Stalls, empty steps and draining

There is a single array-wide `step` signal. All feed stages and PEs advance
together when it is high. It is low (a *stall*) when any PE's result buffer
is nearly full: the buffer holds `2·M_TILE` results, and "nearly full" leaves
room for the results already inside the multiply-add pipeline.

A step carries a new term only if the memory tile holds a column and the B
queue holds a segment; otherwise an empty step (valid = 0) moves through, so
slow memory costs throughput but never correctness.

Results leave in one fixed order: block by block, then PE column `j`, then
PE row `i`, then `t`. Each PE first sends its own `M_TILE` results for the
block and then passes on the results of the PEs below it; each Drain stage
first sends its own column, then passes on the columns to its right. The
merge units (`ordered_merge`) count words, so no addresses travel with the
results. `store_c` counts in the same order and computes
`c_base + col·ldc + row`.

A PE can only pass on results of the next block after its own results for
that block exist, while the array keeps computing that block. The result
buffers of two blocks and the almost-full threshold guarantee that the drain
can always make progress; this needs

    M_TILE ≥ P_R + P_C + MUL_LAT + ADD_LAT + 2

which `gemm_top` checks at elaboration. Draining runs at one result per cycle
into Store, which is the limit when `k` is small: a block of
`P_R·P_C·M_TILE` results takes that many cycles to write, against
`k·M_TILE` cycles to compute.

## Interfaces

`gemm_top` has a start pulse with a configuration struct `gemm_cfg_t`
(`m, n, k, lda, ldb, ldc, a_base, b_base, c_base`, all 32-bit, addresses in
128-bit words), `busy`, `done`, and three memory ports:

* A read: `a_req_valid/ready/addr`, response `a_resp_valid` with `P_R`
  consecutive words `a_resp_data[P_R]`, in order.
* B read: the same with `P_C` words.
* C write: `c_wr_valid/ready/addr/data`, one word per write.

Layout: `A(r,p)` at `a_base + p·lda + r` (column major), `B(p,c)` at
`b_base + p·ldb + c` (each row of B contiguous, i.e. the transpose of a
column-major B; the host arranges this), `C(r,c)` at `c_base + c·ldc + r`.
The readers never have more requests in flight than they have room for, so
responses need no backpressure.

## Floating point

`fp128_pkg` implements multiply and add as functions on a 232-bit
intermediate, with round to nearest/ties to even, subnormals, infinities,
signed zeros and a canonical quiet NaN (`7FFF8000…0`). The units compute the
result in one combinational stage and delay it through `LATENCY` registers;
for timing closure the function should be split across the pipeline, which
retiming tools can partly do. Multiply and add are rounded separately (no
fused multiply-add). No exception flags are produced.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `P_R`, `P_C` | 8, 16 | PE rows and columns (the largest published configuration) |
| `M_TILE` | 512 | accumulators per PE and uses of each A column |
| `MUL_LAT`, `ADD_LAT` | 4, 4 | pipeline latency of the float units (own choice) |
| `BQ_DEPTH` | 64 | B queue depth; must cover the memory read latency for full rate (own choice) |

Peak rate is `P_R·P_C` multiply-adds per cycle (2·128 flops per cycle at the
defaults), reached once an A column is in the tile and B arrives one segment
per cycle.

## Where this departs from the published design

The published accelerator was written in OpenCL and compiled by a vendor
tool, with an existing binary128 multiply-add unit. Its high-level structure
(PE grid, Read/Feed, memory tile in front of Feed, Drain, Store, host-side
alpha/beta) is followed here. Everything below that level is this design's
own: the block shape and the meaning of `M_TILE`, the tags, the fixed drain
order, the stall rule, the valid/ready memory ports, the float units and
their latency. The board memory controllers, PCIe and the host library are
not included; the memory ports are where they would connect. With 4-cycle
units an 8 × 8 array needs `M_TILE ≥ 26`, so the smallest published tile size
(24) for that array cannot be built with these latencies.

## Testbenches

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. Expected values are computed
independently: float tests use products and sums of doubles with short
significands (exact in binary128) converted by the testbench, and the
array tests use integer matrices, whose products are exact, against 64-bit
integer arithmetic. `tb/dram_model.sv` is a behavioural memory with a fixed
read latency and randomly withheld ready.

* `gemm_top_tb` runs a 2 × 2 array with `M_TILE = 16` on several shapes:
  several row and column blocks, padding rows and columns, `k = 1` (result
  backpressure makes the array stall), randomly busy memory (empty steps)
  and a long `k`, where it checks one term per cycle. It counts each of
  these events and fails if one never happens.
* `gemm_top_full_tb` runs the default 8 × 16, `M_TILE = 512` array on one
  full block (`m = 8, n = 8192, k = 3`), checks all 65 536 results, that the
  run issues exactly `3·512` steps, and that it ends within the time the
  results need to drain.

To simulate, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/fp128_pkg.sv rtl/gemm_pkg.sv tb/gemm_top_tb.sv --top-module gemm_top_tb
    ./obj_dir/Vgemm_top_tb

The full-size testbench takes a few minutes to compile and seconds to run.
