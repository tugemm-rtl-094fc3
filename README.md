# tuGEMM: exact matrix multiplication with temporal-unary counters

tuGEMM computes `Y = A·B + C` for small integer matrices without any
multiplier. A value `v` is turned into a pulse that stays high for `|v|` clock
cycles: this is *temporal unary* coding, so a value has exactly two edges. Two
such pulses are multiplied by counting the cycles in which both are high.
If one pulse is made to repeat once for every cycle of the other, the overlap
count is `|a|·|b|`. An up/down counter per output element collects these
overlaps, counting down when the operands' signs differ. The result is exact,
unlike stochastic (rate-coded) unary arithmetic. The cost is latency: a step
takes about as many cycles as its largest product. This suits low-precision
edge inference, where operands are 2 to 8 bits and usually small.

This RTL contains both variants of the architecture:

* **serial** (`tugemm_serial`): an M×P array of up/down counters. The N outer
  products that make up `A·B` are done one after another. This is the smallest
  variant.
* **parallel** (`tugemm_parallel`): N copies of the unary converters, one per
  outer product. They drive an M×P array of adder cells that sum all N
  contributions every cycle. This is about N times faster.

The top level `tugemm` puts both engines on the same operand ports.

## Data format and sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `M`, `N`, `P` | 16, 16, 16 | A is M×N, B is N×P, C and Y are M×P |
| `W` | 8 | operand width, two's complement (range −2^(W−1) … 2^(W−1)−1) |
| `OUT_W` | `2W + clog2(N)` = 20 | width of C and Y |

The defaults (8-bit operands, 16×16×16) are the main point of the original
evaluation. The architecture was also evaluated with 4-bit and 2-bit operands
and with 32×32 matrices. Those are the same RTL with `W` = 4 or 2, or
`M = N = P = 32`.

`OUT_W` holds any `A·B` exactly, since `|A·B| ≤ N·2^(2W−2)`. C is added at the
same width. If `A·B + C` leaves the `OUT_W` range, it wraps modulo 2^OUT_W.
Because Y is plain binary, a result can be fed back in as an operand, or as C
of another GEMM.

A, B and C are whole-matrix input ports. They must stay stable from `start`
until the engine reports ready. Each is an unpacked array of signed words,
indexed `a[row][col]`.

## The serial engine

```
            index ──► vector generator (B) ──► B[i,:] ──► row counter ─┐ unary_row[P], neg_row[P]
 index counter                                              row_done │ ▼
            index ──► vector generator (A) ──► A[:,i] ──► column counter ──► unary_col[M], neg_col[M]
   ▲ step_done ◄────────────────────────────────────────────┘          │
   └─ output_ready                                   M×P output counter array (starts at C)
```

**Steps.** `A·B` is the sum, over `i = 0 … N−1`, of the outer products of
column `i` of A and row `i` of B. The `index_counter` walks `i` from 0 to
N−1. Once it reaches N it raises `output_ready`. The two `vector_generator`s
are multiplexers that present `A[:,i]` and `B[i,:]`.

**Nested counting.** The `row_counter` has P lanes and the `column_counter` has
M lanes. Each lane is a signed W-bit counter that moves one step toward zero
(`unary_lane`). Its `unary` output is high while the lane is non-zero. Its
`neg` output is high while the lane is negative.

* The row lanes step every cycle. Lane `j` is therefore high for `|b_j|`
  cycles. A *pass* lasts `max_j |b_j|` cycles.
* In the last cycle of a pass (`row_done`), the row lanes reload row `i` and
  every column lane steps once. Lane `k` of the column counter is therefore
  high for `|a_k|` passes.
* Output cell `(k, j)` counts in every cycle where `unary_col[k]` and
  `unary_row[j]` are both high: `|a_k|` passes of `|b_j|` cycles each. It
  counts up if `neg_col[k] == neg_row[j]`, and down otherwise. Over the step
  it adds exactly `a_k·b_j`.

Example: for column `(2, −1)` and row `(3, 1)`, a pass is 3 cycles long and
there are 2 passes.

```
cycle          1 2 3 | 4 5 6
unary_row[0]   1 1 1 | 1 1 1        b0 = 3
unary_row[1]   1 0 0 | 1 0 0        b1 = 1
row_done       0 0 1 | 0 0 1
unary_col[0]   1 1 1 | 1 1 1        a0 = 2  -> cell(0,0) +6, cell(0,1) +2
unary_col[1]   1 1 1 | 0 0 0        a1 = -1 -> cell(1,0) -3, cell(1,1) -1
step_done      0 0 0 | 0 0 1
```

**Timing.** The row lanes reload in the last cycle of a pass, not one cycle
after they reach zero, so passes follow each other with no gap. Steps also
follow each other with no gap. The counters take column 0 and row 0 on the
`start` edge. In the last cycle of step `i`, the index counter already
presents index `i+1` to the vector generators, and the counters load the next
step's vectors in that same cycle. The number of cycles from the `start` edge
to `output_ready` is therefore

```
T_serial = Σ_k S_k,   S_k = max|A[:,k]| · max(1, max|B[k,:]|)
```

with `S_k = 1` when column k of A is all zero. The worst case (every operand
−2^(W−1)) is `N·(2^(W−1))²`: 262,144 cycles at the defaults. With realistic
operands the count is far lower. A 16×16×16 GEMM whose entries stay within
±41 took 24,576 cycles in simulation.

**Sequencing.** `index_counter` is a two-state machine:

* IDLE → RUN on `start`. In the same cycle, `init` loads C into the output
  counters and `load` loads the first vectors.
* RUN → IDLE after `step_done` on step N−1.

`step_done` is raised by the column counter in one of two cases:

* a pass ends while every column lane is on its last pass;
* every column lane is already zero, so a zero column costs one cycle.

A `start` while the engine is busy is ignored. After reset the engine reports
ready with Y = 0.

## The parallel engine

The N steps are independent, so `tugemm_parallel` builds N `vector_counter`s.
Unit k is a fixed-index pair of vector generators plus the serial engine's
column and row counters. All units start together on `start`. Unit k raises
`col_done` once all of its column lanes are zero. `output_ready` is the AND of
all N `col_done` flags.

Each cell of the `output_adder_array` (`output_adder_cell`) receives one
(unary, neg) pair of column signals and one of row signals from every unit.
Each unit contributes:

* 0 when its two unary signals are not both high;
* +1 when both are high and the signs agree;
* −1 (two's complement) when both are high and the signs differ.

The N terms and the register are summed, and the result is written back to the
register every cycle. The register starts at C, loaded on `start`.

```
T_parallel = max_k S_k      (S_k = 0 for a zero column of A)
```

The count is measured in cycles after the `start` edge. The worst case is
`(2^(W−1))²`: 16,384 cycles at the defaults, 16 times faster than serial.
`output_ready` is meaningful from the cycle after `start`.

## Top level

`tugemm` passes `start` to both engines only while both report ready. The two
results therefore always come from the same operands, and a `start` during a
GEMM is dropped. The ports are:

* inputs: `clk`, `rst_n` (synchronous, active low), `start`, `a`, `b`, `c`;
* outputs: `y_serial`, `ready_serial`, `y_parallel`, `ready_parallel`.

For a single-variant system, instantiate `tugemm_serial` or `tugemm_parallel`
directly. Both have the same ports, with `y` and `output_ready`.

## What follows the original architecture, and what is added

The original description gives the structure of both engines and the signals
between their blocks. It also gives the nested counting rule, the counter-cell
and adder-cell behaviour, C as the initial counter value, and the
AND-of-`col_done` completion.

The following choices are this implementation's own:

* matrices delivered on ports;
* the start/ready handshake and the reset;
* the look-ahead index that loads the next serial step in the last cycle of
  the current one;
* reloading the row lanes in the last cycle of a pass;
* one-cycle handling of all-zero columns;
* the result width and wrap-around;
* C added in the parallel engine as well (the original does not show C for
  that variant);
* the row counter of a finished parallel unit held still;
* the shared-operand top level and its start gating.

The N-input adder of the parallel cell is written as a sum and left to
synthesis.

The original reports post-synthesis area and power in a 45 nm library at
400 MHz. This RTL has not been characterised that way.

## Files

| file | content |
|------|---------|
| `rtl/tugemm_pkg.sv` | default sizes, `out_width()` |
| `rtl/unary_lane.sv` | one signed count-to-zero lane |
| `rtl/vector_generator.sv` | column/row selector |
| `rtl/row_counter.sv`, `rtl/column_counter.sv` | unary converters |
| `rtl/index_counter.sv` | serial step sequencer |
| `rtl/output_counter_cell.sv`, `rtl/output_counter_array.sv` | serial accumulators |
| `rtl/tugemm_serial.sv` | serial engine |
| `rtl/vector_counter.sv` | one parallel unit |
| `rtl/output_adder_cell.sv`, `rtl/output_adder_array.sv` | parallel accumulators |
| `rtl/tugemm_parallel.sv` | parallel engine |
| `rtl/tugemm.sv` | top level |

## Testbenches and simulation

Each block has a self-checking testbench `tb/<module>_tb.sv`. Each one ends by
printing `TB_RESULT checks=<n> failures=<n>`. The expected values are worked
out directly from the operands, not from a second copy of the design:

* the array tests use cycle-by-cycle counting models;
* the engine tests compute `A·B + C` with integer arithmetic;
* the engine tests also check the cycle counts against the formulas above,
  including the worst case.

`tb/tugemm_tb.sv` runs both engines end to end at M=4, N=5, P=3, W=4. It counts
how often each mechanism occurs and fails if one never does. The mechanisms
are: steps, row reloads, up- and down-counts, zero-column steps, zero-row
passes, multi-input parallel additions, −1 contributions, non-zero C, worst-case
operands, and an ignored `start`.

`tb/tugemm_full_tb.sv` runs the top at its default size. It does three GEMMs:
random full-range operands, operands within ±41, and the all-−128 worst case.
The run takes about half a minute.

`tb/tugemm_workload_tb.sv` covers the other evaluated sizes through the helper
`tb/tugemm_runner.sv`:

* 16×16×16 with 2-bit and 4-bit operands: random, small and worst-case GEMMs.
  The worst cases take 64 and 1,024 serial cycles, and 4 and 64 parallel
  cycles.
* 32×32×32 with 8-bit operands: one GEMM with entries within ±41. It takes
  52,127 serial cycles and 1,681 parallel cycles.

Full-range 32×32 GEMMs take over 500,000 cycles and are not part of the tests.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tugemm_full_tb \
  -y rtl -y tb +libext+.sv rtl/tugemm_pkg.sv tb/tugemm_full_tb.sv
./obj_dir/Vtugemm_full_tb
```

Replace `tugemm_full_tb` with any other testbench name. The smaller testbenches
set reduced parameters with `#(...)`.
