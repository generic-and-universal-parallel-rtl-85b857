# Generic parallel matrix summation with a flexible compression goal

Many arithmetic operations come down to adding up a matrix of bits in which
every bit of column *c* carries the weight 2^*c*: a population count is one
tall column, a weighted count is a few tall columns, and a multiplier is the
skewed parallelogram of its partial products. This SystemVerilog is one
generic module, `matrix_sum`, that builds the adder for any such matrix from
nothing but the list of column heights. No generator tool runs beforehand.
The compressor is built by constant functions while the design elaborates,
and for-generate loops turn the result into hardware.

The structure is aimed at Xilinx 7-series-style slices (LUTs plus a fast carry
chain), but the RTL is plain logic and synthesizes anywhere. It follows the
construction published by T. B. Preußer, "Generic and Universal Parallel
Matrix Summation with a Flexible Compression Goal for Xilinx FPGAs". The
original implementation is in VHDL. This is an independent re-implementation,
and the places where it had to fill gaps are listed in
[Departures and open points](#departures-and-open-points).

The summation has two parts:

1. **Compression.** Stages of *generalized parallel counters* (GPCs) shrink
   the matrix. A GPC takes bits from one or more adjacent columns and emits
   their total as a short binary number.
2. **A ragged carry-propagate adder.** This adder accepts columns of
   *different* heights, up to four bits each. Compression therefore stops
   column by column as soon as the adder can take the rest. There is no fixed
   goal of two or three rows.

## Using it

```systemverilog
import msum_pkg::*;

// 512-bit population count, purely combinational
matrix_sum #(.HEIGHTS(hv1(512))) u_pop (.clk(clk), .bits(v), .sum(cnt));      // cnt: 10 bits

// two columns of 256 bits (bits of weight 1 and weight 2), registers after stage 1
matrix_sum #(.HEIGHTS(hv2(256, 256)), .PIPE(12'b10)) u_w (.clk(clk), .bits(v2), .sum(s2));

// 16x16 multiplier: column c holds the partial products a[i]&b[c-i]
matrix_sum #(.HEIGHTS(hv_mul(16))) u_mul (.clk(clk), .bits(pp), .sum(prod));  // 32 bits
```

| Parameter | Default | Meaning |
|---|---|---|
| `HEIGHTS` (`hvec_t`) | `hv1(128)` | `HEIGHTS[c]` is the number of bits of weight 2^c. Up to 36 columns and 2047 bits per column. |
| `METRIC` | `M_STRENGTH` | The order in which counters are preferred (see below). |
| `PIPE` | `0` | Bit *s* set: a register bank after compression stage *s*. |

The `bits` port holds column 0 first (`HEIGHTS[0]` bits), then column 1, and
so on. The bit order within a column does not matter. `sum` is `W` bits wide,
where `W` is the width of the largest possible total (Σ HEIGHTS[c]·2^c).

The helper functions `hv1`, `hv2` and `hv_mul` in `msum_pkg` build common
shapes. Any `hvec_t` value works, and shapes do not have to be contiguous.

With `PIPE = 0` the module is combinational and `clk` is unused. Each set bit
of `PIPE` among the `NSTAGES` stages adds one cycle of latency. A new matrix
can be applied every clock. The registers have no reset and there is no
valid signal, so the surrounding logic tracks latency itself.

## The counters

Every counter is written `(p_{m-1},…,p_0 : q_{n-1},…,q_0]`: it takes *p_i*
bits of weight 2^i and produces *q_i* bits of weight 2^i with the same total.
Three figures of merit rank the counters. *p* and *q* are the total input and
output bits, and *k* is the number of LUTs used.

* **efficiency** E = (p−q)/k: bits removed per LUT (area).
* **strength** S = p/q: how fast a single stage shrinks a tall matrix (depth).
* **slack** A = 1 − (1+max input)/(1+max output): the share of the output
  code that is never used. Slack creates "phantom" carries that cost work
  later, so less slack is better.

### Atoms and whole-slice counters (`counter_atom`, `slice_counter`)

An atom takes two LUTs and two positions of the carry chain. Each LUT drives
the chain's multiplexer select (propagate) and either its own second output
or a bypassed input into the multiplexer's 0 input (generate). `carry_cell`
models that mux/xor pair: `cout = prop ? cin : gen`, `s = prop ^ cin`. Each
atom turns its inputs plus the chain carry into a 3-bit number.

| atom | inputs (w2, w1) | low LUT | high LUT |
|---|---|---|---|
| (2,2) | b1 b0, a1 a0 | prop a0^a1, gen a1 | prop b0^b1, gen b1 |
| (1,4) | b0, a3..a0 | FA(a0..a2).sum ^ a3, gen a3 | FA(a0..a2).carry ^ b0, gen b0 |
| (0,6) | –, a5..a0 | FA_r.sum ^ a5, gen a5 (bypass) | FA_l.carry ^ FA_r.carry, gen FA_l.carry |

In (0,6), FA_l adds a0..a2 and FA_r adds FA_l.sum, a3 and a4. The bypass that
carries a5 is the same path an external carry input would need. A (0,6) atom
at the bottom of a slice therefore gets a constant 0 as its carry. Any other
lower atom takes one extra weight-1 bit on the chain input.

Any two atoms stacked in one slice form a 4-column counter with a 5-bit
result. That gives nine counters, named here by their input counts with the
chain input included:

|        | lower (2,3) | lower (1,5) | lower (0,6) |
|---|---|---|---|
| upper (2,2) | E 1, S 1.8, A 0 (plain 4-bit ripple adder) | 1.25, 2, 0 | 1.25, 2, 1/32 |
| upper (1,4) | 1.25, 2, 0 | 1.5, 2.2, 0 | 1.5, 2.2, 1/32 |
| upper (0,6) | 1.5, 2.2, 0 | **1.75, 2.4, 0** | 1.75, 2.4, 1/32 |

A tenth whole-slice counter, `(1,3,2,5:1,1,1,1,1]` (E 1.5, S 2.2, A 1/16),
cannot be split into atoms. The published description of this design gives
only its function, so `gpc_1325` states the weighted sum and leaves the
mapping to synthesis.

### Floating counters

These counters use plain LUTs that can be placed freely.

| counter | module | LUTs | E | S | A |
|---|---|---|---|---|---|
| (3:1,1] full adder | `full_adder` | 1 | 1 | 1.5 | 0 |
| (6:1,1,1] | `gpc_6_111` | 3 | 1 | 2 | 1/8 |
| (2,5:1,2,1] | `gpc_25_121` | 2 | 1.5 | 1.75 | 0 |

`gpc_25_121` does the work of three full adders in one logic level. A middle
full adder over a2..a4 is split between the two LUTs. Its sum joins a0 and a1
in the low LUT's full adder, which produces s0 and c0. Its carry joins b0 and
b1 in the high LUT's full adder, which produces s1 and c1. Each LUT computes
two 5-input functions. `gpc_6_111`, like `gpc_1325`, is given by function only.

`gpc` wraps all thirteen counters behind one port shape (`x[column][bit]`
in, `y[column][bit]` out), so a generate loop can place any kind.

## The ragged carry-propagate adder (`ragged_cpa`)

The final adder has one element per column. Each element is chosen from the
column's height and from the number of carries (0, 1 or 2) the column below
passes up:

| carries \ height | 0 | 1 | 2 | 3 | 4 | >4 |
|---|---|---|---|---|---|---|
| 0 | – | copy | FA | FA | TE | illegal |
| 1 | copy | FA | FA | TE | TE | illegal |
| 2 | FA | FA | TE | TE | illegal | illegal |

The next column then receives (carries + height)/2 carries.

* **FA** is one chain position that adds two LUT inputs and the chain carry.
  When no carry arrives, a third bit enters on the chain input.
* **TE** is a ternary-adder position (`ternary_element`). A full adder over
  three bits sits in the LUT. Its sum XOR the secondary carry *z* is the
  propagate signal, and *z* also feeds the multiplexer. Its carry leaves as
  the next column's secondary carry *z'* over normal routing. *z'* does not
  depend on *z*, so the secondary carries add a single routing delay and no
  ripple path. When no secondary carry arrives, the *z* input can take a
  fourth bit. A fifth input needs a carry arriving on the chain. With no
  carry arriving, the fifth bit would have to reach the chain input over
  routing, and that link is shared with *z*.

Example: from column 0 upward, the heights 1,3,4,1,2,4,3,1 select copy, FA,
TE, FA, FA, TE, TE, FA (this is `ragged_cpa`'s default). A column that breaks
the table stops elaboration with `$error`.

## Building the compressor (`msum_pkg::schedule`)

This is the part that takes the most thought. Everything happens at
elaboration.

**Counter order.** The thirteen counters are sorted once by the chosen metric:

* `M_STRENGTH`: by S, then by slack.
* `M_PRODUCT`: by E·S, then by slack.
* `M_EFFICIENCY`: by E, then S, then slack. This makes it the same order as
  `M_PRODUCT`.

Ties that remain keep the order of `counter_e`. The comparisons
cross-multiply, so no fractions are involved.

**Anchor.** From column 0 upward, the scheduler walks the carry-propagate
table over the current heights for as long as columns are legal
(height ≤ 4 and height + carries ≤ 5). The first column that fails is the
*anchor*. Everything below it is finished and is not touched again.

**One compression stage.** The scheduler goes through the counters in order.
For each counter it tries every position from the anchor upward and places
copies there while the counter *fits*. A counter fits at position *pos* when
both of these hold:

* Each of its input columns still has enough bits that no counter of this
  stage has consumed.
* Column *pos* is not yet acceptable to the final adder.

To decide whether a column is acceptable, the scheduler replays the table
from the anchor over *effective* heights: the unconsumed bits plus the
outputs of counters already placed in this stage. Above the first column
that fails the replay, a column counts as done only when its effective
height is at most 3. That is what it can take behind a ternary element.

Counters are placed only where all their input columns lie inside the result
width. Outputs at or above the result width are dropped. This is exact,
because the true total always fits.

**Repeat.** After each stage the anchor is updated. Stages are added until
the anchor reaches the top column. Every stage places at least one counter
(at worst a full adder at the anchor) and every counter removes bits, so the
loop terminates.

**Wiring record.** For each placement the scheduler records:

* the counter kind and position;
* the flat index of its first input bit in each column (it takes the lowest
  unconsumed bits);
* the flat index of its first output bit in each column of the next stage.

In the next stage, each column holds its pass-through bits first and the
counter outputs above them. `matrix_sum` reads this record in for-generate
loops and wires the stage vectors.

Because the acceptance test is local, the goal stays flexible. A column may
end below what the adder could take. For example, a (2,5:1,2,1] counter
placed where a single column is 5 high leaves no carry for the final adder.
The next column then only needs to come down to 4, and the saving passes
upward.

**Results.** These are the counter and stage counts for the shapes that the
published evaluation used. `tb_schedule` checks the six strength rows that
match the published table.

| shape | strength: FA/(2,5)/(6)/slice, stages | efficiency = product |
|---|---|---|
| (128) | 2/0/25/5, 3 | 4/3/22/5, 4 |
| (256) | 7/0/49/12, 4 | 6/1/49/12, 4 |
| (512) | 6/1/101/26, 5 | 7/5/97/26, 5 |
| (128,128) | 4/2/46/13, 4 | 4/29/18/14, 5 |
| (256,256) | 3/0/98/28, 5 | 6/60/36/29, 6 |
| (512,512) | 4/0/197/59, 6 | 9/116/79/59, 6 |
| 16×16 multiplier | 14/1/2/26, 3 | 13/2/1/26, 3 |

The strength column matches the published counts exactly for all six
population-count shapes. Efficiency/product matches exactly for the first
four shapes. It is a few counters off for the last two shapes and for the
multiplier, and the strength multiplier is off too (published: 12/1/2/28 and
15/2/1/27). The published text does not define "fits" precisely, so small
differences are expected there.

## Files and hierarchy

```
matrix_sum                    generic summation (top)
├── gpc  (one per placement)  uniform counter wrapper
│   ├── full_adder
│   ├── gpc_6_111
│   ├── gpc_25_121 ── full_adder ×3
│   ├── gpc_1325
│   └── slice_counter ── counter_atom ×2 ── carry_cell ×2, full_adder
└── ragged_cpa ── carry_cell (FA elements), ternary_element ── full_adder, carry_cell
msum_pkg                      types, counter signatures, metrics, schedule()
```

Testbenches in `tb/` (each prints `TB_RESULT checks=N failures=M`):

| testbench | what it checks |
|---|---|
| `tb_full_adder`, `tb_gpc_6_111`, `tb_gpc_25_121`, `tb_gpc_1325`, `tb_ternary_element` | exhaustive arithmetic identities |
| `tb_counter_atom`, `tb_slice_counter` | all three atoms and all nine slice combinations, exhaustive over used inputs |
| `tb_ragged_cpa` | element selection for the example shape, random and corner sums for three shapes |
| `tb_schedule` | metric values, counter orders, published counts, independent replay of every stage's bookkeeping for the evaluated and 150 random shapes |
| `tb_matrix_sum` | six shapes (one irregular, with empty columns), all metrics, several pipeline placements; counts which mechanisms occurred |
| `tb_matrix_sum_full` | the default configuration (128-bit popcount) |
| `tb_workloads` | the seven evaluated shapes, including the matrix wired as a real 16×16 multiplier |

`msum_harness` is the shared stimulus and checking module.

To run one testbench with Verilator:

```sh
verilator --binary --timing --assert -Irtl -Itb --top-module tb_matrix_sum \
          rtl/msum_pkg.sv tb/tb_matrix_sum.sv -o sim && ./obj_dir/sim
```

Building `tb_workloads` takes under a minute. The schedules are computed at
elaboration, so a larger matrix mainly costs compile time.

## Departures and open points

* **Language and record.** The original computes the schedule into a flat
  integer vector in VHDL. Here it is a packed SystemVerilog struct with fixed
  limits: 36 columns, 12 stages and 320 counter placements. The largest
  evaluated shape needs 11 columns, 6 stages and 263 placements. A shape that
  exceeds the limits stops elaboration with `$error`; raise the constants in
  `msum_pkg` if needed.
* **"Fits".** The exact placement test is this design's own reading (see
  above). It reproduces the published strength schedules exactly and the
  others closely.
* **Efficiency ordering.** The published text says that strength and product
  produced identical schedules. Its table instead shows efficiency and
  product as one column and strength as another. This code follows the
  table: efficiency ties are broken by strength, which makes the efficiency
  order identical to the product order.
* **Counters given only by function.** `gpc_6_111` and `gpc_1325` are plain
  arithmetic, so their LUT and carry-chain packing is left to synthesis. The
  atoms, `gpc_25_121`, `ternary_element` and the carry-propagate elements
  follow their published gate structure.
* **Not modelled.**
  * Slice placement and LUT packing: the counters are logic, not hand-placed
    primitives.
  * Timing and area: the published delays and LUT counts come from a vendor
    flow on a Zynq device and cannot be checked here.
  * The carry-chain multiplexer and XOR: these are generic logic
    (`carry_cell`), not the vendor primitive.
* **Pipelining.** Registers go exactly where `PIPE` asks. The module does not
  choose stages by itself, and there is no reset or handshake.
