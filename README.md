# NN-LUT: one programmable table for every Transformer non-linearity

Transformer inference needs GELU, Softmax (exp, then a division) and LayerNorm
(a reciprocal square root). Built directly, each needs its own floating-point
or multi-step integer datapath. NN-LUT replaces all of them with **one
16-segment piece-wise linear unit**:

    y = s_i * x + t_i      for d_(i-1) <= x < d_i

Each segment has a slope `s_i`, an offset `t_i` and a lower breakpoint `d_i`.
The unit never changes. Only the 16 table rows do, and reloading them switches
the unit from GELU to exp to 1/x to 1/sqrt.

What sets it apart from an ordinary linear-interpolation table is where the
contents come from. The breakpoints are not on a fixed grid. A small neural
network is trained offline for the function: one hidden layer of 15 ReLU
neurons, `z(x) = sum_j m_j * max(n_j*x + b_j, 0)`. That network is itself
exactly piece-wise linear, so it folds without any loss into the table format.
The breakpoints therefore land wherever training found them useful.

This repository holds synthesizable SystemVerilog for the unit in its 32-bit
integer configuration, in two forms: a single lane, and a 16-lane special
function unit (SFU). An accelerator engine puts the SFU after its MAC array.
Self-checking testbenches are included. The training and the rest of the
accelerator are not part of the RTL (see *What is not here*).

## From a ReLU network to table rows

Sort the 15 neurons by their kink points `e_j = -b_j / n_j`. These become the
breakpoints, `d_k = e_k` for k = 1..15, which split the line into 16 intervals.
Inside interval k (0-based, between `e_k` and `e_(k+1)`), each neuron is either
fully off or fully linear:

* a neuron to the **left** of the interval (j < k) is active exactly when its
  `n_j >= 0`;
* a neuron to the **right** (j >= k) is active exactly when its `n_j < 0`.

Summing the active neurons gives the row for that interval:

    s_k = sum over active j of m_j * n_j
    t_k = sum over active j of m_j * b_j

No approximation is involved. The table reproduces the network bit for bit,
except for rounding when the rows are quantized. The printed form of this
derivation in the source has misprints. For example, it puts `m_i` outside
the sums, and one example row reads `z2 = n2 x + m2`. The rule above is the
consistent one, and `tb/tb_nnlut_sfu.sv` (task `load_nn`) implements it. That
testbench checks the hardware output against the network evaluated directly,
for three random networks.

## The lane: two cycles, one multiplier, one adder

```
            cycle 1: index check + look-up          cycle 2: multiply-add
 x ──┬──► [15 comparators x >= d_k] ─► count ─► idx
     │                                           │
     │        table rows (s_k, t_k) ─── mux(idx) ├─► reg1 (s) ──► [ * ] ─► [>>> SFRAC] ─► [ + ] ─► clip ─► reg3 ─► y
     └──────────────────────────────────────────────► reg0 (x) ──┘                          ▲
                                                 └─► reg2 (t) ────────────────────────────────┘
```

`rtl/nnlut_unit.sv` follows the register placement of the published unit:
reg0/reg1/reg2 after the look-up, and reg3 after the multiply-add. The result
therefore appears **exactly 2 cycles** after its input, whatever function is
loaded. A new sample can enter every cycle.

The comparator (`rtl/nnlut_comparator.sv`) compares x with all 15 breakpoints
in parallel. For sorted breakpoints the 15 results form a thermometer code, and
the segment index is simply their count:

* `x < d_1` gives segment 0;
* `x >= d_15` gives segment 15;
* an input equal to a breakpoint belongs to the segment above it.

The table is read only in cycle 1. A table write therefore never corrupts a
sample that is already past the look-up.

## Number format, the part to understand before using it

The source only says that the parameters and arithmetic "follow the input's
precision", with inputs pre-scaled upstream. The concrete format here is this
implementation's own choice:

| quantity | format (DATA_W = 32) | 1.0 is | range |
|---|---|---|---|
| x, t, d, y | signed Q15.16 | 2^16 | about ±32768 |
| s | signed Q7.24 (`SFRAC` = 24) | 2^24 | ±128 |

The datapath computes `y = clip( (s * x) >>> 24 + t )`:

* the full 64-bit product is shifted arithmetically, so it rounds toward minus
  infinity;
* the result is clipped to 32 bits, and a `sat` flag marks a clipped result.

Why 24 slope fraction bits: 1/x on (1, 1024) has chord slopes as small as about
-1.5e-6. With 16 fraction bits that quantizes to zero, and the reciprocal stops
falling beyond about x = 600. With 24 bits the same slope is -25 LSB. The price
is the ±128 slope limit, which all four Transformer functions respect. The
largest slope among them is the steep first segment of 1/x, about -0.65.

For each function and its input range:

| function | input range | largest input word | result |
|---|---|---|---|
| GELU | (-5, 5) | 5·2^16 | fits |
| exp (Softmax numerator) | (-256, 0) | 2^24 | fits |
| 1/x (Softmax denominator) | (1, 1024) | 2^26 | fits; a sum of up to 1024 exp(x - max) terms stays in range |
| 1/sqrt (LayerNorm) | (0.1, 1024), with scaling below | 2^26 | fits |

To move to another format, change `SFRAC` and `XFRAC` (package `nnlut_pkg`).
Any `DATA_W` with `XFRAC + LOG2_S <= DATA_W - 2` elaborates.

## Input scaling for 1/sqrt

Below 1, 1/sqrt(x) rises so steeply that 16 segments fit it badly. The table is
therefore trained only on [1, 1024]. A smaller input gets the identity
`1/sqrt(x) = 2^5 / sqrt(2^10 · x)`:

* in front of the lane, an input 0 < x < 1.0 is shifted left by 10;
* behind the lane, the same sample's output is shifted left by 5 (clipped to
  32 bits).

`rtl/nnlut_scale.sv` holds both shifts, which are combinational. The SFU
carries the "was scaled" bit alongside the sample through the two pipeline
stages, so the latency stays at 2 cycles. Scaling is switched on per input
vector (`in_scale`), meant only while the 1/sqrt table is loaded. The scale
S = 2^10 follows the source. Treating 1.0 as 2^16 follows this RTL's format.

## The special function unit (top: `nnlut_sfu`)

The target engine produces a partial-sum vector of 16 output channels per
cycle. The SFU matches that rate with 16 lanes. The lanes share one table
(`rtl/nnlut_table.sv`, flip-flops, all read in parallel). Each lane has its own
comparator, multiplier, adder and scaling.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears table and pipeline) |
| `cfg_we`, `cfg_addr` | in | 1, 4 | write table entry `cfg_addr` this cycle |
| `cfg_s`, `cfg_t`, `cfg_d` | in | 32 each | slope, offset, and lower breakpoint of that entry (`cfg_d` ignored for entry 0) |
| `in_valid`, `in_scale` | in | 1, 1 | an input vector is present; apply 1/sqrt input scaling to it |
| `in_x` | in | 16 × 32 | input vector |
| `out_valid` | out | 1 | output vector present: `in_valid` delayed by exactly 2 cycles |
| `out_y` | out | 16 × 32 | results |
| `out_sat` | out | 16 | lane result was clipped (multiply-add or output scaling) |
| `out_seg` | out | 16 × 4 | segment each lane used (observability) |

Usage rules:

* Switching functions means writing all 16 entries, one per cycle.
* Keep `in_valid` low while a partially written table has unsorted
  breakpoints. An assertion checks that the breakpoints are ascending
  whenever a vector enters.
* Writes may overlap vectors still in flight; those vectors finish with the
  old table.
* There is no back-pressure. A vector may enter every cycle.

## Files

| file | contents |
|---|---|
| `rtl/nnlut_pkg.sv` | default sizes and the latency constant |
| `rtl/nnlut_comparator.sv` | breakpoint comparison and segment index |
| `rtl/nnlut_table.sv` | the 16-row (s, t) table and 15 breakpoints, write port |
| `rtl/nnlut_unit.sv` | one 2-cycle lane |
| `rtl/nnlut_scale.sv` | input and output shifts of the 1/sqrt scaling |
| `rtl/nnlut_sfu.sv` | 16-lane special function unit (top) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_nnlut_workloads.sv` | GELU, Softmax and LayerNorm rows run through the SFU |

Parameters and defaults:

* `N_ENTRIES` = 16: from the source.
* `DATA_W` = 32: INT32, from the source.
* `LOG2_S` = 10: from the source.
* `LANES` = 16: one lane per output channel of the engine.
* `SFRAC` = 24 and `XFRAC` = 16: this implementation's choices.

## Verification

Every testbench ends with one line, `TB_RESULT checks=<n> failures=<m>`. Each
also has a cycle watchdog. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/nnlut_pkg.sv tb/tb_nnlut_sfu.sv --top-module tb_nnlut_sfu -o sim
./obj_dir/sim
```

* **tb_nnlut_comparator**: random sorted breakpoints at 32 and 16 bits. Inputs
  are random, exactly on a breakpoint, just below one, and at the extremes.
  The reference is an independent top-down scan.
* **tb_nnlut_table**: reset, random writes, the entry-0 breakpoint rule, and
  no disturbance of other entries.
* **tb_nnlut_unit**: a 64-bit integer model checks every output. Each output
  must arrive exactly 2 cycles after its input. The table changes under
  traffic, and slopes are large enough to clip. It also checks that all 16
  segments are used.
* **tb_nnlut_scale**: both shifts, the 0 < x < 1 window and output clipping.
* **tb_nnlut_sfu** (end to end, default sizes, about 46 000 checks):
  * three random ReLU networks folded into the table and compared with the
    network;
  * GELU, exp, 1/x and 1/sqrt tables, the last with scaling, compared with
    the exact functions;
  * a stress table for clipping;
  * bit-exact and latency checks on every vector.

  It counts each mechanism and fails if one never happens: all 16 segments,
  function switches, scaled inputs, both kinds of clipping, back-to-back
  vectors, and table writes with vectors in flight.
* **tb_nnlut_workloads**: one row each of the real operations, at RoBERTa-base
  sizes:
  * GELU over 3072 values;
  * Softmax over 16 rows at sequence lengths 16, 128 and 1024 (exp table,
    then reciprocal table);
  * LayerNorm over 16 rows of 768 channels, half of them with variance below
    1, so scaled.

  The testbench does the reductions and final products. It also checks that
  V back-to-back vectors take V + 2 cycles.

The tables in the function tests are **chord fits on hand-placed
breakpoints**, not trained networks, so they are somewhat less accurate than
trained NN-LUT tables. The tolerances reflect that, for example 0.045
absolute for GELU and 6 % for 1/x. Only the random-network test exercises the
exact network-to-table mapping.

## How this relates to the published design

Follows the source:

* 16 entries and first-order segments;
* one comparator per breakpoint;
* the reg0-reg3 pipeline, with one multiplier and one adder;
* 2-cycle latency for every function;
* INT32 precision;
* input scaling with S = 2^10 and an output multiplier of sqrt(S);
* a vector of such units after each engine's 16-channel MAC output.

This implementation's choices:

* the Q15.16 / Q7.24 formats, floor rounding and clipping;
* the thermometer-count index encoder;
* flip-flop table storage shared by all lanes;
* the table write format (s, t and lower breakpoint per entry);
* a valid-only handshake without back-pressure;
* 16 lanes;
* synchronous reset.

Differences in the source's own figures, and which reading this RTL follows:

* The block diagram draws 16 breakpoints against 16 table rows. The equations
  define N - 1 = 15 breakpoints for N = 16 rows. This RTL uses 15.
* The comparator in the block diagram is labelled 16-bit. The reported
  headline comparisons are for the INT32 unit. This RTL defaults to 32 bits;
  the comparator is also tested at 16.
* The text once calls the table parameters (a_i, b_i). They are (s_i, t_i)
  everywhere else.

Not claimed:

* The source gives 0.68 ns delay and the area and power of a 7 nm synthesis.
  Nothing here reproduces or checks those numbers.

## What is not here

* **Training and calibration** of the approximating networks: offline
  software. The testbenches contain the network-to-table folding only as a
  reference.
* **FP16 and FP32 versions** of the lane: the source reports them as
  alternative precisions of the same unit. This RTL builds the INT32 one.
* **The integer-only baseline unit** that the source compares against.
* **The rest of the accelerator core.** This covers the control unit, the 1 MB
  shared scratchpad, the fetcher, the feature-map and weight buffers, the
  32×32 (1024-MAC) array and the second engine. The source borrows them from an
  existing mobile NPU and describes them only by name and size. The SFU's
  vector ports stand where the MAC array output and the scratchpad connect.
* **The Softmax and LayerNorm reductions** (maximum, sums, mean, variance) and
  the final element-wise multiplies. In the target accelerator these run on
  its other arithmetic; here the workload testbench does them.
