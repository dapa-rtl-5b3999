# DAPA activation unit: distribution-aware piecewise-linear GELU, exp and softmax in Fix16

A Transformer spends a surprising share of its time and hardware on the
non-linear functions: GELU in every MLP block and the exponential inside
every softmax. A common way to make them cheap is to cut the input axis into
segments and evaluate one straight line per segment, `y = a_n * x + b_n`.
The usual choice puts equally wide segments on a fixed range and fits each
line to minimise the plain squared error. That spends precision evenly, even
though the inputs a trained network actually produces are concentrated in a
narrow region.

DAPA (Distribution-Aware Piecewise Activation, from the DAC 2026 paper of that
name) places the segment boundaries ("knots") at **equal-probability quantiles
of the measured input distribution**. Each of the N segments then holds 1/N
of the inputs, so segments are narrow where inputs are dense and wide where
they are rare. Each line is fitted by **density-weighted least squares**, so
errors are traded away only where few inputs fall. The fitting happens
offline. The hardware is only a small table, a comparator tree that finds the
segment, and one multiply-add.

This repository gives synthesizable SystemVerilog for that hardware, in the
paper's main configuration: 16 segments (DAPA(16)) in 16-bit fixed point. It
is built around one engine that serves two purposes:

* **element-wise mode**: GELU, exp or the GELU derivative (for the backward
  pass of on-device training), one result per clock;
* **softmax mode**: a complete softmax over a row of up to 1024 scores. It uses
  the engine's exp table and adds a running maximum, an accumulator, a
  reciprocal unit and a normalising multiplier.

A single-precision (FP32) version of the engine is also given as a separate
module (section 6).

## 1. The engine pipeline

```
 x ──► [level 1] ──► [level 2] ──► [level 3] ──► [level 4 + encoder] ──► [LUT (a_n,b_n) + MAC] ──► y
        1 cmp        2 cmps        4 cmps        8 cmps → n                y = a_n·x + b_n
 x ──► ─── delay ───────────────────────────────────────────────────────►  x
```

`dapa_engine` = `dapa_table` + `dapa_segment_finder` + `dapa_mac`.

**Segment search (`dapa_segment_finder`).** N = 16 segments have 15 sorted
knots `k_1 < … < k_15`. Segment `n` is the interval `k_n < x ≤ k_(n+1)`, with
`k_0 = −∞` and `k_16 = +∞`. So `n` is simply the number of knots below `x`.
The search is a binary search unrolled into a tree of strict `>` comparators,
one tree level per pipeline stage:

| level (stage) | comparators | comparator j tests `x > k_m` with |
|---|---|---|
| 1 | 1  | m = 8 |
| 2 | 2  | m = 4, 12 |
| 3 | 4  | m = 2, 6, 10, 14 |
| 4 | 8  | m = 1, 3, …, 15 |

In general, comparator `j` of level `l` (counting from 0) tests knot
`m = j·2^(L−l) + 2^(L−l−1)`, with `L = log2 N`. All comparators of a level
work every cycle, but only one lies on the search path. The decision bits of
the earlier levels form a path prefix, and that prefix picks it. The encoder
of the last level appends the last decision to the prefix. The resulting L-bit
number is the segment index. A tie (`x` exactly on a knot) goes to the lower
segment. Because the input value, its function select and a tag travel down
the same stages, stage IV always sees `x` and `n` of the same sample.

**Multiply-add (`dapa_mac`).** The last stage reads `a_n` and `b_n` from the
table selected by the sample's function and computes
`y = sat16((a_n · x) >>> frac_w + b_n)`. The right shift is arithmetic, so
rounding goes toward −∞. The sum is clipped to the 16-bit range, and `out_sat`
marks a clipped result. There is one multiplier in the whole element path.

**Timing.** Latency is `log2(N) + 1` cycles: 5 for N = 16, and 4 for N = 8,
the case drawn in the paper. Throughput is one sample per cycle with no stall.
The paper's table reports 20 ns at 200 MHz (4 cycles) for its HLS DAPA(16)
core. This RTL follows the structure described in the text instead: a log2(N)
tree followed by a MAC stage, which for N = 16 is one stage more.

## 2. The tables and how to fill them

`dapa_table` holds three function tables: `FN_GELU`, `FN_EXP` and `FN_DGELU`.
Each has 15 knots, 16 slopes and 16 biases: 141 16-bit words in all. They are
written one word per cycle through the `cfg_*` port (`cfg_func`, `cfg_sel` =
knot/slope/bias, `cfg_idx`, `cfg_data`). Knot index `i` stores `k_(i+1)`.
Reset clears everything. Knots must be written in ascending order of value.
The tree assumes sorted knots and does not check it.

The contents come from software. For a function σ and an input density p(x)
measured on sample data:

1. knots: `k_n = F⁻¹(n/N)`, n = 1 … N−1, where F is the cumulative
   distribution of p;
2. lines: for each segment, minimise `Σ p(x_i) · (σ(x_i) − (a·x_i + b))²` over
   points `x_i` in the segment, a 2×2 weighted least-squares solve. Clip the
   outer segments to the range where the fit matters (for example [−4, 4]);
3. the derivative table is fitted the same way to σ′;
4. round knots and coefficients to the chosen fixed-point format.

`tb/dapa_top_tb.sv` does exactly this in SystemVerilog real arithmetic. It uses
an assumed Normal(−0.5, 1) input for GELU and a half-normal (σ = 2.5) for
`x − x_max` in the softmax. It is a working reference for the procedure.

## 3. Number format

All values share one 16-bit two's-complement format: input, knots,
coefficients, output and softmax results. The number of fraction bits is the
run-time input `frac_w` (0–15): 8 gives Q8.8, 7 gives Q9.7, and so on. The
method picks the format per network: it starts with just enough integer bits
for the largest input, then adds fraction bits until the density-weighted
error is within a factor θ (1.05 in the paper) of the unquantised fit. The
paper's per-network formats range from Q9.7 to Q6.9. Change `frac_w` only
while no sample is in flight. The tables must be re-fitted and re-written in
the new format.

## 4. Softmax (`dapa_softmax_ctrl`)

The softmax uses the shifted form `exp(x_i − x_max) / Σ_j exp(x_j − x_max)`.
Every exp input is then ≤ 0 and every output lies in (0, 1], so nothing
overflows. A row passes through four phases:

| phase | cycles | work |
|---|---|---|
| LOAD | n | accept scores (`in_last` on the final one) into a 1024-word buffer; track `x_max` |
| EXP  | n + 5 | send `x_i − x_max` (clipped to 16 bits) to the engine with the exp table; write each returned `e_i` back over `x_i`; accumulate `Σ e_i` (negative line values, possible far out in the tail, count as 0) |
| DIV  | 42 | `dapa_recip`: one reciprocal `r = ⌊2^40 / Σ⌋` with a serial restoring divider, 1 bit per cycle |
| NORM | n | output `y_i = (e_i · r) >> (40 − frac_w)`, `out_last` on the final element |

The reciprocal replaces n divisions with one division and n multiplications.
This is the "divisor-equivalent unit" the paper adds to the engine to make a
full softmax; its insides are this design's own. From the last input to the
first output takes `n + 5 + 40 + 4` cycles. A row longer than `MAX_LEN` is cut
after 1024 elements. `len_overflow` pulses, and the remaining elements start a
new row.

## 5. Top level (`dapa_top`)

| port | meaning |
|---|---|
| `frac_w[3:0]` | fraction bits of the format |
| `cfg_we, cfg_func, cfg_sel, cfg_idx, cfg_data` | table writes |
| `mode` | `MODE_ACT` (element-wise) or `MODE_SOFTMAX` |
| `func` | table for element-wise samples |
| `in_valid / in_ready / in_x / in_last` | input stream, `in_last` ends a softmax row |
| `out_valid / out_y / out_last` | results in input order (no back-pressure) |
| `busy, act_sat, len_overflow, sub_sat, exp_clamp` | status and event flags |

Both modes share the single engine. Samples are tagged on entry, and the tag
steers each result back to its mode. In element-wise mode `in_ready` is low
while a softmax row is being processed. So a row always finishes before
element-wise samples enter again, and the two result streams never collide
(an assertion checks this). `mode` and `func` may change between any two
samples.

Size at the defaults (yosys coarse synthesis): about 560 word-level cells,
2.6 k flip-flop bits (mostly the three tables) and a 16 kbit row buffer.

## 6. The FP32 engine (`dapa_fp32_engine`)

The same engine also exists in single precision, as a separate module that
is not part of `dapa_top`. It is meant for a floating-point datapath, or as a
reference next to the fixed-point unit. Its tables hold 32-bit floats and use
the same write port with 32-bit data (`dapa_table` with `W = 32`).

Two parts differ from the Fix16 engine:

* **Comparing floats.** The comparator tree compares signed integers. Each
  float `f` is turned into a key: `f` itself when the sign bit is 0, and
  `{1, ~f[30:0]}` when it is 1. Positive floats already sort like integers.
  For negative floats, inverting the magnitude bits makes a larger magnitude
  a smaller integer. So the keys sort exactly like the floats, and
  `dapa_segment_finder` with `W = 32` is reused unchanged. The map is its own
  inverse, so x is mapped back after the tree. The one quirk is that −0
  sorts just below +0. Keep knots off zero.
* **Multiply-add (`dapa_fp32_mac`).** Stage 1 multiplies the 24-bit
  significands and rounds the product to nearest, ties to even. Stage 2 aligns
  the smaller operand, keeping guard, round and sticky bits. It then adds or
  subtracts, renormalises with a leading-zero count and rounds again. The
  result equals a separate FP32 multiplier followed by an FP32 adder. It is
  not a fused multiply-add. Subnormals are treated as zero. Overflow gives
  infinity and raises `out_ovf`. NaN and infinity inputs are not handled.

Latency is log2(N) + 2 = 6 cycles, at one sample per cycle.

## 7. Verification

Each module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench:

| testbench | checks |
|---|---|
| `dapa_table_tb` | reset value, 400 random writes against a shadow copy, ignored out-of-range knot write |
| `dapa_segment_finder_tb` | segment = count of knots below x, on and beside knots, repeated knots, exact 4-cycle latency, every segment reached |
| `dapa_mac_tb` | bit-exact `sat16(⌊a·x/2^F⌋ + b)` with `frac_w` changing every cycle, saturation, 1-cycle latency |
| `dapa_engine_tb` | random tables for all three functions, per-sample function switch, exact 5-cycle latency, every segment of every table, saturation |
| `dapa_recip_tb` | `⌊2^40/d⌋` against integer division, exactly 41 busy cycles, d = 0 |
| `dapa_softmax_ctrl_tb` | bit-exact rows of length 1 … 64 in Q8.8/Q9.7/Q7.9 with a stand-in exp pipeline, clamp, 16-bit clipping, row cut, cycle count |
| `dapa_top_tb` | the whole unit at default parameters, see below |
| `dapa_workload_tb` | the activation work of each evaluated network, see below |
| `dapa_fp32_mac_tb` | 60 000 random FP32 multiply-adds bit-exact against a model built on doubles: alignment, cancellation, exact ties, zeros, overflow, 2-cycle latency |
| `dapa_fp32_engine_tb` | three sets of random FP32 tables, x on/beside knots, ±0 and far outside, function switch per sample, exact 6-cycle latency, every segment used |

`dapa_top_tb` fits real GELU, GELU′ and exp tables (section 2), loads them
and checks every result twice. First it must match a bit-exact reference
evaluation of the tables. Second it must lie within a tolerance of the true
function. The test covers a GELU and GELU′ sweep over [−4, 4], exp over
[−12, 0], and softmax rows of 49, 128, 197, 1024 and 1030 elements (the last
is cut). It then switches to Q9.7, re-fits and reloads the tables, and runs a
GELU sweep and a 197-element row again. It also counts each mechanism and
requires each to occur at least once: mode switches, function switches, input
stall, element saturation, `x − x_max` clipping, exp clamp, row cut and format
switch. Results at Q8.8:

* GELU: density-weighted MSE ≈ 1.4·10⁻⁵ against a plain MSE ≈ 1.3·10⁻³ over
  [−4, 4]. Errors are below 0.03 inside the dense region. They reach 0.15 at
  x = 4, where the assumed density is ~10⁻⁴. This is the trade the method
  makes by design.
* GELU′: max error 0.055. exp: max error 0.027. softmax: max error 0.015
  at Q8.8.
* At Q9.7 the exp table's tail slope rounds to zero. Each very small term is
  then counted as 1–3 LSB, and in a 197-element row this inflates the sum:
  errors reach about 0.1 on the largest outputs. So 7 fraction bits are not
  enough for the softmax exp on long rows. Pick the exp table's format
  accordingly.

`dapa_workload_tb` runs, for each of the ten evaluated networks, one MLP
layer of GELU (tokens × hidden values, for example 1024 × 3072 for GPT-2)
and one attention head of softmax (tokens rows of tokens scores), in that
network's format. Before each network it re-fits and reloads the tables using
`tb/dapa_fit_pkg.sv`, a testbench package with the fit of section 2 and a
bit-exact model of the engine. About 12.7 million results are all checked
bit-exactly. The GELU stream must never stall: n values finish n + 5 cycles
after the first one is accepted. Each softmax row must take exactly 3n + 48
cycles from its first input to its last output. The errors against the exact
functions are printed for information. GELU rms error is 0.003–0.006 at
7–9 fraction bits, and 0.02–0.03 at 5 and 4 bits. Softmax rms error is
0.001–0.009 at 7–9 bits and 0.013–0.025 at 4–5 bits. The single worst
softmax outputs reach 0.3–0.7 at 4, 5 and 7 fraction bits, for the tail
effect described above. The paper does not report this; its accuracy results
are for the network as a whole.

Simulate with Verilator 5 (the package first):

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/dapa_pkg.sv tb/dapa_top_tb.sv --top-module dapa_top_tb
./obj_dir/Vdapa_top_tb
```

Use the same command with any other testbench name. `dapa_workload_tb` also
needs `-Itb` and `tb/dapa_fit_pkg.sv` after the package. The two FP32
testbenches need `tb/dapa_fp32_ref_pkg.sv` in the same way. Every testbench ends with
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The full top-level
test takes well under a minute.

## 8. Fit to the evaluated networks

The paper evaluates ViT-Tiny/Small/Base, DeiT-Tiny/Small/Base, Swin-Small/Base
(ImageNet-1K), GPT-2 (WikiText-2) and BERT (GLUE). GELU is element-wise and
streams, so any tensor size runs. Softmax rows must fit in 1024 entries. The
following lengths are general knowledge, not from the paper: 197 tokens for
ViT/DeiT at 224², 49 for a Swin 7×7 window, ≤ 1024 for GPT-2, and typically
128 for BERT on GLUE. All of them fit. The per-network Q formats in the paper
(Q9.7, Q8.8, Q7.7, Q6.9, Q6.8, Q7.5, Q7.9, Q9.4) are all reachable through
`frac_w`.

## 9. What follows the paper and what does not

Taken from the paper:
* 16 segments at distribution quantiles, one line per segment, a
  density-weighted fit;
* the log2(N)-level pipelined comparator tree with an encoder, the coefficient
  LUT, and the single multiply-add (the paper draws it for N = 8);
* the 16-bit fixed-point format with a per-network split, and reconfiguration
  between GELU and the softmax exponential;
* the shifted softmax with exp from the engine, plus accumulators and a
  divisor-equivalent unit;
* an FP32 version of the reconfigurable engine (the paper gives only its
  cost).

This design's own choices:
* binary-search numbering of the comparators, with the encoder reading the
  path prefix;
* writable tables with a configuration port, and the GELU-derivative table;
* `frac_w` at run time, truncation of the product, and saturation;
* the softmax phase sequence, the 1024-entry buffer, the reciprocal of 2^40
  and the serial divider;
* sharing one engine between the two modes, the valid/ready input, and no
  output back-pressure;
* in the FP32 engine: the integer keys for float comparison, the separate
  roundings, flushing subnormals, and the 2-stage multiply-add.

Known differences:
* latency is 5 cycles, against the paper's 20 ns / 4 cycles at 200 MHz;
* the paper's 155 ns softmax figure has no row length attached, so it is not
  matched;
* the FP32 engine runs in 6 cycles, against the paper's 150 ns (30 cycles)
  for its HLS build; its arithmetic details are not in the paper;
* the paper's FP32 and Fix16 reference GELU
  implementations are comparison points and are not built;
* the offline steps (distribution capture, knot placement, fitting, format
  search) are software and are not part of the RTL.

## Files

`rtl/dapa_pkg.sv` (shared enums: functions, table parts, modes),
`rtl/dapa_table.sv`, `rtl/dapa_segment_finder.sv`, `rtl/dapa_mac.sv`,
`rtl/dapa_engine.sv`, `rtl/dapa_recip.sv`, `rtl/dapa_softmax_ctrl.sv`,
`rtl/dapa_top.sv`. Each has a testbench of the same name plus `_tb` in
`tb/`. `tb/dapa_workload_tb.sv` runs the network workloads, and
`tb/dapa_fit_pkg.sv` holds its table fit and reference model.
`rtl/dapa_fp32_engine.sv` and `rtl/dapa_fp32_mac.sv` are the FP32 engine,
and `tb/dapa_fp32_ref_pkg.sv` is the float rounding model of their
testbenches.
