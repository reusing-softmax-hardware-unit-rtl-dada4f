# A softmax unit that also computes GELU

Transformer accelerators usually carry a dedicated, vector-parallel softmax
unit and a separate GELU unit. This design removes the separate GELU unit. It
rests on one identity. The tanh form of GELU is

    GELU(z) = 0.5 z (1 + tanh(k)),   k = sqrt(2/pi) (z + 0.044715 z^3)

and `1 + tanh(k) = 2 e^k / (e^k + e^-k)`, so

    GELU(z) = z * e^k / (e^k + e^-k) = z * softmax([k, -k])[0]

GELU is therefore the first output of a two-element softmax, multiplied by z.
A softmax unit over N elements is changed so that it can also run as N/2
independent two-element softmaxes. Wrapped in a small amount of logic, it
then produces either one N-element softmax or N/2 GELU results per vector.

The RTL is SystemVerilog-2017 and is parameterised by the vector width `N`
(default 8; 32 was also evaluated and is tested). Every internal stage is
combinational, with one register at the input and one at the output of the
top-level unit.

## The dual-mode softmax (`dual_mode_softmax`)

Softmax is computed in the logarithm domain, so no divider is needed:

    y_i = exp( x_i - max - ln( sum_j exp(x_j - max) ) )

The datapath has six stages, one after the other:

1. **Maximum tree** (`dm_max_tree`). A binary tree of comparators. Its first
   level already compares the neighbouring pairs (x0,x1), (x2,x3), ... . Those
   pair maxima are brought out next to the root. For each element, a mux
   picks the maximum that element will use: the global one in normal mode,
   its own pair's in GELU mode.
2. **Subtract**: `d_i = x_i - max_sel_i`. This value is at most 0.
3. **Exponential** (`exp_pwl`), one unit per element, computing `e_i = exp(d_i)`.
4. **Adder tree** (`dm_adder_tree`). Its first level forms the pair sums and
   its root forms the full sum. Both come out, so GELU mode adds no adders.
5. **Logarithm** (`log_pwl`). One unit works on the full sum. N/2 more units
   work on the pair sums. A second row of muxes picks, for each element, the
   full-sum logarithm (normal mode) or its pair's logarithm (GELU mode). These
   N/2 extra logarithm units and the two rows of muxes are the whole cost of
   the second mode.
6. **Subtract and exponential**: `y_i = exp(d_i - log_sel_i)`. This uses the
   same `exp_pwl` unit as stage 3.

In GELU mode nothing crosses a pair boundary. The unit is then exactly N/2
softmaxes of width 2.

`mode` is encoded as 0 = GELU and 1 = normal (`mode_e` in
`gelu_softmax_pkg`).

## Turning it into a GELU unit (`gelu_softmax_top`)

Lanes are numbered from 0. Each pair `p` uses lanes `2p` and `2p+1`.

* **Input side.** A `gelu_k_unit` on `z[2p]` computes `k_p` and `-k_p` using
  four multipliers and an adder. In GELU mode, softmax lane `2p` receives
  `k_p` and lane `2p+1` receives `-k_p`. In normal mode both lanes receive
  their own `z`. In GELU mode the odd inputs `z[2p+1]` are ignored.
* **Output side.** Lane `2p` has a multiplier and a mux. In GELU mode the lane
  returns `z[2p] * y[2p]`, which is `GELU(z[2p])`. In normal mode it returns
  the probability. Odd lanes always return the raw softmax output. In GELU
  mode that value is `1 - sigmoid(2k)`, the unused second probability of the
  pair.

So one vector of N inputs produces either N softmax probabilities or N/2 GELU
values. The GELU results appear on the even output lanes.

### Interface and timing

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | logic | clock; synchronous active-low reset that clears only the valid bits |
| `in_valid` | in | logic | a vector is presented this cycle |
| `mode` | in | `mode_e` | mode for this vector (may change every cycle) |
| `z[N]` | in | `in_t` | inputs, 16-bit signed Q5.11 |
| `out_valid` | out | logic | result valid |
| `out_mode` | out | `mode_e` | mode of the result |
| `y[N]` | out | `fx_t` | results, 32-bit signed Q16.16 |

The unit accepts one vector per clock cycle. A result appears exactly two
cycles after its `in_valid`. There is no back-pressure. A concurrent assertion
in the top checks the two-cycle relation between `in_valid` and `out_valid`.
The whole datapath between the two registers is combinational. Before aiming
for a real clock rate, add pipeline registers, for example after the maximum
tree, after the adder tree and after the logarithm units.

## Number formats and the piecewise-linear approximations

* The inputs `z` are 16-bit fixed point with five integer bits (sign
  included) and 11 fraction bits, covering [-16, 16).
* All internal values use a 32-bit signed word with 16 fraction bits
  (Q16.16). Each product is computed at 64 bits and truncated back
  (`fx_mul`).
* **exp.** `exp(d) = 2^t` with `t = d * log2(e)`. Split `t = u + v`, where `u`
  is an integer with `u <= 0` and `v` is in [0,1). Then `2^u` is a right
  shift by `-u`. For `2^v`, the top three bits of `v` select one of eight
  linear segments:
  `2^v ~ POW2_C[j] + POW2_S[j] (v - j/8)`, where
  `POW2_C[j] = round(2^(j/8) 2^16)` and
  `POW2_S[j] = round(8 (2^((j+1)/8) - 2^(j/8)) 2^16)`.
  An input `d < -32` gives 0, and `d > 0` gives 1.0. Neither case can occur
  inside the softmax.
* **ln.** This is a leading-one logarithmic converter. It finds the position
  `p` of the leading one, normalises to `1 + m`, and looks up `log2(1+m)` in
  an eight-segment chord table built like the one above (`LOG2_C`, `LOG2_S`).
  It then scales `(p - 16) + log2(1+m)` by ln 2, because the exponential
  stage works in base e.
* **k.** `k = a (z + b z^3)`, with `a = sqrt(2/pi)` stored as 52290 / 2^16 and
  `b = 0.044715` stored as 2930 / 2^16.

Measured errors of the default build, from the testbenches, against
double-precision references:

| quantity | worst absolute error seen |
|---|---|
| `exp_pwl`, d in [-40, 0] | 0.0009 |
| `log_pwl`, s in [1, 32] | 0.0018 |
| softmax probability, N = 8 and N = 32, both modes | 0.0025 |
| GELU(z), z in [-16, 16), compared with the tanh formula | 0.0042 |

The GELU figures above are measured against the tanh approximation of GELU,
which is where the identity starts. The workload test described below also
measures the mean error against the exact erf form.

## Where this RTL departs from its source, and what it assumes

* **PWL tables.** The source design fits the breakpoints of its eight-piece
  exp approximation with a curve-fitting library and does not publish them.
  This RTL uses eight uniform segments with chords instead. The coefficients
  therefore differ, though the structure is the same.
* **Logarithm unit.** The source reuses a published logarithmic converter
  without giving its segment table. `log_pwl` is the simplest converter of
  that kind: a leading-one detector, a normaliser and eight uniform chords.
  The ln 2 scaling is this design's own choice.
* **Number of logarithm units.** As in the source's block diagram, this RTL
  has one unit for the full sum plus N/2 for the pair sums. One pair unit
  could double as the full-sum unit behind a mux, which would save one unit.
  That is not done here.
* **Timing.** The source describes no pipeline. The registers, the valid
  signals, the two-cycle latency and the reset behaviour are all choices of
  this design.
* **Q16.16 internal word.** The source gives only "32-bit integer arithmetic".
  Placing the binary point at bit 16 is this design's choice. Normal-mode
  inputs are widened from Q5.11 so that both modes share one softmax input
  format.
* **Long softmax rows.** The unit computes a softmax over exactly N elements.
  Rows longer than N, such as attention rows over a whole sequence, would need
  partial maxima and sums combined across passes. Neither the source nor this
  RTL describes how.
* **Vector width.** `N` must be a power of two, at least 2.

## Files

| file | contents |
|---|---|
| `rtl/gelu_softmax_pkg.sv` | formats (`in_t`, `fx_t`), `mode_e`, constants, PWL tables, `widen`, `fx_mul` |
| `rtl/dm_max_tree.sv` | dual-mode maximum tree with per-element max mux |
| `rtl/exp_pwl.sv` | exponential unit |
| `rtl/dm_adder_tree.sv` | adder tree with pair sums and total |
| `rtl/log_pwl.sv` | natural-logarithm unit |
| `rtl/dual_mode_softmax.sv` | the dual-mode softmax |
| `rtl/gelu_k_unit.sv` | k and -k for GELU |
| `rtl/gelu_softmax_top.sv` | the combined unit (top level) |
| `tb/tb_ref_pkg.sv` | real-valued reference functions |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/gelu_top_driver.sv` | stimulus and scoreboard for the end-to-end tests |
| `tb/tb_gelu_softmax_top.sv` | end-to-end test at the default N = 8 |
| `tb/tb_gelu_softmax_top_n32.sv` | the same test at N = 32 |
| `tb/tb_bert_ffn_gelu.sv` | workload: the 3072 GELUs of one BERT-base feed-forward token |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each has
a watchdog. Run them from the repository root, with the packages listed
first:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        rtl/gelu_softmax_pkg.sv tb/tb_ref_pkg.sv tb/tb_gelu_softmax_top.sv \
        --top-module tb_gelu_softmax_top
    ./obj_dir/Vtb_gelu_softmax_top

To run another test, replace the testbench file and top module name with
another `tb/tb_*.sv`. Lint one module with
`verilator --lint-only -Wall -Irtl rtl/gelu_softmax_pkg.sv rtl/<module>.sv`.

What the tests cover:

* **Unit tests.** The maximum and adder trees are checked exactly against
  plain loops. `exp_pwl`, `log_pwl` and `gelu_k_unit` are checked over
  sweeps and random values against `$exp`, `$ln` and the k formula.
* **Softmax test.** `dual_mode_softmax` is checked in normal mode, in GELU
  mode with arbitrary pairs and in GELU mode with `[k, -k]` pairs. It must
  also show that each group sums to 1.
* **End-to-end tests.** These stream 500 vectors with the mode chosen at
  random per vector and random idle cycles. They check every output value,
  the two-cycle latency and that no result is lost. They also count the
  mechanisms that must have been exercised: both modes, mode changes between
  back-to-back vectors, idle cycles, saturated GELU (|z| >= 4) and negative-z
  GELU.
* **Workload test.** `tb_bert_ffn_gelu` streams the 3072 feed-forward
  activations of one BERT-base token in GELU mode, back to back. The unit
  takes 768 vectors, one per cycle, so the run lasts 770 cycles including the
  two-cycle latency. With bell-shaped inputs (standard deviation about 2),
  the mean absolute error is about 0.0007 against the tanh form and about
  0.0008 against the exact erf form of GELU.

Tolerances: 0.006 per probability and `0.003 |z| + 0.003` per GELU value.

## Changing it

* **Width.** Set `N` on `gelu_softmax_top`. Everything else follows from
  `N`.
* **Precision.** Change `FX_FRAC` in the package, together with the Q16.16
  constants and the PWL tables, which are written for 16 fraction bits. The
  table formulas are given above and in the package header.
* **More PWL segments.** Widen `seg`, shrink `rem` in `exp_pwl` and
  `log_pwl`, and extend the tables.
