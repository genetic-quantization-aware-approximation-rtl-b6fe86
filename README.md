# An INT8 quantization-aware piece-wise linear unit for Transformer non-linearities

Transformers spend a surprising share of their hardware on non-linear functions:
GELU and HSWISH activations, the exponential and the division inside Softmax, and the
reciprocal square root inside LayerNorm. A common way to serve all of them with one piece
of hardware is piece-wise linear approximation (pwl). The input is compared with a few
breakpoints, and the matching segment's slope `k_i` and intercept `b_i` are read from a
small look-up table (LUT). The result is `k_i*x + b_i`. Earlier LUT units did this in FP32
or INT32. That is wasteful when the rest of the network already runs on 8-bit integers.

This RTL implements the integer-only alternative from the DAC 2024 paper "Genetic
Quantization-Aware Approximation for Non-Linear Operations in Transformers"
(Dong, Tan et al.). It does not reproduce the authors' own code. The key observation is
that a pwl function commutes with a scale factor:

    pwl(S*q) = S * (k_i*q + b_i/S)

If the activation scale `S` is a power of two, `S = 2^-s`, the unit can work directly on
the INT8 code `q`:

* the breakpoints are quantized once to the integer grid of `q`, so the comparisons are
  8-bit integer comparisons;
* the slopes are used unchanged;
* the intercept is rescaled at run time by a shift, `b_i/S = b_i << s`.

Only 8-bit values are stored and only an 8x8 multiplier is needed. The table's contents
come from an offline genetic search over the breakpoints, which is not hardware. The
search is not part of this RTL; the testbenches use plain uniform-chord tables instead.

## Block structure

```
             mode, scale_exp
 q (INT8) ──┐      │
            ▼      ▼
 x_wide ─► mris_prescale ─► [stage-1 register] ─► gqa_pwl_core ────────► mris_postscale ─► y
 (24-bit     sub-range,                          ┌─────────────────┐    (× S' or √S'
  FXP)       ÷S', round, clip                    │ pwl_comparer    │     as a shift)
                                                 │   │ index        │
                                                 │ pwl_lut (k,b,p~) │
                                                 │ intercept_shifter│
                                                 │ pwl_mac  k*q+b~  │
                                                 │ [register]       │
                                                 └─────────────────┘
 lut_wr_* ─────────────────────────────────────► table write port
```

| module | what it does |
|---|---|
| `gqa_pkg` | mode and sub-range enums; the sub-range limits and scales of the wide-range operators; `LAMBDA = 5` |
| `pwl_lut` | N slopes, N intercepts, N-1 quantized breakpoints, all W bits; one write port, combinational reads |
| `pwl_comparer` | N-1 parallel signed comparisons `q >= p~_j` and a population count give the segment index |
| `intercept_shifter` | `b~ = b << s`, widened so no bit is lost |
| `pwl_mac` | `y = k*q + b~` at full precision (2W+1 bits) |
| `gqa_pwl_core` | the four blocks above plus a result register: the INT8 pwl unit itself |
| `mris_prescale` | multi-range input scaling for DIV and RSQRT (see below) |
| `mris_postscale` | multiplies the result by `S'` (DIV) or `sqrt(S')` (RSQRT), as a shift |
| `gqa_nonlinear_unit` | top: pre-scaling, pipeline register, core and post-scaling |

Defaults: `N = 8` entries, `W = 8` bits and `LAMBDA = 5` fraction bits all come from the
paper. The paper's main results use 8-entry INT8 tables, and it also costs 16-entry and
INT16 versions. The wide input width `XW = 24` is this design's own choice.

## Number formats: the part to get right

Everything in this unit is an integer, but the integers mean different things:

| quantity | stored as | real value |
|---|---|---|
| input code `q` (QUANT mode) | signed W-bit | `S*q`, `S = 2^-scale_exp` |
| slope `k_i`, intercept `b_i` | signed W-bit | `k_i * 2^-LAMBDA`, `b_i * 2^-LAMBDA` |
| breakpoint `p~_i` (QUANT mode) | signed W-bit | `round(clip(p_i/S, -128, 127))`, on `q`'s grid |
| breakpoint `p~_i` (DIV/RSQRT) | signed W-bit | `p_i` in fixed point with LAMBDA fraction bits |
| core result `k_i*q + (b_i << s)` | signed 2W+1 bits | `S * 2^-LAMBDA * y` |
| `x_wide` (DIV/RSQRT) | unsigned XW bits | `x_wide * 2^-LAMBDA` |
| top output `y`, QUANT mode | signed 2W+7 bits | `y * S * 2^-LAMBDA` |
| top output `y`, DIV/RSQRT | signed 2W+7 bits | `y * 2^-(2*LAMBDA+6)` = `y * 2^-16` |

The breakpoints depend on `S`, so the table must be reloaded when the scale of the
operator's input changes. The slopes and intercepts do not depend on `S`. Nothing in the
output is rounded. Requantizing the result for the next layer is left to the surrounding
datapath.

Scales above 1 are not supported. The paper writes the intercept rescale as
`b >> round(log2 alpha)`. Every scale it evaluates lies between `2^0` and `2^-6`, so that
shift is always a left shift by `s = -round(log2 alpha)`, and this RTL implements it that
way. `scale_exp` is 3 bits wide (0..7).

## Multi-range input scaling (DIV and RSQRT)

The reciprocal in Softmax and the reciprocal square root in LayerNorm take intermediate
fixed-point values, not quantized activations, and their range is far wider than the table's
interval. The table is fitted on `IR = (0.5, 4)` for DIV and `(0.25, 4)` for RSQRT. Inputs
above IR fall into one of three sub-ranges, each with a power-of-two scale `S'` that moves
them back towards IR:

| op | IR | SR0 | SR1 | SR2 |
|---|---|---|---|---|
| DIV | (0.5, 4) | [4, 32) × 2^-3 | [32, 256) × 2^-6 | [256, ∞) × 2^-6 |
| RSQRT | (0.25, 4) | [4, 64) × 2^-4 | [64, 1024) × 2^-8 | [1024, ∞) × 2^-12 |

`mris_prescale` finds the sub-range with three comparisons and shifts `x_wide` right by
`-log2 S'`. It rounds half up and clips to 127, the largest 8-bit code. The resulting code is
`x' * 2^LAMBDA`. The core treats it like a quantized input with `S = 2^-LAMBDA`. The
intercept shift is then `LAMBDA`, and the breakpoints and intercepts are plain fixed-point
numbers with LAMBDA fraction bits.

Since `1/x = S' * (1/x')` and `1/sqrt(x) = sqrt(S') * (1/sqrt(x'))`, the result is shifted
right by `-log2 S'` (DIV) or half of it (RSQRT). `mris_postscale` turns that into a left
shift of `6 - shift`, so that every sub-range lands in the same format with 16 fraction
bits.

Consequences of the published table, kept as published:

* DIV uses the same scale `2^-6` for SR1 and SR2. An input of 256 or more therefore scales
  to 4 or more, leaves IR and is clipped. The output saturates at about `pwl(3.97)/64 ≈ 0.004`
  while the true value is below 0.0039. The absolute error stays below 0.0045.
* RSQRT inputs of 16384 or more scale to 4 or more in SR2 and saturate in the same way.
* Inputs below IR (DIV below 0.5, RSQRT below 0.25) are not rescaled. They fall into the
  first segment, extrapolated.

## Timing and interface

* Pipeline: two register stages. Stage 1 registers the pre-scaled operand, its intercept
  shift and its output shift. Stage 2 is the register after the multiply-add. `out_valid`
  follows `in_valid` by two cycles, and one operand can be accepted every cycle. There is
  no back-pressure.
* Table load: `lut_wr_en`, `lut_wr_addr`, `lut_wr_k`, `lut_wr_b` and `lut_wr_p` write one
  entry per cycle. An operator's table takes N cycles to load. `lut_wr_p` is ignored for the
  last entry. Breakpoints must be written in ascending order. An assertion flags a write
  while an operand is in stage 1.
* Reset: `rst_n` is active-low and asynchronous. It clears the table and the pipeline.
* Extra outputs: `out_seg` is the segment used and `out_sub_range` the sub-range used.
  They are meant for debugging and test.

The paper gives the unit's function, its table contents and its formats. It does not give
the pipeline depth, the load port, the reset behaviour, the wide-input width or the output
formats. Those are this design's choices, made as the simplest thing that meets the
function. The paper reports its INT8 8-entry unit at 961 µm² and 0.40 mW at 500 MHz in a
28 nm process. No timing or area was measured for this RTL.

## How far it has been checked

Every block has a self-checking testbench in `tb/`, `tb_<module>.sv`. Each compares the
block with a reference computed independently in the testbench, and each has a watchdog.

* `tb_pwl_lut`, `tb_pwl_comparer`, `tb_intercept_shifter`, `tb_pwl_mac`,
  `tb_mris_prescale`, `tb_mris_postscale`: exhaustive or randomized block tests. The
  comparer, shifter and multiply-add are tested exhaustively over their 8-bit inputs.
* `tb_gqa_pwl_core`: GELU, HSWISH and EXP tables at four scales, all 256 input codes back
  to back, checked bit-exactly, with a 1-cycle latency check. It also runs the
  breakpoint-deviation example from the paper. An EXP breakpoint at -0.815 becomes code -7
  (-0.875) at `S = 2^-3` and code -2 (-1.0) at `S = 2^-1`, and the test checks that the
  segment changes exactly at that code.
* `tb_gqa_nonlinear_unit`: end-to-end test at the default parameters. GELU, HSWISH and EXP
  run at all seven scales. DIV and RSQRT run with 2000 wide inputs each. Results are checked
  bit-exactly and with a 2-cycle latency check. The testbench counts every mechanism and
  fails if one never happens:
  * each mode;
  * each of the 4 sub-ranges of both wide operators;
  * clipping after scaling;
  * table reloads;
  * back-to-back issue.

  Where the scaled input stays inside IR, the real-valued relative error of DIV and RSQRT
  is at most about 13% with the uniform-chord tables.
* `tb_operator_accuracy`: the operator-level accuracy workload. It runs all five operators
  on an 8-entry and on a 16-entry instance and reports the MSE per operator and scale. It
  checks every output bit-exactly. It also checks that every MSE is below 1.1e-2, the largest
  8-entry INT8 MSE the paper reports, and that 16 entries are not worse than 8. It uses
  `op_accuracy_runner.sv`. With uniform chords instead of searched breakpoints, the average
  MSEs are 4e-4 to 8e-4 for 8 entries and 1.3e-4 to 2.3e-4 for 16. The paper's searched
  tables reach about 1e-4 for 8 entries on GELU, HSWISH and EXP.
* `tb_pwl_fit_pkg.sv` holds the test-side helpers:
  * the exact functions (GELU in its tanh form);
  * the chord fit, `k_i = (f(e1)-f(e0))/(e1-e0)` and `b_i = f(e0) - k_i*e0`, rounded to
    LAMBDA fraction bits, with breakpoints `round(e1/S)`;
  * the integer reference models.

What has not been checked:

* INT16 (`W = 16`) elaborates but was not simulated. The paper gives no fraction width or
  wide-range setup for it.
* No gate-level simulation, timing or power analysis.
* Accuracy with the paper's own searched tables: the tables are not published.

## Running the simulations

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gqa_pkg.sv tb/tb_pwl_fit_pkg.sv tb/tb_gqa_nonlinear_unit.sv \
    --top-module tb_gqa_nonlinear_unit -o sim
./obj_dir/sim
```

Replace the testbench name for the others. Testbenches that do not use `tb_pwl_fit_pkg`
do not need it in the file list. Each prints one line
`TB_RESULT checks=<n> failures=<m>`. All of them finish in well under a second.

## Changing the design

* `N` (entries) and `W` (bits) are parameters of `gqa_nonlinear_unit` and `gqa_pwl_core`.
  The table, comparer and multiply-add scale with them.
* Sub-range limits and scales are constants in `gqa_pkg`. If a scale above `2^-12` for RSQRT
  or above `2^-6` for DIV is added, `POST_MAX` must grow to match.
* A wider `scale_exp` means changing `SHIFT_W` in `gqa_pwl_core`. The top currently fixes
  it at 3.

## Departures from the paper and open points

* The paper's figure of the INT8 unit was not available. The structure here follows its
  FP/INT32 diagram (comparer, index, table, multiplier, adder) and its text on the INT8
  unit.
* The intercept shift is implemented as a left shift by `s` for `S = 2^-s <= 1` (see above).
* The paper defines the sub-ranges as `SR_i` with `0 <= i < Ns-1`, but lists three per
  operator in its table. The table was followed.
* The output is not requantized, and the table is loaded through a simple write port. Both
  are unspecified in the paper.
* The genetic breakpoint search and its rounding mutation are offline software. They produce
  table contents and are not part of the hardware.
