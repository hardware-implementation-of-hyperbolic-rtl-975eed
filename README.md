# A hyperbolic-tangent unit by Catmull-Rom spline interpolation

Neural-network accelerators for recurrent networks and LSTMs need
`tanh(x)` in hardware. This needs to be cheap, and accurate to the last bit
of a 16-bit fixed-point word. A plain look-up table is either large or
coarse. Piecewise-linear interpolation between table points is cheap but
loses accuracy where the curve bends. This unit instead interpolates
between tanh values stored every 0.125 with a **cubic Catmull-Rom spline**.
The spline passes exactly through the stored points and needs only four of
them around each segment. Its basis has small integer coefficients. With 32
stored points and no memory macro, it comes within about one output LSB
(2^-13) of the true tanh over the whole input range.

This RTL follows the tanh interpolator described by M. Chandra ("Hardware
Implementation of Hyperbolic Tangent Function using Catmull-Rom Spline
Interpolation"). It is an independent implementation. Where that
description is silent, the choices made here are marked as such below.

## Number format

| signal | bits | format | range |
|---|---|---|---|
| `x` (input) | 16 | two's complement, 1 sign + 2 integer + 13 fraction (Q2.13) | [-4, 4) |
| `|x|` | 15 | unsigned, 2 integer + 13 fraction | [0, 4) |
| segment index `k` | 5 | `|x|[14:10]`, i.e. `floor(|x| / 0.125)` | 0..31 |
| position `t` | 10 | `|x|[9:0]`, fraction inside the segment | [0, 1) |
| control point `P(i)` | 13 (+ sign) | `round(tanh(i/8) * 2^13)` | [0, 1) |
| `y` (output) | 16 | Q2.13, like `x` | (-1, 1) |

Beyond |x| = 4, tanh differs from 1 by less than 7e-4. The 16-bit input
cannot go further anyway.

## The interpolation

For `x_k <= |x| < x_(k+1)` with `x_i = 0.125 i`, the Catmull-Rom spline is

    f = 1/2 * [ P(k-1)  P(k)  P(k+1)  P(k+2) ] . [ c0 c1 c2 c3 ]

    c0 = -t^3 + 2t^2 - t        (in [-0.30, 0])
    c1 = 3t^3 - 5t^2 + 2        (in [0, 2])
    c2 = -3t^3 + 4t^2 + t       (in [0, 2))
    c3 = t^3 - t^2              (in [-0.30, 0])

This is a dot product of two vectors. The **P vector** holds four control
points and depends only on `k`. The **t vector** holds four cubic
polynomials and depends only on `t`. At `t = 0` the weights are
`(0, 2, 0, 0)`, so the curve passes through `P(k)`. The four `c` always sum
to 2.

Because tanh is odd, the unit computes `tanh(|x|)` and puts the sign back at
the end. Only the positive half of the curve is stored.

## Data path

```
 x[15:0] ──┬──────────────────────────────────────────────┐ sign x[15]
           ▼                                              │
       abs_unit ── |x| (15) ──┬── [14:10] ─► cp_lut ──────┼─ P vector (4 x 14)
                              └── [9:0] ──► interp_vector ┼─ t vector (4 x 13)
                                                          │
                     mac_unit:  (P . c) / 2, round, clamp │
                                   │ |tanh| (13)          │
                     twos_complement ─► -|tanh| (14)      │
                                   ▼                      ▼
                     out_select: pick by sign, sign-extend to 16
                                   ▼
                          output register ─► y, out_valid
```

| module | job |
|---|---|
| `tanh_pkg` | widths, the `cp_t` / `cp_vec_t` types, the control-point function `cp_value()` |
| `abs_unit` | `|x|`; -4.0 (0x8000) saturates to 0x7FFF |
| `cp_lut` | P vector for segment `k`, from 34 constants in a `case` (logic, not a memory) |
| `interp_vector` | t vector from `t`, rounded to `TV_FRAC` fraction bits |
| `mac_unit` | four signed products, sum, halve, round to 13 bits, clamp to [0, 1 - 2^-13] |
| `twos_complement` | `-|tanh|` as a 14-bit signed value |
| `out_select` | sign-bit multiplexer and sign extension to 16 bits |
| `tanh_top` | wiring and the output register |

### The control-point table

Segment `k` reads four points, `P(k-1)` to `P(k+2)`. So the 32 segments
touch points `P(-1)` to `P(33)`:

* `P(-1) = tanh(-0.125)` is not stored. `cp_lut` makes it as `-P(1)`, which
  is why points carry a sign bit.
* `P(32)` and `P(33)` (tanh at 4.0 and 4.125) lie past the input range. They
  are stored, so that the last two segments interpolate as well as the
  others. The table therefore has 34 entries, `cp_value(0..33)`, and every
  value is `round(tanh(i / 8) * 8192)`.

The table is a constant `case` function, i.e. bit-level mapping logic
rather than a memory macro, as the original design intends. A synthesis
tool may still recognise the four reads as small ROMs (4 x 34 x 13 bits);
they are constant and map to gates.

### Weight precision: the one real trade-off

`interp_vector` forms `t^2` and `t^3` exactly (20 and 30 fraction bits). It
sums `c0`, `c2` and `c3` exactly and rounds each (half up) to `TV_FRAC`
fraction bits. It never evaluates `c1` as a polynomial: it takes
`c1 = 2 - c0 - c2 - c3`. This costs nothing and is the same value. It also
keeps the rounded weights summing to exactly 2. The rounding errors then act
only on the *differences* between neighbouring control points, which are
small, rather than on the points themselves. Without this trick, 10-bit
weights give a maximum error of 6.1e-4 rather than 2.1e-4.

`TV_FRAC` (default **10**) sets the accuracy:

| `TV_FRAC` | RMS error | max error | each element |
|---|---|---|---|
| 10 (default) | 5.53e-5 | 2.12e-4 | 13-bit signed |
| 12 | 5.25e-5 | 1.66e-4 | 15-bit signed |
| 16 | 5.22e-5 | 1.52e-4 | 19-bit signed |
| exact | 5.21e-5 | 1.52e-4 | |

The error is measured against the true tanh over every input code in
(-4, 4), after rounding the output to 13 bits. Errors are in units of 1.0;
one output LSB is 1.22e-4. The default of 10 follows the 10-bit width given
for this block in the original data-flow description. The published
accuracy for this step size is RMS 0.000052 and max 0.000152. It is reached
from `TV_FRAC = 16` upward: wider multipliers buy about 0.6 LSB of worst-case
error. Set the parameter on `tanh_top` to choose.

### The MAC and the halving

Written out in matrix form, the basis matrix of the spline is usually given
with a leading factor 1/2. Here the t vector carries the doubled weights
(integers in the matrix), and `mac_unit` removes the factor 2. It does this
in the same arithmetic right shift by `TV_FRAC + 1` that drops the extra
fraction bits, with rounding half up. The result is clamped to 13 unsigned
bits. Rounding can never make it negative (at `k = 0` the symmetric `P(-1)`
keeps the curve odd), and no point is at or above 1.0. The clamp is
therefore a guard that only matters if the table or weights are changed.

## Timing and interface

```
module tanh_top #(parameter int unsigned TV_FRAC = 10) (
  input  logic clk, rst_n, in_valid,
  input  logic signed [15:0] x,
  output logic out_valid,
  output logic signed [15:0] y);
```

The whole computation is one combinational pass, followed by a single
output register. A new `x` may be applied on every clock. Its `tanh` appears
on `y` with `out_valid` high one clock later. While `in_valid` is low,
`out_valid` drops and `y` holds its last value. `rst_n` is asynchronous and
active low, and clears `out_valid` and `y`. There is no back-pressure.

The original work reports synthesis at 500 MHz, but gives no pipelining. The
critical path here runs through the absolute value, `t^3` (two 10-bit
multiplies), the 13 x 14 multipliers and the adder tree. Reaching a high
clock rate in a given library may need pipeline registers between
`interp_vector`/`cp_lut` and `mac_unit`. If you add them, delay `x[15]` and
`in_valid` by the same amount. Another way to shorten that path is the
alternative mentioned for the original design: hold the t vector in a table
indexed by `t` instead of computing it. That is faster but larger, and it is
not built here.

## Where this departs from, or adds to, the source description

* The P vector is 4 x 14 bits (13 fraction bits plus a sign, needed only
  for `P(-1)`), where the original figure shows 13.
* The t-vector elements have `TV_FRAC` fraction bits plus a sign and two
  integer bits. The original gives only "10".
* The table stores 34 points (`P(0)`..`P(33)`) for its 32 segments. The
  original speaks of 32 values and does not say how the last segments are
  handled.
* The following are this design's own: rounding half up everywhere, the
  exact-sum weight trick, the output clamp, the saturation of -4.0, and the
  output register with valid bit.
* At the default `TV_FRAC = 10`, the worst-case error is 2.12e-4 rather than
  the published 1.52e-4 (see the table above).
* The published gate count (5840 gates at 500 MHz) has not been reproduced.
  That needs a standard-cell library.

## Simulating

All files are SystemVerilog 2017. `tanh_pkg.sv` must be compiled first.
Testbenches that check against the reference model also need
`tb/tanh_ref_pkg.sv`, compiled before the testbench. For example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/tanh_pkg.sv tb/tanh_ref_pkg.sv \
  rtl/abs_unit.sv rtl/cp_lut.sv rtl/interp_vector.sv rtl/mac_unit.sv \
  rtl/twos_complement.sv rtl/out_select.sv rtl/tanh_top.sv \
  tb/tanh_top_tb.sv --top-module tanh_top_tb -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it with a failure if it hangs.

| testbench | what it checks |
|---|---|
| `abs_unit_tb` | all 65536 inputs against integer `abs`, including the saturated -4.0 |
| `cp_lut_tb` | all 32 P vectors against `round(tanh(i/8) * 2^13)` from `$tanh` |
| `interp_vector_tb` | all 1024 `t`: `c0, c2, c3` exactly rounded, `c1` within 2 LSB, sum exactly 2 |
| `mac_unit_tb` | point selection, both clamps, 20000 random vectors against 64-bit arithmetic |
| `twos_complement_tb` | all 8192 magnitudes |
| `out_select_tb` | all magnitudes with both signs, plus unrelated `pos`/`neg` values |
| `tanh_top_tb` | the default unit: every input code streamed with random bubbles; 1-cycle latency, bit-exact against `tanh_ref_pkg`, error within 2.2e-4 of `$tanh`; coverage of both signs, -4.0, segment 0 with `P(-1)`, the last segments, all 32 segments and bubbles |
| `tanh_accuracy_tb` | `TV_FRAC = 16`: every code in (-4, 4), bit-exact, and RMS <= 5.25e-5, max <= 1.52e-4 against `$tanh` |

`tanh_ref_pkg` is a bit-exact integer model of the unit. It takes its
control points from `$tanh`, not from the RTL's table. Every testbench also
measures the error against `$tanh` directly. Each simulation takes well
under a second.

## Changing the design

* **Accuracy or area:** change `TV_FRAC` on `tanh_top`. It must be between
  1 and 30; an assertion in `interp_vector` checks this.
* **Control points:** edit `cp_value()` in `tanh_pkg`. The formula is
  `round(tanh(i/8) * 8192)` for i = 0..33. The same function with another
  odd, saturating curve (for example a scaled sigmoid shifted to be odd)
  gives another activation function. The testbenches compare against
  `$tanh`, so they would then need a new reference.
* **Step size:** the 0.125 step is tied to the 5/10 split of `|x|` in
  `tanh_top` and to `IDX_W`, `T_W` and `SEGS` in the package. A step of
  0.0625 (64 segments, 6/9 split) would need those changes, a 66-entry
  table, and `T_W = 9`. The exact-product widths follow
  `T_W` automatically.
