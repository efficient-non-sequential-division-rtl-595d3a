# Non-sequential fixed-point division: a piecewise-linear reciprocal with a polynomial correction

Dividers on FPGAs are usually sequential: digit recurrence, Newton–Raphson or
Goldschmidt iterations need many cycles per quotient, or a long pipeline. That is
a poor fit for iterative algorithms whose next divisor depends on the last
result. This design computes `q = w / x` with no iteration, no lookup table and
no input scaling. Four multipliers do the work with a degree-2 correction and
five with degree 4; a plain reciprocal needs one fewer. The whole division fits in one clock cycle. It can also be spread
over 4 or 5 pipeline stages to raise the clock rate, with a new division
accepted every cycle.

The SystemVerilog here implements both architectures, degree 2 and degree 4, each
in the pipelined and the one-cycle form. The default sizes are those of an
averaging unit: a 16-bit integer divisor, a 16.15 dividend, and 17 fraction bits
inside.

## The idea in three equations

Let `z = floor(log2 x)`, so that `x` lies in `[2^z, 2^(z+1))`. Between the two
powers of two, `1/x` is replaced by the straight line through
`(2^z, 2^-z)` and `(2^(z+1), 2^-(z+1))`:

    y_l(x) = (3 - x·2^-z) · 2^-(z+1)

Only shifts are needed once `2^-z` is known. A leading-one detector gives the
one-hot `2^z`. Mirroring its bits about the binary point turns it into the
one-hot `2^-z`. Multiplying by a one-hot word is a shift.

The ratio between the true reciprocal and this line, `gamma = (1/x) / y_l(x)`,
has the same shape in every octave. Written in terms of the position
`a = x·2^-z - 1` in `[0, 1)` inside the octave, it is

    gamma(a) = 2 / (3(1+a) - (1+a)^2)

This function does not depend on `z`. It runs from 1 at `a = 0`, down to
0.889 at `a = 0.5`, and back to 1 at `a = 1`. One polynomial `p_d(a)` therefore
corrects the line over the whole number range:

    q = w · p_d(a) · y_l(x)

The polynomials are least-squares fits of `gamma` sampled at Chebyshev nodes.
The fit makes the error roughly even across `[0, 1)`. Each step of 2 in the
degree cuts the error by about 35×. The relative error of `q` is about the same
for every `x`.

### Degree 2

The fitted coefficients have `c1 ≈ -c2`; they differ by about 1e-9. The
polynomial can therefore be completed to a square:

    p2(a) = c2 (a - 0.5)^2 + C',   C' = c0 - 0.25·c2
    c2 = 0.444059373310529,  c0 = 0.998316470026731

Since `a - 0.5 = x·2^-z - 1.5`, the correction costs one subtraction of a
constant, one squarer, one constant multiplier and one constant adder.

### Degree 4

The degree-4 fit factors into two quadratics:

    p4(a) = c4 (K1 - 2.5a + a^2)(K2 + 0.5a + a^2)
    c4 = 0.209150199411479,  K1 = 3.0616168632399,  K2 = 1.561598389171924

The linear coefficients, originally -2.500018… and 0.500018…, are rounded to
-2.5 and 0.5. They then cost only shifts and adds:
`2.5a = (a << 1) + (a >> 1)` and `0.5a = a >> 1`. One squarer feeds both
factors. One multiplier forms their product, and one constant multiplier
applies `c4`.

### Folding in the dividend

The dividend is not multiplied in at the end. It is shifted right by `z+1` and
multiplied by `3 - x·2^-z` in the multiplier that forms `y_l`. When `w` is a sum
of `x` fractional values, as in an average, `w·2^-(z+1)` is itself a fraction.
That multiplier can then be much narrower than `w`. The parameter `WSH_INT`
exposes this (see below).

## Datapaths and register placement

Both dividers share the front end (`coarse_wyl`). The numbers in brackets are
the register levels of the pipelined form.

    x ──► LOD + bit reversal ──► 2^-z ─[1]─┬─► x·2^-z = s ──► correction polynomial ──► p ─┐
    x ─────────────────────────────────[1]─┘        │                                      │
                                                    └─► 3 - s ─[2]─┐                       ×─► q ─[out]
    w ─────────────────────────────────[1]─► ·2^-(z+1) ─[2]────────×─► w·y_l ─[3] ( ─[4] ) ┘

The degree-2 correction (`corr_poly2`), which reads `s` after level 1:

    s - 1.5 ─► square ─[2]─► ×c2 ─► +C' ─[3]─► p

The degree-4 correction (`corr_poly4`), which reads `s` after level 1:

    a = s - 1 ─► a², K1 - 2.5a, K2 + 0.5a ─[2]─► add a² to both, multiply ─[3]─► ×c4 ─[4]─► p

In the degree-4 divider, `w·y_l` gets an extra register at level 4 so that it
meets `p`. The final product is registered at the output. This gives a latency
of 4 cycles for degree 2 and 5 for degree 4. In the one-cycle form
(`PIPELINED = 0`), every register except the output register is removed. The
latency is then 1 cycle and the whole datapath is one combinational path.

| variant                    | latency (cycles) | throughput      |
|----------------------------|------------------|-----------------|
| degree 2, `PIPELINED = 1`  | 4                | 1 result/cycle  |
| degree 2, `PIPELINED = 0`  | 1                | 1 result/cycle  |
| degree 4, `PIPELINED = 1`  | 5                | 1 result/cycle  |
| degree 4, `PIPELINED = 0`  | 1                | 1 result/cycle  |

An `in_valid` bit travels down a shift register of the same length. It appears
as `out_valid` with the result. There is no back-pressure: a result is
presented for one cycle only.

## Number formats

All internal results have `FRAC = 17` fraction bits. Every product and shift is
truncated toward minus infinity. Constants are rounded to the nearest value at
`FRAC` bits, computed at elaboration from their real values (`nsdiv_pkg`).

| signal               | format                            | range                   |
|----------------------|-----------------------------------|-------------------------|
| `x`                  | unsigned integer, `XW = 16` bits  | 1 … 65535               |
| `w`                  | two's complement, `WI.WF = 16.15` | [-32768, 32768)         |
| `2^-z`               | one-hot, 1.17                     | 2^0 … 2^-15             |
| `s = x·2^-z`         | unsigned 1.17                     | [1, 2)                  |
| `3 - s`              | unsigned 2.17                     | (1, 2]                  |
| `w·2^-(z+1)`         | two's complement `WSH_INT`.17     |                         |
| `w·y_l`              | two's complement (`WSH_INT`+1).17 | \|w·y_l\| ≤ \|w\|       |
| `p2`, `p4`           | unsigned 2.17                     | ≈ [0.889, 1)            |
| `q`                  | two's complement 16.17            | \|q\| ≤ \|w\|           |

Because `x ≥ 1` and the corrected reciprocal stays below 1 at `x = 1`, `q`
cannot overflow.

`x = 0` has no leading one. The dividers then produce a meaningless `q` and raise
`div_zero` alongside `out_valid`. The method is defined for `x ≥ 1`. Negative
divisors, or divisors below 1, would need a sign/scale stage in front, which is
not included.

`WSH_INT` (default `WI` = 16) is the number of integer bits kept for
`w·2^-(z+1)`. The default divides any 16.15 dividend exactly. `WSH_INT = 1` is
enough whenever `|w| ≤ x`, as when `q` is the average of `x` fractions. It
shortens `w·2^-(z+1)`, and the multiplier operand it feeds, from 33 to 18 bits. Dividends outside
that range then wrap around.

## Precision

The end-to-end testbench runs the full sweep `w = 1`, `x = 1 … 65535` at the
default sizes. It measures the largest `|q - 1/x|`:

| correction | x = 1    | 2 ≤ x < 256 | x ≥ 256  |
|------------|----------|-------------|----------|
| degree 2   | 1.686e-3 | 8.47e-4     | 1.53e-5  |

| correction | x ≤ 4    | x > 4       |
|------------|----------|-------------|
| degree 4   | 4.58e-5  | 1.53e-5     |

Degree 2 gives about 10 bits at small `x` and about 16 bits for large `x`. The
floating-point degree-2 polynomial has a worst-case error of 1.684e-3; the
1.686e-3 at `x = 1` is that plus quantisation. Degree 4 is as good as rounding
`1/x` to a 16-bit fraction (2^-16 = 1.53e-5) for `x > 4`, and a little worse
below that. For general `w`, the testbenches accept a relative error of
2e-3 (degree 2) or 6e-5 (degree 4), plus 2^-15 relative and 5 LSB absolute for
quantisation. Rounding the degree-4 linear coefficients to -2.5/0.5 raises the
worst-case `|p4 - gamma|` from 5.0e-5 to 5.4e-5 (near `a = 0.93`), and to about
6e-5 after 17-bit quantisation. The difference does not show in the results
above, which are limited by the 17-bit output.

## Modules

| module        | role                                                                            |
|---------------|---------------------------------------------------------------------------------|
| `nsdiv_pkg`   | default widths, real-valued coefficients, `fixq()` quantiser                    |
| `pipe_reg`    | a register that can be configured away (`EN = 0` makes it a wire)               |
| `lod_bitrev`  | leading-one detector; bit reversal to the one-hot `2^-z`; `x = 0` flag           |
| `pow2_mult`   | multiply by a one-hot power of two (one-hot multiplexer of shifted copies)      |
| `coarse_wyl`  | `s = x·2^-z` and `w·y_l(x)`, register levels 1–3                                |
| `corr_poly2`  | `p2(a)` via `c2 (s-1.5)^2 + C'`, 2 register levels                               |
| `corr_poly4`  | `p4(a)` in factored, shift-and-add form, 3 register levels                       |
| `div_poly2`   | degree-2 divider: `coarse_wyl` + `corr_poly2` + output multiplier, valid pipe    |
| `div_poly4`   | degree-4 divider: `coarse_wyl` + `corr_poly4` + output multiplier, valid pipe    |
| `nsdiv_top`   | both dividers on shared `x`, `w` inputs                                          |

`nsdiv_top` offers both precisions at once. The two dividers share only their
inputs. Leave one output unconnected and synthesis removes that divider. Its
ports:

| port                           | dir | width | meaning                                   |
|--------------------------------|-----|-------|-------------------------------------------|
| `clk`                          | in  | 1     | clock, rising edge                        |
| `rst_n`                        | in  | 1     | asynchronous reset, active low (flags only) |
| `in_valid`                     | in  | 1     | an operation is offered this cycle        |
| `x`                            | in  | 16    | divisor                                   |
| `w`                            | in  | 31    | dividend                                  |
| `q2_valid`, `q2_zero`, `q2`    | out | 1, 1, 33 | degree-2 result, 4 cycles after input (1 if not pipelined) |
| `q4_valid`, `q4_zero`, `q4`    | out | 1, 1, 33 | degree-4 result, 5 cycles after input (1 if not pipelined) |

Parameters: `XW`, `WI`, `WF`, `FRAC`, `WSH_INT` and `PIPELINED`, with the defaults
above. `FRAC` must be at least `XW - 1` so that every `2^-z` is representable.

## Choices not fixed by the method

- The dividend is taken as two's complement. The divisor is an unsigned integer
  with no fraction bits.
- All internal results are truncated, and constants are rounded to nearest.
- A valid bit, a reset on the flags only, and the `div_zero` flag are this
  design's own. The data registers have no reset, so they can be absorbed into
  DSP blocks.
- The one-cycle variant has no input registers. A synthesis run that wants
  register-to-register timing should add them around the divider. In a larger
  design they normally belong to the logic feeding it.
- The default `w` path is full width. The narrowed averaging width is available
  through `WSH_INT`. Flip-flop counts are therefore larger than a datapath cut
  down to averaging only. Coarse synthesis of the default configuration gives
  about 225 flip-flops for `div_poly2` and 321 for `div_poly4`, pipelined.
- Only degrees 2 and 4 are built. Polynomials up to degree 16 fit `gamma` with
  ever smaller errors (about 35× per two degrees). They would need their own
  factorisation and datapath.

## Simulating

Every testbench checks its own results and prints
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/nsdiv_pkg.sv tb/tb_nsdiv_top.sv \
              --top-module tb_nsdiv_top -Mdir obj_top -o sim
    ./obj_top/sim

Replace `tb_nsdiv_top` with any testbench below. The package must come first on
the command line. Verilator finds the other modules through `-Irtl`.

| testbench            | what it checks                                                                 |
|----------------------|--------------------------------------------------------------------------------|
| `tb_lod_bitrev`      | all 65536 values of `x` against a loop-computed `floor(log2 x)`                 |
| `tb_pow2_mult`       | random signed and unsigned operands against integer multiplication by `2^i`    |
| `tb_coarse_wyl`      | `s` exact and `w·y_l` within 3 LSB of real arithmetic; pipeline lag 1 and 3     |
| `tb_corr_poly2`      | `p2` against the real polynomial (3 LSB) and against `gamma` (1.8e-3); lag 2    |
| `tb_corr_poly4`      | `p4` against the real factored polynomial (3 LSB) and `gamma` (8e-5); lag 3     |
| `tb_div_poly2`       | both variants, random traffic with bubbles and `x = 0`; latency 4 / 1           |
| `tb_div_poly4`       | the same for degree 4; latency 5 / 1                                           |
| `tb_nsdiv_top`       | default sizes end to end: the `1/x` sweep, averages of up to 2^15 values, random traffic; every mechanism counted |
| `tb_nsdiv_top_1cyc`  | the same on `PIPELINED = 0`                                                    |
| `tb_nsdiv_top_avg`   | averaging with `WSH_INT = 1`, N = 1 … 32768, extreme means included            |

Each run takes well under a second.
