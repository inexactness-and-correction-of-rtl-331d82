# Final Correction: correctly rounded single-precision reciprocal without a rounding step

Most hardware reciprocal, divide and square-root units first compute an
estimate, then refine it until it has more precision than the output format,
and then round. The rounding is harder than it looks. Round-to-nearest-even
needs to know whether the exact result lies exactly halfway between two
floating-point numbers. That takes extra precision and an equality test.

This design takes a different route. It starts from an estimate `Y` of `1/x`
that is already in the output precision (24 significand bits for IEEE single).
The estimate is allowed to be wrong by a few ulps, but only on the low side.
The unit works out how many ulps to add, from an exact *residual*
`R = 1 - x*Y`, and adds them. The output is the correctly rounded
(round-to-nearest) reciprocal. There is no separate rounding stage and no
equality test.

Two facts make this cheap:

* **Reciprocals are never midpoints.** If `x` is a floating-point number and
  not a power of two, `1/x` has an infinite binary expansion. So `1/x` is never
  exactly halfway between two numbers of any finite precision. A comparison
  against a rounding boundary is therefore never an equality, and `<` alone
  decides it. The same holds for quotients (for output precision at least
  `n-1`) and square roots, but only the reciprocal is built here.
* **The residual is exact and small.** `x*Y` is a 24x24-bit product, so
  `1 - x*Y` is exact in 48 bits. Because `Y` is close to `1/x`, all but the
  low 27 bits cancel. Any boundary `1/x + (k+1/2) ulp` on the result's number
  line maps to `(k+1/2) * x * ulp` on the residual's number line. That value is
  also exact. So every decision can be made on representable fixed-point
  numbers.

## The significand datapath

`fc_recip_final_correction` is the core of the design. It is combinational and
is made of the six blocks of the published circuit diagram, numbered as there:

```
 (1) Y (24,24) ──┬──────────────┬─────────────────────────┐
     X (24,23) ──┼──┬───────────┼───────────────┐         │
                 v  v           │               │         │
 (2) fc_residual   R = 2^47 - X*Y  ──R[26:0]────┼────┐    │
                 │ R[26:22] (5)  │ Y[23:20] (4) │    │    │
                 v               v              │    │    │
 (3) fc_corr_factor  C = (R[26:22]*Y[23:20] + 16) >> 5   (3 bits)
                 │                              │    │    │
                 ├──────────────────────────────┼────┼────┘
                 v                              v    v
 (4) fc_dual_adder  Y+C, Y+C+1        (5) fc_compare  sel = 2R < (2C+1)*X
                 │                                   │
                 v                                   v
 (6) fc_result_mux  result = sel ? Y+C : Y+C+1
```

Fixed-point formats are written `(p,f)`: `p` stored bits, `f` of them
fraction bits. When `f > p`, the top fraction bits are known to be zero and are
not stored.

| Signal | Format  | Meaning |
|--------|---------|---------|
| `X`    | (24,23) | significand of `x`, `1 <= x < 2` |
| `Y`    | (24,24) | estimate of `1/x`, `0.5 <= Y < 1`, at most 7 ulps too low |
| `R`    | (27,47) | residual `1 - X*Y`; the 48-bit difference fits in 27 bits |
| `C`    | (3,24)  | correction estimate in ulps of `Y`, 0..7 |
| `B`    | (28,47) | branch point `(2C+1)*X` |
| result | (24,24) | `round(1/x)`, 24 bits |

### Why `C` is the rounded product of a few leading bits

The exact error of `Y` in ulps is `R/(x*ulp)`, which is about `R*Y/ulp`. To
round to nearest, the unit needs to know which interval of width one ulp,
centred on a whole number of ulps, contains the error. A 5-bit by 4-bit product
of the leading bits of `R` and `Y` is accurate enough to narrow this to two
adjacent intervals. Adding 16 before the 5-bit shift rounds the estimate to the
nearest whole ulp. The answer is then `Y+C` or `Y+C+1`. The boundary between
them lies at `(C + 1/2)` ulps of error. On the residual line that is
`(C + 1/2) * x * ulp`.

### The comparison as a carry-out

Doubling both sides removes the half: the unit tests `2R < (2C+1)*X`, which
lines up with the fixed-point weights. `C` has three bits, so `(2C+1)*X` is the
sum of four partial products: `X`, and `2X`, `4X`, `8X` gated by `C[0]`,
`C[1]`, `C[2]`. `fc_compare` adds those four terms to the one's complement of
`2R` in a 28-bit window. The sum is `2^28 + B - 2R - 1`. Its carry out of
bit 27 is 1 exactly when `2R < B`. That single carry-out bit is the mux select.
No equality case exists: by the midpoint theorem, `2R = B` would put `1/x` on
a midpoint. `fc_dual_adder` forms both candidates side by side, so the select
arrives while they are ready.

### Input conditioning

`fc_precondition` implements two checks from the published reference code:

* `x == 1.0` is a binade endpoint. The result is forced to 1.0, which is
  `0x800000` in (24,23) form. (In the (24,24) view this has the same bit
  pattern as 0.5, which the datapath would also produce.)
* An estimate below 0.5 lies outside the output binade. It is raised to 0.5,
  the first value of the binade. For `x` just below 2, `round(1/x)` is 0.5, so
  an estimate a few ulps low would otherwise leave the binade.

### Preconditions and `out_of_range`

The unit corrects an estimate that satisfies `Y <= 1/x` (so `R >= 0`). The
residual must also fit the bits the correction multiplier reads: `R < 2^27`,
about 8 ulps. `out_of_range` is raised when either condition fails; the
result is then not guaranteed. The flag is this design's addition. The
published reference code asserts exactly these two conditions.

The published description is not fully consistent on this point. Its test
section lists estimates 0 to 7 ulps *below the correctly rounded value*, but its
code requires `Y <= 1/x`. For about half of all `x`, `round(1/x)` is *above*
`1/x`. So an "error of 0 ulps" breaks the stated precondition, and the circuit
as drawn then returns a wrong value (for example `x = 0xffffff`,
`Y = 0x800001`). This design follows the code's precondition. Those inputs
raise `out_of_range`. Any estimate from 1 to 7 ulps below `round(1/x)`, or
equal to it when it does not exceed `1/x`, is corrected exactly.

## Single-precision wrapper: `fc_recip_fp32`

For `x = ±m·2^e` with `m` in `[1,2)`, `1/x = ±(1/m)·2^-e`. The significand unit
returns `1/m` in `[0.5,1)`. The exponent follows from the input alone, because
the estimate never leaves the output binade:

* `m = 1` (power of two): `e -> -e`, biased `E_out = 254 - E`;
* otherwise: `1/m` is in `(0.5,1)`, so `e -> -e-1`, biased `E_out = 253 - E`.

The fraction field is `result[22:0]`. The sign passes through. `y_est` is the
estimate of `1/m` in (24,24) form. Zero, subnormal, infinite and NaN operands,
and operands whose reciprocal would be subnormal (`E >= 253`, or `E = 254`
for a power of two), are outside this design. They raise `unsupported`, and
`r_fp` is then meaningless. The method itself leaves these cases to
conventional exception handling.

## Configurations

`fc_corr_factor` (and the top-level `CF_*` parameters) sets how many residual
and estimate bits the correction multiplier uses:

| `R_LSB` | `R_BITS` | `Y_BITS` | `ROUND` | Multiply | Corrects (nominal) | Residual bound |
|---|---|---|---|---|---|---|
| 22 | 5 | 4 | 1 | 5x4, rounded (default) | up to 7 ulps | `R < 2^27` |
| 21 | 5 | 3 | 1 | 5x3, rounded | up to 6 ulps | `R < 2^26` |
| 21 | 4 | 3 | 0 | 4x3, truncated | up to 3 ulps | `R < 2^25` |

The shift is always `23 - R_LSB + Y_BITS = 5`. `out_of_range` uses the bound
of the configuration in use. In the smaller two configurations the nominal
range is only partly covered. An estimate 6 (or 3) ulps below `round(1/x)`
gives a residual beyond the bound for many `x`. Such inputs are flagged, not
corrected. Exhaustively, the flag excludes 9,360,393 of the 5x3 cases and
6,388,388 of the 4x3 cases, besides the 4,193,698 zero-error estimates that lie
above `1/x`. Only the 5x4 default covers its whole nominal range.

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Reference values
come from 64-bit integer arithmetic: `round(1/x) = floor((2^48 + X) / (2X))`
for the significand. Doubles are used for the wrapper's exponent.

| Testbench | What it covers |
|---|---|
| `tb_fc_precondition`, `tb_fc_residual`, `tb_fc_corr_factor`, `tb_fc_dual_adder`, `tb_fc_compare`, `tb_fc_result_mux` | each block against integer formulas; `tb_fc_corr_factor` sweeps all 5-bit x 4-bit prefixes in all three configurations; `tb_fc_compare` places `R` at and next to the branch point |
| `tb_fc_recip_final_correction` | significand unit, 20,000 random `x` plus corners, errors 0..7; counts the x==1 bypass, clamp, both selector values, every `C` from 0 to 7 and `out_of_range` |
| `tb_fc_recip_fp32` | whole design at default parameters: random normal operands of both signs and all exponents, powers of two, unsupported operands |
| `tb_fc_exhaustive` | every `x` in (1,2) with errors 0..7: 67,108,856 cases; 62,915,158 corrected exactly, 4,193,698 flagged as above `1/x`, no failures (about 30 s) |
| `tb_fc_variants` | the same sweep for the 5x3 (errors 0..6) and 4x3 (errors 0..3) configurations |

What is not verified: no gate-level timing, and no formal proof of the
datapath. The only correctness argument for single precision is the
exhaustive simulation.

## Simulating

All files are SystemVerilog 2017. `rtl/fc_pkg.sv` and `tb/fc_tb_pkg.sv` must
come first on the command line. Example with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/fc_pkg.sv tb/fc_tb_pkg.sv tb/tb_fc_exhaustive.sv \
    --top-module tb_fc_exhaustive -Mdir obj_exh
./obj_exh/Vtb_fc_exhaustive
```

Replace the testbench name to run any other test. The testbenches read
internal nets of the significand unit (`c`, `sel`, `clamped`, `x_is_one`) by
hierarchical name to count mechanisms.

## Files

* `rtl/fc_pkg.sv`: widths, fixed-point types, the candidate-pair struct.
* `rtl/fc_precondition.sv`, `rtl/fc_residual.sv`, `rtl/fc_corr_factor.sv`,
  `rtl/fc_dual_adder.sv`, `rtl/fc_compare.sv`, `rtl/fc_result_mux.sv`: the
  blocks of the datapath.
* `rtl/fc_recip_final_correction.sv`: the significand unit.
* `rtl/fc_recip_fp32.sv`: the single-precision top level.
* `tb/`: testbenches and the reference-arithmetic package.

## Departures and limits

* **Block structure and widths** follow the published circuit exactly. The
  insides of the compound adder and of the 24x24 multiplier are not
  specified. They are written as plain `+` and `*` for synthesis to map.
* **No registers.** No clock, pipeline depth or latency is specified, so the
  whole design is combinational.
* **Numbering.** One sentence of the source text calls the comparison a
  "4-way add" in stage (6). The diagram shows it as the carry-out of a 5-way
  add in stage (5), with the mux in (6). The diagram is followed.
* **Not built:**
  * the estimate generator, which is only characterised (an underestimate
    within 7 ulps, in the right binade);
  * exception and subnormal handling;
  * division and square root, for which only the theory is given;
  * directed rounding modes, whose interval boundaries would sit at whole
    ulps instead of half ulps;
  * the general signed-correction form with a lookup table. The hardware form
    requires a one-sided estimate and replaces the table with the rounded
    multiply.
