# Approximate FP8 arithmetic on an 8-bit integer adder

An 8-bit floating-point word, read as an unsigned integer, is already an approximate
base-2 logarithm of its value. The exponent field is the integer part, and the mantissa
field is a linear stand-in for the fraction (Mitchell's approximation). Multiplying two
FP8 numbers therefore comes close to adding their words and subtracting the bias once.
Dividing comes close to subtracting them, and a square root to halving the word. This RTL
builds on that observation. Every operation is **one 8-bit addition**:

    r = A + B' + K + cin      (mod 256)

`A` and `B'` are the operand words, possibly shifted or negated. `K` is a constant that
depends on the format and the operation. `cin` is a one-bit carry-in, computed from the
few mantissa bits. The carry-in is the interesting part. Mitchell's approximation is
always a little off. But for 8-bit formats the error is a fraction of an ulp, and its
pattern depends only on the mantissas. So a small logic function of those bits can add
exactly the missing ulp. The result then becomes the *correctly rounded* value in a
chosen IEEE rounding mode, not an approximation. Some (operation, mode) pairs cannot be
corrected this way, and the design flags them.

The RTL covers the two common FP8 formats:

| format | sign | exponent | mantissa | bias | B = bias << m |
|--------|------|----------|----------|------|---------------|
| E5M2   | x[7] | x[6:2]   | x[1:0]   | 15   | 0x3c          |
| E4M3   | x[7] | x[6:3]   | x[2:0]   | 7    | 0x38          |

## Operations

| operation | A            | B'  | K, E5M2 | K, E4M3 |
|-----------|--------------|-----|---------|---------|
| x · y     | X            | Y   | 0xc4 (−B) | 0xc8 (−B) |
| x²        | X << 1       | 0   | 0xc4    | 0xc8    |
| x / y     | X            | −Y  | 0x3b (B−1) | 0x37 (B−1) |
| 1 / x     | −X           | 0   | 0x77 (2B−1) | 0x6f (2B−1) |
| √x        | X >> 1 (logical) | 0 | 0x1e (B/2) | 0x1b (B/2−1) |
| 1 / √x    | (−X) >>> 1 (arithmetic) | 0 | 0x5a (3B/2) | 0x53 (3B/2−1) |

Where a constant is "minus one", the plain Mitchell result would sometimes be too large.
A carry-in can only add, so the constant is lowered by one ulp and the carry-in puts it
back where needed.

The sign comes out of the same addition. The sign bits add modulo 2, and the constant's
top bit cancels the carry that the biased magnitudes produce. This holds as long as the
result is a normal number.

Operands must be normal numbers: no zeros, subnormals, infinities or NaNs. The roots also
need a positive operand. No special value is detected. A result that over- or underflows
the normal range wraps around, exactly as the integer expression does.

## Rounding modes and the carry-in

Seven modes are supported:

- RNe, RNa and RNz: round to nearest, with ties to even, away from zero, and towards zero.
- RU, RD and RZ: round towards +∞, towards −∞, and towards zero.
- Faithful: either neighbour of the exact value is acceptable.

The carry-in functions are in `fp8_cin_e5m2` and `fp8_cin_e4m3`. They take the mantissa
bits of both operands and, where needed, the result sign or the exponent LSB. For the root
operations the exponent LSB ends up in the mantissa after the shift. This table shows
where a carry-in is enough (✓) and where it is not (—):

| E5M2 | RNe | RNa | RNz | RU | RD | RZ | faithful |
|------|-----|-----|-----|----|----|----|----------|
| mul, sq, div, 1/x | ✓ | ✓ | ✓ | ✓ | ✓ | ✓ | ✓ |
| √x, 1/√x | ✓ | ✓ | ✓ | ✓ | — | — | ✓ |

| E4M3 | RNe | RNa | RNz | RU | RD | RZ | faithful |
|------|-----|-----|-----|----|----|----|----------|
| mul | ✓ | ✓ | ✓ | — | — | ✓ | ✓ |
| sq | ✓ | ✓ | ✓ | — | ✓ | ✓ | ✓ |
| div, 1/x | ✓ | ✓ | ✓ | — | — | — | ✓ |
| √x, 1/√x | ✓ | ✓ | ✓ | — | ✓ | ✓ | ✓ |

For a "—" entry, the unit adds no carry-in and lowers its `supported` output. The result
is still the plain approximation, within about one to two ulps.

Some examples give a feel for the carry-in terms:

- E5M2 RNe multiplication needs a correction in one case only: one mantissa is 0.25 and
  the other is 0.5. The term is `x0 y1 ~x1 ~y0 + x1 y0 ~x0 ~y1`.
- E5M2 RZ multiplication needs no correction at all. The approximation is never above
  the exact product, and never more than half an ulp below it.
- The E4M3 multiplication terms are sums of 6 to 11 products over the six mantissa bits. Each still fits
  in one 6-input LUT.

### Points where this RTL departs from the published expressions

Every carry-in term was checked against exact rounding for all operand words. The
testbenches repeat this check. The published expressions have a few slips, and the RTL
corrects them:

1. **E5M2 reciprocal constant.** The RTL uses 0x77 = 2B − 1. The published value is
   0x87, which makes every reciprocal 16 times too large.
2. **E5M2 reciprocal, RU and RD.** The published terms use the wrong sign polarity. The
   RTL uses the same polarity as division: RU = `~x7 + ~x0 ~x1`, RD = `x7 + ~x0 ~x1`.
3. **E5M2 division, faithful.** The published carry-in is 0. With the lowered constant
   0x3b that can be one ulp too low, so the RTL uses cin = 1, which gives the unlowered
   constant 0x3c. That result always lies between the two FP8 neighbours of the exact
   quotient.
4. **E4M3 square root, nearest modes.** The RTL uses `x3 + x2 + x1 + x0`. The correction
   is needed when the exponent LSB is 1, but the published equation inverts x3.
5. **E4M3 square root, RD/RZ.** The RTL uses
   `~x3 x0 + x3 (x0 ~x1 + x0 ~x2 + ~x1 ~x2)`, with x3 inverted relative to the published
   term for the same reason.
6. **E4M3 square root, faithful.** The published carry-in is 0, which fails for odd
   mantissas and for a zero mantissa with an odd exponent. The RTL reuses the nearest-mode term, which is also faithful.
7. **Reciprocal square root.** The operand is negated first and then shifted right
   arithmetically: (−X) >>> 1. With −(X >> 1), results for odd X are one ulp off in both
   formats.

Everything else is as published.

## Hardware: the multipliers

Multiplication is the operation worked out as hardware (`fp8_mul`). There are three
variants:

- `MUL_E5M2` and `MUL_E4M3`: one format each. The rounding mode is fixed by the
  parameter `RM`, typically RNe or RZ.
- `MUL_COMBINED` (the default): both formats on one adder. An `fmt` input selects the
  constant (0xc4 or 0xc8) and which carry-in term is used.

`fp8_mul_reg` places a multiplier between input and output registers. That is the form
used to compare it with conventional FP8 multipliers. It has 16 input flip-flops and 8
output flip-flops, plus one for `fmt` in the combined variant (24 or 25 in all). Operands
captured on one rising clock edge give a product on the next edge: a latency of two edges
from the inputs, and one product per cycle.

The point of the scheme is cost. An E4M3 multiplier that rounds correctly shrinks to an
8-bit adder plus one LUT-sized carry-in function. It needs no mantissa multiplier, no
normalisation shifter and no rounding incrementer.

## The unit as a whole: `fp8_approx_top`

The top level groups the pieces into one clocked unit. It has one set of operand pins,
`fmt`, `x` and `y`, plus the controls `op` and `rm`:

- **General path.** `fmt`, `op`, `rm`, `x` and `y` are registered, computed by
  `fp8_approx_alu` and registered again. Outputs `r` and `r_supported` appear two rising
  edges after the inputs. Any of the 6 × 7 × 2 combinations can change from cycle to
  cycle.
- **Multiplier path.** Two `fp8_mul_reg` instances (combined, RNe and RZ) see `fmt`, `x`
  and `y`. Their results are on `mul_rne` and `mul_rz`, with the same two-edge latency.

The general path uses the same shared-adder arrangement as the combined multiplier. Both
formats and all six operations share one adder. Only the operand shift or negation, the
constant and the carry-in are multiplexed. Putting all operations in one unit, and putting
the general path next to the multipliers, are choices made for this RTL.

Reset is asynchronous and active low (`rst_n`). It clears all registers to zero, and
`fmt`, `op` and `rm` to E5M2, mul and RNe. The encodings are in `rtl/fp8_pkg.sv`:

- `fmt`: 0 = E5M2, 1 = E4M3.
- `op`: mul, sq, div, rec, sqrt, rsqrt = 0 to 5.
- `rm`: RNe, RNa, RNz, RU, RD, RZ, faithful = 0 to 6.

## Files

| file | contents |
|------|----------|
| `rtl/fp8_pkg.sv` | format, operation and rounding-mode enums; constant table `op_const` |
| `rtl/fp8_cin_e5m2.sv`, `rtl/fp8_cin_e4m3.sv` | carry-in terms and `supported` flag |
| `rtl/fp8_approx_alu.sv` | combinational general unit |
| `rtl/fp8_mul.sv` | combinational multiplier, `VARIANT` and `RM` parameters |
| `rtl/fp8_mul_reg.sv` | multiplier with input/output registers |
| `rtl/fp8_approx_top.sv` | top level |
| `tb/fp8_ref_pkg.sv` | exact reference: decoding, exact result, rounding onto the FP8 grid |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

The reference model (`tb/fp8_ref_pkg.sv`) works as follows:

1. It decodes the operands to real numbers and computes the exact operation in double
   precision. Double precision is exact for FP8 products. For quotients and roots, its
   error is far smaller than the distance to any FP8 value or rounding midpoint.
2. It finds the two neighbouring FP8 encodings by walking the monotonic encoding space.
3. It picks the neighbour each rounding mode requires. For faithful rounding it accepts
   both.

Results outside the normal range are not compared.

| testbench | what it covers |
|-----------|----------------|
| `tb_fp8_cin_e5m2`, `tb_fp8_cin_e4m3` | every operand word or pair × every operation × every mode. The carry-in is added to the testbench's own copy of the integer expression. The `supported` flag is also checked. About 1.5 M and 1.3 M checks. |
| `tb_fp8_approx_alu` | the same sweep through the real datapath, both formats (2.8 M checks) |
| `tb_fp8_mul` | all six multiplier variants, all operand pairs |
| `tb_fp8_mul_reg` | random operand stream at one operation per cycle; checks the two-edge latency and the reset value |
| `tb_fp8_approx_top` | 200 000 random operations with random format, operation and mode, including raw words that are not normal numbers. Counts, and requires, each mechanism: every operation in both formats, every mode, carry-ins of 0 and 1, flagged unreachable modes, faithful results off the nearest value, format changes between consecutive operations, and reset. |

Each testbench prints `TB_RESULT checks=N failures=M`. A watchdog ends it with a failure
if it hangs. To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/fp8_pkg.sv tb/fp8_ref_pkg.sv \
        tb/tb_fp8_approx_top.sv --top-module tb_fp8_approx_top
    ./obj_dir/Vtb_fp8_approx_top

Each one runs in about a second. The top has no parameters, so the end-to-end test runs
the design at its only size.

## Limits

- No special values. Zero, subnormal, infinity and NaN operands give meaningless results,
  and overflow or underflow wraps. This follows the formulation, which assumes normal
  numbers throughout.
- A "—" mode (see the tables above) returns the approximation with `supported` low. It
  raises no exception.
- The conventional reference multipliers that this scheme is usually compared with are
  not part of this RTL.
