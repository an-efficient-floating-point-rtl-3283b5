# Karatsuba / Urdhva-Tiryagbhyam floating point multiplier

Multiplying two IEEE-754 numbers is mostly one problem: the integer
product of the two significands (24 x 24 bits in single precision, 53 x 53 in
double). Sign and exponent cost almost nothing next to it. This design builds
that product from two methods, each used where it works best:

* **Karatsuba** at the wide levels. Each operand is cut into a high and a
  low part. Three half-size products then replace the four of the schoolbook
  method, at the price of a few adders.
* **Urdhva-Tiryagbhyam** ("vertically and crosswise", a multiplication
  method from Vedic mathematics) at the 8 x 8 leaves. Every product column is
  summed on its own, and each column adder passes its carries to the next one.

The rest is the usual floating point multiplier around that core. The sign is
an XOR. The exponents go through a ripple-carry adder and a ripple-borrow bias
subtracter. A normalizer aligns the product and truncates it. A result stage
handles special operands and raises four flags: Zero, Infinity, NaN and
Denormal.

The RTL is SystemVerilog, synthesizable and purely combinational. It is
parameterized for single precision by default and for double precision by
parameters.

## Datapath

```
 a = {sa, ea, fa}        b = {sb, eb, fb}
    |     |    |            |     |    |
    |     |    +------------|-----|----+---> {1,fa} x {1,fb}  karatsuba_mult
    |     +-----------------|-----+          (recursive, 8x8 ut_mult leaves)
    |          exp_adder  ea + eb                      |
    |          bias_subtractor  - BIAS                 |  2(MANT_W+1)-bit product
    |                 |  signed exponent               |
    |                 +-----------> normalizer <-------+
    +--- sign_calc (sa ^ sb)            |  exponent field, fraction, ovf
                 |                      v
                 +-------------> fp_exceptions ---> result, zero, infinity,
                                  (special operands)   nan, denormal
```

| module | role |
|---|---|
| `fp_mult` | top: wires the datapath above |
| `sign_calc` | XOR of the operand signs |
| `exp_adder` | EXP_W-bit ripple-carry adder, carry kept (EXP_W+1 bits) |
| `bias_subtractor` | ripple-borrow subtracter; result is EXP_W+2 bits, signed, so underflow is visible |
| `karatsuba_mult` | recursive Karatsuba significand multiplier |
| `ut_mult` | N x N Urdhva-Tiryagbhyam multiplier (the leaves) |
| `multi_operand_adder` | carry-save accumulation of M operands, then one carry-select adder |
| `carry_save_adder` | one 3:2 row of full adders |
| `carry_select_adder` | two-operand carry-select adder, 4-bit blocks |
| `normalizer` | one-place alignment, truncation, overflow and denormal encoding |
| `fp_exceptions` | packs the result, handles NaN/Inf/zero operands, raises the flags |
| `fp_pkg` | `fp_flags_t` flag struct, format constants, the Karatsuba split function |

## The significand multiplier

### Karatsuba levels (`karatsuba_mult`)

For operands of `N` bits split at bit `H`, write `X = 2^H*Xl + Xr` and
`Y = 2^H*Yl + Yr`. Then

```
X*Y = 2^(2H)*Xl*Yl + 2^H*((Xl+Xr)*(Yl+Yr) - Xl*Yl - Xr*Yr) + Xr*Yr
```

One instance of `karatsuba_mult` holds the following parts:

1. Two sub-multipliers, `Xl*Yl` (`N-H` bits) and `Xr*Yr` (`H` bits).
2. Two `H`-bit carry-select adders that form `Xl+Xr` and `Yl+Yr`.
3. The middle product `(Xl+Xr)*(Yl+Yr)`.
4. A subtracter that removes the two outer products from the middle product.
5. A final adder that places the three terms at bit offsets `2H`, `H` and `0`.
   The shifts are only wiring.

All three products are `karatsuba_mult` instances again, so the module
instantiates itself until the width is at most `LEAF = 8`. At that width it
instantiates `ut_mult`.

Two details are this design's own, because the method only says "split in
halves until the operands are 8 bits wide".

**The split point.** Exact halves of 24 or 53 bits never reach 8 bits (24 → 12
→ 6). So the low part is made the smallest multiple of 8 that is at least half
the width: `H = 8*ceil(N/16)`. The high part takes the rest.

| N | split (high + low) | 8-bit leaves |
|---|---|---|
| 16 | 8 + 8 | 3 |
| 24 (single precision) | 8 + 16 | 7 (the 8-bit high product is one leaf) |
| 32 | 16 + 16 | 9 |
| 53 (double precision) | 21 + 32 | 32 + 16 + 5-bit leaves |

**The carry of the sums.** `Xl+Xr` has `H+1` bits. A plain recursion would
need `(H+1)`-bit multipliers and 9-bit leaves. Instead, the middle product
multiplies only the low `H` bits `sx`, `sy` of the two sums, and adds the
carry terms separately:

```
(Xl+Xr)*(Yl+Yr) = sx*sy + 2^H*(cx ? sy : 0) + 2^H*(cy ? sx : 0) + 2^(2H)*(cx & cy)
```

These terms are AND gates and wiring. They go through one carry-save chain.

The subtracter computes `mid + ~Xl*Yl + ~Xr*Yr + 2` in the same kind of
carry-save chain. The result is never negative: it equals
`Xl*Yr + Xr*Yl`.

### Urdhva-Tiryagbhyam leaves (`ut_mult`)

Product column `k` (`k = 0 .. 2N-2`) is the sum of the bits `a[i] & b[k-i]`.
Column 0 is a single AND and gives `p[0]` directly. Every other column has its
own adder: 6 adders for a 4 x 4 multiplier, 14 for 8 x 8. Adder `k` adds the
column's AND terms and the carry word of adder `k-1`, which is its sum without
bit 0. Bit 0 of the sum is `p[k]`. The last carry word is `p[2N-1]`.

For 4 x 4 this is, column by column:

```
p0 = a0b0
p1 = LSB(ADDER1) , ADDER1 = a1b0 + a0b1
p2 = LSB(ADDER2) , ADDER2 = carry(ADDER1) + a2b0 + a1b1 + a0b2
p3 = LSB(ADDER3) , ADDER3 = carry(ADDER2) + a3b0 + a2b1 + a1b2 + a0b3
p4 = LSB(ADDER4) , ADDER4 = carry(ADDER3) + a3b1 + a2b2 + a1b3
p5 = LSB(ADDER5) , ADDER5 = carry(ADDER4) + a3b2 + a2b3
p6 = LSB(ADDER6) , ADDER6 = carry(ADDER5) + a3b3
p7 = carry(ADDER6)
```

An adder with more than two operands accumulates them in carry-save form and
ends with a carry-select adder (`multi_operand_adder`). Each column adder is
exactly as wide as its largest possible sum. That bound is
`max(k) = count(k) + floor(max(k-1)/2)`, and `fp_pkg::ut_col_width` computes
it. For 4 x 4 this gives a 1-bit carry out of adder 1 and 2-bit carries out of
adders 2 to 5. Adder 6 has a 2-bit sum, which gives `p6` and `p7`. For 8 x 8
the widest adder is 4 bits.

## Normalization, special values and flags

Both significands carry their hidden 1, so their product lies in `[1, 4)`.
`normalizer` tests the top bit. If it is set, the binary point moves one
place and the exponent is incremented (output `norm_shift`). The `MANT_W` bits
after the leading 1 become the fraction. **The rest is truncated: there is no
rounding.** After the increment, the signed exponent `e` selects one of three
cases:

| condition | exponent field | fraction |
|---|---|---|
| `e >= 2^EXP_W - 1` | all ones | 0 (Infinity, output `overflow`) |
| `1 <= e < 2^EXP_W - 1` | `e` | normalized fraction |
| `e <= 0` | 0 | significand shifted right by `1-e`; 0 if nothing is left |

`fp_exceptions` overrides the word for special operands:

| operands | result |
|---|---|
| any NaN, or Infinity x zero | quiet NaN `0 / all ones / 100...0` |
| Infinity x non-zero finite | signed Infinity |
| an operand with exponent field 0 (zero **or denormal**) | signed zero |

Denormal operands are flushed to zero.

The four flags are decoded from the final result word:

| flag | exponent field | fraction |
|---|---|---|
| `zero` | 0 | 0 |
| `infinity` | all ones (255 in single) | 0 |
| `nan` | all ones | not 0 |
| `denormal` | 0 | not 0 |

## Interface and timing

```systemverilog
fp_mult #(.EXP_W(8), .MANT_W(23), .BIAS(127)) u (   // defaults: single precision
  .a, .b,                  // [EXP_W+MANT_W:0] IEEE-754 operands
  .result,                 // [EXP_W+MANT_W:0] truncated product
  .zero, .infinity, .nan, .denormal,
  .norm_shift, .overflow   // what the normalizer did (observation, test)
);
```

For double precision, set `EXP_W = 11`, `MANT_W = 52` and `BIAS = 1023`. The
block is combinational: there is no clock and no reset, and the result follows
the operands after one propagation delay. To pipeline it, register the
operands and the result outside it, or cut it between the Karatsuba levels.
After coarse synthesis the single precision multiplier is about 5,600
word-level cells, nearly all of them in the significand multiplier.

## Where this RTL departs from, or adds to, the published design

* **Choices where the description is silent:**
  * the Karatsuba split point for widths that are not 8 x 2^k;
  * the treatment of the sum carries;
  * the handling of special operands;
  * overflow to Infinity and underflow to a denormal or zero;
  * the carry-select block size (4);
  * the column-adder widths.
* **No rounding.** Truncation is used. The original work also leaves rounding
  to future work.
* **No registers.** The published timing reports a maximum clock frequency, and
  pin counts that equal three data words plus one pin. So the measured build
  probably had a clock and registered I/O. Where those registers sat is not
  described, so none are included here. The pin counts also leave no room for
  the four flags.
* **Reading of the column equations.** The printed equations for `p4`..`p6`
  take the carry from "ADDER 1". This RTL follows the ripple connection of the
  hardware drawing, where each adder takes the carry of the one before it.
  That reading is the only one that gives correct products.
* **Two extra outputs.** `norm_shift` and `overflow` are additions for
  observation.
* **Not covered:** a "custom precision" format that uses bias 127 is mentioned
  but not defined. It is reachable through the parameters if its field widths
  are known.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_sign_calc` | all four sign pairs |
| `tb_exp_adder` | all 65,536 exponent pairs |
| `tb_bias_subtractor` | all sums, bias 127 and 1023 |
| `tb_carry_save_adder`, `tb_carry_select_adder` | random and full-carry operands, 16 and 13 bits |
| `tb_ut_mult` | exhaustive 4 x 4 and 8 x 8 |
| `tb_karatsuba_mult` | 8, 16, 24, 32 and 53 bits, random and carry-heavy patterns, against wide integer products |
| `tb_normalizer` | products in `[2^46, 2^48)`, exponents from deep underflow to overflow |
| `tb_fp_exceptions` | directed special-operand and flag cases |
| `tb_fp_mult` | single precision at the defaults, 40,000 operand pairs |
| `tb_fp_mult_dp` | double precision, 20,000 operand pairs |

The single precision reference (`tb_fp_ref_pkg`) does not reuse the design's
algorithm. It converts the operands to `real`, where the 48-bit product is
exact, and truncates the exact product to single precision. The double
precision reference uses wide integer arithmetic.

Both end-to-end tests count each mechanism, and fail if one never occurs:

* normalization shift and no shift;
* overflow to Infinity;
* denormal result and underflow to zero;
* NaN operand, Infinity x zero, Infinity operand;
* zero operand and denormal operand.

To run one testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv --top-module tb_fp_mult \
  rtl/fp_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_fp_mult.sv --Mdir obj_tb_fp_mult
./obj_tb_fp_mult/Vtb_fp_mult
```

Every testbench finishes in a few seconds. The Karatsuba and double precision
builds take about half a minute to compile.

A known lint artefact: when `karatsuba_mult` is linted alone as the top
module, Verilator reports its sub-product nets as undriven. This is a side
effect of the module instantiating itself. The warning disappears under any
parent module, and the products simulate exactly.
