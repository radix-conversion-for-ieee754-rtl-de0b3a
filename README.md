# Loop-less binary64 ⇄ decimal64 radix conversion in hardware

Converting a floating-point number between radix 2 and radix 10 has two parts:
find the exponent of the result, then find its significand. Software does this with
logarithms, big-number arithmetic or loops. This RTL does it with a fixed pipeline
of integer operations only:

* **Exponent.** One multiplication by a constant, one shift and one lookup in a
  small threshold table. The result is exact, never an approximation.
* **Significand.** The input significand times a power of five times a power of
  two. The power of five, 5^B for B in the hundreds, comes from a 16-entry table
  of exact small powers. A fixed number of truncating squarings and products
  turns those entries into the leading 128 bits of 5^B. The result is then
  rounded in the requested direction.

The scheme follows Kupriianova, Lauter and Muller, "Radix Conversion for
IEEE754-2008 Mixed Radix Floating-Point Arithmetic". That paper gives the
algorithms as straight-line integer code and argues that they suit hardware. The
microarchitecture here is this design's own: the pipeline, the interfaces, the
way the two directions share hardware, the rounding stage and the handling of
exact results. The sections below say, part by part, what comes from the
algorithm and what was chosen here.

## What the unit computes

`radix_converter` accepts one conversion per clock cycle, in either direction.

| direction | input | output |
|---|---|---|
| `DIR_B2D` (binary → decimal) | x = 2^E · m, m a 53-bit integer with bit 52 set, E ∈ [−1126, 971] | x ≈ 10^F · n, 10^15 ≤ n < 10^16 |
| `DIR_D2B` (decimal → binary) | x = 10^F · n, 0 < n < 10^16, F ∈ [−398, 369] | x ≈ 2^E · m, 2^52 ≤ m < 2^53 |

Signs travel through the pipeline unchanged. The sign matters only for the
directed roundings. Rounding is selected per conversion by `in_rm`:
`RM_NEAREST_EVEN`, `RM_DOWN` (toward −∞) or `RM_UP` (toward +∞).

The binary exponent range covers every binary64 number, subnormals included,
once its significand is normalised. The decimal range is decimal64's exponent
range. Decimal significands are plain binary integers, as in the binary-integer
decimal encoding. The input does not have to be normalised: any non-zero
n < 10^16 is accepted.

The unit is a conversion core, not a complete format converter. Surrounding
logic must provide these:

* unpacking and packing of the interchange encodings;
* zeros, infinities and NaNs;
* normalising binary subnormals;
* overflow and underflow of the target format. `out_exp` is not clamped: a
  decimal64 number above the binary64 range comes out with E > 971.

## Step 1: the exponent without a logarithm

### Binary to decimal (`exp_b2d`)

The decimal exponent that puts n into [10^15, 10^16) is

    F = floor(log10(2^E · m)) − 15.

Scale m to m″ = m/2^52 ∈ [1, 2) and let G = E + 52. Then

    log10(x) = G·log10(2) + log10(m″).

The integer part of G·log10(2) can be taken out. The two fractional parts left
over add up to less than 2, so

    floor(log10 x) = floor(G·log10 2) + γ,   γ ∈ {0, 1}.

The sum of the fractional parts grows with m″. So, for each exponent, γ switches
from 0 to 1 at a single threshold m*(G). The unit computes the two terms
separately:

* `floor(G·log10 2)` is `(G · 0x4D104D42) >>> 32`. The constant is
  floor(log10(2)·2^32). Over |G| ≤ 1200 this product-and-shift is exactly
  floor(G·log10 2); this was checked for every G in that range.
* `γ = (m' ≥ T[index])` is one comparison against a ROM entry.

**Halving the table.** log10(m″) stays below 1 for every m″ < 4, not just for
m″ < 2. So the lowest exponent bit can move into the significand:
E′ = E − (E mod 2) and m′ = m · 2^(E mod 2), with m′ of 54 bits. Only even
exponents then need a threshold. For the binary64 range, 2098 exponents shrink
to 1049 entries of 64 bits, which is 8392 bytes. Each entry is

    T(E′) = ceil(10^(k+1) · 2^(−E′)),   k = floor((E′ + 52)·log10 2),

the smallest 54-bit m′ for which 2^E′·m′ reaches the next decade. If an entry is
≥ 2^54, γ is always 0 for that exponent.

### Decimal to binary (`exp_d2b`)

This is the same argument with the bases swapped, plus one extra step. The
decimal significand n can have any number of leading zeros, and floor(log2 n)
would then vary. So n is first shifted left by s until bit 53 is set:
n′ = n·2^s, with κ = 54 = ceil(log2(10^16 − 1)) bits. After that,
floor(log2 n′) = 53 for every input and one table is enough:

    E = floor(F·log2 10) + 53 − s + γ − 52,   γ = (n′ ≥ T(F)),
    T(F) = ceil(2^(54 + floor(F·log2 10)) / 10^F).

`floor(F·log2 10)` is `(F · 0x3_5269_E12F) >>> 32`, exact for |F| ≤ 500. The
table has 768 entries, one per decimal64 exponent.

### How the tables are built

No table is stored as a data file. `radix_pkg` holds constant functions:
`gen_b2d_table`, `gen_d2b_table` and `bias5_mant`. They evaluate the formulas
above with 2048-bit exact integer arithmetic when the design is elaborated. They
walk the exponents in order and update 5^|e| by one multiplication or division
by 5 per step. Elaboration therefore takes a few seconds. In hardware each table
is a ROM.

## Step 2: the significand from a power of five

Once the output exponent is known, the significand before rounding is

    binary → decimal:  n* = m · 5^(−F) · 2^(E−F)
    decimal → binary:  m* = n · 5^(F)  · 2^(F−E)

Powers of two are shifts, so only a power of five has to be computed.

### Powers of five by digit squaring (`pow5_unit`)

The exponent B of 5^B is a 12-bit natural number. It is cut into three 4-bit
digits, B = 2^8·q2 + 2^4·q1 + q0, so that

    5^B = (5^q2)^256 · (5^q1)^16 · 5^q0.

```
           B[11:8]          B[7:4]           B[3:0]
              |                |                |
         pow5_lut         pow5_lut         pow5_lut        5^q, exact, 128 bits
              |                |                |
      square 8 times   square 4 times     (delay 8)        pow5_square_chain
              |                |                |
              +---- multiply --+                |          norm_mul
                        |                       |
                        +------ multiply -------+          norm_mul
                                    |
                            5^B ≈ mant · 2^exp
```

Every value is a floating-point pair: a 128-bit significand normalised to
[2^127, 2^128) and a 32-bit signed binary exponent. Each multiplication and each
squaring is a `norm_mul`:

1. form the exact 256-bit product;
2. keep its upper 128 bits, rounding down;
3. if the leading bit is now 0, shift left by one, bringing in a zero;
4. set the exponent to ax + bx + 128 − shift.

The original algorithm uses a shift count σ and a separate exponent formula for
the same bookkeeping. An explicit exponent per value is equivalent and easier to
check.

The 16-entry table holds 5^0 … 5^15. 5^15 has 35 bits, so every entry is exact.
Twelve squarings and two products make N = 14 truncating steps. Each step loses
less than 2^−126 of the value, and always downward. So the result is a lower
bound of 5^B with relative error below (1 + 2^−126)^14 − 1 ≈ 2^−122.2.

The digit width (`QBITS`), the number of squared digits (`K`) and the precision
(`P`) are parameters. They trade table size and number of squarings against
accuracy, as the original study does. Column i always squares i·QBITS times.

### Negative exponents share the unit

5^B needs B ≥ 0, but both directions need negative powers too. Every request is
therefore biased by 398: B = −F + 398 (binary → decimal) or B = F + 398 (decimal
→ binary). Over the supported ranges B falls in [0, 767]. The result is then
multiplied by the constant 5^−398, stored as a 128-bit significand rounded down
and computed at elaboration time. That adds one more `norm_mul`. Both directions
use the same `pow5_unit` and the same constant.

### Scaling and rounding (`mant_scale_round`)

Stage 1 multiplies the 54-bit input significand by the 128-bit power of five.
Stage 2 applies the power of two as a right shift. The shift splits the 182-bit
product into an integer part and a fraction of up to 182 bits. Stage 2 then
rounds:

* nearest rounds ties to even;
* `RM_DOWN` and `RM_UP` round up the magnitude only for a negative and a positive
  sign respectively, and only when the fraction is non-zero.

If rounding reaches 10^16 (decimal) or 2^53 (binary), the significand becomes
10^15 or 2^52 and the exponent goes up by one.

**Exact results.** The power of five is always slightly too small. So a result
that is mathematically an integer or exactly half-way arrives as "just below"
that point. Examples are 1.0 → 1000000000000000·10^−15, or an odd 54-bit decimal
integer converted to binary. Taken at face value, this would give wrong
directed roundings and wrong ties. The stage handles it as follows. It adds just
under 2^−62 to the value and ignores fraction bits below weight 2^−62. The
accumulated error is below 2^−68 of the last unit, so every exact integer and
exact half-way value is classified correctly. The cost: a truly inexact value
that lies within 2^−62 below such a point is rounded as if exact. This design
chose that trade-off; the original algorithm leaves the final rounding
unspecified.

## Pipeline and timing

| cycle | block | work |
|---|---|---|
| 1 | `exp_b2d`, `exp_d2b` | exponent (both units see the input; only the selected one is used) |
| 2–11 | `pow5_unit` | lookups, squarings (8 stages), two products |
| 12 | `norm_mul` | × 5^−398 |
| 13–14 | `mant_scale_round` | significand product; shift and rounding |

The latency is 14 cycles and the unit accepts one conversion every cycle. There
is no back-pressure. `out_valid` is `in_valid` delayed by 14 cycles. Reset is
asynchronous and active low; it clears the valid bits and the pipeline
registers. The exponent of the result and the other side information travel in
a `conv_side_t` delay line next to `pow5_unit`.

Every squaring or product has a register after it. The critical path is one
128×128 multiplier plus a shift.

## Files

| file | contents |
|---|---|
| `rtl/radix_pkg.sv` | format constants, enums, `conv_side_t`, table-building functions |
| `rtl/exp_b2d.sv` | binary → decimal exponent unit (1049-entry ROM) |
| `rtl/exp_d2b.sv` | decimal → binary exponent unit (768-entry ROM, leading-zero shift) |
| `rtl/pow5_lut.sv` | 5^q table |
| `rtl/norm_mul.sv` | truncating, renormalising multiplier |
| `rtl/pow5_square_chain.sv` | pipelined repeated squaring |
| `rtl/pow5_unit.sv` | 5^B |
| `rtl/mant_scale_round.sv` | significand product, shift, rounding |
| `rtl/radix_converter.sv` | top level |
| `tb/ref_pkg.sv` | exact big-integer reference conversions for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_pow5_accuracy` |

## Verification

Every testbench compares against exact arithmetic on 2600-bit integers, not
against the design's tables or constants. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_exp_b2d`, `tb_exp_d2b` visit every exponent of their range. They use
  random significands, the extreme significands, and the two significands on
  either side of each decade or binade boundary, which is where γ switches.
* `tb_pow5_lut`, `tb_norm_mul`, `tb_pow5_square_chain` and `tb_pow5_unit` check
  each result against the exact power or product. Results must never be too
  large and must stay within the error bound. They must be exact where the value
  fits, and they must arrive with the stated latency.
* `tb_pow5_accuracy` measures how accuracy trades against precision and table
  size. It runs four `pow5_unit` configurations over every B from 0 to 767 and
  prints the worst accuracy, i.e. −log2 of the relative error:

  | P | QBITS | K | truncating steps | worst accuracy (bits) |
  |---|---|---|---|---|
  | 64 | 2 | 4 | 24 | 57 |
  | 128 | 4 | 2 | 14 | 123 |
  | 192 | 7 | 1 | 8 | 188 |
  | 256 | 5 | 1 | 6 | 252 |

  Accuracy grows almost linearly with P. A wider table index saves squarings,
  and each saved squaring gains a fraction of a bit.
* `tb_mant_scale_round` feeds exactly truncated powers of five. It covers exact
  integers, exact ties and carries out of the significand range, in both
  directions, for all rounding directions.
* `tb_radix_converter` streams about 3400 back-to-back conversions through the
  full-size design: random numbers over both complete ranges, exact cases, ties,
  and values just below powers of ten and two. Every result must equal the
  correctly rounded value. It also counts how often each mechanism fired: both
  directions, all rounding directions, γ = 0 and γ = 1 in both exponent units,
  the normalising shift, exact or half-way recognition, and carry-out. A count of
  zero is a failure.

To run one with Verilator (from the directory that holds `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_radix_converter \
        rtl/radix_pkg.sv tb/ref_pkg.sv rtl/exp_b2d.sv rtl/exp_d2b.sv rtl/pow5_lut.sv \
        rtl/norm_mul.sv rtl/pow5_square_chain.sv rtl/pow5_unit.sv \
        rtl/mant_scale_round.sv rtl/radix_converter.sv tb/tb_radix_converter.sv
    ./obj_dir/Vtb_radix_converter

## Where this departs from the source algorithm, and what to watch

* **λ = p = 128.** The published implementation uses a working precision of
  128 bits and names a shift of 64 bits per product. In the squaring step as
  written, though, a value stays in [2^(p−1), 2^p) only if the number of dropped
  bits equals p. This RTL therefore uses 128-bit significands and drops 128 bits
  per product, with a 256-bit product.
* **The product starts with the largest factor, not with 1.** This uses K
  multiplications, matching the error count N = Σ n_i + K.
* **Table sizes.** The binary64 table matches the published 8392 bytes. The
  decimal64 table here is 6144 bytes (768 × 64 bits), against a published
  6294 bytes. The exponent range or entry width behind that figure is not known.
* **Only binary64/decimal64.** The package constants fix the formats. Other
  formats need new constants, wider ports and, for the 128-bit formats, much
  larger tables (about 257 KiB for binary128).
* **Correct rounding is not guaranteed.** The result is correctly rounded
  except when the exact value lies within 2^−62 (in units of the last place)
  below an integer or half-way point without being equal to it. Raising `P`
  shrinks the error, and `SNAP` in `mant_scale_round` must then be widened to
  P − 66.
* **Inputs out of range** are caught by simulation assertions in the exponent
  units and in the top level. The hardware does not flag them.
