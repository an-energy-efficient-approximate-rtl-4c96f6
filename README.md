# Posit⟨16,2⟩ multiply / approximate-divide unit

This is a single combinational datapath for 16-bit posits with two exponent
bits (posit⟨16,2⟩). With `div = 0` it computes `a × b`. With `div = 1` it
computes `a × (1/b)`, where `1/b` is an *approximate* reciprocal. The
reciprocal costs almost nothing extra: the operand decoder forms it from
`b`'s own bit pattern.

The unit relies on one property of posits. If you take the two's complement
of a posit's bits but keep its sign bit, the pattern you get is close to the
posit's reciprocal. For `b = 2^s · (1+f)` the complemented pattern decodes
to `2^(−s−1) · (2 − f)`, which is `2^−s · (1 − f/2)`. That line differs from
the true `1/(1+f)` by up to 12.5 % (at f = 1/2). The mean relative error over all
fractions is 1/12 ≈ 8.3 %. A small table of error-correction terms takes
most of that error away. The corrected reciprocal then goes through the same
exact significand multiplier that multiplication uses. So division costs one
table lookup and one subtraction on the divisor's fraction, and no
iterations.

## Dataflow

```
 a ─► Decoder A ─┬─ sign_a ─────────────────────────┐
                 ├─ ss,reg,exp,sadd_cin ─► Scale ───┤
                 ├─ 1.frac_a ─┐           adder     │
                 └─ chck_a    │             │        │
 b ─► Decoder B ─┬─ …         ▼             ▼        ▼
 div ─►(EC table)├─ 1.frac_b ─► Booth ─► Rounding ─► Encoder ─► result
                 └─ chck_b      multiplier  circuit    ▲
                       └──► Exception detector ─ excep ┘
```

| Module | Role |
|---|---|
| `posit_pkg` | Widths (N=16, ES=2, 4-bit regime, 11-bit fraction, 13-bit product, 8-bit scale, table depth 2^5) and the `excep_e` enum. |
| `lbc` | Leading-bit counter: length of the run of equal bits after the sign. |
| `posit_decoder_a` | Decodes `a` into sign, processed regime/exponent with their sign bit `ss`, fraction, scale carry-in `sadd_cin` and zero/NaR flag `chck`. |
| `posit_decoder_b` | Same as Decoder A, plus the `div` path: reciprocal by two's complement, then EC subtraction. |
| `ec_lut` | 2^5 × 9 ROM of complemented EC terms, gated by `div`. |
| `scale_adder` | Adds both operands' regimes and exponents into a two's-complement scale `4k+e`. |
| `sig_mult` | 12×12 unsigned radix-8 Booth multiplier that returns the top 13 product bits. |
| `twos_comp_blk`, `compressor42`, `cla_carry_gen`, `hybrid_csel_adder` | Pieces of the multiplier. |
| `round_unit` | Normalises and rounds to nearest-even at the position the output regime leaves. Saturates to minpos/maxpos. |
| `exception_detector` | Zero/NaR handling from the flags, signs and mode. |
| `posit_encoder` | Packs sign, scale and fraction into a posit. Produces negative results in two's complement form directly. |
| `posit_muldiv` | Top level. |

The unit has no clock. Operands go in, and the result is valid after one
combinational delay. Registers around it are left to the user. The only
parameter on the top level is the table depth, `LUT_AW_P` (default 5; 0
builds the unit without a table, with the uncorrected reciprocal). The
word and exponent sizes are package constants, because the multiplier array
and the encoder are laid out for ⟨16,2⟩ only.

## Decoding without negating the whole word

A conventional posit decoder negates a negative input first and then decodes
it. These decoders work on the raw bits instead:

* `ctrl = sign XOR in[14]` tells whether the regime is a run of ones or of
  zeros in the *magnitude*. The leading-bit counter counts that run in the
  raw bits.
* Shifting `in[14:0]` left by the count drops the regime and its terminating
  bit. The next two bits are the exponent and the following eleven are the
  fraction.
* For a negative input, the exponent is inverted. The fraction is inverted
  and incremented, which is its two's complement.
  - The increment can carry out of the fraction. That happens exactly when
    the fraction is all zeros, and the carry goes to the scale adder as
    `sadd_cin`.
  - The exponent needs no +1 of its own. Its +1 is the same carry, arriving
    through the scale adder.
* The regime is passed on as `count−1` (run of ones) or `~count` (run of
  zeros), with `ss = ~ctrl` as an extra top bit. The scale adder reads
  `{ss, reg}` as a signed 5-bit regime and `{ss, exp}` as an unsigned 3-bit
  exponent. For a positive input this gives `4k + e`. For a negative input,
  adding `sadd_cin` gives the scale of the magnitude.

The scale adder forms `4·({ss_a,reg_a} + {ss_b,reg_b}) + ({ss_a,exp_a} + {ss_b,exp_b} + cin_a) + cin_b`.
The regime sum is shifted left by the exponent size. The exponent sum takes
one carry-in and the final sum takes the other.

## The reciprocal in Decoder B

In Decoder B, `sign XOR div` replaces the sign everywhere it controls the
data path. So in divide mode a positive `b` is decoded as if it were
negative, which produces the scale and fraction of the two's-complemented
pattern. A negative `b` is decoded as if positive, which undoes its stored
complement. The sign passed on to the result is still `b`'s real sign. The
uncorrected reciprocal fraction is `1 − f`, with scale `−s−1`. For `f = 0`
the carry turns it into the exact reciprocal `2^−s`.

The error of the line against the hyperbola is removed by subtracting

    EC(f) = 2^11 · f(1−f)/(1+f)

from the 11-bit fraction `1 − f`. The table stores `EC` for 32 intervals of
`f`:

* It is addressed by the top five bits of the divisor's own fraction.
  - If `b` is positive, the decoder holds `~f`, so the address is those bits
    inverted.
  - If `b` is negative, the decoder holds the raw stored fraction, which is
    the two's complement of `f`. The address is that fraction's two's
    complement: its top bits inverted, plus one when the low six bits are
    zero.
* Entry `a` is evaluated at the lower end of its interval, `f = a/32`, and
  rounded to the nearest integer. The largest entry is 351, so 9 bits
  suffice.
* The entries are stored complemented. The subtraction is then an addition
  of the ROM output plus one, and `div = 0` gates the ROM output to zero.
* The subtraction follows the `+1` of the two's complement, so it never
  disturbs the `sadd_cin` carry.
* Just below `f = 1`, the entry of an interval can exceed `1 − f`. The
  subtraction would then borrow, so the fraction is held at zero instead.

Accuracy over all 2048 fractions of `b` in [1, 2), from `tb_recip_accuracy`
(the "published" column is the evaluation this design is modelled on):

| table | MED (%) | MRED (%) | published MRED (%) |
|---|---|---|---|
| none (`LUT_AW_P = 0`) | 5.6853 | 8.3333 | 8.3333 |
| 2^5 × 9 | 0.2588 | 0.3731 | 0.3834 |
| 2^6 × 9 | 0.1273 | 0.1845 | 0.1800 |
| 2^7 × 9 | 0.0618 | 0.0897 | 0.0902 |
| 2^8 × 9 | 0.0299 | 0.0434 | 0.0434 |

The source does not say where in each interval an entry is sampled. The
lower end was chosen because it reproduces the published numbers. Sampling
at the middle of each interval is a one-line change to `ec_value` in
`ec_lut.sv`. It roughly halves the error, to an MRED of 0.19 % with 32
entries, at no hardware cost. MED here is the mean absolute error of the
reciprocal of `b ∈ [1,2)`. The NMED column of the published table uses a
normalisation that is not stated, and it is not reproduced.

## Significand multiplier

Both significands are 12 bits, `1.f`. The multiplier is radix-8 Booth:

* It has five partial-product rows with digits in −4…4. The hard multiple
  `3A` comes from one adder.
* A negative row is made with `twos_comp_blk`, not by inverting and adding a
  one at the row's LSB.
  - The block copies bits up to and including the lowest 1, then inverts
    everything above it: `C_i = (A_i & sel) | C_{i−1}`, `S_i = A_i ^ C_{i−1}`.
  - So no stray "+1" bits appear at the low end of the array.
* Sign extension uses the usual constant pattern: `~S S S S` on the first
  row, `1 1 ~S` on rows two and three, `~S` on row four. The fifth row is
  `b[11] ? a : 0` and is never negative.
* A full-adder row on rows 1–3, then a 4:2 compressor row with rows 4 and 5,
  leave two rows, S and C.
* Only product bits [23:11] are formed. A 7-bit carry-only CLA over columns
  4–10 supplies the carry into a 13-bit carry-select adder over
  columns 11–23. The adder has a 6-bit Kogge-Stone low part and two 7-bit
  CLA high parts, chosen by the low carry.

The 13 bits are the exact top of the 24-bit product. `tb_sig_mult` checks
all 4.2 million operand pairs against `(a*b) >> 11`.

## Rounding, and what 13 product bits cost

`round_unit` normalises the product:

* If bit 12 is set, the scale is incremented. The fraction then sits one
  place lower.
* It then rounds to nearest, ties to even, at the bit the output regime
  leaves free.
* The increment is applied to the whole `{scale, fraction}` word, so a carry
  ripples into the exponent and regime as posit encoding requires.
* Dropped bits are cleared.
* Results beyond maxpos or below minpos saturate to them. A product is never
  rounded to zero or to NaR.

The product bits below bit 11 are not computed, so rounding sees only the
kept bits. There are two cases.

* When the full 11-bit fraction fits in the output and the product is below
  2, the guard bit itself is product bit 10. It is never seen, so the
  result is simply truncated.
* In the other cases the sticky bit misses the low bits. A guard of 1 with
  zeros below it is then taken as an exact tie and resolved to even.

Either way the low bits could only have pushed the value up. So **about
15 % of random products (30 233 of 200 576 in `tb_posit_muldiv`) come out
one ulp below the correctly rounded product**, and never above it.

The 13-bit truncation is part of the architecture this design follows, and
it is kept. A correctly rounded multiplier would need an OR of the 11 lower
product columns. Those come from the two reduction rows, so the cost would
be roughly a second carry-only adder. The testbenches compare against a
reference model that uses the same 13 bits. They also report the count of
differences from exact rounding.

## Encoder

The encoder builds a negative result in two's complement form. It does not
encode the magnitude and then negate 16 bits.

1. `{scale[1:0], frac}` is XORed with the sign and incremented by it.
2. The regime length comes from `scale[5:2] XOR scale[6]`.
   - That value is the run length minus one.
   - `sr1` and `sr2` are added to it to give the position of the terminating
     regime bit.
   - When the increment in step 1 carries out (negative result with zero
     exponent and fraction), the terminator moves: `sr1` drops to 0 for a
     positive regime, and `sr2` rises to 1 for a negative one.
3. A 4-to-16 decoder makes a one-hot word for the terminator. It is XORed
   with `inv`, so it is either one-hot or one-cold.
4. The exponent/fraction word is shifted right by the same amount.
   - Its fill is 1 when the regime is a run of ones and 0 otherwise.
   - It is then merged with the decoder word by AND or OR, selected by
     `sign XOR scale[6]`.
5. `excep[0]` clears bits 14–0 and the sign. `excep[1]` sets the sign. That
   gives `0x0000` for zero and `0x8000` for NaR.

The conditions for `sr1`, `sr2` and the shifter fill are this design's
reading of the encoder. `tb_posit_encoder` checks them exhaustively over
every scale and sign and many fractions.

## Exceptions

`chck` flags an operand that is zero or NaR, and its sign bit tells the two
apart. The detector outputs an `excep_e` code.

| case | result |
|---|---|
| any NaR operand, multiply | NaR |
| `0 × x`, `x × 0` | zero |
| `a / 0` (including 0/0) | NaR |
| `0 / b`, `b` real | zero |
| `a / NaR`, `a` not zero or NaR | **zero** |
| `NaR / b`, `0 / NaR` | NaR |

The `a / NaR → zero` row departs from the posit standard, which gives NaR.
It is kept as the source table lists it. To make it standard, change one
line in `exception_detector.sv`.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
an independent model in `posit_ref_pkg`: a bit-level posit decoder/encoder
written as plain loops, plus real-arithmetic EC terms. Each prints
`TB_RESULT checks=… failures=…`.

| testbench | what it covers |
|---|---|
| `tb_lbc`, `tb_posit_decoder_a`, `tb_twos_comp_blk` | exhaustive |
| `tb_posit_decoder_b` | all 65 536 inputs in both modes |
| `tb_ec_lut` | every entry of the 2^5 and 2^8 tables, gating |
| `tb_scale_adder`, `tb_cla_carry_gen`, `tb_hybrid_csel_adder` | exhaustive or large random sets |
| `tb_sig_mult` | all 12-bit operand pairs with the hidden bit set |
| `tb_round_unit` | random scale/product pairs, saturation |
| `tb_exception_detector` | all 32 flag combinations |
| `tb_posit_encoder` | every scale and sign, random fractions, exceptions |
| `tb_posit_muldiv` | end to end, default parameters: 200 k multiplications and 200 k divisions, each bit-exact against the reference. It counts each mechanism and fails if one is never exercised: both modes, zero and NaR exceptions, negative operands, the `sadd_cin` carry, the normalisation shift, the exact reciprocal at `f = 0`, the EC borrow clamp, saturation at both ends, the encoder's carry into the regime (the `sr1`/`sr2` case) and round-up. |
| `tb_recip_accuracy` | all 2048 divisor fractions, positive and negative, with no table and with tables of 2^5…2^8 entries; the accuracy table above, each MRED within 5 % of the published value |

To run one:

```
verilator --binary --top-module tb_posit_muldiv -y rtl -y tb \
    rtl/posit_pkg.sv tb/posit_ref_pkg.sv tb/tb_posit_muldiv.sv
./obj_dir/Vtb_posit_muldiv
```

Replace the testbench name to run any other test. `-y` lets verilator find
the modules by file name; only the two packages are named explicitly.
Every testbench finishes in a few seconds. The end-to-end test takes about
one second. Synthesised with a generic cell library, the default unit is
about 670 cells plus the 288-bit table.

## Not covered

* Only ⟨16,2⟩ is built. A 32-bit version would need a new Booth array and
  encoder.
* A narrower posit with two exponent bits, left-aligned and padded with
  zeros, has the same value as a posit⟨16,2⟩ and can be fed in that way.
  The result is still rounded to 16 bits, though, not to the narrower
  format.
* Area, power and delay figures depend on a particular cell library and flow.
  They are outside what this RTL can show.
