# A takum codec in SystemVerilog

Takums are a tapered-precision machine number format in the family of
posits. Like posits, a takum word can be compared, ordered and negated as a
two's complement integer, and it has only two special values, 0 and NaR
("not a real"). Unlike posits, the field that encodes the exponent is at
most 11 bits long, whatever the word length. So a takum always keeps at
least n - 12 fraction bits, and its dynamic range is the same for every
n >= 12. For hardware, a short exponent field means that all shifting and
counting happens in the first 12 bits of the word. The cost of converting
between the packed word and a form an arithmetic unit can use therefore
hardly grows with n.

This repository holds a combinational codec for takums of any width
n >= 2, in both of the format's variants:

* **logarithmic takums**, a logarithmic number system with base sqrt(e).
  The codec converts them to and from a sign plus a fixed-point "barred
  logarithm";
* **linear takums**, a floating-point format. The codec converts them to
  and from a sign, a two's complement exponent and a fraction.

The encoders round to nearest with ties to even. They also saturate: a
non-zero real never becomes 0 or NaR.

## 1. The format

An n-bit takum, most significant bit first, is

```
 S | D | R2 R1 R0 | C[r-1..0] | M[p-1..0]
 1   1      3          r         p = n - 5 - r
```

* `S` is the sign bit and `D` the direction bit.
* The regime is `r = D ? uint(R) : uint(~R)`, in 0..7.
* The characteristic is `c = D ? 2^r - 1 + uint(C) : -2^(r+1) + 1 + uint(C)`.
  It lies in -255..254, and the codec carries it as a 9-bit two's
  complement number.
* The mantissa is `m = uint(M) / 2^p`, in [0, 1).
* Words shorter than 12 bits are read as if padded on the right with zero
  "ghost" bits up to 12 bits.

All bits zero is 0. A one followed by zeros is NaR. Any other word has

* logarithmic value `(-1)^S * sqrt(e)^l`, with `l = (-1)^S (c + m)`;
* linear value `((1 - 3S) + f) * 2^e`, with `f = m` and `e = (-1)^S (c + S)`.

The patterns `(D,R,C)` read as an 11-bit number grow with `c`. This is what
makes takums monotonic as integers.

## 2. Internal representations

The decoders output, and the encoders take, representations that grow with
the mantissa bits for either sign. So no two's complement negation of a
long field is ever needed:

| variant     | representation | meaning                                       | ports                                  |
|-------------|----------------|-----------------------------------------------|----------------------------------------|
| logarithmic | `(S, lbar)`    | `(-1)^S sqrt(e)^((-1)^S lbar)`, `lbar = c + m` | `barred_logarithmic_value` = `{c[8:0], M}`, a fixed-point number with n - 5 fraction bits (n + 4 bits in all) |
| linear      | `(S, e, f)`    | `((1 - 3S) + f) 2^e`                          | `exponent[8:0]`, `fraction_bits[n-6:0]` |

In both cases the mantissa or fraction field is left-aligned in n - 5 bits.
Its low `r` bits are zero after decoding. The decoders also output
`precision`, the number `p = n - 5 - r` of mantissa bits that the word
really holds. Zero and NaR travel beside the representation as the flags
`is_zero` and `is_nar`. When either flag is set, the other decoder outputs
mean nothing.

For the linear variant, `e` equals `c` when S = 0. When S = 1 it equals
`-c - 1`, which is the bitwise complement of `c`. The linear decoder and
encoder use this.

## 3. Decoder

`decoder_logarithmic` and `decoder_linear` are thin wrappers around
`predecoder`. The predecoder first pads the word with ghost bits to
`W = max(n, 12)` bits. This puts S, D, R and a 7-bit window behind R (the
"raw characteristic") at fixed positions. Three small stages then work on
these fields.

**Regime (`regime_determinator`).** A mux gives `r = D ? R : ~R` and another
gives the antiregime `7 - r`, which is `~r`.

**Characteristic (`char_exp_determinator`).** This stage computes the
characteristic with a single 8-bit increment and no subtraction. It relies
on one fact. Complementing D, R and C of a word turns its characteristic
`c` into `-c - 1`, the bitwise complement of `c`. So when D = 1 the stage
complements the bits, decodes them as if D were 0, and complements the
result. In the D = 0 form, `c = -2^(r+1) + 1 + C`:

1. Invert the raw 7 bits if D = 1.
2. Put `2'b10` in front and shift the 9-bit result arithmetically right by
   the antiregime. The r characteristic bits end up at the bottom and the
   sign fill above them forms exactly the bias `-2^(r+1)`. The shift
   replaces an add with an OR.
3. Increment the low 8 bits and put a 1 back on top. The bias has a 0 just
   above the C bits, so the carry never reaches bit 8.
4. Invert the 9-bit result if D = 1.

Example, n = 16, word `0_1_010_11_xxxxxxxxx`: D = 1 and R = 010, so r = 2
and the antiregime is 5. The raw bits are `11xxxxx`, inverted `00yyyyy`.
`10_00yyyyy >>> 5` gives `1111110_00`: the bias -8 with the two
inverted C bits `00` below it. The increment gives `111111001` = -7.
Inverting gives 6, and indeed `2^2 - 1 + 3 = 6`.

For the linear decoder, the predecoder is built with `OUTPUT_EXPONENT = 1`.
The inversion in step 4 is then selected by `D xor S` rather than by D,
which gives `e = (-1)^S (c + S)` at no extra cost.

**Mantissa and precision.** The `W - 5` bits below R are shifted left by
`r`. This drops the characteristic bits and left-aligns the mantissa. The
shift distance is at most 7 for every n. The precision is `n - 5 - r`.

**Special cases (`special_case_detector`).** A NOR over bits `n-2..0`,
combined with S, gives `is_zero` and `is_nar`.

## 4. Encoder

`encoder_logarithmic` splits `lbar` into `c` (top 9 bits) and the mantissa
field. `encoder_linear` computes `c = S ? ~e : e`. Both then feed
`postencoder`. Its stages run as follows. The direction bit is simply
`~c[8]`.

**Characteristic precursor (`char_precursor_determinator`).** The 8-bit
value `(D ? c : ~c) + 1` equals `2^r + (D ? C : ~C)`. Bit 8 of the selected
value is always 0, so only 8 bits are inverted and incremented. The
decrement that the definition of `c` suggests is avoided here too.

**Regime (`lod8`).** The leading one of the precursor is at bit `r`. An 8-bit
leading-one detector finds it from two 4-bit lookup tables. The result is
the high nibble's entry plus 4 when the high nibble is non-zero, and the low
nibble's entry otherwise.

**Extended takum (`extended_takum_generator`).** The generator does not
round the mantissa on its own. A carry out of the mantissa can ripple into
C, R and D, so rounding is done once, at the end, on the whole word. The
generator builds the unrounded word with 7 extra bits (`W + 7` bits in all),
which is enough for a full `W - 5`-bit mantissa even when r = 7:

* the regime bits are `D ? r : ~r`;
* the precursor's low 7 bits, inverted when D = 0, hold the r C-bits at
  their bottom;
* `{those 7 bits, mantissa, 7'b0}` is shifted right by r, and its low `W + 2`
  bits are kept. The unused 7 - r bits fall into the discarded top;
* the result is `{S, D, regime bits, kept bits}`.

**Saturation prediction (`uf_of_predictor`).** This stage works from `c` and
the mantissa alone, in parallel with the stages above. It says whether the
round-down candidate would be the 0/NaR pattern (`round_down_underflows`),
or whether the round-up candidate would wrap into it
(`round_up_overflows`). For n >= 12 this can only happen with r = 7, where
the first 12 bits are fixed:

* overflow: `c == 254` and the first n - 11 mantissa bits (the n - 12 kept
  bits and the first rounding bit) are all one;
* underflow: `c == -255` and the n - 12 kept mantissa bits are all zero.

For n < 12 the rounding boundary falls inside D, R or C. The tests are then
`c <= L(n)` and `c >= -L(n) - 1`, with the bound `L(n)` listed in
`takum_pkg::underflow_bound`:

| n    | 2  | 3   | 4   | 5    | 6    | 7    | 8    | 9    | 10   | 11   |
|------|----|-----|-----|------|------|------|------|------|------|------|
| L(n) | -1 | -16 | -64 | -128 | -192 | -224 | -240 | -248 | -252 | -254 |

`L(n)` is the characteristic of `X 0 000 0000000` cut after n bits and
filled with ones.

**Rounding (`rounder`).** The round-down candidate is the top n bits of the
extended takum, and the round-up candidate is that plus one. Both are
formed without waiting for the decision. The decision is

```
round_up = round_down_underflows
         | (~round_up_overflows & first_dropped_bit & (sticky | candidate[0]))
```

where `sticky` is the OR of the other dropped bits, 6 of them for n >= 12.
Because takum words are ordered like integers, rounding the bit string
rounds the value, in the logarithmic domain for logarithmic takums.

**Output (`output_driver`).** `is_zero` forces all zeros and `is_nar` forces a
one followed by zeros. NaR wins if both are set.

## 5. Words shorter than 12 bits

The decoder pads the word with ghost bits. The encoder builds the extended
takum at width 12 + 7 with zero ghost mantissa bits, and rounds to n bits.
All dropped bits below the first one then count as sticky. For n <= 5 there
are no mantissa bits. The mantissa/fraction port keeps a single bit, which
the decoders drive to 0 and the encoders ignore. For n < 12 the precision
`n - 5 - r` can be negative. It is then reported as 0.

## 6. Modules and interfaces

All modules are combinational, with no clock and no reset. `N` is the takum
width, and its default is 64. The other widths in use are 8, 16 and 32, and
any N >= 2 elaborates.

| module | role | main ports |
|--------|------|------------|
| `takum_codec` (top) | both decoders and both encoders, side by side | `log_dec_*`, `lin_dec_*`, `log_enc_*`, `lin_enc_*` |
| `decoder_logarithmic` | takum to `(S, lbar)` | `takum` -> `sign_bit`, `barred_logarithmic_value[N+3:0]`, `precision`, `is_zero`, `is_nar` |
| `decoder_linear` | linear takum to `(S, e, f)` | `takum` -> `sign_bit`, `exponent[8:0]`, `fraction_bits[N-6:0]`, `precision`, flags |
| `predecoder` | common decoder core, `OUTPUT_EXPONENT` selects c or e | |
| `regime_determinator`, `char_exp_determinator`, `special_case_detector` | predecoder stages | |
| `encoder_logarithmic` | `(S, lbar)` to takum | `sign_bit`, `barred_logarithmic_value`, `is_zero`, `is_nar` -> `takum` |
| `encoder_linear` | `(S, e, f)` to linear takum | `sign_bit`, `exponent`, `fraction_bits`, flags -> `takum` |
| `postencoder` | common encoder core | `sign_bit`, `characteristic[8:0]`, `mantissa_bits`, flags -> `takum` |
| `uf_of_predictor`, `char_precursor_determinator`, `lod8`, `extended_takum_generator`, `rounder`, `output_driver` | postencoder stages | |
| `takum_pkg` | widths, bounds and helper functions | |

Port widths: the mantissa/fraction field has `max(N-5, 1)` bits, `precision`
has `clog2(N)` bits, and `barred_logarithmic_value` has `9 + max(N-5, 1)`
bits.

The encoders expect a characteristic (or exponent) in -255..254. The two
remaining 9-bit codes, -256 and 255, produce a wrong word. An arithmetic
unit that feeds the encoder has to clamp its result to that range first.

The codec has no registers, so its delay adds to that of the logic around
it. In the decoder the longest path runs through the regime mux, the 9-bit
arithmetic shift, the 8-bit increment and the final inversion. In the
encoder it runs through the precursor increment, the leading-one detector,
the 3-bit-controlled shifter and the n-bit increment with its final mux.
To pipeline the codec, register the top's ports. Inside the encoder, `extended_takum` and the two prediction
flags form a natural cut.

## 7. Where this RTL departs from the original description

* **Underflow test.** The published design checks n - 11 mantissa bits for
  underflow, the first rounding bit included. That misses one case. Take
  c = -255, the kept bits zero, the rounding bit 1 and nothing below it.
  That is an exact tie, and ties-to-even would then pick the all-zero
  candidate, so the result would be 0. This codec checks only the n - 12
  kept bits. That agrees with the saturation rule and with the n < 12
  bounds, which ignore the mantissa. The overflow test is unchanged.
* Precision is clamped at 0 for n < 12. The mantissa port has 1 bit for
  n <= 5.
* The exponent variant of the characteristic stage inverts on `D xor S`.
  This is the gate that `e = (-1)^S (c + S)` requires.
* `lod8` returns 0 for an all-zero input, which the precursor never is.

## 8. Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>.sv`.
All of them compare with `tb/takum_ref_pkg.sv`, a behavioural model that
follows the arithmetic definition of the format field by field. It uses no
precursor, no biased shift and no leading-one detector. Its encoder builds
the exact bit string `S D R C M`, rounds it to n bits with ties to even and
then applies saturation.

* Decoder-side testbenches check every word for n up to 16 (n = 2, 5, 8, 11,
  12, 16) and 30 000 words at n = 64.
* Encoder-side testbenches cover n = 2..13, 16, 32 and 64. For n <= 12
  they try every input (sign, characteristic, mantissa). At all widths
  they add random inputs biased towards the ends of the range and towards
  exact rounding ties. Then they run a round trip: every word (n <= 16),
  or 20 000 words (n = 32, 64), is decoded by the model and must encode
  back to itself.
* `tb_takum_codec` runs the top at its default n = 64. It runs 40 000
  decode/re-encode round trips in both formats and 40 000 rounding cases.
  It counts zero, NaR, negative words, each regime in both directions,
  rounding up and down, ties to even in both directions, a carry into the
  regime, underflow and overflow saturation, and both formats. A case that
  never occurs is a failure.
* `tb_takum_codec_widths` runs the whole codec at n = 8, 16 and 32. The
  decoders are checked against the model, and the encoders by a round
  trip that uses the codec's own decoders as the first stage. The test is
  exhaustive at n = 8 and 16.

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with
`$finish`. Run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/takum_pkg.sv tb/takum_ref_pkg.sv tb/tb_takum_codec.sv \
    --top-module tb_takum_codec -Mdir obj -o sim && obj/sim
```

Any other module's testbench runs the same way. Verilator finds the
submodules through `-Irtl`. To check a different width at the top, set
`localparam int N` in `tb_takum_codec.sv` and the top's `N` parameter to
the same value.

## 9. Evaluated widths

The codec was originally evaluated, decoders and encoders alike, at
n = 8, 16, 32 and 64, as combinational logic on an FPGA. All four widths
are instances of `N`, and every one of them is exercised by the
testbenches here. Latency and LUT counts depend on the FPGA flow, so
nothing here reproduces them.
