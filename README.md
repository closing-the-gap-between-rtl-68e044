# B-posit decoder and encoder in SystemVerilog

A posit is a real-number format in which the exponent is split into a
variable-length *regime* (a run of identical bits) and a fixed-size exponent.
The variable regime is what makes posits accurate near 1, but it is also what
makes them expensive in hardware: before the exponent and fraction can be
found, a leading-bit counter must measure the regime and a shifter must move
the rest of the word into place, one after the other.

A **bounded posit (b-posit)** caps the regime at `rS` bits. With `rS = 6`
the regime can only be 2, 3, 4, 5 or 6 bits long, so there are only five
ways a word can be laid out. Decoding no longer needs a counter and a
shifter: a few gates recognise which of the five layouts is present, and a
five-input multiplexer picks the exponent and fraction from fixed bit
positions. Encoding is the same idea in reverse. Each field is produced in
parallel, and the logic depth barely grows with the word width. Only the
multiplexer data paths get wider.

This RTL implements that decoder and encoder for b-posits `<N, rS, eS>`,
with default `<32, 6, 5>`, plus a small top level that pairs two decoders
with one encoder, the decode/encode shell of a two-operand arithmetic unit.
Everything is combinational.

## The number format

An `N`-bit b-posit is, from the MSB down:

| field     | width                         | meaning |
|-----------|-------------------------------|---------|
| sign `s`  | 1                             | 1 = negative |
| regime    | 2 .. rS                       | run of `k` equal bits, ended by the opposite bit or by reaching rS bits |
| exponent  | eS                            | unsigned `e` |
| fraction  | N-1-(regime size)-eS          | `f`, 0 <= f < 1 |

A run of `k` ones gives regime value `r = k-1`; a run of `k` zeros gives
`r = -k`. Only a run of `rS` bits ends without an opposite bit. With rS = 6 the
regime therefore lies in -6 .. 5 and fits in 4 bits (2's complement):

| word bits after the sign | run `k` | regime size | r  |
|--------------------------|---------|-------------|----|
| `10xxxx`                 | 1       | 2           | 0  |
| `110xxx`                 | 2       | 3           | 1  |
| `111110`                 | 5       | 6           | 4  |
| `111111`                 | 6       | 6 (bound)   | 5  |
| `01xxxx`                 | 1       | 2           | -1 |
| `000001`                 | 5       | 6           | -5 |
| `000000`                 | 6       | 6 (bound)   | -6 |

A positive word has the value `(1 + f) * 2^(r*2^eS + e)`. A negative value
is stored as the 2's complement of the positive word, so integer comparison
orders b-posits. All zeros is 0. `1` followed by zeros is NaR
("not a real"), which covers every exception. For `<N, 6, 5>` the scale
`r*32 + e` runs from -192 to 191, so magnitudes lie between about 2^-192 and
2^192 for every N. At N = 32 the fraction has between 20 and 24 bits.

### Reading the fields without negating the word

A negative word could be negated first and then decoded, but that puts an
N-bit carry chain in front of everything else. This design reads the fields
straight from the stored bits instead. With `r` and `e` taken from the raw
bits and `f` the raw fraction bits, every b-posit satisfies

    value = (1 - 3s + f) * 2^((1 - 2s) * (r*2^eS + e + s))

For a negative word, `-(r*2^eS + e + 1)` is the bitwise complement of
`{r, e}`. So the decoder outputs `{regime, exponent} = {r, e} XOR s`, which
is a single XOR level. The significand stays in signed form:
`1 - 3s + f` is `1 + f` when positive and `-2 + f` when negative.

One case breaks the pattern. A negative word whose fraction bits are all
zero is exactly `-2 * 2^T`, so its magnitude is a power of two one step
above the scale `T` the XOR gives. The decoder flags this with `exp_cin`
(sign AND fraction == 0). The arithmetic that consumes the fields adds it
to the scale. Deferring that carry keeps an adder off the decoder's critical
path.

## Decoder (`bposit_decoder`)

```
 bposit[N-1]           -> sign
 NOR(bposit[N-2:0])    -> chck           (zero or NaR)

 bposit[N-3:N-7] ^ bposit[N-2] --NOT/AND--> onehot[5:0]   (bp_regime_onehot)
            |                                    |
            |                     +--------------+-------------+
            v                     v                            v
   taps: bposit[N-4:0]      EXP_SIG MUX            priority encoder -> -k
         {bposit[N-5:0],0}       |                 (bp_regime_prienc)
         ...                     |                              |
         {bposit[N-8:0],0000}    |              XOR (bposit[N-2] ^ bposit[N-1])
                                 v                              v
          top eS bits ^ sign -> exponent                     regime[3:0]
          low N-3-eS bits    -> significand
          sign & (significand == 0) -> exp_cin
```

1. **Regime size.** The five bits below the regime MSB are XORed with it.
   A bit that continues the run becomes 0, and the terminating bit becomes 1.
   An AND/NOT network marks the first 1 as a one-hot vector:
   `1xxxx -> 100000` (size 2) through `00001 -> 000010` (size 6, ended by an
   opposite bit), and `00000 -> 000001` (size 6, ended by the bound).
2. **Fields.** The one-hot vector selects one of the taps: the word
   without sign and regime, left-aligned and zero-filled to N-3 bits. The two
   size-6 codes share the last tap, so the multiplexer has five data inputs.
   The top eS bits are the exponent (XORed with the sign). The rest is the
   significand, which is passed on unchanged.
3. **Regime value.** A priority encoder turns the one-hot vector into
   `-k`. XORing it with `bposit[N-2] ^ bposit[N-1]` gives `k-1` for a run of
   ones and folds in the sign, matching the `{r, e} XOR s` convention.

Steps 2 and 3 run in parallel. Only the multiplexer grows with N, in width
but not in fan-in.

Outputs: `sign`, `chck`, `regime[RW-1:0]` (RW = `$clog2(rS)+1`, 4 bits),
`exponent[eS-1:0]`, `significand[N-4-eS:0]` (24 bits at N = 32), and
`exp_cin`. When `chck` is 1, the other fields have no meaning.

## Encoder (`bposit_encoder`)

The encoder takes the decoder's fields after the arithmetic stage has
absorbed `exp_cin`: `{regime, exp}` is the scale of the magnitude, except for
a negative value with a nonzero significand, where it is the decoder's `T`.
This is the natural form for a result, and decode, then add `exp_cin`, then
encode gives back the original word. `sig_zero` must equal
`significand == 0`.

1. **Layout.** `x = regime[2:0] ^ regime[3]` is the regime after a 1's
   complement. Since `r` and `~r` have regimes of the same size, `x` alone
   picks the layout, with size `min(x+2, 6)`.
2. **Regime string.** A 3-to-6 binary decoder (`bp_regime_bindec`) sets
   output bit `5-x`. A 0 is prepended, giving a 7-bit string, and its top
   `size` bits read `0...01` (or `000000` for x = 5). That is the regime of a
   negative raw regime. It is XORed with NOT(regime[3] ^ sign) to get the
   bits that actually go into the word (`raw_reg`).
3. **Exponent.** `exp ^ sign`, plus 1 when the value is negative and the
   significand is zero. This is where the decoder's deferred carry comes back.
   The exponent and the significand form `exp_sig[N-4:0]`.
4. **Layout multiplexer.** For each size `S`, the input is
   `{raw_reg[6:7-S], exp_sig[N-4:S-2]}`. Significand bits that no longer
   fit are dropped, without rounding.
5. **Carry into the regime.** If the increment in step 3 carries out of
   the exponent, the exponent and fraction are zero and the regime should
   grow by one. Instead of an adder, a second multiplexer rewrites the
   string:
   * raw regime a run of ones: the run gets one longer. The word is shifted
     right by one, with the leading regime bit put back in at the top.
   * raw regime a run of zeros: the run gets one shorter. The word is
     shifted left by one.
   * raw regime `000000` (r = -6, at the bound): it must become `000001`.
     A shift would give NaR instead. This case has an input of its own.
     It occurs for the negative of `0 111111 00000 0...`, which is -2^160.

The encoder cannot produce 0 or NaR, and it expects a regime in -6 .. 5 and a
representable value. A full arithmetic unit would select the constant words
for 0 and NaR itself and would round the significand before encoding.

## Top level (`bposit_codec`)

`bposit_codec` holds two decoders, for operands `a` and `b`, working side
by side, and one encoder for the result. This is the hardware a two-operand
operation needs around its arithmetic core, which is not part of this RTL.
Its ports are the decoders' fields (`a_*`, `b_*`) and the encoder's inputs
(`res_*`, plus `res_bposit`). No path is registered. Insert pipeline
registers around the arithmetic core as the surrounding design requires.

## Reported cost of the architecture

The architecture was characterised after place and route in a 45 nm
open-source library, as a combinational block. The figures below are from
that published implementation and are not reproduced by this RTL. The
testbenches check function only, not delay.

| `<N,6,5>` | decoder delay | decoder area | encoder delay | encoder area |
|-----------|---------------|--------------|---------------|--------------|
| N = 16    | 0.39 ns       | ~335 um^2    | 0.39 ns       | 418 um^2     |
| N = 32    | 0.52 ns       | ~553 um^2    | 0.43 ns       | 711 um^2     |
| N = 64    | 0.65 ns       | ~994 um^2    | 0.46 ns       | 1278 um^2    |

As N goes from 16 to 64, the area of both blocks roughly triples. The
encoder's delay grows by about a fifth and the decoder's by about two
thirds. Delay growing much more slowly than area is what a multiplexer
that gets wider, but never gets more inputs, should show.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N`       | 32      | word width. 16 and 64 are the other sizes the design was characterised at; both are tested |
| `RS`      | 6       | maximum regime size |
| `ES`      | 5       | exponent size |

`RW = $clog2(RS)+1` and the significand width `N-3-ES` follow from these.
The modules elaborate for any `RS >= 2` and `N >= RS+ES+2`, so the exponent
is never cut off. The published circuit is drawn for RS = 6 only. Other
values of RS have been linted but not simulated, except RS = 4 in the regime
detector's testbench.

## Where this RTL goes beyond or departs from the published description

* **Polarities.** The priority encoder outputs `-k`, and the encoder's
  regime string is inverted by NOT(regime MSB ^ sign). The published
  figures show the XOR gates but not these polarities. The choices here make
  the outputs follow the `{r, e} XOR s` convention above.
* **Decoder XOR inputs.** The prose says the first five bits, *including the
  sign*, are XORed with the regime MSB. The table and the drawing use bits
  N-3 .. N-7. This RTL follows the table and the drawing, since XORing the
  sign would not measure the run.
* **Carry correction at the bound.** The published rule is "shorten a run
  of zeros, lengthen a run of ones". That rule encodes -2^160 (at N = 32)
  as NaR. The extra multiplexer input above fixes it.
* **Lengthening input.** The drawing labels the lengthening input of the
  second multiplexer with a bit range that would leave the word unchanged.
  This RTL implements the shift described in the text.
* **exp_cin** is computed as sign AND (significand == 0), and the encoder
  selects its layout with `x` in binary. Both readings come from the text.
  The drawing does not fix them.
* **No rounding and no 0/NaR output in the encoder**, as in the published
  encoder. The truncation of significand LSBs is as published.

## Verification

Each testbench checks against a bit-serial reference model
(`tb/bposit_ref_pkg.sv`). The model defines the format the textbook way: it
negates a negative word, counts the regime run bit by bit up to rS, and
reads the exponent and fraction from what follows. A value is compared as a
(scale, left-aligned fraction) pair, so the checks do not depend on the
hardware's field conventions.

| testbench | what it checks |
|-----------|----------------|
| `tb_bp_regime_onehot` | every input at RS = 6 and RS = 4, against a counted run length |
| `tb_bp_regime_prienc` | every one-hot input gives `-k`; the highest bit wins for other inputs |
| `tb_bp_regime_bindec` | the 7-bit strings for x = 0..5, the regime strings cut from them, and all zeros for 6 and 7 |
| `tb_bposit_decoder` | all 65536 words at N = 16; every scale x sign x (zero or random fraction) at N = 32 and 64; 50 000 random words. Scale, fraction, sign, chck and exp_cin are checked, and each regime size, bound-ended regimes, exp_cin, 0 and NaR must occur |
| `tb_bposit_encoder` | round trip of the reference fields back to the word, on the same three sizes and word sets. All five layouts and all three carry corrections must occur |
| `tb_bposit_codec_sizes` | the same end-to-end round trip on `<16,6,5>`, `<64,6,5>` and `<16,6,3>` (a 16-bit b-posit with a 3-bit exponent), through a parameterised helper, `tb/bposit_codec_roundtrip.sv` |
| `tb_bposit_codec` | the top at its defaults: about 21 000 operand pairs. Both decoders are checked, an identity arithmetic stage adds exp_cin, and the encoder must return the chosen operand. It counts every mechanism listed above and fails if any never happened |

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops on a
watchdog if it hangs. To run one with Verilator:

```
verilator --binary --timing -Irtl -y rtl -y tb \
    rtl/bposit_pkg.sv tb/bposit_ref_pkg.sv tb/tb_bposit_codec.sv \
    --top-module tb_bposit_codec
obj_dir/Vtb_bposit_codec
```

Replace the last file and the top module name to run another testbench.
Each one finishes in well under a second.

## Files

* `rtl/bposit_pkg.sv`: default sizes and width functions
* `rtl/bp_regime_onehot.sv`: XOR/NOT/AND regime-size detector
* `rtl/bp_regime_prienc.sv`: one-hot to regime priority encoder
* `rtl/bposit_decoder.sv`: the decoder
* `rtl/bp_regime_bindec.sv`: encoder's binary decoder for the regime string
* `rtl/bposit_encoder.sv`: the encoder
* `rtl/bposit_codec.sv`: two decoders plus one encoder
* `tb/bposit_ref_pkg.sv`: reference model; `tb/tb_*.sv`: testbenches
