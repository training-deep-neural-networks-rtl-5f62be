# A low-latency posit multiply-accumulate unit

Posit numbers give a neural-network training pipeline more precision near 1.0 and a wider
dynamic range than a floating-point format of the same width, at the cost of a variable-length
field layout. Training with 8- and 16-bit posits needs a multiply-accumulate (MAC) unit that
works on them directly. The usual way to build one is to decode each posit into sign, exponent
and fraction, use an ordinary floating-point multiply-add, and encode the result back into a
posit. The decoder and encoder then sit on the critical path: each has to find the variable
length of the regime field and shift the word by that length.

This design shortens both converters. The length of the regime field is `r+1` bits for a negative
regime and `k+2` bits for a positive one, so a straightforward converter computes "count, then
maybe add one, then shift". Here the add-one is moved off the shift path:

* the **decoder** runs two left shifters in parallel, one shifting by `r` and one by `k` followed by
  a fixed shift of one, and picks one result with a 2:1 multiplexer;
* the **encoder** shifts once by `|regime|` and picks either that result or the same result shifted
  right by one more bit.

The unit is `posit_mac`: three decoders (for `a`, `b`, `c`), one fused floating-point
multiply-add computing `a*b + c`, and one encoder producing `z`. It is purely combinational and
parameterised by the posit width `N` and exponent size `ES`. The default is posit(16,1), the format
used for the forward pass and weight update in 16-bit training; (16,2), (8,1) and (8,2) are the other
training formats and are the same RTL with other parameters.

```
     a            b            c
     |            |            |
  decoder      decoder      decoder        posit_decoder (x3)
     | s,exp,f    | s,exp,f    | s,exp,f
     +------------+------------+
                  |
        fused multiply-add a*b+c           fp_mac
                  | s_z, exp_z, f_z
               encoder                     posit_encoder
                  |
                  z
```

## The posit format in one page

An `(n,es)` posit is a sign bit followed by

1. a **regime**: a run of identical bits ended by the opposite bit (or by the end of the word).
   A run of `k+1` ones means regime value `k >= 0`, and a run of `r` zeros means `k = -r`;
2. up to `es` **exponent bits** `e` (missing bits at the end of the word read as zero);
3. whatever is left, the **fraction** `f`.

The value is `(-1)^s * 2^(k*2^es + e) * (1.f)`. The word `000..0` is zero and `100..0` is infinity
(NaR). A negative posit is the two's complement of the corresponding positive one. The quantity
`k*2^es + e` is called the *effective exponent* below. It is simply the bit concatenation
`{k, e}` when `k` is written in two's complement.

For posit(5,1), `0 01 0 1` has regime `01` (one zero, so `k=-1`), exponent `0` and fraction `.1`.
It equals `2^-2 * 1.5 = 3/8`. `0 1110` has `k=2`, no room for an exponent or fraction, and equals 16.
The largest value is `maxpos = 2^((n-2)*2^es)` and the smallest is `minpos = 1/maxpos`. For (16,1)
these are `2^28` and `2^-28`.

## Decoder (`posit_decoder`)

The decoder first takes the magnitude: a negative word is two's-complemented. Call the `n-1` bits
below the sign `body`. Its first bit `body[n-2]` tells the regime polarity.

* A **leading-one detector** (`posit_lod`) counts the zeros at the top of `body`. For a negative
  regime this count is `r`. Negating it gives `neg_regime = -r`.
* A **leading-zero detector** (`posit_lzd`) counts the ones at the top of `body[n-3:0]`. The first
  regime bit is not included, so for a positive regime the count is `k` itself (`pos_regime`).
* `regime` is `neg_regime` or `pos_regime`, depending on the polarity.

With the first regime bit already dropped, the bits `body[n-3:0]` must be shifted left by `r`
(negative regime) or by `k+1` (positive regime). The two cases go to two shifters:

```
Left Shifter1:  body[n-3:0] << r
Left Shifter2: (body[n-3:0] << k) << 1      // the <<1 is wiring, not logic
result       = regime negative ? Shifter1 : Shifter2
```

The top `es` bits of the result are the exponent field. The next `n-3-es` bits are the fraction.
The lowest bit is always zero, because every shift is at least one bit. The effective exponent is
`{regime, exponent}`.

Example, posit(16,1) `0x3400` = `0 011 0100 0000 0000`: `body` starts with one zero, so `r=1` and
`k=-1`. `body[13:0] << 1` = `1 0100 0000 0000 0`. The exponent bit is `1` and the fraction is
`0100 0000 0000` (0.25). The effective exponent is `-1*2 + 1 = -1`, so the value is
`2^-1 * 1.25 = 0.625`.

Outputs: `sign`, `eff_exp` (signed, `clog2(N)+1+ES` bits), `mantissa` (`N-3-ES` bits, hidden one
removed, MSB aligned), `is_zero`, `is_inf`.

## Encoder (`posit_encoder`)

The encoder takes `sign`, a signed effective exponent `x` and a fraction. From `|x|` it forms
`abs(regime) = |x| >> es` and the low `es` bits of `|x|`. The regime and exponent field follow
from three cases:

| case                                | regime `k`            | exponent field `e`     | regime length - 1 |
|-------------------------------------|-----------------------|------------------------|-------------------|
| `x >= 0`                            | `abs(regime)`         | low bits of `x`        | `abs(regime)+1`   |
| `x < 0`, low bits of `|x|` all zero | `-abs(regime)`        | 0                      | `abs(regime)`     |
| `x < 0`, low bits of `|x|` not zero | `-(abs(regime)+1)`    | low bits of `x` (two's complement) | `abs(regime)+1` |

A `2N`-bit word `REM` is laid out, from the top, as `N` fill bits equal to `~sign(x)`, one
terminator bit equal to `sign(x)`, the `es` exponent-field bits, the fraction and zero padding.
Shifting `REM` right by "regime length - 1" slides fill bits in front of the terminator. For
`x >= 0` this gives `k+1` ones and a zero; for `x < 0` it gives `r` zeros and a one. That is
exactly the run-length regime, followed by the exponent and fraction. The output body is the
window `REM[N-1:1]` after the shift.

The "+1" in the last column is not added to the shift amount. The shifter always shifts by
`abs(regime)`, and the output multiplexer takes either its result or the result shifted right by
one more bit (a wiring shift). The multiplexer select is true in the first and third rows of the
table.

Bits shifted out of the window are dropped, so the magnitude is **rounded toward zero**. An
exponent above that of maxpos gives maxpos, and one below that of minpos gives zero. The same
clipping is used by the software posit conversion that this unit is meant to match in training.
The sign is applied last by two's complement. The zero and infinity inputs produce `000..0` and
`100..0`.

## Fused multiply-add (`fp_mac`)

The floating-point core between the converters is kept simple and exact, with a single rounding.

* The product of the significands `(1.fa)(1.fb)` is formed exactly, `2*(FW+1)` bits wide.
  The exponents are added.
* The operand with the smaller exponent is shifted right to align with the other. The bits that
  fall off are ORed into a **sticky** bit. Three guard bits below the product mean that nothing is
  lost when the exponents differ by three or less. Deep cancellation can only happen in that range.
* If the signs agree, the magnitudes are added and the sticky bit is ignored. If they differ, the
  smaller magnitude is subtracted from the larger, and the sticky bit is subtracted as one extra
  LSB. This makes the later truncation round the *exact* result toward zero and not the
  pre-shifted one.
* A leading-one search normalises the sum. The result exponent is corrected by the position of
  the leading one. The `FW` bits below it are passed on, truncated.
* Zero operands bypass the datapath: `a*b = 0` gives `c` unchanged, and `c = 0` gives the exact
  product. Any infinite operand gives infinity.

The result exponent is three bits wider than the operand exponents. It covers the product range,
a carry-out and the shift after cancellation. Values outside the posit range are saturated or
flushed by the encoder.

Overall, `z` equals `a*b + c` computed exactly and then converted to a posit by truncation: the
magnitude rounded toward zero, clipped to maxpos, and flushed to zero below minpos. The
testbenches check exactly this rule.

## Widths for the supported formats

`FW = N-3-ES`, `EW = clog2(N)+1+ES` (decoder exponent), `OEW = EW+3` (result exponent).

| format | use in training                              | FW | EW | OEW |
|--------|----------------------------------------------|----|----|-----|
| (8,0)  | converter benchmark only                     | 5  | 4  | 7   |
| (8,1)  | conv. layers, forward / weight update (small images) | 4 | 5 | 8 |
| (8,2)  | conv. layers, backward (small images)        | 3  | 6  | 9   |
| (16,1) | forward pass and weight update (**default**) | 12 | 6  | 9   |
| (16,2) | backward pass (gradients, errors)            | 11 | 7  | 10  |
| (32,3) | converter benchmark only                     | 26 | 9  | 12  |

Training uses a separate unit for each format. There is no run-time format switch. The design
needs `N-3-ES >= 1`.

## What is taken from the source and what is not

Taken from the published architecture:

* the decoder → FP MAC → encoder organisation;
* the LOD/LZD pair in the decoder, the duplicated left shifter with the fixed `<<1`, and the
  concatenation of regime and exponent;
* the encoder's `2n`-bit REM word, the single right shift by `abs(regime)` with a `>>1`
  alternative, and the select logic for the negative-exponent case;
* rounding toward zero and clipping to `[minpos, maxpos]`, which the published training method
  uses for its posit conversion.

Choices of this implementation, where the source is silent:

* signal widths;
* two's-complement handling of the sign in both converters;
* zero and infinity flags;
* the complete inside of the floating-point multiply-add (single rounding, guard and sticky bits);
* the operand roles `z = a*b + c`;
* no pipeline registers.

Two details differ from the published decoder drawing:

* The multiplexer select is labelled as the word's MSB there. Here it is the regime polarity,
  the only signal for which the drawn input assignment (1 = negative regime) works.
* The LZD here looks at `in[n-3:0]` and not at `in[n-2:0]`, so that it returns `k` and needs no
  correction.

The source reports the unit synthesised against a 750 MHz constraint in a 28 nm process. To
reproduce that, registers must be placed around `posit_mac`. The RTL has no timing of its own.

The earlier, unoptimised converters, with an adder in front of a single shifter, serve only as
the comparison baseline. They are not included.

## Verification

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if it hangs. Their reference model (`tb/posit_ref_pkg.sv`) is independent of the RTL:

* it decodes posits by walking the bits one at a time;
* it keeps exact values in a 1024-bit fixed-point accumulator;
* it encodes by laying down regime, exponent and fraction bits one by one, dropping what does not fit.

| testbench               | what it covers |
|-------------------------|----------------|
| `tb_posit_lod`, `tb_posit_lzd` | every input of the leading-one / leading-zero detectors at the (16,1) and (8,1) widths, against a `$clog2` formula |
| `tb_posit_decoder`      | every word of (8,0), (8,1), (8,2), (16,1), (16,2); random and extreme (32,3) words; the positive (5,1) words against their real values |
| `tb_posit_encoder`      | random sign/exponent/fraction for (16,1), (8,0), (8,2), (32,3), including exponents past maxpos and minpos; a decode→encode round trip over every (16,1) word |
| `tb_fp_mac`             | 200 000 random operand triples at (16,1) widths, a third of them steered into cancellation; checked against the exact sum; the run fails unless sticky, carry-out, cancellation, exact zero, zero bypass and infinity all occur |
| `tb_posit_mac`          | the default (16,1) unit end to end, 300 000 cases (uniform words, words near 1.0, cancelling, overflowing, underflowing, zero and infinite operands). The run fails unless both decoder shift paths, both encoder shift paths, sticky, carry-out, cancellation, saturation, flush-to-zero, zero and infinity are all seen |
| `tb_posit_mac_formats`  | the same end-to-end check on (8,1), (8,2), (16,2), 100 000 cases each |

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb -Itb \
    rtl/posit_pkg.sv tb/posit_ref_pkg.sv tb/tb_posit_mac.sv \
    --top-module tb_posit_mac -o sim
./obj_dir/sim
```

Replace the testbench name for the others. Every run finishes in a few seconds. To use another
format, instantiate `posit_mac #(.N(..), .ES(..))`; `tb/posit_mac_checker.sv` shows a generic
random check that works for any format.

## Files

| file                    | content |
|-------------------------|---------|
| `rtl/posit_pkg.sv`      | width functions shared by all blocks |
| `rtl/posit_lod.sv`      | leading-one detector (counts leading zeros) |
| `rtl/posit_lzd.sv`      | leading-zero detector (counts leading ones) |
| `rtl/posit_decoder.sv`  | low-latency posit decoder |
| `rtl/posit_encoder.sv`  | low-latency posit encoder |
| `rtl/fp_mac.sv`         | fused floating-point multiply-add |
| `rtl/posit_mac.sv`      | top: posit multiply-accumulate `z = a*b + c` |
| `tb/posit_ref_pkg.sv`   | bit-serial reference model and exact accumulator |
| `tb/posit_mac_checker.sv` | per-format random checker used by `tb_posit_mac_formats` |
| `tb/tb_*.sv`            | testbenches listed above |
