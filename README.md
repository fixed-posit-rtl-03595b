# Fixed-posit multiplier

A posit is a real-number format in which a variable-length *regime* field
sits between the sign and the exponent. A long regime buys dynamic range and
a short one buys fraction bits. This flexibility costs hardware: a posit
multiplier has to find where each field starts (a leading-zero/one count
over the whole word, followed by shifts), and it has to handle the extreme
layouts, from a word that is almost all regime to one with the widest
possible fraction.

A *fixed-posit* gives up that flexibility. The regime and exponent fields
have fixed widths, so every field sits at a fixed bit position, like in
IEEE-754. Values are still decoded with the posit rule. This repository holds
synthesizable SystemVerilog for a fixed-posit multiplier, parameterised by
the format `(N, ES, RS)`: word width, exponent bits and regime bits. The
default is `(32, 6, 2)`. It covers the whole IEEE-754 single-precision
exponent range and has the same 23 fraction bits.

## The format

From the most significant bit down, a word holds:

| field    | width            | (32, 6, 2) bits |
|----------|------------------|-----------------|
| sign `s` | 1                | 31              |
| regime `r` | RS             | 30:29           |
| exponent `e` | ES           | 28:23           |
| fraction `f` | FS = N-1-RS-ES | 22:0          |

The regime is a run of `m` equal bits starting at its MSB. The rest of the
field is filled with the complement bit, which makes it a thermometer code.
A run of zeros means `k = -m`. A run of ones means `k = m - 1`. So `k` lies
in `[-RS, RS-1]`. The value is

    (-1)^s * 2^(k * 2^ES + e) * 1.f

The combined *scale* `k * 2^ES + e` therefore runs from `-RS * 2^ES` to
`RS * 2^ES - 1`. For `RS = 2^(7-ES)` this is -128 .. +127, which contains
IEEE single's -126 .. +127. Thirty-eight such formats with widths 18 to 32
exist (N even, ES = 3..7; ES = 3 needs N >= 22). All of them are
parameter settings of this RTL.

Regime codes for the default RS = 2:

| r  | run      | k  | scales        |
|----|----------|----|---------------|
| 00 | two 0s   | -2 | -128 .. -65   |
| 01 | one 0    | -1 | -64 .. -1     |
| 10 | one 1    | 0  | 0 .. 63       |
| 11 | two 1s   | 1  | 64 .. 127     |

With RS = 2, the 8 bits `{r, e}` read as an unsigned number equal
`scale + 128`. So (32, 6, 2) behaves like a single-precision float with
exponent bias 128 and no subnormals. This is why its conversion from IEEE
single is exact and its cost is close to that of an IEEE multiplier.

Examples in (32, 6, 2): `1.0 = 0x4000_0000` (r = 10, e = 0),
`1.5 = 0x4040_0000`, `2.0 = 0x4080_0000`, `-1.0 = 0xC000_0000`.

### Special values and range limits

The source description leaves these points open. This implementation uses
the posit conventions:

* **Zero** is the all-zero word. **NaR** (not a real) is `1` followed by
  zeros. NaR times anything is NaR. Zero times any real number is `+0`.
  These two patterns would otherwise mean `±2^(-RS*2^ES)`, which is
  therefore not representable.
* The word is **sign-magnitude**: negating a number flips only the sign bit.
  Standard posits use two's complement instead.
* A product too large for the format **saturates** to the largest magnitude
  (every bit below the sign set), and `ovf` is raised. A product too small
  saturates to the smallest nonzero magnitude (`0…01`), and `unf` is raised.
  A product never becomes zero or NaR through its range, as with posits.
  A product whose magnitude bits would all be zero also returns `0…01` with
  `unf`, because that pattern is taken by zero and NaR.
* Fraction bits beyond FS are **truncated** (rounded toward zero). No
  rounding stage is built.

## Datapath

`fixed_posit_mul` is purely combinational. Because the fields are at fixed
positions, both operands are split with plain wiring, and five units then
work largely in parallel:

```
 A = {sa, ra, ea, fa}          B = {sb, rb, eb, fb}
   sa,sb ──► [1 fxp_sign_xor] ───────────────────────────────► sc
   ra,rb ──► [2 fxp_regime_decoder x2] ─ ka<<ES, kb<<ES ─┐
   fa,fb ──► [3 fxp_frac_mult] ── fc ───────────────────────┼─► fc
                              └─ carry ─┐                   │
   ea,eb ─────────────────────► [4 fxp_exp_adder] ◄─────────┘
                                  │ ec ─────────────────────► ec
                                  └ kc ─► [5 fxp_regime_encoder] ─► rc, ovf, unf
 C = {sc, rc, ec, fc}, then special-value / saturation mux
```

1. **`fxp_sign_xor`**: `sc = sa ^ sb`.
2. **`fxp_regime_decoder`** (one per operand): finds the leading run length
   `m` over RS bits with a short comparison chain and gives `k` and
   `k << ES`. Bits after the first complement bit are ignored. The chain is
   only RS bits long, so no word-wide leading-one counter is needed. This is
   where the format saves most of its cost against a posit.
3. **`fxp_frac_mult`**: multiplies `(1.fa) * (1.fb)`, which lies in [1, 4).
   If the top product bit (the *carry*) is set, the product is in [2, 4): the
   fraction is taken one bit further left and the carry adds one to the
   scale. The remaining low bits are dropped.
4. **`fxp_exp_adder`**: forms the signed sum
   `(ka<<ES) + ea + (kb<<ES) + eb + carry`, which is the binary scale of the
   product. Its low ES bits are the result exponent `ec`. The bits above,
   the sum shifted right arithmetically by ES, are the result's `k` (`kc`).
   `kc` is two bits wider than a legal `k`, so an out-of-range result stays
   visible.
5. **`fxp_regime_encoder`**: turns `kc` back into the thermometer code:
   `k+1` ones then zeros for `k >= 0`, or `-k` zeros then ones for `k < 0`.
   It raises `ovf` for `k > RS-1` and `unf` for `k < -RS`.
   An immediate assertion checks that the two flags are never set together.

The top then chooses, in priority order: NaR, zero, the overflow
saturation, the underflow saturation, or `{sc, rc, ec, fc}`.

Truncation keeps the fraction below 2 after normalisation, so no second
normalisation or exponent increment is ever needed.

## Module reference

| module | parameters (default) | ports |
|---|---|---|
| `fxp_pkg` (package) | `FXP_N=32, FXP_ES=6, FXP_RS=2`; width functions `frac_bits`, `k_bits`, `sk_bits`, `sum_bits` | – |
| `fixed_posit_mul` (top) | `N=32, ES=6, RS=2` | `a[N-1:0]`, `b[N-1:0]` in; `c[N-1:0]`, `ovf`, `unf` out |
| `fxp_sign_xor` | – | `sa`, `sb` in; `sc` out |
| `fxp_regime_decoder` | `ES=6, RS=2` | `r[RS-1:0]` in; signed `k[KW-1:0]`, `sk[KW+ES-1:0]` out, with `KW = clog2(RS)+1` |
| `fxp_frac_mult` | `FS=23` | `fa`, `fb` `[FS-1:0]` in; `fc[FS-1:0]`, `carry` out |
| `fxp_exp_adder` | `ES=6, RS=2` | signed `ska`, `skb`; `ea`, `eb`, `carry` in; `ec[ES-1:0]`, signed `kc[KW+1:0]` out |
| `fxp_regime_encoder` | `RS=2, KCW=clog2(RS)+3` | signed `kc[KCW-1:0]` in; `rc[RS-1:0]`, `ovf`, `unf` out |

There is no clock and no reset. All outputs settle combinationally from
`a` and `b`, with zero cycles of latency. To run at a target frequency,
register the inputs and outputs (and pipeline the fraction multiplier if
needed) around `fixed_posit_mul`.

`FS = N-1-RS-ES` must be at least 1 and `ES` at least 1. All formats
listed above meet both conditions.

## Verification

Every testbench checks the RTL against values worked out without it and
prints `TB_RESULT checks=… failures=…`. The shared model `tb/fxp_ref_pkg.sv`
decodes a word to an IEEE double by building the double's bit pattern from
the scale and fraction. It multiplies in double precision, which is exact for
fractions of up to 25 bits, and re-encodes the double's own exponent and
mantissa fields with the conventions above. It shares no arithmetic with the
RTL.

| testbench | what it covers |
|---|---|
| `tb_fxp_sign_xor` | all four sign pairs |
| `tb_fxp_regime_decoder` | every legal regime for RS = 2, 16, 1, plus malformed patterns |
| `tb_fxp_frac_mult` | 20,000 random pairs at FS = 23 and 9, against the real product |
| `tb_fxp_exp_adder` | 5,000 random sums each for (ES, RS) = (6, 2) and (3, 16), including the extremes |
| `tb_fxp_regime_encoder` | every k in range and beyond, for RS = 2, 16, 1 |
| `tb_fixed_posit_mul` | default (32, 6, 2) with no overrides: 200,000 products mixing corner cases, random words and moderate scales; requires carry, k < 0, k >= 0, negative, overflow, underflow, zero and NaR to each occur |
| `tb_fxp_configs` | all 38 formats above, 4,000 products each; checks that each format covers -126 .. +127 |
| `tb_fxp_random_floats` | 100,000 random IEEE single pairs (random sign, exponent -126..127, random mantissa), converted to (N, 6, 2) for N = 32 … 18 and multiplied; checks that (32, 6, 2) holds every single exactly and that the mean product error does not fall as N shrinks |

Mean relative product error measured by `tb_fxp_random_floats`, against the
exact product of the original singles, for products that stay in range.
The error includes truncating both operands on conversion:

| N in (N,6,2) | 32 | 30 | 28 | 26 | 24 | 22 | 20 | 18 |
|---|---|---|---|---|---|---|---|---|
| mean rel. error (%) | 4.3e-6 | 4.2e-5 | 1.9e-4 | 7.9e-4 | 3.2e-3 | 1.3e-2 | 5.1e-2 | 0.20 |

Every testbench finishes in seconds with Verilator.

## Simulating

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fxp_pkg.sv tb/fxp_ref_pkg.sv \
    rtl/fxp_sign_xor.sv rtl/fxp_regime_decoder.sv rtl/fxp_frac_mult.sv \
    rtl/fxp_exp_adder.sv rtl/fxp_regime_encoder.sv rtl/fixed_posit_mul.sv \
    tb/tb_fixed_posit_mul.sv --top-module tb_fixed_posit_mul -o sim
./obj_dir/sim
```

Swap in another testbench file and its `--top-module` to run it. For a unit
testbench, the packages and the one module under test are enough. Change
the format through the top's parameters, e.g.
`fixed_posit_mul #(.N(18), .ES(6), .RS(2))`.

## What is and is not taken from the source design

Taken from the description of the design: the format (field order, fixed
widths, posit decoding rule, complement padding of the regime); the
five-unit structure (sign XOR; regime decoders giving `k` shifted by ES;
fraction multiply and normalise with a carry into the adder; one adder over
both exponents, both shifted `k` values and the carry, whose output splits
into the result exponent and result `k`; regime encoder); the 38 formats and
the choice of (32, 6, 2) as the main configuration.

Choices made here, where the description is silent:

* the zero and NaR encodings, and sign-magnitude negation;
* saturation on overflow and underflow, and the `ovf`/`unf` outputs;
* truncation instead of rounding;
* the regime decoder's internals. The description mentions shift registers
  for regime decoding. A combinational multiplier has no registers, so a
  fixed RS-bit run-length chain is used instead;
* signal widths inside the adder and encoder;
* a fully combinational unit with no pipeline registers.

Because of truncation and the zero/NaR conventions, results may differ in
the last place, and at the range limits, from another fixed-posit
implementation that rounds or handles the extremes differently.

Not included: the conventional posit and IEEE-754 multipliers used as
comparison points, and any conversion hardware between IEEE-754 and
fixed-posit. The conversion is done in software in the testbenches.
