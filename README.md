# PLAM: a posit multiplier without a multiplier

A posit multiplier normally looks like a floating-point multiplier: unpack both
operands, multiply the two significands with an integer multiplier, then
normalise, round and pack. The significand multiplier is by far the largest
and most power-hungry part of such a unit. PLAM (Posit Logarithm-Approximate
Multiplication) removes it. It uses Mitchell's approximation
`log2(1 + f) ≈ f` for `0 ≤ f < 1`. In the logarithmic domain a product is a
sum, and the "logarithm" of a posit turns out to be its own fields read as one
fixed-point number. The whole core of the multiplier is therefore **one
adder**.

The price is a bounded, one-sided error. Before the final rounding, the
approximate product is never larger than the exact one. Its relative error is
at most 1/9 (11.1 %), reached
when both fractions are exactly 0.5 (1.5 × 1.5 gives 2.0 instead of 2.25).
The target use is neural-network inference, where an error of this kind was
found to cost almost no accuracy.

This repository holds synthesizable SystemVerilog for the multiplier,
parameterised by the posit format `posit<N,ES>`, with self-checking
testbenches. The default is `posit<32,2>`. Other sizes are parameter settings,
and posit<16,2>, posit<16,1>, posit<8,1> and posit<8,2> are simulated too.

## 1. Posit numbers in brief

A posit<N,ES> word has up to four fields, most significant first:

| field    | width                         | meaning |
|----------|-------------------------------|---------|
| sign `s` | 1                             | two's complement: a negative posit is the negation of the whole word |
| regime   | 2 … N-1 bits, variable        | a run of identical bits ended by the opposite bit (or by the end of the word). A run of m ones means k = m-1. A run of m zeros means k = -m |
| exponent | 0 … ES bits                   | unsigned, unbiased; bits cut off by the end of the word count as 0 |
| fraction | the rest                      | bits below an implicit leading 1 |

The value is `(-1)^s · 2^(2^ES · k + e) · (1 + f)`. Two words are special.
`000…0` is zero. `100…0` is NaR ("not a real", the single exception value).
There are no subnormals, and there is one rounding mode: round to nearest, ties
to even.

Because the regime is variable-length, the exponent and fraction move around
inside the word. Once unpacked, this design holds the fields at fixed widths:

| unpacked field | width (N=32, ES=2)                 |
|----------------|------------------------------------|
| regime value K | ⌈log2(N-1)⌉ + 1, signed (6)        |
| exponent E     | ES (2)                             |
| fraction F     | N - ES - 3 (27), the longest fraction any posit<N,ES> word can carry |

These widths are set by functions in `rtl/plam_pkg.sv`.

## 2. The key step: the log-domain adder

For a positive posit:

    log2 X = 2^ES · K + E + log2(1 + F)  ≈  2^ES · K + E + F

`2^ES · K + E` is simply K with the ES exponent bits appended below it. Append
the fraction bits below those, and the concatenation `{K, E, F}` *is* the
fixed-point approximation of `log2 X`. K supplies the signed integer part, E
the low integer bits and F the binary fraction. Multiplying two posits then
means:

    sign_C      = sign_A xor sign_B
    {K,E,F}_C   = {K,E,F}_A + {K,E,F}_B          (one adder, KS+ES+FW bits)

Every case of the field-wise description falls out of the carries of this one
addition:

* If `F_A + F_B ≥ 1`, the fraction field overflows. Its carry goes into the
  exponent (E+1), and what is left in the field is `F_A + F_B - 1`. Read back
  through Mitchell's approximation this gives `2·s_A·s_B·(F_A+F_B)` instead of
  `s_A·s_B·(1+F_A+F_B)`.
* If the exponents (plus that carry) reach `2^ES`, the exponent wraps modulo
  `2^ES` and its carry goes into the regime (K+1).
* No comparison, normalisation shift or multiplier is needed.

Worked example, posit<32,2>, 1.5 × 1.5. Each operand has K=0, E=0, F=0.5
(F = `100…0` in 27 bits). The fraction sum is 1.0, so the field keeps 0 and
E becomes 1. The result K=0, E=1, F=0 is 2^1 · 1.0 = 2.0, encoded as
`0x48000000`. The exact product is 2.25, so the error is 0.25/2.25 = 1/9.

The regime is sign-extended by one bit before the addition (KS = KW+1 bits).
The sum of two regimes plus a carry then always fits. `plam_log_adder` also
exports the two field carries as flags, for observation only.

## 3. Datapath

```
 a[N-1:0] ──► posit_decoder ──► s_a, K_a, E_a, F_a, zero_a, nar_a ─┐
                                                                   ├─► plam_log_adder ──► s_c, K_c, E_c, F_c ─┐
 b[N-1:0] ──► posit_decoder ──► s_b, K_b, E_b, F_b, zero_b, nar_b ─┘                                       │
                         zero_a|zero_b, nar_a|nar_b ──────────────────────────────────────────────────────► posit_encoder ──► p[N-1:0]
```

The unit is purely combinational. There are no registers and no pipelining,
and the product is valid in the same cycle as the operands. To pipeline it,
register the decoder outputs and/or the adder outputs; the interfaces between
the three stages are the natural cut points.

### Decoder (`posit_decoder`)

1. A negative word is replaced by its two's complement. The sign is kept
   separately, and all later fields are read from a positive word.
2. The bit after the sign gives the regime polarity r. When r = 1 the body is
   inverted, so that the regime run is always a run of zeros.
3. A leading-zero counter (`posit_lzc`) measures the run length m. Then
   K = m-1 if r = 1, and K = -m if r = 0.
4. The body is shifted left by m+1, which drops the run and its terminating
   bit. The top ES bits are E and the next N-ES-3 bits are F. Bits shifted in
   from beyond the word are zero, which is exactly the posit rule for
   truncated exponents and fractions.
5. `is_zero` and `is_nar` flag the two special words. The other outputs carry
   no meaning for those two words.

### Encoder and rounding (`posit_encoder`)

This is the subtlest part. A posit product can have a longer regime than
either operand. When it does, exponent and fraction bits fall off the end of
the word and must be rounded away. The encoder works like this:

1. It clamps the regime. If K > N-2 the result is maxpos (`0111…1`); if
   K < -(N-2) it is minpos (`000…01`). A non-zero product never rounds to zero
   or to NaR. The flags `sat_max` and `sat_min` report these two cases.
2. It sets the run length: rl = K+1 (run of ones) when K ≥ 0, and rl = -K (run
   of zeros) when K < 0.
3. It forms `{~r, E, F, 0…0}` and shifts it right by rl, filling from the top
   with r. This one shift places the whole unrounded bit string: the run, its
   terminating bit, the exponent and the fraction.
4. The top N-1 bits are the body. The next bit is the guard bit, and the OR of
   all bits below it is the sticky bit.
5. It rounds to nearest, ties to even: increment the body if
   `guard & (lsb | sticky)`. Rounding can carry into the regime (for example
   `…0111 + 1`), which is correct posit behaviour because the string is
   monotonic. It cannot overflow past maxpos, because the only all-ones body
   (K = N-2) has guard bit 0.
6. A negative result is two's-complemented. NaR and zero override
   everything, with NaR taking precedence.

### Special values (`plam_mult`)

NaR × anything = NaR. Otherwise zero × anything = 0. All other results go
through the adder and encoder.

## 4. Files and interfaces

| file | contents |
|------|----------|
| `rtl/plam_pkg.sv` | field-width functions shared by all modules |
| `rtl/posit_lzc.sv` | leading-zero counter (helper of the decoder) |
| `rtl/posit_decoder.sv` | posit word → S, K, E, F, is_zero, is_nar |
| `rtl/plam_log_adder.sv` | the PLAM core adder |
| `rtl/posit_encoder.sv` | S, K, E, F → posit word, with RNE and saturation |
| `rtl/plam_mult.sv` | top level |

The top level, `plam_mult #(N = 32, ES = 2)`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `a`  | in  | N | operand A, posit<N,ES> |
| `b`  | in  | N | operand B, posit<N,ES> |
| `p`  | out | N | approximate product, rounded to nearest even |

The format must have ES ≥ 1 and N ≥ ES+4, so that there is at least one
fraction bit; an assertion in `plam_mult` checks this. ES = 0 (no exponent
field) is not supported.

Synthesised with a generic yosys flow at the default size, the top level
has no flip-flops and 117 word-level cells: a few adders and
incrementers, two left shifters (decoders), two right shifters (encoder run
and its fill mask) and multiplexers. There is no multiplier cell.

## 5. Verification

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops by itself.
Each has a watchdog. Expected values come from `tb/plam_ref_pkg.sv`, a
reference model written in a deliberately different style from the RTL. Its
decoder walks the regime bit by bit. Its encoder appends bits to a
string and rounds on that string. Its PLAM product is computed on
plain integers. On top of this, each testbench checks some hand-worked words
and checks the error bound against the exact product, which does not depend on
the model.

| testbench | what it runs |
|-----------|--------------|
| `tb_posit_decoder` | all 65536 posit<16,1> words; directed and 50k random posit<32,2> words; hand-worked fields |
| `tb_plam_log_adder` | 50k random field pairs against integer arithmetic; the 0.5+0.5 and exponent-carry cases |
| `tb_posit_encoder` | hand-worked words, including both tie cases and saturation; 50k round trips (decode → encode must give the same word); 50k random fields with K beyond the range |
| `tb_plam_mult` | **full size, default parameters.** Directed and 100k random pairs, bit-exact, with a 1/9 error-bound check whenever the result needs no rounding. Counts each mechanism (fraction carry, exponent carry, round up, saturation high and low, zero, NaR, negative) and fails if any never occurs. The largest error observed is 0.111111 |
| `tb_plam_formats` | posit<8,1> and posit<8,2> exhaustively (all 65536 pairs); posit<16,2> and posit<16,1> random |
| `tb_plam_dnn` | posit<16,1> multiplier inside the multiply stream of small networks: MLPs 617-128-64-26 (ISOLET shape) and 561-512-512-6 (UCI HAR shape), and LeNet-5 on 1- and 3-channel 32×32 inputs. See below |

`tb_plam_dnn` uses generated weights and inputs. It runs 9 inferences,
3.5 million products in total, each one checked bit-exactly. Accumulation is
exact, in `real` arithmetic. For every neuron, the PLAM sum must lie within
(1/9 + 2⁻⁹) × Σ|exact products| of the exact sum. The testbench also runs each
network with exact products and reports how often both pick the same top-1
output (9 of 9 with the default random seed). Because nothing is trained, this says
nothing about the classification accuracy of real models.

To run a testbench with plain Verilator (5.x), from the repository root:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/plam_pkg.sv tb/plam_ref_pkg.sv tb/tb_plam_mult.sv --top-module tb_plam_mult
./obj_dir/Vtb_plam_mult
```

Replace `tb_plam_mult` by any other testbench name. Each run takes well under
10 seconds.

## 6. What comes from the PLAM method, and what this RTL chooses

From the PLAM method itself:

* The algorithm: XOR the signs, add K, E and F with carries from F into E and
  from E into K. The result fields are used without any normalisation.
* The unpacked field widths, including the 1/9 error bound.
* Round to nearest even and "correct rounding" of the result.
* A combinational, unpipelined unit at 16 and 32 bits, es = 2. Posit<16,1> is
  the format of the accuracy experiments.

Chosen here, because the method's description leaves them open:

* **Decoder structure**: two's complement first, fold the run into zeros, one
  leading-zero counter.
* **Encoder structure**: a single right shift of `{~r, E, F}`, with guard and
  sticky bits. Rounding is on the bit string, as the posit standard defines it.
* **Saturation**: results beyond maxpos or minpos saturate instead of becoming
  NaR or zero. This is the posit standard's rule; the method does not say.
* **Special values**: NaR wins over zero.
* **Widths and defaults**: the product regime is one bit wider than an
  operand's. ES ≥ 1 is required. The default is posit<32,2>.
* **Status flags**: the carry, round and saturation flags on the sub-blocks
  exist only for observation. The top level does not export them.

Where the published unit may differ: the reference implementation of PLAM was
generated by an arithmetic-core generator whose decoder, encoder and rounding
details are not described. Its results should agree with this RTL for every
input, provided it also rounds on the bit string and saturates. That agreement
has not been checked against it here. Area, delay and power figures of that
unit do not transfer to this RTL either.

## 7. Changing it

* **Format**: set `N` and `ES` on `plam_mult`. All widths follow from
  `plam_pkg`.
* **Exact multiplier for comparison**: replace `plam_log_adder` with a
  significand multiplier plus a one-bit normalisation. The decoder and encoder
  can stay as they are.
* **Pipelining**: add registers between decoder, adder and encoder.
  The testbenches check the product 1 ns after the clock edge that follows
  the operands. They would then need to wait for the added latency.
