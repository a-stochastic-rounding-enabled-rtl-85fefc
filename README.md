# An FP8 × FP8 + FP12 multiply-accumulate unit with eager stochastic rounding

Training a neural network in low precision usually stops at the multiplier: operands are
8-bit floats, but the dot products are still summed in 16- or 32-bit floating point, because
a short accumulator *swamps*. Once the running sum is large compared with each new product,
round-to-nearest discards the product and the sum stalls. Stochastic rounding (SR) fixes that
on average: a value that falls between two representable numbers is rounded up with a
probability equal to its distance from the lower one. Small contributions then survive in
expectation, and a 12-bit accumulator tracks the true sum closely enough for training.

This RTL implements such a MAC unit, following the architecture published by Ben Ali, Filip
and Sentieys ("A Stochastic Rounding-Enabled Low-Precision Floating-Point MAC for DNN
Training"). The main idea is the **eager** SR adder. It starts the random rounding addition
straight after operand alignment, in parallel with the significand addition, and it fixes up
the result after normalization with a 2-bit correction. A classic (**lazy**) design adds the
random bits to the wide, normalized sum instead. The eager form gives the same rounding
probabilities, but its leading-zero and normalization logic works on p+2 bits instead of
p+r bits.

The configuration built here is the one the publication recommends:

| quantity | value |
|---|---|
| multiplier inputs | FP8 E5M2 (1 sign, 5 exponent, 2 fraction bits; precision p_m = 3) |
| product and accumulator | FP12 E6M5 (1 sign, 6 exponent, 5 fraction bits; precision p = 6) |
| random bits per rounding | r = 13 |
| subnormals | not supported (flushed to zero) |
| throughput / latency | one MAC per clock; the sum is in the register one edge later |

## Structure

```
   a (FP8) ──┐
             ├─ fp_mul_exact ── prod (FP12, exact) ──┐
   b (FP8) ──┘                                       │
                                                     ▼
   galois_lfsr ── rnd (13 bits, new every cycle) ─▶ fp_add_sr_eager ── sum ─▶ acc_register ──┬─▶ acc
                                                     ▲                                      │
                                                     └──────────────────────────────────────┘
```

`sr_mac` (top) wires the four parts together. The loop is single-cycle: the product, the
addition and the rounding all happen between two register edges.

* **`fp_mul_exact`** multiplies two E5M2 numbers exactly. The 3-bit × 3-bit significand
  product fits in p = 6 bits and the exponent in 6 bits, so no rounding is needed. With
  biases 15 and 31, the output exponent field is `ea + eb + 1`, plus 1 more when the
  significand product is ≥ 2.
* **`galois_lfsr`** is a 13-bit Galois LFSR (polynomial x^13+x^4+x^3+x+1, seed 1). It steps
  once per clock, independently of the operands, and its whole state is the random word.
* **`fp_add_sr_eager`** is the adder described below. It is combinational and contains the
  two rounding stages `sr_sticky_round` and `sr_round_correction` as sub-modules.
* **`acc_register`** holds the running sum. `clr` loads +0 to start a new dot product (it has
  priority over `en`), `en` loads the new sum, and `rst_n` (synchronous, active low) clears
  the register and reseeds the LFSR.

Top-level ports: `clk`, `rst_n`, `clr`, `en`, `a[7:0]`, `b[7:0]`, `acc[11:0]`. The formats
are packed `{sign, exponent, fraction}`.

## How the eager adder rounds

### The alignment window

Let x be the operand with the larger magnitude and y the other, with d = e_x − e_y. All
significand bits are placed in one window of p + r = 19 positions, numbered from the left:

```
position:   0      1         2 … p       p+1     p+2       p+3 … p+r-1
            carry  implicit  fraction…   (R/S)   G         (rest of the sticky group)
            └──────── integer adder: p+2 positions ────────┘└── sticky group: r-2 positions ──┘
```

m_x sits at positions 1…p. m_y is shifted right by d, and whatever falls below position
p+r−1 is dropped. On an effective subtraction the shifted m_y is two's-complemented over the
whole window. The window is then split into two parts:

* The **upper p+2 positions** go to the one integer adder together with m_x. It produces a
  carry, an implicit bit, p−1 fraction bits and one bit below the LSB.
* The **lower r−2 positions** never meet a bit of x, so their part of the sum is just y's
  bits. These bits are rounded at once instead of waiting for the sum. G, the first of them,
  is the guard bit.

### Two stages, two cases

The random word is used as `{R1, R2, R3, q}`, where q is the low r−3 bits.

**Stage 1: Sticky Round (`sr_sticky_round`).** This stage runs in parallel with the integer
adder. It adds the sticky group to the low r−2 random bits (R3 and q) and produces two
carries:

* S'1, the carry out of the whole (r−2)-bit sum;
* S'2, the carry out of its low r−3 bits, i.e. the carry into the position of G.

Both come from the same adder. S'2 is recovered as the top sum bit XOR the two top addend
bits.

**Normalization (far path, d ≥ 2).** The sum lies in [1, 4), so only the adder carry matters:

* **Case (a), carry = 1.** The carry becomes the implicit bit and the exponent goes up by
  one. The fraction is positions 1…p−1. The two bits below it are R = position p and
  S = position p+1. Everything below S is the sticky group, so the carry that the group sends
  up is S'1.
* **Case (b), carry = 0.** The result is shifted left by one. The fraction is positions 2…p
  and R = position p+1. The bit that belongs next to R is G, but a plain shift fills in a
  zero there. The group below R has also lost G, so its carry is the one from the bits
  *below* G: that is S'2.

**Stage 2: Round Correction (`sr_round_correction`).** This stage computes both candidates in
carry-select style:

* {R,S} + {R1,R2} for case (a);
* {R,G} + {R1,R2} for case (b).

The adder carry picks one of the two, with S'1 or S'2 as its carry-in. The carry c out of
that 3-bit sum is the rounding decision. The incrementer adds c to `{exponent, fraction}`, so
a fraction overflow moves the exponent up by itself.

### Why this is exact stochastic rounding

* **Case (a).** The r discarded bits are [R S group]. Stage 2 with S'1 adds them to the full
  r-bit random word, which is exactly what a lazy adder does after normalization.
* **Case (b).** The discarded bits are [R G g_low], r−1 bits, where g_low is the group
  without G. Stage 2 with S'2 adds them to {R1, R2, q}, which is also r−1 uniform bits.

In both cases the result rounds up for exactly F of the 2^r random words, where F is the
discarded fraction scaled to r bits. That is the SR definition for a uniform r-bit random
number. Case (b) leaves R3 unused. The bit-level pairing with the random word differs from a
lazy adder's, but the distribution is the same.

The testbench checks this directly: for 240 operand pairs it applies every one of the 2^r
random words and counts the round-ups. The count must equal F exactly.

The publication describes S' as "the two most significant bits" of the Sticky Round output.
Read literally, S'2 would be the top *sum* bit. That bit equals the wanted carry XOR G XOR R3,
which is a fair coin whatever the operands are. The carry-into-G reading used here is the one
that makes the eager result match the lazy one, as the publication states it does.

### Close path (d ≤ 1)

With d ≤ 1, y has no bits in the sticky group. The sum is exact within the p+2 upper
positions, but a subtraction can cancel many leading bits. A leading-zero count shifts the
result left until its leading one is at position 0. R and S are then read from positions p
and p+1, and S' is forced to 0,0, so only R1 and R2 take part in the rounding (that is still
exact, because the fraction has only two bits). The swap step orders the operands by full
magnitude, so the difference is never negative. An exact cancellation gives +0.

### Effective subtraction on the far path

The publication works the two cases out for addition and says that subtraction carries over.
In this RTL, a far-path subtraction places m_x one position higher (at position 0) and shifts
m_y by d−1 instead of d. The difference 2·m_x − 2·m_y·2^−d lies in (1, 4), so its leading one
is again at position 0 or 1 and the same cases (a) and (b) apply unchanged. The exponent is
e_x − 1 + carry. As a side effect, one more bit of y survives the truncation on this path.

### Special values and range

* An exponent field of 0 means zero. Subnormal encodings are read as zero, both in the
  multiplier and in the adder.
* A result whose exponent before rounding is below the smallest normal is flushed to a zero
  of the result's sign.
* An exponent that reaches all ones (also through rounding) gives ±Inf.
* NaN is produced for a NaN operand, Inf − Inf and 0 × Inf, encoded as exponent all ones
  with the fraction MSB set (`0x7F0`).
* x + 0 = x. 0 + 0 keeps the sign only when both zeros are negative.

## Where this RTL goes beyond or departs from the publication

The publication gives the block diagram of the eager adder, its two rounding stages, the
formats and the value of r. It does not give the multiplier's internals, the PRNG details,
control signals or exception rules. Choices made here:

* The meaning of S'2 (carry into G), as argued above.
* Far-path subtraction is aligned one position higher (see above).
* The close-path rounding select is forced to case (a). In the diagram this select comes from
  the adder carry, but the close path's result is already normalized by the leading-zero
  shifter.
* On equal exponents the swap also compares significands.
* Flush-to-zero, Inf and NaN handling as listed above.
* The LFSR width equals r, its whole state is the random word, and the polynomial and seed
  are chosen here. Because the all-zero word never occurs, the round-up probability is off
  by less than 2^−r.
* The `en` and `clr` controls, synchronous reset, and the single-cycle loop.
* Only the main configuration is built. The lazy SR adder, round-to-nearest adders and
  subnormal support appear in the publication only as points of comparison.

The publication's area, delay and energy figures (28 nm FDSOI and FPGA) are not reproduced.
The RTL contains no technology-specific parts.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `sr_mac` | `R_BITS` | 13 | random bits r (≥ 4; the LFSR supports 2…32) |
| `sr_mac` | `SEED` | 1 | LFSR reset value (0 is replaced by 1) |
| `fp_add_sr_eager` | `EXP_W`, `MAN_W`, `R_BITS` | 6, 5, 13 | accumulator format and r |
| `fp_mul_exact` | `EXP_W`, `MAN_W` | 5, 2 | input format; the output is E(EXP_W+1) M(2·MAN_W+1) |
| `galois_lfsr` | `WIDTH`, `SEED` | 13, 1 | register width, reset value |

`sr_mac_pkg` holds the shared format constants and the LFSR feedback table. The adder and
multiplier are written for any widths, but `sr_mac` and the reference models in
`tb/sr_ref_pkg.sv` are fixed to E5M2 → E6M5. To study another r (the publication evaluates
4 to 13), change `R_BITS` on `sr_mac` and the `13` in the testbench models.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line.
`tb/sr_ref_pkg.sv` holds value-level reference models. `ref_add` computes the exact sum on the
adder's truncation grid, normalizes it, and rounds up when the discarded fraction plus the
random word reaches 2^r. It does not mirror the hardware structure.

| testbench | what it checks |
|---|---|
| `tb_fp_add_sr_eager` | 200 000 random pairs bit-exact at r = 13, 9 and 4; 240 pairs swept over all random words (exact SR probability); every path and case (far add/sub in both cases, close add/sub, cancellation, flush, overflow, specials) |
| `tb_sr_sticky_round` | exhaustive S'1/S'2 at r = 13 and r = 4 |
| `tb_sr_round_correction` | all 256 input combinations |
| `tb_fp_mul_exact` | all 65 536 operand pairs, plus an exact integer check that the product is exact |
| `tb_galois_lfsr` | step rule, reset value, no zero word, and full period 2^n−1 at n = 4, 9, 13, 16 |
| `tb_acc_register` | enable, clear and hold against a model |
| `tb_sr_mac` | full-size end-to-end run, bit-exact every cycle (one MAC per cycle, one-cycle latency); random traffic, flush, overflow, Inf − Inf, and a swamping run of 4096 × 2^−4 where truncation stalls at 4 and SR ends near the exact 256; every adder case and control must occur |
| `tb_sr_gemm_tile` | a 16 × 16 × 144 GEMM tile shaped like a ResNet-20 3×3 convolution, bit-exact; SR must be less biased than truncation |

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sr_mac_pkg.sv tb/sr_ref_pkg.sv tb/tb_sr_mac.sv --top-module tb_sr_mac
./obj_dir/Vtb_sr_mac
```

Replace `tb_sr_mac` with any other testbench name. Testbenches that do not use the reference
package can drop `tb/sr_ref_pkg.sv`. Each run takes well under a minute. For lint:
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/sr_mac_pkg.sv rtl/sr_mac.sv`.
