# Pipelined floating-point Givens rotation unit (CORDIC, conventional and HUB)

QR decomposition by Givens rotations repeatedly takes two matrix rows,
computes the angle that zeroes the leading element of the lower row, and
rotates every other element pair of the two rows by that angle. This unit does
both jobs on floating-point data in one pipeline, at one element pair per
clock.

Three ideas make it cheap:

* **Block floating point around a fixed-point core.** Each incoming pair
  (X, Y) is converted to two aligned fixed-point significands that share the
  larger of the two exponents. A plain fixed-point CORDIC pipeline rotates the
  significands. The shared exponent travels past the core in a delay line.
  An output converter normalizes each result back into a floating-point
  number of its own.
* **No angle datapath.** A conventional CORDIC keeps a Z (angle) register.
  Here each microrotation stage instead stores the single bit that says which
  way it turned while computing the angle (vectoring). The following element
  pairs are turned the same way (rotation). Angle computation and rotation run
  in the same stages, back to back, with no bubble between rows.
* **Half-Unit-Biased (HUB) numbers, optionally.** A HUB number has an
  implicit extra least significant bit that is always 1. Because of it,
  negation is a bitwise inversion (no +1) and round-to-nearest is plain
  truncation. The HUB build therefore has no rounding adders and no two's
  complement incrementers, in the converters or in the CORDIC adders. HUB is
  the default build. The conventional (IEEE-754-like) build is also provided.

```
 x_i, y_i (FP) ──► input converter ──► Xfix, Yfix (N bits) ──► sign-extend to N+2
 vr_i ───────────►  (2 stages)     ──► mExp ─────────────┐         │
                                                          │   ITER CORDIC stages
                                                 delay ITER│   (1 per clock, σ per stage)
                                                          ▼         │
                          output converter (3 stages) ◄───┴─────────┘
                                   │
                        x_o, y_o (FP), vr_o
```

## Using the unit

Top module: `fp_givens_rotator` (ports `clk`, `rst_n`, `vr_i`, `x_i`, `y_i`,
`vr_o`, `x_o`, `y_o`). The design has no handshake. Every clock accepts one
pair and delivers one pair, after a latency of `2 + ITER + 3` clocks (29 at
the defaults).

To rotate two rows of `e` elements, send them on `e` consecutive clocks:

1. Send the leading pair (the pivot element and the element to be zeroed)
   with `vr_i = 1`. It comes out as `(K·r, ≈0)`, where `r` is the length of
   the pair.
2. Send the other `e-1` pairs with `vr_i = 0`. Each comes out rotated by the
   same angle and multiplied by `K`.

The next row pair may start on the very next clock. `vr_o` is `vr_i` delayed
by the latency, so it marks which outputs belong to a new angle.

Things the caller has to know:

* **CORDIC gain.** Outputs are multiplied by
  `K = ∏ sqrt(1 + 2^-2i) ≈ 1.6468`, and the unit does not compensate for it.
  Divide by `K` where you use the results, or fold it into a later multiply.
* **Angle range.** The stage direction is decided by the sign of Y alone. A
  vectoring pair therefore converges only if its angle lies within about
  ±99.7° of the +X axis. Keeping the pivot X non-negative is always enough.
  A QR scheduler can negate the pivot row when its leading element is
  negative; negating a row is itself an orthogonal step.
* **Operand format.** Operands are `{sign, E-bit biased exponent, M-1
  fraction bits}` with a hidden leading one (IEEE single at the defaults). An
  exponent field of 0 means zero. Subnormals, infinities and NaNs are not
  handled. Results that underflow are flushed to +0. Results that overflow
  saturate to the largest finite number of their sign.
* **HUB operands.** In the HUB build, inputs and outputs are HUB numbers: the
  value of a word is its IEEE reading plus half a unit in the last place. To
  feed the HUB unit from ordinary floats, truncate their significands. Their
  nearest HUB value is then the truncated one.

## Parameters

| Parameter  | Default | Meaning |
|------------|---------|---------|
| `HUB`      | 1  | 1: HUB build, 0: conventional build |
| `E`        | 8  | exponent field width |
| `M`        | 24 | significand width, hidden one included (the format has `M-1` fraction bits) |
| `N`        | 26 | internal significand width: 1 sign bit, 1 integer bit, `N-2` fraction bits |
| `ITER`     | 24 | number of CORDIC microrotations (= pipeline stages of the core) |
| `IN_ROUND` | 0  | conventional build: 1 rounds the aligned significand to nearest-even, 0 truncates |
| `UNBIASED` | 1  | HUB build: unbiased extension in both converters |
| `DETECT_I` | 1  | HUB build: exact handling of ±1.0 operands (identity-matrix elements) |

The defaults are the single-precision HUB configuration with N = 26 and 24
microrotations (N − 2). The conventional build is best run with N − 3
microrotations. For the same accuracy it needs about one more internal bit:
N = 27 with 24 microrotations. Rounding at its input gains nothing
measurable over truncation (see the variant comparison below). The CORDIC core works
on `N + 2` bits. The two extra integer bits hold the growth caused by `K` and
by the vector length: |X|,|Y| < 2 at the input, so the output is < 2·√2·K < 8.

Half and double precision need only different `E`, `M`, `N` and `ITER`
values. Both of these HUB builds are simulated:

* half precision with `E=5, M=11, N=13, ITER=11`, latency 16 clocks;
* double precision with `E=11, M=53, N=58, ITER=55`, latency 60 clocks.

The constraint is `N > M`.

## Number formats along the pipeline

This is the least obvious part of the design, so here is every step.

**Input converter** (`fp_in_conv_ieee`, `fp_in_conv_hub`). The significand,
with its hidden one restored, gets a sign bit in front and `N-M-1` bits
behind, forming an N-bit word with value in (−2, 2).

* Conventional build: the word is the two's complement of the significand,
  with zeros behind.
* HUB build: the word is the bitwise inverse of the significand when the sign
  is set. The bits behind replace the operand's implicit half-LSB:
  * `1000…` is the biased rule: the old implicit bit becomes explicit.
  * With `UNBIASED=1`, the rule is `1000…` if the operand's fraction LSB is 1
    and `0111…` if it is 0. This uses that bit as a free random source, so the
    new implicit bit rounds up or down half of the time.
  * With `DETECT_I=1`, an operand of exactly ±1.0 (exponent `011…1`, fraction
    0) gets zeros instead. This keeps the ones of an identity matrix exact,
    which matters when Q is computed.

Both exponent differences, ExpX−ExpY and ExpY−ExpX, are formed in parallel.
The sign of the first one selects:

* the common exponent (the larger of the two);
* which word goes through the right shifter;
* which difference is the shift distance.

The shifter outputs zero when the distance exceeds N. The conventional build
either truncates the shifted word or rounds it to nearest-even with a guard
bit and a sticky bit. In the HUB build, truncation is already
round-to-nearest.

**CORDIC stage** (`cordic_stage`). Stage `i` computes

```
dir = vr ? sign(Y) : σ          (σ ← sign(Y) when vr = 1)
dir = 0:  X' = X + (Y >>> i),   Y' = Y − (X >>> i)
dir = 1:  X' = X − (Y >>> i),   Y' = Y + (X >>> i)
```

In the HUB build, the shifted operand is formed on W+1 bits with the implicit
1 appended *before* shifting. It is inverted when it must be subtracted. Its
top W bits go to the adder and its LSB goes to the carry-in. The other
operand's implicit bit is always 1, so this LSB is the only carry that the
dropped extra adder bit could produce. Truncating the sum to W bits rounds
the shifted operand to nearest rather than chopping it. This is why the HUB
core reaches the accuracy of a conventional core that is one bit wider.

**Output converter** (`fp_out_conv_ieee`, `fp_out_conv_hub`). The MSB of
each W-bit word is the result sign. The magnitude (two's complement negation,
or inversion for HUB) is normalized by `fp_normalize`, a leading-one detector
plus left shifter. The exponent becomes `common exponent + 2 − shift`; the
`+2` is the weight of the top magnitude bit, one of the two added integer
bits.

* Conventional build: the top M bits are rounded to nearest-even from a guard
  bit and a sticky bit. A carry out of the significand increments the
  exponent.
* HUB build: the word's implicit bit is made explicit before the shift. It is
  `1000…` behind the magnitude, or with `UNBIASED=1` the magnitude's LSB
  followed by its inverse. The top M bits are then simply kept. There is no
  rounding adder and no significand overflow.

## Departures from the described design, and choices made here

* The figure of the converters pads the significand with `n−m` bits, while
  the text says `n−m−1` after prepending the sign. Here the significand width
  `M` counts the hidden one, the sign is added in front, and `N−M−1` bits
  follow, for N bits in total.
* The exponent of an output gets `+2` for the two integer bits the core adds.
  The text only says "common exponent minus the shift" because its figures
  show a core without those bits.
* Under- and overflow logic is not drawn in the source figures. Underflow
  flushes to +0, as stated in the text. Overflow saturating to the largest
  finite value, and a zero magnitude giving +0, are choices made here; the
  HUB converter follows the same rules.
* Zero operands are recognized by a zero exponent field. Their fixed-point
  word is all zeros, in the HUB build too.
* How the logic is split across the 2 input and 3 output pipeline stages is a
  choice made here. The stage counts themselves are the described ones.
* Each CORDIC stage registers its outputs rather than its inputs. The
  pipeline is the same.
* Registers holding data are not reset. Only the v/r pipeline and the σ
  registers are.
* Not included: compensation of the CORDIC gain, and the multi-rotator QR
  array the unit is meant to be part of. The QR testbench below schedules a
  single unit instead.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line.

| Testbench | What it checks |
|---|---|
| `tb_fp_normalize` | shift count and shifted value for every leading-one position and for zero |
| `tb_fp_in_conv_ieee` | truncating and rounding builds, bit-exact against `floor`/nearest-even of `v·2^(N−M−1)/2^d`; equal exponents, shifts beyond N, zeros; 2-clock latency |
| `tb_fp_in_conv_hub` | basic and full HUB builds, bit-exact against an integer model of inversion, extension and floor alignment; ±1.0 and zeros |
| `tb_cordic_stage` | both builds at shifts 0, 1, 5 and 17 against an arithmetic model (for HUB: `a ± ⌊(⌊(2b+1)/2^i⌋+1)/2⌋`), including σ reuse |
| `tb_fix_givens_rotator` | gap-free rows of 2–8 pairs; outputs within 48 LSB of `K·R(−θ)·v`, exactly ITER clocks later, for both builds |
| `tb_fp_out_conv_ieee` / `tb_fp_out_conv_hub` | bit-exact against integer models; rounding carry, underflow, saturation, zero; unbiased pattern; 3-clock latency |
| `tb_fp_givens_rotator` | default top, rows of e = 8, general, identity, tiny and huge rows; results within 2^−19 of double-precision math exactly 29 clocks later. It counts vectoring, rotation, X- and Y-alignment, shift-out-to-zero, ±1.0 and zero operands, underflow flush and saturation, and fails if any count is 0 |
| `tb_fp_givens_rotator_ieee` | the same for the conventional build (N = 27) |
| `tb_fp_givens_rotator_formats` | the same kind of end-to-end test for the half- and double-precision HUB builds, tolerance 2^−(M−5) |
| `tb_qrd_workload` | full Givens QR of random 4×4 and 7×7 matrices with entries of magnitude 2^±r, r = 1, 5, 10, 20, 30, 40; SNR of `Q·R` against `A` |
| `tb_qrd_variants` | the same 4×4 QR run in lock step through six builds: the four HUB options and conventional truncation and rounding at N = 26 |

In the QR tests, two steps are done by the testbench rather than the unit.
It negates a pivot row with a negative leading element, and it divides out
`K`. The SNR is `10·log10(Σa² / Σ(a − b)²)` for `B = Q·R` against the input
`A`.

Measured QR accuracy with the default HUB unit, 100 matrices per group:

* 4×4: 135.6–136.5 dB;
* 7×7: 132.3–133.2 dB.

This holds for every r from 1 to 40, so the accuracy does not depend on the
dynamic range of the data. The pass threshold in the testbench is 120 dB.

Mean SNR of the six builds over 1000 4×4 matrices (r = 1, 5, 10, 20), at
N = 26:

| HUB basic | HUB unbiased | HUB identity detection | HUB full | conventional, truncating | conventional, rounding |
|---|---|---|---|---|---|
| 134.1 dB | 135.7 dB | 135.1 dB | 135.7 dB | 131.4 dB | 131.5 dB |

At the same internal width, the HUB builds are about 4 dB more accurate than
the conventional ones. Unbiased extension and identity detection each help
the basic HUB build. Together they give no more than unbiased extension
alone.

## Simulating

With Verilator 5 (any testbench; replace the name):

```
verilator --binary --timing -Irtl -Itb rtl/givens_pkg.sv tb/tb_fp_givens_rotator.sv \
          --top-module tb_fp_givens_rotator -Mdir obj -o sim && obj/sim
```

The module files are found by name through `-Irtl`. Every simulation runs in
about a second or less.

## Files

* `rtl/givens_pkg.sv`: default widths, stage counts, and the v/r encoding.
* `rtl/fp_givens_rotator.sv`: the top.
* `rtl/fp_in_conv_ieee.sv`, `rtl/fp_in_conv_hub.sv`: input converters.
* `rtl/fix_givens_rotator.sv`, `rtl/cordic_stage.sv`: the CORDIC core.
* `rtl/fp_out_conv_ieee.sv`, `rtl/fp_out_conv_hub.sv`, `rtl/fp_normalize.sv`:
  output converters.
* `tb/`: the testbenches listed above.
