# TransDot: one FP32 FMA datapath for SIMD FMA and trans-precision dot products

AI workloads multiply in low precision and accumulate in high precision. A conventional
multi-format FMA unit has two options here. It can run an FP16 or FP8 product into an FP32
accumulator one element per cycle. Or it can replicate narrow FMA lanes for SIMD, which
cannot accumulate into FP32 at all. TransDot takes a different route. It starts from a
single FP32 fused multiply-add (FMA) datapath and makes its big pieces *reconfigurable*:
the 24x24 significand multiplier, the 100-bit alignment shifter, the 76-bit adder and the
normalization shifter. Each can work as one wide unit, as two halves or as four quarters.
The multiplier can also align, negate and add its own partial products, and so produces
the sum of a short dot product.

With this, one pipeline issues one of the following every cycle:

| `fmt` | `mode` | Operation | Result |
|---|---|---|---|
| FP32 (E8M23) | any | `A*B + C` | FP32 |
| FP16 (E5M10) | SCALAR | lane 0: `A0*B0 + C0` | FP16 in `[15:0]` |
| FP16 | SIMD | 2 lanes: `Ai*Bi + Ci` | 2 x FP16 |
| FP16 | DPA32 / DPA16 | `A0*B0 + A1*B1 + C` | FP32 / FP16 |
| FP8 (E4M3) | SCALAR | lane 0 | FP8 in `[7:0]` |
| FP8 | SIMD | 4 lanes | 4 x FP8 |
| FP8 | DPA32 / DPA16 | 4-term dot product + C | FP32 / FP16 |
| FP4 (E2M1) | SCALAR | lane 0 | FP4 in `[3:0]` |
| FP4 | SIMD | 8 lanes | 8 x FP4 |
| FP4 | DPA32 / DPA16 | 8-term dot product + C | FP32 / FP16 |

`op` applies the usual FMA sign variants: FMADD, FMSUB (−C), FNMSUB (−A·B), FNMADD. In a
dot product the product negation applies to every term. The latency is 4 cycles and the
throughput is one operation per cycle in every mode.

## Interface (`transdot`)

| Port | Width | Meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; asynchronous active-low reset |
| `in_valid` | 1 | an operation is issued this cycle (there is no back-pressure) |
| `a`, `b`, `c` | 32 each | operand words. Element *i* is at `[16i+15:16i]` (FP16), `[8i+7:8i]` (FP8) or `[4i+3:4i]` (FP4). In dot products `c` is a single FP32 value, or an FP16 value in `[15:0]` |
| `fmt` | 2 | 0 FP32, 1 FP16, 2 FP8, 3 FP4 |
| `mode` | 2 | 0 SCALAR, 1 SIMD, 2 DPA32 (accumulate in FP32), 3 DPA16 (accumulate in FP16) |
| `op` | 2 | 0 FMADD, 1 FMSUB, 2 FNMSUB, 3 FNMADD |
| `out_valid`, `result` | 1, 32 | the result, exactly 4 cycles after `in_valid`. Unused upper bits are zero |

Types and encodings live in `td_pkg`.

## Arithmetic conventions

- FP32, FP16 and FP8 E4M3 are treated IEEE-style: an all-ones exponent is Inf (mantissa 0)
  or NaN. This is *not* the OCP "E4M3FN" variant, so the largest FP8 value is 240.
- FP4 E2M1 follows the OCP microscaling definition. Its bias is 1, its values are
  ±{0, 0.5, 1, 1.5, 2, 3, 4, 6}, and it has no Inf or NaN. Because of that, an FP4 FMA
  result beyond 6 saturates to ±6.
- Rounding is round-to-nearest-even only, and no exception flags are produced.
- Subnormal inputs and outputs are fully supported. Overflow gives ±Inf.
- NaN inputs, Inf·0 and Inf−Inf give the canonical quiet NaN of the result format
  (`7fc00000`, `7e00`, `7c`). Infinities propagate with their sign.
- An FMA is rounded once, like a true fused multiply-add.
- An exact zero sum is +0. The exception is an FMA whose product and addend are both −0.

**Dot-product rounding.** A dot product is *not* exactly rounded in every case. Inside the
multiplier, every product is shifted right so that it lines up with the largest one. It is
then truncated to a fixed window: bits worth less than 2^(emax−23) (FP16 terms) or
2^(emax−35) (FP8 terms) are dropped, where 2^emax is the weight of the largest product's
LSB. The sum is rounded once, after the addend is added. FP4 dot products are exact up to
that final rounding. This behaviour is typical of fused dot-product units, and the
testbench models it explicitly.

## Pipeline

```
 in regs ─► unpack/classify ─► exponent datapath ─► multiplier front ║ multiplier back ─► align+add ║ normalize ─► round/pack ║ out regs
   (r1)      FP4 DP2 (in parallel)                   (partial products)║ (shift/neg/mux/add)          ║ (r3)                   ║
                                                                     (r2 / multiplier register)
```

There are four register stages. They sit after the inputs, inside the multiplier (together
with a side register `r2` for the values that bypass it), after the adder, and at the
output. Every mode therefore has the same latency of 4 cycles, and a new operation can
enter every cycle.

## The blocks

### Reconfigurable barrel shifter (`reconfig_shifter`)
This is a log2(N)-stage mux barrel shifter with `N` = 100 for the alignment shift and 80
for normalization. Its `mode` input selects the partition:

- `00`: one N-bit lane;
- `10`: two N/2-bit lanes;
- `11`: four N/4-bit lanes.

Each lane takes its shift amount from the `sh` entry of its lowest quarter. Two changes
turn a plain barrel shifter into a partitioned one:

- a bit that would cross a lane boundary is replaced by 0;
- a stage whose distance is at least the lane width is bypassed.

The `LEFT` parameter selects the direction.

### Multi-mode multiplier (`mm_multiplier`)
The 24-bit significands are split into four 6-bit segments a3..a0 and b3..b0. The
multiplier forms these partial products once:

- eight 12-bit products: a0b0, a0b1, a1b0, a1b1, a2b2, a3b2, a2b3, a3b3;
- two 24-bit products: {a3,a2}·{b1,b0} and {a1,a0}·{b3,b2}.

Gates zero the cross terms a format does not need. Two 24-bit adders combine the low four
and the high four partial products. Four multiplexers then feed one 50-bit adder:

- **FP32.** Everything enters, and the adder output is the 48-bit product.
- **SIMD.** The cross terms are gated. The output holds 2 FP16 products (11x11 bits, at
  `[23:0]` and `[47:24]`) or 4 FP8 products (4x4 bits, at `[12i+7:12i]`).
- **DPA.** Each term is placed with its MSB at bit 46, shifted right by its alignment
  distance `sh_i`, and negated if its sign says so. The 50-bit adder then produces the
  two's-complement dot-product sum. The terms are the four a_i·b_i products for FP8, or
  the two 24-bit sums for FP16. The four FP4 DP2 results enter at `[44:36]` without a
  shift.

The multiplier's internal register (`PIPE = 1`) sits after the partial-product and 24-bit
sums.

### FP4 two-term dot products (`fp4_dp2`)
Four small units each compute `|a[2j]·b[2j] + a[2j+1]·b[2j+1]|` as a 9-bit magnitude in
units of 1/4, together with its sign. Each element is decoded to a 4-bit magnitude in units
of 1/2. The two 4x4 products are then added or subtracted in sign-magnitude form. FP4
products never need alignment, so these four results go straight into the multiplier's DPA
adder.

### FP4 FMA lanes (`fp4_simd_fma`)
Eight FP4 FMAs would need eight lanes, and the shared shifters and adder have four at
most. This is no obstacle, because FP4 is tiny: `A*B + C` is always an exact multiple of
0.25 with magnitude at most 42. The exact products come from `fp4_dp2`. Each lane adds its
addend in sign-magnitude form and rounds the integer sum (in quarter units) to FP4 by
comparing it with the midpoints 1, 3, 5, 7, 10, 14 and 20. A sum exactly on a midpoint
goes to the neighbour with an even mantissa bit. The result is computed in the first stage
and travels beside the main datapath, so the latency stays 4 cycles. During such an
operation the main datapath runs an FP4 dot product whose result is discarded.

### Input processing and classification (`td_unpack`)
This stage does the following:

- It decodes every element into a sign, a significand with its hidden bit, and an
  *LSB exponent*: the weight of the significand's last bit, so the value is
  `sig·2^lsb`. Using LSB exponents lets the same arithmetic serve every format.
- It places the significands into the multiplier's segment layout.
- It decodes the addend lanes in the result format. For FP16 accumulation, the addend is
  moved to the top of the 24-bit slot.
- It applies `op` as sign flips.
- It resolves NaN and Inf cases per lane into a replacement value.

### Exponent datapath (`td_exp_dp`)
For dot products, this block finds the largest exponent among the nonzero products. It
gives each product its distance to that maximum as the 6-bit `sh_i`, saturated at 63.

Per lane, it computes the addend alignment shift `s = PA + Ep0 − Ec0`, clamped to
`[0, WP]`. Here:

- `Ep0` is the weight of bit 0 of the product field;
- `PA` is the addend's LSB position when the addend is unshifted: 52, 27 or 15 for full,
  half or quarter lanes;
- `WP` is the lane's window width: 76, 38 or 19.

The block also outputs the window weight. A zero product leaves the addend unshifted.

### Alignment shifter and adder (`td_align_add`)
The addend sits at the top of its lane in the 100-bit shifter. It is shifted right by `s`.
The upper 3p+4 bits of the lane (76/38/19) form the window. The bits below the window are
ORed into a sticky bit.

The window is added to the product field in a 76-bit adder (`seg_adder`). This adder splits
into 38- or 19-bit lanes: spacer bits, set to 0 or 1 per partition, stop or pass the carry.
An effective subtraction adds the complemented window with carry-in = ¬sticky. If the result
is negative, it is complemented again, and incremented only when sticky is 0. This gives
the exact magnitude while the sticky bit still describes the discarded remainder. The
magnitude is stored left-aligned in an 80-bit normalization field, using 80-, 40- or
20-bit lanes.

### Normalization (`td_normalize`)
A leading-one detector runs per lane. The top bit of the normalized lane receives the
weight `T = max(leading-one weight, emin)`. The lane is shifted left on an 80-bit
`reconfig_shifter` so that bit `T` ends up on top. Because of the clamp to `emin`,
subnormal results come out already denormalized, and no second shift is needed.

### Rounding and output (`td_round_pack`)
This stage rounds each lane to nearest-even using the round bit, the lower field bits and
the sticky bit. A carry out of the significand bumps the exponent. A significand without
its hidden bit becomes a subnormal, and an exponent at the top becomes Inf. The lanes are
then packed into the 32-bit result, and special values replace the lanes they belong to.

## Where this RTL departs from the published design

- **FP4 FMA.** The published format table lists 8-way FP4 SIMD FMA, but no datapath is
  published for it. Here it is built as eight small lanes fed by the FP4 product stage, as
  described above. Saturation on overflow is this design's choice.
- **Latency.** The published performance table gives 4 cycles for every operation, and
  this RTL does the same. The published summary instead describes an extra pipeline stage
  in dot-product mode compared with the baseline FMA.
- **Encodings.** Only the field widths (E8M23, E5M10, E4M3, E2M1) are published. The
  IEEE-style Inf/NaN handling of FP8 E4M3 and the OCP reading of FP4 are choices of this
  design.
- **The normalization shifter is 80 bits, not 3p+5 = 77,** so that it splits into equal
  quarters.
- **Internals that were not published are this design's own choices.** These include:
  - the bit positions of dot-product terms and their truncation;
  - where the multiplier's pipeline register sits;
  - the mapping of shift-amount inputs to shifter lanes;
  - the adder partitioning;
  - the special-case rules;
  - operand packing and the `op` encoding;
  - rounding (RNE only).

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against a model
written independently of the RTL, and each prints
`TB_RESULT checks=<n> failures=<n>`.

- `tb_transdot` runs 6000 random back-to-back operations over all formats, modes and ops
  on the top with default parameters. Each result is compared against an exact model: an
  arbitrary-width integer sum of all terms, rounded to nearest-even, with the dot-product
  truncation rule above. The testbench checks that every result arrives exactly 4 cycles
  after issue.
- It counts how often each mechanism occurred, and fails if any of them never did. The
  mechanisms are: each format/mode combination, cancellation, subnormal results,
  overflow, NaN results, a dominant addend, dot-product truncation, and FP4 saturation.
- The unit testbenches cover each block exhaustively or with tens of thousands of random
  vectors. `tb_td_unpack` includes directed special-case vectors. `tb_td_round_pack` places
  `td_normalize` in front of the rounder and checks ties, carries, subnormals and overflow.

Simulate one testbench with Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl rtl/td_pkg.sv tb/tb_transdot.sv --top-module tb_transdot
./obj_dir/Vtb_transdot
```

## Files

- `rtl/td_pkg.sv`: enums (`fmt_e`, `mode_e`, `op_e`, `part_e`), the exponent type, and
  format helper functions
- `rtl/transdot.sv`: the top and its pipeline
- `rtl/td_unpack.sv`, `rtl/td_exp_dp.sv`, `rtl/fp4_dp2.sv`, `rtl/fp4_simd_fma.sv`, `rtl/mm_multiplier.sv`,
  `rtl/td_align_add.sv`, `rtl/seg_adder.sv`, `rtl/reconfig_shifter.sv`,
  `rtl/td_normalize.sv`, `rtl/td_round_pack.sv`: the stages described above
- `tb/tb_<module>.sv`: one testbench per block
