# EULER-ADAS neural compute engine: SIMD bounded-posit MAC with logarithmic multipliers

This design is a multiply-accumulate engine for neural-network inference. It
has one datapath that runs in three precisions. A 32-bit operand word holds one
of the following:

- four 8-bit posits, Posit-(8,0);
- two 16-bit posits, Posit-(16,1);
- one 32-bit posit, Posit-(32,2).

For every lane the engine computes either `q = a*b + c` or `q = q + a*b`. Here
`q` is a lane of a 128-bit quire: a wide fixed-point accumulator that is rounded
only when a result is read out.

Three ideas keep the engine small:

1. **Bounded posits.** The regime field of each format is limited to R bits, so
   decoding and encoding become short, fixed-depth logic instead of a leading-bit
   count followed by a shift.
2. **Approximate significand products.** Significands are multiplied by an
   *iterative logarithmic multiplier* (ILM). It needs no partial-product array.
   Before the multiply, each significand is cut to its m most significant bits.
3. **One SIMD datapath.** Every wide vector in the datapath is split into four
   32-bit segments. The precision mode only decides how many segments form one
   lane. So the two's-complement units, the leading-zero counter, the barrel
   shifter and the quire adder serve all three precisions.

Only the product is approximate. Decoding, alignment, accumulation, rounding and
encoding are exact.

## 1. Bounded posits

A posit word `bPosit(N, ES, R)` is laid out as sign, regime, exponent (ES bits)
and fraction. The regime is a run of equal bits. A run of `m` bits that is
shorter than R is closed by one opposite bit, so the field is `m+1` bits wide. A
run that reaches R bits stops there with no closing bit, so the field is R bits
wide. The regime value `k` is:

- `m-1` for a run of ones;
- `-m` for a run of zeros.

So `k` lies in `[-R, R-1]`. The value of the word is
`(-1)^s * 2^(k*2^ES + e) * 1.f`.

Negative numbers are stored as the two's complement of the whole word. The word
`0` is zero. The word `100...0` is NaR ("not a real").

| Mode | N  | ES | R (default) | Fraction bits when the regime is shortest | Scale range |
|------|----|----|-------------|--------------------------------------------|-------------|
| P8   | 8  | 0  | 2           | 5 (`FW`)                                   | -2 .. 1     |
| P16  | 16 | 1  | 3           | 12                                         | -6 .. 5     |
| P32  | 32 | 2  | 5           | 27                                         | -20 .. 19   |

Bounding the regime narrows the dynamic range. In exchange, a bit flip in the
regime can move a value by only a few binades. The three values of R are the
smallest that the accuracy studies behind this design found sufficient.

## 2. Decoding without negation (`bposit_decoder`, `simd_bposit_decoder`)

A textbook posit decoder negates a negative word before it reads the fields.
This decoder never negates:

- **Regime.** The first R regime bits are compared with the first regime bit.
  NOT/AND terms turn the result into a one-hot run length. A priority encoder
  turns the one-hot word into the run count. The same one-hot word drives a
  small multiplexer that left-aligns the exponent and fraction.
- **Sign correction.** The regime polarity and the exponent bits are XORed with
  the sign bit. For a negative word this gives the scale of its magnitude.
- **Significand.** For a negative word the raw fraction bits read `f`, but the
  magnitude's significand is `2 - f`. When `f` is zero that is exactly 2.0. The
  decoder then outputs significand 1.0 and adds one to the scale (a carry the
  figures call `exp_cin`).

The result is exact. The decoder outputs sign, zero and NaR flags, a signed
scale `sf` (8 bits, `euler_pkg::SFW`), and `mant`. `mant` is `1.f` with its
leading one at bit `FW`.

`simd_bposit_decoder` places four 8-bit, two 16-bit and one 32-bit decoder on
the same word, and the mode selects which set drives the outputs.

Significands are output in *lane layout*: lane `j` of width `LW` (8, 16 or 32)
sits at `[LW*j +: LW]`. The same layout is used for the multiplier operands.

## 3. The approximate multiplier (`ilm_core`, `simd_ilm`)

The ILM is a repeated Mitchell approximation. Write `x = 2^kx + xr` and
`y = 2^ky + yr`, where `2^kx` and `2^ky` are the leading ones. Then:

```
x*y = 2^(kx+ky) + xr*2^ky + yr*2^kx + xr*yr
```

One ILM stage adds the first three terms to the product. It needs two
leading-one detectors, two shifters and an adder. It then passes `xr` and `yr`
to the next stage, which approximates the missing `xr*yr` in the same way.

After `n` stages the relative error is at most about `2^(-2n)`. If a residue
becomes zero, the product is exact and later stages add nothing. `ilm_core`
builds `NS` stages unrolled. A run-time input `nstages` enables the first `n`
of them.

Before the multiply, each significand is **truncated**: only its `T` most
significant bits are kept, counting from the leading one, and the rest are
cleared. Fewer bits shorten the residue chain and save power, at the cost of a
second error term of about `2^(-T)`.

The defaults are the bounded variant called L-21b:

| Mode | ILM stages (`NS8/16/32`) | Retained bits (`T8/16/32`) |
|------|--------------------------|----------------------------|
| P8   | 3                        | 4                          |
| P16  | 6                        | 8                          |
| P32  | 12                       | 16                         |

Other published variants use 2/4/8 stages and 5/10/20 retained bits. Set the
parameters to get them. `T = 0` disables truncation.

`simd_ilm` shares four cores among the lanes:

- one 32-bit core handles lane 0 in every mode;
- one 16-bit core handles lane 1 in P8 and P16;
- two 8-bit cores handle lanes 2 and 3 in P8.

Each core gets the stage count of the current mode. The products come out on
the diagonal of a 64-bit word: lane `j` sits at `[2*LW*j +: 2*LW]`. So P32's one
56-bit product, P16's two 26-bit products and P8's four 12-bit products all use
one bus.

## 4. SIMD lanes

Every wide vector is split into four segments. A lane is one, two or four
segments.

| Vector                | Width | P8 lanes | P16 lanes | P32 lanes |
|-----------------------|-------|----------|-----------|-----------|
| operand word          | 32    | 4 x 8    | 2 x 16    | 1 x 32    |
| product word          | 64    | 4 x 16   | 2 x 32    | 1 x 64    |
| quire and its datapath | 128  | 4 x 32   | 2 x 64    | 1 x 128   |

The 128-bit blocks are:

- **`simd_twos_comp`**: XORs each segment with its lane's negate flag and adds
  a carry. A segment that starts a lane takes the flag as its carry in. The
  other segments take the carry out of the segment below.
- **`simd_quire_adder`**: four segment adders. The carry is cleared wherever a
  lane starts.
- **`simd_shifter`**: a log-stage left shifter with one shift amount per lane.
  Bits that would cross into the next lane are cleared.
- **`simd_lzc`**: one leading-one detector per segment, producing a valid bit
  (VM) and a count (CM). These are merged pairwise: the upper count if the upper
  segment is valid, otherwise the segment width plus the lower count. The result
  is counts for 64-bit and 128-bit lanes.

## 5. The quire

Each quire lane is a two's-complement fixed-point number with `QF` fraction
bits. `euler_pkg` computes the layout from the lane width `QW`, `FW` and R:

```
pmag = 2 * R * 2^ES                          -- lowest product scale is -pmag
drop = max(0, 2*FW + 2 + 2*pmag - (QW - 1 - 5))
QF   = 2*FW - drop + pmag
```

A product of two significands has `2*FW` fraction bits. Its scale
`sfa + sfb` lies in `[-pmag, pmag-2]`. The product is placed at bit position
`sfa + sfb + pmag`, so the smallest possible product still lands on whole bits.
The addend `c` is placed at `sf_c - FW + QF`.

The term `5` leaves five bits of headroom above the largest product. So a lane
can sum at least 32 products of maximum size before it wraps. Overflow wraps
modulo the lane width; it does not saturate.

| Mode | QW  | QF | pmag | Product bits dropped |
|------|-----|----|------|----------------------|
| P8   | 32  | 14 | 4    | 0                    |
| P16  | 64  | 36 | 12   | 0                    |
| P32  | 128 | 80 | 40   | 14                   |

Only in P32 does the full range not fit exactly. The 14 lowest product bits are
dropped there. With 16 retained bits per operand those bits are zero anyway, so
no information is lost at the defaults.

Rounding happens only when a result is read out. The quire itself is never
rounded, so a long accumulation picks up no intermediate rounding error.

## 6. Pipeline, interface and operations (`euler_nce`)

```
      in regs   S1        S2             S3              S4            S5             S6
vec_a --+--> decode --> sign XOR   --> place in lane --> select c/q --> |q|, LZC   --> round
vec_b --+--> decode --> scale add  --> two's compl. --> quire add  --> normalise  --> encode --> vec_res
vec_c --+--> decode --> SIMD ILM   --> SIMD shift       quire reg     result scale
```

- **Latency.** The input register is followed by six stage registers. An
  operation presented with `in_valid` at clock cycle C appears with `out_valid`
  at cycle C+7.
- **Throughput.** A new operation is accepted every cycle. Nothing stalls.
- **Back-to-back accumulation.** The quire register is written in S4 and read
  in S4. So a MAC that follows a MAC on the same lanes sees the previous sum
  with no bubble.
- **Operations.** `in_op = OP_FMA` computes `q = a*b + c`, and `c` is decoded
  like the other operands. `in_op = OP_MAC` computes `q = q + a*b` and ignores
  `c`. Either way the new `q` is written back, and `vec_res` is `q` rounded to
  the lane format.
- **Modes.** `in_mode` is one of `MODE_P8`, `MODE_P16` or `MODE_P32`, and it
  may change on any cycle. The quire bits are simply reinterpreted in the new
  lane split. A stream that changes mode should therefore start with an FMA.
  Use `c = 0` to start from zero.
- **NaR.** A lane that sees a NaR operand returns NaR, and `out_nar[j]` is set.
  For MAC, a NaR stays in the quire lane until the next FMA on that lane.
- **Zero and saturation.**
  - A zero quire lane gives zero.
  - A non-zero result below the smallest posit gives the smallest posit
    (minpos).
  - A result above the largest posit gives the largest posit (maxpos).
  - A non-zero value never rounds to zero or NaR.
- **Reset.** `rst_n` is asynchronous and active low. It clears the valid bits,
  the quire and the NaR flags.

**Stage S5.** For each lane it takes:

- the sign of the quire lane;
- the magnitude, from `simd_twos_comp`;
- the leading-zero count, from `simd_lzc`;
- the magnitude shifted left until its leading one is at the top of the lane
  (`simd_shifter`).

The result scale is `QW - 1 - lzc - QF`.

**Stage S6** holds four 8-bit encoders (32-bit magnitude input), two 16-bit
encoders (64-bit) and one 32-bit encoder (128-bit). The mode selects which set
drives the output.

## 7. Rounding and encoding (`bposit_encoder`)

The scale splits into a regime `r = sf >> ES` and an exponent
`e = sf mod 2^ES`. Since `r` can take only 2R values, the regime string is
built directly: R bits, left-aligned. The exponent and fraction are then shifted
in behind it by `R - regime width`. This is the "parallel candidates plus a
small multiplexer" structure of a bounded-posit encoder.

The N-1 bits after the sign are rounded to nearest, ties to even, using:

- the guard bit (the first bit that is dropped);
- a sticky OR of every bit below it.

Scales outside the bounded range saturate to maxpos or minpos. The sign is
applied last, by a two's complement of the word.

The top bit of `mant` is always the leading one. Only the bits below it are
encoded, so lint reports `mant[MW-1]` as unused. That is expected.

## 8. Where this design departs from the published description, or fills gaps

- **Accumulation adder.** The published accumulation stage is drawn as an adder
  tree over sixteen 8-bit partial products, with shift amounts that depend on
  the mode. An ILM produces no partial products. Here the product is accumulated
  by a segmented 128-bit adder that does the same lane-partitioned job. That
  tree is therefore not reproduced literally.
- **No `sf comp` or `operand align & swap` units.** The datapath drawing shows
  a scale comparison and an operand alignment-and-swap unit. A fixed-point quire
  does not need them, because both the product and the addend are shifted to
  their own absolute position. They are not built.
- **Latency.** The text speaks of six pipeline stages, and the drawing has
  seven register boundaries. Counting the input register, this design has seven
  registers, so the latency is 7 cycles.
- **R for Posit-32.** The text gives R = 5. The decoder drawing shows six
  regime bits and five multiplexer inputs for the 32-bit case, which would fit
  R = 6. R = 5 is used. It is a parameter (`R32`).
- **Truncation width.** One sentence says "m bits after the leading one" and
  another "the m most significant bits". The second reading is used: the leading
  one counts as one of the m bits.
- **Panels (b) and (c) of the circuit figure.** The figure caption assigns the
  two's complement to panel (b) and the leading-zero detector to panel (c). The
  printed panels appear the other way round. Only the function of each block is
  built, not its gate network.
- **Sharing of decoders and ILMs.** The description says the decoders are
  resource-shared but does not show how. Here all seven per-format decoders sit
  on the word and a multiplexer chooses. The ILM is split into 32/16/8/8-bit
  cores as described in section 3.
- **Choices made where the description is silent.** These are this design's
  own:
  - the quire layout and headroom;
  - the op set and handshake (`in_valid`/`out_valid` with no back-pressure);
  - sticky NaR;
  - asynchronous reset;
  - the saturation rules. The description only refers to the Posit standard's
    special-case handling.
- **One mode for all operands.** The datapath drawing gives each operand
  decoder its own control input. Here one `in_mode` applies to all three
  operands, because the lanes of `a`, `b` and `c` must line up anyway.
- **Throughput figures.** Published ASIC throughput corresponds to about 40,
  19 and 4 operations per cycle in P8, P16 and P32. One engine as built gives
  8, 4 and 2 (two operations per lane per cycle). How the published figures
  were counted is not stated.
- **Not built: the surrounding SoC.** This engine is one processing element.
  The following parts are not built:
  - the SoC around it: host processor, interconnect, weight, input and output
    memories, a systolic array of these engines, and its controller;
  - the FPGA system used for the object-detection demonstration.

## 9. Files

| File | Contents |
|------|----------|
| `rtl/euler_pkg.sv` | modes, ops, lane-info struct, lane geometry and quire layout functions |
| `rtl/bposit_decoder.sv` | one bounded-posit decoder |
| `rtl/simd_bposit_decoder.sv` | SIMD operand decoder |
| `rtl/ilm_core.sv` | n-stage iterative logarithmic multiplier |
| `rtl/simd_ilm.sv` | truncation and shared ILM cores |
| `rtl/simd_twos_comp.sv`, `simd_lzc.sv`, `simd_shifter.sv`, `simd_quire_adder.sv` | 128-bit SIMD building blocks |
| `rtl/bposit_encoder.sv` | rounding and bounded-posit encoding |
| `rtl/euler_nce.sv` | the engine (top) |
| `tb/euler_ref_pkg.sv` | independent reference model |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_euler_nce_knobs.sv` | engine test with 2/4/8 stages and 5/10/20 retained bits |
| `tb/tb_euler_dense.sv` | dense-layer workload on the engine, with an accuracy measurement |

## 10. Verification and simulation

The reference model (`tb/euler_ref_pkg.sv`) is written independently of the
RTL:

- its decoder negates the word and scans it bit by bit;
- its ILM is a plain loop;
- its encoder finds the result by a binary search over posit patterns,
  comparing exact 256-bit fixed-point values, and never builds the bit string.

Testbenches:

- The unit testbenches drive random and corner-case vectors. The decoder is
  checked exhaustively for 8 and 16 bits.
- `tb_euler_nce` runs the top at its default parameters. It drives 4000 random
  operations with:
  - all three modes and mode switches;
  - FMA and back-to-back MAC;
  - idle cycles;
  - zero and NaR lanes.

  It checks every lane of every result and the exact 7-cycle latency. It counts
  how often each mechanism occurred: truncation that changed a significand,
  inexact ILM products, rounding, maxpos/minpos saturation, negative and zero
  results, and NaR. If any count is zero, the test fails.

`tb_euler_nce_knobs` repeats the engine test with the other published setting:
2/4/8 ILM stages and 5/10/20 retained bits.

`tb_euler_dense` runs a 16x16 fully connected layer in each mode as chains of
MACs, the access pattern of a neural-network layer. It checks every result bit
for bit against the reference model. It also measures the error against exact
arithmetic on the same posit inputs, divided by the sum of the product
magnitudes. Typical largest values are about 0.05 in P8, 0.004 in P16 and below
1e-5 in P32.

All testbenches pass. Each prints `TB_RESULT checks=<n> failures=<n>`.

To run one testbench with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl \
    rtl/euler_pkg.sv tb/euler_ref_pkg.sv tb/tb_euler_nce.sv \
    --top-module tb_euler_nce -Mdir obj_tb_euler_nce
./obj_tb_euler_nce/Vtb_euler_nce
```

Replace `tb_euler_nce` with any other `tb_<module>`. The engine test compiles in
seconds and runs in well under a second.

To change the arithmetic, override the top's parameters. `R8/R16/R32` set the
regime bounds, `NS8/NS16/NS32` the ILM stages and `T8/T16/T32` the retained
bits. The quire layout follows from them automatically. If you change a
default, the reference model in `tb_euler_nce` must be given the same values:
see its functions `r_of`, `ns_of` and `t_of`.
