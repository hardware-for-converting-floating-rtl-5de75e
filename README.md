# FP32 to MX block converter

A microscaling (MX) block stores a group of numbers as one shared 8-bit scale
`X` plus one small floating-point number per value. This converter takes 32
IEEE-754 single-precision numbers and produces such a block in one
combinational pass. It builds the shared scale from the largest input, then
rescales and rounds every input into a narrow element format. There is no
clock, no register and no memory. The outputs settle a fixed logic delay
after the inputs change.

The RTL follows the converter described in D. Gorodecky and L. Sousa,
"Hardware for converting floating-point to the microscaling (MX) format".
That description is terse and contradicts itself in several places. The
section *Where the description was ambiguous* lists every point where this
RTL had to choose. Read it before you rely on bit-exact behaviour.

## Number formats

An element type `EKMR` has 1 sign bit, `K` exponent bits and `R` mantissa
bits. Each converter instance is built for one type, chosen by the parameter
`FMT` (enum `mx_pkg::mx_fmt_e`).

| type | K | R | element bits | B = 2^(K-1)-1 | built here |
|------|---|---|--------------|---------------|------------|
| E5M2 (default) | 5 | 2 | 8 | 15 | yes |
| E4M3 | 4 | 3 | 8 | 7 | yes |
| E3M2 | 3 | 2 | 6 | 3 | yes |
| E2M3 | 2 | 3 | 6 | 1 | yes |
| E2M1 | 2 | 1 | 4 | 1 | yes |
| INT8 | 1 | 6 | 8 | 0 | shared scale only |

`B` is the largest element exponent. The largest element exponent field used
for finite values is `EMAX = 2^K - 2`: 11110 for E5M2, 1110 for E4M3, and so
on. The all-ones exponent field is kept for infinity and NaN, as in IEEE 754.

`X` is an 8-bit biased exponent. Two codes are special:

* `8'hFF` means the scale is NaN.
* `8'hFE` means infinity, without a sign.

## Data flow

```
 v[0..31] ──► mx_max_tree ──ev[30:0]──► mx_div ──x──► mx_private_elems ──► p[0..31]
    │        (31 × mx_comp, 5 levels)                 (32 × mx_pi)
    └─────────────────────────────────────────────────────►┘
```

`fp32_to_mx` is the top level. It wires the three stages together.

### Step 1: the largest input (`mx_max_tree`, `mx_comp`)

A binary tree of 31 two-input `mx_comp` cells compares v[0] with v[1], v[2]
with v[3], and so on. Each next level compares the winners of adjacent pairs.
After five levels one 32-bit word is left.

Each cell applies these rules:

| a exponent | b exponent | output |
|------------|------------|--------|
| 8'hFF | 8'hFF | 32'h0 |
| 8'hFF | other | b |
| other | 8'hFF | a |
| other | other | the word with the larger magnitude `[30:0]`; a on a tie |

An infinity or NaN input therefore never wins. The tree's result is the
largest finite input by magnitude, with its sign bit still attached. Only its
exponent and mantissa go on to step 2.

### Step 2: the shared scale (`mx_div`)

With `E = ev[30:23]`:

```
X = (E > B) ? E - B : 0          for E != 8'hFF
X = 8'hFF  if E == 8'hFF and the mantissa is non-zero   (NaN)
X = 8'hFE  if E == 8'hFF and the mantissa is zero       (infinity)
```

The largest input thus lands on the top element exponent `EMAX`. For
example, E5M2 with E = 171 gives X = 156.

Step 1 never selects an exponent-8'hFF word, so in the assembled converter
the two special codes cannot occur. `mx_div` and `mx_pi` still implement
them, and their own testbenches test them. For INT8 (B = 0), a finite E = 254
gives X = 8'hFE, the same code as infinity.

### Step 3: the private elements (`mx_pi`, 32 copies in `mx_private_elems`)

This is the least obvious part of the design. Each element unit sees only
the shared scale and the top `10+R` bits of its input: the sign S, the
exponent E, and the `R+1` leading mantissa bits. Everything below those bits
is ignored, so there is no sticky bit.

1. **Special scale.** If X is `8'hFF`, the output is `{S, all ones, NaN
   mantissa}`. The NaN mantissa is `10` for E5M2 and E3M2, `110` for E4M3 and
   E2M3, and `1` for E2M1. If X is `8'hFE`, the output is
   `{S, all ones, zeros}`.
2. **Distance from the top.** The unit computes
   `d = X + B - E` when S = 0, and `d = X + B + E` when S = 1. For a positive
   input, d is how many binades it lies below the block maximum. For a
   negative input the exponent is *added*, so d is large and the element
   flushes to zero unless both X and E are small. This sign-dependent form
   is what the source specifies and what its worked example computes (see
   below). It is not magnitude-symmetric quantisation.
3. **Flush.** If `d > EMAX`, the output is `{S, 0, 0}`, a signed zero.
4. **Above the range.** If `d < 0`, the output is
   `{S, all ones, NaN mantissa or 0}`. This happens only for an infinity or
   NaN input that step 1 skipped. The mantissa is zero when the visible
   mantissa bits are zero, and the NaN mantissa otherwise.
5. **In range.** The element exponent is `EK = EMAX - d`. The `R+1` mantissa
   bits are rounded to `R` bits, with half-way cases rounding up:
   `{c, MR} = (m + 1) >> 1`. For R = 2 this maps:

   | m | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
   |---|-----|-----|-----|-----|-----|-----|-----|-----|
   | MR | 00 | 01 | 01 | 10 | 10 | 11 | 11 | 00 + carry |

   A carry raises EK by one, with MR = 0. The exception is `EK = EMAX`: there
   the element saturates to `{S, EMAX, all ones}` rather than reaching the
   infinity exponent.

The sign bit of every element is the input's sign, copied through.

### Worked example (E5M2)

| input | sign | E | m | d | P |
|-------|------|---|---|---|---|
| V1 | 0 | 171 | 011 | 0 | 0 11110 10 |
| V2 | 0 | 168 | 110 | 3 | 0 11011 11 |
| V3 | 0 | 43 | 001 | 128 | 0 00000 00 (flush) |
| V4 | 1 | 143 | 001 | 314 | 1 00000 00 (flush, sign-dependent d) |

The other 28 inputs are zero. The largest exponent is 171, so
X = 171 - 15 = 156 = 10011100. `tb_fp32_to_mx` checks these values exactly.

## Where the description was ambiguous

Each item gives what the source says and which reading this RTL uses.

* **Shared-scale subtrahend.** The formula is printed as `E - 2^(K-1)`. The
  worked examples, the block diagram (E = 25..30 gives X = 10..15) and the
  FP32-to-X table all subtract `2^(K-1) - 1`. The RTL subtracts `B = 2^(K-1) - 1`.
* **Comparator special case.** The comparator rules name exponent 11111111
  but explain it as "0 or ±∞". The printed bit pattern is used.
  Consequence: the NaN and infinity scale codes of step 2 are unreachable in
  the assembled converter, although step 2 is written to expect them.
* **Sign in the exponent offset.** The text says "+E" for a positive input.
  The worked example uses "−E" for the positive inputs and "+E" for the
  negative one, which gives P4 = 10000000. The example's convention is used.
  A magnitude-symmetric converter would use `d = X + B - E` for both signs;
  this is a one-line change in `mx_pi`.
* **Flush threshold.** The source flushes when the distance exceeds `2^K`.
  Distances `2^K - 1` and `2^K` would then give a negative K-bit exponent that
  wraps round to a huge one. The RTL flushes when `d > 2^K - 2`.
* **Saturation condition.** The text tests `EK = 2^K - 1`. The rounding
  tables test `EK = 11110` (E5M2) and print the output `11110 11`. The tables
  are followed: the test is `EK = 2^K - 2`.
* **Rounding rows.** The E5M2 and E3M2 tables print `010 -> 11`, where the
  text says `010 -> 01`; `01` is used. The E4M3 and E2M3 tables are used
  unchanged; the text's lists for them contradict the tables and the text's
  own carry rule. The E2M1 table prints `10 -> 0`, where the text says
  `10 -> 1`; `1` is used. With these readings, every type rounds half-way
  cases up, as the formula above gives.
* **Element input width.** The text gives `10+R` bits (12 for E5M2). The
  diagram labels the inputs `[9+R:1]`. `10+R` is used, because the rounding
  needs R+1 mantissa bits.
* **Third case of step 3.** This case is printed as `X < 11110000`. For the
  narrower types X can lie in 240..253 for finite data, so the RTL applies
  the case to every X that is not a special code.
* **E2M3 infinity pattern.** It is printed with two mantissa bits. The RTL
  uses three zero bits.
* **Latches.** The implementation section says the design is "based on
  latches", but no latch is described anywhere. The RTL is purely
  combinational, which matches the rest of the description.

### Behaviour to be aware of

* Negative inputs usually become signed zero. This comes from the
  sign-dependent offset above.
* Zero inputs get no special treatment. A zero becomes a zero element
  through the flush rule only when `X + B > EMAX`. If the whole block is tiny
  (largest exponent at most `2B`), a zero input can give a non-zero
  element.
* There is no INT8 element datapath, because the source gives no rule for
  it. `mx_pi` stops elaboration with an error for `FMT = MX_INT8`. `mx_div`
  does support INT8 (B = 0).

## Files and interfaces

| file | contents |
|------|----------|
| `rtl/mx_pkg.sv` | format enum, K/R/B/width functions, special X codes |
| `rtl/mx_comp.sv` | two-input comparator cell: `a, b [31:0] -> y [31:0]` |
| `rtl/mx_max_tree.sv` | `#(N=32)`: `v [N][31:0] -> ev [31:0]`; N must be a power of two |
| `rtl/mx_div.sv` | `#(FMT)`: `ev [30:0] -> x [7:0]` |
| `rtl/mx_pi.sv` | `#(FMT)`: `x [7:0], v [9+R:0] -> p [K+R:0]` |
| `rtl/mx_private_elems.sv` | `#(FMT, N)`: `x, v [N][31:0] -> p [N][K+R:0]` |
| `rtl/fp32_to_mx.sv` | top, `#(FMT=MX_E5M2, N=32)`: `v [N][31:0] -> x [7:0], p [N][K+R:0]` |

All ports are plain unpacked arrays of packed vectors. Array index `i`
corresponds to input V(i+1).

The default build has 32×32 input bits and 8 + 32×8 output bits, 1288 in
all. After coarse synthesis it comes to roughly a thousand word-level cells:
31 comparators, one subtractor, and 32 small element units.

Timing: the logic depth is five comparator levels, then one 8-bit compare
and subtract, then one element unit. Register the inputs and outputs
externally if the converter must sit in a clocked pipeline.

## Testbenches

Every testbench checks its results against `tb/mx_ref_pkg.sv`. This
reference model is written apart from the RTL: the largest input is found
with real-number comparisons, and rounding uses explicit row-by-row tables.
Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|-----------|----------------|
| `tb_mx_comp` | comparator rules, 20 000 random pairs |
| `tb_mx_max_tree` | worked example, maximum in every slot, all-special inputs, random blocks |
| `tb_mx_div` | all six types, printed example values, table end points, exhaustive exponents |
| `tb_mx_pi` | five types, worked example elements, special scales, saturation, 200 000 random cases |
| `tb_mx_private_elems` | 32-wide stage for E4M3 and E2M1, random blocks |
| `tb_fp32_to_mx` | default converter end to end, worked example, 4000 random blocks |
| `tb_fp32_to_mx_formats` | the converter built for each of the five types |

`tb_fp32_to_mx` counts each mechanism and fails if any never occurs. The
mechanisms are: flush, rounding carry, saturation, skipped special input,
special pair meeting in the tree, above-range input, X clamped to 0, and
negative input kept.

To run one testbench with Verilator 5, name the two packages first and let
`-y` find the modules:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module tb_fp32_to_mx rtl/mx_pkg.sv tb/mx_ref_pkg.sv tb/tb_fp32_to_mx.sv
./obj_dir/Vtb_fp32_to_mx
```

To build another element type, override the top's `FMT`, for example
`fp32_to_mx #(.FMT(mx_pkg::MX_E4M3)) u (...)`. The element width `1+K+R`
follows from `FMT`.

Each testbench finishes in well under a second.
