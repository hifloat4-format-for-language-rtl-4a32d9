# HiF4: a 4.5-bit block floating-point datapath

HiF4 (HiFloat4) is a 4-bit block floating-point format for language-model
inference, proposed by Luo et al. in "HiFloat4 Format for Language Model
Inference". Each block stores 64 four-bit values plus 32 bits of shared
scaling metadata, so one value costs 4.5 bits on average. Two ideas set it apart:

* **A three-level scale.** One wide-range 8-bit floating-point scale covers the
  whole block. Below it are 8 one-bit micro-exponents, one for each run of 8
  elements, and 16 one-bit micro-exponents, one for each run of 4. Together they
  give each block 4.81 binades of internal range. The S1P2 elements still keep a
  3-bit significand.
* **A large block (64 elements) with power-of-two inner levels.** A 64-length
  dot product of two HiF4 blocks can be done almost entirely in integer
  arithmetic. The only floating-point work is one small multiply of the two
  block scales, plus one integer multiply at the very end.

This repository gives synthesizable SystemVerilog for the two pieces of
hardware the format needs:

1. a **BF16 → HiF4 encoder**: 64 BF16 values in, one HiF4 unit out, fully
   pipelined at one unit per cycle;
2. a **64-length HiF4 dot-product element**: two HiF4 units in, an exact
   `2^E8 × S14P8` result out, one per cycle.

There is also a top level (`hif4_top`) that joins two encoders to one dot-product
element, and testbenches for each block. Each testbench checks the block against
an independent real-number model.

## 1. The format

| field | bits | meaning |
|---|---|---|
| `E6M2` | 8 | level-1 scale, unsigned: `2^(e-48) × 1.mm`, `e` = 6-bit exponent, `mm` = 2-bit mantissa. No zero, no infinity, no subnormals. `0xFF` is NaN. Range 2^-48 … 2^15 × 1.5 |
| `E1_8[0..7]` | 8 | level-2 micro-exponents; bit `j` covers elements `8j … 8j+7` |
| `E1_16[0..15]` | 16 | level-3 micro-exponents; bit `k` covers elements `4k … 4k+3` |
| `elem[0..63]` | 64 × 4 | S1P2 elements, sign-magnitude: `{sign, int, frac1, frac0}`, values ±{0, 0.25, …, 1.75} |

Element `i` (counting from 0) represents

    V[i] = E6M2 × 2^(E1_8[i/8] + E1_16[i/4]) × S1P2[i]        (NaN for all i if E6M2 = 0xFF)

Inside a block the largest magnitude is 2^(1+1) × 1.75 = 7 and the smallest
non-zero one is 0.25. Across blocks the format covers 2^-50 … 2^18 × 1.3125.

In `hif4_pkg` the unit is the packed struct `hif4_unit_t`, 288 bits, declared as
`{e6m2, e1_8, e1_16, elem}`. The format fixes the values of the fields, not how
they are laid out in a word. This field order, element 0 in the lowest slot,
and the sign in bit 3 of each element are choices made here.

## 2. Converting BF16 to HiF4 (`hif4_encoder`)

The encoder carries out the format's three-stage conversion algorithm, with one
pipeline register after each stage.

**Stage 1: peaks (`hif4_peak_tree`).** The magnitudes of the 64 inputs go
through a max tree: the largest of each 4 gives `V16[k]`, the larger of each
adjacent pair of those gives `V8[j]`, and the largest of all gives `Vmax`. With
the sign removed, BF16 magnitudes can be compared as unsigned integers.

**Stage 2: scales.** This stage holds the longest chain of logic:

    SF      = bf16( Vmax × bf16(1/7) )          bf16(1/7) = 0x3E12 = 0.142578125
    E6M2    = to_e6m2(SF)                       hif4_bf16_to_e6m2
    REC     = reciprocal(E6M2) as BF16          hif4_e6m2_rec (4-entry table)
    E1_8[j] = bf16(V8[j] × REC) >= 4
    E1_16[k]= bf16(V16[k] × REC) × 2^-E1_8[k/2] >= 2

The factor 7 is the largest magnitude below the level-1 scale, so the scale
maps the block's peak close to the top of the range the inner levels can
represent. The scale is rounded to only 2 mantissa bits, so it is not exactly
`Vmax/7`. The micro-exponents pick up the slack: a run of elements whose peak,
after scaling, is still ≥ 4 (or ≥ 2 after the level-2 step) gets its exponent
bit set, and its elements are halved once more before rounding.

Because E6M2 has no subnormals, its reciprocal needs only a 4-entry table
indexed by the two mantissa bits, plus one exponent subtraction:

| `mm` | 1/1.mm | BF16 mantissa | exponent adjust |
|---|---|---|---|
| 00 | 1.0 | `0x00` (1.0) | 0 |
| 01 | 0.8 | `0x4D` (1.6015625) | −1 |
| 10 | 0.667 | `0x2B` (1.3359375) | −1 |
| 11 | 0.571 | `0x12` (1.140625) | −1 |

The BF16 biased exponent is `175 − e + adjust`. Each entry is 1/1.mm rounded to
the nearest BF16; none is a tie.

The "≥ 4" and "≥ 2" tests compare BF16 exponents. Multiplying by 2^-E1 is an
exponent decrement, not a multiplier; this is the "bypass" form of the multiply.

**Stage 3: elements.** Each element is multiplied by `REC` and rounded to BF16.
Its exponent is then reduced by `E1_8 + E1_16` for its group. Finally the result
is rounded to quarters (`hif4_bf16_to_s1p2`). A magnitude that rounds above 1.75
is clamped to 1.75 and keeps its sign. `clamp_o` counts the clamped elements of
each unit.

**Rounding.** Every product is rounded to BF16 before it is used, exactly as
the algorithm is written with BF16 variables. Fused multiply-compare or
multiply-convert instructions, which round once, could give different results
in rare tie cases; they are not built here. The format allows
round-half-to-even or round-half-away-from-zero. The `ROUND` parameter
(`RND_HALF_EVEN` by default) sets the mode for every rounding step of a
module.

**Worked example.** Take a block whose peak is 3.0:
SF = 3 × 0.142578125 = 0.427734375 = 2^-2 × 1.7109375.
Rounded to E6M2 this is 2^-2 × 1.75 = 0.4375, code `0xBB`.
REC = 2^1 × 1.140625 = 2.28125.
The peak scales to 6.84375, which is ≥ 4, so E1_8 = 1. Halved, it is 3.42,
which is ≥ 2, so E1_16 = 1. Halved again it is 1.71, which rounds to 1.75
(code `0111`). The block stores this element as 0.4375 × 4 × 1.75 = 3.0625.

**Special cases.** The format does not say how to handle these; each is a
choice made here:

* An input that is Inf or NaN makes the whole unit NaN (`E6M2 = 0xFF`), and its
  elements are set to zero.
* A scale above 2^15 × 1.5 saturates to `0xFE`. The elements then clamp.
* A scale below 2^-48 (an all-zero block included) is raised to `0x00`, the
  smallest scale. Raising the scale can only make elements smaller, so nothing
  overflows.
* BF16 subnormals are read as zero. They lie below 2^-126, far under the
  smallest HiF4 value 2^-50, so no result changes.

## 3. The dot-product element (`hif4_dot64`)

The dot product of two units A and B is

    Dot = E6M2_A·E6M2_B · Σ_j 2^(E1_8A[j]+E1_8B[j]) · Σ_{k in j} 2^(E1_16A[k]+E1_16B[k]) · Σ_{i in k} S1P2_A[i]·S1P2_B[i]

The element computes it with the fixed-point widths below (SxPy = sign,
x integer bits, y fraction bits):

| step | operation | result | bits |
|---|---|---|---|
| 1 | S1P2 << E1_16 (level-3 shift applied before multiplying) | S2P2 | 5 |
| 2 | 64 integer multipliers | S4P4 | 9 |
| 3 | adder tree, 64 → 8 (one sum per level-2 group) | S7P4 | 12 |
| 4 | << (E1_8A + E1_8B), shift of 0, 1 or 2 | S9P4 | 14 |
| 5 | adder tree, 8 → 1 | S12P4 | 17 |
| 6 | scale mantissas 1P2 × 1P2 (`hif4_scale_mul`) | 2P4 | 6 |
| 7 | one integer multiplier S12P4 × 2P4 | S14P8 | 23 |
| 8 | scale exponents (e_A − 48) + (e_B − 48) | E8 | 8 (signed, −96 … 30) |

The result is `s14p8_o × 2^(e8_o − 8)`, or NaN when `nan_o` is set. No bit is
dropped anywhere, so the result is the exact dot product of the two units as
decoded. The widths in the table are the ones the format's dot-product flow
gives. These are choices made here: two's complement inside the datapath,
plain adders in the trees, and one output register.

The element computes a dot product but does not accumulate. A processing
element in a matrix unit would also hold an accumulator, but its format and
how `2^E8 × S14P8` is aligned into it are not specified. The result is
therefore brought out as a port.

## 4. Top level and timing (`hif4_top`)

    a_i[64] (BF16) ──► hif4_encoder ──► unit_a_o ─┐
                                                  ├─► hif4_dot64 ──► nan_o, e8_o, s14p8_o
    b_i[64] (BF16) ──► hif4_encoder ──► unit_b_o ─┘

| signal | cycle |
|---|---|
| `in_valid_i`, `a_i`, `b_i` sampled | t |
| `unit_valid_o`, `unit_a_o`, `unit_b_o`, `clamp_*` | t + 3 |
| `out_valid_o`, `nan_o`, `e8_o`, `s14p8_o` | t + 4 |

Throughput is one operand pair per cycle. There is no back-pressure; every
stage carries a valid bit. Reset (`rst_n`, synchronous, active low) clears only
the valid bits. The quantised units are also outputs, so that a system can
store them (for example, weights quantised once and reused). The direct
encoder-to-element connection is a choice made here.

After coarse synthesis (yosys, word-level cells) the top level is about 12,200
cells and 5,566 flip-flops. Most of the logic is the 2 × 89 BF16 multipliers of
the two encoders.

## 5. Files

| file | content |
|---|---|
| `rtl/hif4_pkg.sv` | constants, `hif4_unit_t`, `round_mode_t`, rounding helper |
| `rtl/hif4_peak_tree.sv` | 64 → 16 → 8 → 1 magnitude max tree |
| `rtl/hif4_bf16_mul.sv` | BF16 × BF16 → BF16 multiplier |
| `rtl/hif4_bf16_to_e6m2.sv` | BF16 → E6M2 scale quantiser |
| `rtl/hif4_e6m2_rec.sv` | E6M2 reciprocal as BF16 (4-entry table) |
| `rtl/hif4_bf16_to_s1p2.sv` | BF16 → S1P2 element quantiser with clamping |
| `rtl/hif4_encoder.sv` | three-stage BF16 → HiF4 encoder |
| `rtl/hif4_scale_mul.sv` | E6M2 × E6M2 (2P4 mantissa, E8 exponent) |
| `rtl/hif4_dot64.sv` | 64-length HiF4 dot-product element |
| `rtl/hif4_top.sv` | two encoders and the dot-product element |
| `tb/tb_hif4_ref_pkg.sv` | real-number reference model of conversion and decoding |
| `tb/tb_hif4_gen_pkg.sv` | random vector generators (outliers, zeros, Inf/NaN, huge, tiny) |
| `tb/tb_hif4_*.sv` | one self-checking bench per module, plus `tb_hif4_mse_sweep` |

## 6. Verification

Every bench prints `TB_RESULT checks=N failures=M`. Each one also has a
watchdog that fails it if it hangs.

* `tb_hif4_peak_tree`: random vectors, including many ties. Compared with a
  direct scan of each group.
* `tb_hif4_bf16_mul`: 20,000 random operand pairs in both rounding modes,
  including exact ties, zeros, Inf/NaN, overflow and underflow.
* `tb_hif4_bf16_to_e6m2`: every positive BF16 code, in both modes.
* `tb_hif4_e6m2_rec`: all 256 codes against `1/x` rounded to BF16.
* `tb_hif4_bf16_to_s1p2`: every code with exponent 100…140, in both modes.
* `tb_hif4_scale_mul`: all 65,536 code pairs.
* `tb_hif4_encoder`: 3,000 vectors with random bubbles. Each unit is checked
  field by field, along with the 3-cycle latency. The bench requires that
  micro-exponents, clamping, saturation, min-clamping and NaN each occur. A
  second encoder in round-half-away mode runs on the same stream and is
  checked too; the two modes give different units for about 15 % of vectors.
* `tb_hif4_dot64`: 5,000 random unit pairs, including all-maximum units. Each
  result must equal the real-number dot product exactly.
* `tb_hif4_top`: 2,000 BF16 vector pairs, end to end at full size. Units and
  dot products are compared exactly, the latencies are checked, and every
  mechanism above must occur, plus back-to-back results. The bench also prints
  the RMS error of the HiF4 dot product against the BF16 dot product, divided
  by |a||b|. It is about 1.5 % on these random vectors.
* `tb_hif4_mse_sweep`: the reference quantisation-error experiment. Gaussian
  1024 × 1024 matrices with σ = 0.01 × 2^x, x = 0…17, go through the RTL
  encoder. Every unit is checked, and MSE/σ² must be identical for all 18
  scales, because the format needs no per-tensor pre-scaling. The measured
  MSE/σ² is 0.0069 (the format's authors report only ratios against other
  formats: NVFP4 1.32×, MXFP4 1.89× this value).

The reference model works in `real` arithmetic: rounding by `$floor` on
exactly scaled doubles. It shares no code with the integer RTL.

To run a bench with Verilator, from the repository root:

    verilator --binary --timing --assert -Irtl rtl/hif4_pkg.sv tb/tb_hif4_ref_pkg.sv \
        tb/tb_hif4_gen_pkg.sv rtl/hif4_*.sv tb/tb_hif4_top.sv --top-module tb_hif4_top
    ./obj_dir/Vtb_hif4_top

Swap in another `tb/tb_hif4_*.sv` and `--top-module` to run the other benches.
Add `-Wno-fatal` if your Verilator version treats lint warnings as errors.

## 7. Departures from the format description, and what is missing

* **Rounding of intermediate products.** Every product is rounded to BF16, as
  in the unfused algorithm. A fused implementation would round once and could
  differ in rare ties.
* **Special cases.** Behaviour for Inf/NaN inputs, scale overflow and scale
  underflow, and BF16 subnormals is chosen here (section 2).
* **Handshake, pipeline depth and reset** are chosen here. The format
  description has no timing.
* **Not built:**
  * the accumulator of the processing element (its format is unspecified);
  * sharing of the datapath with the FP16/BF16/INT8/FP8 modes of an existing
    dot-product unit (described only as possible);
  * fused multiply-compare and multiply-convert instructions (named only as
    accelerations).
