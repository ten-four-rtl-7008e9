# Ten-Four: a mixed-precision fused dot-product unit and tensor core in SystemVerilog

A tensor core spends almost all of its time on one operation: a short dot
product plus an addend, `D = A0*B0 + A1*B1 + ... + C`. Machine-learning
workloads want it in many number formats. These include FP16, BF16, TF32,
two 8-bit floats, block-scaled ("microscaling", MX) 8-bit formats, and 8- and
4-bit integers. Building one unit per format wastes area. Chaining
fused multiply-adds rounds after every step and adds latency per element.

The Ten-Four approach, which this RTL implements, is a **fused** dot product
(FEDP). All products of one operation are formed exactly and aligned to a
common exponent. They are summed by one carry-save tree and rounded **once**
to FP32. Integer formats use the same tree and give an exact INT32 result.
Formats are grouped into classes by mantissa width, and each class shares one
set of multipliers. Every class then emits the same intermediate term format,
so stages 2–4 do not depend on the format.

The RTL has two levels:

* `tfr_fedp` is one fused dot-product unit. It has 8 multiplier lanes, a
  4-stage pipeline and one result per clock.
* `tfr_tcu` is a tensor core. It is an 8 × 4 grid of FEDPs that share A rows
  and B columns. It also holds a small metadata SRAM for MX scale factors.
  Each clock it computes one 8×4 output tile.

## Formats and how operands are packed

Operands arrive as 32-bit registers: the FEDP takes K/2 = 4 registers of A
and 4 of B. Lane *l* reads the 16-bit half *l mod 2* of register *l/2*.

| `fmt_s` | format | element | products per lane | products per operation |
|---|---|---|---|---|
| 0 | FP16 | 1.5.10 | 1 | 8 |
| 1 | BF16 | 1.8.7 | 1 | 8 |
| 2 | TF32 | 1.8.10, in an FP32 word (low 13 bits ignored) | 1, even lanes only | 4 |
| 3 | FP8 E4M3 | 1.4.3; no infinity; S.1111.111 is NaN | 2 | 16 |
| 4 | BF8 E5M2 | 1.5.2; IEEE-like | 2 | 16 |
| 5 / 6 | MXFP8 / MXBF8 | as 3 / 4, plus E8M0 scales X_A and X_B | 2 | 16 |
| 7 | MXINT8 | int8 × 2^-6, plus E8M0 scales | 2 | 16 |
| 8 / 9 | INT8 / UINT8 | 8-bit integer | 2 | 16 |
| 10 / 11 | INT4 / UINT4 | 4-bit integer | 4 | 32 |

The addend C and the result D are FP32 for floating-point formats and INT32
for integer formats. Subnormal inputs are accepted and subnormal results are
produced. The format is chosen at run time by `fmt_s`. Whole multiplier
classes can be removed at elaboration with `EN_FP16`, `EN_FP8`, `EN_INT8` and
`EN_INT4`. The numeric encoding of `fmt_s` is this design's own (`tfr_pkg::fmt_e`).

## The common term: everything becomes sign / exponent / 25-bit significand

The key to sharing stages 2–4 is that stage 1 turns every lane into one
term of the same shape (`tfr_pkg::lane_t`):

    value = (-1)^sign × sig × 2^(exp − 151)

Here `sig` is a 25-bit unsigned integer with two integer bits and 23
fraction bits. `exp` is a 10-bit signed exponent that carries the FP32 bias.

* **Product exponent.** The exponent of a product of two 1.x numbers is
  `EXP_A + EXP_B + CONV`, where `CONV = 127 − 2·bias_in + 1`. The `+1`
  accounts for the product's two integer bits. MX formats add
  `X_A + X_B − 254` per lane, so block scaling costs no extra pass.
* **FP16, BF16 and TF32.** One 11×11 Wallace-tree multiplier (`tfr_wtmul`)
  serves all three. The 22-bit product is shifted left by 3 bits for FP16 and
  TF32, or by 9 bits for BF16, to land on the 23-fraction-bit grid.
* **FP8 and BF8.** Two 4×4 multipliers form the lane's two products. The
  product with the smaller exponent is shifted right onto the larger one's
  grid (22 fraction bits). Bits that fall off go to a lane sticky bit. The
  pair is then added as signed numbers, so the lane emits **one** term with
  exponent `e_big + 1`. This halves the terms the accumulator must align.
* **INT8, UINT8 and MXINT8.** Two 8×8 multipliers work on magnitudes, and the
  signed products are added. For integer formats the 25-bit field holds the
  two's complement sum. For MXINT8 the sum is turned into a floating-point
  term with exponent `131 + X_A + X_B − 254`. The 131 folds in the two
  implicit 2^-6 element scales.
* **INT4 and UINT4.** Four 4×4 multipliers feed a 4-operand carry-save adder
  and a Kogge-Stone adder.
* **The addend C.** An FP32 C becomes a term with `sig` = its 24-bit
  significand and `exp = e_C + 1`.

## Pipeline and timing

`tfr_fedp` has five register ranks. A result is registered four enabled
clock edges after its operands are captured. One new operation can start
every clock.

| where | what happens |
|---|---|
| before rank 1 | **Zero/valid mask** (`tfr_zero_mask`). A product slot is active when its lane is enabled by `vld_mask`, the lane exists in the format, and neither operand is zero. A slot that holds an Inf or NaN stays active. A lane with no active slot is not loaded: its rank-1 operand halves keep their old value, which synthesis maps to clock gating. |
| stage 1 | **Classify and multiply.** `tfr_classifier` unpacks the operands. `tfr_exp_add` forms exponents and `tfr_mul_lane` forms products. `tfr_exp_diff` builds the **difference matrix** and the one-hot maximum. `tfr_exception` sets the IEEE flags. The integer addend is split. |
| stage 2 | **Align** (`tfr_align`). The maximum exponent is the OR of the exponents picked by the one-hot mask. Each term's shift amount is read from the difference matrix, so no new subtractor is needed. Terms shift right with 2 extra bits. A per-term sticky bit collects what falls off. Integer terms bypass the shifter. |
| stage 3 | **Accumulate** (`tfr_accum`). Masked lanes are ANDed to zero. Negative FP terms are only bit-inverted. The missing +1s are added as one more operand: the number of negative terms. A MOD-4 grouping CSA tree reduces the 10 operands, then a Kogge-Stone adder sums them. |
| stage 4 | **Normalise and round** (`tfr_norm_round`). The magnitude goes through a leading-zero counter, a normalising shift and round-to-nearest-even, with subnormal handling. Exception flags override the result. The INT32 result is rebuilt here. |

Interface of `tfr_fedp`:

* `en` advances the whole pipeline; `en = 0` holds every register, which is a
  stall.
* `valid_in` tags an operation and comes out as `valid_out` together with
  `d_val`.
* Only the valid bits are reset (`rst_n`, active low, synchronous).

The latency is counted in enabled edges, so a stall delays a result but
never loses or duplicates it.

### Difference matrix and one-hot maximum

There are 9 terms: 8 lanes plus C. `tfr_exp_diff` computes the 36
differences `e_i − e_j` for i < j, which is only the upper triangle. The
lower triangle is the same numbers with their signs flipped. Term *i* is the
maximum when it beats or ties every higher-index term and strictly beats
every lower-index term. These are ANDs of sign bits. Invalid terms are left
out. Ties go to the lowest index, so the mask is always one-hot (an assertion
checks this). In stage 2, term *i*'s shift is the matrix entry in the
winner's row or column, negated when needed.

### Sign handling without per-term negation

Each FP term is a magnitude with a sign. Negating every negative term in
two's complement would need an incrementer per lane. Instead each negative
term is inverted, and one extra operand, the popcount of the negative signs,
adds all the missing +1s at once.

The accumulator is 32 bits wide:

* 27 bits of aligned significand (25 + 2 guard bits);
* 1 sign bit;
* ⌈log2 10⌉ = 4 growth bits.

The accumulator value is `acc × 2^(e_max − 153)`. After normalisation the
result exponent is `e_max + 4 − lz`, where `lz` is the leading-zero count.

### MOD-4 operand grouping

With seven or more operands, `tfr_csa_mod4` first compresses each group of
four operands with its own 4:2 compressor, all groups in parallel. The group
outputs and the leftover operands then go through the standard chain
(`tfr_csa_tree`). For 10 operands this gives the three-level shape
(4:2 ∥ 4:2) → 4:2 → 4:2. A plain chain would take five levels. Wallace
multipliers with 7 or more partial products (the 8×8 and 11×11 ones) use the
same tree.

### Integer path: 25-bit tree, 32-bit answer

Integer sums go through the same 25-bit-wide tree. The 32-bit addend C is
split in two:

* C[24:0] is read as a **signed** 25-bit number and enters the tree.
* C_HI = C[31:25] + C[24] holds the upper part. Adding C[24] corrects for
  reading the low part as signed.

Stage 4 then forms `{C_HI + acc[31:25], acc[24:0]}`. Carries out of the
low 25 bits show up in `acc[31:25]`. The result is the exact INT32 sum,
wrapped modulo 2^32.

### Exceptions

The result is the canonical NaN `0x7FC00000` when:

* any active product has a NaN input;
* any active product is ∞ × 0;
* C is NaN;
* infinities of both signs meet;
* for MX formats, a scale is the E8M0 NaN value `0xFF`.

Otherwise, when any term is infinite, the result is a signed infinity. A
finite sum that overflows also becomes an infinity. Integer formats raise no
exceptions. An exact zero sum gives +0.

## Numerics: what exactly is computed

Products are exact. There are two truncation points before the single final
rounding:

* In FP8 and BF8 lanes, the smaller product of a pair is truncated onto the
  larger one's grid.
* In stage 2, every term is truncated to 2 bits below the largest term's
  significand.

All truncated bits feed the sticky bit. The result is therefore not always
the correctly rounded exact sum. It is equivalent to:

1. aligning every term to `2^(e_max − 25)`;
2. summing exactly;
3. rounding once with the discarded bits as sticky.

Heavy cancellation between large terms can lose bits that a wider datapath
would keep. The testbench reference model (`tb/tfr_ref_pkg.sv`) describes
these numerics in plain integer arithmetic. The FEDP matches it bit for bit.
FP16 cases whose terms all fit the alignment window are also checked against
the correctly rounded real-valued sum.

## The tensor core (`tfr_tcu`)

FEDP (m, n) of the 8 × 4 grid gets A row m (4 registers), B column n and its
own C word, and produces `d_tile[m][n]`.

* With the 32-thread register layout this is an 8×4×8 FP16 step, or 8×4×16
  FP8, per clock.
* All FEDPs share `fmt_s`, `vld_mask`, `en` and `valid_in`. The grid has the
  same 4-cycle latency and one-tile-per-clock rate as a single FEDP. An
  assertion checks that all 32 valid bits stay in lockstep.

MX scale factors go through `tfr_meta_sram`:

* **Layout.** It has 16 entries. Bank 0 holds the 8 A-row scales of an entry
  and bank 1 the 4 B-column scales.
* **Write.** A write (`meta_req`) stores one 32-bit word of four scales.
  `meta_bank` selects the bank, `meta_addr` the entry and `meta_word` the
  group of four scales.
* **Read.** A read (`meta_rd_en`, `meta_rd_addr`) updates the registered
  scale outputs on the next clock. The outputs hold until the next read.
  Issue the read at least one cycle before the MX operation.
* **Use.** The FEDPs capture the scales together with their operands.

The instruction front end, register file and memory system around the
tensor core are not part of this RTL. The top-level tile ports take their
place.

## Where this design departs from or adds to the paper's description

* **Lane count.** One passage describes 2×K multiplier lanes for a K-element
  dot product. The operand counts, the per-FEDP throughput and the
  accumulator operand count ("ten" operands for the 8-element unit) all fit
  K = 8 lanes. This RTL uses 8 lanes, each folding 1, 2 or 4 products
  depending on the format.
* **Accumulator width.** The accumulator is 32 bits; the paper gives 30. Its
  stated 25 + log2(2K) rule does not leave room for the two guard bits and
  the sign.
* **Pair and quad adder widths.** They are 26, 18 and 11 bits, one or two
  bits wider than the paper's unsigned widths, because they add signed
  products.
* **Leading-zero counter.** It is an exact tree counter working on the
  stage-3 sum. It does not predict the count in parallel with the addition.
* **Zero mask.** It is computed before the first register rank so that it can
  gate that rank. Slots that hold Inf or NaN are never gated.
* **Choices the paper leaves open.** These are this design's own: the format
  encoding; the E4M3/E5M2 special values (OCP convention); the MXINT8
  element scaling; the tie-break of the maximum search; the stall/valid
  handshake; reset of the valid bits only; the metadata SRAM's depth, word
  layout and one-cycle read. The paper's figure shows a second,
  unlabelled input to the scale-write multiplexer; it is not modelled.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tfr_csa_tree_tb`, `tfr_csa_mod4_tb` | sum + carry equals the integer sum, for 5, 6, 7 and 10 operands |
| `tfr_ksa_tb`, `tfr_wtmul_tb`, `tfr_lzc_tb` | adder, multiplier (11×11, 8×8, 4×4 exhaustive) and leading-zero counter against integer arithmetic |
| `tfr_classifier_tb`, `tfr_zero_mask_tb` | element decode and the slot/lane masks against an independent decoder |
| `tfr_exp_add_tb`, `tfr_mul_lane_tb` | product exponents and lane terms (exact products, FP8 pair truncation and sticky, integer sums) |
| `tfr_exp_diff_tb`, `tfr_align_tb`, `tfr_accum_tb` | difference matrix and one-hot maximum, alignment and sticky, signed accumulation |
| `tfr_norm_round_tb` | RNE rounding (normal, subnormal, overflow), exception override, INT32 reconstruction |
| `tfr_exception_tb` | NaN / ±Inf rules, including MX NaN scales |
| `tfr_meta_sram_tb` | writes, one-cycle reads and hold |
| `tfr_fedp_tb` | thousands of random operations of all formats with stalls, sparse masks and specials against the reference model; a real-number FP16 check; subnormal outputs; 4-edge latency; one-per-clock rate |
| `tfr_fedp4_tb` | the same tests on the four-lane FEDP (K = 4, the 4/8-threads-per-warp size), which uses the standard CSA chain and a 31-bit accumulator |
| `tfr_tcu_tb` | the full 8×4 grid at default parameters; 108 tiles of all formats, with MX scales routed through the metadata SRAM. Each mechanism must occur at least once: stalls, gated lanes, NaN, Inf, subnormals, integer carries into C_HI, a 16-tile back-to-back burst. Latency is checked per tile. |

Run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/tfr_pkg.sv tb/tfr_ref_pkg.sv tb/tfr_fedp_tb.sv --top-module tfr_fedp_tb
    ./obj_dir/Vtfr_fedp_tb

Unit testbenches finish in well under a second. The full tensor-core
testbench is slow to build. Verilator flattens the 32 FEDP instances into
about 265 MB of C++. Translation takes about a minute, and compiling that C++
takes 10 minutes or more, depending on the machine and the number of build
jobs (`-j`). The simulation itself then runs in under a second.

## Files

* `rtl/tfr_pkg.sv`: formats, widths and the term and exception types.
* `rtl/tfr_tcu.sv`: the tensor core (top level).
* `rtl/tfr_meta_sram.sv`: the MX scale-factor store.
* `rtl/tfr_fedp.sv`: the pipeline.
* Stage 1: `tfr_zero_mask`, `tfr_classifier`, `tfr_exp_add`, `tfr_mul_lane`,
  `tfr_exp_diff`, `tfr_exception`.
* Stages 2–4: `tfr_align`, `tfr_accum`, `tfr_lzc`, `tfr_norm_round`.
* Arithmetic blocks: `tfr_wtmul`, `tfr_csa32`, `tfr_csa42`, `tfr_csa_tree`,
  `tfr_csa_mod4`, `tfr_ksa`.
* `tb/tfr_ref_pkg.sv`: the integer reference model and operand generators.
