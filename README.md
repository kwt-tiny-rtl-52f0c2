# Softmax and GELU instructions for a RISC-V keyword-spotting transformer

A keyword-spotting transformer shrunk to fit a 64 kB microcontroller (KWT-Tiny:
one encoder layer, sequence length 27, embedding width 12, MLP width 24, two
output classes) still spends most of its time in two places that an integer
core without an FPU handles badly: the exponentials and division of softmax,
and the `erf()` inside GELU. This RTL adds one R-type instruction to an RV32IMC
core (the design targets the lowRISC Ibex) that replaces those calls with
table look-ups on 32-bit fixed-point numbers. The rest of the computation —
matrix products, maximum, sums, products — stays in ordinary integer
instructions.

The design follows the KWT-Tiny paper by Al-Qawlaq, Kumar M and John
("KWT-Tiny: RISC-V Accelerated, Embedded Keyword Spotting Transformer"). The
paper gives the instruction encoding, the five operators, the table sizes and
the GELU thresholds. Everything below that level is this design's own choice:
table indexing and rounding, out-of-range behaviour, the conversion rounding,
and the interface to the core. These choices are marked as such in the text.

## The instruction

All operators share one encoding on the RISC-V *custom-1* major opcode:

| bits    | 31:25  | 24:20 | 19:15 | 14:12  | 11:7 | 6:0       |
|---------|--------|-------|-------|--------|------|-----------|
| field   | funct7 | rs2   | rs1   | funct3 | rd   | opcode    |
| value   | 0      | —     | src   | op     | dst  | `0101011` |

| funct3 | operator  | result (`rd`)                                          |
|--------|-----------|--------------------------------------------------------|
| `000`  | EXP       | exp(−z) of the Q8.24 value z in `rs1`, from a 320-entry table |
| `001`  | INVERT    | 1/z of the Q8.24 value in `rs1`, from a 320-entry table |
| `011`  | GELU      | GELU(x) of the Q8.24 value in `rs1`, piecewise with a 32-entry table |
| `100`  | TO_FIXED  | IEEE-754 single in `rs1` converted to Q8.24            |
| `101`  | TO_FLOAT  | Q8.24 in `rs1` converted to IEEE-754 single            |

Every operator has a single operand, which this design takes from `rs1`; `rs2`
is ignored. A custom-1 word with a non-zero funct7 or with funct3 `010`,
`110` or `111` is reported on `illegal_o` and writes nothing, so that the
core can raise an illegal-instruction exception (a design choice). Software
issues the instruction through inline assembly, for example
`.insn r 0x2B, 0x0, 0x0, rd, rs1, x0` for EXP.

## Q8.24

All table operators work on Q8.24: a 32-bit two's-complement word w with value
w / 2^24, covering [−128, 128) in steps of about 6·10⁻⁸. 1.0 is
`0x0100_0000`, −1.0 is `0xFF00_0000`, 0.5 is `0x0080_0000`. A product of two
Q8.24 words is a 64-bit integer shifted right by 24.

## How softmax is computed

The core cannot evaluate e^x for an arbitrary x with a table, but softmax
does not change when a constant is subtracted from every input. Shifted by
the row maximum, every exponential has a non-positive exponent:

    softmax(x)_i = exp(-(max(x) - x_i)) / sum_j exp(-(max(x) - x_j))

so the EXP table only needs exp(−z) for z ≥ 0, and the result lies in (0, 1].
The instruction sequence for one row of n scores is:

1. `TO_FIXED` each score (if the scores are floats) — n instructions.
2. Integer maximum m, then z_i = m − x_i with ordinary `sub`.
3. `EXP` of each z_i — n instructions; integer `add` to a running sum s.
4. `INVERT` of s — one instruction.
5. Integer `mul`/`mulh` of each exp(−z_i) with 1/s, shifted by 24.
6. `TO_FLOAT` each probability if the next layer wants floats — n instructions.

For KWT-Tiny's 27 × 27 attention scores that is 82 accelerator instructions
per row, 2214 per layer, each completing in one cycle.

**Range.** Both 320-entry tables cover an argument range of 10 at 32 entries
per unit. For EXP this is harmless: exp(−10) ≈ 4.5·10⁻⁵, and larger z simply
return 0. For INVERT the argument is the row sum, which lies between 1 (the
maximum's own term) and n. With n = 27 a row of nearly equal scores has a sum
above 10; the table then returns its last entry, 1/10, and the probabilities
of that row come out too large by up to a factor of 2.7. Rows with a clear
winner have small sums: random scores spread over [−4, 4] give sums of about
4 to 5. Flat rows do not, and in the whole-inference test below most rows
are flat. This limitation comes from the published table size and is kept.
Enlarging `ENTRIES` of `kwt_invert_lut` removes it.

## The tables

All tables are filled at elaboration time by constant functions using the
simulator's real arithmetic. Each entry is the exact value rounded to the
nearest Q8.24 word. Synthesis turns them into ROMs built from logic; together
they hold 320·32 + 320·32 + 32·32 = 21,504 bits (2.69 kB).

**EXP** (`kwt_exp_lut`). Entry i = exp(−i/32), i = 0…319. The address is
floor(32·z), which is bits [28:19] of the Q8.24 word, so no arithmetic sits
in front of the ROM. A negative z reads entry 0 (1.0); z ≥ 10 gives 0. The
error is at most 1 − exp(−1/32) ≈ 0.031 absolute (3.1 % relative), always
towards larger values.

**INVERT** (`kwt_invert_lut`). Entry i = 32/(i+1), the reciprocal of
z = (i+1)/32, i = 0…319. The address is floor(32·z) − 1. A z below 1/32
(including 0 and negative values) reads entry 0 (32.0); z above 10 + 1/32
reads entry 319 (0.1). For z ≥ 1 the relative error is below 1/32.

**GELU** (`kwt_gelu_unit`). GELU(x) = x·½·(1 + erf(x/√2)) is split into three
regions at the published thresholds:

| input               | output                      |
|---------------------|-----------------------------|
| x > 1.595           | x                           |
| −1.857 ≤ x ≤ 1.595  | 32-entry table              |
| x < −1.857          | 0                           |

The window of width 3.452 is cut into 32 equal segments of about 0.108. The
segment number is floor((x + 1.857)·32/3.452). It is computed by one
multiplication of x + 1.857 with a constant, 32/3.452 scaled by 2^16, and
taking the bits above the 40 fraction bits. At x = 1.595 it is clamped to 31.
Each entry holds GELU at the centre of its segment (a design choice). The
largest error over the real line is about 0.09, at the upper threshold, where
the identity takes over; inside the window it is about 0.06.

## Conversions

**TO_FIXED** (`kwt_to_fixed`). A binary32 value (−1)^s · 1.f · 2^(e−127)
times 2^24 equals the 24-bit significand 1.f shifted left by e − 126. So the
unit is a barrel shifter (left by 0…7, right by 1…23) followed by an optional
negation. Bits shifted out are dropped, which rounds toward zero. Zero and
subnormals give 0. Magnitudes of 128 or more, infinities and NaN saturate to
`0x7FFF_FFFF` or `0x8000_0000` by sign. Saturation matters for raw MFCC
inputs, which reach a few hundred; they must be scaled before conversion.

**TO_FLOAT** (`kwt_to_float`). The magnitude's leading one at bit p gives the
exponent p + 103 (that is, p − 24 + 127). The bits below it, left-aligned,
give the 23-bit fraction. Values below 1.0 have at most 24 significant bits
and convert exactly. Larger ones lose up to 7 low bits, truncated toward
zero. `0x8000_0000` becomes −128.0.

## Structure and interface

    kwt_accel_top            instruction word + rs1 value -> rd write
    ├── kwt_custom_decoder   custom-1 / funct7 / funct3 decode, register fields
    └── kwt_custom_alu       five units in parallel, result multiplexer
        ├── kwt_exp_lut
        ├── kwt_invert_lut
        ├── kwt_gelu_unit
        ├── kwt_to_fixed
        └── kwt_to_float
    kwt_pkg                  opcode, operator enum (funct3 values), Q8.24 and
                             table-generation helpers

`kwt_accel_top` is the slice of a modified core that the accelerator adds.
The core itself is not included: fetch, the register file, the integer
ALU and multiplier, and the load/store unit. Its ports are where such a
core connects:

| port          | dir | width | meaning                                   |
|---------------|-----|-------|-------------------------------------------|
| `instr_i`     | in  | 32    | instruction in decode/execute             |
| `rs1_addr_o`  | out | 5     | register-file read address                |
| `rs2_addr_o`  | out | 5     | second read address (decoded, unused)     |
| `rs1_rdata_i` | in  | 32    | value of rs1                              |
| `rd_we_o`     | out | 1     | write rd: a supported custom-1 word       |
| `rd_addr_o`   | out | 5     | rd                                        |
| `rd_wdata_o`  | out | 32    | result                                    |
| `illegal_o`   | out | 1     | custom-1 word with an unassigned encoding |

Everything is combinational, and there are no clocks, resets or state. Like
the core's other single-cycle ALU operations, a custom instruction reads rs1,
computes and writes rd in its execute cycle. In a core this path joins the
integer ALU's result multiplexer, and `rd_we_o`/`illegal_o` join the
decoder's own signals. No timing analysis has been done. The deepest logic
is probably the GELU unit's chain of subtract, constant multiply and ROM
read. A core with a tight clock might have to register it.

Parameters keep the published sizes by default: `ENTRIES = 320` and
`DIVS_PER_UNIT = 32` (a power of two) for the EXP and INVERT tables;
`ENTRIES = 32`, `LO = -1.857` and `HI = 1.595` for GELU.

## Departures from and additions to the published description

Taken from the paper: the opcode, funct7 = 0, the five funct3 values and the
operators they name; Q8.24; 320 × 32-bit tables at 32 entries per unit for EXP
and INVERT, with the index relations LUT₁[32z] ≈ e^−z and
LUT₂[32z − 1] ≈ 1/z; the GELU thresholds and its 32-entry table; the
max-shifted softmax and the order of operations in software.

Chosen here, where the paper is silent:
- The EXP operator returns exp(−z), not exp(z). The operator's name says
  "exp(X)", but its table relation says e^−z, and the shifted softmax needs
  e^−z.
- Indices are truncated (floor). Entries are rounded to the nearest Q8.24
  word. GELU entries are taken at segment centres, and GELU segments have
  equal width.
- Every out-of-range rule: EXP for z < 0 and z ≥ 10, INVERT below 1/32 and
  above 10, and TO_FIXED saturation.
- The float format is IEEE-754 binary32. Both conversions truncate.
- The operand register is rs1. Unassigned custom-1 encodings are reported
  as illegal.
- All operators are single-cycle and combinational. The paper gives no
  latency. It reports only whole-inference cycle counts (about 5.5 million
  with the accelerator against 13 million without, at 50 MHz) and an FPGA
  area overhead, neither of which this RTL alone can reproduce.

## Simulation

Each module has a self-checking testbench in `tb/` named `tb_<module>`. It
prints `TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator
5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl +libext+.sv -Irtl \
        rtl/kwt_pkg.sv tb/tb_kwt_accel_top.sv --top-module tb_kwt_accel_top
    ./obj_dir/Vtb_kwt_accel_top

Replace the testbench name to run a unit test. The testbenches use only
two-state logic and `$urandom`.

What the testbenches establish:
- `tb_kwt_exp_lut`, `tb_kwt_invert_lut`: every table entry is addressed with
  a random point inside its slot and compared with the closed-form value,
  computed independently in the testbench. The boundary rules and the
  error bounds are checked too.
- `tb_kwt_gelu_unit`: segment centres are compared against GELU built on an
  erf from Simpson integration, not the series the RTL uses. Both thresholds
  and their neighbours, the identity and zero regions, and a bound of 0.1 on
  the error over [−4, 4] are checked.
- `tb_kwt_to_fixed`, `tb_kwt_to_float`: 2000 random words each, plus the
  special values, against conversions done in double precision.
- `tb_kwt_custom_decoder`: random words over all funct3/funct7 values and
  other opcodes.
- `tb_kwt_custom_alu`: hand-worked values for every operator, and one operand
  through all five.
- `tb_kwt_accel_top`: end to end, with the testbench acting as the core
  (register file, integer max/sum/multiply). It runs the softmax of a full
  27 × 27 attention matrix and GELU over a full 27 × 24 MLP hidden layer,
  which is 4134 custom instructions. Results are compared with real-arithmetic
  softmax (within 10 % relative) and GELU (within 0.1). It also counts,
  and requires at least once, each of these: EXP beyond its table, INVERT of
  an over-range sum, all three GELU regions, TO_FIXED saturation, an illegal
  custom-1 word and a foreign opcode. It also checks that every instruction
  completes in the cycle it is issued. All parameters are at their published
  values.
- `tb_kwt_tiny_inference`: whole KWT-Tiny inferences (see below).

The inputs are random. The trained KWT-Tiny weights and real MFCC inputs are
not part of this design, so model accuracy is not measured here.

## A whole inference

`tb_kwt_tiny_inference` runs the complete network around the accelerator,
with the testbench again acting as the core. The network has the post-norm
Keyword Transformer layout at KWT-Tiny size. A 16 × 26 spectrogram becomes 26
patches of one time frame each, projected 16 → 12. A class token and
27 × 12 position embeddings are added. Then comes one single-head attention
block (QKV 12 → 3 × 8 without bias, output 8 → 12), a residual add and
LayerNorm. The MLP is 12 → 24 → 12 with GELU, followed by a residual add and
LayerNorm. A head LayerNorm and a 12 → 2 linear layer act on the class token.
These sizes give exactly 1646 parameters, the published count, and the
testbench checks that. The published text does not describe the head
LayerNorm or the bias-free QKV projection. They follow the usual Keyword
Transformer implementation, and with them the count comes out exact.

Weights are random. They are quantised to INT8 as floor(64·w), the weight
scale the paper found best. Softmax and GELU run on the accelerator and
everything else runs in real arithmetic. Each input is also run through an
exact-arithmetic reference. One inference takes 4158 accelerator
instructions: 27 × 82 for softmax and 27 × 24 × 3 for GELU. That is 4158
cycles, a small part of the roughly 5.5 million cycles reported for a whole
accelerated inference. Most of those cycles go to the matrix products and
the other software.

Over 40 random inputs, the predicted class always matched the reference, and
the largest logit difference was about 0.5. With random weights the attention
rows are nearly flat. About three quarters of the softmax rows then have a
sum above 10, and INVERT clamps them (see *Range* above). Those rows come out
scaled by sum/10. This scale error dominates the logit error, and the
LayerNorm after the residual add absorbs part of it. Trained attention may be
sharper. How often trained KWT-Tiny rows exceed the range cannot be checked
without the trained weights.
