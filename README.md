# A posit arithmetic unit for RISC-V, with run-time selectable es

Posits are an alternative to IEEE 754 floating point. A 32-bit posit spends its
bits adaptively: a variable-length *regime* field encodes a coarse power of
2^(2^es), followed by `es` exponent bits and whatever bits remain as fraction.
Numbers near 1 get more fraction bits than a float has; very large and very
small numbers get fewer fraction bits but a much wider range. There are only
two special values, 0 and NaR ("not a real", the pattern 1000...0), no
subnormals, no infinities, and no overflow or underflow: results saturate at
the largest or smallest positive posit, never to 0 or NaR.

This RTL implements a 32-bit posit floating-point unit that executes the
RISC-V "F" instruction set with posit meaning, and wraps it as a
co-processor reached by custom instructions. Its distinguishing feature is
that one datapath serves **two es values, 2 and 3, chosen at run time**
through a field of a control register. es=2 gives more precision, es=3 more
dynamic range (up to about 2^240), and an extra instruction, FCVT.ES,
re-encodes a value from one es to the other.

## The posit encoding and the dual-es trick

A positive posit `0 | r r r ... r ~r | e (es bits) | f` has value
`2^((k << es) + e) * 1.f`, where a run of `m` ones gives `k = m-1` and a
run of `m` zeros gives `k = -m`. A negative posit is the two's complement
of its magnitude, so posits sort like signed integers.

Internally every operand is *unpacked* into a sign, a signed 12-bit exponent
`(k << es) + e` and a fraction with its hidden bit. Both es values share
this form:

* The fraction field is sized for es=2 (27 fraction bits + hidden bit =
  28 bits). es=3 never has more than 26.
* The exponent range is sized for es=3 (±240 per operand, ±480 for a
  product, hence 12 bits).
* The decoder always extracts three bits after the regime and shifts them
  right by `3 - es`, so for es=2 the lowest of the three is dropped.
* The encoder shifts the exponent bits left by `3 - es` before packing, so
  the same shifter places them for both es values.

Nothing else in the datapath depends on es. The arithmetic units only see
exponents and fractions.

## Decode, compute, round once

`posit_decode` (combinational) two's-complements a negative input, counts
the regime run with a leading-zero counter, shifts the regime and its
terminator out, and reads e and the fraction.

Each arithmetic unit produces an *unrounded* result: sign, exponent, a
32-bit significand with the hidden bit at the top, and a sticky bit that
ORs together everything below.

`posit_encode` (combinational) is the only place where rounding happens. It
proceeds in four steps:

1. It splits the exponent into `k` and `e`.
2. It builds the word `{r, ~r, e, significand}`.
3. It shifts that word right by the regime length, filling with the regime
   bit, so the regime appears in front.
4. It rounds the 31 kept bits to nearest, ties to even, using the guard bit
   and the sticky bit.

Regimes longer than the word saturate to maxpos or minpos. Because all
results go through this one encoder, every operation is rounded exactly
once from an exact or sticky-correct intermediate.

## The arithmetic units

| Unit | Operations | Method |
|---|---|---|
| `posit_fma` | FMADD, FMSUB, FNMSUB, FNMADD, FADD, FSUB, FMUL | 6 stages: two 28x14 partial products; product sum and normalisation; order by magnitude and align into a 60-bit window (shifted-out bits OR into the LSB); add/subtract; leading-zero normalise; pack. Add skips the product stages, multiply skips align and add. |
| `posit_div` | FDIV | Non-restoring division, 2 quotient bits per cycle, 32 quotient bits; remainder gives sticky. x/0 gives NaR and sets DZ. |
| `posit_sqrt` | FSQRT | Non-restoring square root, 1 bit per cycle, 29 root bits; radicand doubled for odd exponents; negative input gives NaR. |
| `posit_itop` | FCVT.S.W, FCVT.S.WU | Leading-zero count and shift; all 32 integer bits kept, so rounding is left to the encoder. |
| `posit_ptoi` | FCVT.W.S, FCVT.WU.S | Shift the fraction by the exponent; round to nearest-even, or toward zero when rm = 001. Saturates like RISC-V (NaR gives 2^31-1 or 2^32-1). |
| `posit_compare` | FMIN, FMAX, FEQ, FLT, FLE | Signed integer compare of the bit patterns. |
| `posit_sgnj` | FSGNJ, FSGNJN, FSGNJX | Negate by two's complement when the sign must change. |
| `posit_classify` | FCLASS | Bit 1 negative, bit 4 zero, bit 6 positive, bit 9 NaR. |

Round-to-zero exists only for posit-to-integer conversion. Image-processing
code that converts pixel results back to integers needs truncation to match
float results. Every other operation rounds to nearest, ties to even, and
the rm field of the control register reads 0.

## The FPU: `posit_fpu`

The FPU is blocking. It accepts one operation on `start_valid`/`start_ready`
with:

* the three operands,
* the major-opcode bits 5:2,
* funct7, funct3 and the low rs2-field bits (`imm`),
* the es of the operation.

For FCVT.ES it also takes `from_es` and `to_es`. It holds its result
(`rd`, `fflags`, `rd_is_int`) until `out_ready`.

On the accepting clock edge the opcode is decoded (`posit_op_decode`) and
the operands are decoded by three common decoders into registers. Sign
injection, min/max, compares, moves and classify act on the raw bits and
finish on that same edge. For the other operations, the unit starts in the
next cycle and its result passes the common encoder into the output
register. Posit-to-integer bypasses the encoder.

Latencies, in clock edges from the accepting edge to out_valid:

| Operation | Cycles |
|---|---|
| FMADD, FMSUB, FNMSUB, FNMADD | 8 |
| FADD, FSUB, FMUL | 6 |
| FDIV | 20 |
| FSQRT | 32 |
| FCVT.W[U].S, FCVT.S.W[U] | 3 |
| FCVT.ES | 4 |
| compare, sign injection, FMV, FCLASS | 1 |

FCVT.ES decodes with `from_es`, passes two pipeline registers, and encodes
with `to_es`. This rounds correctly when the target es has fewer fraction
bits.

## Control register: `pcsr`

| Bits | Field | Behaviour |
|---|---|---|
| 31:13 | reserved | Read 0. |
| 12:8 | es-mode | Resets to 2. Only 2 and 3 are accepted; other writes leave it unchanged. |
| 7:5 | rm | Always 0. |
| 4:0 | fflags | Only DZ (bit 3) exists. It is set by a division by zero. |

It is reached like the F-extension CSRs:

| Address | View |
|---|---|
| 0x001 | flags |
| 0x002 | rm, read-only 0 |
| 0x003 | whole register |

The `csr_op` codes are 00 read, 01 write, 10 set, 11 clear.

## The co-processor: `peri_posit_accel` (top level)

The top joins these blocks:

* a 32-entry posit register file (`posit_regfile`, 3 read ports, 1 write
  port, reset to 0),
* the FPU,
* the control register,
* a control FSM.

Its ports are a RoCC-style command/response pair, a one-word data-cache
port and a CSR port.

Every command gets one response when it completes, and one command is in
flight at a time. If xd=1, or if the result is an integer (compare,
FCVT.W, FMV.X.W, FCLASS), the result goes back in `resp_data` with
`resp_wen`=1. Otherwise it is written to posit register rd.

Instruction fields follow the RoCC layout:

| Bits | Field |
|---|---|
| 31:25 | funct7 |
| 24:20 | rs2 |
| 19:15 | rs1 |
| 14 | xd |
| 13 | xs1 |
| 12 | xs2 |
| 11:7 | rd |
| 6:0 | opcode |

| Opcode | Use |
|---|---|
| custom-0 `0001011` | Arithmetic, R-type. funct7[6:2] is the F-extension funct7[6:2]. funct7[1:0] selects the variant that F puts in funct3: sign-injection kind, min/max, eq/lt/le, FMV.X.W vs FCLASS. xs1/xs2 take the operand from the core's integer register instead. For conversions, rs2[0] selects W/WU and rs2[4:2] is rm (001 = round to zero). FCVT.ES is funct7 `1111100` with rs1 = source es and rs2 = target es, converting posit register rd in place. |
| custom-1 `0101011` | Fused multiply-add, R4-type. rs3 is in bits 31:27. Bits 26:25 select FMADD / FMSUB / FNMSUB / FNMADD. xs1/xs2 work as for custom-0; rs3 always comes from the posit registers. |
| custom-2 `1011011` | Posit load: `p[rd] <= mem[x_rs1 + imm[31:20]]`. The base is always the core's rs1 value. |
| custom-3 `1111011` | Posit store: `mem[x_rs1 + {imm[31:25], imm[11:7]}] <= p[rs2]`. |

A command's response arrives one cycle after the FPU result.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

`tb/posit_ref_pkg.sv` is an independent reference model:

* It decodes by walking bits.
* It computes products, sums, quotients and roots exactly on 1280-bit
  integers.
* It encodes by writing out the bit string and rounding it once.

The arithmetic testbenches compare bit-exactly against this model, in es=2
and es=3. They use random operands biased toward 0, NaR, maxpos/minpos and
values near 1. They also check each unit's cycle count.

`tb_posit_fpu` checks every operation and every latency in the table above.

`tb_peri_posit_accel` is end-to-end at the default parameters and does the
following:

* fills the register file by posit loads from a behavioural memory;
* runs 400 random instructions of every class, with es switched through
  the CSR;
* checks results in responses or through posit stores;
* checks DZ after a division by zero;
* fails if any mechanism (load, store, each arithmetic class, RTZ,
  FCVT.ES, es switch, xd response, DZ) never occurred.

All testbenches pass. To run one with Verilator:

```
verilator --binary --timing --assert -Wno-lint -Wno-style \
  rtl/posit_pkg.sv tb/posit_ref_pkg.sv $(ls rtl/*.sv | grep -v posit_pkg) \
  tb/tb_peri_posit_accel.sv --top-module tb_peri_posit_accel
./obj_dir/Vtb_peri_posit_accel
```

## Where this design departs from, or adds to, the original

* **Not built:**
  - the RISC-V core,
  - its pipeline, where the FPU can also sit as a tightly-coupled execution
    unit in place of the float unit,
  - the caches and bus,
  - the IEEE 754 unit.

  The co-processor brings the cache interface and CSR access out as
  ports.
* **Custom-instruction mapping.** The mapping of instructions onto the four
  custom opcodes, and the use of funct7[1:0] for variants, is this
  design's choice.
* **Blocking execution.** The FPU and the co-processor execute one operation
  at a time.
* **Quotient and root widths.** The divider and square-root widths (32 and
  29 bits) were chosen to meet the latency table while keeping results
  correctly rounded. That is how the testbenches check them.
* **Posit-to-integer saturation.** The NaR and out-of-range values follow
  the RISC-V float rules.
* **Division by zero.** x/0 raises DZ even for 0/0. NaR/0 gives NaR without
  DZ.
* **FCLASS bit positions.** These are the nearest RISC-V categories.
* **CSR addresses and es-mode writes.** The CSR addresses, and the rule that
  es-mode writes other than 2 or 3 are ignored, are this design's choices.
