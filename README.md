# Posit arithmetic through an IEEE-754 FPU: codec-wrapped FPU for a RISC-V core

Posits P(n,es) are a floating-point format with a variable-length "regime"
field. For the same width they give more accuracy near 1 and more dynamic
range than IEEE-754. Adding them to a small RISC-V core usually means a
second arithmetic unit, either next to the FPU or in its place. This design
adds no posit arithmetic at all. Each operand of the existing FP32 FPU gets a
small **input decoder** (posit → FP32), and the FPU's result gets an **output
encoder** (FP32 → posit). Every 8-bit or 16-bit posit is exactly
representable in FP32, so the FPU computes as usual. The only rounding to the
posit format happens once, at the output encoder.

A custom CSR, `pcsr`, decides for each of the three operands and for the
result whether the value is a posit or FP32, whether it is 8 or 16 bits wide,
and which exponent size `es` (0..7) it uses. Three things follow:

* the standard F-extension instructions (`fadd.s`, `fmul.s`, `fmadd.s`,
  `fdiv.s`, ...) compute on posits once `pcsr` is written. No new
  arithmetic opcodes are needed;
* with `pfmt = 0` (the reset value) every codec is skipped, and the unit is
  an ordinary IEEE-754 FPU;
* operands of different widths and formats can be mixed in one instruction,
  and `es` can change at run time.

Three custom conversion instructions (`fcvt.p*.s`, `fcvt.s.p*`,
`fcvt.p*.p*`) move data between FP32, P8 and P16. They use only the two
codecs and skip the FPU.

The RTL here is the posit part of that core: the codecs, `pcsr`, the decoder
extension for the conversions, and the wrapper that places them around the
FPU. The FP32 FPU itself, the rest of the core and the SoC are existing
designs and are not included. The FPU appears as a port bundle, and a
behavioural model of it (`tb/fpu_model.sv`) is used in simulation.

## Block structure

```
                 pcsr (CSR 0x800)             fcvt_decoder
           pfmt/pprec/pes per slot 0..3    (custom conversions, es)
                    |                               |
      rs1 --> [posit_input_decoder 0] --+           |
      rs2 --> [posit_input_decoder 1] --+--> original FP32 FPU --+
      rs3 --> [posit_input_decoder 2] --+   (external, fpu_* ports) |
                    |                                             v
                    +---- conversion bypass (1 register) --> [posit_output_encoder] --> result
```

Inside one input decoder (`posit_input_decoder`):

```
 operand[7:0]  --> posit_decoder #(8)  --+
                                          +-- pprec --> fp32_encoder --+
 operand[15:0] --> posit_decoder #(16) --+                             +-- pfmt --> FP32 operand
 operand[31:0] -------------------------------------------------------+
```

The output encoder (`posit_output_encoder`) is the mirror image:
`fp32_decoder`, then `posit_encoder #(8)` and `#(16)` in parallel, then the
`pprec` and `pfmt` multiplexers. The two widths use separate codecs. They are
not one segmented codec.

All codecs pass numbers to each other in one internal form, `unpacked_t`
(`rtl/posit_pkg.sv`):

| field | width | meaning |
|-------|-------|---------|
| `nar`   | 1  | posit NaR, or an FP NaN or infinity |
| `zero`  | 1  | exact zero |
| `sign`  | 1  | sign |
| `scale` | 16, signed | value = 1.frac × 2^scale |
| `frac`  | 23 | fraction without the hidden one, left aligned |

For a posit with regime value k and exponent field e, scale = k·2^es + e.
For FP32, scale = exponent − 127. A 16-bit scale covers the widest case
built, P(16,7), where |scale| ≤ 14·128+127.

## The posit decoder with run-time es (`posit_decoder`)

A posit word is laid out as: sign, then the regime (a run of equal bits ended
by the opposite bit, or by the end of the word), then up to `es` exponent
bits, then the fraction. The regime run of m bits means k = m−1 for a run of
ones, and k = −m for a run of zeros. The decoder works in five steps:

1. Two's-complement the n−1 low bits when the sign is set. This gives `op`,
   the magnitude without its sign.
2. Count the run of bits equal to `op[n-2]`. This is `cnt`. The design XORs
   `op` with `op[n-2]`, so one leading-zero counter works for both
   polarities.
3. k = cnt−1 if `op[n-2]` = 1, else −cnt.
4. Shift `op` left by `cnt+1` (the regime and its terminating bit). This
   gives `exp_mant`, the exponent and fraction, left aligned.
5. Run-time es needs two more shifters. The exponent shifter shifts
   `exp_mant` left by `es` to give the fraction, and the top `es` bits of
   `exp_mant` are the exponent field e. The k-align shifter forms `k << es`.
   An OR then merges it with e. The OR is exact because the low `es` bits of
   `k << es` are zero.

Exponent bits that fall off the end of the word are read as zero. `0…0`
decodes to zero, and `10…0` decodes to NaR.

Example, P(16,2), word `0000000010101001`: the regime is 7 zeros, so k = −7.
The exponent is `01`, so e = 1, and the fraction is `01001`. The scale is
−7·4+1 = −27, and the value is 2^−27 × 1.01001₂.

## The posit encoder (`posit_encoder`)

1. k = scale >>> es (arithmetic shift) and exp = scale & (2^es − 1).
2. Shift `{exp, frac}` left by 7−es. This drops the exponent bits that `es`
   leaves unused, so the fraction follows the exponent directly.
3. The sign of k picks the regime. For k ≥ 0 it is k+1 ones and a zero
   (k+2 bits). For k < 0 it is −k zeros and a one (−k+1 bits). The regime is
   put in front of the exponent/fraction bits by one left shift of
   `{fill bits, terminator, exp_mant}`.
4. Round the n−1 body bits to nearest, ties to even. The guard bit is the
   next bit, and the sticky bit is the OR of the rest. A carry out of the body
   is impossible in the cases that reach this step.
5. Saturate. If k ≥ n−2 the result is maxpos (`01…1`). If k < −(n−2) it is
   minpos (`0…01`). A nonzero number never becomes zero or NaR.
6. Two's-complement the whole word for negative numbers. FP NaN and infinity
   give NaR. Zero gives zero.

Posit results always round to nearest-even. The FP rounding mode in `fcsr`
applies only to the FP32 arithmetic inside the FPU. So a posit result can be
rounded twice: once by the FPU to FP32, once by the encoder to the posit.
The testbenches model exactly that sequence.

## The FP32 side of the codecs

`fp32_encoder` packs a decoded posit into binary32. A posit of 16 bits or
fewer has at most 13 fraction bits, so in the normal range the packing is
exact. With large `es` a posit can lie outside FP32's range:

* values below the normal range become subnormals, rounded to nearest-even,
  or zero;
* values above it saturate to ±FLT_MAX (a posit has no infinity);
* NaR becomes the quiet NaN `0x7FC00000`.

`fp32_decoder` unpacks the FPU result. Subnormals are normalised with a
leading-zero count. Infinity and NaN become NaR.

## pcsr: the run-time configuration

| bits | field | use |
|------|-------|-----|
| 31:20 | reserved | read as 0, writes ignored |
| 19:8  | `pes`   | 4 × 3 bits, slot i at `[8+3i +: 3]`, es = 0..7 |
| 7:4   | `pprec` | slot i at bit 4+i: 0 = 8-bit, 1 = 16-bit posit |
| 3:0   | `pfmt`  | slot i at bit i: 0 = FP32 (codec skipped), 1 = posit |

Slots 0, 1 and 2 are the operands rs1, rs2 and rs3. Slot 3 is the result.
The register is at CSR address `0x800` and is accessed with `csrrw`,
`csrrs` and `csrrc` through a simple port (`csr_addr`, `csr_op`,
`csr_wdata`, `csr_rdata`). A write takes effect on the next clock. Reset
clears it, which gives plain FP32 operation.

Example: `pcsr = 0x249FF` runs every operand and the result as P(16,1).
`pcsr = 0x0000F` runs them as P(8,0).

A posit is kept in the low 8 or 16 bits of the 32-bit FP register. Its upper
bits are ignored on input and written as zero on output.

## Conversion instructions (`fcvt_decoder`)

All are in the OP-FP major opcode `0x53`, with funct5 values that the F
extension does not use:

| instruction | [31:27] | [26:25] | [24:20] | [14:12] | converts |
|-------------|---------|---------|---------|---------|----------|
| `fcvt.p8.s`    | 0x10 | 0 | 0x00 | es | FP32 → P8  |
| `fcvt.p16.s`   | 0x10 | 0 | 0x08 | es | FP32 → P16 |
| `fcvt.s.p8`    | 0x12 | 0 | 0x00 | es | P8 → FP32  |
| `fcvt.s.p16`   | 0x12 | 0 | 0x08 | es | P16 → FP32 |
| `fcvt.p8.p8`   | 0x11 | 0 | 0x00 | es | P8 → P8 (es change) |
| `fcvt.p8.p16`  | 0x11 | 0 | 0x08 | es | P16 → P8   |
| `fcvt.p16.p8`  | 0x11 | 1 | 0x00 | es | P8 → P16   |
| `fcvt.p16.p16` | 0x11 | 1 | 0x08 | es | P16 → P16 (es change) |

rs1 is in [19:15] and rd in [11:7]. Bits [24:20] give the width of the posit
being converted: the source, or the destination for `fcvt.p*.s`. For
posit-to-posit conversions, bit 25 gives the destination width. The es
field, in the place of an F instruction's rounding mode, is interpreted as
follows:

* `0..6`: a static es, used for both source and destination;
* `7`: dynamic. The source es is taken from `pcsr` slot 0 and the
  destination es from slot 3. So `fcvt.p16.p16` with es=7 converts between
  two exponent sizes.

The decoder also produces `fpu_bypass`.

## The wrapper (`posit_fpu`): issue, bypass and ordering

* **Arithmetic instructions.** `in_valid`/`in_ready` from the core become
  `fpu_in_valid`/`fpu_in_ready` toward the FPU. The three operands go through
  their input decoders (combinational). The instruction word is passed on
  for the FPU's own decoding. The result's codec configuration
  (`codec_cfg_t`, 5 bits) travels with the operation as the FPU **tag**. When
  `fpu_out_valid` comes back, the output encoder uses the returned tag, not
  the current `pcsr`. A `pcsr` write while an operation is in flight
  therefore cannot change how that result is encoded.
* **Conversions.** Operand 0 goes through its input decoder with the
  instruction's source configuration. It is captured in a one-entry result
  register and leaves through the output encoder one cycle later with the
  destination configuration. The FPU sees no request, and its operand inputs
  are held at zero so it does not toggle. A conversion is accepted only when
  no FPU operation is in flight. An FPU operation is not issued in the cycle
  the conversion result is delivered. Together these keep results in order
  and stop the two sources from colliding. Assertions check both rules.
* **Integer-side instructions.** Compare, `fcvt.w.s`/`fcvt.s.w`, `fmv` and
  `fclass` read or write an integer register. They skip the codec on that
  side.
* **Result.** `out_valid` is high for one cycle. The core must take it
  (there is no `out_ready`). `flags` come from the FPU. Conversions report no
  flags.

Latency: the codecs add no register. An arithmetic instruction takes the
FPU's latency. A conversion takes one cycle.

## Departures from the published design and choices made here

Taken from the description: codecs placed at the FPU's inputs and output,
the P8 and P16 codecs in parallel with `pprec`/`pfmt` multiplexers, the
decoder and encoder structure with run-time es (leading-run count, regime
shifter, exponent shifter, k-align shifter and OR; shift/mask for k and exp,
exponent shifter before the regime shifter, rounding, two's complement), the
`pcsr` field widths and bit positions, the conversion-instruction encodings,
and the FPU-bypass signal.

Chosen here, because the description leaves these points open:

* the slot order inside each `pcsr` field, the meaning of 0/1 in `pfmt` and
  `pprec`, and the CSR address;
* the meaning of the es field: 7 means dynamic, and dynamic es is read from
  slots 0 and 3;
* the internal `unpacked_t` form and the 16-bit scale;
* nearest-even posit rounding regardless of `fcsr.frm`, and maxpos/minpos
  saturation;
* saturation to ±FLT_MAX, and subnormal rounding, when a large-es posit does
  not fit FP32;
* where a P8/P16 value sits in a 32-bit register (low bits, upper bits zero);
* the FPU interface (valid/ready, the instruction word, a tag for the result
  format), the one-cycle bypass register, and the ordering rules;
* codec skipping for integer-side instructions; no flags on conversions.

Not built:

* the **extra pipeline stage** that lets the codec-wrapped FPU reach the
  baseline clock. Its position is not given, and the SoC evaluation uses the
  default pipeline, which is what is built here;
* the FPU itself (ADDMUL, DIVSQRT, COMP, CONV, operand distribution,
  round-robin arbitration), the rest of the RISC-V core, the SoC, and the
  assembler support.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/posit_pkg.sv tb/posit_ref_pkg.sv tb/tb_posit_fpu.sv --top-module tb_posit_fpu
./obj_dir/Vtb_posit_fpu
```

For another testbench, change the last file and the top module. Each run
takes seconds.

| testbench | what it checks |
|-----------|----------------|
| `tb_posit_decoder` | all 2^8 and 2^16 patterns at every es 0..7, against a bit-walking reference decoder |
| `tb_posit_encoder` | random signs, scales (inside and far outside the posit range) and fractions, exact posit values and the exact midpoints between neighbours (ties-to-even), for P8 and P16 at all es |
| `tb_fp32_encoder`, `tb_fp32_decoder` | normal, subnormal, saturating and special values against real-arithmetic references |
| `tb_posit_input_decoder`, `tb_posit_output_encoder` | all modes (FP32 / P8 / P16) at all es, random values |
| `tb_pcsr` | random `csrrw`/`csrrs`/`csrrc`, foreign addresses, slot decoding, reserved bits |
| `tb_fcvt_decoder` | all eight conversions with every es value, and rejection of non-matching words |
| `tb_posit_fpu` | end to end with the FPU model. Back-to-back issue, `pcsr` rewrites (also while an operation is in flight), mixed precision and format, all conversions, and NaR and saturation. It counts each mechanism and fails if one never occurs |
| `tb_gemm_workload` | GEMM N = 4..20 and GEMV N = 4..32 in FP32, P(16,1) and P(8,0), one `fmadd.s` per multiply-accumulate, bit-exact against the reference. Each posit kernel must take exactly as many cycles as the FP32 one |
| `tb_softmax_workload` | softmax over n = 8..128 in the same three formats, built only from F instructions (`fmax.s`, `fsub.s`, a short Taylor polynomial with `fmadd.s` and repeated squaring for exp, `fadd.s`, one `fdiv.s`, `fmul.s`). Every instruction is checked bit-exact, and the posit kernels must take as many cycles as FP32. It also reports the error against an exact softmax: about 1e-5 for FP32, 3e-4 for P(16,1) and 0.06 for P(8,0) at n = 128 |

The reference models in `tb/posit_ref_pkg.sv` are written a different way
from the RTL. They decode posits by walking the bit string, encode by
building the full bit string and rounding it, and use `real` arithmetic for
FP32. The FP32 arithmetic of `fpu_model` rounds correctly: it computes in
double and rounds once more, and fused multiply-add uses an exact two-sum.
Its latencies (3 cycles for add/multiply, 1 for compare, 8 for
divide/square root, one operation at a time) are only roughly those of a
real FPU. Cycle counts from the workload testbench describe the FPU path
alone, not a whole core running a kernel.

To change the design, the codec width parameter is `N` on
`posit_decoder`/`posit_encoder` (8..24 bits). Adding a 24-bit posit would
need a third decoder and encoder in each codec and a wider `pprec` field.
