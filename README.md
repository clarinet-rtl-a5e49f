# Posit arithmetic with a quire, beside the FPU of an in-order RISC-V core

Posits are a floating-point-like number format with tapered precision: values
near 1 get more fraction bits than IEEE floats of the same width, very large
and very small values get fewer. The format comes with the *quire*, a wide
fixed-point accumulator that can hold any sum of products of posits exactly,
so that a dot product is rounded once, at the end, instead of after every
step.

This RTL adds posit arithmetic to a 32-bit RISC-V core (RV32IMAFC, in-order,
in the style of the Flute core) without disturbing its floating-point unit.
Posit values live in their own register file (the PRF). The quire is never a
register that software can read or write directly: it lives inside the posit
unit, *Melodica*, and is reached only through instructions that initialise
it, accumulate into it and read it back as a rounded posit. This keeps the
512-bit quire of 32-bit posits off the register files, the forwarding paths
and the memory pipeline. The cost of the quire is then mostly its own
storage.

The design follows the CLARINET framework (N. N. Sharma et al., "CLARINET:
A RISC-V Based Framework for Posit Arithmetic Empiricism"). Everything here is a fresh implementation in SystemVerilog.
The section "Where this departs from CLARINET" lists what was chosen here
where that description is silent.

The default build is the 32-bit configuration with a divider: posits of
N = 32 bits with es = 2, a 512-bit quire, 32 posit registers and fused
divide-accumulate.

## Numbers

A posit of N bits with es exponent bits holds, after the sign, a *regime*
run of equal bits ended by the opposite bit, then up to es exponent bits,
then the fraction. A run of m ones means k = m - 1 and a run of m zeros means
k = -m. The value is

    (-1)^s * 2^(k * 2^es + e) * 1.f

Negative posits are the two's complement of their magnitude. There are only
two special patterns: all zeros is zero, and 100...0 is NaR ("not a real").
Rounding is always round-to-nearest-even. A nonzero value never rounds to
zero or to NaR: it saturates at minpos or maxpos.

The bit patterns are ordered like their values when read as signed integers.
The testbenches use this to round by binary search.

The quire for N-bit posits has N²/2 bits, in two's complement:

| field | bits (general) | N = 32 |
|---|---|---|
| sign | 1 | 1 |
| carry guard | N - 1 | 31 |
| integer | N²/4 - N/2 | 240 |
| fraction | N²/4 - N/2 | 240 |

The integer and fraction parts together hold maxpos² and minpos² exactly, so
the product of any two posits fits. The carry guard allows at least 2^31
such products to be summed without overflow. Inside the RTL, a value is
placed in the quire at bit position `scale + QF`, where QF = N(N-2)/4 is the
number of fraction bits.

## Instructions

Twelve instructions are added. All of them reuse existing major opcodes. The
two-bit `fmt` field (bits 26:25) is `10` for posit. In the conversions,
`rs2` names the source type: `10000` is a posit and `10001` is the quire.

| instruction | encoding | effect |
|---|---|---|
| FCVT.R.P | OP-FP, funct7 `0101010`, rs2 `10000` | quire ← posit p[rs1] |
| FCVT.P.R | OP-FP, funct7 `1101010`, rs2 `10000` or `10001` | p[rd] ← round(quire) |
| FMA.P | OP-FP, funct7 `0110010` | quire += p[rs1] × p[rs2] |
| FMS.P | OP-FP, funct7 `0110110` | quire −= p[rs1] × p[rs2] |
| FDA.P | OP-FP, funct7 `0111010` | quire += p[rs1] / p[rs2] |
| FDS.P | OP-FP, funct7 `0111110` | quire −= p[rs1] / p[rs2] |
| FCVT.P.S | OP-FP, funct7 `0100110`, rs2 `00000` | p[rd] ← posit(f[rs1]) |
| FCVT.S.P | OP-FP, funct7 `0100100`, rs2 `10000` | f[rd] ← float(p[rs1]) |
| PMV.W.X | OP-FP, funct7 `1111010`, rs2 `00000`, funct3 `000` | p[rd] ← x[rs1] (low N bits) |
| PMV.X.W | OP-FP, funct7 `1110000`, rs2 `10000`, funct3 `000` | x[rd] ← p[rs1], zero-extended |
| PLW | LOAD-FP, funct3 `110`, I-format | p[rd] ← mem[x[rs1] + imm] |
| PSW | STORE-FP, funct3 `110`, S-format | mem[x[rs1] + imm] ← p[rs2] |

OP-FP is `1010011`, LOAD-FP is `0000111` and STORE-FP is `0100111`. FCVT.P.R
is decoded with either rs2 code. The published instruction table prints
`10000`. The accompanying text says the quire source is marked by `10001`.
Since funct7 already separates FCVT.P.R from FCVT.R.P, accepting both codes
costs nothing. The fields printed as zero are not checked: rd of the compute
and init instructions, and rs1 of FCVT.P.R. Neither is the rounding-mode
field of the OP-FP instructions, because posits have one rounding mode.

A posit computation is always the same three steps: FCVT.R.P, any number of
FMA.P/FMS.P/FDA.P/FDS.P, then FCVT.P.R. Plain posit multiply, divide, add
and subtract are special cases. For example, a×b is FCVT.R.P from a zero
register, then FMA.P, then FCVT.P.R. FCVT.P.S and FCVT.S.P bracket a posit
kernel inside a float program.

## The posit F-box (`clarinet_posit_fbox`, the top)

The core's floating-point box gets a second functional unit. Decode routes
the twelve posit instructions to it and everything else to the FPU. This
module is that second unit: the decoder, the PRF, Melodica and a small
issue controller. The rest of the core sits outside these ports: the
pipeline, the GPR and FPR files, the FPU and the caches.

- `iss_*`: the instruction at the execute stage, with the GPR and FPR values
  of its rs1 already read and forwarded by the pipeline. `iss_is_posit` is
  the routing decision.
- `wb_*`: a one-cycle write-back pulse to the GPR (PMV.X.W) or the FPR
  (FCVT.S.P).
- `mem_*`: PLW/PSW requests with a valid/ready handshake, address rs1 + imm
  and a size of 0, 1 or 2 for N = 8, 16 or 32. Load data returns on
  `mem_rsp_valid`.
- `busy`, `quire_stall`, `prf_bypass`: status and event outputs.

Instructions that only change the quire (FCVT.R.P and the four fused ones)
complete when Melodica accepts them. Nothing goes back to a register file, so
they stream at one per cycle while the quire works behind them. This is
where posit dot products gain over `fmadd.s` chains.

An instruction that produces a register value keeps the unit busy until the
value arrives: FCVT.P.R, FCVT.P.S, FCVT.S.P or PLW. In the cycle the value
arrives, the unit already accepts the next instruction. The PRF forwards the
value being written to a read in the same cycle; this is the posit bypass,
counted on `prf_bypass`. PMV.W.X and PMV.X.W are single-cycle. They are held
off only in that arrival cycle, because the PRF write port or the write-back
port is then taken.

## Melodica: four stages

Melodica takes at most one command per cycle (`in_valid`/`in_ready`). It
holds one pipeline register per stage, and all stages advance together.

1. **Extraction.** `ext1` and `ext2` (`posit_extract`) turn each posit into
   sign, zero and NaR flags, a signed scale k·2^es + e, and a left-aligned
   fraction. A float operand goes to `FtoP` (`float_to_posit`) instead.
2. **Computation.** `posit_mul` forms the exact product. `posit_div` forms a
   quotient; see below. Either result is placed, sign and all, as a
   two's-complement addend of quire width. An FCVT.R.P operand is aligned
   the same way. FCVT.S.P uses `PtoF` (`posit_to_float`).
3. **Quire.** The stage hands the addend to the quire's accumulate port, or
   loads the quire (init), or issues a read request. An init or a read waits
   here until every earlier accumulate has left the quire's adder pipeline.
   While it waits, `quire_stall` is high and the stages behind it hold.
4. **Normalization.** `norm` (`posit_norm`) rounds either the quire read-out
   or the FtoP result to a posit. The PtoF result is multiplexed in unchanged.

Cycle counts, measured from the edge that accepts the command:

| command | result |
|---|---|
| FMA.P, FMS.P, FDA.P, FDS.P, FCVT.R.P | no output; the next command can follow in the next cycle |
| accumulate | reaches the quire after 2 cycles, complete 16 cycles later (NSEG) |
| FCVT.P.S, FCVT.S.P | `out_valid` 3 cycles later |
| FCVT.P.R | 5 cycles later, plus any wait for outstanding accumulates |

At the top, a dot product of length L issues as 3L + 2 instructions:
PMV.W.X ×2 and FMA.P per element, plus the init and the read. It ends about
25 cycles after the last FMA.P. `tb_posit_kernels` measures 12313 cycles for
L = 4096.

## The quire: segmented adder and fast read

A 512-bit adder in one cycle would be far longer than anything else in a
small core. The quire is therefore stored as NSEG segments of 32 bits, the
width of the core's own integer adder. For 32-bit posits that is 16
segments; for 16-bit posits 4; for 8-bit posits a single segment, so the
accumulate finishes in one cycle. Each segment carries a *zero flag*.

**Accumulate (skewed pipeline).** When an addend enters, segment 0 adds its
32-bit slice. The carry out and the rest of the addend move into a stage
register. In the next cycle segment 1 adds, and so on. Each adder stage
holds one addend in flight, so a new addend can enter every cycle. Addend j
always reaches segment i one cycle after addend j-1 reached it. Every
segment therefore sees the addends in program order, together with exactly
the carry that the lower segments produced for that addend. The register
ends up holding the exact running sum. `busy` is high while any stage holds
an addend. The zero flags are recomputed as each segment is written.

**Read.** Reading converts the fixed-point value to the sign, scale and
fraction the normalizer needs, and takes two cycles.

1. The magnitude of the quire is formed and registered. For a positive
   quire, the stored zero flags are used directly. For a negative one, the
   flags are recomputed from the magnitude.
2. A priority search over the flags finds the highest nonzero segment. A
   32-bit leading-zero count inside that segment gives the position of the
   leading one. The scale is that position minus QF. The fraction is the N
   bits after the leading one, and everything below them ORs into a sticky
   bit.

Thanks to the flags, the count costs one segment-wide count, whatever N is.

**Init and ordering.** Init writes a whole aligned value in one cycle.
Melodica issues an init or a read only when `busy` is low, so each one sees
every earlier accumulate and no accumulate is lost to an init.

**NaR.** A NaR operand, or a division by zero, sets a flag that makes the
quire read as NaR until the next init.

## Rounding, conversion and division

- `posit_norm` builds one wide vector: a two-bit regime seed (`10` for k ≥ 0,
  `01` for k < 0), the es exponent bits and the fraction. It then shifts it
  right: arithmetically by k, which stretches the leading one into a run of
  k+1 ones, or logically by -k-1, which stretches the zero. After the shift,
  the top N-1 bits are the truncated magnitude, the next bit is the guard
  bit, and the rest is sticky. Round-to-nearest-even is
  `guard & (lsb | sticky)`. The rounded magnitude is negated for negative
  values. Scales outside ±(N-2)·2^es saturate.
- `float_to_posit` handles normal and subnormal binary32 inputs. Infinity and
  NaN become NaR. Its result goes through the same normalizer.
- `posit_to_float` rounds to nearest even at 23 fraction bits. It overflows
  to infinity, rounds through the subnormal range, and maps NaR to the quiet
  NaN `7FC00000`.
- `posit_div` divides the significands with QB = 2·FW + 2 quotient fraction
  bits and truncates. FW is the largest posit fraction width, 27 for
  (32, 2). A quotient is generally not exact, so the divide-accumulate
  instructions are exact only up to that truncation: an error below one unit
  in the 56th fraction bit of the quotient for N = 32. That error is far
  below the posit's own rounding unless a long sum cancels.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `clarinet_posit_fbox`, `melodica` | `N` | 32 | posit width (8, 16, 24 and 32 are meaningful; at most 32 at the top) |
| | `ES` | 2 | exponent bits (use 0 for N = 8, 1 for N = 16) |
| | `DIV_EN` | 1 | build the divider (FDA.P/FDS.P add nothing when 0) |
| `clarinet_posit_fbox` | `NREGS` | 32 | posit registers |
| `posit_pkg` | `QSEG_W` | 32 | quire segment width |

Derived widths come from functions in `posit_pkg`: `quire_w`,
`quire_frac`, `quire_segs`, `frac_w` and `scale_w`. Compiled for a generic
cell library, the default top is about 1,100 word-level cells and 11,300
flip-flop bits. Most of the flip-flops are the quire, the PRF and the 16
stages of addend registers in the skewed adder.

## Files

| file | contents |
|---|---|
| `rtl/posit_pkg.sv` | encodings, command and instruction types, width functions |
| `rtl/posit_decoder.sv` | instruction word → decoded posit instruction |
| `rtl/posit_regfile.sv` | PRF, two read ports with write-through bypass |
| `rtl/posit_extract.sv` | ext1/ext2 |
| `rtl/float_to_posit.sv`, `rtl/posit_to_float.sv` | FtoP, PtoF |
| `rtl/posit_mul.sv`, `rtl/posit_div.sv`, `rtl/quire_align.sv` | products and quotients as quire addends |
| `rtl/quire.sv` | segmented quire |
| `rtl/posit_norm.sv` | rounding to a posit |
| `rtl/melodica.sv` | the four-stage unit |
| `rtl/clarinet_posit_fbox.sv` | top: decoder, PRF, Melodica, issue control |

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog. The
expected values come from `tb/posit_ref_pkg.sv`. It computes exactly, in
1024-bit fixed point with 500 fraction bits, decodes posits by walking their
bits, and rounds to posits and floats by binary search over bit patterns. It
shares no code or method with the RTL.

| testbench | what it covers |
|---|---|
| `tb_posit_extract` | all 256 patterns at (8, 0), random patterns at (32, 2) |
| `tb_posit_norm`, `tb_float_to_posit` | random values at (8, 0) and (32, 2), saturation, subnormals, zero, NaR, infinities and NaN |
| `tb_posit_mul`, `tb_posit_div`, `tb_posit_to_float` | random operands at (32, 2), zero and NaR, division by zero, forced ties |
| `tb_quire` | random init/accumulate/read at N = 8, 16, 24 and 32; back-to-back accumulates; the accumulate depth (1, 4, 9, 16 cycles) |
| `tb_posit_regfile`, `tb_posit_decoder` | random reads and writes on both ports with the bypass; all twelve encodings and neighbouring ordinary FP encodings |
| `tb_melodica` | all eight commands, back-to-back dot products, the stall of a quire read, NaR, output latency |
| `tb_clarinet_posit_fbox` | programs at the default size, in three styles: posits in memory (PLW/PSW), posits through integer registers (PMV), and float data with posit compute (FCVT.P.S/FCVT.S.P); counts every mechanism (back-to-back fused ops, quire stall, PRF bypass, loads, stores, moves, conversions, divides) |
| `tb_fbox_sizes` | the whole unit at (8, 0) and (16, 1): dot products with FMA.P/FMS.P through PMV moves, FCVT.S.P and FCVT.P.S, exact reference |
| `tb_posit_kernels` | the quire access patterns of the evaluated kernels at the default size, exact results and cycle bounds: a 4096-long dot product (xDot), 64 × 64 (xGEMV), 256 × 16 (xGEMM), 64 × 1 (xGivens), the Lucas-Kanade velocity step (two dot products of length 25 and one of length 2 per pixel) |

Random test values are kept so that at least one fraction bit survives in
every result. There, rounding to the nearer value and the posit standard's
rounding of the bit pattern agree.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert rtl/posit_pkg.sv tb/posit_ref_pkg.sv \
        -y rtl -y tb tb/tb_posit_kernels.sv --top-module tb_posit_kernels
    ./obj_dir/Vtb_posit_kernels

Each testbench finishes in seconds. All of them also pass with
`+verilator+rand+reset+2`, which starts uninitialised state at random values.

## Where this departs from CLARINET, or fills a gap

- **Only the posit side is RTL.** The Flute pipeline, its FPU, register
  files, CSRs and caches are not part of this code. The top's ports are where
  they would connect.
- **Issue rule.** At most one register-writing posit instruction is
  outstanding, and quire-only instructions stream freely. The original core's
  exact scoreboarding is not described.
- **Pipeline shape.** Every command passes through all four Melodica stages,
  with one register per stage. The original unit's sub-blocks have their own
  request/response interfaces and internal latencies, which are not given.
  Cycle counts therefore differ from the original's.
- **Two-cycle quire read.** The original only states that the zero flags make
  the leading-zero count single-cycle, at a fixed latency.
- **Division precision** (QB above) is a choice made here. The quire cannot
  hold an inexact quotient exactly.
- **NaR in the quire** is a sticky flag. Infinity and NaN from floats become
  NaR. NaR to float gives the canonical quiet NaN.
- **FCVT.P.R** is accepted with rs2 = `10000` and with `10001`.
- **PMV.X.W** zero-extends. Loads and stores use the natural size of N.
- **Reset.** Asynchronous and active low. The PRF and the quire reset to
  zero.
- **Not built.** A posit square root. The original does not have one either:
  square roots go through the FPU with conversions.
