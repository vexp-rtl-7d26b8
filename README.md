# A BF16 exponential instruction for a RISC-V floating-point unit

In a Transformer, once the matrix multiplications are accelerated, Softmax
becomes the bottleneck, and most of Softmax is the exponential. A software
`exp()` from a math library costs a few hundred cycles per element on a small
RISC-V core. This design adds an exponential to the core's FPU instead. It is a
small arithmetic block for Bfloat16 (BF16) that gives `exp(x)` for four packed
BF16 values per cycle. Two custom instructions reach it: `FEXP` (one value) and
`VFEXP` (four values packed in a 64-bit FP register).

The RTL follows a published design: an extension of the FPU in the cores of a
Snitch compute cluster. Its datapath, the instruction encodings, the lane count
and the pipelining are the published ones. Where the publication is silent,
this RTL makes its own choices (fixed-point widths, handshakes, the register
file and scoreboard around the FPU), and it says so at each point below.

## 1. The approximation

### Schraudolph's trick

A BF16 value is `sign | exponent[7:0] | fraction[6:0]`, with bias 127. Write
`x' = x · log2(e)`, so that `exp(x) = 2^x'`. Split `x'` into `n = floor(x')`
and `f = x' − n`, with `f` in [0, 1). Then

    exp(x) = 2^n · 2^f ≈ 2^n · (1 + f)

The right-hand side is exactly the value whose BF16 exponent field is
`n + 127` and whose fraction field is `f`. So one fixed-point number,
`(x' + 127) · 2^7`, read as a 15-bit integer, *is* the bit pattern of the
approximation. No table and no iteration are needed: a multiply, a shift and
an add.

### Mantissa correction P(f)

The straight line `1 + f` is up to 6 % too high in the middle of the interval.
The design therefore replaces the fraction `f` by a polynomial `P(f) ≈ 2^f − 1`.
It uses two pieces, selected by the fraction's top bit:

| range of f  | P(f)                                   |
|-------------|----------------------------------------|
| [0, 0.5)    | α · f · (f + γ1)                        |
| [0.5, 1)    | not( β · not(f) · (f + γ2) )            |

Here `not()` is the bitwise complement of the fixed-point value, a cheap stand-in
for `1 − v` (it equals `1 − v − 2^-7` on 7 bits). The published constants are
α = 0.21875, β = 0.4375, γ1 = 3.296875 and γ2 = 2.171875. All four are exact
in short fixed point: α = 7/32, β = 14/32, γ1 = 211/64, γ2 = 139/64. The
package `vexp_pkg` holds them in that form.

### Worked example: exp(1.0)

x = 0x3F80 (e = 127, significand 1.0000000):

1. Significand · log2(e): 128 · 23637 (log2 e with 14 fraction bits).
2. Align to 7 fraction bits: `x'·128 = 184.66`. Rounding gives 185.
3. Add `127 << 7` = 16256: 16441 = 0x4039. That is 2 · (1 + 57/128) = 2.89,
   the plain Schraudolph value.
4. P(57/128): 7 · 57 · (57 + 422) >> 12 = 46. Result 0x402E = 2 · (1 + 46/128)
   = **2.71875**. The true value is 2.71828.

## 2. The EXP datapath (one lane)

`exp_unit` chains two combinational stages and a pipeline register:

    x[15:0] ──► exps_stage ──► exps[15:7] ─────────────┐
                    │                                    ├─► {exps[15:7], P} ──► [reg] ──► exp[15:0]
                    └──────► exps[6:0] ──► poly_stage ──┘

**`exps_stage`** (Schraudolph):

- `1 || x[6:0]` (8 bits) times a log2(e) constant. The constant has
  `LOG2E_FRAC` = 14 fraction bits, this design's choice.
- The product is placed at weight 2^6 and shifted right by `133 − x[14:7]`.
  That equals shifting by the exponent minus 127.
  133 is the smallest biased exponent at which `exp` always overflows: from
  |x| ≥ 64 on, `x'` leaves the BF16 range.
- The 15 bits above the dropped fraction bits are taken and rounded half-up.
  This gives `x'` in Q8.7.
- Negative `x`: the 15-bit value is bitwise inverted. One's complement is
  `−x'` less one LSB, so the `2^n` and `f` fields come out right without a
  subtractor.
- `127 << 7` is added modulo 2^15, and a 0 sign bit is put in front.
- Specials:
  - Exponent ≥ 133 (including ±inf, and NaN in this design) gives +inf
    for positive x and +0 for negative x.
  - Exponent 0 (zero and subnormals) is flushed to zero, so the result is
    exp(0) = 1.0.

**`poly_stage`** (P(f)):

- Bit 6 of the fraction picks the branch.
- A multiplexer picks γ2 or γ1, which is added to f[6:0] (10-bit sum, 7
  fraction bits).
- A second multiplexer picks f[5:0] or its complement. With bit 6 set,
  not(f) over 7 bits is just ~f[5:0], which is why only six bits take that
  path. This value is multiplied by α or β.
- The two partial results are multiplied and truncated to 7 fraction bits.
  The upper branch complements the product.

Overflow results have a zero fraction, and P(0) = 0, so ±inf and 0 pass
through the correction unchanged.

**Pipeline.** `NUM_PIPE_REGS` registers (default 1, as published) sit at the
lane output, where synthesis can retime them into the datapath. Each stage has
an enable. The lane has no valid bits of its own: the operation group owns
them.

## 3. SIMD operation group and FPU

**`exp_opgroup`** (the ExpOpGroup):

- It cuts a `WIDTH`-bit operand into `WIDTH/16` BF16 lanes. At 64 bits
  that is four lanes, as published.
- Lane *i* reads bits `16i+15:16i` and writes its result at the same place.
- Control is a valid/ready pipeline of `NUM_PIPE_REGS` stages, with the tag
  (destination register) and the scalar/vector mode travelling alongside the
  data.
- A stage takes new data when it is empty or when the stage after it moves on.
  So operations flow back-to-back at one per cycle (four exponentials per
  cycle), and a stalled output backs up the pipe.
- In scalar mode (`FEXP`) only lane 0 is enabled; the other lanes' registers
  are not clocked. The upper 48 result bits are set to ones (NaN-boxing, the
  RISC-V convention for narrow values in wide FP registers, this design's
  choice).

**`fpu_vexp`** (the extended FPU). The published FPU has the operation groups
FMA, DIVSQRT, COMP, CAST and SDOTP, and the EXP group beside them. They sit
between an *operands distribution* stage (three 64-bit operands) and an
*output arbitration* stage (one 64-bit result).

- Here the EXP group is inside. The five existing groups are one external
  port, `ext_*`: they belong to the unmodified multi-format FPU and are not
  part of this RTL.
- The request goes to the group named by `op_group_i`. The external groups
  receive all three operands and the raw instruction word.
- Output arbitration is a two-way round-robin, this design's choice.

## 4. Instructions

| instruction      | 32-bit encoding                              |
|------------------|----------------------------------------------|
| `FEXP  rd, rs1`  | `0011111 00000 rs1 000 rd 1010011`           |
| `VFEXP rd, rs1`  | `1011111 00000 rs1 000 rd 1010011`           |

Both are OP-FP R-type words. Bit 31 alone selects the packed form.
`fexp_decoder` compares every fixed bit and extracts rd, rs1 (and rs2/rs3 at
their standard places, for other FP instructions).

## 5. The FP subsystem (top: `vexp_fpu_ss`)

The top is a slice of a Snitch-style FP subsystem, enough to run the
instructions end to end:

- **Issue.** The integer core offloads an FP instruction (`acc_valid_i`,
  `acc_ready_o`, `acc_instr_i`).
  - FEXP/VFEXP read rs1 from the register file and go to the EXP group.
  - Every other instruction reads rs1, rs2 and rs3 and leaves through `ext_*`,
    tagged with rd.
- **Register file** (`fp_regfile`):
  - 32 × 64 bits, as published.
  - Three operand read ports plus one store read port (`st_addr_i`/`st_data_o`).
  - One write port. A write is visible from the next cycle.
- **Scoreboard.** Each register has a pending bit. It is set at issue and
  cleared at write-back. An instruction stalls while any register it reads or
  writes is pending (RAW and WAW hazards).
- **Write-back.** One write per cycle. A load or stream write (`ld_valid_i`)
  has priority; an FPU result offered in the same cycle waits one cycle, which
  back-pressures the FPU. Loads are not checked against the scoreboard: the
  core that issues them must order them.

Timing of a dependent pair with default parameters:

    cycle        0            1                2
    issue        VFEXP f1,f0  (f2,f1 stalls)   VFEXP f2,f1
    EXP lane     operands in  result valid,
                              written at edge
    pending f1   set ────────► cleared

A result is usable two cycles after issue (the published latency of two
cycles). Independent VFEXPs issue every cycle.

## 6. Accuracy and measured behaviour

Exhaustively, over every BF16 input with a normal exponent below 133 and a
normal result (33 792 values), measured against the real `exp`:

| measure                               | this RTL | published for the algorithm |
|---------------------------------------|----------|-----------------------------|
| mean relative error                    | 0.21 %   | 0.14 %                      |
| max relative error                     | 1.35 %   | 0.78 %                      |
| mean relative error, x in [−8, 0)      | 0.38 %   | —                           |

The gap comes mostly from negative inputs. The one's complement in the
Schraudolph stage loses one LSB there, and the truncating polynomial adds to
it. In a quick software model, replacing the bitwise inversion by a true negation
lowered the mean error to 0.04 % and the maximum to 0.87 %. The published
datapath figure puts an unlabelled element on the path the sign bit selects,
which this RTL reads as a bitwise inversion and keeps. The width of log2(e) and the
rounding modes are unpublished and may explain the rest. The published error
figures may also be measured differently (against glibc, possibly over a
narrower range).

Measured in simulation at the defaults:

- 27 independent VFEXPs issue in 27 consecutive cycles.
- A dependent instruction issues exactly two cycles after its producer.

The Softmax testbench runs the three-loop optimised kernel (MAX with vfmax,
EXP with vfsub/vfexp/vfadd, NORM with vfmul) for rows of 32 to 2048 elements.
Every output is within 3 % of the exact softmax, and each row takes N/4 VFEXPs.
Its cycle counts (about 1.75 cycles per element in the EXP loop) are not the
published 2.125 cycles per output for the whole kernel, and should not be
compared with it. In the testbench, input values are fed in one per cycle
through the load port, where the real core uses stream registers and a
hardware loop. The other FPU groups are a simple behavioural model.

## 7. What is not here

- The five existing FPU groups.
- The Snitch integer core, hardware-loop sequencer (FREP) and stream
  registers (SSR), LSU and caches.
- The 128 KiB scratchpad and its interconnect, the DMA, and the cluster and
  multi-cluster crossbars and HBM.

The EXP extension reuses all of these unchanged. The top exposes the points
where they attach: the offload port, the load and store ports, and `ext_*`.

Choices of this RTL that the publication does not specify:

- log2(e) with 14 fraction bits; round-half-up in the Schraudolph stage; a
  truncating polynomial.
- NaN inputs follow the overflow path (+inf or 0 by sign).
- Pipeline registers at the lane output.
- Valid/ready handshakes, tags, NaN-boxed scalar results.
- Round-robin output arbitration.
- The scoreboard, write-back priority and port set of the subsystem top.
- An asynchronous active-low reset, which clears valid bits, pending bits and
  the register file.

The published datapath figure draws the alignment shifter as a left shift fed
by `133 − exponent`. The text describes a shift by the difference between the
exponent and 133. The RTL implements the arithmetic both imply (a right shift
by `133 − e` of the product placed at 2^6).

## 8. Files and simulation

`rtl/` (one module or package per file):

| file               | contents                                            |
|--------------------|-----------------------------------------------------|
| `vexp_pkg.sv`      | BF16 constants, polynomial coefficients, encodings, types |
| `exps_stage.sv`    | Schraudolph stage                                   |
| `poly_stage.sv`    | mantissa correction P(f)                            |
| `exp_unit.sv`      | one lane: both stages + pipeline registers          |
| `exp_opgroup.sv`   | four-lane SIMD EXP operation group                  |
| `fpu_vexp.sv`      | operands distribution / output arbitration, EXP + external groups |
| `fexp_decoder.sv`  | FEXP/VFEXP decoder                                  |
| `fp_regfile.sv`    | 32 × 64-bit FP register file                        |
| `vexp_fpu_ss.sv`   | top: issue, scoreboard, write-back                  |

`tb/`:

- Shared by the testbenches:
  - `tb_vexp_ref_pkg.sv`: BF16 conversion, a bit-exact reference `exp_ref`
    written from the algorithm, and relative error.
  - `beh_fpu_ext_groups.sv`: behavioural stand-in for the other FPU groups.
    It does packed add/sub/mul/max/copy with placeholder encodings.
- Per block:
  - `tb_exps_stage`: exhaustive, against `(x·log2e + 127)·128`.
  - `tb_poly_stage`: exhaustive, against the real polynomial and 2^f − 1.
  - `tb_exp_unit`: all 65 536 inputs; bit-exact result, error bounds,
    specials, one-cycle latency.
  - `tb_exp_opgroup`: random vector/scalar traffic with output stalls;
    back-to-back throughput and latency.
  - `tb_fpu_vexp`: both groups, out-of-order completion by tag, round-robin.
  - `tb_fexp_decoder`: the two encodings and single-bit corruptions.
  - `tb_fp_regfile`: reset and random reads and writes.
- End to end, at default parameters:
  - `tb_vexp_fpu_ss`: latency, throughput and a random program checked
    against an architectural model. Every FPU write-back is compared with
    the value the model expects for that register. It counts scoreboard stalls, write-back
    conflicts, arbitration, back-pressure, overflow and flush-to-zero inputs.
  - `tb_softmax_workload`: the Softmax kernel for N = 32 … 2048.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/vexp_pkg.sv tb/tb_vexp_ref_pkg.sv rtl/*.sv tb/beh_fpu_ext_groups.sv \
        tb/tb_vexp_fpu_ss.sv --top-module tb_vexp_fpu_ss -o sim
    ./obj_dir/sim

To lint a module: `verilator --lint-only -Wall -Irtl rtl/vexp_pkg.sv rtl/<module>.sv`.

Main parameters:

- `NUM_PIPE_REGS` (lane pipeline depth, default 1). It is on the top and
  every level below.
- `WIDTH` (SIMD width, default 64; lanes = WIDTH/16). It is on `exp_opgroup`
  and `fpu_vexp`.
- `LOG2E_FRAC` (default 14) on the lane.

The top's testbenches assume `NUM_PIPE_REGS = 1` in their cycle checks.
