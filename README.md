# A matrix math engine for the Power ISA MMA instructions

Power ISA 3.1 added the Matrix-Multiply Assist (MMA) facility: instructions
that update a small matrix held in an *accumulator* with the outer product (a
rank-k update) of two 128-bit vector registers. Eight 512-bit accumulators
exist, each holding a 4 x 4 matrix of fp32 or int32 values or a 4 x 2 matrix
of fp64 values. Accumulator `a` is tied to the vector-scalar registers
VSR[4a .. 4a+3]: its row `i` is VSR[4a+i].

The point of the design is that the accumulators never leave the functional
unit during a matrix kernel. Per instruction only two (fp64: three) 128-bit
operands travel from the register files into the engine; the 512-bit result
stays where it is computed. This RTL is a matrix math engine (MME) in the
organisation published for the IBM POWER10 core:

* two pipelines, MU2 and MU3, fed by issue slots 2 and 3 of the core, so two
  rank-k updates complete per cycle;
* one accumulator register file shared by both pipelines, physically spread
  over a 4 x 2 grid of processing units (PUs);
* each PU owns a 64-bit slice of every accumulator and has two halves (one per
  pipeline), each with its own ALU and its own copy of the slice.

It executes every MMA instruction as a decoded operation (encodings are not
modelled): `xxsetaccz`, `xxmtacc`, `xxmfacc`, and the rank-k updates
`xvi16ger2[s][pp]`, `xvi8ger4[pp,spp]`, `xvi4ger8[pp]`,
`xvbf16ger2[pp,np,pn,nn]`, `xvf16ger2[..]`, `xvf32ger[..]`, `xvf64ger[..]`,
together with their prefixed `pm...` forms with row, column and product
masks.

## What a rank-k update computes

For accumulator A and vector registers X and Y, A <- [-] X Y^T [+/- A]. The
shape of X and Y depends on the element type; a 128-bit register holds

| instruction | X, Y shape | k | A element | multiply-adds per element |
|---|---|---|---|---|
| xvf64ger | X: 4 fp64 (register pair), Y: 2 fp64 | 1 | fp64 (4 x 2) | 1 |
| xvf32ger | 4 fp32 each | 1 | fp32 (4 x 4) | 1 |
| xvf16ger2, xvbf16ger2 | 4 x 2 fp16 / bfloat16 | 2 | fp32 | 2 |
| xvi16ger2 | 4 x 2 int16 | 2 | int32 | 2 |
| xvi8ger4 | 4 x 4, X int8, Y uint8 | 4 | int32 | 4 |
| xvi4ger8 | 4 x 8 int4 | 8 | int32 | 8 |

X_ik is element K*i + k of X (element 0 is the leftmost, most significant
element of the register, matching the Power ISA's big-endian numbering) and
Y_jk is element K*j + k of Y. The suffix selects the form: none = A <- XY^T
(this *primes* A), `pp` = +XY^T + A, `np` = -XY^T + A, `pn` = +XY^T - A,
`nn` = -XY^T - A; `s`/`spp` saturate the int32 result instead of wrapping.
Prefixed forms carry masks x (rows of X), y (columns of Y^T) and p (products
along k); a masked-off element is not computed.

## How the engine is organised

```
 slot 2 ──issue──> mu_ctrl (MU2) ──┐          ┌── mu_ctrl (MU3) <──issue── slot 3
 X1 X2 Y, A0 A1 ─────────────────┐ │          │ ┌──────────────── X1 X2 Y, B0 B1
                                 v v          v v
             ┌──────────────── 4 x 2 grid of pu ─────────────────┐
             │ pu(r,c): half 0 = pu_alu + acc_slice_rf  (MU2)     │
             │          half 1 = pu_alu + acc_slice_rf  (MU3)     │
             └───────────────────────────────────────────────────┘
                     │ Y0 (MU2 result bus)     │ Y1 (MU3 result bus)
```

`mme` (top) contains two `mu_ctrl`, eight `pu`, the accumulator *location
table* and the two result-bus registers. `pu` contains two `pu_alu` and two
`acc_slice_rf`; `pu_alu` contains four fp32 and one fp64 `fp_fma`.

**Slicing.** PU (r, c) holds bits of row r, doubleword c of all eight
accumulators: one fp64 element A[r][c], or the two 32-bit elements A[r][2c]
and A[r][2c+1]. Every PU receives the whole X and Y buses and picks the
elements its slice needs, so the grid has the same 4 x 2 (fp64) or 4 x 4
(32-bit) shape as the outer product itself. Per cycle, one PU half performs
1 fp64, 2 fp32, 4 fp16/bf16/int16, 8 int8 or 16 int4 multiply-adds.

**Two copies of every slice.** Each PU half has its own 8 x 64-bit slice file
with two read ports and one write port. An ALU always writes the file of its
own half, but reads the accumulator from whichever half wrote it last. The
engine keeps one location bit per accumulator for this (`loc` in `mme`):
every write by pipeline p sets `loc[a] = p`, and both pipelines read through
their own read port of the file `loc[a]` selects. The two pipelines can
therefore update the same accumulator in alternate cycles without copying
data between halves. This is the hardest part of the design to see from the
code, and the reason each file has two read ports. Masked-off elements are
still written: the ALU passes the old value through, so the whole slice moves
to the writing half.

**Pipelines.** `mu_ctrl` accepts one instruction per cycle when `ready`.

| instruction | cycles in the pipeline | buses |
|---|---|---|
| rank-k update | 1 | X1, X2, Y in the issue cycle |
| xxsetaccz | 1 | none |
| xxmtacc | 2 | rows 0, 1 on A0/A1 (B0/B1) in the issue cycle, rows 2, 3 in the next |
| xxmfacc | 4 | row k on Y0 (Y1), one cycle after it is read, for VSR[4a+k] |

A rank-k update reads its accumulator slices, computes and writes them back in
the issue cycle, so a dependent update can issue the next cycle on either
pipeline. With both pipelines busy with updates the engine completes 16 fp64
or 32 fp32 multiply-adds per cycle (32 or 64 flops).

## Arithmetic details

`fp_fma` is a fused multiply-add with a single round-to-nearest-even. The
exact significand product is placed in a window about four significands wide;
the addend is placed at its true offset, or clamped three bits above the
product when it is far larger (the product then only supplies guard, round and
sticky bits), or folded into a sticky bit when it is far smaller. After an
exact add or subtract, the leading one and the subnormal limit fix the
rounding position. Subnormals are supported in and out; overflow gives
infinity; invalid operations and NaN inputs give the default quiet NaN.

In `pu_alu`:

* fp16 and bfloat16 inputs are widened to fp32 exactly. Each element of a
  rank-2 update is computed by two chained fp32 fused multiply-adds (k = 0 then
  k = 1), so it is rounded twice.
* Negated forms flip the sign of X (product) and of the accumulator value.
  Non-accumulating forms add the product to -0, which returns it exactly.
* Integer sums are formed exactly in 64 bits; saturating forms clamp them to
  the int32 range, other forms keep the low 32 bits.
* A masked-off element (x_i = 0 or y_j = 0) keeps its value in accumulating
  forms and becomes 0 in non-accumulating forms; a masked-off product
  contributes nothing.

## Departures and open points

* The internal structure of the ALUs, the pipeline timing of the updates
  (one cycle), the location table, the issue handshake and the bus timing are
  this design's own; the published description gives the organisation, the
  per-ALU operation counts, the 2R/1W slice files and the 2- and 4-cycle move
  times, but no cycle-level detail.
* The rounding of the two-product fp16/bf16 updates (twice here), NaN
  payloads, rounding modes and floating-point exception flags are not modelled
  after any specification; only round-to-nearest-even exists and no flags are
  produced.
* The rule that an accumulator's four VSRs must not be used while the
  accumulator is primed, and the rule that an unprimed accumulator must not be
  read, are left to software. Accumulators are not reset.
* Both pipelines writing the same accumulator in the same cycle is illegal and
  caught by an assertion in `mme`.
* The execution slices (vector register files and vector units), the core's
  front end and the 2:1 multiplexers that merge the engine's result buses with
  other results are outside this RTL; `mme` exposes the fetch and result buses
  as ports.

## Files

| file | content |
|---|---|
| `rtl/mma_pkg.sv` | shared constants, the decoded-instruction struct `mma_instr_t`, opcodes |
| `rtl/fp_fma.sv` | fused multiply-add, parameterised by exponent and fraction width |
| `rtl/pu_alu.sv` | ALU of one PU half |
| `rtl/acc_slice_rf.sv` | 8 x 64-bit accumulator slice, 2 read / 1 write ports |
| `rtl/pu.sv` | processing unit: two halves |
| `rtl/mu_ctrl.sv` | pipeline control, move sequencing, issue handshake |
| `rtl/mme.sv` | top: grid, pipelines, location table, result buses |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_sconv.sv` | a 3-channel 3 x 3 convolution run end to end on the engine |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/mma_pkg.sv tb/tb_mme.sv \
          --top-module tb_mme -o sim && ./obj_dir/sim
```

(replace `tb_mme` with any other testbench). `tb_mme` runs the whole engine at
its only size: an fp64 8 x 128 x 8 matrix product using all eight
accumulators as one 8 x 8 block (512 cycles, two updates per cycle, checked),
an fp32 8 x 27 x 16 product in the shape of a 3-channel 3 x 3 convolution
kernel, and a move-in / masked saturating int16 update / move-out sequence.
It checks every result against exact values, checks the move and update
timing, and counts dual issue, issue stalls behind moves, cross-pipeline
accumulator reads, saturation and masking. `tb_fp_fma` checks the
multiply-add against the simulator's double arithmetic on operands for which
that arithmetic is exact, plus directed special cases; `tb_pu_alu` checks all
instruction families, forms and masks on a full 4 x 2 grid of ALUs.
`tb_sconv` computes eight 3 x 3 x 3 kernels over 16 output pixels of a
random 3-channel image: the kernels are the X operands and each image row,
loaded at offsets 0, 1 and 2, is the Y operand, so the 27 x 16 right-hand
matrix is never built. It checks all 128 outputs and the 108-cycle update
phase (27 steps of 8 updates at two per cycle).

The design has no size parameters to scale: 8 accumulators of 512 bits, 4 x 2
PUs and 128-bit buses are fixed by the architecture.
