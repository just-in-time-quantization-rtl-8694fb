# Just-in-time MX quantization in HBM processing-in-memory: RTL

Mixed-precision training keeps every weight twice: a high-precision master
copy (here BF16) that the optimizer updates, and a low-precision copy that
the forward and backward GEMMs read. With directional block formats such as
MX there are even two low-precision copies, one blocked along rows and one
along columns, because each GEMM operand must be blocked along its reduction
dimension. Just-in-time quantization (JIT-Q) keeps only the master copy and
produces the low-precision weights of the next layer shortly before the GPU
needs them, then discards them.

Doing that conversion on the GPU would read the master weights over the
memory bus and write the result back. This design does it inside the HBM
stack instead. The compute units already placed beside the DRAM banks in
commercial HBM-PIM parts do the conversion. Commands are broadcast to all
units of a pseudo-channel, so every bank pair converts its own tiles in
parallel, and no weight crosses the bus. Two small additions to the PIM ALU
make MX quantization cheap:

* a lane-wise compare, used with MAX to find the shared exponents;
* a **counter-based conditional shift**: each lane shifts by its own amount,
  at one command per bit.

The SystemVerilog here models one HBM-PIM stack at the command level: banks
and row buffers, PIM units, command broadcast, and the in-order command queue
with DRAM timing. The GPU-side quantization kernel is written as a
testbench. An end-to-end test converts BF16 tiles to MX6, MX9 and MX4 inside
the simulated memory and checks every output word against an independent
software model.

## 1. The MX format being produced

An MX block is 16 elements. It stores:

| field | width | shared by |
|---|---|---|
| level-1 (shared) exponent | 8 bit | all 16 elements |
| level-2 exponent `d` | 1 bit | each pair of elements (8 per block) |
| sign | 1 bit | one element |
| magnitude | m bit: MX9 m=7, MX6 m=4, MX4 m=2 | one element |

The quantization of one block from BF16 (sign, 8-bit exponent `E`, 7-bit
mantissa) is:

1. `shared = max(E_j)` over the 16 elements.
2. For pair k, `d_k = 1` if `shared > max(E_2k, E_2k+1)`, else 0. The pair
   then uses exponent `shared - d_k`, which gives it one more bit of precision.
3. Each element's 8-bit significand `{E != 0, mantissa}` is shifted right by
   `S_j = shared - d_k - E_j`. Then the top m bits are kept, truncating.

Step 3 is the hard part for a SIMD machine: `S_j` differs from lane to lane.

## 2. Hardware organisation

```
 GPU memory controller                          (outside this RTL)
   | 32 command ports, one per pseudo-channel
 hbm_pim_stack ---------------------------------------------------------------
 |  pim_cmd_sched  x32: in-order queue, tRP / tRAS / tCCDL                   |
 |     | issued command (broadcast inside the pseudo-channel)               |
 |  pim_pch x32                                                             |
 |   +- dram_bank (even) --row buffer--+                                    |
 |   |                                 +-- pim_unit: pim_regfile 16 x 256b  |
 |   +- dram_bank (odd)  --row buffer--+             pim_simd_alu 16 x 16b  |
 |   |                                               +- pim_cond_shift      |
 |   ... 8 such pairs, sharing the pseudo-channel data bus for host access  |
 ----------------------------------------------------------------------------
```

| level | default | origin |
|---|---|---|
| banks per stack | 512 | paper |
| PIM units per stack | 256, one per even/odd bank pair | paper |
| pseudo-channels per stack | 32, so 16 banks and 8 PIM units each | this design (HBM3 organisation) |
| row buffer | 1024 B = 32 words of 256 bit | paper |
| rows per bank | 1024 (512 MB per stack) | this design; real parts have far more |
| PIM registers | 16 x 256 bit per unit | paper |
| SIMD ALU | 256 bit = 16 lanes x 16 bit (one BF16 per lane) | paper (lane width follows from BF16) |
| clock | 2.4 GHz, from 4.8 Gb/s per pin at double data rate | this design |
| tRP / tRAS / tCCDL | 15 / 33 / 3.33 ns = 36 / 80 / 8 cycles | paper (ns), cycles at the assumed clock |

Each module parameter defaults to these values. The shared types (the
command struct and the opcode enum) and the timing constants are in
`jitq_pkg`.

## 3. Command set

Every command is one `pim_cmd_t`. Host commands address one bank
(`bank = 2*unit + odd`). PIM commands are broadcast to every PIM unit of
the pseudo-channel, and each unit applies them to its own bank pair.

| opcode | kind | effect |
|---|---|---|
| `ACT`, `PRE` | host | open / close a row of one bank |
| `RD`, `WR` | host | read / write one 256-bit word of the open row over the shared bus |
| `P_ACT`, `P_PRE` | PIM | open / close the same row in all even (`odd=0`) or all odd banks |
| `P_LD dst` | PIM | `R[dst] <= row buffer word col` of the even or odd bank |
| `P_ST srca` | PIM | `row buffer word col <= R[srca]` |
| `P_ADD`, `P_SUB` | ALU | lane-wise modulo-2^16 add / subtract |
| `P_MAX` | ALU | lane-wise unsigned maximum (the paper's pim-MAX) |
| `P_CMP` | ALU | lane-wise `a > b ? 16'hFFFF : 0` (pim-CMP) |
| `P_AND`, `P_OR` | ALU | lane-wise bit operations |
| `P_SHR1` | ALU | every lane right by one bit (uniform bit shift) |
| `P_LDSC a` | ALU | load the 16 per-lane shift counters from `R[a]` |
| `P_BSHFT` | ALU | pim-bitSHIFT with counters: lanes with `S_i>0` shift right by one, `S_i--` |

ALU commands take operand b from a register or from the 16-bit `imm` field,
which is copied to all lanes (`use_imm`). Every PIM command occupies a column
slot, so the scheduler issues at most one per tCCDL (8 cycles).

## 4. The conditional shift

`pim_cond_shift` holds one 5-bit counter per lane. `P_LDSC` loads the
counters from a register; values above 31 saturate. Each `P_BSHFT` then
does two things in every lane: a lane whose counter is non-zero writes its
operand shifted right by one and decrements the counter, and a lane whose
counter is zero passes its operand through unchanged. After n `P_BSHFT`
commands, lane i has been shifted by `min(S_i, n)`. A BF16 significand is 8
bits, so 8 commands finish any block, and a lane with `S_i >= 8` ends at
zero. Without the counters, every bit of shift would cost a compare, a
shift and an add. With them it costs one command. The reference quantizer in
the tests uses `S >= 8 -> 0` directly, so it does not depend on the counter
at all.

## 5. Weight placement

The ALU has no cross-lane path and there is no bank-to-bank path, so all
elements of an MX block must be in one bank pair and in one lane:

* the weight matrix is cut into 16x16 tiles, one tile per bank pair;
* a tile is stored row-major, one element per 256-bit word, elements 0..127
  in the even bank and 128..255 in the odd bank;
* lane i of every word belongs to a different tile, so 16 tiles share a PIM
  unit and are quantized in lock-step.

In the test kernel, linear word `L` of a unit is in the even bank if bit 7 of
`L` is 0 and in the odd bank otherwise. Its row is `4*(L/256) + L[6:5]` and
its column `L[4:0]`. Row quantization (blocks along a tile row) reads 16
words from one DRAM row. Column quantization reads one word from each of 8
rows per bank, so it needs more activations. In simulation it takes 6%
longer than row quantization (90,824 against 85,497 cycles).

## 6. The quantization kernel (GPU side, `tb/jitq_tb_pkg.sv`)

`kernel_gen::quant_block` emits, per MX block and per pseudo-channel, these
commands:

```
R0 = P_LD(e0) & 0x7F80                 ; exponent field, kept in place
repeat j=1..15: R1 = P_LD(ej) & 0x7F80; R0 = MAX(R0, R1)     ; level-1 exponent
P_ST R0 -> out[16]
for each pair k:
   load both elements, R2/R4 = their exponent fields, R5 = MAX(R2, R4)
   R6 = CMP(R0, R5)                     ; d mask
   R7 = R6 & 1 ; R6 = R6 & 0x4000       ; d as a number and as bit 14
   for each element x with exponent e:
      R8 = (R0 - e) >> 7 (7 x SHR1) - R7   ; S
      P_LDSC R8
      R9 = (x & 0x7F) | (CMP(e, 0) & 0x80) ; significand with implicit one
      8 x P_BSHFT R9                    ; per-lane alignment
      (8 - m) x SHR1 R9                 ; keep m bits
      R9 |= (x & 0x8000) | R6 ; P_ST R9 -> out[j]
```

The kernel issues P_PRE/P_ACT only when a load or store needs a different
row. One MX6 block takes about 626 commands, 128 of them P_BSHFT. Output
words are not packed: word j of a block holds, per lane,
`{sign, d, 7'b0, magnitude}`, and word 16 holds the shared exponent in bits
14:7 (a power of two in BF16 form). Packing to the dense 6/9/4-bit layout
would be further shift-and-OR work; the paper does not specify the output
layout.

Measured at the default size (all 32 pseudo-channels in parallel, 256 PIM
units, 16 tiles per unit = 1,048,576 weights per stack):

| operation | commands per pseudo-channel | cycles | at 2.4 GHz |
|---|---|---|---|
| load the BF16 tiles by host writes | 2,080 | 17,824 | 7.4 us |
| MX6 row quantization | 10,020 | 85,497 | 35.6 us |
| MX6 column quantization | 10,164 | 90,824 | 37.8 us |

A unit can hold several groups of 16 tiles. Group g uses linear words
`1024*g ..1024*g+1023`, which are DRAM rows `16*g .. 16*g+15` of each bank.
`tb/tb_jitq_workload.sv` quantizes the weights of one transformer block of a
345M-parameter BERT (hidden size 1024, 12 x 1024^2 weights). Spread over 4
stacks x 256 units, that is 12,288 weights, or 3 groups, per unit. The test
simulates one pseudo-channel's share, since every pseudo-channel runs the
same stream. Each phase scales linearly with the number of groups:

| operation (3 groups, 98,304 weights per pseudo-channel) | cycles | at 2.4 GHz |
|---|---|---|
| load by host writes | 53,472 | 22 us |
| MX6 row quantization | 256,549 | 107 us |
| MX6 column quantization | 272,472 | 114 us |
| read back both copies | 113,117 | 47 us |

## 7. Command queue and DRAM timing

`pim_cmd_sched` is the per-pseudo-channel command queue of the memory
controller (16 entries). It issues strictly in order. The head command waits
until:

* an ACT comes at least tRP after the same bank's PRE;
* a PRE comes at least tRAS after the same bank's ACT;
* a column command comes at least tCCDL after the previous column command.

A broadcast P_ACT/P_PRE waits for the slowest bank of its parity.
`stall_why` reports which rule is holding the queue. Only these three
timings are modelled. tRCD, write recovery and refresh are left out because
the paper does not list them. The banks report a protocol error (`err`) for
a column access to a closed bank or for an ACT to an open one.

## 8. How far this follows the paper

The following come from the paper: the stack, bank and PIM-unit counts; the
even/odd bank sharing; the 256-bit SIMD ALU and the 16 registers; command
broadcast within a pseudo-channel; pim-MAX, pim-CMP, pim-bitSHIFT with
per-lane counters; the tiled, strided, packed weight placement; the MX
block structure; and the three DRAM timings.

The following are this design's own choices, because the paper does not give
them:

* the command encoding and opcode list, including SUB, AND, OR and the
  immediate operand;
* the CMP result encoding, the counter width and its saturation;
* the 2.4 GHz clock, the pseudo-channel count and the rows per bank;
* pacing every PIM command at tCCDL, the queue depth, and the one-cycle
  host read latency;
* truncation instead of rounding, and the unpacked output layout.

Not built:

* the GPU, its memory controller address mapping, and the HBM PHY, TSVs and
  logic die;
* the floating-point MUL/MAC of the commercial PIM unit, which
  quantization does not use;
* the tiled-without-stride mapping that needs lane shifts, which the paper
  only uses as a comparison point.
* FP32 master weights. The paper also discusses them, but the lanes here are
  16 bits wide (BF16). The 5-bit shift counters would cover FP32's 24-bit
  significand, but 32-bit lanes would need `LANE_W` and the kernel to change.

The 6% extra time of column over row quantization is lower than the 18%
the paper reports. This kernel is dominated by ALU commands, and it does not
model tRCD.

Capacity: with 1024 rows per bank a stack holds 512 MB. The per-stack weights
of one transformer block of the smaller models fit: bert, GPT-2,
Megatron-8.3B, T-NLG, and the 1T projection at tensor-parallel degree 128,
each with its two unpacked MX copies. The largest models need real bank
depths, tens of thousands of rows. Change `ROWS` for that; simulation memory
grows with it.

## 9. Files

| file | content |
|---|---|
| `rtl/jitq_pkg.sv` | command struct, opcodes, sizes, timing constants |
| `rtl/pim_cond_shift.sv` | per-lane shift counters and conditional shift |
| `rtl/pim_simd_alu.sv` | 16-lane ALU |
| `rtl/pim_regfile.sv` | 16 x 256-bit register file |
| `rtl/dram_bank.sv` | bank array with open-row state |
| `rtl/pim_unit.sv` | register file + ALU between two row buffers |
| `rtl/pim_cmd_sched.sv` | in-order queue with tRP/tRAS/tCCDL |
| `rtl/pim_pch.sv` | pseudo-channel: 16 banks, 8 PIM units, broadcast, host bus |
| `rtl/hbm_pim_stack.sv` | top: 32 pseudo-channels with their schedulers |
| `tb/jitq_tb_pkg.sv` | kernel generator (GPU model), BF16 data, MX reference |
| `tb/tb_<module>.sv` | one self-checking test per module |
| `tb/tb_jitq_workload.sv` | one pseudo-channel's share of a BERT-345M block (3 tile groups per unit) |

## 10. Simulating

Every test prints `TB_RESULT checks=N failures=M` and stops by itself. It
also has a watchdog. For example, the full-stack test (build about 4
minutes, run about 80 seconds, 0.5 GB):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/jitq_pkg.sv tb/jitq_tb_pkg.sv rtl/*.sv tb/tb_hbm_pim_stack.sv \
  --top-module tb_hbm_pim_stack -o sim
./obj_dir/sim +verilator+rand+reset+2
```

A unit test needs only `rtl/` (with `tb/jitq_tb_pkg.sv` only for the stack
test). Replace the last file and `--top-module` with, for example,
`tb/tb_pim_cond_shift.sv` / `tb_pim_cond_shift`.

The full-stack test loads 16 tiles into every unit of all 32
pseudo-channels, runs MX6 row and column quantization and MX9/MX4 row
quantization, reads every output back and compares it with `mx_ref`. It
also checks:

* the three timing rules at the issue port;
* that back-to-back PIM commands run at exactly one per tCCDL;
* that every mechanism occurs at least once: each kind of stall, broadcast
  and host commands, shifts that move some lanes and not others, counter
  saturation, `d = 1` pairs, and zero inputs.

The workload test (`tb_jitq_workload`, one pseudo-channel) builds in about
10 seconds and runs in 2.

To try a smaller stack, override `NPCH` and `UNITS` on `hbm_pim_stack`. Keep
the test's localparams of the same name in step.
