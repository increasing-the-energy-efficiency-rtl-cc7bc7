# Coprosit: a posit16 coprocessor for a RISC-V microcontroller

Wearable biomedical processing (cough detection, ECG R-peak detection) often
needs more dynamic range than fixed point. It does not need the precision of
32-bit IEEE floats. A 16-bit posit with two exponent bits keeps enough
accuracy for such algorithms, and halves the datapath, register file and
memory footprint. Coprosit adds posit16 arithmetic to a small RISC-V core
(an RV32 core of the cv32e40p family) without touching the core. It sits
behind the CORE-V eXtension Interface (CV-X-IF). The core offloads every
instruction it does not recognise, and Coprosit accepts the posit
instructions. Coprosit then executes them on its own posit register file and
reports integer results, memory accesses and completion back over the
interface.

This repository holds synthesizable SystemVerilog for the coprocessor in its
reference configuration:
- posit16 (es = 2), no quire;
- exact, single-cycle (combinational) arithmetic;
- an input buffer one instruction deep;
- in-order execution, with forwarding of returning load data.

The host core, the SoC around it and its SRAM are not part of this RTL.

## 1. Posit16 in one page

A posit<16,2> word holds, from the MSB:
- a sign bit;
- a *regime*: a run of equal bits closed by the opposite bit;
- up to two exponent bits;
- the remaining bits as fraction.

The regime value is r = k−1 for a run of k ones and r = −k for a run of k
zeros. The scale is 4r + e, and the value is ±1.f · 2^scale. Two patterns
are special:
- 0x0000 is zero.
- 0x8000 is NaR ("not a real"), the single exception value.

Negative numbers are the two's complement of the whole word. This has two
useful consequences:
- Posits order like signed integers, so comparisons, min and max use integer
  comparators.
- Negation is an integer negation.

Example: 1001101000111000 is −46.25.

The range is 2^−56 … 2^56. Near 1.0 a posit16 has 12 significant bits,
including the hidden one; toward the ends the regime eats the fraction.

All arithmetic follows one scheme:
1. `posit_decoder` turns a word into sign, zero and NaR flags, a signed
   scale, and a 12-bit significand with the hidden bit on top. It first takes
   the absolute value, then counts the regime run.
2. The operation is computed exactly, or with a sticky bit for everything
   below the kept bits.
3. `posit_encoder` rebuilds a word in one rounding step. It places regime
   terminator, exponent and fraction in a wide word and shifts it right by
   the regime length, filling with the regime bit. It then rounds the 15
   magnitude bits to nearest, ties to even.

Following the 2022 posit standard, rounding never produces zero or NaR:
- Results above maxpos (2^56) saturate to maxpos.
- Results below minpos saturate to minpos.

## 2. The arithmetic unit (PRAU)

`prau` is the posit arithmetic unit. It has a valid/ready handshake on its
input and output and a 5-bit operator select. Its integer side is 64 bits
wide so that it can carry the 64-bit conversions; the execution stage feeds
it the 32-bit x register zero-extended and keeps the low 32 result bits.
All of its sub-units are combinational:

| Sub-unit | Operations | How |
|---|---|---|
| `prau_addsub` | PADD, PSUB | Negates b for SUB by two's complement. Swaps so the larger magnitude is first and aligns the smaller one. Uses 16 guard bits and ORs anything shifted out into the LSB, adds or subtracts, normalises with a leading-one search, then encodes. |
| `prau_mul` | PMUL | 12×12-bit significand product and summed scales, with a one-bit normalisation. The product is exact, so no sticky bit is needed. |
| `prau_div` | PDIV | Integer division of the dividend significand, padded with 28 zero bits, by the divisor significand. The remainder becomes the sticky bit. x/0 is NaR. |
| `prau_sqrt` | PSQRT | Makes the scale even, then takes a restoring integer square root of the significand padded to 42 bits (a 21-bit root). Root² ≠ radicand sets the sticky bit. A negative operand or NaR gives NaR. |
| `prau_conv` | PCVT.W.P, PCVT.WU.P, PCVT.P.W, PCVT.P.WU, and the 64-bit forms L, LU | Posit to integer: shifts the significand into a 64.64 fixed-point word and rounds to nearest even. Out-of-range values saturate to the 32-bit or 64-bit limits; a negative value converted to unsigned gives 0; NaR gives the most negative integer (0x8000_0000, or 0x8000_0000_0000_0000 for 64 bits). 32-bit results are sign-extended to 64 bits. Integer to posit: 32-bit inputs are zero- or sign-extended, then a 64-bit leading-one search feeds the common encoder. |
| `prau_sgnj` | PSGNJ, PSGNJN, PSGNJX, PMV.X.P, PMV.P.X | Sign injection on a two's-complement format. The word is negated when its sign differs from the wanted one, so the result is still the magnitude of a with the injected sign. The moves sign-extend a posit into an x register, or take the low 16 bits of an x register. |

`posit_alu` is the small ALU beside the PRAU. It handles PEQ, PLT, PLE, PMIN
and PMAX as signed integer comparisons. NaR (0x8000) is the most negative
pattern, so it orders below every real.

## 3. Instruction encoding

The posit instructions reuse the layout and funct5 values of the RISC-V F
extension on the custom opcodes.

| Instruction | Opcode | Format | funct5 / funct3 / rs2 |
|---|---|---|---|
| PLH pd, imm(xs1) | 0001011 (custom-0) | I | funct3 = 001 |
| PSH ps2, imm(xs1) | 0101011 (custom-1) | S | funct3 = 001 |
| PADD / PSUB / PMUL / PDIV | 1011011 (custom-2) | R, fmt = 01 | 00000 / 00001 / 00010 / 00011 |
| PSQRT | custom-2 | R | 01011, rs2 = 0 |
| PSGNJ / PSGNJN / PSGNJX | custom-2 | R | 00100, funct3 0 / 1 / 2 |
| PMIN / PMAX | custom-2 | R | 00101, funct3 0 / 1 |
| PLE / PLT / PEQ → x rd | custom-2 | R | 10100, funct3 0 / 1 / 2 |
| PCVT.W.P / PCVT.WU.P → x rd | custom-2 | R | 11000, rs2 = 0 / 1 |
| PCVT.P.W / PCVT.P.WU ← x rs1 | custom-2 | R | 11010, rs2 = 0 / 1 |
| PMV.X.P → x rd | custom-2 | R | 11100, funct3 0 |
| PMV.P.X ← x rs1 | custom-2 | R | 11110, funct3 0 |

The constants are in `coprosit_pkg`. The predecoder's mask/match table
(`coprosit_predecoder`) and the decoder (`coprosit_decoder`) are the two
places to edit for a different encoding. Bits 26:25 must be 01 (the F
extension's "half" format); funct3 of the arithmetic operations is ignored,
as the rounding mode is fixed.

## 4. Life of an instruction

```
          issue req/resp                         commit
CPU ─────────────► Predecoder ─► Input Buffer ─► Controller ◄──────── CPU
                                   (1 entry)      │   │  │
                                     │ Decoder ◄──┘   │  └──► Mem Stream FIFO ◄── mem result
                                     ▼                ▼            (2 entries)
                     Posit Register File ◄──► Execution stage (PRAU, ALU)
                                                      │
                                           Result FIFO (2 entries) ──► result ─► CPU
```

**Issue.** The predecoder looks only at the instruction word. In the same
cycle it answers with:
- `accept`;
- `writeback`, for results going to an integer register;
- `loadstore`, for instructions that use memory.

`x_issue_ready_o` is high in three cases:
- the word is rejected;
- the word is accepted and the input buffer has room;
- the instruction needs x[rs1] and the core marks that operand valid.

The input buffer holds one entry: the instruction word, its id and the value
of x[rs1]. The buffer frees its entry in the cycle the head leaves, so a new
instruction can enter at the same time.

**Commit.** An offloaded instruction may be speculative. The core later
commits or kills it by id, and either can happen before or after the
instruction reaches the head of the buffer. For each id the controller keeps
one *committed* bit and one *killed* bit. A commit counts from the cycle
after it arrives. An instruction committed in its issue cycle therefore runs
in the next cycle, at full speed. Only registered commit state is used, so
`x_issue_ready_o` never depends combinationally on `x_commit_valid_i`: a core
that commits in the issue handshake cannot form a combinational loop. A killed head leaves the buffer without executing and without a
result. Every committed instruction produces exactly one result transaction.

**Execute.** A committed head that is not a memory instruction goes through
the execution stage in one cycle:
1. Operands are read from the two posit register read ports, or taken from
   the forwarding path.
2. The PRAU or the ALU computes the result.
3. A posit result is written to the register file.
4. The result transaction goes into the result FIFO: id, data, rd, and `we`
   when an x register is written.

The result appears on the result interface in the next cycle. Back-to-back
independent instructions sustain one per cycle: 64 additions complete in 66
cycles, including pipeline fill.

**Memory.** PLH and PSH form the address x[rs1] + sign-extended offset and
raise a memory request: a 16-bit access with the store data in the low half.
The request is raised only when three conditions hold:
- the memory stream FIFO has a free entry;
- the result FIFO has a free entry;
- no pop is needed to make that room.

Once raised, the request stays up and unchanged until the core accepts it.
On acceptance:
- the instruction's result transaction goes out, with no register write and
  the error status of the memory response;
- rd and the load/store type enter the memory stream FIFO.

Memory results return in order. Each one pops that FIFO, and a load writes
its posit register then. A load that returns `err` writes nothing.

**Scoreboard and forwarding.** Loads finish after their result transaction
has gone out. The controller therefore marks the destination register of
each accepted load as *pending*. The head stalls if it reads a pending
register, or if it writes one (a write-after-write hazard). In the cycle the
load data returns, the controller drops that stall instead:
- the data is forwarded straight into the operand mux;
- the waiting instruction executes in the same cycle the register is
  written.

This is the forwarding the reference configuration enables. When both writes
hit the same register in one cycle, the execution write wins, because it is
the younger instruction.

**Backpressure.** The result FIFO holds two entries. An instruction does not
execute while it is full and not being popped. The core may hold
`x_result_ready_i` low for as long as it likes.

## 5. Top-level interface (`coprosit`)

The parameters are `POSIT_N = 16` (word width), `MEMFIFO_DEPTH = 2` and
`RESFIFO_DEPTH = 2`. The ids are `X_ID_WIDTH = 4` bits wide.

| Channel | Direction | Type (coprosit_pkg) | Fields |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | logic | Clock; asynchronous active-low reset. |
| issue | valid in / ready out; req in, resp out | `x_issue_req_t`, `x_issue_resp_t` | instr, id, rs0 (= x[rs1]), rs1, rs_valid; accept, writeback, loadstore |
| commit | valid in | `x_commit_t` | id, commit_kill |
| memory request | valid out / ready in; req out, resp in | `x_mem_req_t`, `x_mem_resp_t` | id, addr, we, size (1 = halfword), wdata; exc, exccode |
| memory result | valid in | `x_mem_result_t` | id, rdata, err |
| result | valid out / ready in | `x_result_t` | id, data, rd, we, exc, exccode |

Assertions in the top and the FIFOs check several rules:
- a memory request is held until it is accepted;
- memory results only arrive for outstanding requests;
- no FIFO overflows or underflows.

## 6. What follows the reference design and what is chosen here

These parts follow the reference design:
- the set of blocks: predecoder, one-entry input buffer, decoder, 32-entry
  posit register file, controller, execution stage with PRAU and ALU, memory
  stream FIFO, result FIFO;
- the CV-X-IF channels;
- posit16 with es = 2, without quire;
- the PRAU's operation set (arithmetic, square root, integer conversions,
  moves and sign injection);
- comparisons in a separate small ALU;
- combinational, exact units;
- in-order issue with load forwarding.

These are choices of this design. The reference gives the function but not
the details:
- The instruction encoding in section 3.
- The commit/kill bit per id.
- The load scoreboard, including the write-after-write stall.
- When memory instructions send their result.
- Depth two for the memory stream FIFO and the result FIFO. The input
  buffer has depth one, as in the reference configuration.
- NaR converted to the most negative integer (0x8000_0000 for 32 bits).
- The 64-bit conversions exist in the PRAU but are not decoded. The host is
  RV32, as with FCVT.L.S in RISC-V F on RV32.
- Saturation of out-of-range conversions.
- The exact internal widths: 16 alignment guard bits, a 28-bit quotient
  fraction and a 21-bit square root. They are wide enough that every
  operation is correctly rounded.
- Only a subset of the CV-X-IF fields is carried.

Not built:
- The optional quire (16n-bit accumulator with MAC and rounding), which the
  reference configuration disables.
- Other posit widths. The RTL is parameterised by `POSIT_N`, but only 16 is
  verified.

## 7. Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=… failures=…`. `tb/posit_ref_pkg.sv` is an independent
reference model. It decodes posits to `real` and computes in double
precision. It then rounds back by a binary search over posit patterns and a
comparison with the exact midpoint between neighbours. The PRAU results are
compared bit-for-bit with this model.

| Testbench | Stimulus |
|---|---|
| `tb_prau_addsub`, `tb_prau_mul`, `tb_prau_div` | 20 000 random operand pairs each; about one operand in five is a special value (zero, NaR, maxpos, minpos, −minpos, 1.0) |
| `tb_prau_sqrt` | all 65 536 inputs |
| `tb_prau_conv` | all 65 536 posits to signed and unsigned 32-bit and 64-bit integers; directed and random 32-bit and 64-bit integers of random magnitude to posits |
| `tb_prau_sgnj`, `tb_posit_alu`, `tb_prau` | random operands over all operators |
| `tb_posit_regfile`, `tb_coprosit_fifo` | random traffic against a model, including simultaneous writes and push/pop at full |
| `tb_coprosit_predecoder`, `tb_coprosit_decoder` | every instruction form with random fields, plus non-posit words |
| `tb_coprosit_controller` | directed scenarios for commit before and during the head cycle, kill, held memory requests, read and write stalls on pending loads, forwarding on one or both operands, and full FIFOs |
| `tb_coprosit_exec` | random decoded instructions, forwarding selects and address generation |
| `tb_coprosit` | end to end at default parameters (see below) |
| `tb_coprosit_fft` | a 4096-point complex FFT run through the coprocessor (see below) |
| `tb_coprosit_kmeans` | the two-centroid k-means step of an R-peak detector, where the host branches on returned PLT results (see below) |

`tb_coprosit` plays the core. It covers:
- 4000 random posit and non-posit instructions, with operands withheld at
  random;
- commits after random delays, with about 10 % kills;
- a 256-byte memory with random ready and response latencies;
- random result backpressure.

A program-order model checks every result transaction, and finally the
register file and memory. The testbench counts each mechanism and fails if
one never occurred:
- issue backpressure;
- reject;
- kill;
- waiting for commit;
- stall on a pending load;
- forwarding;
- result FIFO full;
- memory wait.

A second phase checks the throughput of one instruction per cycle.

`tb_coprosit_fft` runs the workload the coprocessor was designed around: a
4096-point radix-2 FFT, the main kernel of cough detection, in posit16. The
testbench acts as the host core:
- it issues the 491 520 posit instructions of the kernel (24 576 butterflies
  of 6 loads, 10 operations and 4 stores);
- it commits each instruction in its issue cycle;
- it serves memory with one-cycle latency;
- it does the integer work (addresses, bit reversal) itself.

The results are checked in three ways:
- The output matches, bit for bit, the same FFT computed with the reference
  posit model.
- Against a double-precision FFT, the relative RMS error is 7·10⁻⁴.
- The kernel completes in 491 526 cycles, one posit instruction per cycle,
  with every load-to-use dependency covered by forwarding.

A real system takes longer, because the host core's own instructions are
not modelled.

`tb_coprosit_kmeans` runs the clustering step of an ECG R-peak detector. It
splits 512 synthetic ECG samples into a baseline cluster and a peak cluster
over five iterations. Here the host depends on the coprocessor's integer
results:
- each assignment is a PLT whose returned value chooses which sum the sample
  is added to;
- new centroids come from PCVT.P.W of the counts followed by PDIV;
- PMV.X.P reads the centroids back.

Every comparison and both final centroids match the reference posit model.
All 512 assignments agree with a double-precision k-means.

To run a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/coprosit_pkg.sv tb/posit_ref_pkg.sv \
          tb/tb_coprosit.sv --top-module tb_coprosit -Mdir obj_tb_coprosit -o sim
obj_tb_coprosit/sim
```

Replace `tb_coprosit` with any other testbench name. Verilator finds the
modules in `rtl/` by file name.

Limits of the verification:
- Only the posit16 configuration is simulated.
- The CV-X-IF side is checked against this design's reading of the
  interface, not against a real cv32e40px core.
