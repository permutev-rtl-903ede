# PermuteV: loop-iteration permutation for a side-channel-resistant RISC-V core

An attacker who measures the electromagnetic emanation of a microcontroller
running a neural network can recover the secret weights with correlation
analysis. The attack works because iteration *k* of a dot-product loop
touches weight *k* at the same point in time on every run. The idea here is
to break that link without slowing the loop down. A small hardware unit, the
**Loop Index Generator (LIG)**, hands software a *permuted* iteration number.
A few extra instructions fold that number straight into an address or value.
Each run then visits the weights in a different order, yet a loop body has
exactly as many instructions, and takes exactly as many cycles, as an
ordinary sequential loop.

This repository holds synthesizable SystemVerilog for that scheme: the LIG,
the instruction-set extension, and a small two-stage RV32IM core that
carries them. The core is laid out like the Ibex core that the published
design modifies. The LIG, the instruction encoding and the operand datapath
follow the published description closely. The surrounding core is a
minimal stand-in for Ibex, written only to run the extension.

## 1. The permuted index sequence

A full random permutation of *N* indices would need hardware that grows
with *N*, and it would scatter memory accesses. Instead the LIG permutes
within a window of *B* consecutive iterations (B a power of two, 4 by
default), and the window moves through the index space:

```
offset := random mod N
for each block of B iterations:
    p := random permutation of 0..B-1   (identity if the block would run past N)
    for j in 0..B-1:  emit (offset + p[j]) mod N
    offset := offset + B                (taken mod N)
```

Example with N = 16, B = 4 and a starting offset of 3:

| iterations | offset | permutation | indices emitted |
|------------|--------|-------------|-----------------|
| t0..t3     | 3      | 1 2 0 3     | 4 5 3 6         |
| t4..t7     | 7      | 2 0 3 1     | 9 7 10 8        |
| t8..t11    | 11     | 0 3 2 1     | 11 14 13 12     |
| t12..t15   | 15     | 2 3 0 1     | 1 2 15 0        |

Every index 0..N-1 appears exactly once, because the blocks tile the circle
of N indices starting at `offset`. When B does not divide N, the last block
is only partly used. It is left unpermuted, so the first `N mod B` positions
of that window are exactly the indices still missing. Over many runs, the
probability that a given weight is used in its own iteration is about 1/N.
The workload testbench measures this (section 7).

## 2. Loop Index Generator hardware (`pv_lig`)

```
             +--------------------- offset generator ----------------------+
  rnd[31:16]-+-> mux --> mod N --> offset register --+--> (+B) --> mux      |
             +---------------------------------------|---------------------+
                                                      v
  rnd[NSW-1:0] -> permute unit -> PLSR --> head ---> (+) --> mod N --> pi_o
                  (Waksman)        (B entries)
  counter i_q (iterations done), control: block end / reload / tail detect
```

* **Offset generator** (`pv_offset_gen`). One modulo unit sits after a
  multiplexer. On `pv.init` it loads `rnd mod N`. At each block end it
  loads `(offset + B) mod N`.
* **Permute unit** (`pv_permute_unit`, `pv_waksman`, `pv_swap`). The
  identity sequence 0..B-1 passes through a Waksman network of 2x2 swap
  units, and one random bit drives each unit. B = 4 needs 5 switches and
  B = 8 needs 17. In general the count is B·log2 B − B + 1, and every
  permutation of B elements is reachable. The distribution over
  permutations is not uniform, because 2^5 = 32 control words map onto
  4! = 24 permutations.
* **PLSR** (`pv_plsr`). A parallel-load shift register takes the B
  permutation numbers in one cycle and shifts one out per iteration.
* **Counter and control.** The counter `i_q` counts iterations that have
  finished. A block ends when `i_q + 1` is a multiple of B. At a block end,
  the PLSR reloads and the offset steps. The new block is permuted only if
  it lies wholly inside `[0, N)`.
* **Random source** (`pv_prng`). A 43-bit LFSR runs beside a 37-bit
  rule-90/150 cellular-automaton register, and their XOR gives 32 bits per
  cycle. One generator feeds all LIGs. The seed is fixed at reset. This is
  deliberately a weak generator: any TRNG with a 32-bit output can replace
  it without other changes.

**Timing.** `init_i` and `advance_i` are single-cycle strobes. `pi_o`, `i_o`
and `i_next_o = i_o + 1` reflect the new iteration from the next cycle on.
Each output is a registered value followed by an adder and a modulo.
In the core, the instruction after a `pv.init` or pv branch executes in the
next cycle at the earliest, so it always sees the updated index.

## 3. Instruction-set extension

Each PermuteV instruction is an RV32IM instruction with two extra fields
placed in bits that are always zero in the original encoding:

* `Ln`: which LIG to use, 1..3. Zero means an ordinary instruction.
* `x`: left shift applied to the LIG value, 0..2. This scales an index to
  byte, half-word or word addresses.

| class | instructions | Ln | x | other |
|---|---|---|---|---|
| R-type | add sub xor or and sll srl sra slt sltu mul mulh mulhsu mulhu div divu rem remu | inst[29:28] | inst[27:26] | inst[31] = 0; inst[30] and inst[25] keep their RV32 meaning |
| I-type | slli srli srai | inst[29:28] | inst[27:26] | inst[30] still selects srai |
| B-type | pv.beq, pv.bne | inst[23:22] | inst[21:20] | funct3 bit 1 (inst[13]) set, i.e. funct3 010 / 011; inst[24] = 0; no rs2 |
| custom-0 (0001011) | pv.init (funct3 000), pv.initi (funct3 001) | inst[8:7] | – | N = Reg[inst[24:20]] or zero-extended inst[31:20] |

Semantics:

* R/I-type pv instructions use `rs1 + (Ln.pi << x)` in place of `rs1`. For
  example `pv.add L1.2, t0, a5, x0` gives `t0 = a5 + 4*pi`, the address of
  word `pi` of the array at `a5`.
* `pv.bne Ln.x, rs1, label` branches if `rs1 != ((Ln.i + 1) << x)`.
  `pv.beq` branches on equality. Every executed pv branch, taken or not,
  advances that LIG to the next iteration. The comparison uses the count
  *after* this advance, so `pv.bne L1.0, a2, loop` with `a2 = N` runs the
  body exactly N times.
* `pv.init Ln, rs2` and `pv.initi Ln, imm` load N, draw a new offset and a
  new first-block permutation, and reset the count. N keeps its low 16 bits.

A value of Ln above the number of LIGs built reads as zero. `x = 3`, or a
non-zero `x` with `Ln = 0`, decodes as illegal.

### A permuted dot product

```
        pv.init  L1, a2            # a2 = N
loop:   pv.add   L1.2, t0, a5, x0  # t0 = &A[pi]
        pv.add   L1.2, t1, a1, x0  # t1 = &B[pi]
        lw       a4, 0(t0)
        lw       a3, 0(t1)
        mul      a4, a4, a3
        add      a0, a0, a4
        pv.bne   L1.0, a2, loop
```

The sequential version of this loop also has seven instructions
(`addi` twice instead of `pv.add`, `bne` instead of `pv.bne`). Strided
indices (`j = 3i+1`) use `pv.mul` against a constant plus a load offset.
Arbitrary index functions fetch `pi` once with `pv.add Ln.0, rd, x0, x0`.
Nested loops use one LIG per level (up to three). Only loops whose
iterations are independent, or whose cross-iteration dependence is an
associative reduction such as a sum, may be permuted.

## 4. Datapath changes (`pv_operand`, `pv_decoder`, `pv_controller`)

* `pv_operand` sits behind the register file. For R/I-type pv instructions
  it adds `pi << x` to Reg[rs1] to form operand A. For pv branches,
  operand B becomes `i_next << x`. Operand A goes to the ALU and to the
  multiplier/divider. The extension therefore covers all of RV32M as well.
* `pv_decoder` extracts `Ln`/`x` and clears them out of funct7 before the
  usual RV32IM decode. No new ALU operations or control signals exist
  beyond the LIG strobes.
* `pv_controller` raises `lig_init_o[n]` or `lig_advance_o[n]` in the
  cycle a pv.init or pv branch for LIG n+1 retires.

## 5. The core around it (`permutev_core`)

Two stages:

* **IF** (`pv_if_stage`, `pv_prefetch_buffer`). A prefetch buffer fetches
  consecutive words over an Ibex-style request/grant/response bus
  (`instr_req_o`, `instr_gnt_i`, `instr_rvalid_i`). It keeps up to two
  requests outstanding and queues responses in a 3-entry FIFO. A response
  that finds the FIFO empty goes straight to the IF/ID register. A taken
  branch or jump flushes the FIFO and sends the next request to the
  target. Responses to requests already in flight are counted and dropped.
  A request the bus has not yet granted keeps its address until it is
  granted, even across a redirect. Its response then counts as stale.
  With memories that answer in the cycle after the grant, a simple
  instruction takes 1 cycle, a load or store 2, and a taken branch 2
  (the target reaches ID two cycles after the branch).
* **ID/EX**. This stage holds the decoder, a 32×32 register file, the ALU
  with its branch comparator, and `pv_multdiv`. Multiplies take one cycle.
  Divide and remainder use a restoring divider. The result is ready 33
  cycles after issue, so a divide takes 34 cycles. `pv_lsu` handles byte,
  half and word loads and stores over the same style of data bus. It waits
  for `data_rvalid_i` on both. The LIGs
  and the PRNG sit beside this stage.

Parameters of `permutev_core`:

| parameter | default | meaning |
|---|---|---|
| `NUM_LIG` | 3 | number of LIGs, 1..3 (the Ln field can name three) |
| `B` | 4 | block size, power of two. B = 4 and B = 8 are the evaluated points; 4 is the recommended one |
| `NW` | 16 | width of N and of the indices, so N ≤ 65535 |

**Not built.** The base core leaves out these parts of Ibex:
compressed instructions, CSRs, exceptions and interrupts, and debug mode
(`debug_req_i` is a port but has no effect).
Misaligned loads and stores are not split. SYSTEM instructions retire as
no-ops and pulse `illegal_insn_o`, and so does any other illegal encoding.
For a real SoC, these parts would come from Ibex itself, with this
repository's LIG, `pv_operand` and decoder changes grafted in.

## 6. Where this RTL departs from, or goes beyond, the published description

* **Operand formula.** The prose describing the datapath suggests shifting
  the sum, `(rs1 + pi) << x`. The instruction table and the code examples
  use `rs1 + (pi << x)`, and this RTL follows them.
* **Branch operand.** The prose describes the branch multiplexer as
  selecting an adder result of `rs1 + i`. The instruction table compares
  rs1 with `i << x`, and this RTL follows the table. It compares against
  the count after the advance, which is what makes the published loop
  examples run N iterations.
* **pv.init / pv.initi encoding.** No encoding is published for these. The
  custom-0 opcode and the field positions above are this design's own.
* **Decoder.** The published design claims that the decoder needs no
  change, because the counterparts keep their opcode and funct fields. In
  practice the decoder must still ignore the `Ln`/`x` bits when it checks
  funct7 and the branch funct3. `pv_decoder` does this by masking them
  before the normal RV32IM decode.
* **LIG power.** `pv.init` is described as also powering the LIG on. No
  power gating is built. Until its first `pv.init`, an LIG outputs zero
  and ignores advances.
* **srai.** The encoding figure says bits 31:25 are zero for shift
  immediates. That cannot hold for `srai`, so bit 30 keeps selecting it.
* **N width** (16 bits), **PRNG** taps, output bits, seeds and the
  random-bit assignment are this design's choices. For B = 8 the offset
  and the permutation share one random bit.
* **Modulo units** are written as `%` on 17-bit values, i.e. combinational
  dividers. An area-conscious version would use conditional subtraction
  for the output stage, because `offset + p < N + B` there.
* **Size.** At B = 4, each LIG holds 57 flip-flops: N, the offset and
  the count (16 bits each), the 4×2-bit PLSR and an active flag. With B = 8
  the PLSR grows to 8×3 bits and an LIG holds 73. Three LIGs plus the
  80-bit PRNG add 251 flip-flops at B = 4 and 299 at B = 8. The published
  FPGA figures over plain Ibex are +80 and +134 flip-flops. Those imply
  a leaner build, with narrower registers or fewer LIGs, but no breakdown
  is published. Reduce `NW` or `NUM_LIG` to shrink this design.
* **Base core.** The base core is a simplified stand-in for Ibex (section
  5), so cycle counts are this core's, not Ibex's. The published design
  claims equal cycle counts for permuted and sequential loops, and that
  claim holds here: the end-to-end testbench checks it exactly.

## 7. Verification

Every unit has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `pv_waksman` is covered through the
permute unit, and `pv_prefetch_buffer` through the fetch stage:

| testbench | what it checks |
|---|---|
| `tb_pv_prng` | bit-exact against an independent bit-serial LFSR/CA model |
| `tb_pv_swap`, `tb_pv_permute_unit` | the 5-switch network against a hand model. All 24 (B=4) and all 40320 (B=8) permutations are reachable, and every control word gives a permutation |
| `tb_pv_plsr`, `tb_pv_offset_gen` | load/shift order, `rnd mod N`, `(offset+B) mod N`, N < B, N = 0 |
| `tb_pv_lig` | for ~120 random N (plus N = 16 with offset 3, and N = 1000) at B = 4 and 8: each pass emits a permutation of 0..N-1, block k holds exactly `offset+kB .. offset+kB+B-1 (mod N)`, and a tail block is unpermuted |
| `tb_pv_operand`, `tb_pv_decoder`, `tb_pv_controller` | pv operand formulas, field extraction, illegal cases, LIG strobes |
| `tb_pv_alu`, `tb_pv_multdiv`, `tb_pv_regfile`, `tb_pv_lsu`, `tb_pv_if_stage` | RV32IM behaviour against reference arithmetic. The divider must take 33 cycles. The LSU is tested with random grant delays and the fetch stage with random latency, refused grants and redirects. The fetch rate must be one instruction per cycle, with a two-cycle gap after a branch |
| `tb_permutev_core` | core at default parameters. Runs the four published loop styles, a ReLU loop with `pv.beq` on L3 (N = 13, tail block), a divide and a `pv.initi` loop. Checks all results, checks that load/store streams are permutations and not sequential, and checks that the permuted dot product takes exactly as many cycles as the sequential one. Also counts that every mechanism occurred: init, advance, permuted block, unpermuted tail block, wrap mod N, nested LIGs, divide stall, LSU wait, redirect, dropped wrong-path fetch, prefetch FIFO in use |
| `tb_permutev_rand` | about 1,700 random instructions at the default parameters: RV32I, all of RV32M including divide-by-zero and overflow, every load and store width, forward branches and jumps, and pv arithmetic, shift and branch instructions with every Ln and x. At each retirement, the PC and the register write are compared with an instruction-level model in the testbench. So is the LIG's iteration count at each pv branch. The model takes Ln.pi from the core, because other testbenches check the index sequence |
| `tb_permutev_mac` | dot products with N = 16, 32, 48, 64, 40 runs each, at B = 4 and B = 8 without reset between runs. Every run must be correct, cover each weight once and be out of order. The number of weights used in their own iteration must lie within 0.25/N to 3/N of all uses |
| `tb_permutev_nn` | a fully connected layer with ReLU, 6 outputs × 1000 inputs, at the default parameters. The outer loop runs on L1 and the inner on L2. Checks every output and that each weight is read once. For every inner pass it also checks the block rule: block k covers exactly `offset+4k .. offset+4k+3 (mod 1000)`. About 60,000 cycles |

In one run of `tb_permutev_mac`, the counts of weights used in their own
iteration were 57 (B = 4) and 49 (B = 8) for N = 16. For N = 32, 48 and 64
they were 77/70, 42/32 and 48/53. Each count is out of 40 runs × N uses,
so 1/N predicts 40. The excess at small N reflects the simple PRNG and
the non-uniform Waksman mapping. The counts change whenever the number of
cycles before `pv.init` changes, because the PRNG runs freely.

Running a testbench with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/pv_pkg.sv tb/pv_asm_pkg.sv tb/tb_permutev_core.sv \
    --top-module tb_permutev_core -o sim
./obj_dir/sim
```

Replace the last testbench file and `--top-module` to run any other
testbench. `tb/pv_asm_pkg.sv` has small encoder functions for RV32IM and
the pv instructions. `tb_permutev_core` shows how to assemble a program
into the memory model with them. All testbenches finish in well under a
second.

## 8. File map

| file | content |
|---|---|
| `rtl/pv_pkg.sv` | opcodes, ALU/branch/mul-div enums, decoded-instruction struct |
| `rtl/permutev_core.sv` | top level: IF, ID/EX, LIGs, PRNG |
| `rtl/pv_lig.sv` | Loop Index Generator |
| `rtl/pv_offset_gen.sv`, `rtl/pv_plsr.sv`, `rtl/pv_permute_unit.sv`, `rtl/pv_waksman.sv`, `rtl/pv_swap.sv` | LIG parts |
| `rtl/pv_prng.sv` | LFSR + cellular-automaton random source |
| `rtl/pv_operand.sv` | pv adder and operand multiplexers |
| `rtl/pv_decoder.sv`, `rtl/pv_controller.sv` | decode and ID/EX sequencing |
| `rtl/pv_if_stage.sv`, `rtl/pv_prefetch_buffer.sv`, `rtl/pv_regfile.sv`, `rtl/pv_alu.sv`, `rtl/pv_multdiv.sv`, `rtl/pv_lsu.sv` | base RV32IM core |
| `tb/` | testbenches, `pv_asm_pkg` encoders, `pv_mac_harness` (core + memory + dot-product program) |
