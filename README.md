# RVCoreP-32IC: an RV32IC soft-processor pipeline with a two-PC fetch unit

The RISC-V compressed extension (C) mixes 16-bit and 32-bit instructions in the
same stream. This makes code smaller, but a 32-bit instruction may then start
halfway through a 32-bit memory word. A processor that reads one aligned
word per cycle needs two reads for such an instruction. The usual remedies are
an extra cycle, or a prefetch buffer that reassembles instructions and then
drives a decompressor. Both add latency or logic to the fetch path, which
limits the clock on an FPGA.

RVCoreP-32IC avoids both. The instruction memory is 16 bits wide and has two read
ports. The fetch unit keeps two program counters:

- `PC` addresses the first halfword of the current instruction;
- `PC_2` always holds `PC + 2` and addresses the second halfword.

Both halfwords arrive in the same cycle and are joined into one 32-bit word. Any
instruction, at any halfword address, is therefore fetched in one cycle. No
adder sits between the PC register and the memory. `PC_2` is not computed from
`PC` after the fact. Every source of the next address also produces its own
"+2" partner, so both registers load finished values.

Decoding follows the same idea. There is no decompressor. A 16-bit decoder and
a 32-bit decoder work side by side on the fetched word, and the instruction's
length bit (Comp) selects one result.

This repository gives synthesizable SystemVerilog for the whole processor:

- the pipeline (PreIF, IF, ID, EX, MA, WB);
- the fetch unit;
- a pipelined gshare branch predictor with a BTB;
- the two decoders;
- the branch-resolution path that computes the restart address pair;
- the instruction and data block RAMs.

It also has self-checking testbenches that compare the processor
instruction by instruction against an instruction-set model.

## 1. Pipeline at a glance

| Stage | Work |
|---|---|
| PreIF | Select `NextPC`/`NextPC_2`; start the IMEM, BTB and PHT reads |
| IF    | Instruction word `{q_b, q_a}` available; prediction applied; IF decoder (register numbers, load flag); load-use check against ID |
| ID    | Micro-code decoder (16- and 32-bit in parallel); `IMM_2 = IMM + 2`; register-file read; WB→ID bypass |
| EX    | ALU; branch condition; the four target adders (section 4); data-memory address and store data |
| MA    | Load data aligned; miss decision; `TruePC`/`TruePC_2` selected; predictor tables written |
| WB    | Register write; the retire trace is reported |

PreIF is not a separate instruction slot. It is the cycle in which an
instruction's address is sent to the block RAMs, and it overlaps the IF stage
of the instruction before. Counted by instruction registers, the machine is
the five-stage IF/ID/EX/MA/WB pipeline of the original RV32I core. Counted by
stage labels, it has six stages.

Penalties measured on the RTL:

- A 32-bit instruction at an address that is 2 mod 4 costs nothing.
- A correctly predicted taken branch costs nothing.
- A load followed directly by a user of its result costs one bubble.
- A mispredicted branch or jump costs three cycles: its successor retires four
  clocks after it.

## 2. The two program counters

Each cycle the fetch unit picks `NextPC` from five candidates, in priority order:

| Priority | Condition                       | `NextPC`   | `NextPC_2`   |
|---|---------------------------------|------------|--------------|
| 1 | branch miss (from MA)           | `TruePC`   | `TruePC_2`   |
| 2 | load-use stall                  | `PC`       | `PC_2`       |
| 3 | predicted taken (from the BTB)  | `PredPC`   | `PredPC_2`   |
| 4 | current instruction is 16-bit   | `PC + 2`   | `PC_2 + 2`   |
| 5 | current instruction is 32-bit   | `PC + 4`   | `PC_2 + 4`   |

`NextPC` and `NextPC_2` drive the two IMEM ports directly, and are also
registered as the new `PC` and `PC_2`. Each column of the table is a
multiplexer of its own, so neither address waits for the other.

- The sequential candidates come from small adders on the `PC` and `PC_2`
  registers.
- `PredPC_2` comes from an adder after the BTB output register (section 3).
- `TruePC_2` is computed during EX and MA alongside `TruePC` (section 4).

The IMEM (`rvcp_imem`) is an array of 16-bit entries with two synchronous
read ports. Entry `k` holds the halfword at byte address `2k`. The fetched
word is `{q_b, q_a}`: the halfword at `PC` in bits 15:0 and the halfword at
`PC_2` in bits 31:16. Bits 1:0 of the low halfword give Comp, which decides
whether the upper half belongs to this instruction. The invariant
`PC_2 == PC + 2` is stated as an assertion in `rvcp_fetch`.

## 3. Branch prediction with the previous instruction's address

The predictor is gshare:

- a PHT of 8,192 two-bit counters, indexed by address XOR a 13-bit global
  history register (BHR);
- a BTB of 512 target entries.

Together they take 4 KB of block RAM.

Both tables are block RAMs with a registered read. The BTB result is
registered a second time, as `PredPC`, before it reaches the `NextPC`
multiplexer. This keeps the RAM off the critical path, but a lookup then takes
two cycles. If the lookup began with the address of the instruction being
predicted, the prediction would arrive one cycle late.

The design therefore indexes both tables with the address of the
instruction fetched **before** the one being predicted:

```
cycle k-1 : NextPC = addr(I_k)      BTB read at NextPC          (for I_k+1)
            PrePC  = addr(I_k-1)    PHT read at PrePC ^ BHR     (for I_k)
cycle k   : PredPC   = BTB[addr(I_k-1)]
            PredPC_2 = PredPC + 2
            counter  = PHT[addr(I_k-1) ^ BHR]
            I_k in IF: predicted taken = BTB entry valid && counter[1]
```

Training writes the entry of a branch at the address of the instruction that
precedes it in memory. That address is the branch's own PC minus 2 or minus 4.
Only the preceding instruction knows which, from its length. The pipeline
therefore keeps the Comp bit of the last instruction to pass MA, and uses it
when the branch reaches MA.

The scheme assumes that the instruction fetched before the branch is also
its predecessor in memory. Two cases break that:

- **Lookup:** right after a redirect (a miss, or reset), and right after an
  instruction that was predicted taken, the index belongs to an unrelated
  instruction. No prediction is made in that cycle.
- **Training:** if the instruction before the branch in program order was
  itself a taken branch or jump, the branch was entered from elsewhere. The
  table write is suppressed, which keeps the two branches from training each
  other's entries.

A BTB entry is 32 bits: the target's bits 31:1 and a valid flag in bit 0. It
has no tag; aliasing is left to the counters. An entry is written:

- with the target, when a branch or jump is taken;
- as invalid, when an instruction that is not a branch was predicted taken
  (the entry belonged to an alias).

The counters start weakly not-taken. The history is shifted speculatively in IF
whenever the BTB entry is valid. Each instruction carries a copy of the
history as it was before its lookup, and a miss restores the history from that
copy. Unconditional jumps train like taken branches, so `JAL`, `JALR` and
returns are predicted once seen.

## 4. Recovering from a miss: TruePC and TruePC_2

On a miss the fetch unit needs the correct address pair in one cycle. It
cannot add 2 to `TruePC` on the way into the `NextPC` multiplexer, so the
pair is built in stages:

- **ID:** the decoder produces `IMM` and also `IMM_2 = IMM + 2`.
- **EX:** four adders run in parallel:
  - `BelowPC = PC + (Comp ? 2 : 4)`
  - `BelowPC_2 = PC + (Comp ? 4 : 6)`
  - `TakenPC = base + IMM`
  - `TakenPC_2 = base + IMM_2`

  `base` is the PC for branches and `JAL`, and the forwarded `rs1` for `JALR`.
  For `JALR`, bit 0 of both taken targets is cleared. `rs1 + IMM` and
  `rs1 + IMM + 2` differ only above bit 0, so clearing the bit keeps the
  difference exactly 2.
- **MA:** the registered values are selected by the actual direction
  (`BranchTaken`), giving `TruePC` and `TruePC_2`.

`BelowPC` is also the link value that `JAL`/`JALR` write to `rd`.

A miss is declared in MA when either:

- the actual direction differs from the prediction carried with the
  instruction; or
- the branch was taken and predicted taken, but the predicted target is
  wrong.

The IF, ID and EX instructions are squashed, and the history is restored.
Stores are issued from EX, so a store in EX at the moment of a miss is
blocked.

## 5. Two decoders, no decompressor

- **IF decoder** (`rvcp_pdec_if`). It extracts only what the next cycle needs
  early: `rs1`, `rs2`, `rd`, whether each is used, and whether the instruction
  is a load. These drive the register-file read addresses and the load-use
  check (`rvcp_loaduse`). The check compares the IF instruction's sources with
  the `rd` of a load in ID and holds IF for one cycle on a match.
- **ID decoder** (`rvcp_pdec_id`). It produces the full micro-code word
  (`uop_t` in `rvcp_pkg`): ALU operation, operand selects, register numbers,
  memory size and sign, branch kind and condition, and the immediate.

Each decoder is written twice, once for each length, with the two halves
selected by Comp. The 16-bit half reads the RVC formats directly: register
fields `rs1'`/`rs2'` map to x8–x15, and each format's scrambled immediate is
reassembled. Nothing is ever expanded to a 32-bit instruction.

All of RV32C except the floating-point forms is decoded. `C.EBREAK`, `ECALL`,
`EBREAK`, `FENCE` and the CSR instructions are treated as no-ops (see
section 8).

## 6. Memories and parameters

| Parameter (module) | Default | Meaning |
|---|---|---|
| `IMEM_BYTES` (`rvcp_top`, `rvcp_imem`) | 32768 | instruction memory, 16-bit entries, two read ports |
| `DMEM_BYTES` (`rvcp_top`, `rvcp_dmem`) | 32768 | data memory, 32-bit words, byte enables, read-first |
| `BTB_ENTRIES` (`rvcp_top`, `rvcp_core`, `rvcp_bpred`) | 512 | BTB size |
| `PHT_ENTRIES` (same) | 8192 | PHT size; the index uses address bits `[log2(PHT):1]` |
| `RESET_PC` (`rvcp_top`, `rvcp_core`) | 0 | first fetch address |
| `BHR_W` (`rvcp_pkg`) | 13 | global history length |

The defaults hold a Dhrystone- or CoreMark-sized program (32 KB each way).
Embench-sized programs need `IMEM_BYTES = DMEM_BYTES = 65536`. Setting 4096
gives the small configuration used for clock-rate comparisons.

Both memories have an initialisation write port. The testbenches load
programs through it while `rst` is high.

## 7. Source map

| File | Content |
|---|---|
| `rtl/rvcp_pkg.sv` | shared types: micro-code word, IF decode record, prediction snapshot, retire trace, event pulses |
| `rtl/rvcp_top.sv` | core + IMEM + DMEM; init ports, retire trace and events as outputs |
| `rtl/rvcp_core.sv` | the pipeline, hazard control, predictor training, trace |
| `rtl/rvcp_fetch.sv` | PC/PC_2 registers and the two NextPC multiplexers |
| `rtl/rvcp_bpred.sv` | gshare PHT, BTB, PredPC/PredPC_2, history |
| `rtl/rvcp_pdec_if.sv`, `rtl/rvcp_pdec_id.sv` | the two parallel decoders |
| `rtl/rvcp_loaduse.sv` | load-use detection |
| `rtl/rvcp_truepc.sv` | BelowPC/TakenPC pairs (EX) and TruePC/TruePC_2 (MA) |
| `rtl/rvcp_regfile.sv` | 32×32 register file, asynchronous read, synchronous write |
| `rtl/rvcp_alu.sv` | ALU and branch comparator |
| `rtl/rvcp_load_align.sv` | byte/halfword selection and extension for loads |
| `rtl/rvcp_imem.sv`, `rtl/rvcp_dmem.sv` | block-RAM memories |

`rvcp_top` reports two outputs:

- `retire`: one record per instruction leaving WB (PC, instruction, register
  write, store).
- `events`: one-cycle pulses for each mechanism:
  - load-use stall
  - branch miss
  - predicted-taken fetch
  - predictor write, and write suppressed
  - forward from MA or WB
  - ID bypass
  - straddling fetch
  - 16-bit retire

## 8. Departures from the paper and things it leaves open

- **Host interface.** The original system prints results through a serial
  port. That port is not part of this RTL. Programs are observed through the
  `retire` trace, and loaded through the memories' initialisation ports.
- **System instructions.** The paper does not describe CSRs, exceptions or
  interrupts, and none are implemented. `ECALL`, `EBREAK`, `FENCE` and `CSR*`
  retire as no-ops, and misaligned accesses are not trapped.
- **Reset behaviour is this design's.** Synchronous, active-high `rst`. The
  first instruction is fetched through the `TruePC` path one cycle after
  reset falls. Table and register-file contents start from their initial
  values (PHT weakly not-taken, BTB invalid, registers 0), as configured block
  and LUT RAM would.
- **Predictor details are this design's.** History length, counter start
  value, the tag-less BTB with a valid bit, the lookup suppression after a
  redirect or predicted-taken fetch, and the history repair are choices made here. The paper gives the structure and
  sizes, not these details.
- **Write-suppression condition.** The original design blocks the table
  write when the instruction before the branch was a branch predicted taken.
  Here the write is blocked when that instruction was actually taken (a taken
  branch or any jump). The two differ only when that instruction was
  mispredicted. If it was predicted taken but fell through, the refetch
  brings in its true memory successor, so the write is correct. If it was
  predicted not taken but jumped, the following branch is at the jump target,
  not after it. The actual direction is therefore what says whether the two
  instructions are neighbours in memory.
- **Load-use placement.** The check sits between IF and ID, as the paper
  describes. The loaded value then reaches the user in EX from WB, so loads
  are never forwarded from MA (an assertion in `rvcp_core` states this).

## 9. Verification

Every module has a self-checking testbench in `tb/` (named `tb_<module>`).
Each prints `TB_RESULT checks=N failures=M`.

The reference for whole-program tests is the instruction-set model in
`tb/rvcp_tb_pkg.sv`. It executes RV32I and expands 16-bit instructions
by the standard RVC rules. That expansion deliberately does not exist in the
RTL, so the model is an independent check of the parallel decoders. The same
package has a random program generator that produces terminating RV32IC
programs with:

- nested loops and calls;
- forward branches of both lengths;
- loads and stores of every size;
- back-to-back dependences, including load-use pairs;
- a mix of 16- and 32-bit instructions at both halfword alignments.

The testbenches:

- **`tb_rvcp_top`** runs the processor at its default sizes in two parts:
  - Directed timing checks on hand-assembled code:
    - a loop of four 32-bit instructions that all straddle word boundaries
      retires one instruction per cycle once trained;
    - a mispredicted loop exit costs exactly three cycles;
    - a load-use pair costs exactly one.
  - Eight random programs, compared with the model in lock step. Every
    mechanism in the `events` list must occur. The random programs reach an
    IPC of about 0.65.
- **`tb_rvcp_core`** runs random programs with a 16-entry BTB and 64-entry
  PHT, so that aliasing produces every kind of misprediction.
- **`tb_rvcp_mem_configs`** builds the processor with 64 KB memories (code
  at 0xF000, data at 0xE000) and with 4 KB memories, and runs random programs
  on both. The half of each memory that differs only in the top address bit
  is filled with other contents, so a memory that ignored that bit would
  fail. Its program runner is the helper module `tb/rvcp_cfg_harness.sv`.
- **Unit testbenches** check:
  - the fetch unit against a reference PC model, with random
    miss/stall/prediction inputs;
  - the predictor's two-cycle timing, counters, history and suppression
    rules, first directed and then over 20,000 random cycles against a
    cycle-level model of the tables;
  - the 16-bit decoders against the expanded form of random RVC
    instructions;
  - the remaining units against direct computations.

To simulate, for example the top-level test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/rvcp_pkg.sv tb/rvcp_tb_pkg.sv $(ls rtl/rvcp_*.sv | grep -v _pkg) \
  tb/tb_rvcp_top.sv --top-module tb_rvcp_top -Mdir obj_top
./obj_top/Vtb_rvcp_top
```

Replace `tb_rvcp_top` with any other testbench name. `-Wno-fatal` keeps
width and style warnings, mostly in the testbench package, from stopping the
build. The whole top-level test runs in about a second.

Not verified: real benchmark binaries (Dhrystone, CoreMark, Embench). No
compiler was available to build them, so the performance figures of the
original work are not reproduced. The random programs are the only
whole-program workload.
