# A dual-issue backend for a CVA6-class RISC-V core

CVA6 is an in-order-issue, out-of-order-write-back, in-order-commit RISC-V
core that issues one instruction per cycle. This RTL is the backend of a
two-way superscalar version of it. It takes the changes that Allart, Coulon,
Sintzoff, Potin and Rigaud describe in "Using a Performance Model to Implement
a Superscalar CVA6" and builds them into a small, self-contained design:

* the instruction queue releases two instructions per cycle, two compressed
  decoders and two decoders work in parallel, and the issue buffer holds two
  instructions;
* the issue stage considers two instructions per cycle. It checks the hazards
  of each against the scoreboard and the hazards between the two, and
  forwards results that are ready but not yet committed;
* a second ALU is added without a new write-back port: it borrows the port of
  the FPU, which this core therefore does not have;
* structural hazards are tracked per write-back port, not per unit;
* the scoreboard detects "full" and "only one entry free" from two AND
  reductions, one over its even entries and one over its odd entries;
* a *speculative scoreboard*: the instruction after a branch may issue in the
  same cycle as the branch. If the branch was mispredicted, the younger
  entries are not removed but marked *cancelled*, and the commit stage
  retires them without effect;
* two commit ports, of which only the first can commit a store.

The published figures for this design, on the authors' full CVA6 (CoreMark,
cv32a6_imac_sv0-based configuration), are +40% CoreMark/MHz, about 11% more
area and about 2% lower maximum frequency than single issue. Those numbers
belong to the full core. This RTL is a reduced version of it (see
"What is outside" and "Departures").

## Pipeline and timing

```
 fetch (2 instr/cycle, with prediction)            redirect (mispredict)
   |                                                      ^
   v                                                      |
 instr_queue --> (compressed_decoder + decoder) x2 --> issue_buffer --> issue_read_operands ---+
  (8 entries)                   (2 entries)      |   ^         |        |
                                                 |   | view    | 2 issue ports (registered)
                                      regfile <--+   |         v
                                      (4R/2W)     scoreboard  ex_stage: fu_mux per unit
                                         ^        (4 entries)   ALU0 ALU1 BRANCH MULT LSU
                                         |         ^   |            |    |    |     |   |
                                   commit_stage <--+   +<-- 4 write-back ports (FLU, LOAD, STORE, FPU)
                                   (2 ports)                              |
                                         \---- store release ------------ LSU --> data memory
```

Cycle numbers count from the cycle in which an instruction issues (cycle 0):

| instruction | unit works | writes back | earliest commit | entry reusable |
|---|---|---|---|---|
| ALU, branch, jump | 1 | 1 | 2 | 3 |
| multiplication | 1-2 (2-stage pipeline) | 2 | 3 | 4 |
| load | 1 (request), 2 (data) | 2 | 3 | 4 |
| store | 1 (into store queue) | 2 | 3 (memory written) | 4 |

A dependent instruction can issue in the cycle its producer writes back,
because results on the write-back ports are forwarded in that same cycle.
Two dependent ALU instructions therefore issue in consecutive cycles.
Scoreboard occupancy is registered: an entry freed by a commit can be
reused only in the next cycle. So each ALU instruction holds its entry for
three cycles, and the 4-entry scoreboard sustains at most 4/3 ALU
instructions per cycle, not 2. This is the "little scoreboard" effect that
the odd/even detection was introduced to soften. Making `NR_SB_ENTRIES` 8
(in `ss_pkg`) lifts the limit to the issue width.

## The issue decision

`issue_read_operands` is the heart of the design and its densest part. Each
cycle it looks at the two oldest entries of the issue buffer and issues a
prefix of them: the second issues only if the first does. For each
instruction, in order:

1. **Scoreboard space.** Port 0 needs `!full`; port 1 needs `!one_free`.
   Both flags come from the scoreboard's odd/even reduction (below).
2. **RAW.** Consider every live entry, meaning valid and not cancelled, whose
   destination is one of the instruction's sources. If its result is
   available (in the entry, or on a write-back port this cycle), the value is
   forwarded. Otherwise the instruction waits.
3. **WAW.** The instruction waits if a live entry has the same destination.
   There is no register renaming. Because of this rule, at most one live
   entry exists per register, which keeps the forwarding search a simple
   match.
4. **Pair hazards** (port 1 only): it waits if it reads or writes the
   destination of the port 0 instruction.
5. **Memory order.** A load waits while a live store is in the scoreboard or
   is issuing on port 0.
6. **Structural hazards.** Each unit has a busy flag for the cycle. Issuing
   to a unit makes that unit busy, and so are all units that share its
   write-back port. The fixed-latency port (FLU) is shared by ALU0, the
   branch unit and the multiplier. Because the multiplier needs two cycles,
   a multiplication issued in the previous cycle makes ALU0 and the branch
   unit busy in this cycle: their result would otherwise collide with the
   product on the FLU port. The multiplier itself stays free, since it is
   pipelined. An ALU instruction goes to ALU0, or to ALU1 (FPU port) when
   ALU0 is busy.
7. Nothing issues in the cycle in which a mispredict is resolved.

The issued instructions are registered per issue port together with their
target unit. In `ex_stage`, one 2-to-1 multiplexer per unit (`fu_mux`)
picks the port that targets it. No arbitration is needed, because the rules
above never send two instructions to one unit (an assertion checks this).

`perf_o` reports, per cycle, which of these rules held an instruction back.
The system test uses it to prove that every rule fires.

## Scoreboard: odd/even space detection

The scoreboard is a circular buffer with an issue pointer and a commit
pointer. Occupied entries are always contiguous. So if every even entry
is occupied and every odd entry is occupied, the buffer is full. If either
parity is completely occupied, at most one entry is free, because two
adjacent free entries would have different parities. `full = all_even &
all_odd` stops all issue. `one_free = all_even | all_odd` stops only the
second port. Two wide ANDs replace a counter and comparator. The scheme
needs an even, power-of-two number of entries.

## Speculative scoreboard

With two instructions per cycle, the instruction after a branch usually
wants to issue in the same cycle as the branch. The branch unit resolves
one cycle after issue. If it reports a mispredict:

* the instruction queue and issue buffer are flushed, issue is blocked for
  that cycle, and `redirect_valid_o`/`redirect_pc_o` restart the frontend;
* `sb_interval` computes a mask of the entries from *branch index + 1* up to,
  but excluding, the issue pointer, wrapping around the end of the buffer.
  Those entries get their `cancelled` bit set.

Cancelled entries stay in the buffer. The instructions in them may still be
executing, and each writes back into its own entry; removing the entries
would let a late result land in a new instruction's entry. The commit stage
retires a cancelled entry like any other, without writing the register
file. A cancelled store is dropped from the store queue instead of being
written to memory. Hazard checks ignore cancelled entries. A branch whose
own entry is cancelled never raises a mispredict.

With `SPEC_SB_EN = 0`, no entry is ever cancelled, and port 1 does not
issue beside a control-flow instruction. That is the configuration in which
the original authors booted Linux. The default, `SPEC_SB_EN = 1`, is the
configuration they measured.

## Write-back ports and units

| port | units | latency |
|---|---|---|
| FLU (0) | ALU0, branch unit (link value of JAL/JALR), multiplier (including carry-less) | 1 / 1 / 2 |
| LOAD (1) | load/store unit, loads | 2 |
| STORE (2) | load/store unit, stores (only marks the entry done) | 2 |
| FPU (3) | ALU1 | 1 |

## Stores and loads

A store computes its address and byte enables in the cycle after issue and
enters the store queue. The queue has `NR_SB_ENTRIES` entries; stores enter
it in program order. Memory is written only when commit port 0 retires the
store. This is also why port 1 never retires a store: one release per cycle
is enough. Loads read the data memory port, which answers one cycle after
the request. Rule 5 of the issue decision means a load never needs to search
the store queue. Accesses are assumed naturally aligned.

## What is outside

The top level `ss_cva6_core` has no frontend and no caches. Its ports stand
where those blocks would connect:

* `fetch_valid_i[1:0]`, `fetch_i[1:0]` (pc, instruction, predicted taken,
  predicted target) and `fetch_ready_o` (two places free). A 16-bit
  compressed instruction sits in the low half of the 32-bit instruction
  field; the upper half is ignored. Splitting fetch blocks into
  instructions is the frontend's job. Slot 0 is
  the older instruction. On `redirect_valid_o` the frontend must restart at
  `redirect_pc_o`; pushes in that cycle are ignored.
* Data memory: `dmem_req_o`/`dmem_raddr_o` with `dmem_rdata_i` one cycle
  later, and a write port `dmem_we_o`, `dmem_waddr_o`, `dmem_wdata_o`,
  `dmem_be_o`.
* `commit_o[1:0]`: a retirement trace, one record per commit port (valid,
  cancelled, pc, rd, written value), in the spirit of RVFI.

PC generation, branch predictors (BHT, RAS, BTB), the re-aligner,
instruction scan, caches, MMU, CSRs, FPU and divider of CVA6 are not part of
this RTL.

## Departures and own choices

* ISA: RV32IMC with Zba, Zbb, Zbc and Zbs, the extensions of the evaluated
  configuration, but without division, atomics (A), CSR and system
  instructions. Those are decoded as illegal and executed as no-ops; no
  exceptions are raised. Compiled programs that need them, such as a
  complete CoreMark run with its timing and reporting, do not run here
  unmodified.
* The compressed decoder is written from scratch from the RV32C expansion
  table. Compressed floating-point loads and stores and C.EBREAK are
  illegal. An instruction expanded from 16 bits carries a flag, so that
  jumps link to pc+2 and not-taken branches continue at pc+2.
* The Zba, Zbb and Zbs operations run in the ALUs (one cycle). The
  carry-less multiplications of Zbc run in the multiplier (two cycles),
  because that unit already has a wide two-stage datapath. Which unit runs
  them in the original is not stated.
* Scoreboard size 4, instruction queue depth 8 and store queue depth 4 are
  this design's choices. The original only calls its scoreboard "little".
* Load/store unit: a minimal unit that meets the stated two-cycle latency. It
  is not CVA6's.
* ALU precedence: ALU0 is preferred and ALU1 takes the overflow. The
  original says only that the second ALU was added "with precedence".
* WAW hazards stall (no renaming), following the later CVA6 and the later
  version of the original performance model.
* The performance model's "stall issue for 6 cycles after a miss" is not an
  RTL rule. In hardware, that delay comes from refilling the frontend.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The system test
`tb/tb_ss_cva6_core.sv` runs the core at its default parameters:

* Its frontend model fetches 32-bit and 16-bit instructions. It predicts
  JAL taken, backward and compressed branches taken, and forward branches
  and JALR not taken, so mispredicts are frequent.
* A reference instruction-set model inside the testbench checks every
  non-cancelled retirement (pc, destination, value) and the final data
  memory.
* Phase 1 checks the retirement rate of 24 independent ALU instructions
  against the 4/3-per-cycle bound derived above.
* Phase 2 runs 30 random loop programs. These contain ALU,
  bit-manipulation, LUI/AUIPC, multiplications (including carry-less),
  loads and stores of all sizes, pairs of compressed instructions
  (arithmetic, loads, stores, conditional branches), forward branches, a
  compressed indirect call, an indirect jump and a loop branch: about
  42,000 instructions.
* The test counts every mechanism: dual issue, forwarding, RAW/WAW/pair
  stalls, structural stalls (including the multiplier's write-back block),
  use of ALU1, scoreboard full and one-free, loads waiting for stores,
  issue beside a branch, mispredicts, cancelled retirements, dual commit,
  committed and discarded stores, and compressed instructions. A mechanism that never occurs counts
  as a failure.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ss_pkg.sv tb/rv_asm_pkg.sv -y rtl -y tb +libext+.sv \
  tb/tb_ss_cva6_core.sv --top-module tb_ss_cva6_core -o sim
./obj_dir/sim
```

`tb/tb_coremark_kernels.sv` runs three programs written after the CoreMark
kernels on the default core: CoreMark's bit-serial CRC-16 over 32 bytes, a
4x4 matrix multiply, and a walk over a 16-node linked list laid out in
random order. It checks them like the system test, compares each result
with a value computed in the testbench, and prints the IPC of each. The
retirement rates are about 0.72 (CRC, one data-dependent branch per bit),
0.84 (matrix) and 0.96 (list). These figures are for this reduced core on
these kernels, not a CoreMark score.

`tb/tb_ss_cva6_core_nospec.sv` builds the core with `SPEC_SB_EN = 0` and
runs 10 random programs of the same kind, checked the same way. It also
checks that no instruction ever issues beside a branch or jump and that no
entry is ever retired as cancelled, while mispredicts, dual issue and
stores still occur. It then runs the same three kernels. Without the
speculative scoreboard their rates drop to about 0.64 (CRC), 0.79 (matrix)
and 0.84 (list). The CRC kernel shows the largest gain from issuing beside
a branch. The list gain also comes from its loop branch. The matrix kernel
is limited more by loads and the multiplier than by branches.

The three system tests share the core environment in `tb/ss_core_env.svh`
(clock, memories, frontend model, reference model and commit checker). The
two random tests also share the program generator in `tb/ss_rand_prog.svh`.
The kernel programs are in `tb/ss_kernels.svh`.
Each test instantiates the core itself.

Replace the testbench name to run a unit test. `tb/rv_asm_pkg.sv` holds
instruction encoders for writing test programs as function calls.

## Parameters

Shared sizes are in `rtl/ss_pkg.sv`: `XLEN` (32), `NR_SB_ENTRIES` (4, even
and a power of two), issue and commit width 2 (the structure assumes 2),
and the write-back port numbering. The top has `IQ_DEPTH` (8) and
`SPEC_SB_EN` (1).
