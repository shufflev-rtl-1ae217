# ShuffleV core: random instruction shuffling against EM side-channel attacks

An electromagnetic side-channel attack on a processor records the
processor's EM emanation over many runs of the same program. Each trace is
aligned to the program's instruction stream. The attacker then correlates one
sample point across all traces with a guess about a secret value, such as an
AES key byte or a neural-network weight. This only works if the instruction
that handles the secret sits at the same point in time in every trace.

ShuffleV breaks that alignment in hardware. It is a moving-target defence. The
core fetches a few instructions ahead into a small *shuffle buffer*. Every
cycle it executes a randomly chosen instruction from the buffer whose inputs
are ready. Two runs of the same binary therefore execute in different orders,
but they compute the same result. Software is not changed or recompiled.
Optionally, the core also slips random dummy ALU instructions into the
execute stage.

This repository is a SystemVerilog model of that microarchitecture, in the
configuration the ShuffleV paper evaluates most: **ShuffleV-F with a 4-entry
buffer**. It is a register-transfer description of the mechanisms, wrapped
around a simple single-cycle RV32IM execute stage. It is not a modified copy
of any existing core. Where the published description leaves a detail open,
this README says what was chosen.

## Contents

- [1. Structure](#1-structure)
- [2. The shuffle buffer](#2-the-shuffle-buffer)
- [3. Renaming](#3-renaming)
- [4. Dependency bits](#4-dependency-bits)
- [5. Choosing the next instruction](#5-choosing-the-next-instruction)
- [6. When an instruction may issue: fill, drain, refill](#6-when-an-instruction-may-issue-fill-drain-refill)
- [7. Dummy instructions](#7-dummy-instructions)
- [8. Random numbers](#8-random-numbers)
- [9. Control register SVCTRL](#9-control-register-svctrl)
- [10. Execute stage and memory interface](#10-execute-stage-and-memory-interface)
- [11. Parameters](#11-parameters)
- [12. Differences from the published design](#12-differences-from-the-published-design)
- [13. Verification](#13-verification)
- [14. Simulating with verilator](#14-simulating-with-verilator)
- [15. Files](#15-files)

---

## 1. Structure

```
            +-------+  pc   +---------+  rs/rd   +-----------+
 imem  <----| fetch |------>| predec  |--------->|  rename   |  logical -> physical map
            +-------+       +---------+          +-----------+  + free-register finder
               ^ redirect        |                      | physical rs1/rs2/rd
               |                 v                      v
               |        +----------------+      +-----------------+
               |        | dependency     |----->|  shuffle buffer |  N entries
               |        | tracking       | dep  |  PC, instr, V,  |
               |        +----------------+      |  dep[N], rd/rs  |
               |                                +-----------------+
               |                                    | ready, cf, oldest
               |      +-----+   rnd   +---------------------+
               |      | RNG |-------->| instruction selector|  D-Box + priority encoder
               |      +-----+    |    +---------------------+
               |                 |              | slot
               |                 v              v
               |         +-----------+     +-----+
               |         | dummy gen |---->| mux |--> physical register file read
               |         +-----------+     +-----+             |
               |                                               v
               +-------------------------------------  execute (RV32IM, 1 cycle)
                                                    --> dmem, CSR, register write
```

The front end is fetch, predecode, renaming, dependency tracking, the shuffle
buffer, the selector and the dummy generator. It replaces the in-order
instruction path of a simple two-stage core. The back end is a physical
register file and the execute stage. It runs exactly one instruction per
cycle: a real one from the buffer, a dummy, or none during a stall. Every
instruction writes its result in the cycle it executes. Because of that, there
is no reorder buffer and no commit stage. Correctness comes from allowing only
instructions with no outstanding dependency to leave the buffer.

Per clock cycle, at most:

- one instruction is fetched, renamed and written into a free buffer slot;
- one buffer entry (or one dummy) is read, executed and retired.

Both happen in the same cycle when possible. A slot being issued can be
refilled in the same cycle.

## 2. The shuffle buffer

`sv_shuffle_buffer` has `N` entries (default 4). Each entry holds:

| field | meaning |
|---|---|
| `valid` | entry holds an instruction that has not executed |
| `pc`, `instr` | the fetched instruction and its address |
| `pd` | predecoded class: registers used, load/store offset and size, branch/jump kind, serializing |
| `dep[N]` | bit j set: this entry must wait for entry j |
| `rd_p`, `rs1_p`, `rs2_p` | renamed (physical) register numbers |
| `age[N]` | bit j set: entry j is older (used only for in-order mode) |

An entry is **ready** when it is valid and all its dependency bits are clear.
When an entry issues, its column of dependency bits is cleared in every other
entry. This lets dependants become ready on the next cycle. The buffer also
outputs `ref`, one bit per physical register named by any valid entry. The
renaming unit needs it (next section).

## 3. Renaming

Shuffling only pays off if independent instructions can overtake each other.
Reusing a small set of architectural registers creates false write-after-write
and write-after-read conflicts. For example, `AND x1,...` cannot move before
an earlier `SUB ..., x1, ...` if both name `x1`. The front end therefore
renames every destination register to a fresh physical register as the
instruction enters the buffer.

`sv_rename` holds the map from the 32 logical registers to `NUM_PREGS`
physical registers (default 48).

- Sources are looked up in the map combinationally.
- A destination gets the lowest-numbered physical register that is free.
- A register is free when it is neither in the map nor referenced by a valid
  buffer entry.
- The map updates on the clock edge when the instruction is accepted.
- `x0` always maps to physical register 0, which reads as zero. Physical 0 is
  never allocated.

There is no separate free list to keep consistent: freedom is recomputed every
cycle from the map and the buffer contents. A physical register is released
when two things are true: the logical register has been remapped, and the last
buffer entry that names the register has issued.

Count the physical registers that can be live at once:

- 31 mapped registers (physical 0 is separate);
- up to three per pending entry that the map no longer holds (its
  destination and its two sources), so 3·N;
- the register being allocated to the instruction being fetched.

With `N = 4` that is 31 + 12 + 1 = 44. Registers 1 to 47 are allocatable, so
48 never runs out. With fewer registers, the front end detects
**starvation**: the fetched instruction needs a register and none is free.
The front end then holds fetch and lets the buffer issue while partly full,
which releases registers. The testbenches force this case with
`NUM_PREGS = 34`.

## 4. Dependency bits

`sv_dep_track` computes the `N` dependency bits of the incoming instruction
against every pending entry. A pending entry is one that is valid and not
issuing in this same cycle.

1. **Register (read-after-write).** The incoming instruction uses a physical
   source register equal to the pending entry's physical destination. After
   renaming, this is the only register hazard left.
2. **Memory.** The core cannot know addresses before the base register has
   been computed. The rule depends on the `OPT_MEM` option:
   - *Without the M option* (`OPT_MEM = 0`, the default): every load or store
     depends on every earlier pending load or store.
   - *With the M option* (`OPT_MEM = 1`), three rules apply.
     - Two loads never depend on each other.
     - A pair with a store depends unless both use the **same physical base
       register** and their byte ranges `[offset, offset + size)` do not
       overlap.
     - So `SW x3,0(x4)` followed by `LW x5,4(x4)` is independent, while
       `SW 0(x4)` followed by `LB 2(x4)` is not.
     - Comparing *physical* base registers is safe: the same physical register
       holds the same value for every entry that reads it.
   - SVCTRL bit 4 switches the M rules off at run time, for code that touches
     memory-mapped I/O.
3. **Serializing instructions.** `FENCE`, `FENCE.I`, `ECALL`, `EBREAK` and all
   CSR instructions depend on every pending entry. Every later instruction
   depends on them. They therefore execute exactly in program order relative to
   their neighbours. Unknown opcodes are treated the same way.

An entry can only depend on older entries. So the oldest valid entry is always
ready, and the buffer cannot deadlock.

## 5. Choosing the next instruction

This is the core of the design. The selector must pick a uniformly random
*ready* entry every cycle, with cheap logic. Drawing random numbers until one
hits a ready slot is not cheap. Instead, `sv_inst_selector` draws one start
index `r = rnd mod N` and takes the ready entry **nearest** to `r`, trying
indices in this order:

```
r, r+1, r-1, r+2, r-2, ...      (indices modulo N)
```

The search order for each `r` is a constant table, the **D-Box**. Column `r`,
row `k` holds the k-th index to try:

- row 0 is `r`;
- odd row `k` is `r + (k+1)/2`;
- even row `k` is `r − k/2`.

For the default `N = 4`:

| row \ r | 0 | 1 | 2 | 3 |
|---|---|---|---|---|
| 0 | 0 | 1 | 2 | 3 |
| 1 | 1 | 2 | 3 | 0 |
| 2 | 3 | 0 | 1 | 2 |
| 3 | 2 | 3 | 0 | 1 |

The hardware has three steps:

1. Select column `r`.
2. Gather the ready bits of the entries that column lists, in row order.
3. Run a priority encoder over them. The winning row indexes the same column
   to give the entry number.

The formula reproduces the 5-entry table printed in the paper. The
selector's testbench checks the module against that printed table at `N = 5`.

Two rules override the random pick:

- **Branch shortcut (`SHORTCUT_CF = 1`, the "F" of ShuffleV-F).** If a branch
  or jump is ready, it is chosen at once. Fetch is stopped while a
  control-flow instruction waits (next section), so executing it early
  shortens the stall. The cost is less randomness around branches.
- **Shuffling disabled (SVCTRL bit 0 = 0).** The oldest valid entry is chosen,
  found through the age bits. The core then runs strictly in program order.
  Software can use this for code where timing matters more than protection.

## 6. When an instruction may issue: fill, drain, refill

Randomness is only as good as the choice available. The core therefore issues
only when the buffer is **full**. In steady state, each cycle one entry leaves
and the freed slot is refilled in the same cycle.

There is no branch prediction. So the fetch unit (`sv_fetch`) does not know
where to continue after a branch or jump. It stops fetching from the moment a
branch, `JAL` or `JALR` enters the buffer until that instruction has executed
and sent back the next PC. During that time the full-buffer rule is lifted and
the buffer **drains**. After the redirect the core **stalls** while it
refetches, until the buffer is full again. The stall is 0 to N cycles, and it
is shorter the sooner the branch issued. This is why the F shortcut matters.

Example with N = 5, matching the paper's illustration:

```
cycle 1  full, one entry issues, slot refilled
cycle 2  ADD issues; BEQ is fetched into the freed slot -> fetch stops
cycle 3  another entry issues, nothing fetched (buffer drains)
cycle 4  BEQ issues and resolves (redirect)
cycle 5  stall: first instruction of the new path fetched
cycle 6  stall: fetch
cycle 7  stall: fetch, buffer full again
cycle 8  issue resumes
```

The complete issue condition (`shufflev_core`) is:

```
can_issue = a ready entry exists
            and (buffer full
                 or a branch/jump is pending            -- drain
                 or fetch is starved of physical regs   -- section 3
                 or shuffling is disabled)              -- in-order mode
```

The `J` option (`OPT_JAL = 1`) computes `JAL` targets in the fetch unit.
Fetch then continues past a `JAL` without stopping. The `JAL` still executes
later to write its link register, but does not redirect again.

## 7. Dummy instructions

`sv_dummy_gen` adds noise on top of the reordering. It keeps a counter of
real instructions issued since the last dummy. When the counter reaches a
random threshold, it requests a dummy. On the next issue opportunity, the
dummy takes the execute slot instead of a buffer entry. The threshold is drawn
again after each dummy, uniformly in `0..4`, `0..8` or `0..16` as set in
SVCTRL.

The dummy is built as follows:

- Its operation is one of `ADD`, `AND`, `MUL`, `MULH`, chosen at random.
  Division is excluded on purpose: a long-latency divide would be both slow
  and easy to spot in a trace.
- Its operands are two random physical registers, so it handles real data.
- Its result goes to physical register 0 and is lost.

Dummies never change architectural state. Dummy insertion is off after reset.

## 8. Random numbers

`sv_rng` produces a new 32-bit word every cycle. It combines two registers:

- a 43-bit Fibonacci LFSR, polynomial `x^43 + x^41 + x^20 + x + 1`;
- a 37-bit hybrid cellular automaton, rule 150 at cell 28 and rule 90
  elsewhere, with null boundaries.

The output is the XOR of the low 32 bits of the two. Fields of the word are
used as follows:

| bits | consumer |
|---|---|
| `[15:0]` | selector start index |
| `[31:24]`, `[7:0]` | dummy operand registers |
| `[11:10]` | dummy operation |
| `[23:16]` | dummy threshold |

The published design names this LFSR+CA generator but gives no polynomial,
rule vector or seed. The ones here are this design's choice. Seeds can be
reloaded through `seed_we_i`. A zero seed is replaced by the default, because
an all-zero LFSR would lock up.

The generator is not cryptographically strong. A product would want a
proper entropy source behind it.

## 9. Control register SVCTRL

The control register is the custom machine-mode CSR `0x7C1`.

| bits | name | reset | effect |
|---|---|---|---|
| 0 | shuffle enable | 1 | 0 = in-order issue from the oldest entry |
| 1 | dummy enable | 0 | 1 = insert dummy instructions |
| 3:2 | dummy interval | 2 | 0 → every 0..4, 1 → 0..8, 2/3 → 0..16 real instructions |
| 4 | load/store optimisation | 1 | 0 = strict load/store order even if built with M |

`cycle` (`0xC00`) and `cycleh` (`0xC80`) are read-only and count clock cycles.

CSR instructions are serializing (section 4), so a write to SVCTRL takes
effect exactly between the instructions before and after it. For example:

```
csrrwi x0, 0x7C1, 0b11000   # shuffle off: run the next block in program order
...
csrrwi x0, 0x7C1, 0b10011   # shuffle on, dummies on, interval 0..4
```

## 10. Execute stage and memory interface

`sv_execute` is a single-cycle RV32IM datapath. It covers all of RV32I plus
MUL, MULH, MULHSU, MULHU, DIV, DIVU, REM and REMU. Its operands come from the
physical register file, read through the issued entry's `rs1_p` and `rs2_p`.
It writes `rd_p` in the same cycle. Branches and jumps resolve here and
redirect fetch.

The core's memory ports are deliberately plain:

- **Instruction memory.** `imem_addr_o` is the PC. `imem_rdata_i` must return
  the word in the same cycle.
- **Data memory.** `dmem_req_o`, `dmem_we_o`, `dmem_be_o` and `dmem_wdata_o`
  are given with a word address `dmem_addr_o`. `dmem_rdata_i` must return the
  word in the same cycle. Byte and halfword accesses use byte lanes. Stores
  are written at the clock edge.

Observability outputs, for trace collection or testbenches:

- `issue_valid_o`: something entered execute this cycle;
- `issue_dummy_o`: it was a dummy;
- `issue_pc_o`, `issue_instr_o`: its address and instruction.

There are no traps, interrupts or debug mode. Misaligned accesses are not
detected. `ECALL`, `EBREAK`, `MRET` and `WFI` execute as no-ops that still
serialize.

## 11. Parameters

`shufflev_core` parameters:

| parameter | default | meaning |
|---|---|---|
| `N` | 4 | shuffle buffer entries (the paper also evaluates 2 and 8) |
| `NUM_PREGS` | 48 | physical registers (this design's choice, see section 3) |
| `SHORTCUT_CF` | 1 | F option: ready branch/jump issues first |
| `OPT_MEM` | 0 | M option: finer load/store dependencies |
| `OPT_JAL` | 0 | J option: JAL target computed at fetch |
| `DUMMY_RESET` | 0 | reset value of the dummy-enable bit |
| `BOOT_ADDR` | 0 | reset PC |

For a larger buffer, keep `NUM_PREGS ≥ 33 + 3·N` to avoid starvation stalls.
For example, use 57 for `N = 8`. Smaller values still work correctly; they
only stall more.

## 12. Differences from the published design

What follows the published description:

- the shuffle-buffer entry fields;
- renaming with free registers defined by map and buffer;
- all dependency rules, including the M option and serializing instructions;
- the nearest-ready-to-random-index selection and its D-Box;
- the F shortcut and the J option;
- fetch halting behind a branch, with the 0..N cycle refill;
- dummy operations and intervals;
- an LFSR+CA generator;
- a control bit to turn protection off, and a way to turn off the
  load/store optimisation at run time.

This design's own choices:

- the number of physical registers;
- the RNG polynomial, rule vector and seeds;
- the CSR address and bit layout;
- lowest-free-register allocation;
- age bits for in-order mode;
- in-order issue when shuffling is disabled;
- issue from a partly filled buffer on register starvation;
- how dummies pick their operands and threshold.

Not present:

- **Speculative options B, R and C.** These are branch prediction with
  checkpoints, a return-address stack, and multiple checkpoints. They are
  alternatives evaluated against the main configuration. The prefetch (`P`)
  column of the buffer and the fetch predictor belong to them.
- **Compressed (RVC) instructions.** The original places an unchanged
  compressed-instruction expander in front of the buffer. This core accepts
  32-bit instructions only.
- **The base core's pipeline details.** This covers the multi-cycle
  multiplier and divider, exceptions, interrupts and debug, and the
  request/grant memory bus. The execute stage here is a minimal stand-in, so
  cycle counts differ from an FPGA build of the original. In particular,
  division takes one cycle here.
- **Memories and SoC.**

## 13. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sv_rng` | 500 cycles against an independent model of the LFSR and CA; reseeding; zero-seed guard |
| `tb_sv_predecode` | every instruction class: register use, load/store size and offset, control flow, serializing |
| `tb_sv_rename` | random accept/reference sequences against a reference free-register model; x0 handling; exhaustion |
| `tb_sv_dep_track` | directed cases, including the LW/SW/LW example and offset overlaps, then 5000 random cases with and without M and with M switched off at run time |
| `tb_sv_shuffle_buffer` | random insert/issue traffic against a model: ready, oldest, dependency clearing, references |
| `tb_sv_inst_selector` | the printed 5-entry D-Box; nearest-ready rule for all ready patterns and indices; branch shortcut; in-order mode |
| `tb_sv_dummy_gen` | gap between dummies never above the selected interval and not constant; only ADD/AND/MUL/MULH to physical 0; all four operations occur; nothing owed while disabled |
| `tb_sv_fetch` | halt on branch/jump; redirect; J option |
| `tb_sv_regfile` | random reads and writes against an array; physical 0 |
| `tb_sv_csr` | reset values, every SVCTRL value, cycle counter |
| `tb_sv_execute` | random RV32IM instructions against an instruction-set model written in the testbench package |
| `tb_shufflev_core` | end to end (below), `N = 4`, `NUM_PREGS = 34` |
| `tb_shufflev_core_bs2`, `tb_shufflev_core_bs8` | the same with buffer sizes 2 and 8 |
| `tb_shufflev_core_opts` | the same with the M and J options on |
| `tb_shufflev_aes` | AES-128 encryption in RV32I at default parameters: FIPS-197 C.1 vector and random vectors, in-order, shuffled (two seeds) and shuffled with dummies |
| `tb_shufflev_mac` | a 16-neuron layer of 5-input 5-weight MACs, in the same three modes |
| `tb_shufflev_core_full` | the same at the default parameters, with no overrides |

### The end-to-end tests

The end-to-end tests generate RV32IM programs inside SystemVerilog. The
programs contain:

- random ALU, multiply, divide, load and store code;
- forward branches, a counted loop, and a call and return;
- CSR writes that switch shuffling off and back on, and enable dummies;
- the 5-input, 5-weight multiply-accumulate kernel, the paper's stand-in for
  a neural-network layer.

Each program runs on the core and on an in-order reference model, and the
tests check that:

- the final data memory is identical;
- every instruction of the reference trace issued exactly once;
- instructions between the "shuffle off" and "shuffle on" writes issued in
  program order;
- after every branch or jump, the refill stall is at most `N` cycles;
- the same program under two RNG seeds issues in a different order but gives
  the same result.

Each test also counts how often each mechanism happened, and fails if one
never did. The mechanisms are: out-of-order issue, drain behind a pending
branch, refill stall, branch shortcut, dummy insertion, in-order mode and
register starvation. At the default `NUM_PREGS` the counted starvation must be
zero. With the default `OPT_MEM = 0`, no load or store may issue ahead of an
older one. With M on, this must happen.

Typical counts, for four programs at `N = 4`:

- about 1000 out-of-order issues;
- 170 drains;
- 700 refill-stall cycles;
- 100 branch shortcuts;
- 150 dummies.

Total cycles for the same program set grow with the buffer size because of
longer refills: about 1900 cycles with `N = 2`, 2400 with `N = 4` and 2900 with
`N = 8`. This is the execution-time cost of the defence that the paper
measures. The testbench counts include dummy instructions and the reduced
register count, so they are not comparable with the paper's percentages.

### The two victim workloads

`tb_shufflev_aes` and `tb_shufflev_mac` run the workloads that the defence is
meant to protect, at the default parameters. Each data set runs in three
modes: shuffling off, shuffling on, and shuffling on with dummies every 0..16
instructions. The results must be identical in all three modes.

- **AES-128** is written in RV32I. SubBytes and ShiftRows go through an S-box
  table, MixColumns uses a shift-and-reduce `xtime`, and AddRoundKey works on
  whole words.
  - The S-box and the round keys are computed by the testbench from their
    definitions. The core runs the ten rounds, 4222 instructions per block.
  - The first vector is the FIPS-197 appendix C.1 example.
- **The MAC layer** computes sixteen 5-term dot products. Each is unrolled as
  load, load, `MUL`, `ADD`, the way a compiler emits it.

Cycle cost, measured against the same core with shuffling switched off:

| workload | shuffled | shuffled + dummies (0..16) | differing issue positions between two seeds |
|---|---|---|---|
| AES-128, one block | +6.7 % | +18 % | about 56 % |
| 5i5w MAC layer | +4.0 % | +17 % | about 75 % |

The published measurements compare against the unmodified base core, which
has multi-cycle multiply/divide and a different pipeline. They report +3.1 %
for AES-128 and +13.7 % for the MAC with a 4-entry buffer. The numbers here
show the same order of cost but are not a reproduction of those figures.

How far to trust it: the reference model and the RTL were written separately,
and every testbench was shown to fail on a deliberately broken copy of its
module. The testbenches cover the shuffling front end thoroughly. The RV32IM
execute stage is checked against the model instruction by instruction, but it
was not run against the official RISC-V compliance suite. No security
evaluation (EM measurement or correlation analysis) is part of this model.

## 14. Simulating with verilator

From the repository root, for any testbench `T`:

```
verilator --binary --timing --assert -Wno-fatal --top-module T \
    -y rtl -y tb +libext+.sv -Irtl \
    rtl/shufflev_pkg.sv tb/rv_tb_pkg.sv tb/T.sv -o sim
./obj_dir/sim
```

Every testbench finishes in seconds. To lint the core:

```
verilator --lint-only -Wall -y rtl +libext+.sv rtl/shufflev_pkg.sv rtl/shufflev_core.sv
```

The remaining lint warnings are intentional:

- some fields of the shared predecode struct are unused in a given module;
- `rst_ni` appears in an assertion's `disable iff`.

To run your own program, instantiate `shufflev_core` with a combinational
instruction and data memory, as `tb_shufflev_core_full` does. Then watch
`issue_*` for the randomized instruction stream.

## 15. Files

`rtl/`:

| file | content |
|---|---|
| `shufflev_pkg.sv` | opcodes, predecode struct, CSR constants |
| `shufflev_core.sv` | top |
| `sv_fetch.sv` | fetch |
| `sv_predecode.sv` | predecode |
| `sv_rename.sv` | renaming unit |
| `sv_dep_track.sv` | dependency tracking |
| `sv_shuffle_buffer.sv` | shuffle buffer |
| `sv_inst_selector.sv` | instruction selector |
| `sv_dummy_gen.sv` | dummy instruction generator |
| `sv_rng.sv` | random number generator |
| `sv_csr.sv` | control register and cycle counter |
| `sv_regfile.sv` | physical register file |
| `sv_execute.sv` | execute stage |

`tb/`:

- `rv_tb_pkg.sv`: instruction encoders and the reference instruction-set
  model;
- `tb_*.sv`: the testbenches listed above.
