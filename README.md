# A dual-issue issue/execute slice for a CVA6-class RISC-V core

CVA6 is a six-stage, in-order, single-issue RISC-V application core. Its
dual-issue variant fetches 64 bits per cycle and duplicates decode and issue,
with a second ALU. CVA6S+ improves that dual-issue core in four ways:

1. **Register renaming.** The core records the latest in-flight writer of every
   integer and floating-point register. Two instructions that write the same
   register (a write-after-write pair) can then both be in flight, and readers
   always get the youngest value.
2. **A two-level branch predictor.** It has 128 entries and each entry keeps
   its own 3-bit history of outcomes. It replaces the bimodal predictor.
3. **ALU-to-ALU forwarding within an issue pair.** When the second instruction
   of a pair reads the result of the first, both still issue in the same
   cycle. The first ALU's result feeds straight into the second ALU.
4. **An FPU on a shared write-back port.** The FPU writes its results through
   the secondary ALU's write-back port. Hazard logic keeps the two from
   writing in the same cycle.

This repository gives synthesizable SystemVerilog for the part of the core
where these four mechanisms sit. Call it the *dual-issue slice*. It takes two
decoded instructions per cycle and issues zero, one or two of them in order.
It also contains the fetch realigner, which splits each 64-bit fetch block
into the instructions it holds, ready for the decoders.
It runs ALU instructions and branches, hands floating-point work to an
external FPU, and commits up to two results per cycle into the integer and
floating-point register files. The front end reads the branch predictor
through a lookup port, and resolved branches train it.

The rest of the core is not here: PC generation, the instruction queue and
fetch redirects, the decoders, the load/store unit, multiply/divide, CSRs and exceptions, the FPU
datapath, and the instruction and data caches (the non-blocking HPDCache).
The published description does not give their internals, or they are
existing components that the core reuses.

## Block structure

```
 fetch_*_i ──► instr_realign ──► fetch_instr_*_o                (to decoders)
                 bht_vpc_i ──► bht2lvl ──► bht_pred_o           (front end)
                                 ▲ update (pc, taken)
 instr_i[0..1] ──► operand lookup ──► issue decision ──► issue_o
   │               │   rename_table (latest writer tag per register)
   │               │   scoreboard   (result by tag, once written back)
   │               │   regfile x2   (integer, floating point)
   │               ▼
   │         alu_fwd_pair: ALU0 ──result──► (mux) ──► ALU1
   │               │ wb port 0          │ wb port 1
   │               ▼                    ▼
   │           scoreboard ◄── wb_share_arbiter ◄── fpu_resp_*  (FPU result)
   │                                           ──► fpu_req_*   (FPU request)
   └─────────────────────────────► commit (2/cycle) ──► regfiles, commit_*
```

| File | Module | Role |
|---|---|---|
| `rtl/cva6sp_pkg.sv` | package | `XLEN`/`FLEN` = 32, `instr_t`, `reg_t`, `alu_op_t`, predictor and event types |
| `rtl/cva6sp_dual_issue.sv` | top | issue logic and wiring of everything below |
| `rtl/rename_table.sv` | `rename_table` | latest-writer table, 64 registers |
| `rtl/scoreboard.sv` | `scoreboard` | 8-entry in-order ring: allocation, write-back, operand read, commit |
| `rtl/regfile.sv` | `regfile` | 32 x 32-bit file, 4 read and 2 write ports (used twice) |
| `rtl/alu_fwd_pair.sv` | `alu_fwd_pair` | primary and secondary ALU with the same-cycle forwarding mux |
| `rtl/alu.sv` | `alu` | RV32I, branch compares, Zba/Zbb/Zbc/Zbs |
| `rtl/wb_share_arbiter.sv` | `wb_share_arbiter` | shared FPU / secondary-ALU write-back port and its stall |
| `rtl/bht2lvl.sv` | `bht2lvl` | two-level predictor, 128 entries, 3-bit private history |
| `rtl/instr_realign.sv` | `instr_realign` | splits a 64-bit fetch block into up to four instructions |

## Instructions as the slice sees them

Each slot carries an `instr_t` (defined in `cva6sp_pkg`):

* `fu` is `FU_ALU` or `FU_FPU`.
* `alu_op` is the ALU operation. `fpu_op` is a 4-bit code that goes to the
  FPU unchanged.
* `rs1`, `rs2` and `rd` are `reg_t` values. A `reg_t` is a 5-bit index plus a
  bit `fp` that picks the floating-point file, so one name space covers all
  64 registers. Integer `x0` reads zero, is never renamed and is never written.
* `we` is set when the instruction writes `rd`.
* `use_imm` selects `imm` as ALU operand b.
* `is_branch` marks a conditional branch. Its `alu_op` is one of the six
  compares; the branch is taken when the compare gives 1, and its target is
  `pc + imm`.
* `pred_taken` is the front end's prediction for the branch.

Slot 0 is the older instruction. The front end must present instructions in
program order and shift its queue by the number of slots `issue_o` reports.

## How an issue cycle works

This is the densest part of the design. Everything below happens
combinationally in one cycle, and the state changes at the clock edge.

**Operand lookup.** There are four lookup ports: rs1 and rs2 of each slot.
Each source register goes to the rename table.

* If no writer is pending, the operand comes from the register file.
* If a writer is pending, the operand comes from that writer's scoreboard
  entry. It is ready once that entry has been written back.

A value written back in cycle *t* can be read from cycle *t + 1*. There is
no bypass from the write-back buses themselves.

**Dependencies inside the pair.** The slot-1 lookups see the table as it
was before this cycle. So the issue logic also compares slot 1's sources
with slot 0's destination.

* If both slots are ALU instructions, `alu_fwd_pair` forwards the value. The
  operand counts as ready, and slot 1 issues in the same cycle as slot 0.
* Any other same-pair dependency holds slot 1 until the next cycle. This
  covers an FPU instruction on either side.

Forwarding never replaces an immediate operand, and it ignores `x0`.

**Issue conditions.** Slot 0 issues when all four of these hold:

* it is valid;
* its operands are ready;
* the scoreboard has a free entry;
* it is an ALU instruction, or the FPU's `fpu_req_ready_i` is high.

Slot 1 issues only when slot 0 issues, and only when all of these hold:

* its operands are ready (same-pair forwarding included);
* the scoreboard has two free entries;
* it is not a branch (branches resolve only in the primary ALU);
* slot 0 is not a mispredicted branch;
* its unit is free:
  * an ALU instruction needs the shared write-back port, so no FPU result
    may be on it this cycle;
  * an FPU instruction needs slot 0 not to be an FPU instruction, and
    `fpu_req_ready_i` high.

**Execution and write-back.** Each ALU finishes in its issue cycle.

* The primary ALU writes back on port 0.
* The secondary ALU writes back on port 1, but only when the FPU is not
  using it.

A write-back may name a scoreboard entry allocated in that same cycle.
The FPU result comes back later with the tag it was given (`fpu_req_tag_o`),
and it always wins port 1. That is why a slot-1 ALU instruction waits, not
the FPU: a pipelined FPU cannot hold a finished result.

**Renaming.** Every issued instruction with `we` claims its destination in
the rename table under its scoreboard tag. The new writer simply replaces the
old one: a write-after-write pattern costs nothing, because readers only ever
look for the latest writer. When both slots write the same register, slot 1
wins. At commit, the entry is cleared only if it still names the committing
tag. If the register was claimed again in that cycle, the newer claim
stays.

**Commit.** The scoreboard retires up to two finished entries per cycle,
from its head and in order. They are written into the integer or the
floating-point register file and shown on `commit_*`. An instruction
reported on `commit_*` in cycle *t* has left the scoreboard by cycle *t + 1*.

**Branches.** A branch in slot 0 resolves in its issue cycle. `resolve_o`
reports its pc, its outcome, its target `pc + imm` and whether it was
mispredicted (outcome differs from `pred_taken`). The same outcome trains
the predictor at the clock edge. After a misprediction, slot 1 is not
issued. Redirecting fetch is the front end's job.

## The two-level predictor

The 128 entries are laid out as 32 rows of 4 columns. A 64-bit fetch block
holds up to four 16-bit instructions, so one lookup returns four predictions,
one per 16-bit slot. The row is `pc[7:3]` and the column is `pc[2:1]`.

Each entry holds:

* a valid bit;
* a 3-bit history of its last outcomes;
* eight 2-bit saturating counters of its own.

The history selects the counter, and the counter's upper bit is the
prediction. An update moves the selected counter toward the outcome, then
shifts the outcome into the history.

With a private history, one branch can learn a repeating pattern of period
up to four, such as taken, taken, not taken. A bimodal predictor gets a third
of that pattern wrong. After reset or flush, every counter is weakly
not-taken and nothing is valid. There are no tags, so branches whose
addresses share bits [7:1] share an entry.

## Fetch realignment

A 64-bit fetch block holds four 16-bit halfwords. The realigner walks them
from the fetch address upward. A halfword whose two low bits are not `11`
is a compressed instruction. Otherwise it is the lower half of a 32-bit
instruction, and the next halfword is its upper half. So a block gives two
32-bit instructions, four compressed ones, or a mix.

A 32-bit instruction that starts in the last halfword does not fit. Its
lower half is kept in a register. When the next block arrives, the register
is joined with that block's first halfword. The joined instruction comes out
first, in slot 0, with the address of its lower half, and the walk continues
from the block's second halfword. The next valid block must be the next one
in memory, unless `fetch_flush_i` drops the held half on a redirect. After a
redirect, `fetch_addr_i[2:1]` says where in the block to start, and the
halfwords below it are skipped.

The outputs are combinational in the fetch cycle. `fetch_instr_valid_o` is a
thermometer code. Each valid slot has the instruction word (compressed ones
are zero-extended) and its address. Only the held lower half is stored.

## Interfaces and timing of the top

* `fetch_flush_i`, `fetch_valid_i`, `fetch_addr_i`, `fetch_data_i[63:0]` →
  `fetch_instr_valid_o[3:0]`, `fetch_instr_o`, `fetch_instr_addr_o`.
  Combinational, apart from the held half of a split instruction.
* `instr_valid_i[1:0]`, `instr_i[1:0]` → `issue_o[1:0]`. Combinational.
  `issue_o[1]` implies `issue_o[0]`.
* `bht_vpc_i` → `bht_pred_o[3:0]`. Combinational read. Training happens
  internally from resolved branches.
* `resolve_o`. Valid in the issue cycle of a branch.
* FPU request: `fpu_req_valid_o`, `fpu_req_ready_i`, op, operands a and b,
  tag. A request is taken when valid and ready are both high.
  `fpu_req_ready_i` must not depend on `fpu_req_valid_o`, because issue uses
  ready.
* FPU result: `fpu_resp_valid_i`, tag and data, at most one per cycle, in
  any order.
* `commit_valid_o[1:0]`, `commit_rd_o`, `commit_we_o`, `commit_data_o`. Oldest
  first.
* `perf_o` holds one-cycle event flags:
  * slot 0 issued, and dual issue;
  * ALU-to-ALU forwarding;
  * renaming of a pending register;
  * write-back conflict, and FPU write-back;
  * operand stall, and full scoreboard;
  * slot-1 hold on slot 0;
  * branch, and misprediction;
  * two-wide commit;
  * a fetch block with four instructions, and an instruction joined across
    two blocks.
* `flush_i` empties the scoreboard and the rename table. It may only be
  raised while no FPU request is in flight.

Parameters of `cva6sp_dual_issue`, with their defaults:

* `NR_SB_ENTRIES = 8`;
* `BHT_ENTRIES = 128`;
* `BHT_HISTORY = 3`;
* `INSTR_PER_FETCH = 4`.

`XLEN`, `FLEN` and the width of the FPU op code are package constants.

Reset is asynchronous and active low. All state resets to zero, except the
predictor counters, which reset to weakly not-taken. The design includes
assertions for three rules:

* the FPU and the secondary ALU never write back together;
* the scoreboard never overflows;
* no FPU request is raised without ready.

## Where this follows the published design and where it does not

**Taken from the published description:**

* the four mechanisms and their scope:
  * renaming over both register files;
  * a two-level predictor with private per-entry history, 128 entries and
    3 history bits;
  * forwarding only between two ALU instructions of one issue pair, with no
    added latency;
  * the FPU sharing the secondary ALU's write-back port, guarded by hazard
    logic;
* dual issue with two ALUs;
* the 32-bit data path;
* the ISA the ALU covers (RV32I, with bit manipulation Zba, Zbb, Zbc, Zbs);
* the 64-bit fetch width, giving two 32-bit or four compressed
  instructions per block and four predictions per lookup.

**Choices of this implementation, because the description is silent:**

* The scoreboard has 8 entries, dual commit, and results that stay in it
  until commit.
* Renaming maps each register to a scoreboard tag. There is no physical
  register file.
* On the shared port the FPU has priority, and the secondary ALU is held at
  issue.
* Branches resolve only in slot 0.
* A slot-1 ALU instruction always uses the secondary ALU.
* There is no bypass from the write-back buses, so a result is readable one
  cycle after write-back.
* Instructions have at most two source operands, so there is no third
  operand for fused multiply-add.
* The predictor uses a private counter set per entry, 2-bit counters,
  weakly-not-taken reset, and no tags.
* The realigner holds a split instruction's lower half and joins it with
  the next block.
* The register-file port counts, the event flags and the FPU handshake are
  this implementation's own.

**Known gaps against the full core:**

* No load/store unit. This includes its optional output register, which adds
  one cycle to loads.
* No multiply/divide, CSR or exception handling.
* No decode. The slice takes decoded instructions.
* No PC generation, instruction queue or redirect. Of the fetch path, only
  the realigner is here.
* No FPU datapath.
* No caches.

The published performance figures are whole-core numbers: IPC on Embench-IoT,
CoreMark/MHz, RaiderSTREAM bandwidth and GF22 area. They cannot be reproduced
with this slice alone.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a
reference model written independently in the testbench, has a watchdog, and
ends by printing `TB_RESULT checks=N failures=M`.

| Testbench | What it shows |
|---|---|
| `tb_alu` | every operation against a bit-level model, on corner and random operands |
| `tb_alu_fwd_pair` | forwarding flags by the register-name rule; chained results |
| `tb_wb_share_arbiter` | FPU priority, stall, port contents; conflicts occur |
| `tb_bht2lvl` | all four predictions against a model under random training; a taken-taken-not-taken branch predicted perfectly after warm-up; flush |
| `tb_rename_table` | lookups and WAW flags against a model; same-cycle double claims, stale and matching releases, flush |
| `tb_scoreboard` | tags, space, operand reads, in-order commit of at most two; full ring; same-cycle write-back |
| `tb_regfile` | integer (x0) and floating-point configurations, double writes |
| `tb_instr_realign` | a random mix of 16- and 32-bit instructions fetched block by block, with idle cycles and jumps into mid-block; every output word and address in order; four-compressed, two-32-bit and split blocks occur |
| `tb_cva6sp_dual_issue` | the top at its default parameters (see below) |

`tb_cva6sp_dual_issue` runs the top at its default parameters with
`tb/fpu_model.sv`. That model is a behavioural stand-in for the FPU: it has
the same handshake and a 4-cycle pipeline, randomly drops ready, and uses
simple integer arithmetic in place of IEEE operations. The test does four
things:

1. It feeds four fetch blocks to the realigner: four compressed
   instructions, two 32-bit ones, and a 32-bit instruction split over the
   last two blocks. Every output instruction is checked.
2. It checks a directed dependent ALU pair. The pair must issue in one cycle
   and commit 5 and 10.
3. It runs a 40-instruction loop body 60 times, 2400 instructions in all.
   The body mixes random ALU and FPU instructions over few registers, plus
   two branches: one with the pattern taken, taken, not taken, and one that
   is always taken. Every commit is compared in order with an architectural
   model.
4. It requires that no branch is mispredicted in the second half of the
   run, and that every mechanism listed under `perf_o` happened at least
   once.

A typical run reports an IPC of about 1.04 on this dependency-heavy mix.

Simulating with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/cva6sp_pkg.sv tb/tb_cva6sp_dual_issue.sv --top-module tb_cva6sp_dual_issue
./obj_dir/Vtb_cva6sp_dual_issue
```

Swap in the name of any other testbench. Each one runs in well under a
second.
