# MERE runahead hardware for a scalar in-order RISC-V core

A scalar in-order core with a non-blocking data cache does not stop when a
load misses. It stops at the first instruction that *uses* the missing data.
When the miss goes all the way to DRAM, that stall lasts hundreds of cycles.
During that time the core could have found the addresses of the next misses
and fetched them early. Out-of-order cores hide part of this latency with a
reorder buffer; a small embedded core has nothing of the kind.

*Runahead execution* fills the stall. The core:

1. takes a checkpoint of its architectural state;
2. pretends the missing value is "invalid" and keeps executing, so that the
   later loads become prefetches;
3. throws all those results away when the data comes back, restores the
   checkpoint and restarts at the instruction that stalled.

MERE ("Make Each Runahead Effective") fits runahead into a five-stage RV64
in-order core at low cost. This repository gives synthesizable
SystemVerilog for the MERE hardware that sits beside such a core. It makes
three main cost cuts:

- The register checkpoint is copied over several cycles instead of one.
- A 16-line runahead cache holds the stores made during runahead.
- The decision of how long to run ahead, and which prefetches to skip, is
  left to software, through five custom instructions.

The core itself (fetch, decode, ALUs, LSU), its L1 and L2 caches and DRAM
are not part of this RTL. The top module `mere_top` exposes them as ports,
grouped by pipeline stage.

## Block map

```
                      +------------------------------ mere_top -----------------------------+
 D$ MSHR miss msgs -->|  rcu: FSM + efficiency_detector + miss_tracker + step_counter      |
 L2 acquire, refill ->|        | cp_save/cp_restore    | release, inv_set   | intercept   |
 ID hazard, stall PC->|        v                       v                    v             |
                      |  mc_cp <--> gpr         scoreboard            gpr ll port gate     |
 GHR/RAS  <---------->|  (4 regs/cycle)         (release circuit)                          |
 EX operands/address->|  pmu: isu (GPR + ADDR invfiles) + runahead_cache + skip list      |
 MA instruction ----->|  mini_decoder (m.* instructions) --> step_counter, skip list       |
                      +-----------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `mere_pkg` | Widths, FSM state encoding, miss command and MERE instruction encodings |
| `rcu` | Runahead Control Unit: seven-state FSM, drives everything else |
| `efficiency_detector` | Is this miss indirect, and are more than two MSHRs idle? |
| `miss_tracker` | Trace of outstanding D-cache misses by MSHR tag (128 tags) |
| `step_counter` | Ends a runahead after a software-chosen number of prefetches |
| `mc_cp` | Multi-cycle checkpoint of the 32 GPRs; one-cycle copy of GHR and RAS |
| `gpr` | 32 x 64-bit register file with checkpoint ports and the write-back intercept |
| `scoreboard` | The core's load scoreboard, with the release circuit |
| `pmu` | Prefetch Management Unit: `isu`, `runahead_cache` and the skip list |
| `isu` | Invalid-Set Unit: tracks invalid registers and runahead-cache entries |
| `runahead_cache` | R$: 8 sets x 2 ways x 64-bit blocks, pseudo-LRU, flushed on exit |
| `mini_decoder` | Decodes and executes the five MERE instructions at the MA stage |

## One runahead, step by step

The times below are for the default parameters. All are checked by the
end-to-end testbench.

**Tracing (normal mode, FSM state Pseudo_Entry).** Every D-cache miss
message is written into the trace table under its MSHR tag. A message
carries the tag, address, command and destination register. The entry also
records two flags:

- whether the efficiency detector called the miss indirect;
- whether the L2 later reported a miss for the same tag (`l2acq_valid`).

**Entry (1 + 8 cycles).** The ID stage raises `hazard` with the register it
is waiting on (`hazard_rs`). The RCU looks up the live, non-speculative load
in the trace table whose destination is that register. It enters runahead
only if all of these hold:

- that load missed in L2;
- it was called indirect;
- at least three of the L2's eight MSHRs are idle.

In that cycle it latches `stall_pc` and pulses `cp_save`. The FSM then sits
in MERE_Enter for 8 cycles while `mc_cp` copies four registers per cycle.
GHR and RAS are copied in the first of those cycles. `hold` keeps the core
from issuing during the copy. Instructions older than the stalled one are
still in MA and WB during the first cycles of the copy, and they are real.
So a pipeline write-back during the save also updates the saved copy of
its register, even if that register was already copied. When the copy is done, two things happen to
the stall-load's destination register:

- its scoreboard bit is released, so the stalled instruction proceeds;
- it is marked invalid in the ISU.

**Running ahead (MERE_Execute).** Instructions execute and write back
normally. Their results are garbage that will be discarded.

- **Gain-loads.** A new load miss is a *gain-load*: the prefetch this mode
  exists for. It is traced as speculative and counts one StepCounter step.
  Its destination register is released and invalidated right away, so the
  core never waits for it.
- **ISU checks.** The ISU checks each EX-stage instruction against its
  invfiles (rules below). A load whose address depends on an invalid value
  is blocked at MA, so no wrong prefetch is sent, and its register is
  released.
- **Stores.** Stores never reach the D-cache. They are written into the
  runahead cache. A later runahead load that hits there gets its data from
  the R$ at MA.
- **Drain-time misses.** A miss from an instruction issued after runahead
  began is a gain-load, even when it appears in Pseudo_Exit or Normal_Exit
  while the pipeline drains. Only MERE_Enter misses, which come from older
  instructions, are treated as normal.
- **Normal refills.** A refill for a non-speculative miss (the stall-load
  among them) writes the GPR as usual. It also updates the saved checkpoint
  copy of that register, so the restore does not bring back a stale value.

**Leaving.** Two events end a useful runahead: the stall-load's data
returns, or the StepCounter reaches its limit. The FSM goes to MERE_Pass,
then:

- to **Pseudo_Exit** if gain-loads are still outstanding. It waits three
  cycles there for runahead instructions still in the pipeline to finish.
- straight to **Normal_Exit** otherwise.

In Normal_Exit the checkpoint is written back in 8 cycles, again under
`hold`. In the same cycles the runahead cache, both invfiles and the skip
list are flushed. If the stall-load's data is still outstanding (a
StepCounter exit), its scoreboard bit is set again. On the last restore
cycle `redirect_valid` asks the core to flush and fetch from `stall_pc`.
`front_restore` hands GHR and RAS back.

**Intercept.** Refills for gain-loads may arrive at any time after the
running states (MERE_Execute, MERE_Execute_Error, MERE_Pass) end: in
Pseudo_Exit, in Normal_Exit, after the return to normal mode, or even
during the next runahead's MERE_Enter. The intercept circuit stops them
from writing the register file or clearing a scoreboard bit. The line still
fills the cache: that was the point of the prefetch. There is one
exception. If normal execution asks for the same block while the gain-load
is still out, the D-cache merges the request into the same MSHR tag. The
new allocation then overwrites the trace entry as non-speculative, and the
refill is written normally.

## The runahead control FSM

| State | Does | Leaves to |
|---|---|---|
| Pseudo_Entry | normal execution, miss tracing | MERE_Enter on a qualifying stall |
| MERE_Enter | checkpoint save | MERE_Execute when the save is done |
| MERE_Execute | runahead | MERE_Execute_Error on an error; MERE_Pass on stall data or step hit |
| MERE_Execute_Error | one cycle | MERE_Pass |
| MERE_Pass | decides | Pseudo_Exit / Normal_Exit after an exit event; MERE_Execute to retry after an error |
| Pseudo_Exit | drain, intercept | Normal_Exit after 3 cycles |
| Normal_Exit | restore, flush, redirect | Pseudo_Entry when the restore is done |

A stall qualifies when the register the ID stage waits for belongs to a
traced load that also missed in the L2, the detector called that load
indirect, and at least three MSHRs are idle. A stall does not qualify if
that load's data arrives in the same cycle, because it ends by itself.

There are three errors:

- an *address conflict*: a miss is allocated on a tag that is still live;
- a *prefetch failure*: a refill comes back for a tag with no live entry;
- *resource exhaustion*: two or fewer MSHRs are idle.

After an error, MERE_Pass retries (back to MERE_Execute) up to three times
while MSHRs allow. On the fourth error, or if MSHRs are short, it ends the
runahead through Normal_Exit.

The state names and the error and retry conditions come from the original
description. The figure of the FSM itself was not available. The exact
transitions above, the three-cycle drain and the choice between Pseudo_Exit
and Normal_Exit (outstanding gain-loads) are this design's reading of the
text.

## Efficiency detector

A runahead only pays off when the miss is of a kind the D-cache stride
prefetcher cannot already cover. The detector keeps two values:

- the line address of the previous miss;
- the delta between the two misses before it.

A miss whose delta differs from that delta is called *indirect*. Until two
misses have been seen, every miss counts as indirect. The resource test is
`idle MSHRs >= 3`, which is "more than two". Only the two questions come
from the original work. The stride rule is this design's.

The original text does not say which cache's MSHRs are counted. It
describes the FSM as starting on "an L2 MSHR miss with sufficient
resources", so the count here is of the L2's eight MSHRs. With the L1's
four, the *idle <= 2* error would end every runahead after its first
prefetch.

## Miss trace table

The table has 128 entries, indexed by the 7-bit tag (0x00–0x7F). Each entry
holds:

- valid, speculative, L2-miss and indirect flags;
- the command (01 = load);
- the destination register;
- the address.

`Wptr` counts allocations and `Rptr` counts retirements, so
`Wptr - Rptr` is the number of live entries. Responses come back out of
order, so entries are found by tag, not by pointer. `spec_cnt` counts live
gain-loads; the exit decision uses it.

## Multi-cycle checkpoint

The copy takes `NREGS / REGS_PER_CYCLE` = 32 / 4 = 8 cycles, in each
direction. It goes through four extra read ports and four restore write
ports of the register file. A restore write has priority over both normal
write ports. The reasoning behind a multi-cycle copy: leaving runahead
flushes and refills the pipeline anyway, which takes a few cycles. So a few
cycles of copying cost little, and 2048 bits of single-cycle wiring are
saved.

GHR (8 bits here) and the return address stack (6 entries plus pointer)
are small and are copied in one cycle. `upd_valid` overwrites one saved
register. The top uses it for every non-speculative refill during runahead.
A second port, `wb_upd_*`, does the same for the pipeline write port while
the save is running. The refill port wins over it, and both win over the
copy.

## Invalid-Set Unit and blocking

The ISU works like a second scoreboard for *invalid* values, with two
invfiles:

- a GPR invfile, one bit per register;
- an ADDR invfile, one bit per R$ entry.

Its sources are the stall-load and every gain-load, through the RCU's
`inv_set`. For each EX-stage instruction it applies three rules:

1. **Propagation.** An invalid source register makes the destination
   invalid. A load or store whose base register is invalid is blocked, and
   the load's destination is released. So is a load to an address on the
   skip list.
2. **Reset.** A load with a valid address, or an instruction whose sources
   are all valid, clears its destination's bit. The exception is a load
   that hits an invalid R$ entry: its destination becomes invalid.
3. **Stores.** A store with a valid address clears the invalid bit of the
   R$ entry it writes. If its data register is invalid, it sets that bit
   instead.

`ma_block` reaches the MA stage one cycle after EX. The release leaves one
cycle after that, behind the two pipeline registers drawn in the original
PMU figure. In runahead every store is also blocked from the D-cache,
because its value lives in the R$.

## Runahead cache

A 32-bit address splits into `{tag[31:6], index[5:3], offset[2:0]}`. Each
line holds a tag and two 32-bit words, plus a valid bit for each word.

- **Look-up (combinational, at EX).** The tags of both ways are compared.
  A hit needs all of these:
  - a tag match;
  - every word the access touches written;
  - the entry's ADDR-invfile bit clear.
- **Data.** The block is shifted right by the byte offset. Sign or zero
  extension is left to the core's load formatter. The PMU registers hit and
  data into the MA stage.
- **Write.** A store writes into the matching way. On a miss it uses an
  empty way if there is one, otherwise the way the per-set pseudo-LRU bit
  points to.
- **Flush.** On exit every line and word becomes invalid.

The per-word valid bits and zero-filling a new line are choices of this
design. They mean a load never returns bytes that no runahead store wrote.

## MERE instructions

All five use the RISC-V custom-0 opcode `0001011` in R-type form. The
original work names them but gives no encoding.

| funct3 | Instruction | Effect |
|---|---|---|
| 000 | `m.check_mode rd` | rd = 1 in runahead, else 0 |
| 001 | `m.check_skip rd` | rd = address of the latest runahead prefetch |
| 010 | `m.skip_prefetch rs1` | put the 8-byte block of rs1 on the 4-entry skip list |
| 011 | `m.set_step rs1` | StepCounter limit = rs1[4:0] (0 disables) |
| 100 | `m.clear_step rs1` | StepCounter count = rs1[4:0], limit cleared |

The intended software is a small OS hook. A runahead thread reads
`m.check_mode`, sets a step budget learned offline, and compares
`m.check_skip` with a table of conflicting addresses. It skips those with
`m.skip_prefetch`, and calls `m.clear_step` after the runahead. That
software is not part of this RTL. The decoder executes at MA and returns
rd on `mere_wb_*`, which the core writes back like any result.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| XLEN, NREGS | 64, 32 | RV64 core |
| N_MSHR | 8 | L2 MSHRs of the evaluated system (see the efficiency detector) |
| MIN_IDLE | 3 | "more than two idle MSHRs" |
| MAX_RETRY | 3 | retry < 3 |
| STEP_W | 5 | StepCounter width printed in the overview figure |
| TAG_W | 7 | trace tags 0x00–0x7F printed in the RCU figure |
| R$ SETS x WAYS x block | 8 x 2 x 2 words | original work |
| WORD_W | 32 | assumed (so a block is one 64-bit line) |
| REGS_PER_CYCLE | 4 | assumed |
| GHR_W, RAS_DEPTH | 8, 6 | assumed |
| DRAIN_CYC | 3 | assumed |
| SKIP_ENTRIES | 4 | assumed |

## How far to trust it, and where it departs

- The MERE blocks are complete: the FSM, detector, trace table,
  StepCounter, checkpoint, release, ISU, R$, skip list, Mini-D and
  intercept. They are tested at their default sizes. The host core is
  not included, so the integration is tested only at the port level. The
  end-to-end testbenches play the core and the memory system. No real
  program has run on it; the nearest things are the gather and histogram
  loops below.
- **This design's own decisions, where the original is silent:**
  - the stride rule for "indirect";
  - one step per gain-load;
  - the encodings;
  - the drain length;
  - the choice between Pseudo_Exit and Normal_Exit;
  - what `m.check_skip` returns.
- **Additions the original does not describe.** All are needed to make
  the restore correct:
  - the checkpoint update on a non-speculative refill during runahead;
  - the checkpoint update on pipeline write-backs during the save;
  - treating drain-time misses as gain-loads;
  - keeping the runahead-cache flush high through all of Normal_Exit;
  - no entry when the stall load's data returns in the same cycle as the
    hazard;
  - re-marking the stall-load's register busy after a StepCounter exit.
- **Signals some tools flag as unused.** Some outputs of the trace table
  (Rptr/Wptr, response address) and of the StepCounter are not used inside
  the RCU. They are kept for observation and removed by synthesis. Some
  sub-module ports are pass-throughs by design, for example the decoded
  `rd` field and the zero upper bits of results.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends by printing `TB_RESULT checks=N failures=M`.

- `tb_mere_top` runs the whole design at its default parameters through
  three runaheads:
  - exit on stall data via Pseudo_Exit;
  - exit on the StepCounter;
  - an MSHR-shortage error.

  It counts every mechanism (entry, both releases, blocks, R$ hits, skips,
  intercepts, Pseudo_Exit, restores, errors, MERE instructions), and a
  mechanism that never occurs is a failure. It also checks three corner
  cases: a write-back during the save, a miss during Pseudo_Exit, and a
  normal request merged into a gain-load's MSHR. Afterwards, all 32
  registers must hold their architectural values.
- `tb_mere_gather` runs a synthesised irregular workload end to end: the
  loop `sum += data[idx[i]]` over 1200 random indices into D bytes, for
  D = 24 KB and D = 112 KB. The testbench plays an in-order core, a 4 KB
  4-way L1 with 4 MSHRs, a 64 KB 8-way L2 with 8 MSHRs, and 25/180-cycle
  latencies. Each size runs once with runahead kept off and once with it
  on. Every run must give the exact sum. With runahead on, the run must
  enter runahead, issue gain-loads, use the lines they fetched, and take
  no more cycles. It prints these cycle counts:

  | D | runahead off | runahead on |
  |---|---|---|
  | 24 KB | 92780 | 34508 |
  | 112 KB | 179105 | 52772 |

  At D = 112 KB it also sweeps the number of D-cache MSHRs. It checks that
  more MSHRs give fewer cycles, and that one MSHR gains under 1.2x: the
  stall load holds that MSHR, so nothing is left to prefetch into.

  | D-cache MSHRs | 1 | 2 | 4 | 8 |
  |---|---|---|---|---|
  | cycles, runahead on (off: 179105) | 171675 | 88925 | 52772 | 41304 |

  A second program, the key histogram of integer sort
  (`cnt[key[i]]++`), runs at D = 112 KB: 180305 cycles with runahead off
  and 54398 with it on. Every counter must end exact in both runs. This
  shows that runahead stores never reach memory. (Hits in the runahead
  cache are exercised by `tb_mere_top`; in this loop a key rarely repeats
  within one runahead.)

  These loops are pure latency-bound gathering, so they favour runahead far
  more than real applications do. Read the factor as a sign that the
  mechanism works, not as a performance claim.
- The block testbenches compare against reference models with random
  stimulus (`$urandom`), plus directed cycle-count checks. Examples: entry
  in 1 + 8 cycles, the 3-cycle drain, and redirect 8 cycles after
  Normal_Exit begins.

With Verilator 5, from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --top-module tb_mere_top -Irtl -Itb -y rtl -y tb \
          rtl/mere_pkg.sv tb/tb_mere_top.sv
./obj_dir/Vtb_mere_top
```

Replace `tb_mere_top` with any other testbench name to run a single block.
All runs finish in a few seconds.
