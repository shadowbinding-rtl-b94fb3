# Secure-speculation microarchitecture: STT-Rename, STT-Issue and NDA

Spectre-style attacks make a processor execute instructions down a path it
will later squash. On that path a load can read a secret, and a later
instruction can leak it through a timing channel. Two in-core defences stop
this without touching the caches or the software:

* **Speculative Taint Tracking (STT).** The result of a load that is still
  speculative is *tainted*. The taint spreads to every instruction that uses
  that result. A *transmitter* is an instruction whose execution can be
  observed and depends on its operands: a load address, a branch condition, a
  store address. A tainted transmitter may not execute until the load that
  tainted it has become non-speculative. Ordinary arithmetic runs freely.
* **Non-speculative Data Access (NDA, "permissive" variant).** A speculative
  load's value is not passed to any other instruction until the load is
  non-speculative. Its consumers are simply not woken up before then.

This RTL implements the hardware these schemes need inside an out-of-order
core, following the microarchitectures of the ShadowBinding study
(Kvalsvik and Själander). The core itself is not included. Its register
renaming, wakeup/select, load-store unit and reorder buffer are represented by
ports. Five pieces make up the design:

| module | role |
|---|---|
| `spec_tracker` | decides when each load stops being speculative; broadcasts those loads |
| `yrot_rename_chain`, `stt_rename_taint` | STT with taints computed at register rename ("STT-Rename") |
| `stt_issue_taint_unit` | STT with taints computed at instruction issue ("STT-Issue") |
| `iq_taint_mask` | taint field per issue-queue entry, masks the ready signal |
| `nda_load_broadcast` | NDA: register-file write and wakeup broadcast split apart |
| `shadowbinding_top` | all of the above around one shared tracker |

`sb_pkg` holds the shared types and helper functions.

## The youngest root of taint

STT does not keep a simple "tainted" bit. Each value records *which* load it
depends on. If it depends on several loads, it records the youngest of them,
because that one will be the last to become non-speculative. This is the
**youngest root of taint (YRoT)**. Here a YRoT is a `yrot_t`: a valid bit plus
the root load's load-queue index. An invalid YRoT means "untainted".

Two YRoTs are ordered by their distance from the load-queue head:
`(idx - head) mod LDQ_ENTRIES`. The "younger than" comparator is therefore one
subtraction and one compare (`sb_pkg::yrot_younger`, `yrot_max`).

A taint ends in one of two ways:

* **Broadcast.** Each cycle the tracker names the loads that just became
  non-speculative, on `MEM_WIDTH` lanes. Every taint store (rename RAT,
  issue-stage taint table, issue-queue fields) clears the entries rooted at a
  named load. Values read in that same cycle are filtered too
  (`yrot_filter`).
* **Life-span check.** After a misprediction, a stored YRoT may name a load
  that has since become non-speculative, or a load that was squashed. A root
  can only be live if it lies between the oldest speculative load (`ns_ptr`)
  and the youngest allocated load (`ldq_tail`). `yrot_live` checks that
  window.

## Knowing when a load is non-speculative: `spec_tracker`

Only two kinds of speculation are tracked:

* **Control shadows**: an older branch is still unresolved.
* **Data shadows**: an older store does not yet have its address. Until it
  does, the load might have read stale data and might be flushed.

Memory-consistency and exception shadows are not covered. With the two
tracked kinds, the design blocks Spectre v1 and Speculative Store Bypass.

Each load-queue entry keeps three things:

* a **branch mask**: the unresolved branches older than the load. A branch
  resolution clears its bit in every entry.
* a **store-dependence mask**: the store-queue entries that were older than
  the load and still had no address when it was allocated. A store's bit
  stops mattering once that store's address is generated, because the
  load-store unit checks it against younger loads at that point. The bit is
  cleared from every mask when the store commits, so the store-queue entry
  can be reused.
* an **error bit**: set when the load-store unit reports a forwarding error.
  Such a load never becomes non-speculative; it waits to be flushed.

Shadows resolve in program order, so non-speculative loads always form a
prefix of the load queue. The **visibility point** `ns_ptr` marks the end of
that prefix. Each cycle it moves past shadow-free loads, stopping at the first
load that still has a shadow. It passes at most `MEM_WIDTH` loads per cycle:
each load it passes needs a broadcast lane, and there are as many lanes as
memory ports. The loads passed in a cycle appear on `bcast_valid/bcast_idx`
in the next cycle. In that same cycle their `ld_nonspec` bits rise.

Latency: suppose a shadow resolves at the clock edge that ends cycle *t*.
The pointer moves at the edge that ends cycle *t+1*. The broadcast is visible
during cycle *t+2*. The testbench checks this two-cycle delay.

Flushes (`rollback_valid` with new tails) cut both queues back. A flush must
never remove a load that is already non-speculative; an assertion checks
this.

## STT-Rename: the same-cycle taint chain

With rename-stage tracking, each architectural register has a YRoT in a
*taint RAT*. Renaming a group of instructions resembles ordinary register
renaming, with one crucial difference. In register renaming, the new physical
register of every destination comes from the free list, independently of the
group. Same-group dependencies can be patched afterwards, without delaying the
RAT write.

A YRoT cannot be patched that way. The YRoT written for instruction *i*
depends on the YRoTs of its sources. These may have been produced one slot
earlier in the same group, and those in turn may come from the slot before.
The whole group's YRoTs must be settled in one cycle, because the next group
reads the RAT in the following cycle.

`yrot_rename_chain` is this logic, kept purely combinational so its depth is
visible:

```
for slot i (oldest first):
  s1 = RAT[rs1],  s2 = RAT[rs2]                          RAT read
  for each older slot j < i that writes rd_j:            one "=" per (j, source)
     if rd_j == rs1: s1 = dst_yrot[j]                    youngest writer wins
     if rd_j == rs2: s2 = dst_yrot[j]
  yrot[i]     = younger(s1, s2)                          one "<"
  dst_yrot[i] = is_load ? {1, own ldq index} : yrot[i]
```

Slot *i*'s mux inputs come from slot *i-1*'s comparator output. The critical
path therefore runs through one compare-and-mux stage per slot. It grows
linearly with the rename width. This chain is the main reason STT-Rename
loses clock frequency on wide cores.

`stt_rename_taint` wraps the chain:

* **RAT update.** The taint RAT is written in program order in the same
  cycle. Every loaded value counts as tainted by its own load. The life-span
  rules remove that taint once the load is non-speculative.
* **Broadcast clearing.** RAT entries are cleared by the broadcast.
* **Checkpoints.** STT can resolve a younger branch before an older one: a
  branch is a transmitter, so it waits for its operands to be untainted. The
  YRoT state therefore needs per-branch checkpoints, just like the RAT and
  free list. At rename, each branch saves the taint RAT as it stands after
  the instructions up to and including itself. On a misprediction
  (`restore_valid`, `restore_tag`), that copy is restored. A checkpoint can be
  stale, though: its roots may have become non-speculative since it was
  taken. So only entries that pass the life-span check are kept.
* **Full flush.** `flush_valid` applies the same check to the current RAT, so
  taints of squashed loads do not survive a flush after a forwarding error.

The checkpoints (`MAX_BR` copies of the whole taint RAT) are what make
STT-Rename the most expensive scheme in flip-flops.

The instruction YRoT (`ren_yrot`) travels with each transmitter to the issue
queue. There `iq_taint_mask` keeps the entry out of selection until its root
is broadcast.

## STT-Issue: taint at issue, no chain

`stt_issue_taint_unit` defers tainting until an instruction has been woken up
and selected. Wakeup and select are not changed. Instructions issued in the
same cycle can never depend on one another, so there is no chain. Each of the
`ISSUE_WIDTH` slots does one independent table lookup and one compare. For
each selected micro-op:

1. Read the taints of the physical source registers it uses. The micro-op's
   YRoT is the younger of the two.
2. Write the destination entry. A load writes itself as the root. Any other
   micro-op writes its YRoT. An untainted result clears the entry, so stale
   taint from the register's previous owner is overwritten.
3. If the micro-op is a transmitter and its YRoT is valid, the unit drops
   `exec_valid`. The issue slot is wasted on a no-operation. The YRoT is
   *back-propagated* (`bp_*`) to the micro-op's issue-queue entry, where
   `iq_taint_mask` masks its ready signal. The broadcast of the root unmasks
   the entry, and the micro-op is selected again. This is a replay.

No checkpoints are needed. After a misprediction, a physical register is
always rewritten by its next producer before any consumer reads it.

A store that issues only its address half presents only the address operand
(`rs1_used`/`rs2_used`). A tainted data operand then does not hold back the
address. Issuing the address early matters: it lets forwarding checks for
younger loads finish sooner.

Cost: the taint table has one entry per *physical* register (128 here), not
per architectural register (32).

## NDA: splitting data write from wakeup

A conventional load-store unit completes a load with a single event. It
writes the register file and broadcasts the destination register as ready,
both on a shared bus. Under NDA, the write may happen at once but the
broadcast must wait until the load is non-speculative. The two events
therefore name different registers in the same cycle.

`nda_load_broadcast` has `MEM_WIDTH` data-write lanes (`wb_*`, always equal
to the completions) and `MEM_WIDTH` separate broadcast lanes (`bc_*`).

* A speculative load's destination is parked in a table indexed by
  load-queue entry.
* Each cycle, the broadcast lanes go first to completions of loads that are
  already non-speculative, in port order. A load with no shadow therefore
  wakes its consumers with no added delay.
* Any lanes left over take parked loads that have become non-speculative,
  oldest first.
* A candidate that finds no free lane is parked and retried.
* Parked entries of squashed loads are dropped.

There is no speculative wakeup on a predicted cache hit. Consumers are woken
only by `bc_*`. NDA could hardly use such a wakeup anyway, and leaving it out
simplifies the scheduler.

The delay depends only on whether the load is speculative, never on the
loaded data. It therefore adds no data-dependent behaviour of its own.

## Putting it together: `shadowbinding_top`

The top instantiates the tracker once and connects all three schemes to it.
A real core would use one scheme's group of ports. Having all three lets one
instruction stream be compared across them.

* **Dispatch/rename group (`grp_*`).** This one group allocates load- and
  store-queue entries and is renamed by STT-Rename in the same cycle, so each
  renamed load already knows its load-queue index.
* **STT-Rename issue queue.** Transmitters dispatched with a valid YRoT set
  their entry's taint field in the STT-Rename issue queue (`u_rename_iq`).
  Its ready vector is `rq_ready_in`/`rq_ready_out`.
* **STT-Issue issue queue.** STT-Issue's back-propagation feeds a second
  taint field array (`u_issue_iq`), with ports `iq_ready_in`/`iq_ready_out`.
* **Mispredictions and flushes.** `mispredict_*` restores the STT-Rename
  checkpoint and cuts the queues back to `rollback_*`. `flush_valid` is a
  flush after a forwarding error. In both cases, the life-span check uses the
  cut-back tail.
* **NDA.** The NDA unit reads the tracker's `ld_nonspec` and `ldq_valid`
  vectors.

### Parameters

Defaults describe the largest core of the study's evaluation: a 4-wide
out-of-order RISC-V core with 2 memory ports and a 128-entry ROB. The ROB
size does not size anything here.

| parameter | default | origin |
|---|---|---|
| `CORE_WIDTH` | 4 | study's largest configuration |
| `MEM_WIDTH` | 2 | study's largest configuration |
| `ISSUE_WIDTH` | 4 | typical integer issue width of such a core (assumed) |
| `NUM_AREGS` | 32 | RISC-V |
| `NUM_PREGS` | 128 | assumed, typical for that core |
| `IQ_ENTRIES` | 40 | assumed, typical integer issue queue |
| `MAX_BR` | 20 | assumed, in-flight branch tags |
| `STQ_ENTRIES` | 32 | assumed |
| `sb_pkg::LDQ_ENTRIES` | 32 | assumed; a package constant, because `yrot_t` depends on it |
| `XLEN` | 64 | RV64 |

The study also evaluates 1-, 2- and 3-wide cores with one memory port. Set
`CORE_WIDTH` and `MEM_WIDTH` accordingly; narrower groups also run on the
default build with the upper slots idle.

### Timing summary

| path | behaviour |
|---|---|
| rename YRoT | combinational from `grp_*`; the RAT updates at the clock edge |
| issue YRoT, nop, back-propagation | combinational from `iss_*`; the table updates at the edge |
| issue-queue mask | combinational; the broadcast of the current cycle already unmasks |
| NDA write / broadcast | combinational from the completion inputs |
| shadow resolved → broadcast | 2 cycles (see `spec_tracker`) |

All state has a synchronous, active-low reset (`rst_n`).

## Where this RTL departs from, or adds to, the published design

The original designs were changes to a specific core. These modules are
stand-alone equivalents, so several details are this design's own choices:

* **YRoT encoding and ordering.** A load-queue index, ordered by distance
  from the load-queue head.
* **Shadow bookkeeping.** Branch masks and store-dependence masks per load.
  The source only requires that a load's exposure to branch squashes and
  forwarding errors be known. The data-shadow check is taken to be done when
  the store address is generated. That is the earliest point at which the
  check can be made; checking at store commit would also be possible.
* **NDA write timing.** One passage of the source says speculative loads
  delay both their writeback and their broadcast. The microarchitecture
  description says the data is written and only the broadcast is delayed.
  This RTL follows the latter.
* **Extra clearing rules.** RAT entries are cleared by the broadcast in
  addition to the life-span check on restore. The full-flush clean-up of the
  taint RAT is an addition.
* **NDA arbitration.** The order among broadcast candidates (direct
  completions first, then oldest parked) is assumed.
* **Taint on a nop.** STT-Issue writes the destination taint even when the
  micro-op is turned into a nop. An untainted micro-op clears the entry.
* **Sizes.** Everything except the width and the number of memory ports is
  assumed (see the parameter table).
* **Integration.** Having all three schemes side by side in one top is only
  for comparison.

Not included: the core itself, M- and E-shadow tracking, and the optional
two-taints-per-store variant of STT-Rename, which is suggested in the source
but not designed there.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_yrot_rename_chain` | 3000 random groups against a model that renames one instruction at a time, with no bypass logic |
| `tb_stt_rename_taint` | random groups, broadcasts, checkpoints, restores and flushes against a model of the taint RAT |
| `tb_stt_issue_taint_unit` | random issue groups against a taint-table model: YRoT, nop decision, back-propagated slot and YRoT |
| `tb_iq_taint_mask` | random sets, frees and broadcasts; the masked ready vector every cycle |
| `tb_nda_load_broadcast` | data written at once; no speculative broadcast; immediate broadcast when possible; at most `MEM_WIDTH` per cycle; every load broadcast exactly once |
| `tb_spec_tracker` | directed: data shadow and its two-cycle latency, in-order control shadow, two loads per cycle, forwarding error, flush, misprediction, commit |
| `tb_shadowbinding_top` | one instruction sequence through all schemes at the default size; counts 14 mechanisms and fails if any never happens |
| `tb_shadowbinding_configs` | random instruction streams, with correct and mispredicted branches and forwarding-error flushes, through the top at 1-, 2-, 3- and 4-wide dispatch (one memory lane, or two for the 4-wide core). A small core model in `sb_cfg_run` keeps its own view of which loads are still speculative. Checked: a value with a speculative root has exactly that YRoT at rename; a transmitter with a speculative root never executes; a wakeup never names a speculative load; no load is reported safe too early; no taint or unwoken load remains after the drain |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sb_pkg.sv tb/tb_shadowbinding_top.sv --top-module tb_shadowbinding_top
./obj_dir/Vtb_shadowbinding_top
```

Assertions cover a few interface rules:

* the visibility point stays between the head and the tail, and a flush does
  not cut into the non-speculative prefix;
* micro-ops issued together write distinct destination registers;
* NDA completions name valid load-queue entries.

Confidence and limits: every block is checked against an independent model
or against hand-computed values. End to end, the top runs one hand-written
sequence at full size, plus random streams at four core widths that include
mispredictions and forwarding-error flushes. The random streams issue in
program order, so out-of-order issue is covered only by the block tests. The blocks have not been run inside a core, and no
timing or area numbers come with this RTL.
