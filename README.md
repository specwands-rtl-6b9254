# SpecWands issue stage: priority scheduling against speculative contention channels

On a two-thread (SMT) out-of-order core, both hardware threads share the
issue ports and the execution units behind them. A long-latency unpipelined
unit, such as an integer divider, makes the sharing visible. If a speculative
divide of one thread holds the divider, a divide of the other thread waits
longer. That delay can carry a secret that the speculative path read. The
same effect works inside one thread: a younger speculative op can delay an
older op that the attacker later times.

This RTL implements a scheduler that removes such channels while still
letting speculative work run. It gives every op a speculation status and
applies three priority rules at every issue port:

| Rule | Who wins | Preemptive? |
|------|----------|-------------|
| **NOP**: non-speculative op first | A non-speculative op beats a speculative op of the other thread | Yes. A speculative occupant of the other thread is killed and re-issued later |
| **LOP**: last owner first | Between speculative ops of different threads, the thread that last won the port with a non-speculative op keeps it | No. A speculative op of the non-owner waits, even if the port is free |
| **EOP**: earlier op first | Within one thread, the earlier op wins | Yes. A later occupant of the same thread is killed |

Together these rules make port allocation between the threads depend only on
non-speculative ops. A thread can take a port away from the other thread
only with an op that is certain to commit. Within a thread, a younger
(sender) op can never delay an older (receiver) op.

## What "non-speculative" means: two modes

`mode_all` selects one of two definitions at run time:

* **Spectre mode** (`mode_all = 0`). An op is non-speculative once every
  older branch of its thread has resolved correctly. Its *speculative
  degree* is the number of older branches still unresolved. EOP compares
  degrees, and the smaller degree is earlier. Ops in the same basic block
  share a degree, so they never preempt each other.
* **All mode** (`mode_all = 1`). Only the op at the head of its thread's
  ROB is non-speculative. EOP compares program order, using the 7-bit
  sequence number (SEQ) with wrap-around. This design carries the SEQ in
  the degree field of the tag in this mode, so the select logic stays the
  same.

## Block diagram

```
 fe_* (per thread) ──► sw_rob (per thread) ──► sw_ssc (per thread)
                         │ SEQ, Branch/Resolve flags     │ Spec_Flag, Spec_Degree per ROB entry
                         ▼                               ▼
                  sw_rs: 64 entries, 32 per thread, tags copied every cycle
                         │  one sw_select per port (NOP/LOP/EOP)
                         ▼
       8 x sw_issue_port (control register + Victim_Slot) ──► sw_exec_unit
                         ▲  reinsert on preemption             │ result[p]
                         └─────────────────────────────────────┘
```

| File | Contents |
|------|----------|
| `rtl/sw_pkg.sv` | Types, sizes and the policy decision function `policy_check` (the per-candidate issue decision in one function) |
| `rtl/sw_rob.sv` | ROB status of one thread: allocation, SEQ, branch/resolve/done flags, in-order retirement, squash request |
| `rtl/sw_ssc.sv` | Speculative Status Checker of one thread |
| `rtl/sw_select.sv` | Select logic of one port |
| `rtl/sw_rs.sv` | Reservation station with one `sw_select` per port |
| `rtl/sw_issue_port.sv` | Port control register, Victim_Slot, kill, re-insertion |
| `rtl/sw_exec_unit.sv` | One-cycle ALU and a killable radix-8 divider |
| `rtl/specwands_core.sv` | Top level |

## Speculative Status Checker (`sw_ssc`)

This is the most subtle part of the design.

A straightforward checker would walk the whole ROB from the head every
cycle. It would mark entries non-speculative up to the first unresolved
branch, then count unresolved branches for the entries after it. That is
46 entries per thread per cycle. Instead, the checker scans only
`SCAN_W = 8` entries per cycle, which equals the issue width. It keeps three
8-bit registers between cycles:

* `Last_Pos`: how far the scan has got.
* `Last_NS`: the position just past the last entry found non-speculative.
* `Spec_Degree_Counter`: unresolved branches seen so far.

All three are stored as offsets from the ROB head. When the head retires,
each offset drops by one, saturating at zero. Offsets make the registers
independent of where the circular buffer currently starts.

Each cycle the checker does one of these:

* **Scan.** Entries `Last_Pos .. Last_Pos+7` (up to `count`) get the tag
  `{counter == 0, counter}`. After an entry is tagged, the counter goes up
  if that entry is an unresolved branch.
* **A branch resolved correctly** (`spec_update` from the ROB). The scan
  restarts at `Last_NS` with the counter at zero. Nothing before `Last_NS`
  can change, because those entries are already non-speculative.
* **Squash.** The ROB drops every entry younger than the mispredicted
  branch. If the scan had passed the branch, `Last_Pos` moves to just after
  it. `Last_NS` and the counter are rebuilt from the branch's own tag (flag
  and degree). If a correct resolution happens in the same cycle, the
  restart at `Last_NS` applies on top.
* **Allocation.** A new entry is tagged `{speculative, 127}`. Entries the
  scan has not reached yet keep that conservative tag.

The reservation station copies these tags one cycle late. For the cycle
in which an op enters the station, before any copy exists, it uses the same
placeholder `{speculative, 127}` in Spectre mode. In All mode it uses the
op's own SEQ instead, because 127 would be read as a sequence number there.

A stale tag is therefore always *more* speculative than the truth, never
less. Stale tags also stay ordered: the scan runs in program order, so an
unscanned op is always younger than every scanned op. That ordering
matters for security. If a stale older op looked later than a younger one,
EOP would let the younger op delay it, which is exactly the intra-thread
channel. A stale tag can delay an op, but it can never let one pass as non-speculative
too early. The testbench checks this safety rule every cycle. It also checks
that all tags are exact after a quiet period of `ceil(46/8) = 6` cycles.

The 7-bit Spec_Degree saturates at 127. With 46 entries per thread it cannot
overflow.

## Issue ports: control register and Victim_Slot (`sw_issue_port`)

Each port keeps:

* `Free_Flag`: 1 = free in this design.
* `Owner_TID`: the thread of the current or last occupant. It is kept after
  the port frees, because LOP needs the last owner.
* `Owner_Spec_Flag`: whether the occupant is non-speculative. It reads 0 while
  the port is free.
* `Owner_Spec_Degree`: the occupant's degree, refreshed every cycle from the
  checker while the occupant runs.

An op that issues is copied into the port's Victim_Slot.

The port frees in the cycle its unit returns the result, so a new op can
issue in that cycle. A pipelined op holds the port only for its issue cycle.

On a preemption, in a single cycle:

1. The port raises `kill` to its divider.
2. The Victim_Slot content goes back to the reservation station
   (`reinsert_*`).
3. The winning op starts in the unit and replaces the old op in the slot.

If the occupant is squashed, the port kills it without re-inserting it.

## Select logic and reservation station (`sw_select`, `sw_rs`)

The station holds 64 entries, split 32 per thread. Each entry holds:

* the op, carrying its operand values, its port number and its ROB
  index/SEQ;
* one source dependence, named by the producer's ROB index and SEQ;
* the speculation tag.

An entry is ready when its producer has completed or has left the ROB. The
SEQ check detects when a ROB entry has been reused.

For every port, the select logic evaluates `policy_check` for every ready
entry of that port in parallel. From the allowed entries it prefers:

1. non-speculative entries;
2. then, within one thread, the earlier entry by EOP;
3. then the lowest index.

The decision for one candidate, given the port register, is:

| Candidate vs. port | Result |
|--------------------|--------|
| Same thread as owner, port free | Issue |
| Same thread as owner, port busy, candidate earlier (EOP) | Issue and preempt |
| Other thread, candidate non-speculative, port free | Issue (owner switches) |
| Other thread, candidate non-speculative, occupant speculative | Issue and preempt (NOP) |
| Other thread, candidate speculative | Wait (LOP) |
| Anything else | Wait |

A preempted op must always find a free entry in its thread's partition. To
guarantee that, dispatch into a partition is allowed only while its free
entries outnumber that thread's ops sitting in Victim_Slots.

## Squash and retirement (`sw_rob`)

Branches resolve when they complete. If several branches of one thread
complete in a cycle and some of them are mispredicted, the oldest
mispredicted one squashes its thread. In that same cycle:

* the ROB drops the younger entries;
* the checker recovers as described above;
* the reservation station drops the younger entries and does not offer them
  to the select logic;
* any port running a younger op of that thread kills it.

Sequence numbers restart right after the branch. The ROB retires one
completed op per thread per cycle, in order.

## Top level (`specwands_core`)

| Port | Meaning |
|------|---------|
| `mode_all` | 0 = Spectre mode, 1 = All mode |
| `fe_valid/fe_op/fe_ready[t]` | One op per thread per cycle: `uop`, `port`, `mispredict` (branch outcome supplied by the front end), `dep_dist` (distance back to the producer, 0 = none), `op1/op2` |
| `fe_seq[t]` | SEQ given to the accepted op |
| `result[p]` | Completion of port `p` |
| `retire_valid/retire_seq[t]` | Retirement |
| `squash_valid/squash_seq[t]` | Squash; the front end should redirect |
| `port_ctrl[p]` | Port control registers |
| `ev_*[p]` | One-cycle event pulses: issue, NOP preemption, EOP preemption, LOP block, owner switch, re-insertion, squash kill |
| `ssc_*[t]`, `rs_occupancy[t]` | Checker registers and RS occupancy |

Timing:

* An op accepted in cycle *n* can issue in cycle *n+1*. Its tag is copied
  into the station at the *n → n+1* edge.
* ALU results appear one cycle after issue.
* Divide and remainder results appear 12 cycles after issue (11 radix-8
  iterations).

Reset is asynchronous and active low.

Default sizes, following the reference configuration:

* 2 threads;
* 8 issue ports;
* 64-entry reservation station (32 per thread);
* 92-entry ROB (46 per thread);
* 7-bit Spec_Degree and 8-bit checker registers;
* scan width 8.

Synthesis of the top at these sizes gives about 54k word-level cells and
11.6k flip-flops.

## Where this design departs from, or adds to, the source

* **Front end and memory side.** Only the issue stage is built. Fetch,
  decode, rename, branch prediction, the register file, caches and the
  load/store unit are outside it. Operand values travel with the op, and a
  register dependence only delays issue.
* **Port contents.** Every port has the same unit: a one-cycle ALU plus an
  unpipelined divider. The reference core groups different units per port,
  Skylake-style. Here the front end chooses the port of each op.
* **Free port with another thread's speculative op.** One step of the
  published issue workflow would let such an op issue. This design follows
  the LOP rule instead: the op waits until it is non-speculative.
* **Readiness of `Free_Flag` fields.** The published text says the owner
  fields are valid only while the port is busy. LOP needs the last owner
  after release, so `Owner_TID` is kept.
* **Own choices.** These are not specified by the source:
  * the conservative tag for unscanned entries;
  * the head-relative checker registers;
  * the select tie-break;
  * the dispatch reservation for Victim_Slot ops;
  * one dispatch and one retirement per thread per cycle;
  * the radix-8 divider;
  * carrying SEQ in the degree field in All mode.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_sw_select` | The policy table against a reference function: directed NOP/LOP/EOP cases and 4000 random vectors |
| `tb_sw_exec_unit` | ALU and divider against `/` and `%`; 1- and 12-cycle latency; kill with and without a new start |
| `tb_sw_issue_port` | Issue, tag refresh, NOP preemption with re-insertion, release keeping `Owner_TID`, squash kill, pipelined release |
| `tb_sw_rob` | Queue model with random completion, mispredict squash, SEQ reuse and full ROB |
| `tb_sw_ssc` | Per-cycle safety rule, exact convergence, scan rate of 8 entries per cycle, squash recovery, All mode |
| `tb_sw_rs` | Dependence wait, LOP hold and release, NOP request, re-insertion, squash drop, partition limit and Victim_Slot reservation, EOP order, two ports in one cycle |
| `tb_specwands_core` | End to end at full size. Two random instruction streams run in Spectre mode, then All mode |

For `tb_specwands_core`, every result is checked for data and flags, every
squash and retirement is checked against a model, and every owner switch
must go to a non-speculative op. It also fails if any of these never
happens: issue, NOP preemption, EOP preemption, LOP block, owner switch,
re-insertion, squash kill, squash, or retirement in either mode.

`tb_poc_contention` runs the contention core of the two proof-of-concept
attacks at full size, in both modes:

* **Inter-thread.** A speculative sender divide on the wrong path of a slow,
  mispredicted branch in thread 0. A chain of receiver divides in thread 1
  on the same port, started 0 to 15 cycles later.
* **Intra-thread.** A receiver divide waiting on a slow producer. Sender
  divides after a mispredicted branch, younger in program order.

Every case is run from reset with and without the sender. The receiver's
completion cycle must be identical. With the sender present, the receiver
really has to preempt it: NOP preemptions in the inter-thread kernel, EOP
preemptions in the intra-thread kernel. An unprotected first-come,
first-served port would delay the receiver by up to one divide (12
cycles).

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/sw_pkg.sv rtl/*.sv tb/tb_specwands_core.sv \
          --top-module tb_specwands_core
./obj_dir/Vtb_specwands_core +verilator+rand+reset+2
```

The full-size end-to-end run simulates about 30,000 cycles in under a
second.
