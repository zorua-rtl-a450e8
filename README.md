# Zorua resource virtualization for one GPU SM

A GPU kernel states its resource needs up front: registers per thread, scratchpad bytes per
block, threads per block. The hardware then gives every warp that worst-case amount for the
warp's whole life. It does this even though most phases of a kernel need far less. If a needed
amount is a little too large, a whole block no longer fits, and occupancy drops sharply. Code
tuned for one GPU generation then runs badly on the next.

This RTL removes that static link. Each of the three on-chip resources is handled the same way:

* **warp slots** (the PC and SIMT stack of a warp),
* **registers**,
* **scratchpad memory**.

A warp, or a block for scratchpad, names the resource by a *logical* number in a **virtual
space**. That virtual space is larger than the chip. A per-resource **mapping table** decides
whether each logical unit lives in the **physical** array or in a **swap space** in global
memory. A **coordinator** hands out physical resources phase by phase, not kernel by kernel.
The compiler marks where each phase starts with a **phase specifier** instruction, which states
how many registers and how much scratchpad the warp needs from that point on.

Sometimes the coordinator places a resource in swap space instead of making a warp wait. This is
**oversubscription**. An **oversubscription threshold** bounds how much of it is allowed. A small
controller retunes that threshold every epoch, using two measures: how long the cores sat idle,
and how long memory sat idle.

The hardware here is the part added to one SM. The SM itself is not included: the warp
scheduler, pipelines, register file, scratchpad SRAM and the memory system stay as they are.
This block tells the SM three things:

* which warps may be scheduled;
* where each register or scratchpad byte actually lives, as a physical row, a physical address,
  or a global-memory address in the swap space;
* when to ask the block scheduler for another thread block.

## Resource sets: the unit of everything

All allocation is done in fixed *sets*. A table row is one set; counters count sets.

| resource | set | per owner | physical sets (default) | table index | entry |
|---|---|---|---|---|---|
| registers | 4 registers per thread × 32 threads = 128 registers | warp: up to 16 sets (64 regs/thread) | 32768 / 128 = 256 | warp ID (64) × logical set (16) | valid + 8-bit set |
| scratchpad | 1 KB | thread block: up to 48 sets | 48 KB / 1 KB = 48 | block ID (16) × logical set (48) | valid + 6-bit set |
| warp slots | one warp's slot | warp: 1 | 48 | logical warp (64) | valid + 6-bit slot |

The defaults describe a Fermi-class SM: 48 warps, 32768 registers, 48 KB scratchpad, 32 threads
per warp. The virtual space has 64 logical warps and 16 logical blocks. All of these are constants
in `zorua_pkg`. To model a 64-warp, 65536-register SM, change `N_PWARP_SLOTS` and `N_REGS` there.
Every width follows from those constants.

Each table keeps two counters: the number of **free physical sets** and the number of sets now
**oversubscribed** to swap space. The coordinator's decisions read only these counters.

## Phase specifiers

A phase specifier is a 26-bit instruction:

```
 25          16 15      10 9             0
 | opcode (10) | live regs | live scratch |
```

* The opcode is `PS_OPCODE`, 10'h3A5. Nothing fixes that value; change it freely.
* `live regs` is registers per thread. It becomes `ceil(regs/4)` register sets.
* `live scratch` counts **64-byte units**, so the field reaches 65472 B. It becomes
  `ceil(units/16)` scratchpad sets, saturated at 48.

With a byte count, a 10-bit field would stop at 1023 B. That is too small for real kernels: an
N-Queens-like kernel needs about 4 KB in one phase and up to 47 KB per block. The width shown for
the field is kept, and its unit is scaled instead.

`phase_spec_decoder` is combinational. `zorua_sm` has two of them:

* one on the block-dispatch port, whose `blk_spec` carries each block's first phase;
* one on the phase-change port.

Barriers and fences carry no specifier. They arrive on the phase-change port with
`ph_barrier = 1`. A raw phase-change instruction that is not a specifier, and is not a barrier,
is ignored.

## The coordinator

This is the part that takes the most care to follow.

### Queues as warp states

Every logical warp is in one of these states:

| state | meaning |
|---|---|
| `W_FREE` | no warp |
| `W_TQ` | waiting in the thread/barrier queue |
| `W_SQ` | waiting in the scratchpad queue |
| `W_RQ` | waiting in the register queue |
| `W_SCHED` | holds everything for its current phase |
| `W_BAR` | waiting at a barrier for the rest of its block |

A warp must pass three checks in order: warp slot, then its block's scratchpad, then its
registers. Nothing is acquired until all three checks pass. A warp that fails a check stays in
the queue of the resource it lacks.

The three queues are not FIFOs. Each is the set of warps in that state, walked in warp-ID order.
That lets every waiting warp be examined, not only the head of the queue.

The check for *n* sets of a resource is

```
fits  =  n <= free                         // fits on chip
      || ovs + (n - free) <= o_thresh       // or: swap space stays under the threshold
      || force_grant                        // or: deadlock guard
```

Here `force_grant` is true while fewer than `MIN_SCHED` warps are schedulable. `MIN_SCHED` is
10, which is 20 % of 48 slots, rounded up. This guard stops a kernel that asks for more than the
SM holds from stalling forever. An example is a 32-warp block of 44 registers per thread, which
needs 352 register sets against the 256 on chip. The guard simply lets resources overflow to swap
space.

### Events

The coordinator handles one event at a time, in this priority order:

1. **Warp end**:
   * release the warp's registers and slot;
   * if it was the last warp of its block, release the block's scratchpad and block ID.
2. **Phase change**:
   * **barrier**: the warp gives up its warp slot and waits in `W_BAR`. When the last warp of
     the block arrives, every warp of the block goes back to `W_TQ`.
   * **phase specifier**: registers above the new need are released at once. The warp goes to
     the register queue if it now needs more. Scratchpad is owned by the block, so it is only
     ever grown: the block's need is the largest need any of its warps has stated. It is
     released only when the block ends.
3. **New block**: when a block ID and a logical warp are free, `blk_req` is raised. A block is
   accepted only if the logical warps for all of it are free. Its warps enter `W_TQ` with the
   phase needs from `blk_spec`.

### After each event

After each event the coordinator rescans all three queues:

* the register queue first, so warps that already hold most of what they need are served first;
* then the scratchpad queue;
* then the thread/barrier queue.

Each warp that passes all three checks is granted. Its resources are then allocated through the
mapping tables, one table operation at a time, and it becomes `W_SCHED`.

Last comes a **swap-in pass**. A warp can hold a slot that lives in swap space, because it was
granted by oversubscription or by the guard. Such a warp is active but not schedulable: it needs
a physical slot to issue. So whenever physical slots are free, swapped warp slots are released
and allocated again. Allocation takes a free physical slot first, so this moves them back on chip.

`schedulable[w]` is set only for a warp that is `W_SCHED` and whose slot is physical.

### Timing

Every step of a scan costs one clock cycle, so one event takes about 200 cycles with 64 warps.
Each table operation adds one cycle per set, plus one. Events come through valid/ready
handshakes: `blk_valid/blk_ready`, `ph_valid/ph_ready` and `end_valid/end_ready`. The
pipeline must hold a warp's phase-change event until it is accepted. The warp is no longer
schedulable from the cycle its phase change is accepted.

## Mapping tables

`mapping_table` is the common core. The three wrappers add address translation on top of it:
`reg_mapping_table`, `scratch_mapping_table` and `thread_mapping_table`.

**Operations.**

* **ALLOC of *n*** appends *n* logical sets to an owner, one per cycle. Each set takes the
  lowest-numbered free physical set. If none is free, a resident set is **spilled** (below).
* **RELEASE to *n*** frees the owner's sets from the top, down to *n*.
* `op_done` pulses one cycle after the last set.

**Spilling.** Every physical set has a 4-bit saturating access counter:

* every lookup served on chip increments it;
* it restarts at 1 when the set is allocated.

When an allocation finds the pool empty, the table searches all physical sets for the smallest
count, taking the lowest number among equals. This search takes one cycle per set, so 256 cycles
for registers. The victim's owner entry becomes a swap entry, and its physical set passes to the
new logical set.

For one cycle, `spill_valid` then reports where the victim's data must be stored: its register
rows or scratchpad address, and its swap-space address. The store itself is the SM's job.

In both cases the oversubscribed counter grows by one, so the coordinator's accounting does not
care which set went off chip.

The warp-slot table does not spill (`SPILL_LFU = 0`). Evicting the slot of a running warp would
mean saving its PC and SIMT stack on the spot. Instead, a warp granted beyond the physical slots
gets a swap slot itself and waits.

**Lookups** have a fixed latency of **two cycles**: a lookup presented in cycle *t* answers in
cycle *t*+2. One lookup can start every cycle. A lookup of a set the owner does not hold returns
`rsp_fault`.

| wrapper | on chip | in swap space |
|---|---|---|
| register | row `set*4 + reg%4` | `base + ((warp*16 + set)*4 + reg%4) * 128` |
| scratchpad | address `set*1024 + offset` | `base + (block*48 + set)*1024 + offset` |
| warp slot | slot number | `base + warp*512` (room for the warp's PC and SIMT stack) |

The entry arrays are plain memories with one write port and are not reset. The counters and
per-owner set counts are reset.

## Oversubscription threshold

`oversub_threshold` runs once per resource; the three instances share the SM's statistics.
During each 2048-cycle epoch it counts:

* `c_idle`: cycles in which the core could issue nothing;
* `c_mem`: cycles in which the memory system was idle.

At the last cycle of the epoch it compares the changes from the previous epoch:

* if `c_idle` rose by more than 16 while `c_mem` rose, or fell by more than 16 while `c_mem`
  fell, then oversubscription is hurting, and `o_thresh` drops by one step;
* if `c_idle` rose by more than 16 while `c_mem` fell, or fell by more than 16 while `c_mem`
  rose, then memory has headroom, and `o_thresh` rises by one step.

The start value and the step are 10 % and 4 % of the resource, rounded down and at least 1:

| resource | start value | step |
|---|---|---|
| registers | 25 sets | 10 sets |
| warp slots | 4 | 1 |
| scratchpad | 4 | 1 |

`o_thresh` is clamped to 0…total.

## Where this departs from the published design, and what is missing

* **Least-frequently-used spill, simplified.** The published design names the policy but not
  the mechanism. The following are this design's choice:
  * 4-bit counters with no ageing;
  * a new set restarts at 1;
  * a serial victim search;
  * warp slots are excluded.

  A freshly allocated set has a low count. So when nothing has been accessed yet, the next
  spill can take it straight back.
* **No data movement.** The block reports spills and produces swap-space addresses. Copying
  registers, scratchpad bytes, PC and SIMT stack to and from memory is left to the SM's
  load/store path. A lookup already in flight when its set is spilled returns the old mapping,
  so the SM must order the spill store against it. The swap-in pass moves a swapped *warp slot*
  back on chip. Spilled registers and scratchpad are not brought back when space frees up; they
  stay in swap space until released.
* **Register swap addresses use the warp ID**, the index of the register table, not the block ID.
* **The barrier policy is an interpretation**: a barrier releases the warp slot, and the whole
  block re-queues together.
* **The waiting queue is an interpretation**: a warp waits in the queue of the first resource
  it lacks, rather than always going back to the first queue.
* **Scan throughput**: roughly 200 cycles per event. That is enough for the coarse phase
  changes of real kernels, but a hardware version for fast phase changes would keep real FIFOs.
* **These choices have no published value**, and all are parameters or package constants:
  * the scratchpad field unit;
  * the opcode value;
  * the 40-bit swap addresses;
  * the 512 B of saved warp state;
  * the reset behaviour;
  * the handshakes.

## Simulating

Every file compiles with plain Verilator 5; the package goes first. For example, the whole SM:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/zorua_pkg.sv rtl/phase_spec_decoder.sv rtl/mapping_table.sv \
  rtl/reg_mapping_table.sv rtl/scratch_mapping_table.sv rtl/thread_mapping_table.sv \
  rtl/oversub_threshold.sv rtl/coordinator.sv rtl/zorua_sm.sv tb/tb_zorua_sm.sv \
  --top-module tb_zorua_sm -o sim && obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_phase_spec_decoder` | every register and scratchpad field value, and opcode matching |
| `tb_mapping_table` | random alloc/release/lookup against a reference model on a 4×4×6 table, including access counts, every spill victim, counters and the 2-cycle latency |
| `tb_reg_mapping_table`, `tb_scratch_mapping_table`, `tb_thread_mapping_table` | full-size tables; physical, swap and spill addresses computed independently from a model of allocation and access counts |
| `tb_oversub_threshold` | each branch of the epoch rule, the exact-16 boundary, clamping, and the epoch timing |
| `tb_coordinator` | coordinator with three real tables, in directed scenarios with hand-worked outcomes: queue order, thresholds, barrier release, register release, deadlock guard, swap-in, block end; after every event, table counters against per-warp holdings |
| `tb_zorua_sm` | the whole SM at default sizes, running three synthetic kernels back to back |
| `tb_workloads` | the resource shapes of eight GPU applications at the top of their size ranges (below) |

The three kernels in `tb_zorua_sm` are:

* DCT-like: register needs 20/40/40/20 per thread with barriers, and 2 KB scratchpad;
* N-Queens-like: scratchpad 0, then 4.2 KB, then 384 B;
* Barnes-Hut-like: 32-warp blocks of 44 registers per thread, which oversubscribe the register
  file.

The testbench issues random register and scratchpad lookups and checks each one against its own
record of the mapping. It drives idle statistics that move the thresholds both ways. It counts
every mechanism and fails if any never happened:

* warp-slot, scratchpad and register oversubscription;
* register and scratchpad spills;
* queue waits;
* the deadlock guard;
* barrier release;
* swap-in;
* register release at phase changes;
* threshold increases and decreases.

A typical run takes about 310 k cycles and lasts well under a minute. It reports on-chip hit
rates for register and scratchpad lookups.

### Application shapes

`tb_workloads` launches four blocks of each of the following shapes. Each is the largest point
of the application's range:

* Barnes-Hut and minimum spanning tree: 44 registers × 1024 threads;
* DCT: 40 registers × 512 threads;
* reduction: 24 registers × 1024 threads;
* scan-large-array and SSSP: 36 registers × 1024 threads;
* N-Queens: 47232 B of scratchpad × 288 threads;
* scalar product: 8192 B of scratchpad × 512 threads.

Every warp runs the same four steps: its full need, a barrier, the low end of the range, and end.
The per-warp register need always fits the 16-set table row. A 47232 B block needs 47 of the 48
scratchpad sets, and 738 units fit the 10-bit specifier field. All eight shapes finish, and every
resource comes back.

The 1024-thread shapes keep two 32-warp blocks resident. That needs 704 register sets against
256 on chip, so only the deadlock guard keeps them moving. Their register lookups then hit on chip
in about 70–97 % of cases; the smaller shapes hit in 100 %.

Each shape takes between 30 k and 210 k cycles. Almost all of that time is the coordinator's
serial scan of about 200 cycles per event, plus 256 cycles for every register spill. The lookups themselves are not the bottleneck. This
cost is what the FIFO-based version mentioned above would remove.

