# ASAP: hardware for asynchronous persistence under undo logging

Programs that keep data structures in persistent memory group their updates
into *atomic regions*: after a crash, either all stores of a region are
visible or none are. With hardware undo logging, the first store of a region
to a cache line first writes the line's old contents to a per-thread undo log
(a *log persist*, LPO). The modified line itself must later reach persistent
memory (a *data persist*, DPO). Once every line of the region is persistent,
the region can *commit*, meaning its undo records are freed. If power fails
before that, recovery replays the undo log and the region's stores vanish.

Earlier hardware undo-logging schemes make the core wait at the end of a
region until its persists are done. ASAP instead lets the core run past the
end of a region while its log and data persists finish in the background.
That is only safe if regions still commit in an order that recovery can
undo. Two things set that order:

* **control dependences**: a thread's regions must commit in program order;
* **data dependences**: if region B writes a line that region A wrote and A
  has not yet committed, B must not commit before A.

If B committed first and the machine then crashed, undoing A would overwrite
B's committed data with the value from before A. ASAP therefore tracks these
dependences in hardware and commits a region only when it has ended, all of
its lines are persistent, and every region it depends on has committed.

This repository holds SystemVerilog RTL for those tracking structures, wired
together into one block that takes per-core region operations and sends log
and data writes to persistent memory. The cores, caches, memory controller
and memory devices lie outside it.

## The structures

| Structure | Module | Contents |
|---|---|---|
| Thread state registers (one set per hardware thread) | `asap_thread_regs` | LogAddress, LogSize, LogHead, LogTail, NestDepth, CurRID |
| Cache-line tag extensions | `asap_tag_ext` | PBit, LockBit, OwnerRID for each tracked line |
| Modified cache line list | `asap_cl_list` | per region: RID, State, CLPtr<sub>0</sub>..CLPtr<sub>n</sub> |
| Dependence list | `asap_dep_list` | per region: RID, State, Dep<sub>0</sub>..Dep<sub>m</sub> |
| Write pending queue | `asap_wpq` | the memory controller's queue of persistent writes |
| Operation arbiter (helper) | `asap_rr_arb` | picks one core operation per cycle |
| Top | `asap_top` | wires the above together |

Shared types are in `asap_pkg`. A region is identified by its RID, which is
also the index of its entry in both lists. There are `NREG` entries, so at
most `NREG` regions can be in flight, whether open or ended but not yet
committed.

## Life of an atomic region

Cores present operations on `op_valid[t]` / `op[t]` and see them accepted on
`op_ready[t]`. There are three operations: `OP_BEGIN`, `OP_END` and
`OP_STORE` (a store to a persistent line). One operation is handled per cycle
overall. A round-robin arbiter chooses which thread goes. An operation that
cannot proceed is simply not accepted, and the arbiter moves on to another
thread.

**Begin.** An outermost `asap_begin` takes the lowest free region entry.
Nested begins only raise NestDepth: nesting is flattened into the outermost
region. The new region's CurRID is that entry. If the thread's previous
region has not committed yet, the new region records a control dependence on
it. With no free entry, the begin stalls.

**Store.** A store to line L by region R looks up L's tag extension:

1. *L is already owned by R.* R has already logged L, so no undo record is
   written. The line is entered in R's CL list entry if it is not there yet.
   A line stored to many times therefore appears once and is written back
   once.
2. *Otherwise*, an undo record is written at LogTail of the thread and
   LogTail advances. R becomes L's owner, and LockBit is set until the WPQ
   accepts the undo record. L is entered in R's CL list entry. If another
   region R' still owned L (R' has not committed), R records a data
   dependence on R'.

A store stalls in these cases:
* the tag entry for L's index belongs to a different line whose owner has not
  committed;
* R's CL entry is full;
* the thread's log is full;
* another undo record is still waiting for the WPQ (only one waits at a time);
* R needs a new dependence slot and all are taken.

Stores made outside any region are accepted and not tracked.

**End.** The outermost `asap_end` marks the region ENDED in both lists and
stores LogTail as the region's log end. The core is released at once, and
everything after this point is asynchronous.

**Write-back.** The CL list scans for a line pointer in an eligible entry
and offers it to the WPQ as a data persist. An entry is eligible once its
region has ended, or while it is open but full. A pointer whose line has
LockBit set is skipped, because its undo record is not yet durable. So is the
line being stored to in the same cycle. When the WPQ accepts the write-back,
the line is removed from *every* entry that holds it, since the write carries
every store made so far. A full, open region therefore frees pointers by
early write-back. This is legal under undo logging, because its undo records
are already durable. A later store to the same line puts it back in the list.

**Commit.** A region commits when it has ended, its CL entry is empty, and
none of its dependence slots are in use. At most one region commits per
cycle, lowest RID first. Committing a region does four things:

* clears that RID from every other region's dependence slots;
* clears PBit on every line the region still owns;
* frees both list entries;
* moves LogHead of the owning thread to the region's log end, which frees
  its undo records.

Commits can then ripple down chains of dependent regions, one per cycle.

### Why this is safe

* **Write-ahead rule.** A line's write-back is never accepted into the WPQ
  while an undo record for that line is still outside it. LockBit enforces
  this, together with blocking a write-back of the line being stored in the
  same cycle.
* **Commit order.** A region commits only after all of its recorded
  dependences have committed. Dependences always point to a region that
  wrote first, so a well-formed program cannot build a cycle of them. Here,
  well-formed means regions that share data are serialised by locks, as the
  regions are when each sits inside a critical section.
* **RID reuse.** A committed region's RID is removed from every tag entry,
  dependence slot and thread register in the cycle it commits, so an entry
  can be reused at once without aliasing.

### Where it can hang

* If two regions that are open at the same time write each other's lines,
  they depend on each other, and neither can ever commit. The same holds for
  longer cycles. Software must keep regions that share data apart, as above.
* The tag extensions are direct-mapped. A single region that writes two lines
  with the same index, `NLINES` lines apart, waits for itself. So does a
  region that writes a line whose entry belongs to a region that depends on
  it. Choose `NLINES` so that the lines one region writes do not collide.

## Interface of `asap_top`

| Port | Dir | Meaning |
|---|---|---|
| `cfg_we, cfg_tid, cfg_log_addr, cfg_log_size` | in | set LogAddress and LogSize (in records) of thread `cfg_tid`; also resets its LogHead and LogTail |
| `op_valid[t], op[t], op_ready[t]` | in/in/out | operation of core `t`; `op[t].kind` is `OP_BEGIN`, `OP_END` or `OP_STORE`, and `op[t].addr` is the byte address of a store |
| `pm_valid, pm_req, pm_ready` | out/out/in | writes to persistent memory; `pm_req.kind` is `PW_LOG` (an undo record at `addr`) or `PW_DATA` (write-back of the line at `addr`) |
| `commit_valid, commit_rid, commit_tid` | out | a region commits this cycle |
| `log_head[t], log_tail[t]` | out | LogHead and LogTail of each thread |
| `active` | out | region entries in use |
| `ev` | out | one-cycle event flags: region open/end, nesting, undo record, coalesced store, control or data dependence, write-back, early write-back, commit, and one flag per stall reason |

Undo record `i` of thread `t` lives at `LogAddress + i * REC_BYTES`. All
state changes take effect on the rising edge of `clk`. `rst_n` is an
asynchronous, active-low reset. The WPQ counts a write as persistent as soon
as it accepts it, because the queue sits inside the persistence domain. The
write data (line contents and undo-record payload) comes from the caches and
is not modelled here: requests carry only their kind and address.

## Parameters

The source gives no sizes for any of the structures, so every default below
is this design's choice.

| Parameter | Default | Meaning |
|---|---|---|
| `NTHREADS` | 4 | hardware threads (cores) |
| `NREG` | 16 | regions in flight (at most `asap_pkg::MAX_REG`) |
| `NCLPTR` | 32 | line pointers per region (n+1): one 2 KB value fits |
| `NDEP` | 4 | dependence slots per region (m+1) |
| `NLINES` | 1024 | tag-extension entries |
| `WPQ_DEPTH` | 32 | write pending queue entries |
| `REC_BYTES` | 128 | bytes per undo record (a 64-byte line plus header, rounded up) |
| `asap_pkg::ADDR_W` | 48 | physical address bits; lines are 64 bytes |
| `asap_pkg::LOG_IDX_W` | 16 | width of LogSize, LogHead and LogTail (in records) |

## What follows the source and what does not

The following come from the published description: the set of structures,
their field names, and their roles. Those roles are per-thread log
management, per-line last-writer tracking, per-region lists of modified
lines, and per-region dependence lists. Asynchronous log and data persists,
and commit only after dependences are resolved, are also the source's.

These are choices made here:

* **Field meanings.** The State encodings (FREE, ACTIVE, ENDED) are this
  design's. PBit is read as "OwnerRID is live". LockBit is read as "undo
  record not yet durable, so hold the write-back". The source names both
  bits but does not define them.
* **Nesting and logs.** Nesting is flattened. The log is a circular buffer
  of fixed-size records, and LogHead jumps to the committed region's log
  end.
* **Extra fields and registers.** Each dependence-list entry also keeps the
  thread number and the log end of its region. Each thread keeps its
  previous RID for control dependences.
* **Coalescing and early write-back.** DPO coalescing is realised as one
  pointer per line per region, plus removal of a line from every entry when
  it is written back. The early write-back of a full, open region is also
  this design's.
* **Tag storage.** The tag extensions are a direct-mapped array beside the
  caches, not bits inside the cache tags.
* **Throughput and stalls.** One core operation is handled per cycle, at
  most one undo record waits for the WPQ at a time, and each stall condition
  listed above is this design's.
* **Persistence domain.** The dependence list is drawn inside the
  persistence domain; here it is ordinary registers, and crash recovery is
  not modelled.

These are not built:

* **LPO dropping and DPO dropping.** The source names these two traffic
  optimisations but does not say when a persist may be dropped.
* **The second queue** shown in the memory controller next to the WPQ
  (labelled LH-WPQ), whose role is not described.
* **The cores, caches, memory controller, DRAM and persistent memory**
  themselves.

## Sizing against the evaluated workloads

The published evaluation uses the benchmarks BT, CT, EO, HM and Q with 64 B
and 2 KB values, plus TPCC. With 64-byte lines (an assumption), a 64 B value
is one line and a 2 KB value is 32 lines.

* **64 B values.** One line plus a few metadata lines per insert fits
  easily in the 32 pointers of a region.
* **2 KB values.** These fill the 32 pointers; metadata lines beyond that go
  through early write-back. The end-to-end test runs 34-line regions this
  way. Thirty-two contiguous lines use 32 of the 1024 tag entries, so they
  never collide.
* **TPCC.** No transaction footprint is given for it, so whether it fits
  cannot be judged.

The benchmarks' code is not given, so BT, CT and EO are not simulated as
such. `tb_asap_workloads` runs two insert shapes of this design's own at
both value sizes, four threads each, on the default-size design. In a
hash-map insert a thread locks a bucket, writes the value and a node header
to fresh lines, and links the node into the bucket line. In a queue insert
it writes the value and node, then updates a shared tail line and counter
line under one lock. Persistent memory accepts two writes in three cycles.
A typical run:

| Run | Regions | Core cycles | Undo records | Write-backs | Longest `asap_end` wait |
|---|---|---|---|---|---|
| HM 64B | 160 | 1362 | 480 | 478 | 3 |
| HM 2KB | 32 | 3262 | 1088 | 1088 | 3 |
| Q 64B | 160 | 1697 | 640 | 494 | 2 |
| Q 2KB | 32 | 3300 | 1120 | 1107 | 2 |

The testbench checks that every region commits, and that the number of undo
records equals the number of distinct lines each region wrote. It checks
that write-backs never exceed that number. Coalescing lowers the count where
regions rewrite the queue's shared lines. It also checks that `asap_end` is
accepted within a few cycles, even when persists are still queued, because
an asynchronous end is the point of the design.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_asap_thread_regs` | nesting, CurRID, undo-record addresses, LogTail wrap, log full, LogHead on commit, previous-region tracking |
| `tb_asap_tag_ext` | random claims, unlocks and commit clears against a reference array; index conflicts; claim and clear in the same cycle |
| `tb_asap_cl_list` | coalescing, no write-back while open, LockBit hold-off, early write-back of a full region, cross-entry retirement, WPQ back-pressure, random regions |
| `tb_asap_dep_list` | lowest-free allocation, commit conditions, commit outputs, duplicate and overflowing dependence adds, ordered commit of a chain, and a random phase checked by a reference model that no region commits before its dependences |
| `tb_asap_wpq` | FIFO order, log-first priority, full and empty flags under random traffic |
| `tb_asap_top` | end to end, at the default parameters (see below) |
| `tb_asap_workloads` | insert workloads with 64 B and 2 KB values at the default parameters (see below) |

`tb_asap_top` runs the whole design at its default size. Four core models
run 96 regions shaped like data-structure inserts:

* threads 0 and 1 write one-line values, and threads 2 and 3 write 32-line
  values;
* every region updates a node line twice;
* some regions are nested, take a global lock and update shared lines, or
  store to a line whose tag entry is held by another thread;
* persistent memory accepts writes at random, with a slow stretch in the
  middle.

A directed phase follows. One region is held open while the regions of
another thread depend on it. This fills every region entry and overflows a
dependence list.

A reference model in the testbench checks:
* each undo record's address and order;
* the write-ahead rule;
* each commit against the region's recorded dependences and the write-back
  times of its lines;
* LogHead after every commit;
* that every region commits;
* that the numbers of undo records and coalesced stores match the model.

It also counts these mechanisms and fails if any of them never occurred:
nesting, coalescing, control and data dependences, write-backs, early
write-backs, commits, and each stall reason (slot, log, conflict, CL full,
dependences full, LockBit). The whole run takes about 8,000 cycles, and a
few seconds of simulation.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/asap_pkg.sv tb/tb_asap_top.sv \
          --top-module tb_asap_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace the testbench name to run another one. Verilator finds the other
modules in `rtl/` through `-Irtl`. The RTL contains SystemVerilog assertions
for handshake rules and internal invariants, such as no dependence on a
committing region and no claim of a locked line. `--assert` turns them on.
