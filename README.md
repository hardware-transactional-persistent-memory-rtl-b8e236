# WrAP: a persistent memory controller for durable HTM transactions

## The problem

Hardware transactional memory (Intel TSX and similar) makes a block of stores
visible to other threads all at once, at `XEnd`. It says nothing about *when*
those stores reach memory. If that memory is persistent, a crash can leave any
subset of a transaction's lines in persistent memory (PM), and the lines of
dependent transactions can land in any order. Logging does not rescue this by
itself: inside an HTM section software cannot flush or fence, so the log can
only be written after `XEnd`, by which time the data lines are already free to
be evicted to PM ahead of the log.

WrAP (write-aside persistence) fixes this without touching the processor. A
small controller sits between the last-level cache and PM and **delays every
evicted line until all transactions that could have produced it have persisted
their logs**. Software tells the controller when each transaction ("wrap")
opens and closes; it records start and end timestamps and a redo log in a log
area whose writes the controller lets straight through. After a crash, a
recovery routine replays exactly those logs whose end timestamp is no later
than the earliest start timestamp of any unfinished transaction, in end
timestamp order. The controller guarantees that whatever reached PM belongs to
transactions that recovery will replay.

This RTL is the controller. The software library, the processor and the
recovery routine are software or existing hardware and are not part of it.

## What software does around the controller

For each transaction, running on thread `id` (the wrap id):

1. **open**: send an open notification for `id`; write `startTime` into its log
   and flush it.
2. **compute**: `XBegin`, do the work while appending (address, value) pairs to
   the log in cache, read `persistTime`, `XEnd`.
3. **log**: flush the log lines (these hit the log area and pass through).
4. **close**: send a close notification for `id`, with a durability address if
   the transaction wants *strict* durability (0 otherwise).
5. **commit**: with relaxed durability, continue at once; with strict
   durability, wait until the controller writes 1 to the durability address.

## How the controller works

### The open set (COT)

`wrap_cot` is a bit vector, one bit per wrap id: an open sets the bit, a close
clears it.

### The Volatile Delay Buffer (VDB)

`wrap_vdb` is a FIFO of entries `(line address, 64-byte data, dependency set)`.

* A write that is not to the log area, arriving while any wrap is open, is
  pushed at the tail with its dependency set = the COT at that instant.
* A close clears that wrap's bit in **every** entry's dependency set in the
  same cycle (one AND-NOT per entry).
* An entry whose dependency set is empty may go to PM. Because every later
  entry was tagged with a superset of the still-open wraps of every earlier
  one, sets empty in FIFO order, so only the head has to be watched. The head
  is written back as soon as its set is empty and the PM port is free.

Why this is enough: a line evicted at time *t* can only hold data of
transactions that were open at *t* or had already closed. Holding it until
every wrap open at *t* has closed means every transaction that started before
the producer's end timestamp has persisted its log, which is the recovery
rule's condition for replaying the producer.

The same line can be in the buffer several times (evicted, re-dirtied,
evicted again). Reads must see the newest copy, so the buffer has a hash table:

* 2^`HASH_BITS` buckets; each holds a pointer to the youngest entry whose
  address hashes to it.
* Each entry, when pushed, stores the pointer its bucket held before. A bucket
  is thus the head of a newest-to-oldest chain threaded through the FIFO.
* A read follows the chain one entry per cycle and stops at the first address
  match (the newest copy) or when the chain points at an entry that has
  already drained (miss: read PM).
* Pointers carry one wrap bit beyond the FIFO index, so "has this entry
  drained?" is a range check against head and count. A stale pointer is never
  mistaken for a reused slot.
* When the head drains and its bucket still points at it, the bucket is
  emptied.

### The Dependency Wait Queue (DWQ)

`wrap_dwq` implements strict durability. On a close with a non-zero durability
address it queues `(COT without the closer, address)`. Later closes clear their
bits exactly as in the VDB. When the head's set is empty, the controller
writes the 64-bit value 1 to the durability address, which the waiting thread
is monitoring, and pops the entry. A transaction that closes with nothing else
open is notified at once.

### Control

`wrap_control` ties the three together and owns the single PM request port:

| traffic | action |
|---|---|
| write to `[log_base, log_limit)` | straight to PM |
| other write, no wrap open and VDB empty | straight to PM |
| other write otherwise | push to VDB, tagged with COT |
| read | VDB lookup; on miss read PM |
| open | set COT bit |
| close | clear COT bit, clear bit in VDB and DWQ; if strict, push DWQ |

PM port priority, highest first:

1. durability write;
2. read miss;
3. pass-through write;
4. VDB write-back.

A write and a notification in the same cycle count as "write first": the write
is tagged with the COT as it stood before the notification. A close in that
cycle still clears its bit in the just-pushed entry.

## Worked example (four transactions)

Wrap ids 0-3 play T1-T4. In the sequence below, `wrap_pm_controller`
reproduces the buffer contents step by step; the end-to-end testbench checks
each step.

| step | event | COT (T1..T4) | VDB, head first |
|---|---|---|---|
| t1-t3 | T1, T2, T3 open | 1110 | - |
| t4 | evict X | 1110 | X{1110} |
| t5 | T4 opens | 1111 | X{1110} |
| t6 | evict Y | 1111 | X{1110} Y{1111} |
| t7 | T3 closes | 1101 | X{1100} Y{1101} |
| t8 | T2 closes (strict) | 1001 | X{1000} Y{1001} |
| t9, t10 | evict Z, evict X | 1001 | X{1000} Y{1001} Z{1001} X{1001} |
| t11 | T1 closes | 0001 | old X written back; Y Z X {0001} |
| t12 | T4 closes (strict) | 0000 | Y, Z, new X written back |

A read of X at t10 returns the newer copy. T4's durability write is issued
immediately at t12. T2's is issued only after both T1 and T4 have closed,
because both were open when T2 closed.

## Interface and timing

One clock, asynchronous active-low reset. Every channel is valid/ready.

* `wr_*`: a 64-byte line write. Accepted in one cycle when buffered. When
  passed through, it is accepted when PM takes it. `wr_ready` is low while the
  VDB is full; this is back-pressure to the cache.
* `rd_*`: one read at a time.
  * A VDB hit answers on `rd_rsp_*` 1 + (non-matching chain entries) cycles
    after acceptance.
  * A miss costs at least that plus the PM latency.
* `ntf_*`: `ntf_kind` is open or close, `ntf_id` is the wrap id, and
  `ntf_dur_addr` (non-zero = strict) is the durability address. A notification
  takes one cycle. A strict close waits only if the DWQ is full.
* `pm_req_*`/`pm_rsp_*`: one request per cycle of type `pm_req_t` (we, line
  address, data, byte strobes). Reads must be answered in order.
* Status:
  * `cot`;
  * `vdb_count` and `vdb_max_count`, the buffer occupancy and its high-water
    mark, the figure the evaluation reports as maximum FIFO length;
  * `dwq_count`;
  * `ev`, one-cycle event pulses.

Sustained rates: one push and one write-back per cycle; one notification per
cycle.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NW` (wrap ids = COT width) | 16 | own choice: one id per thread; the evaluation runs up to 16 threads |
| `VDB_DEPTH` | 1024 lines | the simulated workloads never exceeded about 800 lines ("less than 1k lines / 64 KB") |
| line size | 64 bytes | as above (1k lines = 64 KB) |
| `HASH_BITS` | 10 (1024 buckets) | own choice |
| `DWQ_DEPTH` | `NW` | own choice: a thread waits on at most one strict close |
| address width | 48-bit byte address | own choice |

Sizes and types shared by all modules are in `wrap_pkg`.

## Where this RTL departs from, or adds to, the description it follows

* **Pass-through condition.** The source design writes a non-log line straight
  through whenever no wrap is open. Here the VDB must also be empty. Otherwise
  a line could overtake an older copy of itself that is still queued with an
  empty dependency set.
* **Hash table details.** The source design gives only "a hash table pointing
  at the newest FIFO entry" and its removal on drain. The hash function (XOR
  fold), the collision handling (chaining through the FIFO) and the
  one-entry-per-cycle walk are this design's.
* **Notifications.** These use a dedicated port. The source design suggests
  writes to control addresses as one option.
* **Durability write.** It stores 64-bit value 1 using byte strobes; the word
  width is a choice here.
* **Full buffer.** A full VDB back-pressures writes. The source design assumes
  the buffer keeps up.
* **Conservative strict durability.** As in the source design, strict
  durability waits for every wrap open at the close, not only for those that
  started before the closer's end timestamp. This can notify later than the
  recovery rule strictly needs. In the example, T2 is recoverable after T1
  records its end timestamp, but is notified after T1 and T4 close.
* **One pass-through range.** The source design speaks of "the log area or
  pass-through area". Here a single range, `[log_base, log_limit)`, serves
  both.
* **Software is out of scope.** The controller has no timestamps and no log
  format; those live in software.

## Files

* `rtl/wrap_pkg.sv`: sizes, `pm_req_t`, notification kind, event struct.
* `rtl/wrap_cot.sv`, `rtl/wrap_vdb.sv`, `rtl/wrap_dwq.sv`, `rtl/wrap_control.sv`:
  the blocks.
* `rtl/wrap_pm_controller.sv`: the top level.
* `tb/pm_model.sv`: a behavioural PM. It has byte strobes, a fixed read latency
  and optional random stalls, and `peek()` shows what is persistent.
* Testbenches (`tb/tb_<module>.sv`), each self-checking. Each prints
  `TB_RESULT checks=N failures=M` and has a watchdog.
  * `tb_wrap_cot`: random opens and closes against a bit-vector model.
  * `tb_wrap_vdb`: depth 16 with 4 buckets, so chains form. Random pushes,
    closes, pops and lookups against a queue model. Covers newest-copy reads,
    back-pressure and lookup latency.
  * `tb_wrap_dwq`: random strict closes, closes and pops against a queue model.
  * `tb_wrap_control`: directed checks of routing, arbitration order,
    durability-write format and both read paths.
  * `tb_wrap_pm_controller`: the whole controller at default sizes, in three
    parts.
    1. The four-transaction example above, step by step.
    2. Filling all 1024 entries, so that a write is held back, then draining.
    3. 3000 random operations on 16 wraps with a PM that stalls 30% of the
       time.

    An independent checker follows every accepted write. Each one must reach
    PM only after every wrap open at its eviction has closed, and copies of
    one line must reach PM in write order. Reads must return the newest data.
    Durability writes must come only after every wrap open at the strict
    close has closed, and every one must come. The testbench also counts each
    mechanism: pass-through, log write, buffering, full buffer, write-back,
    read hit and miss, strict close, durability write.
  * `tb_wrap_workload`: the workload runs described in the next section.
    It checks that reads return the newest data, that strict closes are
    notified, that the buffer drains, and that PM ends up with the newest
    data.

## Workload runs

`tb_wrap_workload` drives the controller at default sizes with traffic shaped
like the two workloads whose buffer length the evaluation measured in
simulation.

* **Hash table.** 4 threads, each on its own part of the table. Each
  transaction makes 10 updates, and each update evicts one line.
* **B-tree.** 8 threads. Each insert writes 2 lines and reads about 5 lines
  per write.

Each run is repeated with PM writes taking 1, 2, 4 and 8 cycles. Each thread
runs 60 transactions. An update has 8 cycles of compute. Thread 0 asks for
strict durability every fourth transaction and waits for its flag.

One run gave these results:

| workload | PM write | buffer high-water mark (lines) | cycles |
|---|---|---|---|
| hash table, 4 threads | 1x | 41 | 7386 |
| | 2x | 41 | 8080 |
| | 4x | 1024 (full, back-pressure) | 9905 |
| | 8x | 1024 (full, back-pressure) | 18992 |
| B-tree, 8 threads | 1x | 35 | 9409 |
| | 2x | 32 | 10299 |
| | 4x | 46 | 11088 |
| | 8x | 745 | 11009 |

These figures show how the mechanism behaves. They are not a reproduction of
the published buffer lengths, for two reasons:

* There is no processor model, so eviction rate and PM speed are in abstract
  cycles.
* Once PM write bandwidth falls below the eviction rate, the buffer fills and
  throttles the writer, as designed.

The published measurements, from a full-system simulator, stayed below about
800 lines for the hash table and about 100 for the B-tree. Both fit the
1024-line default.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/wrap_pkg.sv rtl/wrap_cot.sv rtl/wrap_vdb.sv rtl/wrap_dwq.sv \
  rtl/wrap_control.sv rtl/wrap_pm_controller.sv \
  tb/pm_model.sv tb/tb_wrap_pm_controller.sv --top-module tb_wrap_pm_controller
./obj_dir/Vtb_wrap_pm_controller
```

The unit testbenches need only `wrap_pkg.sv`, their module and their
testbench; add `pm_model.sv` where it is used. The end-to-end run at default
sizes takes well under a second.

## How far to trust it

* The protocol invariants above are checked against an independent model under
  random traffic, with PM back-pressure, at the default sizes.
* Every testbench has been shown to fail on a deliberately broken copy of its
  module.
* Not covered:
  * reads racing writes to the same line from a second requester;
  * timing closure. The VDB is written as arrays: 1024 x 512 data bits, with
    the 1024 x 16 dependency bits in flip-flops so that a close can clear all
    of them at once. A real implementation would put the data in SRAM.
