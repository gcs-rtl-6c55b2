# Locks as generalized cache coherence: RTL of a GCS rack

A reader-writer lock and a directory-based MSI protocol enforce the same rule: at any moment,
one writer or many readers. They differ only in scope. Coherence enforces the rule for one
fixed-size line and one instruction. A lock enforces it for a whole critical section and for
any set of data. On a multicore this difference barely matters. On disaggregated memory,
where every coherence message crosses a network and costs microseconds, it matters a lot. A
software lock built on top of coherence (MCS, pthread rwlock, per-CPU reader locks) spends
several coherence transactions on every hand-over, and each one is a network round trip.

GCS (generalized cache coherence) removes that layering. It makes two small changes to a
directory MSI protocol, and with them a lock acquisition becomes a single coherence
transaction:

* **In time: wait queues.** An `Acquire` takes a line with S or M permission and keeps it
  until an explicit `Release`. Requests that would invalidate the holder are not served at
  once. They wait in a per-line queue and are served in turn when the holder releases.
* **In space: shared memory lists.** A lock line is a list of arbitrary `(base, size)`
  regions, not one 64-byte block. The grant brings the data of every region together with
  the permission. An invalidation removes all of the regions at once.

This repository gives synthesizable SystemVerilog for a rack that uses this protocol.
Compute blades, one memory blade and a switch that holds the cache directory are connected
in a star. The published system splits this work between a programmable switch (P4) and
kernel software on the blades. Here every part is written as hardware with the same
function. Where the RTL departs from the published system, this document says so.

## The rack

```
   blade 0 ... blade 7            (gcs_cache_ctrl: line states, wait queues,
        \      |      /            Algorithm 1, shared memory list)
         +-----+-----+
         |  gcs_switch | ingress FIFOs -> round-robin -> gcs_directory -> multicast
         +-----+-----+
               |
         gcs_mem_blade            (line data; answers reads, absorbs write-backs)
```

`gcs_top` connects `NODES = 8` blade controllers and one memory blade to the switch ports
0..7 and 8 (`MEM_PORT`). Every message crosses the directory, including the data a blade
hands to another blade. This lets the directory see, and approve, every change of owner.
Threads are outside the design. Each blade's `cpu_*` port takes three operations:
`OP_ACQ_S` (read lock), `OP_ACQ_M` (write lock) and `OP_REL` (unlock). It answers each
acquire with `cpu_rsp_valid` and the line's data.

## What the switch keeps, and what the blades keep

Switch memory is scarce, so the directory keeps only a little state per line
(`gcs_directory`):

| field | meaning |
|---|---|
| `perm` | I, S or M |
| `sharers` | one bit per blade; in M, the single owner |
| `qh_v`, `qh` | whether the line has a wait queue, and which blade holds it (the *queue holder*) |
| `ver` | number of requests forwarded to the queue holder since the queue last moved |

The queues themselves (`gcs_wait_queue`, one per line per blade, `QDEPTH = NODES` entries of
*(blade, permission)*) and the shared memory lists live at the blades.

## Where a line's wait queue is

There is at most one queue per line, and it is never replicated. A queue is needed only when
a writer is involved, and there is only one writer at a time, so the queue always sits with
a writer:

1. **No queue.** The line is I, or S with no writer waiting. Readers are added to the sharer
   list directly and get their data from memory.
2. **Queue at the current writer.** The line is M. Every `Acquire` from another blade is
   forwarded (`MSG_FWD`) to the owner and appended to its queue. The directory increments
   `ver` for each one.
3. **Queue at the next writer.** The line is S and a writer has asked for M. The writer
   becomes queue holder at once, and later requests queue up there. The readers get a
   `MSG_NEXT_WR` notice. Each reader answers with `MSG_INV_ACK`: at once if it is not in a
   critical section, otherwise when it releases. When the last reader has gone, the
   directory turns the line M at the writer and has memory send it the data.

In this RTL, Inv-Acks go to the directory, which uses the sharer list to tell when the last
reader has left. The writer keeps no count of its own.

## Moving the queue on release (the hard part)

When the owner of an M line releases it, `gcs_qxfer_plan` looks at the queue and decides.
The following steps are the paper's Algorithm 1:

| queue on release | plan | result |
|---|---|---|
| empty | `PLAN_DROP` | nothing is sent; the line stays M in the releasing blade's cache |
| head wants M | `PLAN_TO_WRITER` | line, data and rest of the queue go to that writer (case 2) |
| head reader(s), then a writer | `PLAN_READERS_WR` | the leading readers get S and the data; the queue moves to the writer, which waits for their Inv-Acks (case 3) |
| readers only | `PLAN_READERS` | all get S; the queue is dropped (case 1) |

"Leading readers" means the run of S entries at the head of the queue. Readers queued
behind the first writer stay in the queue that moves to that writer.

There is a race here. Between the moment the holder computes its plan and the moment the
switch acts on it, the directory may forward another request to the holder. If it did, that
request would be lost, or sent to a blade that is giving up the queue. A version check
closes the gap:

* The holder counts the forwarded requests it has queued (`ver`, at the blade). The
  directory counts the ones it has sent.
* The holder sends `MSG_QXFER_REQ`. It carries the plan, the holder's `ver`, the rest of
  the queue and the line's data.
* If the two counts are equal, every forwarded request is already in the plan. The switch
  updates the line, resets `ver` to zero, and multicasts `MSG_GRANT` in one message. It
  goes to the old holder (which invalidates its copy), to the readers and the next writer
  (which load the line, the data and the queue), and, when the line goes to readers, to
  the memory blade (which stores the data for the writer's later read).
* If the counts differ, the switch answers `MSG_QXFER_DENY`. The late requests were sent
  before the denial on the same path, so they reach the holder first. The holder queues
  them and computes the plan again.

If a request is forwarded to a blade whose M line sits unlocked in its cache, that blade
runs the same step at once, as if it had just released the line.

An example with blades N1, N2 and N3 on one line follows. N2 reads, then N1 asks for M. The line
stays S with queue holder N1, and N2 gets `NEXT_WR`. N3 asks for S and is queued at N1,
with `ver = 1`. N2 releases, sends `INV_ACK`, and the directory makes the line M at N1
(memory sends the data). N1 releases with plan `READERS` for N3, but it used `ver = 0`, so
the switch denies it. N1 retries with `ver = 1` and is granted. N3 gets S and the data, and
N1 drops to I. `tb_gcs_directory` drives sequences of this kind, message by message.

## Data with the lock, and locality

An acquire is answered with the permission and the line's data together: either
`MSG_ACK_DATA` from memory or `MSG_GRANT` from the previous writer. This gives the combined
lock-and-data acquisition. A released line stays in the blade's cache. The next acquire of
the same line by that blade is served locally in one cycle, with no message
(`cpu_rsp_local = 1`). This happens when the cached permission is enough, nobody is queued
and no writer is waiting. When a reader needs M, it first gives up its S copy with an
Inv-Ack and then asks for M.

## Shared memory lists

`gcs_shm_list` holds `SHM_MAX = 4` regions per line at every blade. Each region covers
`[base, base+size)` of a 48-bit address space. The regions are registered through `shm_we`
when a lock is set up, as a Rust `RwLock<T>` would register its `T`. A lookup (`shm_addr`)
returns the line that covers the address and whether that line is present at this blade.
Presence is read from the line's coherence state, so an invalidation drops every region of
the line in the same cycle. The data that moves with a line is one `DATA_W`-bit word. It
stands in for the combined contents of the regions.

## Messages

| type | from -> to | carries |
|---|---|---|
| `MSG_ACQ` | blade -> directory | line, S or M |
| `MSG_FWD` | directory -> queue holder | requestor, permission |
| `MSG_NEXT_WR` | directory -> readers | the waiting writer |
| `MSG_INV_ACK` | blade -> directory | line given up |
| `MSG_MEM_RD` | directory -> memory | requestor, permission to grant |
| `MSG_ACK_DATA` | memory -> requestor (through the directory) | permission, data |
| `MSG_QXFER_REQ` | queue holder -> directory | plan, version, readers, next writer, rest of queue, data |
| `MSG_GRANT` | directory -> old holder, grantees, memory | the approved transfer |
| `MSG_QXFER_DENY` | directory -> queue holder | retry |

All of them share the struct `gcs_msg_t` in `gcs_pkg`. The encodings belong to this design.

## Timing

* Switch: a message offered to an ingress FIFO at clock edge k enters the directory at edge
  k+1. Its result is taken by the destinations at edge k+2. The directory handles one
  message per cycle. A multicast leaves only when every destination can take it.
* Blade controller: one event per cycle. A pending queue transfer goes first, then one
  network message, then one CPU operation. Releases complete in the cycle they are accepted.
  An acquire that hits locally answers on the next cycle.
* Memory blade: one message per cycle, one-cycle access, in arrival order. A write-back is
  therefore always seen by a later read.

## Sizes

| constant (`gcs_pkg`) | value | origin |
|---|---|---|
| `NODES` | 8 | the evaluated rack: four servers with two compute blades each |
| `QDEPTH` | `NODES` | the queue length is bounded by the number of blades |
| `NUM_LINES` | 16 | own choice; no directory size is published |
| `DATA_W` | 64 | own choice; the published system moves 4 KB pages |
| `VER_W` | 8 | own choice |
| `SHM_MAX`, `ADDR_W`, `SIZE_W` | 4, 48, 32 | own choice |

The sizes are package constants because the message struct depends on them. Change them in
`rtl/gcs_pkg.sv`.

## Departures from the published system, and open points

* In the published system the blade controller is kernel code and the directory is a P4
  program. Here both are RTL. The switch's control plane (directory entry allocation) is
  not built: the directory is indexed directly by line number.
* Line data is one 64-bit word, not a 4 KB page. The word stands for the payload that moves
  with the lock, and no protocol decision depends on its width. `DATA_W` can be raised, but
  every message, buffer and cached line grows with it. RDMA, NICs and links are replaced by
  valid/ready channels, and memory answers in one cycle.
* When the queue is empty on release, the writer keeps the line in M and stays the queue
  holder. The published algorithm says the queue is dropped, and it also says released
  locks stay cached. This RTL keeps both behaviours. The cost is that the next request is
  forwarded to that blade, which answers it at once.
* Inv-Acks are sent to the directory. The published text also describes the readers
  notifying the writer directly.
* A releasing writer always gives up its copy, even when the line goes to readers.
* Queue order is FIFO. The published design leaves the policy open.
* Threads inside a blade (lock cohorting) are not modelled. Each blade has at most one
  outstanding acquire per line.
* Two corner cases follow this design's own rules: a reader upgrading to M, and a
  next-writer notice that arrives before the reader's own data.

## Files

`rtl/`: `gcs_pkg` (types, sizes), `gcs_fifo` (buffer), `gcs_wait_queue`, `gcs_qxfer_plan`,
`gcs_shm_list`, `gcs_cache_ctrl`, `gcs_directory`, `gcs_switch`, `gcs_mem_blade`,
`gcs_top`. Each file opens with a description of its behaviour and interface.

`tb/`: one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M`.

* `tb_gcs_top` runs the whole rack at its default size. Eight blade threads run five phases
  of 60 lock operations each: 50%, 95% and 100% readers over eight lines (mixes in the
  style of YCSB A, B and C), an exclusive global lock, and 99% readers on one lock.
* It checks that every acquire returns the last committed value, that one-writer-or-readers
  holds in every cycle, that the shared memory list stays consistent, and the final write
  counts.
* It counts each protocol mechanism: local hits, forwarding, next-writer notices, Inv-Acks,
  memory reads, transfers of each plan, version denials, upgrades and queues longer than
  one. Any mechanism that never happens counts as a failure.

`tb_gcs_micro` is the single-lock contention benchmark. One thread on each of 2, 4, 6 or 8
blades repeatedly acquires one lock, uses its data and releases it. It runs four mixes:
writer-only, and 50%, 95% and 99% readers. Its main check is the central claim of the
protocol: every acquisition that is not a local hit costs the acquiring blade exactly one
coherence request, however many blades contend. A typical run gives these figures:

| mix | blades | local hits / acquisitions | requests per network acquisition | switch messages per network acquisition | mean network latency (cycles) |
|---|---|---|---|---|---|
| writer-only | 8 | 0 / 320 | 1.00 | 2.72 | 92 |
| 50% readers | 8 | 0 / 320 | 1.00 | 2.24 | 63 |
| 95% readers | 8 | 184 / 320 | 1.00 | 1.50 | 24 |
| 99% readers | 8 | 284 / 320 | 1.00 | 1.61 | 20 |

The latency includes the time spent waiting in the queue behind the other blades. It grows
linearly with the number of writers, as a fair queue should.

To simulate, for example the whole rack:

```
verilator --binary --timing --assert rtl/gcs_pkg.sv rtl/gcs_fifo.sv rtl/gcs_wait_queue.sv \
  rtl/gcs_qxfer_plan.sv rtl/gcs_shm_list.sv rtl/gcs_directory.sv rtl/gcs_switch.sv \
  rtl/gcs_mem_blade.sv rtl/gcs_cache_ctrl.sv rtl/gcs_top.sv tb/tb_gcs_top.sv \
  --top-module tb_gcs_top -Wno-fatal
./obj_dir/Vtb_gcs_top +verilator+seed+1
```

The run takes well under a second. It needs about 10,000 cycles for 2,400 lock operations.
Run other seeds with `+verilator+seed+N`.
