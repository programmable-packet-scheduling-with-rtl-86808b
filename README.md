# UIFO: a two-level packet scheduler whose class ranks can be updated in place

Hardware packet schedulers built around a single priority queue (PIFO, PIEO and
their descendants) fix a packet's place in the service order when it is
enqueued. Policies such as pFabric need more: when a new packet of a flow
arrives with a smaller remaining flow size, *all* packets of that flow already
in the buffer should move ahead. With a packet-level queue that means removing
and reinserting every one of them.

UIFO (Update-In-First-Out) schedules in two levels instead. Packets
(*elements*) are grouped into *classes* (a flow, a queue, a send-time slot...).
Classes are ordered by a class rank `c.rank`; inside a class, elements are
ordered by an element rank `e.rank`. Every enqueue carries the class's current
`c.rank`, and the class is moved to that rank on the spot. Because a class's
buffered packets travel with it, one class move reorders any number of
buffered packets in a single operation.

This repository holds synthesizable SystemVerilog for the scheduler, sized by
default for 256 classes, 256 class ranks, 256 element ranks and 65536 buffered
elements, with one operation every three clock cycles.

## Scheduling rules

Smaller rank means higher priority, at both levels.

**enqueue(element, class, c.rank, e.rank)**

1. *Push-In*: the element is appended to its class's element list, under its
   `e.rank`. Elements of equal `e.rank` in a class leave in arrival order.
2. *Update-In*: if the class is not queued, it is inserted behind every queued
   class whose rank is `<= c.rank`. If it is queued with another rank, it is
   taken out and reinserted by the same rule.
3. *Hold*: if it is queued with the same rank, it stays exactly where it is.

So classes of equal rank are served first-in first-out, where "in" is the
moment the class was inserted or last moved.

**dequeue()**

1. *First-Index*: take the head class (smallest `c.rank`).
2. *First-Out*: remove and return its element with the smallest `e.rank`
   (oldest among equals).
3. If that empties the class, the class leaves the class list in the same
   operation. Otherwise the class order does not change.

Two extensions are part of the interface:

* An enqueue with `enq_push = 0` sets a class's rank without filing an
  element. It serves control events, for example a flow-control pause that
  pushes a queue's send time into the future, or a round-robin policy that
  moves a class to the back.
* If such an update leaves a class *with no elements* at the head, the next
  dequeue removes that class and reports `out_found = 0`. A dequeue of an
  empty scheduler also reports `out_found = 0`.

### Example

Four classes, written `class:c.rank {element:e.rank ...}`:
`A:7 {a0:5}`, `B:2 {b0:2 b1:4 b2:6}`, `C:3 {c0:4}`, `D:4 {d0:3 d1:7}`.
Dequeues return `b0 b1 b2 c0 d0 d1 a0`. Now enqueue `a1` with `e.rank 1` and
class rank `A:1`. Class A moves to the head and takes `a0` with it, so the
order becomes `a1 a0 b0 b1 b2 c0 d0 d1`. Both sequences are checked in the
testbenches, together with the pFabric case from the introduction.

## Hardware organisation

```
             enq (cid, c.rank, eid, e.rank, push)
                 |                          |
                 | Push-In                  | Update-In / Hold
                 v                          v
      +----------------------+  head  +------------------+
      | MPQG                 |<-------| UG-PQ            |
      | bitmap tree over     | class  | class_list,      |
      | {class, e.rank},     |        | compare-and-shift|
      | shared linked list   |------->| array            |
      +----------------------+  pop   +------------------+
                 |
                 v  deq Element ID (to the packet buffer)
```

* **UG-PQ** (`ugpq`) holds the class list: one `{Class ID, c.rank}` entry per
  queued class, sorted, head in slot 0. It supports *update* (insert, move or
  hold) and *pop head*.
* **MPQG** (`mpqg`, multi-priority-queue group) holds the elements. It is in
  effect `M x R` FIFO buckets, one per (class, element rank). They are indexed
  by a bitmap tree and stored as linked lists through one shared memory.
* **The scheduler** (`uifo`) runs both in lock step. On an enqueue it sends
  the element to the MPQG and the class rank to the UG-PQ at the same time. On
  a dequeue it names the UG-PQ's head class to the MPQG. It also reads that
  class's element count from the MPQG. If the count is 1 or less, it pops the
  class from the UG-PQ in the same operation.

The scheduler does not compute ranks and does not store packets. A classifier
and two rank calculators in front of it supply Class ID, Element ID, `c.rank`
and `e.rank`. A packet buffer behind it is read with the Element ID the
scheduler returns. Element IDs are handles into that buffer. They must be
unique while buffered, and so must Class IDs.

## The MPQG index tree

This is the part that takes the most explaining.

**Key and levels.** Each element is filed under the key
`{Class ID, e.rank}`. With the defaults the key has 8 + 8 = 16 bits. The tree
has bitmap width 4, so each level consumes 2 key bits, giving 8 levels:

| level | key bits used | nodes (Bitmap RAM words) | Counter RAM entries | selects |
|-------|---------------|--------------------------|---------------------|---------|
| 0     | 15:14         | 1                        | 4                   | class   |
| 1     | 13:12         | 4                        | 16                  | class   |
| 2     | 11:10         | 16                       | 64                  | class   |
| 3     | 9:8           | 64                       | 256                 | class (one counter per class) |
| 4     | 7:6           | 256                      | 1024                | e.rank  |
| 5     | 5:4           | 1024                     | 4096                | e.rank  |
| 6     | 3:2           | 4096                     | 16384               | e.rank  |
| 7     | 1:0           | 16384                    | 65536               | e.rank (one counter per bucket) |

A node at level `l` is named by the key bits above it. Its 4-bit bitmap word
has bit `i` set when child `i` holds at least one element. Beside each child
sits a counter of the elements below it, and the bitmap bit is exactly
"counter non-zero". The counters serve two purposes. They tell a pop whether
a bit must be cleared. They also make the level-3 counters the element counts
of the 256 classes, which the scheduler uses to know when a class empties.

**Buckets.** At the last level each counter is the length of one bucket. A
Head/Tail RAM (one entry per bucket) holds its first and last Element ID. A
single Next RAM, indexed by Element ID, links the elements of every bucket. A
bucket can therefore grow to the whole capacity, and no memory is reserved
per bucket beyond two pointers and a counter.

**Push** `{c, r}`: increment the counter on the key's path at every level and
set the corresponding bitmap bits. Then, if the bucket was empty, set
head = tail = id; otherwise set Next[tail] = id and tail = id.

**Pop of class `c`**: walk from the root. In levels 0 to 3 follow the bits of
`c`. In levels 4 to 7 read the node's bitmap word and take its *lowest* set
bit. The lowest bit covers the smallest ranks, so the walk ends at the
non-empty bucket with the smallest `e.rank`. Return its head and set
head = Next[head]. Then decrement the counters on the path and clear every
bitmap bit whose counter reaches zero.

**Memory at the defaults** (capacity 65536):

| RAM | entries x bits | bits |
|-----|----------------|------|
| Counter RAMs, all levels | 87380 x 17 | 1 485 460 |
| Bitmap RAMs, all levels | 21845 x 4 | 87 380 |
| Head and Tail | 65536 x 32 | 2 097 152 |
| Next (shared list) | 65536 x 16 | 1 048 576 |
| total | | about 4.72 Mbit |

The RAMs are written as plain arrays with a combinational read. After reset
an initialisation sweep clears one address of every Counter and Bitmap RAM
per cycle, taking 2^(CLASS_W+ERANK_W) cycles (65536 at the defaults).
`init_done` rises when it ends. Head, Tail and Next are never cleared: they
are read only where a counter says they were written.

## The class queue (UG-PQ)

The class queue is a register array with one slot per possible Class ID, so
a new class always fits. An update is a delete followed by an insert, done as
one compare-and-shift step:

* every slot compares its Class ID (*match*) and its rank (`<=` new rank) with
  the request;
* from the two vectors the deletion slot `d` and the insertion slot `p` are
  found. `p` is the number of entries with rank `<=` the new rank, less one if
  the deleted entry was among them;
* every slot then loads its left neighbour, itself, its right neighbour or
  the new entry.

If the matched entry already has the requested rank, nothing moves (Hold).
Pop shifts everything by one.

## Timing

Both structures take three cycles per operation, and the scheduler accepts
one operation (an enqueue *or* a dequeue) in every third cycle. `enq_ready`
is high in the accept cycle. `deq_ready` is the same, except that it is low
when an enqueue is also requesting: the enqueue goes first.

| cycle | UG-PQ | MPQG |
|-------|-------|------|
| 1 (accept) | latch request, compare in every slot | latch request; for a pop, the find-first-set walk yields the key |
| 2 | find deletion and insertion slots | read counters and bitmap words on the path, the bucket's head/tail, Next[head] |
| 3 | all slots shift | write counters, bitmaps, pointers; register the pop result |

A dequeue result (`out_valid`, one cycle) appears three cycles after its
accept, in the same cycle as the next accept. Each operation's writes are
complete before the next operation reads anything, so there are no pipeline
hazards to handle. Throughput is one operation per three cycles: at 225 MHz
that is 75 million operations per second. 100 Gb/s needs 74 million packets
per second for packets of 169 bytes. Whether a given implementation reaches
that clock depends on synthesis, which this RTL does not claim.

## Interface of `uifo`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `init_done` | out | 1 | MPQG clearing sweep finished |
| `enq_valid` / `enq_ready` | in / out | 1 | enqueue handshake |
| `enq_cid`, `enq_crank` | in | CLASS_W, CRANK_W | class and its (new) rank |
| `enq_push` | in | 1 | 1: file an element; 0: rank update only |
| `enq_eid`, `enq_erank` | in | EID_W, ERANK_W | element and its rank |
| `deq_valid` / `deq_ready` | in / out | 1 | dequeue handshake |
| `out_valid`, `out_found` | out | 1 | result strobe; an element was returned |
| `out_eid`, `out_cid`, `out_erank` | out | | returned element, its class and rank |
| `head_valid`, `head_cid`, `head_crank` | out | | current head class |
| `class_count`, `elem_count` | out | | classes and elements queued |

`head_crank` lets a non-work-conserving policy decide outside the scheduler
whether to dequeue at all. Examples are "send only when the head class's send
time has passed" for flow-control pauses or PIEO-style eligibility, or
"virtual start time <= virtual time" for WF2Q+.

Policies map onto the ports as follows:

* **pFabric**: class = flow, `c.rank` = remaining flow size, `e.rank`
  constant (FIFO within a flow).
* **Priority flow control**: class = priority queue, `c.rank` = send time. A
  pause is a rank-only enqueue with `c.rank = now + pause`. Dequeue only when
  `head_crank <= now`.
* **WF2Q+**: class = virtual start time, `e.rank` = virtual finish time.
* **Deficit round robin**: class = flow. The controller moves a class behind
  the others with a rank-only update.
* **Plain PIFO**: split a packet rank into a high part (`c.rank`, with class =
  that part) and a low part (`e.rank`).
* **PIFO with logical partitions**: class = partition, all classes at one
  rank, so they are kept first-in first-out. To serve a chosen partition, give
  its class the smallest rank with a rank-only enqueue, then dequeue.

## Parameters and sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `CLASS_W` | 8 | Class ID bits: 256 classes, 256 UG-PQ slots |
| `CRANK_W` | 8 | class rank bits: 256 class priorities |
| `ERANK_W` | 8 | element rank bits: 256 element priorities |
| `EID_W` | 16 | Element ID bits: capacity 65536 |
| `BITMAP_W` | 4 | bits per tree node |

`CLASS_W` and `ERANK_W` must each be a multiple of log2(`BITMAP_W`). Some
other configurations:

* 64 classes, 64 class ranks, 4096 elements, 64 element ranks: `6, 6, 6, 12`.
* 4096 classes, 4096 class ranks, 65536 elements, 16 element ranks:
  `12, 12, 4, 16`. The UG-PQ then has 4096 slots.

Smaller capacities simply use fewer Element IDs.

## Where this RTL is a reconstruction

The following follow the published design:

* the two-level structure and its Push-In / Update-In / Hold / First-Index /
  First-Out rules;
* FIFO order among equal class ranks;
* the bitmap tree with Bitmap and Counter RAMs per level, and
  Counter/Head/Tail at the leaves;
* the shared singly linked list;
* bitmap width 4;
* three cycles per operation, with the class pop triggered from the element
  store.

Everything below is this implementation's own choice:

* **Class queue insides.** The original reuses an existing update-capable
  priority queue, a hybrid of small systolic units with two shift registers
  each, whose internals are published elsewhere. `ugpq` has the same
  behaviour and the same three-cycle operation but is a plain compare-and-shift
  register array. Area and timing will differ from the original.
* **How the three cycles are spent** in each block (table above). In
  particular, the find-first-set walk over all rank levels happens in one
  cycle, and the Next read is chained behind the Head read in cycle 2. A
  design aiming at a high clock with registered SRAM outputs would re-cut these
  cycles.
* **What a counter counts** (the elements below one child). Which bitmap bit
  counts as first (the lowest, for the smallest rank). The key order
  `{class, e.rank}`.
* **The interface:** valid/ready handshake, one operation per three cycles
  with enqueue before dequeue, rank-only enqueue, the empty-class dequeue
  result, synchronous reset and the clearing sweep.
* **Only per-class pops.** The tree could also find the global minimum across
  classes, as a plain PIFO would, but the scheduler never needs that.

Not included: the classifier, the rank calculators and the packet buffer that
surround the scheduler in a switch, and the process SRAM macros. The RAMs here
are arrays.

## Files

| file | contents |
|------|----------|
| `rtl/uifo_pkg.sv` | default sizes, operation codes |
| `rtl/ugpq.sv` | class queue |
| `rtl/ffs_lsb.sv` | find-first-set of one bitmap word |
| `rtl/mpqg.sv` | element store (bitmap tree, counters, linked lists) |
| `rtl/uifo.sv` | scheduler top |
| `tb/uifo_ref_pkg.sv` | reference model of the scheduling rules |
| `tb/tb_ugpq.sv`, `tb/tb_mpqg.sv` | block testbenches (reduced sizes) |
| `tb/tb_uifo.sv` | scheduler, 16 classes / 128 elements, directed + random |
| `tb/tb_uifo_full.sv` | scheduler at the default size, directed + 20000 random operations |
| `tb/uifo_runner.sv`, `tb/tb_uifo_configs.sv` | scheduler built as 64 classes / 4096 elements / 64 element ranks and as 4096 classes / 65536 elements / 16 element ranks, side by side |
| `tb/tb_uifo_policies.sv` | pFabric, priority flow control and deficit round robin programmed onto the scheduler |

Every testbench compares against values computed independently of the RTL. It
checks that each operation takes three cycles, and it prints
`TB_RESULT checks=N failures=M`. The scheduler testbenches also count each
mechanism (new class, Update-In, Hold, rank-only update, reordering of
buffered packets, class pop, empty head class, empty scheduler, simultaneous
requests) and fail if one never occurred.

`tb_uifo_policies` checks policies rather than the scheduler's own rules. The
testbench acts as rank calculator and dequeue controller, and checks what each
policy promises:

* pFabric: every packet sent belongs to a flow with the smallest announced
  remaining size.
* Flow control: nothing leaves a paused queue, and the link idles only when
  every queue with packets is paused.
* Deficit round robin: the packet sequence is identical to a textbook model.

For deficit round robin the controller places a class at the tail with a rank
taken from an increasing counter. A rank computed as "number of queued
classes + 1" can tie with classes already queued, and then lands in the
middle of the list instead of at the tail.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/uifo_pkg.sv tb/uifo_ref_pkg.sv rtl/ffs_lsb.sv rtl/mpqg.sv rtl/ugpq.sv \
  rtl/uifo.sv tb/tb_uifo_full.sv --top-module tb_uifo_full -Mdir obj -o sim
./obj/sim
```

For the other testbenches, swap the last source file and `--top-module`. The
block testbenches need only the package, the block and `ffs_lsb.sv`. The
full-size run, including the 65536-cycle clearing sweep, takes about a second.
