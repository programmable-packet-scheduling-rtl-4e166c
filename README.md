# A programmable packet scheduler built from PIFO blocks

A switch scheduler usually offers a fixed menu of algorithms: strict priority,
deficit round robin, perhaps a token-bucket shaper. This design instead gives
one primitive, the **PIFO** (push-in first-out queue), out of which many
scheduling algorithms can be built. A PIFO lets an element be pushed anywhere
by its *rank* and always hands out the element of lowest rank. Equal ranks
leave in arrival order. Whatever computes the ranks decides the algorithm:
rank = arrival time gives FIFO, rank = virtual finish time gives WFQ, and so on.
Hierarchies (say, fair sharing between classes and then between flows within
each class) become trees of PIFOs. Each node's PIFO holds either packets or
*references* to child PIFOs. Rate limiting (shaping) is a PIFO whose rank is
the wall-clock time at which an element may be released to its parent.

The SystemVerilog here implements the scheduler hardware: PIFO blocks joined
in a full mesh and configured by next-hop tables. The units that compute ranks
(small programmable ALUs, "atoms", run by a compiler) are not included. Ranks
arrive already computed on the mesh's enqueue ports.

## The parts

| module | what it is |
|---|---|
| `pifo_pkg` | widths, sizes and the element, operation and table-entry structs |
| `flow_scheduler` | sorted flip-flop array of flow heads, 2 pushes + 1 pop per cycle, 2-stage pipeline |
| `rank_store` | per-flow FIFOs in one shared memory: linked lists with a free list |
| `next_hop_lut` | per-block table saying what to do after a dequeue of each logical PIFO |
| `pifo_block` | flow scheduler + rank store + next-hop table + output FIFO |
| `pifo_mesh` | top level: five blocks, full-mesh arbitration |

Default sizes: 16-bit ranks and 32-bit metadata. Each block has 256 logical
PIFOs sharing 1024 flows, and a rank store of 65,536 elements. The mesh has
five blocks. These are the baseline sizes the design was proposed with, and
they are the parameter defaults in `pifo_pkg`.

## Why a PIFO block is a flow scheduler plus a rank store

Sorting every buffered packet (tens of thousands) in parallel comparators is
too expensive. Almost every practical algorithm, though, serves the packets
of one flow in FIFO order, so ranks only increase within a flow. Then only
each flow's *head* element can ever be the minimum. A PIFO block therefore
sorts only the flow heads, one per backlogged flow, in the **flow scheduler**.
The elements behind each head wait in a plain per-flow FIFO, the **rank store**.

* **Enqueue.** The enqueue carries a flow ID. If the flow is empty, the
  element *bypasses* the rank store and goes straight into the flow scheduler.
  Otherwise it is appended to the flow's FIFO in the rank store.
* **Dequeue.** The dequeue names a logical PIFO. The flow scheduler removes the
  lowest-ranked head of that logical PIFO. If that flow has more elements,
  the next one is read from the rank store and *reinserted* into the flow
  scheduler.

This is an exact PIFO only when ranks rise within each flow. That is the
contract the rank computation must keep.

Several **logical PIFOs** share one block. The flow scheduler keeps all heads
in one array sorted by rank, whatever their logical PIFO. A dequeue for logical
PIFO *L* looks for the first entry tagged *L*.

## The flow scheduler pipeline (the hard part)

`flow_scheduler` has `N` entries (default 1024) and accepts up to two pushes
(an enqueue's bypass and a reinsert) and one pop per cycle:

* **Stage 1** compares the request against every entry at once. For a push the
  comparison is `rank <= r`; for a pop it is "logical PIFO equals L". A
  priority encoder then turns the bit mask into an index.
* **Stage 2** shifts the array to insert at, or remove from, those indices.
  Each new entry `i` is one of: a pushed element, or old entry `i-2 .. i+1`.

The snag is that stage 1 of cycle *t+1* reads the array before stage 2 of
cycle *t* has written it back. The published description stops at "the two
stages are pipelined". This design resolves the hazard in stage 2 by
correcting the stale indices with a record of the previous cycle's write-back:

* A push index is a *count* of entries with `rank <= r`. The previous pop
  lowers that count by one if it removed an entry with rank `<= r`. Each
  previous push with rank `<= r` raises it by one. Because it is a count and
  not a position, no further case analysis is needed.
* A pop's stale index is the first match in the old array. Its position is
  moved by the previous cycle's removal and insertions. The elements inserted
  in the previous cycle are not in the stale array at all, so stage 2 also
  tests them. The pop then takes whichever candidate sits lowest.
* Ties: an element goes after every element of equal rank (FIFO among ties).
  When both pushes of one cycle have the same rank, the reinsert goes first.

What this means at the ports: a pop issued in cycle *t* returns its result
combinationally in cycle *t+1* (`deq_valid`, `deq_found`, `deq_elem`). A pop
sees every push issued up to cycle *t-1*. Two pops that could take the same
element must be at least two cycles apart, and an assertion checks this.

**Shaping pops.** With `pop_shaping` set, stage 1 instead looks for the first
element flagged *shaping* whose rank (a release time) is `<= now`.

## The rank store

`rank_store` keeps all flows' FIFOs in a single memory of `DEPTH` entries
(default 65,536). Each entry holds a rank and metadata, and a next-pointer
memory links the entries into one list per flow. Each flow also has a head,
a tail and a count. Freed entries go back through a free-list FIFO.
At reset a counter hands out never-used addresses, so reset does not have to
fill the free list. A pop returns the flow's oldest element one cycle later.
This is the SRAM access slot in the three-cycle budget below. A pop of an
empty flow in the same cycle as a push to it returns the pushed element.

## The PIFO block and its timing rules

`pifo_block` ties these together:

* **One enqueue and one dequeue per cycle.** The enqueue is always taken. It
  bypasses the rank store if its flow is empty (a per-flow count is kept).
  Otherwise it is appended to the rank store, or **dropped** if the rank store
  is full. Drops are counted in `drops`. Real buffer management (per-flow
  thresholds) is expected to happen before the scheduler.
* **The three-cycle rule.** A pop takes two cycles, and the rank store read
  for the reinsert takes one more. So the same logical PIFO may be dequeued
  only once every three cycles. `deq_ready` is low for a request to a logical
  PIFO dequeued in either of the last two cycles. Different logical PIFOs can
  be dequeued every cycle. At 1 GHz this is more than the one dequeue in five
  cycles that a 100 Gbit/s port needs for 64-byte packets.
* **Shaping PIFOs get best-effort service.** A logical PIFO marked *shaping*
  in the next-hop table is never dequeued from outside. Instead, in every
  cycle with no external dequeue, the block pops the earliest-due shaping
  element, at most once every three cycles.
* **Next hop.** After a pop, the dequeued logical PIFO indexes the next-hop
  table, and the resulting action goes into a four-entry output FIFO:
  * *transmit*: the element's metadata names a packet, which leaves on `tx`;
  * *dequeue*: dequeue a logical PIFO in another block. This is how a root
    PIFO's reference leads to a child. The child ID comes from the table, or
    from the low metadata bits if `lp_from_meta` is set;
  * *enqueue*: enqueue into another block. This is how a shaping PIFO releases
    an element into its parent. The new rank is taken from the metadata's low
    bits, and the parent's logical PIFO, flow and metadata come from the
    table.

  New dequeues are refused while the output FIFO could overflow. The first
  output appears two cycles after its dequeue.

## The mesh

`pifo_mesh` holds five blocks in a full mesh. Any block's output FIFO can
reach any other block's enqueue or dequeue port. A scheduling tree is mapped
with one tree level per block. A level that needs more than one enqueue
(or dequeue) per cycle from other levels gets an extra block. For example, a
two-class hierarchy with a token-bucket shaper on one class uses three blocks:
root, leaves, and a block holding only the shaper.

Arbitration, per target block and cycle:

* **Enqueue port.** The external enqueue (whose rank came from a scheduling
  computation) beats shaping releases from other blocks. A release that
  loses stays in its FIFO and retries (`ev_release_stall`). This is what
  best-effort service for shaping means.
* **Dequeue port.** A dequeue from another block (a root-to-leaf walk under
  way, `ev_walk`) beats a new dequeue from the link (`ev_link_stall`,
  `ext_deq_ready` low). Walks beating link dequeues, and lower block numbers
  winning among blocks, are this design's own choices.

Configuration goes through `cfg_*`, one next-hop entry per cycle.

All logic uses one clock and a synchronous active-low reset.

## Departures from the original design and open points

* Rank computation (the atom pipelines) is not implemented. Ranks are inputs.
* The flow scheduler's hazard handling between its stages is this design's
  own (see above). So are the tie rule between two simultaneous pushes and
  the encoding of next-hop entries.
* The output FIFO, the drop-on-full policy, the walk-before-link priority and
  the one-shaping-pop-per-three-cycles limit are choices made here.
* Memories are plain arrays. No SRAM macros are instantiated, and no timing
  or area has been measured.
* The default flow count is 1024. The same RTL takes `N_FLOWS = 2048` (flow
  IDs widen automatically), but that size was not simulated here.

## Testbenches

Each testbench is self-checking, prints `TB_RESULT checks=N failures=M`, and
has a watchdog.

* `tb_flow_scheduler`: 16 entries against a sorted-list model. Covers ties,
  double pushes, shaping pops and empty pops. Checks the one-cycle pop
  latency.
* `tb_rank_store`: 32 entries and 8 flows against per-flow queues. Covers the
  store filling up, address recycling and the same-cycle bypass.
* `tb_next_hop_lut`: the table against a model array.
* `tb_pifo_block`: one block at 16/16 entries, with transmitting, referencing
  and shaping logical PIFOs. Checks output order per logical PIFO, empty
  dequeues, release times, the three-cycle rule, next-hop fields, the
  two-cycle output latency and drops.
* `tb_pifo_mesh`: the whole mesh at 16/16 entries per block, running a
  two-level hierarchy with a shaped class (root, leaves, shaper block). It
  counts releases, release stalls, walks, link stalls, bypasses, reinserts,
  drops, shaping outputs and transmits, and fails if any count stays at zero.
* `tb_pifo_mesh_full`: the mesh at its default sizes. It runs one complete
  two-level schedule of eight packets end to end.

To simulate one, e.g. the mesh:

```
verilator --binary --timing --assert rtl/pifo_pkg.sv rtl/flow_scheduler.sv \
  rtl/rank_store.sv rtl/next_hop_lut.sv rtl/pifo_block.sv rtl/pifo_mesh.sv \
  tb/tb_pifo_mesh.sv --top-module tb_pifo_mesh
./obj_dir/Vtb_pifo_mesh
```

Each run takes seconds. The default-size mesh compiles in about a quarter of a
minute.
