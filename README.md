# OMU: an OctoMap occupancy-mapping accelerator in SystemVerilog

Robots keep a 3D map of which parts of space are occupied, which are free and
which are still unknown. OctoMap stores that map as an octree: space is cut
into eight octants, each octant into eight more, down to 16 levels. Each leaf
holds the log-odds `L = log(p / (1 - p))` that its voxel is occupied. Each
sensor observation adds a constant to the log-odds of one leaf. Each parent
holds the maximum of its children. Eight equal leaf children are pruned into
their parent, and a pruned leaf is expanded again when one of its voxels
changes.

On a CPU this is slow, and most of the time goes into the pruning step. That
step has to visit all eight children of a node, and they sit at scattered
addresses in memory. The OMU accelerator attacks this in three ways:

1. **Eight PEs.** The tree is split by its first-level branch into eight
   independent subtrees, one per processing element (PE). Updates to
   different subtrees never depend on each other, so eight run at once.
2. **Eight banks per PE.** The eight children of a node sit in the same row
   of eight memory banks. A single cycle reads or writes all of them.
3. **A prune address manager.** It keeps the rows freed by pruning on a
   stack and hands them out again when a branch grows, so the banks stay
   densely used.

This repository is a synthesizable SystemVerilog model of that architecture,
written from its published description (Jia et al., "OMU: A Probabilistic 3D
Occupancy Mapping Accelerator for Real-time OctoMap at the Edge"). The
partitioning, bank organisation, 64-bit node format, status codes, bank and
PE sizes, and the stack-based pointer recycling follow that description. The
publication gives no cycle-level schedule, handshakes, number formats,
register map, ray-casting algorithm or queue sizes, so those are choices made
here. They are listed in [Departures and choices](#departures-and-choices).

## How a PE stores its subtree

Every node is one 64-bit word (`omu_pkg::node_t`):

| bits    | field | meaning |
|---------|-------|---------|
| [63:32] | `ptr`  | row that holds this node's eight children |
| [31:16] | `tags` | 2-bit status of each child, child *i* in bits `2i+1:2i` |
| [15:0]  | `prob` | this node's log-odds, signed, 10 fractional bits |

Status codes: `00` unknown, `01` occupied, `10` free, `11` inner node (has
children).

A PE has eight banks (`tree_mem`) of 4096 x 64 bits, or 32 kB each and
256 kB per PE. Child *i* of a node lives in bank *i*, in the row named by the
parent's `ptr`. All eight children therefore share one row address
(`addr_gen`), and one access touches all eight.

The root of a PE's subtree is the depth-1 node of the whole tree. It sits in
row 0 of bank 0. Its own status, which in every other node is stored in the
parent's tags, is kept in a register. Row 0 of banks 1 to 7 is never used.
The depth-0 root of the whole map sits above the eight PEs and is not
stored: the top level derives it at any time from the eight PE roots, with
the same parent rule as inside a PE (maximum log-odds of the existing
children, a leaf when all eight are equal leaves).
The status of a node is stored in its parent, so a walk down the tree always
knows, before reading a child row, whether that row exists.

Example: a node at depth *d* with `ptr = 37` and tags `..11..` for child 3.
Child 3 is an inner node stored at bank 3, row 37, and its own `ptr` names
the row of its children.

## A voxel update, cycle by cycle (`omu_pe`)

An update carries a 48-bit key (16 bits per axis) and a hit/miss flag. At
depth *d*, the branch taken is `{z[15-d], y[15-d], x[15-d]}` (`child_id`).
At depth 0 this selects the PE.

**Descent**, from depth 1 to the leaf at depth 16:

- *Inner node:* the PE reads the children row in all eight banks (1 cycle).
  It then selects the child on the path and takes its status from the
  parent's tags (1 cycle). It saves the row and the parent's tags for the way
  back up.
- *Node that is not inner* (unknown, or a pruned occupied/free leaf): the PE
  **expands** it in one cycle. It takes a row from the prune address manager
  and writes all eight children at once. New children are unknown with
  log-odds 0. A pruned leaf gives its log-odds and status to all eight
  children, so the map keeps its meaning.

**Leaf:** `L = clamp(L + hit)` or `clamp(L + miss)` (`prob_update`). A leaf
that did not exist starts from 0. The leaf becomes occupied if `L >= 0` and
free otherwise.

**Ascent**, from depth 15 back to 1, two cycles per level:

- The PE re-reads the children row and substitutes the child it just updated.
- The parent's log-odds becomes the maximum over its existing children.
- If all eight children are leaves (occupied or free) with identical
  log-odds, they are **pruned**. The row goes to the prune address manager,
  and the parent becomes a leaf with that value.
- Otherwise the PE writes back only the changed child and keeps the parent
  inner.
- Last, it writes the subtree root.

Timing: an update whose path already exists takes **65 cycles** (5 overhead
+ 2 x 15 down + 2 x 15 up). An expanded level costs 1 cycle instead of 2. A
query takes **34 cycles**. A PE runs one walk at a time, and a waiting query
goes ahead of a waiting update.

Clamping makes leaves saturate. Saturated leaves become equal, and equal
leaves are what let pruning compress the map. Because this model applies
every update, a voxel already at the clamp is expanded, updated to the same
value and pruned again. The full-system test shows about as many prunes as
expansions for this reason. OctoMap's software skips such updates; the
publication does not say whether the accelerator does.

## Recycling rows (`prune_addr_mgr`)

Pruning frees a whole row (eight node slots) at a time, and expansion needs a
whole row. The manager is a stack: a top-of-stack register above an array.

- `push` stores a pruned row.
- `free_ptr` always shows the row the next expansion gets: the stack top, or
  the next row never used yet if the stack is empty.
- `pop` takes that row.
- A push and a pop in the same cycle are allowed. The pop takes the old top,
  and the pushed row becomes the new top.

The stack holds 4095 entries, one for every row except row 0, so it cannot
overflow. When no row is left, `free_valid` drops. The PE then abandons the
update and raises a sticky `oom` flag (visible in `STATUS[15:8]`). Rows
already taken for that update on its way down are lost.

## From sensor points to voxel updates

`ray_cast` takes a point key and the sensor-origin key. It walks the straight
line of voxels between them with an integer 3D Bresenham step, one voxel per
cycle:

- With *N* the largest per-axis distance, it emits *N* free voxels starting
  at the origin.
- It then emits the point itself as one occupied voxel.

Voxels shared by several rays are updated once per ray. There is no
de-duplication.

Free and occupied voxels go into two FIFOs (`voxel_fifo`, 16 entries each).
The `voxel_scheduler` looks at both heads. It sends a head to the PE named
by the head's first-level branch, provided that PE is idle. If both heads can
go, it alternates between the queues. If neither can, it counts a stall.
Updates from one queue reach a PE in order.

## Queries (`voxel_query`)

A query key enters an 8-entry queue. It is sent to the PE that owns the key.
That PE walks down without writing and returns the log-odds of the deepest
node on the path that exists. That node is the leaf, or a pruned ancestor
that stands for it. It returns `found = 0` if the path ends at an unknown
node. The answer is picked from the eight PE buses and classified:

- *occupied* if `L >= OCC_THR`
- *free* if `L <= FREE_THR`
- *unknown* otherwise, or if nothing was found

Only one query is in flight at a time.

## Host interface (`omu_ctrl`)

The host uses an AXI4-Lite slave with 32-bit registers. Log-odds values are
16-bit signed with 10 fractional bits, in bits [15:0].

| addr | name | access | content |
|------|------|--------|---------|
| 0x00 | STATUS | RO | [0] busy, [1] result waiting, [15:8] PE out of memory |
| 0x04 | HIT | RW | added on an occupied observation (reset 867 = 0.847) |
| 0x08 | MISS | RW | added on a free observation (reset -415 = -0.405) |
| 0x0C | CLAMP_MIN | RW | reset -2040 = -1.992 |
| 0x10 | CLAMP_MAX | RW | reset 3560 = 3.476 |
| 0x14 | OCC_THR | RW | reset 0 |
| 0x18 | FREE_THR | RW | reset -1 |
| 0x1C / 0x20 | ORIGIN_XY / ORIGIN_Z | RW | sensor origin key (x [15:0], y [31:16]; z) |
| 0x24 / 0x28 | POINT_XY / POINT_Z | RW / WO | writing POINT_Z sends the point to ray casting |
| 0x2C / 0x30 | QUERY_XY / QUERY_Z | RW / WO | writing QUERY_Z posts the query |
| 0x34 | RESULT | RO, pops | [31] valid, [30] found, [17:16] status, [15:0] log-odds |
| 0x38..0x48 | counters | RO | updates, prunes, expansions, stall cycles, recycled rows |
| 0x4C | ROOT | RO | depth-0 node: [17:16] status, [15:0] log-odds |

The reset values are OctoMap's usual sensor model: hit 0.7, miss 0.4,
clamping 0.12 and 0.97.

Points and queries are voxel keys; the host converts metric coordinates to
keys. A write to POINT_Z or QUERY_Z gets no write response until the unit
behind it accepts the data, so a full pipeline slows the host down. An
unmapped address answers SLVERR.

A session looks like this:

1. Write the origin.
2. For each point, write POINT_XY, then POINT_Z.
3. Poll STATUS[0] until the accelerator is idle.
4. Write QUERY_XY, then QUERY_Z.
5. Read RESULT until bit 31 is set.

## Sizes and throughput

| parameter | value | from |
|-----------|-------|------|
| PEs | 8 | published |
| banks per PE | 8 x 4096 x 64 bit (32 kB) | published |
| tree depth / key bits per axis | 16 | published |
| node word | 64 bit: pointer 32, tags 16, log-odds 16 | published |
| log-odds format | Q5.10 signed | chosen |
| free / occupied / query queue | 16 / 16 / 8 entries | chosen |
| prune stack | 4095 x 12 bit per PE | chosen |

At the published 1 GHz clock, 65 cycles per update per PE gives at best
8 / 65 ns, or about 123 million updates per second over 8 PEs. The published
run times are 1.31 s, 14.4 s and 6.5 s. The three OctoMap benchmark maps
(1.01e8, 1.03e9 and 4.49e8 voxel updates) would then take at least 0.82 s,
8.4 s and 3.65 s.

That best case needs the updates to spread evenly over the eight PEs. A
sensor sitting inside one octant sends most of its rays to one PE. Even a
sensor at the key midpoint, whose rays reach all eight PEs, does not get
there: one ray produces a run of free voxels that all belong to the same
first-level branch, so the head of the free queue waits on one busy PE while
the other seven idle. In the corridor workload test (four scans of 770
points, 62,800 voxel updates) the average was 57 cycles per update, or about
17 million updates per second at 1 GHz, and the scheduler stalled in 98 % of
all cycles. At that rate the first benchmark map (1.01e8 updates) would take
about 5.8 s, against the published 1.31 s. Reaching the published rate needs
updates from several rays interleaved at the scheduler, which the published
block diagram does not show; this design keeps the single free queue and
single occupied queue it does show.

Each PE holds 4095 x 8 = 32,760 nodes, or 262,080 for the chip. The
publication does not give the node counts of its benchmark maps, so whether
they fit is not known here.

## Departures and choices

Follows the published design:

- eight PEs split by first-level branch
- eight child-parallel banks of 32 kB
- the 64-bit node layout and the status codes
- parent = maximum of its children
- pruning of equal children and expansion of pruned leaves
- a stack of pruned pointers with a separate top
- a voxel scheduler with branch ID check
- free and occupied voxel queues
- a query unit with a queue, a multiplexer and thresholds
- an AXI slave with configuration registers

Chosen here, because the publication does not specify it:

- the whole cycle schedule of a PE (2 cycles per level each way) and all
  handshakes
- the log-odds number format, the sensor-model values and the thresholds
- a leaf's status taken from the sign of its log-odds
- a parent's maximum taken over existing children only
- the never-used-row counter behind the stack, and the stack depth
- a depth-0 root that is computed from the PE roots rather than stored
- integer Bresenham ray casting on keys. OctoMap uses a floating-point walk,
  which can choose different voxels where a ray passes near a voxel corner.
- round-robin arbitration between the two queues, one query in flight, and
  query priority inside a PE
- AXI4-Lite rather than full AXI4, the register map and the event counters

Not built:

- The host CPU, DMA engine and shared memory. The accelerator is only an
  AXI slave here, and points are written through registers.
- The compiled SRAM macros. `tree_mem` is a plain array with single-port
  SRAM behaviour.
- Skipping of updates on a voxel already at the clamp.
- De-duplication of voxels across rays. The publication leaves it to a
  separate ray-casting accelerator.

## Files and simulation

`rtl/` holds the design:

- `omu_pkg`: types and constants
- `tree_mem`, `child_id`, `addr_gen`, `prob_update`, `prune_addr_mgr`: the
  parts of a PE
- `omu_pe`: the PE
- `voxel_fifo`, `ray_cast`, `voxel_scheduler`, `voxel_query`, `omu_ctrl`:
  the rest of the datapath and the host interface
- `omu_top`: the top level

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`. Highlights:

- `tb_omu_pe` compares a PE at full size against a reference map of every
  leaf. It covers the 65-cycle update latency, pruning one and two levels
  up, re-expansion into recycled rows, random traffic and filling the banks
  to out-of-memory, and checks the subtree root against the largest leaf.
- `tb_omu_top` runs the whole chip at its full default size (8 PEs,
  16 Mbit of banks) through the AXI port. It scans a moving wall, then checks
  every map voxel by query against its own model of ray casting and
  log-odds. It also fails if stalls, back-pressure, expansion, pruning, row
  reuse, a query during updates, or any of the three query answers never
  occurred. It runs in about 10 seconds.
- `tb_omu_corridor` is a workload test at full size: a generated corridor
  61 x 25 x 17 voxels scanned four times from a moving sensor. It checks
  every mapped voxel the same way and prints cycles per update and the
  update rate at 1 GHz. It runs in about 7 seconds.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl --top-module tb_omu_top \
          rtl/omu_pkg.sv tb/tb_omu_top.sv -o sim && ./obj_dir/sim
```

Replace `tb_omu_top` by any other testbench name. The package must come
first on the command line; `-y rtl` finds the other modules.
