# RoboCore: a collision-detection unit for a robotics GPU

A motion planner spends most of its time asking one question over and over:
*does the robot, in this pose, touch anything?* The robot is covered by
oriented bounding boxes (OBBs), one per link and pose. The environment is an
occupancy octree built from a point cloud. On a normal GPU this query runs as
CUDA code. Every thread walks the tree on its own path, so warps diverge and
memory accesses are scattered.

RoboCore is a fixed unit next to each streaming multiprocessor (SM). It takes
over the tree walk in the way a ray-tracing unit takes over BVH traversal.
Each GPU thread hands over one query: an OBB plus the root of the octree. The
unit returns one bit per thread: collides or free. The design has two halves:

* **Traversal front end.** It keeps per-thread state, picks which thread
  fetches a node next, fetches nodes from memory, and splits each node into
  its occupied octants.
* **Intersection back end.** This is a small dataflow machine of
  programmable *OP units* joined by an interconnect. Each (query, octant) pair
  becomes a packet that hops from unit to unit. Each hop runs one micro-op
  (uop) of an OBB-vs-cube test.

Two features make the back end fit collision detection:

* **Conditional returns.** A compare uop that finds a separating axis sends
  the packet straight to the RETURN unit, so the other axes are skipped.
* **Collision OP units.** A whole separating-axis test runs as one uop
  instead of a string of dot products.

This repository holds synthesizable SystemVerilog for that unit in the
configuration with both features. It also holds self-checking testbenches for
every block and an end-to-end test. The end-to-end test compares every
query's answer with a software reference.

## 1. The query

An octree node covers a cube and splits it into eight octants. For each octant
the node records one of three states:

* empty;
* fully occupied (a *leaf*);
* partly occupied (an *internal* child, with its own node).

A query asks whether the OBB overlaps any leaf cube.

The walk is depth-first:

1. Pop a node from the thread's stack and fetch it.
2. For every occupied octant, run the OBB-vs-cube overlap test.
3. If an internal octant overlaps, push it on the stack.
4. If a leaf octant overlaps, the query has found a collision and stops.
5. If the stack runs empty, the query is collision-free.

The overlap test is the separating axis theorem (SAT) for two boxes. A cube
with centre `a` and half-size `h` and an OBB with centre `c`, half-extents
`e` and unit axes `u0 u1 u2` are disjoint exactly when, on one of 15 axes `L`,

    |T . L|  >  sum_i h |x_i . L|  +  sum_j e_j |u_j . L|,      T = c - a

The 15 axes are:

* the 3 world axes `x_i` (the cube's normals);
* the 3 OBB axes `u_j` (the OBB's normals);
* the 9 cross products `x_i x u_j` (edge against edge).

The left side is called `dist` below. The right side is called `rad`. The
test can stop at the first axis with `dist > rad`, and almost all tests do.
That early exit is where most of the speed comes from.

## 2. Block structure

```
              launch_*                                        res_*
                 |                                              ^
                 v                                              |
   +--------------------------------------------------------------+
   |                        warp_buffer                           |
   |  4 warps x 32 threads: OBB, traversal stack, pend/outst/hit  |
   +--------------------------------------------------------------+
      | ready mask      ^ pop          ^ OBB read    ^ push   ^ return
      v                 |              |             |        |
 warp_scheduler --------+              |             |        |
      | grant                          |             |        |
      v                                |             |        |
 memory_scheduler --mem_req/mem_rsp--> L1 (outside)  |        |
      | node word + box                |             |        |
      v                                |             |        |
 node_decoder --child records--> ray_collector       |        |
                                       | packets     |        |
                                       v             |        |
                                 set_dispatch     rr_merge  rr_merge
                                  |  |  |  |         ^        ^
                                  v  v  v  v         |        |
 +-------------------------------------------------------------+
 |  op_set x NSETS (4), each:                                  |
 |    op_interconnect: 10 destination ports, round-robin       |
 |    ADDSUB CROSS MINMAX DOT MUL CMP Box-Normal Edge x Edge   |
 |    (op_unit x 8, config regs + destination table each)      |
 |    PUSH and RETURN units  -------------------------------->  |
 +-------------------------------------------------------------+
```

There are four identical sets of intersection units. A packet stays in the
set it was sent to until its test ends. All sets get the same configuration
writes, so they all run the same program.

The source design does not give the exact connections. The connections above
are this design's choice, made to match its block list: warp buffer, warp
scheduler, memory scheduler with access queue and response FIFO, node
decoder, ray collector, interconnect and OP units, with four sets of the
latter.

### 2.1 Warp buffer (`warp_buffer`)

The warp buffer holds `WARPS`=4 warps of `LANES`=32 threads. For each thread
it stores:

* the OBB (15 words);
* a traversal stack of `STACK_DEPTH`=64 entries. Each entry is a node address
  and the cube that node covers: centre and half-size.
* `pend`: the popped node's fetch and decode are not finished yet.
* `outst`: how many child tests of the current node are still in the back
  end.
* `hit`: a leaf overlapped, so the thread's answer is "collides".
* `ovf`: a push found the stack full.

A thread is **ready** when all of these hold:

* its slot is live and the thread is active;
* it has no hit and no overflow;
* nothing is in flight (`pend` = 0 and `outst` = 0);
* its stack is not empty.

So a thread has one node in the back end at a time. Its children are all
tested before its next pop.

A thread is **finished** when nothing is in flight and one of these holds:

* it has hit;
* it has overflowed;
* its stack is empty.

A warp is **done** when all 32 of its threads are finished. The buffer then
puts out one result cycle (`res_valid`) with:

* the warp's tag;
* a hit mask;
* an overflow mask.

Then it frees the slot.

A full stack is not an error. The thread stops and reports a collision. This
answer is safe for a planner, and `res_ovf` tells the host which lanes took
this path.

### 2.2 Warp scheduler (`warp_scheduler`)

The scheduler grants one ready thread per cycle, and only when the memory
access queue has room. Warps are served round-robin, starting after the
warp granted last. Inside a warp the lowest ready lane wins. The grant is
combinational. In the same cycle the warp buffer pops that thread's top
entry, and the memory scheduler queues the fetch.

### 2.3 Memory scheduler (`memory_scheduler`)

* **Access queue.** It has `QDEPTH`=8 entries of {tag, address} and feeds the
  memory port `mem_req_*`. The tag is `{warp, lane}`.
* **Box table.** For each thread it keeps the popped entry's cube. A node
  word does not hold its own cube.
* **Response FIFO.** It has 8 entries and pairs each returning node word with
  its thread's cube for the decoder.

Responses may come back in any order, because each one carries its tag.

### 2.4 Node decoder and node format (`node_decoder`)

A node is one 64-bit word. This layout is this design's own:

| bits    | field                                                           |
|---------|-----------------------------------------------------------------|
| `[7:0]`   | occupancy mask: bit k = octant k has something in it          |
| `[15:8]`  | leaf mask: bit k = octant k is fully occupied (no child node) |
| `[31:16]` | unused                                                        |
| `[63:32]` | address of the first child node                               |

**Octant coordinates.** Bits 0, 1 and 2 of the octant number k pick the upper
half of the cube in x, y and z. A child of a node with centre `c` and half
size `s` has half size `s/2`. Its centre is `c ± s/2` on each axis.

**Child addresses.** The occupied children are stored one after another in
octant order. The child at rank r among the occupied octants has address
`base + r`. Leaf octants also take an address slot, which the walk never
fetches.

**Timing.** When the decoder accepts a node, it tells the warp buffer how
many tests are coming (`dec_count` = popcount of the occupancy mask). From
the next cycle it puts out one child record per cycle, lowest octant first.
It accepts the next node only after the last child has gone.

### 2.5 Ray collector (`ray_collector`)

The ray collector builds one packet per child record:

* it reads the thread's OBB from the warp buffer;
* it adds the child's cube;
* it stamps the program's start PC and start port, which are set through
  configuration.

It also does **admission control**. Inside `robocore` its limit is loose:
2 × `NSETS` × `MAX_INFLIGHT` tests between the collector and the warp
buffer. The limit that matters is applied per set by the dispatcher
(section 3.5). Section 5 explains why it is needed.

## 3. The OP-unit network

### 3.1 Packets

A packet (`robocore_pkg::pkt_t`) carries:

* routing: warp, lane, the node-type bit (1 = leaf), node address, the PC of
  the uop to run next, and the destination port;
* 32 data words of 32 bits.

The data words are laid out by the collision program:

| words  | contents                                  |
|--------|-------------------------------------------|
| 0-2    | OBB centre `c`                            |
| 3-5    | OBB half-extents `e`                      |
| 6-14   | OBB axes `u0`, `u1`, `u2`                 |
| 15-17  | cube centre `a`                           |
| 18-20  | cube half-size `h` (the same value three times) |
| 21-23  | `T = c - a`                               |
| 24-25  | `dist`, `rad` of the current axis         |
| 26-31  | free scratch                              |

All values are signed fixed point Q16.16. The range is ±32768 with a
resolution of 1/65536. Products are rounded towards minus infinity.

### 3.2 OP unit (`op_unit`)

Every OP unit has the same frame:

```
input buffer -> input decoder -> compute (LAT stages) -> output buffer
                     ^                  |
               config register      destination table
               (one per PC)         {leaf, PC, cmp} -> {next PC, next port}
```

The input decoder reads the unit's config register for the packet's PC. The
register holds a sub-op, source word indices A and B, a destination word
index and an axis number. The compute stage writes its result into the
packet.

The destination table holds 256 entries, indexed by
`{node type, PC, compare result}`. The lookup gives the next PC and the next
port, and both are written into the packet. Because the node type is part of
the index, leaf and internal octants can take different paths through the
same program. That is how the last uop sends a leaf to RETURN and an internal
node to PUSH.

The compute kinds are:

| unit        | operation (3-vectors unless noted)                                        |
|-------------|---------------------------------------------------------------------------|
| ADDSUB      | A + B or A - B                                                            |
| CROSS       | A x B                                                                     |
| MINMAX      | min(A,B), max(A,B) or abs(A)                                              |
| DOT         | A . B (scalar)                                                            |
| MUL         | A0 * B0 (scalar)                                                          |
| CMP         | A0 > B0, or any(A > B); result selects the destination entry              |
| Box-Normal  | `dist`, `rad` for one of the 6 face axes                                  |
| Edge x Edge | `dist`, `rad` for one of the 9 cross-product axes                         |

The Box-Normal and Edge x Edge units each do one whole SAT axis. They read
`T`, `h` and the OBB from their fixed words and write `{dist, rad}` to the
destination word and the word after it.

* **Box-Normal (`box_normal_cu`).** Axes 0-2 are the world axes:
  `dist = |T_k|`, `rad = h + sum_j e_j |u_j[k]|`. Axes 3-5 are the OBB axes:
  `dist = |T . u|`, `rad = e + h * sum_i |u[i]|`.
* **Edge x Edge (`edge_edge_cu`).** It forms `L = x_i x u_j` by picking and
  negating components, without multipliers. It then computes `dist = |T . L|`
  and `rad = h (|L_x| + |L_y| + |L_z|) + sum_n e_n |u_n . L|`. An axis where
  `u_j` is parallel to `x_i` gives `L = 0`, so `dist = rad = 0`, and the
  compare says "not separated". That is the correct outcome.

**Timing.** A packet spends one cycle in the input buffer, `LAT` cycles in
compute and one cycle in the output buffer. `LAT` is 1 for the simple units.
For the two collision units it is `COLL_LAT`=4. A unit starts a packet only
if the output buffer will have room for it, counting the packets already in
the pipeline. So the pipeline itself never stalls.

### 3.3 PUSH and RETURN (`push_unit`, `return_unit`)

* **PUSH** turns a packet into a stack push for its thread. The pushed entry
  is the node address and the cube in words 15-18.
* **RETURN** ends one child test. Its config register for each PC holds a hit
  bit, so one program can have a "miss" return PC and a "hit" return PC.

Both units take one packet per cycle. Their output is registered, so it
appears two cycles after the packet is accepted. The output then waits for
`push_ready` / `ret_ready`, because the four sets share the warp buffer's
single push port and single completion port. While it waits, the unit's
input buffer fills and then pushes back into the interconnect.

### 3.4 Interconnect (`op_interconnect`)

The interconnect of a set has nine sources: the entry port (fed by the
dispatcher) and the eight compute
units. It has ten destinations, and the port numbers are in
`robocore_pkg::port_e`:

| port | unit       |
|------|------------|
| 0    | ADDSUB     |
| 1    | CROSS      |
| 2    | MINMAX     |
| 3    | DOT        |
| 4    | MUL        |
| 5    | CMP        |
| 6    | PUSH       |
| 7    | RETURN     |
| 8    | Box-Normal |
| 9    | Edge x Edge |

Each destination has its own round-robin arbiter and one output register. A
packet granted at a clock edge sits at its destination right after that edge.
Different destinations move in parallel.

### 3.5 Spreading work over the sets (`set_dispatch`, `op_set`, `rr_merge`)

`op_set` is one set: the interconnect, the eight compute units, PUSH and
RETURN. It reports `leave`, the number of its tests that reached PUSH or
RETURN in the cycle (0 to 2).

`set_dispatch` sits between the ray collector and the sets:

* It keeps a count of the tests inside each set: +1 when a packet goes in,
  −`leave` when tests end.
* A set is eligible while its count is below `MAX_INFLIGHT`=16.
* Each packet goes to the next eligible set after the last one used (round
  robin).
* If no set is eligible, the collector waits.

The choice of set does not look at the set's `in_ready`. Only the handshake
with the chosen set does. This keeps the valid/ready signals free of
combinational loops.

On the way back, two `rr_merge` instances join the four PUSH outputs and the
four RETURN outputs. Each merge passes one output per cycle into the warp
buffer, taking the sets in round-robin order. The sets that lose wait with
their output held.

## 4. The collision program

The testbench package (`make_collision_program` in `tb/robocore_tb_pkg.sv`)
loads this program. Nothing in the RTL fixes it.

| PC        | unit        | uop                                                                        |
|-----------|-------------|----------------------------------------------------------------------------|
| 0         | ADDSUB      | `T = c - a` (words 21-23)                                                  |
| 1 + 2k    | Box-Normal  | axis k, k = 0..5                                                           |
| 13 + 2m   | Edge x Edge | axis m, m = 0..8                                                           |
| even PCs  | CMP         | `dist > rad`? true: go to RETURN at PC 40 (miss). false: go to the next axis |
| last CMP  | CMP         | false: a leaf goes to RETURN at PC 41 (hit); an internal node goes to PUSH at PC 42 |

A cube that is far from the OBB costs 3 uops: T, one axis, and one compare.
A cube that overlaps costs 31 uops.

The programming model keeps its flexibility: any other test built from the
unit set can be loaded through the same tables.

## 5. Flow control and why there is an admission limit

Every block-to-block link uses valid/ready. A packet is never dropped; it
waits in a buffer.

The back end still has a loop in its dataflow. Every axis goes from the
collision unit to CMP and back, through bounded buffers. If too many packets
are inside, each unit's output buffer can fill with packets for the other
unit while its own input is full, and then nothing moves. Simulation shows
this lock-up with 4-entry buffers once roughly 18 packets are in the loop.

The dispatcher prevents it. It sends no more than `MAX_INFLIGHT`=16 tests to
one set until some finish. The limit must stay below the total buffering of
the tightest loop. Buffer depths and the limit are parameters; change them
together. Completions cannot block the loop for long: the PUSH and RETURN
units have their own buffers, and the merges serve every set in turn.

## 6. Using the unit

### 6.1 Configuration (`cfg`)

`cfg_t` is one write per cycle, with these fields:

* `valid`;
* `unit`: the port number;
* `tbl`: which table to write;
* `idx`: 8 bits;
* `data`: 22 bits.

The values of `tbl`:

| `tbl`      | `idx`                  | `data`                                                    |
|------------|------------------------|-----------------------------------------------------------|
| `CT_UCFG`  | PC                     | `ucfg_t` `{sub[2:0], src_a[4:0], src_b[4:0], dst[4:0], axis[3:0]}` |
| `CT_DEST`  | `{leaf, PC[5:0], cmp}` | `dest_ent_t` `{valid, next_pc[5:0], dest[3:0]}`           |
| `CT_START` | any                    | `{start_pc[5:0], start_port[3:0]}` (`unit` ignored)       |

A packet that finds no valid destination entry sets the sticky `err` output.

### 6.2 Launching a warp

A warp is sent one lane per cycle on `launch_*`. Each beat carries:

* `lane`;
* `active`;
* `obb`;
* `root`: the root node address and the root cube;
* an 8-bit `tag`.

Mark the first beat with `launch_first` and the last with `launch_last`. The
first beat waits (`launch_ready` low) until a warp slot is free; the later
beats are always accepted. Lanes that are not sent stay inactive and count as
finished. Threads start walking as soon as their beat is accepted.

### 6.3 Memory port

* **Requests.** `mem_req_valid/ready/addr/tag` asks for one 64-bit node word.
  The address counts in node words.
* **Responses.** `mem_rsp_valid/ready/tag/data` returns the word with the
  request's 7-bit tag.

Any latency is allowed, and responses may come back in any order.

### 6.4 Results

`res_valid` is high for one cycle per finished warp and comes with:

* `res_tag`;
* `res_hit[31:0]`: 1 = collides, or overflowed;
* `res_ovf[31:0]`: 1 = the lane's stack overflowed.

Warps finish in any order. `idle` is high when no slot is busy and no set
holds a packet. `err` is the OR of the sets' table-miss flags.

Two free-running 32-bit counters report work done since reset:
`stat_nodes` counts node fetches and `stat_queries` counts active queries
launched. Read them before and after a kernel. The ratio of the differences
is the average number of nodes one query visited. A driver can use that
number to decide whether the next iteration of a planning loop should run
on this unit or on the ordinary GPU cores. Short walks, for example when
most poses collide early, may not pay for the launch cost.

## 7. Parameters

The defaults of `robocore`:

| parameter      | default | meaning                                             | origin                  |
|----------------|---------|-----------------------------------------------------|-------------------------|
| `WARPS`        | 4       | warp slots in the warp buffer                       | source design (4 warps) |
| `LANES`        | 32      | threads per warp                                    | GPU warp width          |
| `STACK_DEPTH`  | 64      | traversal stack entries per thread                  | this design             |
| `COLL_LAT`     | 4       | pipeline stages of the collision units              | this design             |
| `QDEPTH`       | 8       | memory access queue and response FIFO depth         | this design             |
| `MAX_INFLIGHT` | 16      | child tests allowed in one set at once              | this design             |
| `NSETS`        | 4       | sets of intersection units                          | source design (4 sets)  |

A depth-first walk pushes at most 7 siblings per level. So a tree of depth D
needs `7*D + 1` stack entries, and 64 entries cover trees up to depth 9
(512³ voxels). Deeper trees still run, but a thread that overflows reports a
collision.

The packet width is fixed by the package (`NW`=32 words of 32 bits).

At the defaults, the traversal stacks (128 threads × 64 × 160 bits) and the
OBB store make up about 1.5 Mbit of memory, held as plain arrays. A real
implementation would map them to SRAM macros.

## 8. Departures from the source design, and what is not here

**How the four sets share the front end.** The source gives four sets of
intersection units per RoboCore, but not how they are fed or drained. Here
each set has its own interconnect. One dispatcher feeds the sets, and two
merges drain them into the warp buffer, one completion of each kind per
cycle. A design that let the warp buffer take four pushes and four returns
per cycle would give more throughput, at the cost of more write ports.

**No reciprocal (RCP) unit.** The OBB-vs-octree test does not need it.

**Surrounding GPU not included.** The SM, the caches, L2, DRAM and the
on-chip network are outside the unit. The testbench models the L1 side with
a memory that has random latency and returns out of order.

**Not built: alternatives the source only compares against.** These are
predication, grouping the uops into clusters, and running the test as
general-purpose uops without the collision units.

**Only OBB-vs-octree queries.** Ball queries for point-cloud networks run on
the same kind of unit in the source. They need sphere tests over a BVH and
per-query neighbour lists, which this node decoder and result path do not
provide.

**This design's own choices.** The source leaves the following open, so they
are chosen here:

* the number format;
* the node word layout;
* all latencies and buffer depths;
* the stack-overflow rule;
* the admission limit and how work is spread over the sets;
* the launch and result protocols.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench               | what it checks                                                                   |
|-------------------------|----------------------------------------------------------------------------------|
| `tb_sync_fifo`          | order, full/empty, count, under random traffic                                   |
| `tb_op_dest_table`      | writes, lookups, reset state, the branch/return table entries                    |
| `tb_box_normal_cu`      | all 6 axes against real arithmetic on exact binary grids                         |
| `tb_edge_edge_cu`       | all 9 axes, hand cases and random                                                |
| `tb_op_unit`            | all eight kinds, both CMP outcomes, latency `LAT + 2`, back-pressure, table miss |
| `tb_push_unit`, `tb_return_unit` | contents, order, 2-cycle latency, per-PC hit bits, output back-pressure |
| `tb_op_interconnect`    | delivery, per-source order, 1-cycle transfer, round-robin fairness               |
| `tb_warp_scheduler`     | grant against a reference model every cycle                                      |
| `tb_memory_scheduler`   | out-of-order memory, box pairing, queue capacity                                 |
| `tb_node_decoder`       | child records, octant geometry, one child per cycle                              |
| `tb_ray_collector`      | packet contents, admission limit                                                 |
| `tb_set_dispatch`       | round robin over eligible sets, per-set limit, counts, against a model           |
| `tb_op_set`             | the collision program in one set against the SAT reference, with back-pressure   |
| `tb_warp_buffer`        | full thread-state reference model: stacks, hits, overflows, results              |
| `tb_robocore`           | end to end at reduced stack depth; every mechanism must occur                    |
| `tb_robocore_full`      | end to end with every parameter at its default                                   |

Random data sits on binary grids: OBB centres on 1/64, extents on 1/16, axes
on 1/64. The real-number references are then exact in Q16.16. The end-to-end
tests build a random octree, run thousands of queries and compare each lane
with a brute-force SAT check of the OBB against every leaf cube. The memory
model behind them (`tb_node_mem`) has random latency, out-of-order returns
and random back-pressure.

`tb_robocore` counts each of the following and fails if any count is zero:

* early returns;
* hit returns;
* pushes;
* stack overflows;
* interconnect stalls;
* memory stalls;
* launches that had to wait for a free slot;
* dispatches that waited because every set was at its limit;
* PUSH or RETURN outputs that waited for the merge;
* packets sent to each of the four sets.

Both end-to-end tests also check the two statistics counters against their
own counts of fetches and launches.

`tb_robocore_full` counts the same, except dispatch waits and stack
overflows, which its sizes do not reach.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/robocore_pkg.sv tb/robocore_tb_pkg.sv rtl/*.sv tb/tb_node_mem.sv \
    tb/tb_robocore.sv --top-module tb_robocore -Mdir obj_tb_robocore
./obj_tb_robocore/Vtb_robocore
```

For a block testbench, replace the last file and the top-module name. It
does not need `tb_node_mem.sv`.

## 10. File map

* `rtl/robocore_pkg.sv`: widths, packet and configuration types, port
  numbers, fixed-point helpers.
* `rtl/robocore.sv`: the top.
* `rtl/warp_buffer.sv`, `rtl/warp_scheduler.sv`, `rtl/memory_scheduler.sv`,
  `rtl/node_decoder.sv`, `rtl/ray_collector.sv`: the traversal front end.
* `rtl/set_dispatch.sv`, `rtl/op_set.sv`, `rtl/rr_merge.sv`: the four sets,
  and how work goes in and completions come out.
* `rtl/op_interconnect.sv`, `rtl/op_unit.sv`, `rtl/op_dest_table.sv`,
  `rtl/box_normal_cu.sv`, `rtl/edge_edge_cu.sv`, `rtl/push_unit.sv`,
  `rtl/return_unit.sv`: the intersection back end.
* `rtl/sync_fifo.sv`: the buffer used throughout.
* `tb/robocore_tb_pkg.sv`: octree builder, SAT reference, collision program.
* `tb/tb_node_mem.sv`: memory model.
* `tb/tb_*.sv`: testbenches.
