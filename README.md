# Streaming dynamic BFS on a message-driven compute-cell mesh

This is synthesizable SystemVerilog for a chip that builds a graph while the
graph is being streamed in, and keeps a breadth-first search (BFS) result
current as edges arrive, with no recomputation from scratch. The chip is a
mesh of small **compute cells** (CCs). Each cell has its own memory, a small
engine and a router. Nothing is shared and there is no central controller. A
vertex lives in one cell's memory. Work moves to the data as **actions**:
one-flit active messages that name a target object, travel the mesh to the
cell that holds it, and run there. An action may change the object and send
new actions in turn. A streamed edge `u -> v` becomes an *insert-edge*
action sent to `u`. If `u` has a level, storing the edge makes `u` send a
*bfs* action to `v`, and a lower level then ripples on through the graph.

The hard part is a vertex whose local edge list is full. The vertex then
grows: it asks a nearby cell for a **ghost vertex** that holds more of its
edges. The request is asynchronous, so the vertex keeps the ghost's address
in a **future**, a synchronisation object. Inserts that arrive before the
address comes back are queued in the future. They are released once the
reply sets it.

The design follows the architecture and mechanisms described in *Structures
and Techniques for Streaming Dynamic Graph Processing on Decentralized
Message-Driven Systems* (Chandio and Sterling): the AM-CCA compute-cell mesh,
the Recursively Parallel Vertex Object (RPVO) with ghost vertices, the
future-based allocation continuation and the vicinity allocator. That paper
evaluates the ideas in a cycle-level simulator and runs the actions as
software on programmable cells. Here they are fixed-function hardware. Sizes
and many details the paper leaves open are choices made for this RTL. They
are marked as such below and in each file's header.

## The chip at a glance

```
          top IO channel: one IO cell per column
          |    |    |         |
        +----+----+----+ ... +----+
        | CC | CC | CC |     | CC |   row 0 (north)
        +----+----+----+ ... +----+
        | CC | CC | CC |     | CC |
          ...                          MESH_X x MESH_Y cells (default 32 x 32)
        | CC | CC | CC |     | CC |   row MESH_Y-1 (south)
        +----+----+----+ ... +----+
          |    |    |         |
          bottom IO channel
```

Every cell (`compute_cell`) has these parts:

```
 N,S,E,W links <-> mesh_router --local out--> task queue --> cc_logic --> output queue --local in--> mesh_router
                                                                |   ^
                                                 cc_memory <----+   +---- vicinity_allocator
                                                 (vertex objects)        (where to put ghosts)
                                                 future_lco (next-state logic used by cc_logic)
```

| Module | Role |
|---|---|
| `amcca_chip` | top: the mesh, two IO channels, host ports, status, debug read |
| `compute_cell` | one cell: router, queues, engine, memory, allocator |
| `mesh_router` | 5-port router, YX dimension-ordered, one hop per cycle |
| `cc_logic` | action engine: executes an action per cycle and stages messages |
| `cc_memory` | vertex-object store with a ghost-slot pool |
| `future_lco` | next-state function of a future (null / pending / set + closure queue) |
| `vicinity_allocator` | chooses a cell 1-2 hops away for a new ghost |
| `io_channel`, `io_cell` | host stream in, one action per IO cell per cycle out |
| `msg_fifo` | valid/ready FIFO used throughout |
| `amcca_pkg` | shared types: addresses, messages, objects, events |

## Addresses and messages

A global address (`gaddr_t`) is `{y[5:0], x[5:0], slot[7:0]}`: the cell's
coordinates and a slot in its memory. Every message (`msg_t`, 59 bits) is
carried in one 256-bit flit, matching the paper's 256-bit links. The upper
bits are zero.

| field | bits | meaning |
|---|---|---|
| `act` | 3 | `INSERT`=1, `BFS`=2, `ALLOCATE`=3, `SET_FUTURE`=4 |
| `dst` | 20 | object the action runs on; routing uses only `dst.x`, `dst.y` |
| `arg` | 20 | an address: edge target, requester, or new ghost |
| `level` | 16 | BFS level; all ones means "not reached" |

Routing is YX dimension order, as in the paper. A flit first moves north or
south until its row matches, then east or west, then leaves on the local
port. This order is minimal and deadlock-free for the mesh itself. Each
router input has a 2-deep fall-through FIFO and each output a register. A
flit that meets no contention crosses one hop per clock: it is on the next
link one cycle after it arrived.

## Vertex objects and ghost chains

Each memory slot holds one object (`vobj_t`):

* `level`: the BFS level.
* `edges[4]`, `ecnt`: the local edge list, up to `EDGE_SLOTS` targets, each
  the address of the target's root object.
* `ghost`: a future holding the address of this object's ghost.

Slots `0 .. ROOT_SLOTS-1` are root vertices. They come out of reset empty,
and the host decides which vertex uses which (cell, slot). The testbenches
put vertex `v` on cell `v mod (MESH_X*MESH_Y)`, slot `v div (MESH_X*MESH_Y)`.
The other `GHOST_SLOTS` slots are a pool that a bump pointer hands out to
ghost requests.

A vertex with many edges becomes a chain: root, then ghost, then the ghost's
ghost, and so on. Each link of the chain lives in a cell near the previous
one. The paper allows two or more ghost pointers per object, so that an
RPVO can be a tree. It explains insertion with a single ghost pointer and
leaves the choice among several out. This RTL keeps one ghost per object,
so the RPVO is a chain.

Every object of a chain carries the root's level. A BFS action that lowers a
level is passed down the chain with the same level. An insert forwarded down
the chain carries the level of the object that forwards it. Each object then
diffuses along its own edges.

## The four actions

`cc_logic` takes one action per cycle from its task queue and executes it
in that cycle. It reads the target object, updates it, writes it back, and
builds the list of messages to send. It then stages one message per cycle.
This is the paper's rule that a cell either computes or creates one message
per cycle. An action that sends `n` messages therefore keeps the engine for
`1 + n` cycles, more if the output queue is full.

**INSERT(dst = u, arg = v, level)**, the insert-edge action.
* If `u` has room, `v` goes in its edge list. With BFS on and `u` reached,
  it sends `BFS(v, level(u)+1)`.
* If the list is full, the insert depends on `u`'s ghost future:
  * *set*: the insert is forwarded, as `INSERT(ghost, v, level(u))`.
  * *null*: the future turns *pending* and `v` is queued as a closure. An
    `ALLOCATE(cell chosen by the vicinity allocator, arg = u)` is sent. This
    is the continuation: its reply will resume the waiting inserts.
  * *pending*: `v` is queued as a closure.
  * *pending with a full queue*: the action is parked. See below.
* If `level` is lower than `u`'s level (a forwarded insert with BFS on),
  `u` takes that level and diffuses as a BFS action would.

**BFS(dst = u, level)**. If `level` is lower than `u`'s level, `u` takes it.
It then sends `BFS(e, level+1)` for every local edge `e` and
`BFS(ghost, level)` when its ghost is set.

**ALLOCATE(dst = this cell, arg = requester)**, the allocate system action.
It takes a slot from the ghost pool, clears it, and replies
`SET_FUTURE(requester, new address)`. The reply is the return trigger. If
the pool is empty, it passes the `ALLOCATE` on to one of its own vicinity
cells.

**SET_FUTURE(dst = u, arg = ghost)**. Sets `u`'s future, keeping the queue.
In the cycles that follow, each queued closure is released as
`INSERT(ghost, edge, level(u))`. Each release removes that closure from the
queue.

### The life of a future

`future_lco` is pure next-state logic, and `cc_logic` applies it to the
object it has just read. The sequence follows the paper's figure:

| step | state | queue | caused by |
|---|---|---|---|
| 0 | null | {} | reset / new object |
| 1 | pending | {e1} | first insert into a full list; ALLOCATE sent |
| 2 | pending | {e1, e2, e3} | more inserts arrive before the reply |
| 3 | set (ghost address) | {e1, e2, e3} | SET_FUTURE arrives |
| 4 | set | {} | one closure released per cycle |

### Parking, and the one way the chip can stall

The paper's runtime keeps a future's queue as a software list of any length.
Here a queue holds `FUTURE_Q` = 4 closures. An insert that finds the queue
full goes into the engine's **retry buffer** (`RETRY_DEPTH` = 16). The
engine serves the retry buffer and the task queue in turn. A parked insert
that is still blocked goes back to the buffer's tail. A task-queue action
that would have to park while the buffer is full stays in the task queue for
a later cycle.

So a `SET_FUTURE` in the task queue always reaches the engine. The
exception: more than `FUTURE_Q + RETRY_DEPTH` inserts wait on one cell's
futures while the `SET_FUTURE` they need is queued behind one of them. That
cell then stops for good, and so does traffic that backs up behind it. A
vertex that receives a very large burst of edges faster than its ghost is
allocated can trigger this. On a 4x4 mesh with 4 root and 3 ghost slots per cell, a
hub of 40 edges streamed back to back did; a hub of 16 did not. The earlier scheme,
which sent blocked inserts round the mesh to the same cell, deadlocked much
sooner and was dropped. A general fix needs closure storage in memory or a
separate network channel for replies. Neither is built.

## Streaming an increment

1. Load records into either IO channel with `host_valid/host_ready/host_rec`.
   A record is an edge `{seed=0, src, dst}` or a BFS source
   `{seed=1, src}`. The channel deals records round-robin into per-IO-cell
   buffers (`IO_BUF_DEPTH`). The host port stalls when the next buffer is
   full.
2. Raise `start`. Every IO cell then sends one action per cycle into the
   cell below or above it, so the chip takes `2 x MESH_X` edges per cycle at
   most. Loading may go on while the chip runs.
3. Wait for `quiescent`: no message is buffered or in progress anywhere and
   the IO channels are empty. `active_cells` counts the cells holding or
   processing a message, which is what the paper's activity plots show.
4. Read any object with `dbg_addr` to `dbg_obj` (combinational).

`bfs_en` low gives ingestion only: inserts store edges but start no BFS
actions, as in the paper's ingestion-only timing runs. BFS actions from a
seed still run. The testbench ingests the first increment with BFS off,
switches it on, seeds vertex 0, and streams the rest with BFS on.

## Parameters

| parameter | default | from |
|---|---|---|
| `MESH_X`, `MESH_Y` | 32, 32 | paper (32 x 32 chip) |
| `LINK_W` (pkg) | 256 | paper (256-bit links) |
| `HOPS` | 2 | paper (ghosts at most 2 hops away) |
| `ROOT_SLOTS`, `GHOST_SLOTS` | 16, 16 | this design |
| `EDGE_SLOTS`, `FUTURE_Q` (pkg) | 4, 4 | this design |
| `TASKQ_DEPTH`, `OUTQ_DEPTH` | 8, 4 | this design |
| `RETRY_DEPTH` (`cc_logic`) | 16 | this design |
| `IO_BUF_DEPTH` | 16 | this design |
| `COORD_W`, `SLOT_W`, `LVL_W` (pkg) | 6, 8, 16 | this design |

At the defaults the chip holds 16,384 root vertices and at most 131,072
edges (32,768 objects of 4 edges). The paper's GraphChallenge inputs have
50,000 or 500,000 vertices and about 1.0 or 10.2 million edges, so they do
not fit. The paper does not give a cell's memory size. For the 50,000-vertex
graphs, raise `ROOT_SLOTS` to at least 49 and give each cell roughly 250
objects (`SLOT_W` already allows 256 slots).

## Where this departs from the paper

* **Fixed-function cells.** The paper's cells run the actions as programs,
  and a compiler and runtime build the continuation. Here the four actions
  are wired into `cc_logic`. The action rules and the object layout are
  read from the paper's prose and figure captions. Field order, widths and
  the exact order in which messages are sent are this design's own.
* **One ghost per object**, a chain instead of a tree (see above).
* **Finite queues.** These are the closure queue, retry buffer, task and
  output queues. The stall they allow is described above.
* **Pool exhaustion.** When a cell's ghost pool is full, `ALLOCATE` is
  passed on to a vicinity cell of that cell. The ghost can then end up more
  than 2 hops from its parent. If every pool in reach is full, the request
  circulates forever.
* **Vicinity choice.** The paper bounds the distance at 2 hops but does not
  say which cell is picked. Here the allocator walks round-robin through the
  12 cells 1-2 hops away, nearest first, and never picks its own cell.
* **Seeding and termination.** The seed record, `quiescent`,
  `active_cells`, the event flags and the debug port are additions that let
  a host drive and observe the chip.
* **Memories** are register arrays with combinational read, not SRAM macros.
  No clock target is implied. The paper's 1 GHz figure comes from its model.
* The paper's alternative random allocator is not built.
* **Test graphs.** The paper streams GraphChallenge graphs in ten
  increments. The testbenches stream random graphs with one high-degree
  vertex in four increments, sized to fit the simulated meshes.

## Simulation

All testbenches are self-checking and end with
`TB_RESULT checks=N failures=M`. Build one with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/amcca_pkg.sv rtl/*.sv tb/tb_amcca_chip.sv --top-module tb_amcca_chip
./obj_dir/Vtb_amcca_chip
```

| testbench | what it checks |
|---|---|
| `tb_mesh_router` | one-cycle hop; 2,000 random flits each leave once, unchanged, on the YX port, under random back-pressure |
| `tb_cc_memory` | reset contents, both read ports, pool order, slot clearing, full flag |
| `tb_future_lco` | the five steps of a future, closure order, full-queue refusal |
| `tb_vicinity_allocator` | every choice 1-2 hops away and inside a 5x5 mesh; full coverage of the 12 neighbours; corner case |
| `tb_cc_logic` | every action rule with hand-written expected messages, including parking and back-pressure; 1 + n cycles per action |
| `tb_compute_cell` | actions executed, outputs leave on the YX-correct link, local loop-back, one-cycle pass-through, idle detection |
| `tb_io_cell`, `tb_io_channel` | record-to-action conversion, one action per IO cell per cycle, round-robin dealing, host stall |
| `tb_amcca_chip` | 4x4 mesh, 64 vertices, 300 streamed edges in 4 increments. Ingestion-only edge count, then every vertex level after each increment against a reference BFS. Every mechanism must occur: edge stored, level improved, ghost allocated, allocation passed on, closure queued and drained, insert forwarded to a ghost, parking, output stall, host stall, mode switch. |
| `tb_amcca_chip_scale` | 8x8 mesh, every other parameter at its default: 1,024 vertices, 3,000 streamed edges, the same edge-count, level and IO checks |

The largest chip simulated is 16x16 with all other parameters at their
defaults: 4,096 vertices and 8,000 streamed edges, all levels correct. It
took about 6 minutes to build with Verilator on 4 cores and 11 seconds to
run. The 32x32 default chip was not simulated. Verilator turns it into
about 1,600 C++ files, and these could not be compiled in the time at hand.
Every cell is the same module at every size. The mesh size changes only
the number of cells, the number of IO cells, the allocator's edge checks and
the width of `active_cells`.

The testbench's host loads one record per cycle, which is slower than the
chip ingests. On the 4x4 test the chip is quiescent 34 to 78 cycles after the
last record of a 75-edge increment has been loaded. The event counts the test prints are cycles in which at least one
cell saw the event, not the number of events.
