# A ray tracing unit with traversal checkpointing for Gaussian rendering

Ray-traced 3D Gaussian splatting cannot collect all Gaussians along a ray at
once. It gathers them a few at a time: each *round* walks the BVH and keeps
the `k` nearest hits beyond the last blended one in a small sorted
`k`-buffer. The shader blends those `k`, then starts the next round, until
the ray is opaque enough. A conventional ray tracing unit starts every round
at the root of the BVH again. Near the top of the tree, the same nodes are
fetched and tested in round after round.

This design removes that repeated work in the hardware ray tracing unit of
one streaming multiprocessor (SM):

* **Checkpoint.** During a round, a node can pass the box test but start
  beyond the ray's current `t_max`. It cannot hold one of this round's `k`
  nearest hits, but it may hold the next round's. Instead of dropping it,
  the unit writes a 20-byte *checkpoint* entry to a per-ray list in memory.
  The same holds for a triangle hit beyond `t_max`.
* **Replay.** The next round starts from those entries instead of the
  root. The unit reads them back one by one and traverses only the subtrees
  they name.
* **Eviction buffer.** Gaussians that the any-hit shader pushes out of a
  full `k`-buffer go to a per-ray software list. Their subtrees have already
  been walked, so the next round starts with them in the `k`-buffer.

Each Gaussian is a *TLAS instance*: an affine world-to-object transform plus
a pointer to one shared BLAS. The BLAS is a 20-triangle mesh that bounds the
unit sphere. A ray therefore walks two levels. It is transformed into a
Gaussian's object space when it reaches that Gaussian's TLAS leaf.

The RTL is in `rtl/`, one module or package per file. Self-checking
testbenches are in `tb/`.

## Block map

```
            launch (one beat per thread)             retire (warp done)
                   |                                        ^
   +---------------v----------------------------------------+-------------+
   |  rt_unit                                                             |
   |   +-----------------+   +---------------------------------------+    |
   |   | rt_scheduler    |-->| warp_buffer  8 warps x 32 threads     |    |
   |   | (one ray/cycle) |   |  per ray: status, replay flag, ray id,|    |
   |   +-----------------+   |  ray, tmin/tmax, stack, ckpt src/dst  |    |
   |                         |  offsets; unit: src addr, dst addr,   |    |
   |                         |  max size                             |    |
   |                         +---------------------------------------+    |
   |   issue: pop / fetch / replay read        response: test + push /    |
   |        |                                   checkpoint / transform    |
   |        v                                        ^                    |
   |   [memory request queue] --> L1 ... L1 --> [memory response queue]   |
   |                                                 |                    |
   |   ray_box_unit x6 + t_validation x6   ray_tri_unit + t_validation    |
   |   ray_transform_unit                                                 |
   +-------------------------------+--------------------------------------+
                                   | any-hit request / report-or-ignore
                                   v
                          any-hit shader (on the SM)
```

| File | Contents |
|---|---|
| `grtx_pkg.sv` | Number format, node word layout, checkpoint entry, warp buffer record, memory request and response |
| `rt_unit.sv` | Top: control logic (issue, response, any-hit and retire) and all the units below |
| `warp_buffer.sv` | Per-ray records and traversal stacks, plus the checkpoint buffer registers |
| `rt_scheduler.sv` | Picks one ready ray per cycle: round-robin over warps, then the lowest thread |
| `t_validation.sv` | Decides whether an intersection passes, is checkpointed, or is dropped |
| `ray_box_unit.sv` | Slab test: ray against an axis-aligned box, giving entry and exit distance |
| `ray_tri_unit.sv` | Möller–Trumbore ray-triangle test with back-face culling |
| `ray_transform_unit.sv` | Applies a 3x4 matrix to a ray and recomputes the reciprocal direction |
| `sync_fifo.sv` | Valid/ready FIFO, used for the memory request and response queues |

## Checkpoint buffers and the round protocol

Three registers describe the checkpoint buffers for the whole unit. They
are written through `cfg_*`:

* `src_addr`: the buffer read in this round.
* `dst_addr`: the buffer written in this round.
* `max_size`: the number of entries per ray.

Each ray has its own area in each buffer. Entry `i` of ray `r` lies at:

```
addr = base + (r * max_size + i) * 20
entry = { node address (8 B), TLAS leaf address (8 B, 0 for a TLAS node), t_hit (4 B) }
```

The warp buffer keeps, for each ray, a 16-bit source offset and a 16-bit
destination offset. Each offset goes up by one per read or write.

**Terminator.** When a ray's round ends, the unit writes an all-zero
entry after the ray's last entry. A replay stops reading at that entry.

**Ping-pong.** The controlling software swaps `src_addr` and `dst_addr`
between rounds. It then relaunches the warp with the replay flag set. Every
resident warp uses the same registers, so all resident warps must run the
same round.

**First round.** The first round, or any launch without the replay flag,
starts at `tlas_root`.

**Replay.** When a replaying ray's stack is empty, the unit reads the next
source entry.

* If the entry's stored `t_hit` is still beyond the ray's current `t_max`,
  the entry is copied straight into the destination buffer. No node is
  fetched.
* Otherwise the entry's node is pushed and traversed. If the node belongs
  to a BLAS, the unit first fetches its TLAS leaf, which is stored in the
  entry, to transform the ray.

**Overflow.** A ray's destination area can fill up. One slot is always kept
free for the terminator. When the area is full:

* entry 0 is overwritten with a TLAS-root entry;
* the ray's `ovf` bit is set;
* no further checkpoints are written for that ray in this round.

The next round of that ray is then a full traversal from the root, the same
as without checkpointing. The software has to know this happened. When the
first source entry of a ray is the TLAS root, the ray generation shader
discards that ray's eviction buffer, because a full traversal finds those
Gaussians again. The end-to-end testbench runs a whole render with a
3-entry area to test this path.

**Baseline.** `max_size = 0` switches checkpointing off. Nodes beyond
`t_max` are then dropped, which is how a conventional unit behaves. The
end-to-end testbench renders with this setting too, for comparison.

## The hit rule: pass, checkpoint, drop

`t_validation` compares an intersection with the ray interval
`(t_min, t_max]`. A box gives an entry and an exit distance. A triangle
gives one distance, which serves as both.

```
pass = hit && t_exit > t_min && t_enter <= t_max   -> traverse now / hand to any-hit
ckpt = hit && t_exit > t_min && t_enter >  t_max   -> write a checkpoint entry
```

For a triangle this reduces to the usual rule `t_min < t_hit <= t_max`. A
triangle hit that fails only the `t_max` test is checkpointed as its
triangle leaf, and the next round tests it again. The box unit reports a hit
when `t_enter <= t_exit` and `t_exit >= 0`, so a ray that starts inside a
box hits it.

## Pipeline and timing

The unit handles one ray per cycle in each of three stages. The stages
share the warp buffer through three read ports and three write ports.

1. **Issue.** The scheduler picks a `RS_READY` ray in the next warp after
   the last one served, round-robin, and takes its lowest ready thread. The
   stack top is popped, and then one of the following happens:
   * The node is fetched (tag `NODE`).
   * If the node belongs to a different Gaussian than the one the ray is
     currently transformed into, that Gaussian's TLAS leaf is fetched first
     (tag `INST`). This only happens on replay.
   * With an empty stack in replay mode, the next checkpoint entry is read
     (tag `CKPT`).
   * With an empty stack otherwise, the terminator is written and the ray
     goes to `RS_DONE`.

   Issue waits while the request queue is full or while the response stage
   needs the queue for a write.
2. **Response.** The head of the response queue is decoded.
   * **Internal node.** All six child boxes are tested in the same cycle by
     six `ray_box_unit` + `t_validation` pairs. Passing children are pushed
     so that the nearest is on top. Each checkpointed child costs one write
     request. A node with several checkpointed children stays at the head
     of the queue, one cycle per child. A `ck_done` mask records which
     children have been written.
   * **TLAS leaf.** The ray is transformed (`ray_transform_unit`) and the
     BLAS root is pushed.
   * **Triangle.** `ray_tri_unit` runs. A passing hit moves the ray to
     `RS_AHIT`.
3. **Any-hit.** A warp is handed to the any-hit shader in either of two
   cases: every ray in it that is still traversing is waiting in
   `RS_AHIT`, or the warp has had a hit waiting for `ANYHIT_TIMEOUT` cycles
   (default 64). Hits then go out one at a time on `ahit_req_*`. Each answer on
   `ahit_resp_*` is either *report*, which sets `t_max := t_hit`, or
   *ignore*. Either way the ray returns to `RS_READY`.

A warp retires on `retire_*` when all its launched rays are `RS_DONE`.
Its slots can then be launched again.

The arithmetic units are combinational. The only latencies are the memory
round trip and the FIFO stages.

## Interfaces of `rt_unit`

Every handshake is valid/ready and completes in a cycle where both are
high.

| Group | Direction | Contents |
|---|---|---|
| `launch_*` | in | One beat per thread: `warp`, `thread`, `last`, `active`, `replay`, `ray_id`, `org`, `dir`, `tmin`, `tmax` |
| `retire_*` | out | Index of a warp whose rays have all finished this round |
| `ahit_req_*` | out | `warp`, `thread`, `ray_id`, `prim` (Gaussian id) and `thit` of one hit |
| `ahit_resp_*` | in | `report` (1) or ignore (0) for the hit last sent |
| `mem_req_*` | out | `mem_req_t`: `kind`, `ray` tag, 64-bit `addr`, and the 20-byte entry for writes |
| `mem_resp_*` | in | `mem_resp_t`: `kind`, `ray` tag, `addr`, and one node word. Responses may arrive in any order |
| `cfg_*`, `tlas_root` | in | Checkpoint buffer registers and the TLAS root address |
| `stat_*` | out | Counts of node fetches, checkpoint writes, checkpoint reads, any-hit hand-offs, overflows and timeouts |
| `stack_ovf` | out | Sticky flag: some traversal stack overflowed |

The `ray` tag is 8 bits, so the unit holds at most 256 rays, which is
exactly 8 warps x 32 threads.

## Node format and numbers

Every BVH node is one 1544-bit word. Bits `[1:0]` give its type:

| Type | Layout |
|---|---|
| `INTERNAL` | Six 257-bit children, each `{valid, addr[64], lo xyz, hi xyz}`, child `c` at bit `2 + 257c` |
| `INSTANCE` | TLAS leaf: world-to-object matrix element `(r, c)` at bit `2 + 32(4r + c)`, BLAS root at bit 386, Gaussian id at bit 450 |
| `TRI` | BLAS leaf with one triangle: `v0`, `v1`, `v2` (9 x 32 bits) at bit 2 |

Children are stored with their boxes in the parent, so one fetch tests six
boxes. A memory system with narrower lines would return a node over several
beats. This design abstracts that away: it expects one beat per node.

All coordinates and distances are signed Q16.16 fixed point (32 bits).
`t = 0x7FFFFFFF` stands for infinity. Products are summed at 64 bits and
then saturated. The reciprocal direction (`2^32 / d`, saturated) is
recomputed after every transform. The transform does not renormalise the
direction, so a distance `t` means the same point in world space and in
object space.

## What follows the paper and what does not

These parts take their numbers and rules from the paper:

* eight warps of 32 threads in the warp buffer;
* per-ray replay flag, ray id, ray properties, status, traversal stack, and
  2-byte source and destination offsets;
* unit-wide source address, destination address and max size;
* the 20-byte checkpoint entry and the 8-byte eviction entry (written by the
  shader);
* ping-pong swapping of the buffers between rounds;
* checkpointing of exactly what fails the `t_max` test;
* invoking the any-hit shader when all active rays have hit or after a
  timeout;
* BVH-6;
* the two-level scene with one shared 20-triangle BLAS and a transform at
  each TLAS leaf.

These are this design's own choices:

* Q16.16 fixed point instead of floating point;
* the node word layout;
* the per-ray layout of a checkpoint area, the terminator entry and the
  overflow fallback;
* copying stale entries without a fetch;
* nearest-first push order;
* a 32-entry stack;
* 16-entry queues;
* a 64-cycle any-hit timeout;
* handing hits to the shader one at a time;
* back-face culling;
* one ray per cycle, with combinational arithmetic units.

The paper leaves all of these open.

Known gaps and limits:

* **Stack depth.** The traversal stack has no short-stack or restart
  mechanism. A BVH-6 of height *h* can need up to `5h + 1` entries.
  Production scenes with BVH height 26–28 could in the worst case exceed
  the 32-entry default. `stack_ovf` flags this, but the ray then misses
  nodes. Raise `STACK_DEPTH` for such scenes.
* **Memory system.** The L1, caches and sibling prefetch are not included.
  The unit talks to memory through a request/response port.
* **Shaders.** The SM that runs the shaders, the `k`-buffer, the eviction
  buffer and blending are software. The testbench models them.
* **Round synchronisation.** Warps that run different rounds at the same
  time would need per-warp buffer addresses. The unit-wide registers here
  assume that all resident warps run the same round.

## Simulation

Each block has a self-checking testbench. Each one prints
`TB_RESULT checks=<n> failures=<m>` and ends with `$finish`. Each one also
has a watchdog that stops it with a failure if it hangs. For example:

```
verilator --binary --timing --assert -Irtl --top-module tb_rt_unit \
    rtl/grtx_pkg.sv rtl/sync_fifo.sv rtl/rt_scheduler.sv rtl/warp_buffer.sv \
    rtl/t_validation.sv rtl/ray_box_unit.sv rtl/ray_tri_unit.sv \
    rtl/ray_transform_unit.sv rtl/rt_unit.sv tb/tb_rt_unit.sv
./obj_dir/Vtb_rt_unit
```

The other testbenches need `grtx_pkg.sv` and the module they test.

| Testbench | What it checks | Checks |
|---|---|---|
| `tb_t_validation` | Random values against the interval rule, plus a worked example: after a report sets `t_max = 3.2`, a node at 4.8 is checkpointed and a hit at 2.85 passes | 3005 |
| `tb_ray_box_unit` | Random rays and boxes against a real-number slab test, with entry and exit distances within 0.01 | 4114 |
| `tb_ray_tri_unit` | Random rays and triangles against a real-number Möller–Trumbore test with culling, with `t` within 0.01 | 4937 |
| `tb_ray_transform_unit` | Random matrices and rays against the real-number affine transform | 13549 |
| `tb_sync_fifo` | Random push/pop traffic against a queue model: order, count, full and empty | 7188 |
| `tb_rt_scheduler` | Round-robin order, the lowest-thread rule, and grants only to ready rays | 4008 |
| `tb_warp_buffer` | Writes and pushes on all ports against a model: stack top, state vector, registers, overflow flag | 41861 |
| `tb_rt_unit` | End-to-end render (below) | 1182 |

`tb_rt_unit` runs the unit at its default size: 8 warps x 32 threads,
32-entry stacks. The scene has 12 Gaussians placed along the view axis, and
256 rays are cast on a 16 x 16 grid. Multi-round rendering uses early ray
termination. The test renders this scene five times:

1. `k = 4`, checkpointing off;
2. `k = 4`, checkpointing on;
3. `k = 4`, a 3-entry checkpoint area, which forces the overflow fallback;
4. `k = 8`, checkpointing off;
5. `k = 8`, checkpointing on.

It compares every ray's blended Gaussian sequence with a reference built
from the exact icosahedra. A few rays whose hits lie within rounding of an
edge are excluded, leaving 233 of 256 compared. The memory model adds
random latency, out-of-order responses and back-pressure. The test checks
that every mechanism occurs at least once:

* checkpoint write;
* replay read;
* stale-entry copy;
* instance re-fetch;
* report;
* ignore;
* timeout;
* overflow;
* queue back-pressure.

| Run | Node fetches | Cycles |
|---|---|---|
| `k = 4`, checkpointing off | 32928 | 38607 |
| `k = 4`, checkpointing on | 25044 | 36917 |
| `k = 4`, overflow fallback | 32314 | 40053 |
| `k = 8`, checkpointing off | 27982 | 32224 |
| `k = 8`, checkpointing on | 24830 | 32349 |

Checkpointing removes 24% of node fetches at `k = 4` and 11% at `k = 8`.
The cycle counts change less than the fetch counts, because of three
properties of the test memory:

* it has a fixed random latency;
* it has no cache, so fewer fetches do not reduce latency;
* checkpoint writes and reads go through the same single request port.

Because of this, the testbench's cycle counts are not a performance
estimate.
