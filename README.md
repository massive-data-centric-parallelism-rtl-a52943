# Tascade: data-local task execution with proxy caches on a chiplet grid

Sparse workloads such as graph traversal, sparse matrix-vector product and
histograms spend their time chasing pointers into arrays that are much larger
than any cache. This design does not move that data to a core. It spreads
every array over a large grid of small tiles. Each tile owns one contiguous
slice of each array. A computation that needs element `i` becomes a *task
message* carrying `i`, and the network delivers it to the tile that owns `i`.
The task runs there, reads and writes only local data, and may send new task
messages on. There are no threads, no coherence and no message headers. The
array index is the address.

Hot elements cause a problem at scale: thousands of tiles sending updates to
one owner congest the network near that owner. *Proxies* solve this. The
grid is divided into proxy regions. In each region, one tile acts as a stand-in
owner for every element. Updates that can be merged in any order (minimum,
sum and so on) go to the proxy first. The proxy merges them in a small
write-back *proxy cache* (P$). Only a displaced or flushed entry travels on to
the real owner. The router of a proxy tile can also take an owner-bound update
off the network and handle it as a proxy update. This is *selective
cascading*. It happens only when the tile has nothing better to do and the
link toward the owner is congested. So when the network is quiet, updates go
straight to the owner. When it is busy, they are merged along the way.

The grid is built from identical dies of 16x16 tiles. Dies are joined edge to
edge through die-to-die links. Each die has a memory controller to its own
stacked DRAM, so data that does not fit in on-chip SRAM is still local to a
tile.

## Hierarchy

```
tascade_package        DX x DY dies, die-to-die links, torus wrap at package edges
 ├─ d2d_phy            one per link direction (behavioural model of the PHY pair)
 └─ tca_die            TX x TY tiles + memory controller
     ├─ memory_controller   per-channel arbitration of D$ line requests
     └─ tile
         ├─ task_queue      input queues (one per task type), output queues (one per channel)
         ├─ tsu             task scheduling unit: picks the next task, issues prefetches
         ├─ proxy_cache     P$: direct-mapped, one element per line, write-back as messages
         ├─ data_cache      D$ or scratchpad over the tile's DRAM slice, 512-bit lines
         ├─ noc_interface   output queues -> NoCs (weighted round-robin), NoCs -> input queues
         └─ router          one per physical NoC: XY routing, bubble flow control, cascading
tascade_pkg            shared types, sizes and the index-to-tile mapping
```

The processing unit (PU) of each tile sits outside the RTL. It is an in-order
core whose instruction set is not specified. It connects through the
`pu_o`/`pu_i` structs. The HBM stacks and I/O dies also attach through ports.

## Messages and how they find their tile

A message is `{chan, idx, val}` (`msg_t`). `chan` is the logical channel it was
sent on. `idx` is a global array index. `val` is one 32-bit argument. A whole
message moves as one flit.

Each channel has a software-set entry (`chan_cfg_t`). It gives:

* `enc_shift`: log2 of the number of elements each tile owns. The owner is
  tile number `idx >> enc_shift`. The low `log2x` bits of that number are x
  and the next `log2y` bits are y.
* `to_proxy`: send to the proxy instead of the owner. The array is then spread
  over one proxy region as if the region were the whole grid. The shift grows
  by `log2x + log2y - prx_log2x - prx_log2y`. The region's own corner supplies
  the upper coordinate bits. So every tile of a region agrees on which region
  tile is the proxy of `idx`.
* `proxy_en` and `cascade_task`: owner-bound messages on this channel may be
  grabbed by a proxy on the way, and then enter task queue `cascade_task`.
* `noc`: which physical NoC carries the channel. `dest_task`: which input
  queue the message enters at its destination. `weight`: its share of the NoC.

`tascade_pkg::dest_of` and `proxy_of` compute these mappings. The routers
and the testbenches use the same functions.

## Inside a tile

**Queues.** Each task type has an input queue (IQ) and each channel has an
output queue (OQ). Their sizes are set at run time, up to `IQ_DEPTH`/`OQ_DEPTH`
(256 and 16 by default, a ratio of 16). An IQ has two write ports, so both
NoCs can deliver to it in the same cycle. NoC 1 only ejects when two slots are
free.

**Scheduling (tsu).** A task type is eligible when its IQ is not empty and the
OQ it produces into (`task_cfg_t.out_chan`) has room. A task never blocks
half-way because its output cannot leave. Among eligible types the TSU
compares, in order:

1. the IQ is at least 3/4 full;
2. the task's OQ is empty;
3. the IQ occupancy.

Ties go to the lower task number. This is how queue occupancy steers
execution: a type whose queue is backing up runs first, and so does a type
that would feed an idle channel. The chosen head is handed to the PU with a
valid/ready handshake.

While the head of an IQ waits, the TSU sends the D$ a prefetch for
`arr_base + idx`, and optionally for `arr2_base + idx` when the task reads a
second array with the same index. The prefetch is sent once per queue head.

**Proxy cache (proxy_cache).** Each task type may own a logical P$: a base
line, a power-of-two size and a default value. All of them share one
SRAM and one comparator. The P$ is direct-mapped, keeps one element per line,
and stores the full index as the tag.

* A read that misses returns the default value (for example 0 for a sum, or
  the largest value for a minimum). It does not fetch anything.
* A write that displaces a different valid element turns that element into a
  message on the logical P$'s eviction channel. The message goes into that
  OQ. It has priority over PU pushes on the same OQ.
* A flush walks one logical P$ and writes back every valid line. Programs use
  it at the end so the owners receive the final partial results.
* After reset, the SRAM is swept once to clear the valid bits (`init_done`).

**Data SRAM (data_cache).** This is either a scratchpad, when a tile's data
fits on chip, or a direct-mapped, write-back D$ over the tile's private DRAM
slice. Lines are 512 bits (16 words) with a dirty bit. No coherence is needed,
because no other tile ever touches that slice.

* A hit answers one cycle after the request.
* A miss holds `req_ready` low until the line is back. The PU stalls for the
  whole DRAM round trip.
* A dirty victim is written back before the fill.
* Prefetches use the same miss path when the PU is not accessing.

## The network

Each tile has one radix-5 router per physical NoC (N, E, S, W, local). There
are two NoCs by default. Each input port has a small FIFO (`RBUF`, 4 by
default). Each output has a round-robin arbiter.

Routing is X first, then Y. Per dimension, the grid is either a mesh or a ring
(torus). On a ring a message goes the shorter way, and eastward/southward on a
tie.

Deadlock on the rings is avoided with bubble flow control. Every input
advertises `ready1` (one free slot) and `ready2` (two free slots). A message
that enters a ring, by injection or by turning from X into Y, needs `ready2`.
A message that continues along its ring needs only `ready1`. So a ring can
never fill completely.

**Selective cascading.** The router applies this check to each message at the
head of an input FIFO. The message is grabbed and ejected into the local IQ
`cascade_task` when all of the following hold:

* it is on a `proxy_en` channel;
* it came from a neighbour (not from the local tile);
* it is not yet at its owner;
* this tile is the proxy of its index in this region;
* the local `cascade_task` IQ is empty (the tile is free);
* the output toward the owner cannot take the message this cycle (there is
  contention).

The PU then runs the message as a proxy update, and the owner later receives
the merged value. When there is no congestion, nothing is grabbed. That is
what keeps data close to current when the network is quiet. `ev_cascade`
pulses for each grab.

**NoC interface.** Channels that share a NoC take turns with weighted
round-robin: a channel of weight *w* may send *w* messages in a row. A
stalled NoC holds only its own channels.

**Message-dependent deadlock** is the programmer's responsibility, as in any
message-passing machine. A task that may spawn messages must not share a NoC
with the messages it consumes unless the consumer always drains. The
testbenches show a safe mapping. Updates bound for owners and evictions
(whose task spawns nothing) share NoC 0. Proxy-bound updates (whose task
spawns evictions) use NoC 1.

## Dies, links and the package

`tca_die` lays out `TX x TY` tiles. It connects neighbouring routers directly
and brings the routers on its four edges out as ports. Tile `(x, y)` sits at
global position `origin + (x, y)`. The memory controller builds a global line
address `{tile, line}` for each D$ request. It interleaves lines over the HBM
channels by the low address bits. Each channel has a round-robin arbiter
among the tiles, and responses carry the tile number as their tag.

`tascade_package` places `DX x DY` dies. Every edge link crosses to the facing
tile of the next die through a `d2d_phy`. This is a behavioural link model: a
message arrives 4 cycles after it is sent (4 ns at 1 GHz), and up to 8
messages can be in flight. It gives the same `ready1`/`ready2` as a router
input.

At the package edges, `cfg.grid.torus_x`/`torus_y` choose per dimension
between two options:

* close the ring with one more link to the opposite edge;
* leave the edge open toward the I/O dies (`io_*` ports), for streaming data in.

## Configuration

All run-time choices are in one `tile_cfg_t` shared by every tile:

* the grid (`log2x`, `log2y`, torus per dimension);
* the channel table;
* the task table (array bases, prefetch enables, output channel);
* the logical P$ table;
* queue sizes;
* scratchpad or D$ mode and the number of D$ lines.

## Sizes: defaults and the main configuration

| parameter | default | main configuration |
|---|---|---|
| tiles per die `TX x TY` | 16 x 16 | 16 x 16 |
| dies `DX x DY` | 2 x 2 | 4 x 4 (64 x 64 tiles) |
| tile SRAM | IQs 4x256, OQs 4x16, P$ 32768 entries (~260 KiB), D$ 16384 x 64 B (1 MiB): about 1.3 MiB | 1.5 MiB shared by all of these |
| D$ line | 512 bits | 512 bits |
| HBM channels per die | 8 | 8 (HBM2E, 8 GB) |
| DRAM slice per tile | 2^19 lines = 32 MiB | 8 GB / 256 tiles |
| die-to-die latency | 4 cycles | 4 ns at 1 GHz |
| physical tile-NoCs | 2 | a 32-bit and a 64-bit one |

The package defaults to 2x2 dies only because the lint tools need about
2.8 GB per 256-tile die. Set `DX = DY = 4` for the full package.

## Where this RTL departs from the reference architecture

* **Separate arrays.** The IQs, OQs, P$ and D$ are separate arrays with fixed
  maximum sizes. The reference design has one SRAM per tile, partitioned by
  software.
* **Message width.** One flit carries a whole message on both NoCs. The
  difference between a 32-bit and a 64-bit NoC is only a matter of bandwidth
  and is not modelled.
* **Die-NoC.** The second network, with one hop per die through radix-9
  routers at die edges, is not built. All traffic uses the tile-NoC.
* **Torus wrap.** The wrap exists only at package edges, so a torus spans the
  whole package in that dimension. The folded layout, which keeps wrap links
  short, is not modelled. The wrap is one more 4-cycle link.
* **Own interpretations.** "Free" (the cascade IQ is empty), "contention" (the
  output cannot accept this cycle), the TSU thresholds, weighted round-robin,
  and the flush operation are this design's own interpretations or additions.
* **Prefetch streaming bit.** The streaming bit is passed to the PU with the
  dispatched task. What the PU does with it is up to the PU.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `task_queue_tb` | FIFO order against a reference queue, run-time size, full and two-free flags, the second write port |
| `tsu_tb` | the dispatch choice each cycle against a reference priority function, OQ-full gating, the prefetch sequence |
| `proxy_cache_tb` | hits and default-value misses, the eviction order against a reference, back-pressure on evictions, flush of one logical P$ only |
| `data_cache_tb` | read-after-write through misses, dirty write-backs, a miss stall of at least the DRAM latency, prefetch hits, scratchpad mode making no DRAM requests |
| `router_tb` | output ports against reference XY mesh/torus routing, bubble rule, cascading only when free and blocked |
| `noc_interface_tb` | 2:1 weighted sharing, alternation, stalled NoC, ejection readiness |
| `memory_controller_tb` | channel and address mapping, tags, response routing, no starvation |
| `d2d_phy_tb` | exactly 4-cycle latency, one per cycle, order, fill and drain |
| `tile_tb` | a histogram on one tile through its own routers and D$ |
| `tca_die_tb` | a histogram on a 2x2-tile die with HBM |
| `tascade_package_tb` | end to end, described below |

The end-to-end test runs a histogram on a 2x2 package of 2x2-tile dies (16
tiles), with X as a torus and Y as a mesh. Each tile's behavioural PU
(`tb/pu_model.sv`) sends updates. Half go straight to owners on a cascadable
channel. Half go to proxies, which merge them in a P$ of 8 lines. Owners add
into a D$ of 8 lines backed by an HBM model (`tb/hbm_model.sv`). Afterwards
the proxies flush, and every bin is read back and compared with a reference.

The test counts the following and fails if any of them never occurred:

* cascades;
* evictions;
* P$ hits and default-value misses;
* D$ miss stalls;
* OQ back-pressure;
* die-to-die crossings;
* torus wrap traffic;
* HBM fills and write-backs.

It also fails if anything leaves through a mesh edge. The largest system
simulated end to end is this 16-tile package. No simulation was run at the
default sizes (1024 tiles with full-size SRAM arrays).

To run a testbench with Verilator, list the package first, then the RTL, the
behavioural models and the testbench:

```
verilator --binary --timing --assert rtl/tascade_pkg.sv rtl/*.sv \
    tb/pu_model.sv tb/hbm_model.sv tb/tascade_package_tb.sv \
    --top-module tascade_package_tb
./obj_dir/Vtascade_package_tb
```

Replace the last file and the top module to run another testbench. Running a
module's testbench needs only that module, the modules below it and
`tascade_pkg`.
