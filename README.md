# Heterogeneous Big/Little pipelines for graph processing on HBM

Real graphs mix two kinds of work. A few vertices have huge numbers of
neighbours. When the destination vertices are cut into partitions, the
partitions holding those hubs are *dense*: their edges come from nearly every
source vertex. Most other partitions are *sparse*: few edges, with sources
scattered over the whole vertex range. One pipeline design cannot serve both
well.

- Streaming the whole source-property array suits a dense partition, but
  wastes bandwidth on a sparse one.
- Fetching single property blocks on demand suits a sparse partition, but
  cannot keep up with a dense one.

This design therefore has two pipeline types, each attached to its own
HBM pseudo-channel:

- **Little pipelines** handle dense partitions. They stream the property
  array into on-chip *ping-pong buffers* and read the properties from
  there. Their eight Gather PEs all buffer the same destination vertices,
  so the pipeline needs only a small merger at the end, not a routing
  network.
- **Big pipelines** handle sparse partitions. A *Vertex Loader* fetches
  only the property blocks the current edges need and reuses the
  previous block. A *butterfly Data Router* sends each update to the one
  Gather PE that owns its destination. Each of the eight Gather PEs then
  holds different vertices, so one Big pipeline covers eight partitions'
  worth of vertices at once.

The computation follows the Gather-Apply-Scatter model, with PageRank as the
built-in application:

- **Scatter** turns each edge into an update carrying the source
  property.
- **Gather** adds the updates per destination vertex.
- **Apply** computes the new property from the sum and the vertex's
  out-degree.

All pipelines of one kind work on slices of the same partitions, and a merger
tree adds their results. Two Apply PEs, one per cluster, compute the new
properties. A Writer broadcasts each new block to every channel, so every
pipeline can read it in the next iteration.

## Data layout in a channel

All memory traffic is in 512-bit blocks, and block addresses count blocks.

| region | contents |
|---|---|
| property array (`prop_rd_base`) | vertex `v`'s 32-bit property in block `v/16`, bits `[32*(v%16) +: 32]` |
| new property array (`prop_wr_base`) | same layout; filled by the Writer |
| edge lists | 8 edges per block; edge `k` of a block at bits `[64k +: 64]`, source ID in the low 32 bits, destination ID in the high 32 |
| out-degrees (`deg_base`, on the two Apply ports) | same layout as the properties |

Within a task the edges must be sorted by source ID. Both source-property
units depend on that order.

A **task** (`task_t`) is `{edge_base, num_edges, dst_base}`. It describes one
pipeline's slice of a partition: where its edges start, how many there are,
and the first destination vertex of the partition.

- A Little task covers 2×`GATHER_WORDS` destination vertices, which is
  65,536 at the defaults.
- A Big task covers 16×`GATHER_WORDS` vertices (eight exclusive buffers).

The host scheduler decides which partitions are dense and how the edges are
split; it is not part of the RTL. For the mergers to line up, it must give
every pipeline of a cluster the same sequence of partitions, with empty
slices where needed. A task with no edges is legal: the pipeline still emits
the partition's (zero) result blocks.

## Edge path common to both pipelines

`burst_reader` reads a task's edge list sequentially, one block per cycle. It
limits its outstanding requests to the free space of its 16-entry output FIFO.
Each output *edge set* has:

- eight (source, destination) pairs;
- a lane valid mask;
- `first` and `last` flags.

Unused lanes in the last block repeat the last valid source, so the sources
still ascend across the set.

`scatter_pe` is combinational. It produces `{dst - dst_base, src_prop}`: the
destination made local to the partition, and the PageRank update value.

`gather_pe` owns `DEPTH_WORDS` 64-bit words, two vertices per word, mapping to
URAM. An update is a read-modify-write over two cycles (read, then add and
write). One forwarding register holds the word written in the previous cycle.
When the next update hits the same word, the adder takes the forwarded value
instead of the stale RAM output. This keeps the initiation interval at one
update per cycle even for back-to-back updates to one vertex.

Flushing streams the words out in address order, writing zero behind each
read, so the buffer is clean for the next task. After reset, a clear pass
zeroes the RAM, one word per cycle.

## Little pipeline: the Ping-Pong Buffer

`pingpong_buffer` returns the eight source properties of an edge set.

Every Scatter PE lane has its own ping buffer and pong buffer, each
`BUF_BLOCKS` blocks (32 KB at the default 512). All lanes' copies are written
together, so all eight lanes can read in the same cycle. The property array
is viewed as *segments* of `BUF_BLOCKS` blocks; segment `k` goes to the ping
buffer if `k` is even and the pong buffer if `k` is odd.

Two indices control the buffers:

- **write index `wr`**: the segment being filled, one block per cycle. When a
  segment is complete, `wr` increments and filling moves to the other
  buffer.
- **read index `rd`**: the segment the current sources lie in
  (`src / (16*BUF_BLOCKS)`).

These rules keep the indices consistent:

- **Filling** runs only while `wr <= rd + 1`, so the buffer being read is
  never overwritten.
- **Reading** segment `s` is allowed when it is fully loaded and not yet
  replaced. That means `wr == s+1`, or `wr == s+2` with no block of the
  next fill requested yet.
- **Jump access** applies when the sources need a segment that is neither
  loaded nor being loaded, because the partition's edges skip part of the
  array. Once outstanding fill reads have returned, `wr` is forced to that
  segment, so the skipped segments are never fetched.
- **Restart**: the first set of every task performs the same jump. This
  restarts the indices for the new task's sources.

A set whose sources straddle two segments is served in two passes. Stage B
selects each lane's 32-bit word from the block it read (the byte selector)
and queues the completed set.

In steady state this takes one set per cycle. The filling runs ahead and is
hidden as long as a segment's sources take at least `BUF_BLOCKS` cycles to
consume.

After the Ping-Pong Buffer, Scatter PE `j` feeds Gather PE `j` directly
(static dispatch). All eight Gather PEs can receive updates for the same
vertex. At the end of the task, `pipe_merger` therefore adds the eight
buffers word by word and packs eight word-sums into one 16-property result
block. Result block `n` of a task covers vertices `dst_base + 16n ...`.

## Big pipeline: the Vertex Loader and the Data Router

`vertex_loader` splits into two pipelines that run decoupled, linked by
per-lane FIFOs.

**Request side.**

1. The decoder computes block index `src/16` and offset `src%16` for each
   lane.
2. Each lane's index is compared with the last index requested. Because the
   indices ascend, the lanes that match form a prefix of the set.
3. The request generator starts right after that prefix: its length (a
   leading-match count) is found in one step, not by scanning.
4. It sends one memory request per cycle for each remaining valid lane.
5. Each returned block goes into the stream (FIFO) of the lane that asked
   for it.

**Response side.**

1. Each lane is compared again, against the response side's own copy of the
   last index. Matching lanes reuse the kept block; the others take the head
   of their stream.
2. The 32-bit property is selected by offset.
3. The last index and block become those of the set's last valid lane.

The effect: a run of edge sets whose sources stay inside one property block
costs a single memory read. A set of eight sources is served in one cycle
when all its lanes hit, and otherwise in one cycle per request. The first set
of each task forgets the last index.

`data_router` is a 3-stage butterfly of 2×2 switches. Stage `s` resolves one
bit of the local destination modulo 8. Each switch output has a 2-entry FIFO.
When both inputs of a switch want the same output, they take turns (round
robin).

Local vertex `d` lives in Gather PE `d % 8` at local index `d / 8`. This
interleaving spreads neighbouring vertices over all PEs. At the end of a task,
word `w` of all eight PEs holds local vertices `16w ... 16w+15`, and these
words become result block `w`.

The Big pipeline accepts an edge set's updates into the router lane by lane.
It does not wait for all eight to be taken in one cycle.

## Merging, Apply and write-back

`cluster_merger` adds the K pipelines' result blocks lane by lane in one
balanced adder tree with one register stage. One instance serves the Little
cluster and one the Big cluster. An assertion checks that all inputs carry the
same block number.

Each `apply_pe` reads the out-degree block matching the result block,
allowing up to 16 reads in flight. It computes:

```
new = (((108 * t) >> 7) << 16) / deg >> 16      (0 if deg == 0)
```

This is PageRank with a 7-bit fixed-point damping factor of 108/128 ≈ 0.85,
worked in 64 bits.

`apply_module` arbitrates the two PEs first come first served: a block that
had to wait wins over one that has just arrived, and simultaneous arrivals
alternate.

`writer` offers each block to all channels at address
`prop_wr_base + blk`. It holds the block until every channel has accepted it
and tracks per channel who already has it. Writing to a second array keeps
pipelines that are still reading the current array consistent. The host
swaps the two array bases between iterations.

## Top level and interfaces

`regraph_top` has parameters `M_LITTLE` (default 7), `N_BIG` (7),
`GATHER_WORDS` (32768) and `BUF_BLOCKS` (512). Channel `i < M_LITTLE` serves
Little pipeline `i`, and channel `M_LITTLE + j` serves Big pipeline `j`.

Each channel has three ports:

- an edge read port (`e_*`);
- a property read port (`p_*`);
- a share of the Writer's write port (`w_valid[c]`/`w_ready[c]`, with the
  common `w_addr`/`w_data`).

The Apply PEs have their own out-degree read ports (`a_*[0]` for Little,
`[1]` for Big).

All streams use valid/ready handshakes. A read port takes a block address and
returns blocks in request order. The top also brings out one-cycle event
pulses:

- `ev_jump`, `ev_switch` (Little);
- `ev_reuse`, `ev_conflict` (Big);
- `ev_contend` (Apply);
- `ev_block` (a block written everywhere).

Shared types and the three PageRank functions (`acc_scatter`, `acc_gather`,
`acc_apply`) are in `regraph_pkg`. Another algorithm needs only those
functions changed, as long as its properties are 32 bits.

Reset `rst_n` is asynchronous and active low. After reset, every Gather PE
spends `GATHER_WORDS` cycles clearing its buffer before it accepts updates.

## Where this departs from, or adds to, the original description

- **Ping-pong buffer size.** 32 KB is taken as the size of one ping (or
  pong) buffer of one lane, 512 × 512 bits. This matches eight 512×72
  BRAMs. Reading 32 KB as ping and pong together would halve
  `BUF_BLOCKS`.
- **Damping constant.** The constant is not given; 108 is assumed. The
  Apply arithmetic is 64-bit, so large sums do not wrap.
- **Out-degrees and the write array.** Out-degrees live in their own array,
  and new properties go to a second property array. Both are this design's
  choices.
- **Jump on the first set.** The Ping-Pong Buffer restarts on the first set
  of every task, and the Vertex Loader forgets its last block at that point.
- **Merger tree.** The merger is one registered adder tree, not a tree of
  small kernels spread across chip regions.
- **Not in the RTL.** Host software (preprocessing, partitioning,
  scheduling, runtime) and the HBM controller are not part of the RTL, and
  neither is the port-bundling wrapper. Here each channel's ports simply
  appear side by side at the top.
- **Applications.** Only PageRank's functions are provided; BFS and
  closeness centrality would need their own functions.
- **Number of pipelines.** Mixes with zero Little or zero Big pipelines are
  not supported by the top as written.

## Testbenches and simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/hbm_model.sv` is a
behavioural channel with fixed latency and random request stalls, and
`tb/tb_util.svh` holds the shared clock/check macros.

| testbench | what it establishes |
|---|---|
| `tb_scatter_pe`, `tb_gather_pe` | update values; one update per cycle including back-to-back same-word updates (forwarding) |
| `tb_burst_reader` | edge sets, masks, first/last, empty task |
| `tb_vertex_loader` | properties; exact number of memory reads (one per lane not matching the last index); reuse of the kept block |
| `tb_data_router` | every tuple reaches PE `dst % 8` exactly once, in order per source/destination pair |
| `tb_pingpong_buffer` | properties across segment switches, jumps and task restarts; one set per cycle once a segment is loaded |
| `tb_pipe_merger`, `tb_cluster_merger` | sums, block numbers, last flags |
| `tb_apply_pe`, `tb_apply_module` | PageRank values, order, each block exactly once, arbitration contention |
| `tb_writer` | every channel gets every block once; one block per cycle with ready channels |
| `tb_little_pipeline`, `tb_big_pipeline` | whole pipelines against reference sums, including an empty task and a throughput bound |
| `tb_regraph_top` | 2 Little + 2 Big pipelines at reduced size, one full PageRank iteration compared on every channel; fails if any mechanism (switch, jump, reuse, router conflict, Apply contention, memory back-pressure, empty task) never occurs |
| `tb_pagerank_workload` | two PageRank iterations on a 2,048-vertex, 16,384-edge R-MAT graph, with the host's side (degree-ordered relabelling, dense/sparse classification, edge slicing, array swap between iterations) done in the testbench; both iterations' arrays checked on every channel; reports edges per cycle |
| `tb_regraph_full` | the same at the default size (7 + 7 pipelines, 65,536-vertex Gather buffers, 32 KB buffers); about 110k cycles |

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/regraph_pkg.sv tb/tb_regraph_top.sv --top-module tb_regraph_top
./obj_dir/Vtb_regraph_top +verilator+rand+reset+2
```

Lint notes: Verilator reports `rst_n` as used both asynchronously and
synchronously (SYNCASYNCNET). The synchronous use is only the `disable iff`
of the handshake assertions; no logic samples the reset. The remaining lint
warnings are unused bits, such as `edge_prop` under PageRank, and deliberately
open FIFO count pins.

Unit testbenches shrink the buffers through parameters (e.g. 32-word Gather
PEs, 4-block ping-pong buffers). The logic does not depend on these sizes
except through the index widths.
