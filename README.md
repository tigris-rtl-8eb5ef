# A KD-tree nearest-neighbour search accelerator for point clouds

Point-cloud registration spends most of its time in KD-tree searches: for
every point of one frame, find its nearest neighbour in another frame. A
classic KD-tree search is a long chain of dependent steps (visit a node,
decide which child to go to, backtrack), which does not map well onto wide
hardware. This RTL implements the accelerator organisation of *Tigris*
(Xu et al., MICRO 2019). It splits every search into two halves that suit
different hardware:

* The **top-tree** is a short KD-tree of height `htop` (10 in the main
  configuration). Walking it is sequential and control-heavy. It runs on many
  small, independent **recursion units** (RUs), one query per unit.
* Each top-tree leaf owns a **Node Set**: the leftover points below it, about
  128 of them at height 10. A Node Set is never organised further. It is
  searched exhaustively, which is regular and parallel work, on **search units**
  (SUs). Each SU is a 1-D systolic array of processing elements (PEs). Many
  queries that reached the same leaf are searched together, so one pass over
  the Node Set serves all of them.

A query moves back and forth between the two halves. The RU descends until it
reaches a leaf. The query then goes to the SU that owns the leaf, which
searches the Node Set and sends the query back. The RU then pops its stack and
continues the depth-first walk, with any backtracking, until the stack is
empty. The back-end has an optional **approximate mode**. A query that
arrives close enough to an earlier query of the same leaf (a *leader*) skips
the Node Set and takes that leader's answer instead.

Everything here is nearest-neighbour (NN) search with exact integer
arithmetic. What differs from the published design is listed at the end.

## The data structure in memory

All state of a frame lives in four on-chip buffers (the *global buffer*):

| Partition | Word | Default depth | Contents |
|---|---|---|---|
| Input Point Buffer | `point_t` (3 x 32 bit) | 132096 | top-tree nodes, leaf descriptors, Node Sets |
| Query Buffer | `point_t` | 131072 | one query point per query id |
| Result Buffer | `result_t` {found, idx, dsq} | 131072 | current best per query |
| Query Stack Buffer | `stack_entry_t` {node, depth, xdist} | 131072 x 18 | 18 stack slots per query |

The top-tree is stored in heap order from address 0. Node *i* has children
*2i+1* and *2i+2*. A node at depth *d* splits dimension *d mod 3* at its own
coordinate, and every leaf is at depth `htop`. So leaf *l* is node
`2^htop - 1 + l`. Top-tree nodes are real points of the cloud, and each one
is a candidate for the nearest neighbour. The Node Set of leaf *l* is
described by one word at `leaf_tab_base + l`, where `x` is the address of its
first point and `y` is the number of points (0 is allowed). The points of a
set are contiguous. How the tree is built (median splits or otherwise) is up
to the host. The search is correct for any tree whose Node Sets lie on the
correct side of every split plane above them.

Distances are squared Euclidean distances of signed 32-bit integer
coordinates. They are held as full 68-bit values (`dist_t`), so no comparison
is ever rounded, and the square root is never taken.

## A query's life

```
 host ─ start ─► loader ─► FE Query Queue ──► RU[0..NRU-1] ──► Query Distribution ──► SU[0..NSU-1]
                                ▲                                  Network                 │
                                └──────────── query returns after its leaf ────────────────┘
        all units ◄──► round-robin arbitrated ports of the four global-buffer partitions
```

A query travels as a small **token**, not as its point. The FE token
(`fq_token_t`) holds the query id, the stack pointer and a *started* bit. The
BE token (`be_token_t`) adds the leaf id. Points are read from the Query
Buffer whenever a unit needs them. The current best result travels through
the Result Buffer. An RU writes it before it hands a query to the back-end.
The SU reads it, improves it and writes it back. The RU reads it again when
the query returns. So a query can resume on a different RU and nothing is
lost.

`start` clears the node caches and leader buffers, then queues query ids
`0 .. num_queries-1`. `done` pulses once every query has emptied its stack. A
query whose stack is empty writes its final result and counts as finished.

## Recursion unit: walking the top-tree

The RU carries out the paper's six stages: **FQ** fetch the query, **RS**
read the top of the stack, **RN** read the node, **CD** compute the
distance, **PI** push the children and update the best, **CL** issue to the
back-end. They run as a state machine, and each buffer access waits for its
grant and for the read data one cycle later. Two optimisations from the
paper shape the loop:

* **Node forwarding.** Of the two children pushed at PI, the one on the
  query's side of the split (the *near* child) would be popped at the very
  next RS. Instead it goes straight to RN, and only the far child is written
  to the stack. With grants arriving at once, one top-tree node therefore
  costs 4 cycles (RN, RN data, CD, PI), with no stack round trip in between.
  A fresh query reaches its first leaf `4 + 4*(htop+1)` cycles after it
  leaves the queue. `tb_recursion_unit` checks this figure.
* **Node bypassing.** Each far child is pushed with the squared distance from
  the query to the split plane (`xdist`). When it is popped, an entry whose
  `xdist` is not below the current best cannot contain a closer point. It is
  dropped right after RS, without reading the node. (`ENABLE_BYPASS = 0`
  moves the same test to PI, as in an unoptimised design.)

When PI reaches a leaf, the RU writes the query's best to the Result Buffer
and offers the token, with its leaf id, to the distribution network. The RU
is then free for another query. When the query comes back, FQ reloads its
point and best, and RS continues with the saved stack pointer.

The stack of query *q* occupies Query Stack Buffer words `q*18 .. q*18+17`.
Forwarding pushes only the far child, so a walk to a leaf of height `htop`
leaves at most `htop` entries on the stack. An assertion guards the
18-entry limit.

## Query Distribution Network

The low-order `log2(NSU)` bits of the leaf id select the SU, as the paper
proposes. The network is a crossbar with one round-robin arbiter per SU, so
each SU accepts one token per cycle. Different SUs take tokens in parallel.

## Search unit: many queries, one Node Set

### Batching (BE Query Buffer and issue logic)

Each SU buffers up to 128 waiting queries. The issue logic takes the first
valid entry at or after a rotating head pointer as the *key*. It then scans
the buffer 32 entries per cycle for other queries of the key's leaf and
stops when it has NPE queries or has covered the buffer. The batch (at most
32 queries at the defaults) is handed to the SU. The entries are freed when
the SU acknowledges the batch. The rotating head keeps any query from
waiting forever behind busier leaves.

### One batch, step by step

1. **Query Point Access.** For each query of the batch, read its point
   (Query Buffer) and its best so far (Result Buffer) into its own PE. The
   query stays in that PE for the whole batch ("query stationary").
2. **Leader check** (approximate mode only; described below).
3. **Search Node Access.** Read the leaf's descriptor and stream the Node Set
   into PE 0, one point per cycle. The points come from the Node Cache on a
   hit. On a miss they come from the Input Point Buffer, and the cache is
   filled along the way.
4. **Drain** the array (NPE + 4 cycles). Then, for each query, write its best
   to the Result Buffer and return its token to the FE Query Queue. In
   approximate mode, also record the query as a leader of the leaf.

### Processing element

Each PE is a three-stage pipeline. Stage 1 is the *Search Node* register.
It holds the streamed point and is also the PE's output to the next PE, so a
point reaches PE *k* exactly *k* cycles after PE 0. Stage 2 is the *Current
Dist* register, which takes the distance from the PE's own `dist_unit`.
Stage 3 compares and inserts: if the new distance is smaller than the best,
the best becomes {point address, distance}. Nothing in the stream depends on
an earlier point, so the array never stalls. A batch of *n* points takes
about *n + NPE + 4* cycles, no matter how many queries are in the batch.

### Node Cache

Queries that reach the same leaf tend to arrive close together in time. Each
SU therefore keeps its last `NC_ENTRIES` Node Sets (2 entries of up to 128
points each by default). Each entry is read out in order like a FIFO, and
the entries are looked up by leaf id. The oldest entry is replaced first. A
set larger than an entry streams from the buffer and is not cached.

### Approximate search: leaders and followers

For each leaf, the Leader Buffer keeps up to 16 *leaders*. A leader is a
query that searched the leaf's Node Set exactly. The buffer stores the
leader's point and the nearest point it found. In approximate mode each
batch first streams the leaf's leaders through the PEs. Each PE remembers
its closest leader, using the same distance hardware. A *resolve* step then
decides, for each query, whether the closest leader is nearer than
`sqrt(thd_sq)`. If so, the query becomes a **follower**: the PE compares the
leader's nearest point against its own best and keeps the better one.

If every query of the batch is a follower, the Node Set is not read at all.
This skip is where the saving comes from. Otherwise the set streams as
usual. Followers ignore it, and the other queries search it exactly and
become new leaders after the batch. Leaders found in a batch only help later
batches. Once a leaf has 16 leaders its group stops growing, and further
queries are searched exactly.

The buffer tracks `LB_SLOTS` leaves per SU. A slot is selected by the leaf id
bits above the SU-select bits, and each slot is tagged with its leaf. A leaf
that maps onto an occupied slot starts a fresh group there. The replaced
leaf's queries then simply run exactly again.

The follower decision follows the paper's threshold test on the closest
leader. The paper's follower then searches the leader's whole result list.
Here a leader's result is its single nearest neighbour, which is exactly
that list for NN search.

## Global buffer and host port

Each partition is one single-ported array behind a round-robin arbiter
(`gbuf_bank`). A requester holds `req` (plus `we`, `addr`, `wdata`) until
`gnt`. Read data comes back on the next cycle, with `rvalid` raised for that
requester only. Requester 0 is the host, requesters 1..NRU are the RUs and
the rest are the SUs. The stack partition serves the RUs alone.

The host uses the same handshake. `host_sel` picks the target: 0 is the
Query Buffer (write a query point), 1 is the Input Point Buffer (write a
node, descriptor or set point) and 2 is the Result Buffer (read
`host_rdata`, valid with `host_rvalid`). A result is `{found, idx, dsq}`,
where `idx` is the Input Point Buffer address of the nearest point and `dsq`
is its squared distance.

The runtime settings are `htop`, `leaf_tab_base`, `num_queries`,
`approx_en` and `thd_sq`. The `stats` output counts the events of a run:
nodes visited, bypasses, forwards, leaf issues, batches and their queries,
streamed points, cache hits and misses, followers, skipped sets, leaders
added or dropped, and distribution-network conflicts.

## Sizes

| Parameter | Default | Meaning |
|---|---|---|
| `NRU` | 64 | recursion units |
| `NSU` | 32 | search units (power of two) |
| `NPE` | 32 | PEs per search unit |
| `QMAX` | 131072 | queries per frame |
| `PBUF_DEPTH` | 132096 | Input Point Buffer words (131072 points + 1024 descriptors at height 10) |
| `BQB_DEPTH`, `BQB_GROUP` | 128, 32 | BE Query Buffer entries, entries scanned per cycle |
| `LB_SLOTS`, `LB_ENTRIES` | 32, 16 | leaves tracked per SU, leaders per leaf |
| `NC_ENTRIES`, `NC_SET_MAX` | 2, 128 | Node Cache entries per SU, points per entry |
| `HTOP_MAX` (package) | 18 | stack slots per query, the largest top-tree height |

A frame of about 130,000 points with a top-tree of height 10 fits with
room to spare. The descriptor table also sits in the Input Point Buffer, so
`points + 2^htop` must stay within `PBUF_DEPTH`. With 130,000 points that
allows heights up to 11. Taller top-trees (up to 18) are fine for smaller
frames. The unit counts of the published sensitivity sweep (16 to 128 RUs,
SUs or PEs) are all legal parameter values.

## Where this RTL departs from the paper

* **Arithmetic.** The paper computes distances in 32-bit floating point.
  Here coordinates are signed 32-bit integers and squared distances are
  exact. The host chooses the scale (for example 1 mm per unit). This makes
  every result bit-exact and checkable against a reference.
* **Search type.** Only nearest-neighbour search is built. Radius search, and
  its approximate variant, are not.
* **RU pipelining.** The paper overlaps the six RU stages in a pipeline,
  where forwarding and bypassing remove the stack stalls. Here each RU is a
  sequential state machine. Forwarding and bypassing are present and cut the
  per-node cost, but one RU has only one stage active at a time.
  Throughput comes from the 64 RUs running in parallel.
* **Memory system.** The paper does not describe the bus to the global
  buffer. Here each partition has one port and one arbiter, which is simple
  and easy to check but serialises heavy traffic. The DRAM side (a
  double-buffered Result Buffer written back to DRAM) is not built: results
  are read through the host port. The Result Buffer holds one NN result per
  query, not the paper's larger allowance for radius results.
* **SU sequencing.** Within an SU, batches do not overlap. Query loading,
  leader check, streaming and write-back run one after the other.
* **Choices the paper leaves open.** These include the leaf descriptor table,
  the token formats, the rotating key pointer of the issue logic, FIFO
  replacement in the Node Cache, the Leader Buffer's slot mapping, and
  flushing the caches at `start`.

## Verification

Every block has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_dist_unit` | squared distance against a wide-integer reference, random and extreme values |
| `tb_gbuf_bank` | one grant per cycle, read data and its requester, no starvation |
| `tb_fe_query_queue` | FIFO order, count, full/empty behaviour with 3 pushers and 2 poppers |
| `tb_query_dist_net` | routing by low-order leaf bits, exactly-once delivery, contention |
| `tb_be_query_buffer` | batches hold only the key's leaf, are full when they can be, every query issued once, scan time |
| `tb_su_pe` | a 2-PE systolic chain against a reference: best, the k+3 cycle update latency of PE k, leader/follower decision |
| `tb_leader_buffer` | group contents, the 16-leader cap, slot takeover, flush |
| `tb_node_cache` | hit/miss, FIFO replacement, in-order read-back, flush |
| `tb_recursion_unit` | NN results against brute force with a modelled back-end, bypass and forwarding, descent latency |
| `tb_search_unit` | exact batches against brute force, returned tokens, cache hits, followers and skipped sets |
| `tb_tigris_top` | whole design at reduced size (4 RUs, 2 SUs, 4 PEs): 240 queries, exact and approximate runs |
| `tb_tigris_full` | whole design at the default sizes (64 RUs, 32 SUs, 32 PEs), 600 queries on a height-10 top-tree |

The two end-to-end benches build a midpoint-split tree and random queries,
and they compare every exact result with a brute-force search. They also
count each mechanism: bypassing, forwarding, queries returning to the
front-end, multi-query batches, cache hits and misses, followers, leaders,
a full leader group and skipped Node Sets. A mechanism that never happens
counts as a failure. At full size, the 600-query exact run takes about
23,000 cycles.

The unit benches use `tb_mem_model`, a behavioural single-requester memory
that can randomly withhold grants. `tigris_tb_body.svh` is the shared body of
the two end-to-end benches.

To simulate with Verilator 5 (from the directory that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_tigris_top rtl/tigris_pkg.sv tb/tb_tigris_top.sv
./obj_dir/Vtb_tigris_top +verilator+rand+reset+2
```

Replace `tb_tigris_top` with any testbench name from the table. Building the
full-size bench takes a minute or two, and its run takes under a minute.
