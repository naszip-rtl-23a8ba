# NasZip rank logic: graph-based nearest-neighbor search next to DDR5 memory

Graph-based approximate nearest-neighbor search (ANNS, as in HNSW) walks a
proximity graph one hop at a time. Each hop reads the neighbor list of one
node, then computes the distance from the query to every neighbor's vector.
Only neighbors closer than the farthest of the best candidates found so far
are kept. Almost all of the time goes into reading vectors and neighbor lists
from memory, and most of that work is thrown away.

NasZip moves this inner loop into the buffer chip of a DDR5 DIMM, one engine
per rank, and trims it in three ways:

* **Fewer bits per vector (Dfloat).** Each vector is stored with a bit width
  that shrinks along its dimensions. The leading dimensions keep more
  precision than the trailing ones.
* **Early exit (FEE).** Distances are accumulated access by access. After each
  access the partial distance is scaled up to an estimate of the full
  distance. A vector is abandoned as soon as that estimate passes the
  threshold.
* **Local neighbor lists.** Each node's neighbor list is split by the
  sub-channel that stores each neighbor's vector. Each sub-channel therefore
  finds and processes its own neighbors with no data crossing between
  sub-channels. Small caches (LNC) keep recently used list-table entries and
  lists, and they are filled ahead of time between hops (prefetch).

This repository holds synthesizable SystemVerilog for the logic of one rank:

* two vector processing engines (VPEs);
* two local neighbor caches;
* the controller;
* the shared priority queue.

It also holds self-checking testbenches, including one that runs complete
searches on a random graph. The DRAM devices, the DIMM's clock driver, the
data buffer's PHY and the host CPU are outside the RTL. The testbenches model
the DRAM devices and play the host.

## Block diagram

```
 host commands ─► controller ──────────────────────────────► shared priority queue ─► host reads
                  │  subch_ctrl 0           subch_ctrl 1       (16 queries x 16 entries)
                  │     │  ▲                   │  ▲                 ▲          ▲
                  │   LNC-T, LNC-D           LNC-T, LNC-D            │ push     │ push
                  │     │                      │                    │          │
 sub-channel 0 ◄──┴─ read port ─► VPE 0      read port ─► VPE 1 ──────────────┘
 (4 x8 devices)                           sub-channel 1 (4 x8 devices)
```

`naszip_rank` (the top) instantiates:

* `controller`, which holds one `subch_ctrl` per sub-channel and merges their
  results;
* per sub-channel, an `lnc_t`, an `lnc_d` and a `vpe`;
* one `priority_queue`.

Inside each `vpe` are four paths, one per DRAM device. Each path has a
`dfloat_proc`, a `query_buffer` and a `dist_calc`. The paths feed an adder
tree, an accumulator and a `fee_module`. Shared types and FP32 functions are
in `naszip_pkg`.

## How a sub-channel stores its part of the graph

A rank has two sub-channels, each with four x8 DRAM devices. One read access
fetches one 16-beat burst from each device: 16 bytes per device and 64 bytes
in all. All addresses on the read port count these 64-byte accesses. Each
sub-channel holds three regions (the bases are in `cfg`):

| Region | Line address | Contents |
|---|---|---|
| Neighbor list table (NLT) | `nlt_base + v/16` | 16 entries of 4 bytes, for nodes 16*(v/16) .. +15. An entry is `{len[7:0], addr[23:0]}`. `len` is the number of this node's neighbors stored in this sub-channel. `addr` is the byte address of that partial list. |
| Neighbor lists | `nbr_base + addr/64` | 4-byte node IDs. A partial list starts at word `addr[5:2]` and must not cross a 64-byte line. |
| Vectors | `vec_base + (v - id_base)*n_access + k` | Access k of vector v. Each sub-channel stores a contiguous range of node IDs starting at `id_base`. |

The bytes of a line arrive as follows. Line byte `16p + t` comes from device
`p` on beat `t`. Equivalently, the 128-bit quarter `p` of a line is device
`p`'s burst.

### Dfloat vectors

A vector is cut into up to four segments, each with its own element width `n`
(9..32 bits). An element is the top `n` bits of the FP32 value: the sign, the
full 8-bit exponent and `n-9` mantissa bits. Decoding just appends zeros.

A burst holds `floor(128/n)` elements of one segment. The unused top bits are
ignored, and a segment's last burst may be partly empty. Burst `b` of a
vector is stored on device `b mod 4`, so access `k` brings bursts `4k..4k+3`,
one from each device, and they are decoded in parallel. The host describes
the layout in `cfg.seg` as four records `{burst_end, dim_end, width, epb}`,
all cumulative.

The example layout for 128-dimension SIFT vectors is 18 bits for dimensions
1-42, 16 bits for 43-74 and 14 bits for 75-128. That gives 6 + 4 + 6 = 16
bursts, or 4 accesses. The same text also lists the widths as 18, 14 and 16,
but only 18/16/14 yields six, four and six bursts, so that is the one used
here. Any layout can be programmed.

## The vector processing engine

Each of the four paths of a VPE works on one device's burst.

1. **`dfloat_proc`** collects the 16 beats of the burst into a 128-bit
   register. From the cycle after the 16th beat, it extracts one element per
   cycle with a barrel shifter driven by an offset register.
2. **`query_buffer`** holds the query elements that belong to that device's
   bursts, in order. A counter loaded with the query's base index gives the
   matching query element each cycle.
3. **`dist_calc`** computes `(q-d)^2` in L2 mode or `-(q*d)` in inner-product
   mode. Negating the product means that in both modes a smaller value is
   closer, so the threshold compare and the ascending queue need no mode
   switch.

The four terms of each cycle are summed by a two-level registered adder tree
and added into the accumulator. Once all four paths have emptied their bursts,
the FEE module receives the accumulator and the access index `k`.

The early-exit test is

```
exit = thr < f_k * acc          f_k = alpha_k / beta_k, one FP32 factor per access
```

The host computes `f_k` for every step and writes it with `OP_WR_FEE`. On a
vector's last access the factor is forced to 1.0, so the final test is the
exact acceptance test `distance <= thr`. A vector that equals the threshold is
accepted, which matches the figure of the FEE unit.

The engine reports `step_valid` with `step_exit` and `step_last` after every
access. This happens at most `(largest element count of the access) + 5`
cycles after the 16th beat. For the 18/16/14 layout that is at most 14 cycles
per access. The controller reads the next access only when the previous one
did not exit, so a vector that exits after its first access costs one read,
not four.

All arithmetic is FP32. It rounds to nearest even, flushes subnormals to zero
and does not handle NaN. The functions are in `naszip_pkg` (`fp_mul`,
`fp_add`, `fp_lt`).

## Local neighbor caches

**LNC-T** (8 KB, fully associative, 128 lines) caches lines of the list table.
A line covers 16 consecutive nodes, and its tag is the node ID without the low
four bits, which identifies the line's first entry. A lookup is combinational:
in the same cycle it gives hit, the node's entry and the whole line. Lines are
replaced round robin.

**LNC-D** (256 KB, 8 ways x 512 sets) caches 64-byte lines of neighbor lists.
Its tag is a node range `[start, end]`, not an address:

* A lookup for node `v` in set `addr[14:6]` hits when a valid way's range
  contains `v`.
* When the controller fills a line, it sets the range from the NLT line it
  already holds. The range runs from the first to the last node of that NLT
  line whose partial lists lie wholly inside the fetched line.
* Neighbor nodes whose lists share a line therefore hit on each other's fill.

The tag and data arrays are synchronous memories, so an answer comes two
cycles after the request. Ways are replaced round robin per set.

## Controller: one hop, step by step

The host drives the rank with one command at a time. `cmd_ready` is high only
when both sub-channels are idle.

| `cmd.op` | Fields used | Action |
|---|---|---|
| `OP_WR_QUERY` | `path`, `addr`, `data` | Write a query element into path `path` of both VPEs. |
| `OP_WR_FEE` | `addr` = k, `data` | Write factor `f_k` into both VPEs. |
| `OP_SEARCH` | `node`, `qid`, `addr` = query base, `data` = threshold | Run one hop on both sub-channels. |
| `OP_PREFETCH` | none | For every query with a non-empty queue, bring its closest node's NLT line and list into the caches. |
| `OP_PQ_CLEAR` | none | Empty the shared queue. |

For `OP_SEARCH`, each `subch_ctrl` runs this sequence:

1. Look up `node` in LNC-T. On a miss, read the NLT line and fill LNC-T, then
   look up again (this second lookup hits).
2. If the entry's length is 0, the sub-channel is done. Otherwise look up the
   list in LNC-D. On a miss, read the list line and fill LNC-D.
3. For each neighbor ID in the list, start the VPE and read the vector one
   access at a time. Stop at an early exit or after the last access.
4. Push each accepted neighbor `(id, distance)` to the shared queue. When
   both sub-channels push in the same cycle, sub-channel 0 goes first.

A prefetch runs steps 1 and 2 for the head of each query's list.

While the host merges the queue contents into its global candidate list, the
caches are therefore already warm for the next hop. The read port allows one
request outstanding per sub-channel: a request is taken on
`mem_req_valid && mem_req_ready`. The 16 response beats may come with gaps.

## Shared priority queue

The queue keeps one list per query of the batch: 16 queries, with 16 entries
each. Each list is sorted by ascending distance, and ties keep arrival order.

* An insert counts the stored entries that are not farther than the new one,
  shifts the rest down, and writes the new entry.
* On a full list, the farthest entry falls out, or the new result is dropped
  if it is not closer than the farthest. Either case pulses `pq_overflow`.
* The host reads any entry through `pq_rd_qid` and `pq_rd_idx`.
* The heads of all lists feed the prefetch.

## Parameters

| Parameter (top) | Default | Origin |
|---|---|---|
| `LNCT_BYTES` | 8192 | 8 KB LNC-T, from the paper |
| `LNCD_BYTES`, `LNCD_WAYS` | 262144, 8 | 256 KB, 8-way LNC-D, from the paper |
| `BATCH` | 16 | batch size used in the paper's evaluation |
| `QDEPTH` | 16 | entries per query in the shared queue; own choice |
| `QB_DEPTH` | 4096 | FP32 entries per query-buffer path. This is enough for 16 queries of up to 960 dimensions; own choice. |
| `MAX_STEPS` | 128 | FEE factors, one per access; own choice |

Fixed in `naszip_pkg`:

* 2 sub-channels of 4 x8 devices;
* 16-beat bursts of 128 bits;
* 32-bit node IDs;
* 4 Dfloat segments.

## What is this design's own, and known limits

The paper describes the blocks, the cache organisation, the data mapping and
the FEE rule. It does not give signal-level interfaces. The following are
choices made here:

* the host command set and its encoding;
* the read-port protocol;
* the memory layout formulas in the table above;
* the LNC-D set index and the rule for filling its range tag;
* round-robin replacement in both caches;
* the queue depth, and its overflow and tie rules;
* the `-(q*d)` inner-product sign;
* one pre-divided factor per step instead of separate alpha and beta;
* the FP32 rounding details;
* all pipeline latencies.

Known limits:

* **NLT address range.** The 24-bit byte address in an NLT entry reaches
  16 MB of neighbor lists per sub-channel. With a graph degree of 32 and 16
  sub-channels, that is enough for data sets of about a million vectors (SIFT,
  GIST, GloVe, Wiki). It is not enough for an 8M-vector corpus or a billion-scale
  set. Storing the address in larger units would lift this.
* **Threshold.** The host supplies the threshold with each search. The rank
  does not track the global farthest candidate.
* **Duplicates.** The shared queue does not remove duplicates. A node reached
  twice in one query appears twice, and the host's visited set is expected to
  handle it.
* **Queries.** Query elements are stored as FP32, not Dfloat.

## Verification

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M`, stops on a watchdog, and computes its
reference values independently of the RTL, using real (double-precision)
arithmetic through `tb_fp_pkg`.

| Testbench | What it checks |
|---|---|
| `tb_dfloat_proc` | Widths 12, 14, 16, 18, 21 and 32, with full and partly filled bursts. Checks every extracted element, one element per cycle from the cycle after the 16th beat, and `done`. |
| `tb_query_buffer` | Random writes; reads from random bases, including wrap-around. |
| `tb_dist_calc` | L2 and IP terms against real arithmetic; latency. |
| `tb_fee_module` | Exit decisions for random factors and distances, including the forced 1.0 on the last step. |
| `tb_vpe` | Three printed Dfloat layouts in L2 and IP mode. Partial distances, exit decisions and step latency on every access. |
| `tb_lnc_t` | Fills and lookups against a reference cache with round-robin eviction. |
| `tb_lnc_d` | Range hits and misses in a few crowded sets, eviction across 8 ways, two-cycle answer. |
| `tb_priority_queue` | Random inserts with ties, overflow pulses, heads and full list contents, clear. |
| `tb_naszip_rank` | The whole rank at its default sizes; see below. |
| `tb_controller` | The same environment with small caches (4-line LNC-T, 32x2 LNC-D), 4-entry queues, IP mode and a memory that stalls at random. |

The two system tests share `tb_rank_env`, which does the following:

1. Builds a random 256-node graph with 128-dimension vectors in the 18/16/14
   layout, split over the two sub-channels.
2. Lays out the NLT, the partial lists and the vectors in two DRAM models
   (`tb_dram`).
3. Loads four queries and the FEE factors.
4. Runs best-first hops, with a prefetch followed by searches on the
   prefetched nodes every third round, and a queue clear half way.

After every hop it checks:

* every accept and exit against a real-valued model of the engine;
* the full sorted list of the query, read through the host port;
* the overflow count and the number of distance steps;
* that no read touched an unwritten line.

It fails if any of these never happened: LNC-T hit and miss, LNC-D hit and
miss, early exit, accept, prefetch, a search served entirely from prefetched
lines, and queue overflow. A typical run at default sizes sees:

* LNC-T: 160 hits, 30 misses;
* LNC-D: 93 hits, 67 misses;
* 230 early exits and 387 accepts;
* 32 prefetches and 8 prefetch-served searches;
* 259 overflows.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/naszip_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_dram.sv tb/tb_rank_env.sv \
  tb/tb_naszip_rank.sv --top-module tb_naszip_rank -Mdir obj -o sim
./obj/sim
```

For a unit testbench, replace the last file and `--top-module` with, for
example, `tb/tb_vpe.sv` and `tb_vpe`.
