# DRAM cache prefetching for pooled memory

Several compute nodes share one pool of fabric-attached memory (FAM) behind
a CXL.mem memory node. FAM is slower than local DRAM. This design turns a
slice of each node's local DRAM into a hardware-managed cache of 256-byte FAM
blocks, and fills that cache ahead of use. Each node's CXL root complex
watches the last-level-cache (LLC) misses heading to FAM and trains a
signature-path prefetcher on them. It prefetches the predicted blocks from
FAM and keeps the cache's metadata in on-chip SRAM. Later misses to those
blocks are sent to the local memory controller instead of to FAM.

Prefetches from several nodes compete with demands for FAM bandwidth, and
the design handles that in two places:

* **At the source.** Each root complex measures its demand latency. It
  lowers its prefetch rate when latency rises above 125 % of the recent
  minimum, and raises it again when latency falls back.
* **At the memory node.** The FAM controller keeps demands and prefetches in
  separate queues. It issues from them with weighted fair queueing, so that
  demands get W shares of bandwidth for each prefetch share.

Either mechanism can be switched on alone, or both together.

All RTL is SystemVerilog-2017 in `rtl/`, one module or package per file.
The testbenches are in `tb/`.

## Structure

```
pooled_memory_system                 (top, NODES = 4)
 ├─ per node n:
 │   ├─ hdm_decoder                  FAM window decode of LLC requests
 │   └─ enhanced_root_complex        request sequencing of one node
 │       ├─ spp_prefetcher           signature / pattern / global history tables
 │       ├─ prefetch_queue           256 in-flight prefetches, 95 % threshold
 │       ├─ dram_cache_metadata      hashed 8-way LRU metadata, 64 Ki blocks
 │       ├─ bw_adapt                 event counters and MIMD rate control
 │       │   └─ seq_divider
 │       ├─ cxl_agent                CXL.mem requests/completions, latency stamps
 │       └─ sync_fifo                prefetch completions awaiting fill
 └─ fam_controller                   shared memory-node controller
     ├─ sync_fifo x2                 demand queue, prefetch queue
     └─ wfq_scheduler                deficit weighted round robin (Alg. 1)
fam_pkg                              types: 48-bit addresses, request classes
```

Every request is a transaction: an address, a tag and a class. There are no
data payloads, because data movement belongs to the memory controllers and
the link. Interfaces are valid/ready handshakes throughout.

## Parts

### Address decode (`hdm_decoder`)

Each node has NRANGES base/size windows, which are written once at
enumeration. An LLC miss or writeback whose address falls in an enabled
window goes to the root complex. Any other address leaves on the node's
`loc_*` port for the local memory controller. Windows have 4 KiB
granularity.

### Prefetcher (`spp_prefetcher`)

This is a signature-path prefetcher that works on 256-byte blocks inside
4 KiB pages, so a page holds 16 blocks.

* **Signature table.** It has 512 entries, direct-mapped by page. Each entry
  holds the page, the last block offset and the signature.
* **Pattern table.** It has 1,024 entries. Each entry holds a signature tag,
  a signature weight and four (delta, weight) pairs.
* **Global history table.** It has 16 entries. It seeds the signature of a
  new page from a lookahead walk that left the previous page.

On a miss, the prefetcher computes `delta` and
`signature = (signature << 4) ^ delta`, then updates the pattern entry of the
new signature. It then walks ahead along the highest-weight deltas. Each
step emits one candidate block. The walk stops after DEGREE = 4 candidates,
when no delta is known, or when it leaves the page. Training takes one cycle
and each candidate takes one cycle. The next miss waits until the walk has
ended.

At these sizes the three tables hold 81,760 bits, about 10.2 kB. The paper
gives 11 kB.

### Prefetch queue (`prefetch_queue`)

There is one entry per prefetch in flight. An entry is taken when the
prefetch issues, and its index serves as the prefetch's tag on the link. The
entry is released when the prefetch completes. The queue answers two
look-ups in parallel:

* whether a candidate is already in flight, which makes it redundant;
* whether a demand is for a block that is being prefetched, which is
  counted.

Allocation is refused once 243 of the 256 entries are occupied (95 %).

### DRAM cache metadata (`dram_cache_metadata`)

The default cache is 16 MiB, which is 65,536 blocks in 8,192 sets of 8
ways. The set is an XOR fold of the 40-bit block number. Each way holds:

* the block number as its tag;
* its DRAM slot;
* the dirty and valid bits;
* a 3-bit LRU age.

That makes 61 bits per way, or 488 KiB for 65,536 ways. The paper estimates
about 450 KB at 7 bytes per entry.

There are four operations:

* **lookup** of a read: a hit makes the way the most recent;
* **write**: a hit also sets dirty;
* **probe**: a redundancy check that leaves the LRU state alone;
* **fill**: takes a vacant way or the LRU way, and reports a dirty victim.

An operation is accepted in one cycle, the set is read in the next, and the
answer follows in the cycle after. After reset the table clears itself, one
set per cycle.

### Request sequencing (`enhanced_root_complex`)

A single controller handles one event at a time, in this priority order.

1. **Prefetch completion.** Release the queue entry and fill the metadata.
   Tell the local memory controller to write the block into its slot. If
   the victim was dirty, write it back to FAM.
2. **Prefetch candidate.** Drop it if it is in the prefetch queue or in the
   DRAM cache. Otherwise it reaches the issue stage. There it is dropped if
   the bandwidth adaptation grants no prefetch or the queue is at its
   threshold. Otherwise it takes a queue entry and leaves tagged as a
   prefetch.
3. **LLC request.** Look it up in the metadata.
   * On a hit, the request is re-addressed to
     `DC_BASE + slot * 256 + offset` and sent to the local memory
     controller.
   * On a miss, it goes to FAM through the agent.
   * Every read trains the prefetcher, whether it hits or misses, and
     whether it is a demand or a core prefetch.

Read completions return to the LLC by LLC id, from the agent or from local
memory. A counter record (`stats`) shows each mechanism at work: demands,
hits, prefetches generated, issued, redundant and filled, threshold drops,
throttle drops, evictions, and in-flight matches.

### CXL.mem agent (`cxl_agent`)

The agent merges demands, evictions and prefetches onto the node's link, in
that priority order. Each request carries the node number, a tag and a
class: demand, core prefetch, DRAM cache prefetch, or eviction. The agent
also returns completions. It stamps each demand read with the issue time,
and reports the latency of each demand when it returns.

### Bandwidth adaptation (`bw_adapt`)

Event counters run over a sampling period of 4,096 cycles:

* demands issued, demands returned (with their latency sum), and total
  demands;
* prefetches issued;
* useful prefetches, meaning DRAM cache hits.

Each counter keeps an instantaneous value and a 1/8-weight moving average.
The minimum latency is the lowest average latency in the last 16 periods.

Once per period the rate is updated:

* **Latency above 125 % of the minimum.** The rate is multiplied by
  `1 - f`, where `f = (cur - min) / min * (1 - accuracy)`, clamped to
  [1/16, 1/2].
* **Otherwise.** The rate is multiplied by 1.125.

The rate is kept between 1/16 and 4 prefetches per demand. From it the
block derives "prefetch per demand", "demand per prefetch" and "prefetch
greater than demand", which set how many prefetch grants each demand
brings. A single shared serial divider does the divisions.

### FAM controller (`fam_controller`, `wfq_scheduler`)

A round-robin arbiter takes requests from the nodes' links.

* **`wfq_en = 1`.** Demands and LLC writebacks go into the demand queue.
  Core prefetches, DRAM cache prefetches and evictions go into the
  prefetch queue. Each issue slot calls the scheduler once.
* **`wfq_en = 0`.** Everything goes into the demand queue and leaves in
  arrival order.

Issue is paced to the device's peak bandwidth: the slot after a request of
u 64-byte units opens u × ISSUE_PERIOD cycles later. ISSUE_PERIOD = 2 is one
64 B unit per 1.67 ns, which is 38.4 GB/s, the peak of two DDR4-2400
channels at an assumed 1.2 GHz clock.

The scheduler follows the paper's Algorithm 1. A round counter runs modulo
W + 1, and one round in each window is the prefetch's turn. On its own turn
a class earns QUANTUM of deficit, up to its maximum. A demand needs a
deficit above 0 and costs 1. A prefetch needs a deficit above r and costs
r, where r = 4 for a 256 B block and 1 for a core prefetch. If the preferred
class cannot issue, the other one may. Completions are routed back to the
node named in them.

## Parameters (defaults = the full-size configuration)

| parameter | default | origin |
|---|---|---|
| NODES | 4 | paper: 1–4 nodes |
| PQ_ENTRIES / PQ_THRESH | 256 / 243 | paper: 256 per node, "eg: 95 %" |
| DC_BLOCKS | 65,536 (16 MiB) | paper: 16 MB cache of 256 B blocks |
| DC_WAYS | 8 | own choice |
| block size | 256 B | paper |
| SIG shift, deltas per entry | 4, 4 | paper |
| ST / PT / GHR entries | 512 / 1,024 / 16 | own reading of "2× SPP" |
| DEGREE | 4 | own choice |
| congestion threshold, increase | 125 %, ×1.125 | paper |
| SAMPLE_CYCLES, EMA, window | 4,096, 1/8, 16 | own choice |
| WFQ W | 2 | paper evaluates 1, 2 and 3 |
| QUANTUM, max deficits | 4, 8 | own choice |
| ISSUE_PERIOD | 2 | derived from DDR4-2400 × 2 channels |

## Where the design departs from, or adds to, the paper

* **Threshold.** The paper's flowchart prints 1.30 as the congestion
  threshold, but its text twice says 125 %. The design uses 125 %.
* **Round update in Algorithm 1.** The algorithm writes
  `current_round += (current_weight+1)%(W+1)`. The design implements the
  modulo-(W+1) round counter that the prose describes.
* **Decrease factor.** The paper says the factor grows with the latency
  excess and shrinks with accuracy, without giving a formula. The formula,
  its clamps and the grant-based issue gating are this design's own.
* **Pattern-table update.** The update follows the paper's worked example:
  the entry of the new signature is changed. The original SPP confidence
  thresholds are not used; the walk follows the highest weight.
* **Demand matching an in-flight prefetch.** This is counted, but the
  demand still goes to FAM. The paper only says the queue makes such a
  check easy.
* **Evictions.** Only dirty victims are written back. They travel in the
  memory node's prefetch queue.
* **LLC writebacks.** A writeback to a cached block updates the cached copy
  and marks it dirty. A writeback that misses goes to FAM.
* **Root-complex controller.** It handles one event at a time. The paper
  gives no pipeline.
* **Not modelled.**
  * The CXL network's 256 B flits, 70 ns latency and 128 GB/s: the links
    are direct connections.
  * DDR banks and timing: the memory device is paced by bandwidth only.
  * Node-to-FAM address translation, which the paper also leaves to lower
    levels.
* **Outside the design.**
  * The processors and their caches, including the L2 SPP core prefetcher.
  * Local memory controllers and DRAM.
  * The pooled DDR4 device.
  * The CXL PHY.
  * The OS allocator.

  They are reached through the top's ports. Their effect on this design is
  the DC_BASE parameter and the HDM windows.

## Workloads

The paper evaluates 19 programs whose FAM footprints range from 188 MB
(facesim) to 1.55 GB (619.lbm_s). Each is also run as four copies, one per
node. All of them fit the design:

* A footprint of at most 1.6 GB is at most 6.4 M blocks of 256 B.
* Four copies need under 6.4 GB, inside one HDM window.
* The 40-bit block tags cover the whole 48-bit address space.

The DRAM cache holds 65,536 blocks per node: 16 MiB, or 4–32 MiB in the
paper's size study, all valid DC_BLOCKS values. It is a cache, so footprints
are meant to exceed it. The design does not execute these programs. Its
testbenches drive synthetic strided streams with the same request types.
The cache sizes, the weights W = 1, 2 and 3, and the 1-, 2- and 4-node
setups are simulated end to end with those streams.

## Verification

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each testbench
prints `TB_RESULT checks=N failures=M` and has a watchdog.

* **`hdm_decoder`.** Window boundaries and random addresses are checked
  against a model.
* **`spp_prefetcher`.** A stride-2 stream is checked candidate by candidate.
  Also checked: the global-history bootstrap into the next page, a
  descending stream, and the paper's signature example (0x4422 → 0x44222
  with delta 2).
* **`prefetch_queue`.** Checked against a reference model, including the
  threshold and the look-ups.
* **`dram_cache_metadata`.** Random operations are checked against an LRU
  reference model.
* **`bw_adapt`.** Congested and idle periods are checked: rate cuts with
  and without accuracy, the ×1.125 recovery, and grants at rates above and
  below one.
* **`cxl_agent`.** Priorities, tags, routing and latency measurement are
  checked.
* **`wfq_scheduler`.** Checked cycle by cycle against Algorithm 1 for
  W = 1, 2 and 3. The 2:1 issue ratio at W = 2 is also checked.
* **`fam_controller`.** Every completion must reach the right node with the
  right tag. Also checked: bandwidth pacing, the 2:1 demand-to-prefetch
  ratio under backlog, and exact FIFO order with WFQ off.
* **`enhanced_root_complex`.** Run with small tables. Checked: each read is
  answered exactly once, hit re-addressing, and that hits, prefetches,
  redundant drops, threshold drops, throttling and dirty evictions all
  occur.
* **`pooled_memory_system`.** Four nodes with small tables run three
  phases: WFQ, FIFO, and adaptation under congestion. Each mechanism is
  counted and must occur at least once. Completions are checked per node.
* **`tb_pooled_full`.** Runs the top at its default, full size.
* **`tb_pooled_nodes`.** Runs the top side by side with 1 node (FIFO),
  2 nodes (WFQ) and 4 nodes (FIFO and WFQ), using the environment in
  `tb/pooled_env.sv`. With the same streams, WFQ leaves fewer prefetches
  issued than FIFO, because the prefetch queues fill while prefetches wait
  at the memory node.
* **`tb_pooled_sweep`.** Runs two-node systems at the four DRAM cache sizes
  of 4, 8, 16 and 32 MiB, with full 8-way metadata tables, and at the
  fair-queueing weights W = 1, 2 and 3. It uses the same environment and
  checks. In these runs a larger W leaves fewer prefetches issued.

Behavioural stand-ins for the pooled memory device and the local memory
are `tb/fam_device_model.sv` and `tb/local_mem_model.sv`. They are used only
by testbenches.
