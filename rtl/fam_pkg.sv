// fam_pkg: types and constants shared by the DRAM-cache prefetching design.
//
// The design caches sub-page blocks of fabric-attached memory (FAM, memory
// pooled behind a CXL.mem link) in a slice of each compute node's local DRAM.
// Addresses are 48-bit node physical byte addresses. Demand traffic from the
// last-level cache moves 64-byte lines; the DRAM cache and its prefetches move
// 256-byte blocks, the block size the evaluation settles on. A FAM page is
// 4 KiB, so one page holds 16 cache blocks.
//
// Request classes travel with every request on the link. The class is the
// "prefetch tag" that lets the memory-side controller sort demand traffic
// from prefetch traffic. The numbers of this file follow the paper where it
// gives them (48-bit address space, 256 B blocks, 64 B lines, 8 cores with
// 16 pending transactions each); the encodings are this design's own.
package fam_pkg;

  localparam int unsigned PADDR_W      = 48;   // node physical address bits
  localparam int unsigned LINE_BYTES   = 64;   // LLC line (demand granule)
  localparam int unsigned BLK_BYTES    = 256;  // DRAM cache / prefetch block
  localparam int unsigned BLK_OFF_W    = $clog2(BLK_BYTES);
  localparam int unsigned BLK_W        = PADDR_W - BLK_OFF_W;  // 40-bit block number
  localparam int unsigned PAGE_BYTES   = 4096;
  localparam int unsigned PAGE_BLOCKS  = PAGE_BYTES / BLK_BYTES;  // 16
  // Size of a request in 64-byte units: "r" of the fair-queueing algorithm.
  localparam int unsigned BLK_UNITS    = BLK_BYTES / LINE_BYTES;  // 4

  // LLC transaction identifiers: 8 cores x 16 pending transactions.
  localparam int unsigned LLC_ID_W     = 7;
  localparam int unsigned PFQ_IDX_W    = 8;     // 256-entry prefetch queue
  localparam int unsigned TAG_W        = 8;     // link tag: LLC id or queue index
  localparam int unsigned NODE_W       = 2;     // up to 4 compute nodes

  typedef logic [PADDR_W-1:0] paddr_t;
  typedef logic [BLK_W-1:0]   blk_t;

  // Request class carried on the link (the prefetch tag).
  typedef enum logic [1:0] {
    CLS_DEMAND  = 2'd0,   // LLC read miss or LLC writeback
    CLS_CORE_PF = 2'd1,   // core (L2) prefetch that missed the LLC
    CLS_DRAM_PF = 2'd2,   // DRAM cache prefetch of one 256 B block
    CLS_EVICT   = 2'd3    // dirty 256 B block written back from the DRAM cache
  } req_class_e;

  // One CXL.mem request as seen by the FAM controller.
  typedef struct packed {
    logic [NODE_W-1:0] node;
    logic [TAG_W-1:0]  tag;
    paddr_t            addr;
    logic              write;
    req_class_e        cls;
  } fam_req_t;

  // One read completion returned to a node.
  typedef struct packed {
    logic [NODE_W-1:0] node;
    logic [TAG_W-1:0]  tag;
    req_class_e        cls;
  } fam_rsp_t;

  // Request from a root complex to its node's local memory controller.
  typedef struct packed {
    paddr_t              addr;
    logic                write;
    logic                fill;    // write of a prefetched block into the DRAM cache
    logic [LLC_ID_W-1:0] id;      // LLC id of a demand served by the DRAM cache
  } lm_req_t;

  // Class-dependent size in 64-byte units.
  function automatic logic [2:0] req_units(req_class_e c);
    return (c == CLS_DRAM_PF || c == CLS_EVICT) ? 3'(BLK_UNITS) : 3'd1;
  endfunction

  // Per-node event counts exposed for observation.
  typedef struct packed {
    logic [31:0] demands;          // FAM-bound LLC requests accepted
    logic [31:0] dc_hits;          // of those, served by the DRAM cache
    logic [31:0] pf_generated;     // candidates produced by the prefetcher
    logic [31:0] pf_issued;        // prefetches sent to FAM
    logic [31:0] pf_redundant;     // dropped: already queued or cached
    logic [31:0] pf_drop_full;     // dropped: prefetch queue at threshold
    logic [31:0] pf_drop_throttle; // dropped: bandwidth adaptation
    logic [31:0] pf_filled;        // prefetched blocks written into the cache
    logic [31:0] evictions;        // dirty victims written back to FAM
    logic [31:0] inflight_match;   // demand found its block in the prefetch queue
  } rc_stats_t;

endpackage
