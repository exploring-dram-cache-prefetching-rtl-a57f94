// dram_cache_metadata: tag store of the DRAM cache, kept in on-chip SRAM in
// the root complex.
//
// The DRAM cache is a region of local DRAM holding BLOCKS 256-byte blocks of
// FAM data. For each block this table keeps the fields of the paper's
// metadata format: ID (the FAM block number held, compared as a tag), the
// DRAM cache physical block address, dirty, valid and LRU age. The table is
// set associative with WAYS ways; the set of a FAM block is a hash of its
// block number (XOR folding of the block number into the set-index width).
//
// Operations (req_valid/req_ready, one result pulse rsp_valid two cycles
// after acceptance; req_ready is low while an operation is in flight and
// during the SETS-cycle clear after reset):
//   OP_LOOKUP  demand read: on a hit return the DRAM block address, make the
//              way most recently used.
//   OP_WRITE   demand write (LLC writeback): on a hit also set dirty.
//   OP_PROBE   prefetch redundancy check: hit/miss only, no state change.
//   OP_FILL    install a prefetched block: use an invalid way if there is one,
//              else the least recently used way; report a dirty victim
//              (rsp_evict, rsp_evict_blk) so that it is written back to FAM.
//              Filling a block already present only refreshes its LRU age.
//
// Following the paper: set associative, LRU, metadata outside the DRAM cache
// in SRAM, hashing of the FAM address, tag compare, fields ID/physical block
// address/dirty/valid/LRU, fill into a vacancy or over the LRU block after
// its eviction, 16 MiB of cache in 256 B blocks (64K entries, its example).
// This design's own choices: 8 ways, XOR-fold hash, 3-bit LRU ages, a
// one-operation-at-a-time two-cycle pipeline, clear-on-reset sequencing.
module dram_cache_metadata
  import fam_pkg::*;
#(
  parameter int unsigned BLOCKS = 65536,
  parameter int unsigned WAYS   = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [1:0]                  req_op,
  input  blk_t                        req_blk,
  output logic                        rsp_valid,
  output logic                        rsp_hit,
  output logic [$clog2(BLOCKS)-1:0]   rsp_daddr,
  output logic                        rsp_evict,
  output blk_t                        rsp_evict_blk
);
  localparam logic [1:0] OP_LOOKUP = 2'd0, OP_WRITE = 2'd1, OP_PROBE = 2'd2, OP_FILL = 2'd3;
  localparam int unsigned SETS  = BLOCKS / WAYS;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned DA_W  = $clog2(BLOCKS);

  typedef struct packed {
    blk_t             id;
    logic [DA_W-1:0]  daddr;
    logic             dirty;
    logic             valid;
    logic [WAY_W-1:0] lru;     // 0 = most recently used
  } meta_t;
  typedef meta_t [WAYS-1:0] set_t;

  set_t mem [SETS];

  function automatic logic [SET_W-1:0] hash_set(blk_t b);
    logic [SET_W-1:0] h;
    h = '0;
    for (int i = 0; i < BLK_W; i += SET_W)
      h = h ^ SET_W'(b >> i);
    return h;
  endfunction

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_EXEC} state_e;
  state_e state;
  logic [SET_W-1:0] clr_set, r_set;
  logic [1:0]       r_op;
  blk_t             r_blk;
  set_t             r_data;

  assign req_ready = (state == S_IDLE);

  // ---------------------------------------------------------------- compute
  logic             hit;
  logic [WAY_W-1:0] hit_way, inv_way, lru_way, use_way;
  logic             inv_found;
  set_t             new_set;
  logic             do_write;

  always_comb begin
    hit = 1'b0; hit_way = '0; inv_found = 1'b0; inv_way = '0; lru_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (r_data[w].valid && r_data[w].id == r_blk) begin hit = 1'b1; hit_way = WAY_W'(w); end
      if (!r_data[w].valid) begin inv_found = 1'b1; inv_way = WAY_W'(w); end
      if (r_data[w].lru == WAY_W'(WAYS - 1)) lru_way = WAY_W'(w);
    end
    use_way  = hit ? hit_way : (inv_found ? inv_way : lru_way);
    do_write = (r_op == OP_FILL) || (hit && r_op != OP_PROBE);
    new_set  = r_data;
    // LRU: ways younger than the touched one age by one; it becomes 0
    for (int w = 0; w < WAYS; w++)
      if (r_data[w].lru < r_data[use_way].lru) new_set[w].lru = r_data[w].lru + 1'b1;
    new_set[use_way].lru = '0;
    if (r_op == OP_WRITE) new_set[use_way].dirty = 1'b1;
    if (r_op == OP_FILL && !hit) begin
      new_set[use_way].id    = r_blk;
      new_set[use_way].valid = 1'b1;
      new_set[use_way].dirty = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CLEAR; clr_set <= '0; r_set <= '0; r_op <= '0; r_blk <= '0;
      rsp_valid <= 1'b0; rsp_hit <= 1'b0; rsp_daddr <= '0; rsp_evict <= 1'b0; rsp_evict_blk <= '0;
    end else begin
      rsp_valid <= 1'b0;
      case (state)
        S_CLEAR: begin
          clr_set <= clr_set + 1'b1;
          if (clr_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          r_set <= hash_set(req_blk);
          r_op  <= req_op;
          r_blk <= req_blk;
          state <= S_EXEC;
        end
        S_EXEC: begin
          rsp_valid     <= 1'b1;
          rsp_hit       <= hit;
          rsp_daddr     <= r_data[use_way].daddr;
          rsp_evict     <= (r_op == OP_FILL) && !hit && !inv_found &&
                           r_data[lru_way].valid && r_data[lru_way].dirty;
          rsp_evict_blk <= r_data[lru_way].id;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // single-port SRAM: clear, synchronous read, write-back
  always_ff @(posedge clk) begin
    if (state == S_CLEAR) begin
      for (int w = 0; w < WAYS; w++)
        mem[clr_set][w] <= '{id: '0, daddr: DA_W'(clr_set) * DA_W'(WAYS) + DA_W'(w),
                             dirty: 1'b0, valid: 1'b0, lru: WAY_W'(w)};
    end else if (state == S_IDLE && req_valid) begin
      r_data <= mem[hash_set(req_blk)];
    end else if (state == S_EXEC && do_write) begin
      mem[r_set] <= new_set;
    end
  end
endmodule
