// prefetch_queue: the root complex's table of DRAM cache prefetches in
// flight, similar in role to a miss status holding register file.
//
// A prefetch may go to FAM only if it gets an entry here; the entry holds
// its 256-byte block number until the FAM response returns, and the entry
// index travels with the request as its link tag. Two associative search
// ports let the root complex ask whether a block is already being
// prefetched: one for new prefetch candidates (redundancy check) and one for
// demand requests. Issue is refused when the queue holds THRESH entries or
// more, so THRESH = ENTRIES means "drop when full" and a smaller value is the
// early-drop threshold.
//
// Timing: alloc_ok, alloc_idx, the search results and rd_blk are
// combinational; an allocation or a release takes effect at the next clock.
// An allocation and a release may happen in the same cycle.
//
// Following the paper: fixed length 256 per node, held until the response,
// drop when full or at a threshold such as 95%, demand address check.
// This design's own choices: lowest free index first, two search ports,
// THRESH = 243 (95% of 256, rounded down).
module prefetch_queue
  import fam_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned THRESH  = 243
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // allocation
  input  logic                        alloc_req,
  input  blk_t                        alloc_blk,
  output logic                        alloc_ok,
  output logic [$clog2(ENTRIES)-1:0]  alloc_idx,
  // release on response; rd_blk returns the block of rel_idx
  input  logic                        rel_valid,
  input  logic [$clog2(ENTRIES)-1:0]  rel_idx,
  output blk_t                        rd_blk,
  // associative searches
  input  blk_t                        cand_blk,
  output logic                        cand_hit,
  input  blk_t                        dem_blk,
  output logic                        dem_hit,
  // occupancy
  output logic [$clog2(ENTRIES+1)-1:0] count
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(ENTRIES+1);

  logic [ENTRIES-1:0] valid;
  blk_t               blk [ENTRIES];
  logic               free_found;

  always_comb begin
    free_found = 1'b0;
    alloc_idx  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        free_found = 1'b1;
        alloc_idx  = IW'(i);
      end
    end
    alloc_ok = free_found && (count < CW'(THRESH));
  end

  always_comb begin
    cand_hit = 1'b0;
    dem_hit  = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && blk[i] == cand_blk) cand_hit = 1'b1;
      if (valid[i] && blk[i] == dem_blk)  dem_hit  = 1'b1;
    end
  end

  assign rd_blk = blk[rel_idx];

  logic do_alloc, do_rel;
  assign do_alloc = alloc_req && alloc_ok;
  assign do_rel   = rel_valid && valid[rel_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      count <= '0;
    end else begin
      if (do_rel)   valid[rel_idx]   <= 1'b0;
      if (do_alloc) valid[alloc_idx] <= 1'b1;
      if (do_alloc && !do_rel)      count <= count + 1'b1;
      else if (do_rel && !do_alloc) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (do_alloc) blk[alloc_idx] <= alloc_blk;

  // A release must name an entry that is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) rel_valid |-> valid[rel_idx])
    else $error("prefetch_queue: release of idle entry %0d", rel_idx);
endmodule
