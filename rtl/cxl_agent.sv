// cxl_agent: CXL.mem agent of the enhanced root complex.
//
// The agent is the root complex's single door to the fabric. It merges
// three request streams into one stream of CXL.mem requests and sorts the
// completions back:
//   * demand stream: LLC read misses and writebacks that missed the DRAM
//     cache (and core prefetches that missed the LLC, sent as class
//     CLS_CORE_PF). The link tag is the LLC transaction id.
//   * eviction stream: dirty DRAM cache victims written back to FAM
//     (class CLS_EVICT, 256 B).
//   * prefetch stream: DRAM cache prefetches (class CLS_DRAM_PF, 256 B);
//     the link tag is the prefetch-queue index.
// The class field is the prefetch tag the memory node sorts on. Arbitration
// is fixed priority demand > eviction > prefetch, one request per cycle,
// combinational valid/ready pass-through to the link. Writes are posted and
// get no completion.
//
// Completions of demand reads go back to the LLC (llc_rsp_*); completions of
// prefetches go to the prefetch queue logic (pf_rsp_*). The agent stamps
// every demand read with a free-running cycle count when it leaves and
// reports its round-trip latency on return (lat_valid, lat), which feeds the
// bandwidth adaptation counters together with dm_issued and pf_issued.
//
// Following the paper: an agent in the root complex carries all FAM traffic
// of the node, demands and tagged prefetches share it, and latency of
// demands is observed at the root complex. This design's own choices: the
// priority order, tag assignment, posted writes, the latency stamp table.
// The CXL.mem flit format and link layer are outside this block.
module cxl_agent
  import fam_pkg::*;
#(
  parameter int unsigned NODE_ID = 0,
  parameter int unsigned LAT_W   = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // demand stream
  input  logic                 dm_valid,
  output logic                 dm_ready,
  input  paddr_t               dm_addr,
  input  logic                 dm_write,
  input  logic                 dm_corepf,
  input  logic [LLC_ID_W-1:0]  dm_id,
  // eviction stream
  input  logic                 ev_valid,
  output logic                 ev_ready,
  input  blk_t                 ev_blk,
  // prefetch stream
  input  logic                 pf_valid,
  output logic                 pf_ready,
  input  blk_t                 pf_blk,
  input  logic [PFQ_IDX_W-1:0] pf_idx,
  // link
  output logic                 fam_req_valid,
  input  logic                 fam_req_ready,
  output fam_req_t             fam_req,
  input  logic                 fam_rsp_valid,
  input  fam_rsp_t             fam_rsp,
  // completions
  output logic                 llc_rsp_valid,
  output logic [LLC_ID_W-1:0]  llc_rsp_id,
  output logic                 pf_rsp_valid,
  output logic [PFQ_IDX_W-1:0] pf_rsp_idx,
  // events
  output logic                 dm_issued,
  output logic                 pf_issued,
  output logic                 lat_valid,
  output logic [LAT_W-1:0]     lat
);
  logic [LAT_W-1:0] now;
  logic [LAT_W-1:0] stamp [1 << LLC_ID_W];

  always_comb begin
    fam_req          = '0;
    fam_req.node     = NODE_W'(NODE_ID);
    fam_req_valid    = dm_valid || ev_valid || pf_valid;
    dm_ready = 1'b0; ev_ready = 1'b0; pf_ready = 1'b0;
    if (dm_valid) begin
      fam_req.tag   = TAG_W'(dm_id);
      fam_req.addr  = dm_addr;
      fam_req.write = dm_write;
      fam_req.cls   = dm_corepf ? CLS_CORE_PF : CLS_DEMAND;
      dm_ready      = fam_req_ready;
    end else if (ev_valid) begin
      fam_req.addr  = {ev_blk, BLK_OFF_W'(0)};
      fam_req.write = 1'b1;
      fam_req.cls   = CLS_EVICT;
      ev_ready      = fam_req_ready;
    end else if (pf_valid) begin
      fam_req.tag   = TAG_W'(pf_idx);
      fam_req.addr  = {pf_blk, BLK_OFF_W'(0)};
      fam_req.cls   = CLS_DRAM_PF;
      pf_ready      = fam_req_ready;
    end
  end

  assign dm_issued = dm_valid && dm_ready && !dm_write;
  assign pf_issued = pf_valid && pf_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end
  always_ff @(posedge clk) if (dm_issued) stamp[dm_id] <= now;

  logic rsp_dm;
  assign rsp_dm        = fam_rsp_valid && (fam_rsp.cls == CLS_DEMAND || fam_rsp.cls == CLS_CORE_PF);
  assign llc_rsp_valid = rsp_dm;
  assign llc_rsp_id    = LLC_ID_W'(fam_rsp.tag);
  assign pf_rsp_valid  = fam_rsp_valid && (fam_rsp.cls == CLS_DRAM_PF);
  assign pf_rsp_idx    = PFQ_IDX_W'(fam_rsp.tag);
  assign lat_valid     = rsp_dm;
  assign lat           = now - stamp[LLC_ID_W'(fam_rsp.tag)];

  assert property (@(posedge clk) disable iff (!rst_n)
                   fam_rsp_valid |-> (fam_rsp.node == NODE_W'(NODE_ID) && fam_rsp.cls != CLS_EVICT))
    else $error("cxl_agent: completion for another node or for a posted write");
endmodule
