// enhanced_root_complex: one compute node's CXL root complex extended with a
// DRAM cache prefetcher.
//
// Every FAM-bound request from the LLC passes through here. The block owns
// the SPP prefetcher, the prefetch queue, the DRAM cache metadata, the
// bandwidth adaptation logic and the CXL.mem agent, and sequences them with
// one controller that handles one event at a time, in this priority:
//
//  1. Prefetch completion (buffered in a FIFO as it arrives): release the
//     prefetch-queue entry, install the block in the metadata (a vacant way
//     or the LRU way), command the local memory controller to write the block
//     into the DRAM cache, and if the victim was dirty send it back to FAM.
//  2. Prefetch candidate from the prefetcher: drop it if the prefetch queue
//     already holds the block or the metadata says it is cached; otherwise
//     it reaches the issue stage, where it is dropped if the bandwidth
//     adaptation grants no prefetch or the prefetch queue is at its
//     threshold, and else gets a queue entry and goes out tagged as a
//     prefetch.
//  3. LLC request (read miss, core prefetch or writeback): look the block up
//     in the metadata. A hit is re-addressed into the DRAM cache region of
//     local memory (DC_BASE + block slot * 256 + offset) and sent to the local
//     memory controller; a miss goes to FAM through the agent. Every read
//     trains the prefetcher, hit or miss, and is checked against the
//     prefetch queue. A request is accepted only when the prefetcher has
//     finished the lookahead of the previous one.
//
// Read completions come back to the LLC from FAM (through the agent) or
// from the local memory controller; FAM completions win a tie and the local
// one waits (lm_rsp_ready low).
//
// Data payloads are not carried: requests and completions are addresses and
// tags, and the block copy itself is done by the local memory controller and
// the link. The flow (metadata check, DRAM cache hit re-addressing, training
// on every demand, redundancy and issue-stage checks, fill with LRU
// eviction) follows the paper; the single sequential controller, the
// priorities and the posted writes are this design's own.
module enhanced_root_complex
  import fam_pkg::*;
#(
  parameter int unsigned NODE_ID       = 0,
  parameter int unsigned PQ_ENTRIES    = 256,
  parameter int unsigned PQ_THRESH     = 243,
  parameter int unsigned DC_BLOCKS     = 65536,
  parameter int unsigned DC_WAYS       = 8,
  parameter int unsigned DEGREE        = 4,
  parameter int unsigned ST_ENTRIES    = 512,
  parameter int unsigned PT_ENTRIES    = 1024,
  parameter int unsigned GHR_ENTRIES   = 16,
  parameter int unsigned SAMPLE_CYCLES = 4096,
  parameter paddr_t      DC_BASE       = 48'h0000_8000_0000
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                adapt_en,
  // LLC side
  input  logic                llc_req_valid,
  output logic                llc_req_ready,
  input  paddr_t              llc_req_addr,
  input  logic                llc_req_write,
  input  logic                llc_req_corepf,
  input  logic [LLC_ID_W-1:0] llc_req_id,
  output logic                llc_rsp_valid,
  output logic [LLC_ID_W-1:0] llc_rsp_id,
  // local memory controller side
  output logic                lm_req_valid,
  input  logic                lm_req_ready,
  output lm_req_t             lm_req,
  input  logic                lm_rsp_valid,
  output logic                lm_rsp_ready,
  input  logic [LLC_ID_W-1:0] lm_rsp_id,
  // CXL.mem side
  output logic                fam_req_valid,
  input  logic                fam_req_ready,
  output fam_req_t            fam_req,
  input  logic                fam_rsp_valid,
  input  fam_rsp_t            fam_rsp,
  // observation
  output rc_stats_t           stats,
  output logic [15:0]         pf_rate_q8
);
  localparam logic [1:0] OP_LOOKUP = 2'd0, OP_WRITE = 2'd1, OP_PROBE = 2'd2, OP_FILL = 2'd3;
  localparam int unsigned DA_W = $clog2(DC_BLOCKS);
  localparam int unsigned QI_W = $clog2(PQ_ENTRIES);

  // registers of the request being handled
  paddr_t              r_addr;
  logic                r_write, r_corepf;
  logic [LLC_ID_W-1:0] r_id;
  logic [DA_W-1:0]     r_daddr;
  logic                r_evict;

  // ------------------------------------------------------------ submodules
  logic train_valid, train_ready, cand_valid, cand_ready, spp_done;
  blk_t cand_blk;
  logic [11:0] spp_sig;
  spp_prefetcher #(.ST_ENTRIES(ST_ENTRIES), .PT_ENTRIES(PT_ENTRIES),
                   .GHR_ENTRIES(GHR_ENTRIES), .DEGREE(DEGREE)) u_spp (
    .clk, .rst_n, .train_valid, .train_ready, .train_blk(llc_req_addr[PADDR_W-1:BLK_OFF_W]),
    .cand_valid, .cand_ready, .cand_blk, .done(spp_done), .last_sig(spp_sig));

  logic              pq_alloc, pq_alloc_ok, pq_rel, pq_cand_hit, pq_dem_hit;
  logic [QI_W-1:0]   pq_alloc_idx, pq_rel_idx;
  blk_t              pq_rd_blk;
  logic [$clog2(PQ_ENTRIES+1)-1:0] pq_count;
  prefetch_queue #(.ENTRIES(PQ_ENTRIES), .THRESH(PQ_THRESH)) u_pq (
    .clk, .rst_n, .alloc_req(pq_alloc), .alloc_blk(cand_blk), .alloc_ok(pq_alloc_ok),
    .alloc_idx(pq_alloc_idx), .rel_valid(pq_rel), .rel_idx(pq_rel_idx), .rd_blk(pq_rd_blk),
    .cand_blk(cand_blk), .cand_hit(pq_cand_hit),
    .dem_blk(llc_req_addr[PADDR_W-1:BLK_OFF_W]), .dem_hit(pq_dem_hit), .count(pq_count));

  logic              md_req_valid, md_req_ready, md_rsp_valid, md_rsp_hit, md_rsp_evict;
  logic [1:0]        md_req_op;
  blk_t              md_req_blk, md_evict_blk;
  logic [DA_W-1:0]   md_rsp_daddr;
  dram_cache_metadata #(.BLOCKS(DC_BLOCKS), .WAYS(DC_WAYS)) u_meta (
    .clk, .rst_n, .req_valid(md_req_valid), .req_ready(md_req_ready), .req_op(md_req_op),
    .req_blk(md_req_blk), .rsp_valid(md_rsp_valid), .rsp_hit(md_rsp_hit), .rsp_daddr(md_rsp_daddr),
    .rsp_evict(md_rsp_evict), .rsp_evict_blk(md_evict_blk));

  logic                 ag_dm_valid, ag_dm_ready, ag_ev_valid, ag_ev_ready, ag_pf_valid, ag_pf_ready;
  logic                 ag_llc_valid, ag_pf_rsp_valid, ag_dm_issued, ag_pf_issued, ag_lat_valid;
  logic [LLC_ID_W-1:0]  ag_llc_id;
  logic [PFQ_IDX_W-1:0] ag_pf_rsp_idx;
  logic [15:0]          ag_lat;
  blk_t                 ev_blk_q;
  cxl_agent #(.NODE_ID(NODE_ID)) u_agent (
    .clk, .rst_n,
    .dm_valid(ag_dm_valid), .dm_ready(ag_dm_ready), .dm_addr(r_addr), .dm_write(r_write),
    .dm_corepf(r_corepf), .dm_id(r_id),
    .ev_valid(ag_ev_valid), .ev_ready(ag_ev_ready), .ev_blk(ev_blk_q),
    .pf_valid(ag_pf_valid), .pf_ready(ag_pf_ready), .pf_blk(cand_blk),
    .pf_idx(PFQ_IDX_W'(pq_alloc_idx)),
    .fam_req_valid, .fam_req_ready, .fam_req, .fam_rsp_valid, .fam_rsp,
    .llc_rsp_valid(ag_llc_valid), .llc_rsp_id(ag_llc_id),
    .pf_rsp_valid(ag_pf_rsp_valid), .pf_rsp_idx(ag_pf_rsp_idx),
    .dm_issued(ag_dm_issued), .pf_issued(ag_pf_issued), .lat_valid(ag_lat_valid), .lat(ag_lat));

  // prefetch completions wait here until the controller installs them
  logic            prf_valid, prf_pop;
  logic [PFQ_IDX_W-1:0] prf_idx;
  logic [$clog2(PQ_ENTRIES+1)-1:0] prf_count;
  logic            prf_in_ready;
  sync_fifo #(.WIDTH(PFQ_IDX_W), .DEPTH(PQ_ENTRIES)) u_prf (
    .clk, .rst_n, .in_valid(ag_pf_rsp_valid), .in_ready(prf_in_ready), .in_data(ag_pf_rsp_idx),
    .out_valid(prf_valid), .out_ready(prf_pop), .out_data(prf_idx), .count(prf_count));

  logic bw_allow, bw_pf_req, demand_trigger, ev_useful;
  logic [15:0] bw_ppd, bw_dpp, bw_cur, bw_min;
  logic        bw_pgd;
  logic [31:0] bw_periods, bw_dec, bw_inc;
  bw_adapt #(.SAMPLE_CYCLES(SAMPLE_CYCLES), .DEGREE(DEGREE)) u_bw (
    .clk, .rst_n, .adapt_en,
    .ev_demand_total(demand_trigger), .ev_demand_issued(ag_dm_issued),
    .ev_demand_returned(ag_lat_valid), .ret_latency(ag_lat), .ev_pf_issued(ag_pf_issued),
    .ev_pf_useful(ev_useful), .demand_trigger, .pf_req(bw_pf_req), .pf_allow(bw_allow),
    .rate_q8(pf_rate_q8), .pf_gt_dm(bw_pgd), .pf_per_dm(bw_ppd), .dm_per_pf(bw_dpp),
    .cur_lat(bw_cur), .min_lat(bw_min), .periods(bw_periods), .decreases(bw_dec),
    .increases(bw_inc));

  // ------------------------------------------------------------ controller
  typedef enum logic [3:0] {
    S_IDLE, S_DM_META, S_DM_LM, S_DM_FAM, S_PF_META, S_PF_ISSUE,
    S_FILL_META, S_FILL_LM, S_FILL_EV
  } state_e;
  state_e state;


  logic take_fill, take_cand_drop, take_cand_probe, take_dem;
  always_comb begin
    take_fill = 1'b0; take_cand_drop = 1'b0; take_cand_probe = 1'b0; take_dem = 1'b0;
    if (state == S_IDLE && md_req_ready) begin
      if (prf_valid)                        take_fill = 1'b1;
      else if (cand_valid && pq_cand_hit)   take_cand_drop = 1'b1;
      else if (cand_valid)                  take_cand_probe = 1'b1;
      else if (llc_req_valid && train_ready) take_dem = 1'b1;
    end
  end

  assign prf_pop       = take_fill;
  assign pq_rel        = take_fill;
  assign pq_rel_idx    = QI_W'(prf_idx);
  assign llc_req_ready = take_dem;
  assign train_valid   = take_dem && !llc_req_write;
  assign demand_trigger = train_valid;

  always_comb begin
    md_req_valid = take_fill || take_cand_probe || take_dem;
    md_req_op    = take_fill ? OP_FILL : take_cand_probe ? OP_PROBE
                 : (llc_req_write ? OP_WRITE : OP_LOOKUP);
    md_req_blk   = take_fill ? pq_rd_blk : take_cand_probe ? cand_blk
                 : llc_req_addr[PADDR_W-1:BLK_OFF_W];
  end

  // issue stage of a prefetch
  logic pf_issue_ok;
  assign pf_issue_ok = bw_allow && pq_alloc_ok;
  assign ag_pf_valid = (state == S_PF_ISSUE) && pf_issue_ok;
  assign pq_alloc    = ag_pf_valid && ag_pf_ready;
  assign bw_pf_req   = pq_alloc;
  assign cand_ready  = take_cand_drop || (state == S_PF_META && md_rsp_valid && md_rsp_hit) ||
                       (state == S_PF_ISSUE && (!pf_issue_ok || ag_pf_ready));

  assign ag_dm_valid = (state == S_DM_FAM);
  assign ag_ev_valid = (state == S_FILL_EV);

  always_comb begin
    lm_req = '0;
    lm_req_valid = (state == S_DM_LM) || (state == S_FILL_LM);
    if (state == S_FILL_LM) begin
      lm_req.addr  = DC_BASE + (PADDR_W'(r_daddr) << BLK_OFF_W);
      lm_req.write = 1'b1;
      lm_req.fill  = 1'b1;
    end else begin
      lm_req.addr  = DC_BASE + (PADDR_W'(r_daddr) << BLK_OFF_W) + PADDR_W'(r_addr[BLK_OFF_W-1:0]);
      lm_req.write = r_write;
      lm_req.id    = r_id;
    end
  end

  // completions to the LLC
  assign llc_rsp_valid = ag_llc_valid || lm_rsp_valid;
  assign llc_rsp_id    = ag_llc_valid ? ag_llc_id : lm_rsp_id;
  assign lm_rsp_ready  = !ag_llc_valid;

  assign ev_useful = (state == S_DM_META) && md_rsp_valid && md_rsp_hit && !r_write;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r_addr <= '0; r_write <= 1'b0; r_corepf <= 1'b0; r_id <= '0;
      r_daddr <= '0; r_evict <= 1'b0; ev_blk_q <= '0;
      stats <= '0;
    end else begin
      if (cand_valid && cand_ready) stats.pf_generated <= stats.pf_generated + 1'b1;
      case (state)
        S_IDLE: begin
          if (take_fill) begin
            state    <= S_FILL_META;
          end else if (take_cand_drop) begin
            stats.pf_redundant <= stats.pf_redundant + 1'b1;
          end else if (take_cand_probe) begin
            state <= S_PF_META;
          end else if (take_dem) begin
            r_addr   <= llc_req_addr;
            r_write  <= llc_req_write;
            r_corepf <= llc_req_corepf;
            r_id     <= llc_req_id;
            stats.demands <= stats.demands + 1'b1;
            if (pq_dem_hit && !llc_req_write) stats.inflight_match <= stats.inflight_match + 1'b1;
            state <= S_DM_META;
          end
        end
        S_DM_META: if (md_rsp_valid) begin
          r_daddr <= md_rsp_daddr;
          if (md_rsp_hit) begin
            stats.dc_hits <= stats.dc_hits + 1'b1;
            state <= S_DM_LM;
          end else begin
            state <= S_DM_FAM;
          end
        end
        S_DM_LM:  if (lm_req_ready) state <= S_IDLE;
        S_DM_FAM: if (ag_dm_ready)  state <= S_IDLE;
        S_PF_META: if (md_rsp_valid) begin
          if (md_rsp_hit) begin
            stats.pf_redundant <= stats.pf_redundant + 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_PF_ISSUE;
          end
        end
        S_PF_ISSUE: begin
          if (!bw_allow) begin
            stats.pf_drop_throttle <= stats.pf_drop_throttle + 1'b1;
            state <= S_IDLE;
          end else if (!pq_alloc_ok) begin
            stats.pf_drop_full <= stats.pf_drop_full + 1'b1;
            state <= S_IDLE;
          end else if (ag_pf_ready) begin
            stats.pf_issued <= stats.pf_issued + 1'b1;
            state <= S_IDLE;
          end
        end
        S_FILL_META: if (md_rsp_valid) begin
          r_daddr  <= md_rsp_daddr;
          r_evict  <= md_rsp_evict;
          ev_blk_q <= md_evict_blk;
          state    <= S_FILL_LM;
        end
        S_FILL_LM: if (lm_req_ready) begin
          stats.pf_filled <= stats.pf_filled + 1'b1;
          state <= r_evict ? S_FILL_EV : S_IDLE;
        end
        S_FILL_EV: if (ag_ev_ready) begin
          stats.evictions <= stats.evictions + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // every prefetch completion has a slot: the FIFO is as deep as the queue
  assert property (@(posedge clk) disable iff (!rst_n) ag_pf_rsp_valid |-> prf_in_ready);
endmodule
