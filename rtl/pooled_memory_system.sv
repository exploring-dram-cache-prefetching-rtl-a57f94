// pooled_memory_system: compute nodes sharing one pool of fabric-attached
// memory, each node caching sub-page blocks of it in its own local DRAM.
//
// Each of NODES compute nodes has an HDM decoder and an enhanced root
// complex. An LLC request whose address falls in a programmed FAM window
// goes to the node's root complex, which serves it from the node's DRAM
// cache or forwards it over CXL.mem, and prefetches 256-byte blocks into the
// DRAM cache; any other request leaves on the node's local port for the
// local memory controller. All root complexes share the prefetch-aware FAM
// controller of the memory node, which queues demands and prefetches apart
// and issues them to the pooled memory device with weighted fair queueing.
//
// Outside this top, and reached through its ports: the processors and their
// caches (llc_*), each node's local memory controller and DRAM (loc_*, lm_*),
// the memory device behind the FAM controller (dev_*), and the CXL link,
// modelled here as a direct connection.
//
// Modes: adapt_en turns on prefetch bandwidth adaptation in every root
// complex; wfq_en selects weighted fair queueing (1) or one first-come
// first-served queue (0) at the memory node. Both may be on together.
//
// Sizes follow the paper's main configuration: 4 nodes, a 256-entry prefetch
// queue per node, a 16 MiB DRAM cache of 256-byte blocks per node, WFQ
// weight 2.
module pooled_memory_system
  import fam_pkg::*;
#(
  parameter int unsigned NODES         = 4,
  parameter int unsigned PQ_ENTRIES    = 256,
  parameter int unsigned PQ_THRESH     = 243,
  parameter int unsigned DC_BLOCKS     = 65536,
  parameter int unsigned DC_WAYS       = 8,
  parameter int unsigned DEGREE        = 4,
  parameter int unsigned SAMPLE_CYCLES = 4096,
  parameter int unsigned WFQ_W         = 2,
  parameter int unsigned ISSUE_PERIOD  = 2,
  parameter int unsigned HDM_RANGES    = 2
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             adapt_en,
  input  logic                             wfq_en,
  // HDM decoder programming (enumeration), one node at a time
  input  logic [NODES-1:0]                 hdm_prog_we,
  input  logic [$clog2(HDM_RANGES)-1:0]    hdm_prog_idx,
  input  logic                             hdm_prog_en,
  input  paddr_t                           hdm_prog_base,
  input  paddr_t                           hdm_prog_size,
  // LLC side of each node
  input  logic   [NODES-1:0]               llc_req_valid,
  output logic   [NODES-1:0]               llc_req_ready,
  input  paddr_t [NODES-1:0]               llc_req_addr,
  input  logic   [NODES-1:0]               llc_req_write,
  input  logic   [NODES-1:0]               llc_req_corepf,
  input  logic   [NODES-1:0][LLC_ID_W-1:0] llc_req_id,
  output logic   [NODES-1:0]               llc_rsp_valid,
  output logic   [NODES-1:0][LLC_ID_W-1:0] llc_rsp_id,
  // requests of each node that decode to local memory
  output logic   [NODES-1:0]               loc_req_valid,
  input  logic   [NODES-1:0]               loc_req_ready,
  // root complex to local memory controller (DRAM cache accesses)
  output logic    [NODES-1:0]              lm_req_valid,
  input  logic    [NODES-1:0]              lm_req_ready,
  output lm_req_t [NODES-1:0]              lm_req,
  input  logic    [NODES-1:0]              lm_rsp_valid,
  output logic    [NODES-1:0]              lm_rsp_ready,
  input  logic    [NODES-1:0][LLC_ID_W-1:0] lm_rsp_id,
  // pooled memory device
  output logic                             dev_req_valid,
  input  logic                             dev_req_ready,
  output fam_req_t                         dev_req,
  input  logic                             dev_rsp_valid,
  input  fam_rsp_t                         dev_rsp,
  // observation
  output rc_stats_t [NODES-1:0]            stats,
  output logic      [NODES-1:0][15:0]      pf_rate_q8,
  output logic [31:0]                      fam_issued_demand,
  output logic [31:0]                      fam_issued_prefetch
);
  logic     [NODES-1:0] link_req_valid, link_req_ready, link_rsp_valid;
  fam_req_t [NODES-1:0] link_req;
  fam_rsp_t             link_rsp;

  for (genvar n = 0; n < NODES; n++) begin : g_node
    logic to_fam, rc_req_ready;
    logic [$clog2(HDM_RANGES)-1:0] win;

    hdm_decoder #(.NRANGES(HDM_RANGES)) u_hdm (
      .clk, .rst_n, .prog_we(hdm_prog_we[n]), .prog_idx(hdm_prog_idx), .prog_en(hdm_prog_en),
      .prog_base(hdm_prog_base), .prog_size(hdm_prog_size),
      .addr(llc_req_addr[n]), .to_fam, .window(win));

    assign loc_req_valid[n] = llc_req_valid[n] && !to_fam;
    assign llc_req_ready[n] = to_fam ? rc_req_ready : loc_req_ready[n];

    enhanced_root_complex #(
      .NODE_ID(n), .PQ_ENTRIES(PQ_ENTRIES), .PQ_THRESH(PQ_THRESH), .DC_BLOCKS(DC_BLOCKS),
      .DC_WAYS(DC_WAYS), .DEGREE(DEGREE), .SAMPLE_CYCLES(SAMPLE_CYCLES)
    ) u_rc (
      .clk, .rst_n, .adapt_en,
      .llc_req_valid(llc_req_valid[n] && to_fam), .llc_req_ready(rc_req_ready),
      .llc_req_addr(llc_req_addr[n]), .llc_req_write(llc_req_write[n]),
      .llc_req_corepf(llc_req_corepf[n]), .llc_req_id(llc_req_id[n]),
      .llc_rsp_valid(llc_rsp_valid[n]), .llc_rsp_id(llc_rsp_id[n]),
      .lm_req_valid(lm_req_valid[n]), .lm_req_ready(lm_req_ready[n]), .lm_req(lm_req[n]),
      .lm_rsp_valid(lm_rsp_valid[n]), .lm_rsp_ready(lm_rsp_ready[n]), .lm_rsp_id(lm_rsp_id[n]),
      .fam_req_valid(link_req_valid[n]), .fam_req_ready(link_req_ready[n]), .fam_req(link_req[n]),
      .fam_rsp_valid(link_rsp_valid[n]), .fam_rsp(link_rsp),
      .stats(stats[n]), .pf_rate_q8(pf_rate_q8[n]));
  end

  logic [$clog2(64+1)-1:0] dq_count, pq_count;
  fam_controller #(.NODES(NODES), .ISSUE_PERIOD(ISSUE_PERIOD), .W(WFQ_W)) u_famc (
    .clk, .rst_n, .wfq_en,
    .in_valid(link_req_valid), .in_ready(link_req_ready), .in_req(link_req),
    .out_rsp_valid(link_rsp_valid), .out_rsp(link_rsp),
    .dev_req_valid, .dev_req_ready, .dev_req, .dev_rsp_valid, .dev_rsp,
    .issued_demand(fam_issued_demand), .issued_prefetch(fam_issued_prefetch),
    .dq_count, .pq_count);
endmodule
