// fam_controller: prefetch-aware FAM controller at the pooled memory node.
//
// Requests from up to NODES compute nodes arrive on CXL.mem ports. A
// round-robin input arbiter takes at most one request per cycle and files it
// by its class tag: demands (LLC read misses and writebacks) into the demand
// queue, core prefetches, DRAM cache prefetches and DRAM cache evictions into
// the prefetch queue. A deficit weighted round robin scheduler
// (wfq_scheduler) picks which queue issues next to the memory device.
//
// The controller knows the device bandwidth and issues at that rate: after
// a request of u 64-byte units the next issue slot opens u * ISSUE_PERIOD
// cycles later. With the default clock of 1.2 GHz assumed for this block and
// ISSUE_PERIOD = 2, one 64 B unit per 1.67 ns is 38.4 GB/s, the peak of the
// pooled memory's two DDR4-2400 channels. Read completions from the device
// are returned to the node named in them.
//
// wfq_en = 0 selects the first-come first-served single-queue mode, in which
// every request goes through the demand queue in arrival order; wfq_en
// should change only while the queues are empty.
//
// Device side: dev_req_valid is raised only in a cycle where dev_req_ready is
// high and a request is chosen; the request is taken in that cycle.
//
// Following the paper: the input queue, two queues split by the prefetch
// tag with core and DRAM cache prefetches together, WFQ issue, issue at the
// device's bandwidth, single FIFO queue as the mode without WFQ. This
// design's own choices: queue depths of 64, round-robin input arbitration,
// evictions in the prefetch queue, the 1.2 GHz issue clock.
module fam_controller
  import fam_pkg::*;
#(
  parameter int unsigned NODES        = 4,
  parameter int unsigned DQ_DEPTH     = 64,
  parameter int unsigned PQ_DEPTH     = 64,
  parameter int unsigned ISSUE_PERIOD = 2,
  parameter int unsigned W            = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wfq_en,
  // node ports
  input  logic     [NODES-1:0] in_valid,
  output logic     [NODES-1:0] in_ready,
  input  fam_req_t [NODES-1:0] in_req,
  output logic     [NODES-1:0] out_rsp_valid,
  output fam_rsp_t             out_rsp,
  // memory device
  output logic                 dev_req_valid,
  input  logic                 dev_req_ready,
  output fam_req_t             dev_req,
  input  logic                 dev_rsp_valid,
  input  fam_rsp_t             dev_rsp,
  // observation
  output logic [31:0]          issued_demand,
  output logic [31:0]          issued_prefetch,
  output logic [$clog2(DQ_DEPTH+1)-1:0] dq_count,
  output logic [$clog2(PQ_DEPTH+1)-1:0] pq_count
);
  localparam int unsigned NW = (NODES > 1) ? $clog2(NODES) : 1;

  // ------------------------------------------------------------ input side
  logic          dq_in_valid, dq_in_ready, pq_in_valid, pq_in_ready;
  fam_req_t      sel_req;
  logic          sel_found, sel_to_pq;
  logic [NW-1:0] rr, sel_node;

  function automatic logic goes_pq(fam_req_t q, logic en);
    return en && (q.cls != CLS_DEMAND);
  endfunction

  always_comb begin
    sel_found = 1'b0; sel_node = '0; sel_req = '0; sel_to_pq = 1'b0;
    for (int k = 0; k < NODES; k++) begin
      logic [NW-1:0] n;
      n = NW'((32'(rr) + 32'(k)) % NODES);
      if (!sel_found && in_valid[n] &&
          (goes_pq(in_req[n], wfq_en) ? pq_in_ready : dq_in_ready)) begin
        sel_found = 1'b1;
        sel_node  = n;
        sel_req   = in_req[n];
        sel_to_pq = goes_pq(in_req[n], wfq_en);
      end
    end
    in_ready = '0;
    if (sel_found) in_ready[sel_node] = 1'b1;
    dq_in_valid = sel_found && !sel_to_pq;
    pq_in_valid = sel_found && sel_to_pq;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (sel_found) rr <= NW'((32'(sel_node) + 1) % NODES);
  end

  logic     dq_out_valid, dq_out_ready, pq_out_valid, pq_out_ready;
  fam_req_t dq_head, pq_head;

  sync_fifo #(.WIDTH($bits(fam_req_t)), .DEPTH(DQ_DEPTH)) u_dq (
    .clk, .rst_n, .in_valid(dq_in_valid), .in_ready(dq_in_ready), .in_data(sel_req),
    .out_valid(dq_out_valid), .out_ready(dq_out_ready), .out_data(dq_head), .count(dq_count));
  sync_fifo #(.WIDTH($bits(fam_req_t)), .DEPTH(PQ_DEPTH)) u_pq (
    .clk, .rst_n, .in_valid(pq_in_valid), .in_ready(pq_in_ready), .in_data(sel_req),
    .out_valid(pq_out_valid), .out_ready(pq_out_ready), .out_data(pq_head), .count(pq_count));

  // ------------------------------------------------------------ issue side
  logic [7:0] wait_cnt;
  logic       slot, call, iss_d, iss_p;
  logic       wfq_d, wfq_p, wfq_pturn;
  logic [7:0] ddef, pdef;

  assign slot = (wait_cnt == 0) && dev_req_ready;
  assign call = slot && wfq_en && (dq_out_valid || pq_out_valid);

  wfq_scheduler #(.W(W)) u_wfq (
    .clk, .rst_n, .call, .dq_nonempty(dq_out_valid), .pq_nonempty(pq_out_valid),
    .pq_r(req_units(pq_head.cls)), .issue_demand(wfq_d), .issue_prefetch(wfq_p),
    .prefetch_turn(wfq_pturn), .demand_deficit(ddef), .prefetch_deficit(pdef));

  assign iss_d = wfq_en ? wfq_d : (slot && dq_out_valid);
  assign iss_p = wfq_en && wfq_p;
  assign dq_out_ready  = iss_d;
  assign pq_out_ready  = iss_p;
  assign dev_req_valid = iss_d || iss_p;
  assign dev_req       = iss_p ? pq_head : dq_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt <= '0; issued_demand <= '0; issued_prefetch <= '0;
    end else begin
      if (dev_req_valid)
        wait_cnt <= 8'(32'(req_units(dev_req.cls)) * ISSUE_PERIOD - 1);
      else if (wait_cnt != 0)
        wait_cnt <= wait_cnt - 1'b1;
      if (iss_d) issued_demand   <= issued_demand + 1'b1;
      if (iss_p) issued_prefetch <= issued_prefetch + 1'b1;
    end
  end

  // ------------------------------------------------------------ completions
  always_comb begin
    out_rsp = dev_rsp;
    for (int n = 0; n < NODES; n++)
      out_rsp_valid[n] = dev_rsp_valid && (32'(dev_rsp.node) == n);
  end
endmodule
