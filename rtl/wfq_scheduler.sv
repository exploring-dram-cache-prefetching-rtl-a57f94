// wfq_scheduler: work-conserving deficit weighted round robin between the
// demand queue and the prefetch queue of the FAM controller.
//
// Each call (call = 1 for one cycle, once per issue slot) runs one step of
// the paper's issue algorithm:
//   round = (round + 1) mod (W + 1)
//   round != 0 (demand's turn):
//       if demand_deficit < MAX_DEMAND_DEFICIT: demand_deficit += QUANTUM
//       if demand waiting and demand_deficit > 0: issue demand, deficit -= 1
//       else if prefetch waiting and prefetch_deficit > r: issue prefetch,
//            prefetch_deficit -= r
//   round == 0 (prefetch's turn): the same with the roles swapped,
//       prefetch_deficit grows by QUANTUM up to MAX_PREFETCH_DEFICIT.
// r is the size of the prefetch at the head of the prefetch queue in units
// of demand blocks (4 for a 256 B DRAM cache prefetch, 1 for a 64 B core
// prefetch), so prefetches are charged for the bandwidth they use. Demands
// and prefetches are thus served about W : 1 per window of W + 1 rounds,
// and either class may use slots the other leaves idle.
//
// issue_demand / issue_prefetch are combinational in the cycle of the call;
// round and deficits update at the clock edge.
//
// Following the paper: the algorithm itself, comparisons and all, the W+1
// round window, the block-size ratio r. The paper writes the round update
// as "current_round += (current_weight+1)%(W+1)"; it is read here as a
// modulo-(W+1) round counter, as its prose describes. QUANTUM = 4 and the
// maximum deficits of 8 are this design's choices (the paper gives no
// values); W = 2 is the weight used in its sensitivity runs.
module wfq_scheduler #(
  parameter int unsigned W                    = 2,
  parameter int unsigned QUANTUM              = 4,
  parameter int unsigned MAX_DEMAND_DEFICIT   = 8,
  parameter int unsigned MAX_PREFETCH_DEFICIT = 8,
  parameter int unsigned DW                   = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          call,
  input  logic          dq_nonempty,
  input  logic          pq_nonempty,
  input  logic [2:0]    pq_r,
  output logic          issue_demand,
  output logic          issue_prefetch,
  output logic          prefetch_turn,
  output logic [DW-1:0] demand_deficit,
  output logic [DW-1:0] prefetch_deficit
);
  localparam int unsigned RW = $clog2(W + 1) + 1;
  logic [RW-1:0] round, round_nx;
  logic [DW-1:0] dd, pd, r;

  assign r = DW'(pq_r);

  always_comb begin
    round_nx = (round == RW'(W)) ? '0 : round + 1'b1;
    prefetch_turn = (round_nx == '0);
    dd = demand_deficit;
    pd = prefetch_deficit;
    issue_demand = 1'b0;
    issue_prefetch = 1'b0;
    if (!prefetch_turn) begin
      if (dd < DW'(MAX_DEMAND_DEFICIT)) dd = dd + DW'(QUANTUM);
      if (dq_nonempty && dd > 0) begin
        issue_demand = 1'b1;
        dd = dd - 1'b1;
      end else if (pq_nonempty && pd > r) begin
        issue_prefetch = 1'b1;
        pd = pd - r;
      end
    end else begin
      if (pd < DW'(MAX_PREFETCH_DEFICIT)) pd = pd + DW'(QUANTUM);
      if (pq_nonempty && pd > r) begin
        issue_prefetch = 1'b1;
        pd = pd - r;
      end else if (dq_nonempty && dd > 0) begin
        issue_demand = 1'b1;
        dd = dd - 1'b1;
      end
    end
    if (!call) begin
      issue_demand = 1'b0;
      issue_prefetch = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      round <= '0; demand_deficit <= '0; prefetch_deficit <= '0;
    end else if (call) begin
      round <= round_nx;
      demand_deficit <= dd;
      prefetch_deficit <= pd;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(issue_demand && issue_prefetch));
endmodule
