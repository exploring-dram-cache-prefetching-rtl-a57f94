// local_mem_model: behavioural model of one node's local memory controller
// and DRAM (testbench only). Accepts requests when ready (ready drops now and
// then to exercise back-pressure), answers demand reads LATENCY cycles later
// with their LLC id and holds an answer while lm_rsp_ready is low. Writes
// and fills are absorbed and counted; the address of every request is kept
// for the testbench to inspect.
module local_mem_model
  import fam_pkg::*;
#(
  parameter int LATENCY = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                lm_req_valid,
  output logic                lm_req_ready,
  input  lm_req_t             lm_req,
  output logic                lm_rsp_valid,
  input  logic                lm_rsp_ready,
  output logic [LLC_ID_W-1:0] lm_rsp_id,
  output int                  reads,
  output int                  writes,
  output int                  fills,
  output paddr_t              last_addr
);
  logic [LLC_ID_W-1:0] q_id[$];
  longint              q_due[$];
  longint              now;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now = 0; reads <= 0; writes <= 0; fills <= 0; lm_req_ready <= 1'b0;
      lm_rsp_valid <= 1'b0; lm_rsp_id <= '0; last_addr <= '0;
      q_id.delete(); q_due.delete();
    end else begin
      now++;
      if (lm_rsp_valid && lm_rsp_ready) lm_rsp_valid <= 1'b0;
      if ((!lm_rsp_valid || lm_rsp_ready) && q_id.size() > 0 && q_due[0] <= now) begin
        lm_rsp_valid <= 1'b1;
        lm_rsp_id <= q_id.pop_front();
        void'(q_due.pop_front());
      end
      if (lm_req_valid && lm_req_ready) begin
        last_addr <= lm_req.addr;
        if (lm_req.fill) fills <= fills + 1;
        else if (lm_req.write) writes <= writes + 1;
        else begin
          reads <= reads + 1;
          q_id.push_back(lm_req.id);
          q_due.push_back(now + LATENCY);
        end
      end
      lm_req_ready <= ($urandom % 8) != 0;
    end
  end
endmodule
