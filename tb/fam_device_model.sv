// fam_device_model: behavioural model of the pooled memory device behind the
// FAM controller (testbench only; the memory itself is not designed here).
// It accepts every request (dev_req_ready is always high) and returns a
// completion for each read `lat` cycles (LATENCY unless changed) after it was accepted, one per
// cycle, oldest first; writes are absorbed. Counts reads and writes.
module fam_device_model
  import fam_pkg::*;
#(
  parameter int LATENCY = 30
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dev_req_valid,
  output logic     dev_req_ready,
  input  fam_req_t dev_req,
  output logic     dev_rsp_valid,
  output fam_rsp_t dev_rsp,
  output int       reads,
  output int       writes
);
  fam_rsp_t q_rsp[$];
  longint   q_due[$];
  longint   now;
  int       lat = LATENCY;   // a testbench may change it to emulate congestion

  assign dev_req_ready = 1'b1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now = 0; reads <= 0; writes <= 0; dev_rsp_valid <= 1'b0; dev_rsp <= '0;
      q_rsp.delete(); q_due.delete();
    end else begin
      now++;
      dev_rsp_valid <= 1'b0;
      if (q_rsp.size() > 0 && q_due[0] <= now) begin
        dev_rsp_valid <= 1'b1;
        dev_rsp <= q_rsp.pop_front();
        void'(q_due.pop_front());
      end
      if (dev_req_valid) begin
        if (dev_req.write) writes <= writes + 1;
        else begin
          reads <= reads + 1;
          q_rsp.push_back('{node: dev_req.node, tag: dev_req.tag, cls: dev_req.cls});
          q_due.push_back(now + lat);
        end
      end
    end
  end
endmodule
