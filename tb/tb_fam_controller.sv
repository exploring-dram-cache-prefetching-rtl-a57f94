// tb_fam_controller: four nodes flood the FAM controller with demand reads
// and 256 B DRAM cache prefetches (with some core prefetches and writes).
// Checks, with a scoreboard: every read gets exactly one completion at the
// right node with its tag and class; issue slots are spaced by the request
// size times ISSUE_PERIOD (the device bandwidth), exactly so while both
// queues are backlogged in FIFO mode; in WFQ mode (W = 2) demands and
// 256 B prefetches are issued 2 : 1 while both queues are backlogged; in
// FIFO mode (with core prefetches and writes mixed in) requests leave in the order they were accepted.
module tb_fam_controller;
  import fam_pkg::*;
  localparam int NODES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wfq_en;
  logic [NODES-1:0] in_valid, in_ready, out_rsp_valid;
  fam_req_t [NODES-1:0] in_req;
  fam_rsp_t out_rsp;
  logic dev_req_valid, dev_req_ready, dev_rsp_valid;
  fam_req_t dev_req; fam_rsp_t dev_rsp;
  logic [31:0] issued_demand, issued_prefetch;
  logic [6:0] dq_count, pq_count;
  int reads, writes;

  fam_controller #(.NODES(NODES)) dut (.*);
  fam_device_model #(.LATENCY(25)) dev (.clk, .rst_n, .dev_req_valid, .dev_req_ready, .dev_req,
    .dev_rsp_valid, .dev_rsp, .reads, .writes);

  int outstanding[NODES][256];
  int sent_reads = 0, got = 0;
  logic gen = 0;
  int next_tag[NODES];
  fam_req_t accepted[$];
  longint last_issue = -1; int last_units = 0; longint cyc = 0;
  int win_d = 0, win_p = 0;
  logic measure = 0, fifo_check = 0, mixed = 0;

  function automatic fam_req_t mk(int n, int t, int kind);
    fam_req_t q;
    q = '0; q.node = 2'(n); q.tag = 8'(t); q.addr = {$urandom, $urandom} & 48'hFFFF_FFFF_FF00;
    case (kind)
      0: q.cls = CLS_DEMAND;
      1: q.cls = CLS_DRAM_PF;
      2: q.cls = CLS_CORE_PF;
      default: begin q.cls = CLS_DEMAND; q.write = 1; end
    endcase
    return q;
  endfunction

  // stimulus: each node keeps a request offered while gen is high
  always @(negedge clk) begin
    cyc++;
    for (int n = 0; n < NODES; n++) begin
      if (!rst_n || !gen) in_valid[n] = 0;
      else if (!in_valid[n] || in_ready[n]) begin
        int kind, t;
        kind = (n % 2 == 0) ? 0 : 1;
        if (mixed && $urandom % 10 == 0) kind = 2 + $urandom % 2;
        t = next_tag[n]; next_tag[n] = (t + 1) % 256;
        in_req[n] = mk(n, t, kind);
        in_valid[n] = 1;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++)
      if (in_valid[n] && in_ready[n]) begin
        if (!in_req[n].write) begin outstanding[n][in_req[n].tag]++; sent_reads++; end
        accepted.push_back(in_req[n]);
      end
    if (dev_req_valid) begin
      fam_req_t exp;
      // bandwidth pacing
      if (last_issue >= 0) begin
        checks++;
        if (cyc - last_issue < last_units * 2 ||
            (fifo_check && cyc - last_issue != last_units * 2)) begin
          failures++; $display("FAIL spacing %0d after %0d units", cyc - last_issue, last_units);
        end
      end
      last_issue = cyc; last_units = int'(req_units(dev_req.cls));
      if (measure) begin
        if (dev_req.cls == CLS_DEMAND) win_d++;
        if (dev_req.cls == CLS_DRAM_PF) win_p++;
      end
      if (fifo_check) begin
        exp = accepted.pop_front();
        checks++;
        if (exp != dev_req) begin failures++; $display("FAIL FIFO order"); end
      end
    end
    for (int n = 0; n < NODES; n++)
      if (out_rsp_valid[n]) begin
        checks++; got++;
        if (out_rsp.node != 2'(n) || outstanding[n][out_rsp.tag] == 0 || out_rsp.cls == CLS_EVICT) begin
          failures++; $display("FAIL completion node %0d tag %0d", n, out_rsp.tag);
        end else outstanding[n][out_rsp.tag]--;
      end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (outstanding[n, t]) outstanding[n][t] = 0;
    foreach (next_tag[n]) next_tag[n] = 0;
    in_valid = '0; in_req = '0; wfq_en = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    // WFQ mode, backlogged
    gen = 1;
    repeat (400) @(posedge clk);
    measure = 1;
    repeat (3000) @(posedge clk);
    measure = 0;
    checks++;
    if (dq_count == 0 || pq_count == 0) begin failures++; $display("FAIL queues not backlogged"); end
    checks++;
    if (win_d < 2 * win_p - 6 || win_d > 2 * win_p + 6 || win_p == 0) begin
      failures++; $display("FAIL WFQ ratio %0d:%0d", win_d, win_p);
    end
    $display("WFQ demand:prefetch = %0d:%0d", win_d, win_p);
    gen = 0;
    wait (dq_count == 0 && pq_count == 0);
    repeat (60) @(posedge clk);
    // FIFO mode
    wfq_en = 0;
    accepted.delete();
    @(negedge clk); fifo_check = 1; mixed = 1; last_issue = -1; gen = 1;
    repeat (2000) @(posedge clk);
    @(negedge clk); gen = 0;
    wait (dq_count == 0 && pq_count == 0);
    fifo_check = 0;
    repeat (60) @(posedge clk);
    checks++;
    if (got != sent_reads) begin failures++; $display("FAIL %0d of %0d reads completed", got, sent_reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
