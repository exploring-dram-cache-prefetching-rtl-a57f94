// tb_wfq_scheduler: runs the deficit weighted round robin scheduler against
// a step-by-step software rendering of the paper's issue algorithm for
// random queue states and prefetch sizes (r = 1 or 4), for weights 1, 2 and
// 3, and checks that with both queues always backlogged by 64 B requests
// the demand : prefetch issue ratio is W : 1.
module tb_wfq_scheduler;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic call;
  logic dq[3], pq[3];
  logic [2:0] r[3];
  logic id[3], ip[3], pt[3];
  logic [7:0] dd[3], pd[3];

  for (genvar g = 0; g < 3; g++) begin : g_w
    wfq_scheduler #(.W(g + 1)) dut (.clk, .rst_n, .call, .dq_nonempty(dq[g]), .pq_nonempty(pq[g]),
      .pq_r(r[g]), .issue_demand(id[g]), .issue_prefetch(ip[g]), .prefetch_turn(pt[g]),
      .demand_deficit(dd[g]), .prefetch_deficit(pd[g]));
  end

  // reference state
  int m_round[3], m_dd[3], m_pd[3];
  int cnt_d[3], cnt_p[3];

  task automatic ref_step(int g, output logic ed, output logic ep);
    int W; W = g + 1;
    ed = 0; ep = 0;
    m_round[g] = (m_round[g] + 1) % (W + 1);
    if (m_round[g] != 0) begin
      if (m_dd[g] < 8) m_dd[g] += 4;
      if (dq[g] && m_dd[g] > 0) begin ed = 1; m_dd[g] -= 1; end
      else if (pq[g] && m_pd[g] > int'(r[g])) begin ep = 1; m_pd[g] -= int'(r[g]); end
    end else begin
      if (m_pd[g] < 8) m_pd[g] += 4;
      if (pq[g] && m_pd[g] > int'(r[g])) begin ep = 1; m_pd[g] -= int'(r[g]); end
      else if (dq[g] && m_dd[g] > 0) begin ed = 1; m_dd[g] -= 1; end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    call = 0;
    for (int g = 0; g < 3; g++) begin
      m_round[g] = 0; m_dd[g] = 0; m_pd[g] = 0; dq[g] = 0; pq[g] = 0; r[g] = 1;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      call = ($urandom % 4) != 0;
      for (int g = 0; g < 3; g++) begin
        dq[g] = $urandom % 3 != 0; pq[g] = $urandom % 2; r[g] = ($urandom % 2) ? 3'd4 : 3'd1;
      end
      #1;
      for (int g = 0; g < 3; g++) begin
        logic ed, ep;
        if (call) begin
          ref_step(g, ed, ep);
        end else begin
          ed = 0; ep = 0;
        end
        checks++;
        if (id[g] !== ed || ip[g] !== ep) begin
          failures++;
          $display("FAIL W=%0d call %0d: issue d/p %0d%0d expected %0d%0d", g + 1, n, id[g], ip[g], ed, ep);
        end
      end
    end
    // backlog: ratio W : 1
    for (int g = 0; g < 3; g++) begin cnt_d[g] = 0; cnt_p[g] = 0; end
    for (int n = 0; n < 1200; n++) begin
      @(negedge clk);
      call = 1;
      for (int g = 0; g < 3; g++) begin dq[g] = 1; pq[g] = 1; r[g] = 3'd1; end
      #1;
      for (int g = 0; g < 3; g++) begin cnt_d[g] += id[g]; cnt_p[g] += ip[g]; end
    end
    for (int g = 0; g < 3; g++) begin
      checks++;
      if (cnt_d[g] + cnt_p[g] != 1200 || cnt_d[g] < (g + 1) * cnt_p[g] - 4 ||
          cnt_d[g] > (g + 1) * cnt_p[g] + 4) begin
        failures++; $display("FAIL W=%0d ratio %0d:%0d", g + 1, cnt_d[g], cnt_p[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
