// tb_bw_adapt: two instances with 256-cycle sampling periods see the same
// demand latency: 100 cycles in the first period, 200 cycles afterwards.
// Instance u0 sees no useful prefetches, u1 sees every prefetch used.
// Worked out by hand from the update rule:
//   period 1: latency 100 is the minimum, no congestion -> increase
//             (rate stays at its cap of 4.0 = 1024 in Q8.8)
//   period 2: 200 > 1.25 * 100 -> decrease with diff = 1.0:
//             u0: f = 1.0 * (1 - 0) clamped to 0.5 -> rate 512
//             u1: f = 1.0 * (1 - 1) clamped to 1/16 -> rate 960
// Then checks the issue grants: at rate 2.0 a demand grants exactly two
// prefetches; after further decreases below 1.0 (u0: 256 -> 128, i.e. one
// prefetch per two demands) only every second demand grants one.
// Also checks that with adapt_en low every prefetch is allowed.
module tb_bw_adapt;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic adapt_en = 1;
  logic ret, pfi, use0, use1, trig, req0, req1, allow0, allow1;
  logic [15:0] lat;
  logic [15:0] rate0, rate1, ppd0, ppd1, dpp0, dpp1, cur0, cur1, min0, min1;
  logic pgd0, pgd1;
  logic [31:0] per0, per1, dec0, dec1, inc0, inc1;

  bw_adapt #(.SAMPLE_CYCLES(256)) u0 (.clk, .rst_n, .adapt_en, .ev_demand_total(trig),
    .ev_demand_issued(trig), .ev_demand_returned(ret), .ret_latency(lat), .ev_pf_issued(pfi),
    .ev_pf_useful(use0), .demand_trigger(trig), .pf_req(req0), .pf_allow(allow0),
    .rate_q8(rate0), .pf_gt_dm(pgd0), .pf_per_dm(ppd0), .dm_per_pf(dpp0), .cur_lat(cur0),
    .min_lat(min0), .periods(per0), .decreases(dec0), .increases(inc0));
  bw_adapt #(.SAMPLE_CYCLES(256)) u1 (.clk, .rst_n, .adapt_en, .ev_demand_total(trig),
    .ev_demand_issued(trig), .ev_demand_returned(ret), .ret_latency(lat), .ev_pf_issued(pfi),
    .ev_pf_useful(use1), .demand_trigger(trig), .pf_req(req1), .pf_allow(allow1),
    .rate_q8(rate1), .pf_gt_dm(pgd1), .pf_per_dm(ppd1), .dm_per_pf(dpp1), .cur_lat(cur1),
    .min_lat(min1), .periods(per1), .decreases(dec1), .increases(inc1));

  int cyc = 0;
  logic traffic = 1;
  always @(negedge clk) begin
    cyc++;
    ret  = traffic && (cyc % 4 == 0);
    pfi  = traffic && (cyc % 8 == 0);
    use0 = 0;
    use1 = pfi;
    lat  = (per0 == 0) ? 16'd100 : 16'd200;
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (rate0=%0d rate1=%0d)", what, rate0, rate1); end
  endtask

  // count grants following one demand
  task automatic grants(output int n0);
    n0 = 0;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    for (int k = 0; k < 6; k++) begin
      req0 = 1; #1;
      if (allow0) n0++;
      @(negedge clk);
    end
    req0 = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    trig = 0; req0 = 0; req1 = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (inc0 == 1 && inc1 == 1);
    chk("period 1 keeps the cap", rate0 == 1024 && rate1 == 1024 && min0 == 100 && cur0 == 100);
    wait (dec0 == 1 && dec1 == 1);
    @(negedge clk);
    chk("u0 halves", rate0 == 512);
    chk("u1 decreases by 1/16", rate1 == 960);
    chk("latencies", cur0 == 200 && min0 == 100);
    // the period's update (about 140 cycles) is over well before the next
    wait (per0 == 2);
    repeat (200) @(negedge clk);
    chk("ppd 2", pgd0 && ppd0 == 2);
    grants(n);
    chk("two grants per demand at rate 2", n == 2);
    wait (rate0 == 128);
    repeat (40) @(negedge clk);
    chk("dpp 2", !pgd0 && dpp0 == 2);
    grants(n);
    grants(n);
    chk("one grant per two demands at rate 0.5 (second)", n == 1);
    grants(n);
    chk("one grant per two demands at rate 0.5 (third)", n == 0);
    adapt_en = 0; #1;
    req0 = 1; #1;
    chk("no throttling when disabled", allow0);
    req0 = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
