// tb_prefetch_queue: random allocations, releases and searches on an
// 8-entry queue with an issue threshold of 6, compared every cycle with a
// reference list of in-flight blocks kept by the testbench. Checks the
// threshold refusal, lowest-free-index allocation, the two search ports,
// the read-back of a released entry's block and the occupancy count.
module tb_prefetch_queue;
  import fam_pkg::*;
  localparam int N = 8, TH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic alloc_req, alloc_ok, rel_valid, cand_hit, dem_hit;
  logic [2:0] alloc_idx, rel_idx;
  blk_t alloc_blk, rd_blk, cand_blk, dem_blk;
  logic [3:0] count;
  prefetch_queue #(.ENTRIES(N), .THRESH(TH)) dut (.*);

  logic ref_v[N];
  blk_t ref_b[N];
  int   full_refusals = 0;

  function automatic int ref_count();
    int c = 0; foreach (ref_v[i]) c += ref_v[i]; return c;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_req = 0; rel_valid = 0; rel_idx = 0; alloc_blk = 0; cand_blk = 0; dem_blk = 0;
    foreach (ref_v[i]) ref_v[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int lowest; logic exp_ok; logic ch, dh;
      @(negedge clk);
      alloc_req = ($urandom % 3) != 0;
      alloc_blk = 40'($urandom % 12);
      cand_blk  = 40'($urandom % 12);
      dem_blk   = 40'($urandom % 12);
      rel_valid = 0;
      if (ref_count() > 0 && ($urandom % 4) == 0) begin
        int k; do k = $urandom % N; while (!ref_v[k]);
        rel_valid = 1; rel_idx = 3'(k);
      end
      #1;
      lowest = -1;
      for (int i = N - 1; i >= 0; i--) if (!ref_v[i]) lowest = i;
      exp_ok = (lowest >= 0) && (ref_count() < TH);
      ch = 0; dh = 0;
      foreach (ref_v[i]) begin
        if (ref_v[i] && ref_b[i] == cand_blk) ch = 1;
        if (ref_v[i] && ref_b[i] == dem_blk)  dh = 1;
      end
      checks++;
      if (alloc_ok !== exp_ok || (exp_ok && alloc_idx != 3'(lowest)) || cand_hit !== ch ||
          dem_hit !== dh || count != 4'(ref_count()) || (rel_valid && rd_blk != ref_b[rel_idx])) begin
        failures++;
        $display("FAIL cyc %0d ok=%0d/%0d idx=%0d/%0d ch=%0d/%0d dh=%0d/%0d cnt=%0d/%0d",
                 cyc, alloc_ok, exp_ok, alloc_idx, lowest, cand_hit, ch, dem_hit, dh, count, ref_count());
      end
      if (alloc_req && !exp_ok) full_refusals++;
      @(posedge clk); #1;
      if (rel_valid) ref_v[rel_idx] = 0;
      if (alloc_req && exp_ok) begin ref_v[lowest] = 1; ref_b[lowest] = alloc_blk; end
    end
    checks++;
    if (full_refusals == 0) begin failures++; $display("FAIL threshold never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
