// tb_dram_cache_metadata: random lookups, writes, probes and fills on a
// 64-block, 4-way metadata table, compared with a reference cache model in
// the testbench (same XOR-fold set hash, true LRU, slot address = set * ways
// + way). Checks hit/miss, the returned DRAM block address, dirty-victim
// reporting and the two-cycle response timing.
module tb_dram_cache_metadata;
  import fam_pkg::*;
  localparam int BLOCKS = 64, WAYS = 4, SETS = BLOCKS / WAYS, SW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_hit, rsp_evict;
  logic [1:0] req_op;
  blk_t req_blk, rsp_evict_blk;
  logic [5:0] rsp_daddr;
  dram_cache_metadata #(.BLOCKS(BLOCKS), .WAYS(WAYS)) dut (.*);

  blk_t m_id[SETS][WAYS]; logic m_v[SETS][WAYS], m_d[SETS][WAYS]; int m_age[SETS][WAYS];
  int hits = 0, evicts = 0;

  function automatic int set_of(blk_t b);
    logic [SW-1:0] h = '0;
    for (int i = 0; i < BLK_W; i += SW) h ^= SW'(b >> i);
    return int'(h);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_op = 0; req_blk = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      m_v[s][w] = 0; m_d[s][w] = 0; m_age[s][w] = w; m_id[s][w] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // the table clears itself for SETS cycles
    @(negedge clk); checks++; if (req_ready) begin failures++; $display("FAIL ready during clear"); end
    for (int n = 0; n < 4000; n++) begin
      int s, hw, vw, uw; logic hit, ev; blk_t evb; int lat;
      @(negedge clk);
      while (!req_ready) @(negedge clk);
      req_valid = 1;
      req_op  = 2'($urandom % 4);
      req_blk = 40'($urandom % 96) ^ (40'($urandom % 4) << 20);
      s = set_of(req_blk);
      hit = 0; hw = 0; vw = -1;
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (m_v[s][w] && m_id[s][w] == req_blk) begin hit = 1; hw = w; end
        if (!m_v[s][w]) vw = w;
      end
      if (hit) uw = hw;
      else if (vw >= 0) uw = vw;
      else begin uw = 0; for (int w = 0; w < WAYS; w++) if (m_age[s][w] == WAYS - 1) uw = w; end
      ev  = (req_op == 3) && !hit && vw < 0 && m_d[s][uw];
      evb = m_id[s][uw];
      @(negedge clk); req_valid = 0;
      lat = 1;
      while (!rsp_valid) begin @(negedge clk); lat++; end
      checks++;
      if (rsp_hit !== hit || (hit && rsp_daddr != 6'(s * WAYS + hw)) || rsp_evict !== ev ||
          (ev && rsp_evict_blk != evb) || lat != 2) begin
        failures++;
        $display("FAIL op%0d blk %h: hit %0d/%0d daddr %0d/%0d ev %0d/%0d lat %0d",
                 req_op, req_blk, rsp_hit, hit, rsp_daddr, s * WAYS + hw, rsp_evict, ev, lat);
      end
      checks++;
      if (req_op == 3 && !hit && rsp_daddr != 6'(s * WAYS + uw)) begin
        failures++; $display("FAIL fill slot %0d expected %0d", rsp_daddr, s * WAYS + uw);
      end
      hits += hit; evicts += ev;
      // reference update
      if (req_op == 3 || (hit && req_op != 2)) begin
        int a;
        a = m_age[s][uw];
        for (int w = 0; w < WAYS; w++) if (m_age[s][w] < a) m_age[s][w]++;
        m_age[s][uw] = 0;
        if (req_op == 1) m_d[s][uw] = 1;
        if (req_op == 3 && !hit) begin m_id[s][uw] = req_blk; m_v[s][uw] = 1; m_d[s][uw] = 0; end
      end
    end
    checks++;
    if (hits == 0 || evicts == 0) begin failures++; $display("FAIL hits %0d evicts %0d", hits, evicts); end
    $display("hits=%0d dirty evictions=%0d", hits, evicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
