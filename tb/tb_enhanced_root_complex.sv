// tb_enhanced_root_complex: one root complex with a small DRAM cache
// (256 blocks, 4 ways), a 16-entry prefetch queue and a 256-cycle sampling
// period, between a behavioural LLC (this testbench), a behavioural local
// memory and a behavioural FAM device with a long latency.
// The LLC streams strided reads over a set of pages, reads them again,
// writes some of them and then streams over new pages to force evictions.
// Checks: every read gets exactly one completion with its LLC id and no
// write gets one; a request sent to local memory is a DRAM cache hit and is
// addressed into the DRAM cache region with the request's byte offset; a
// request sent to FAM carries the original address and is a miss; prefetches
// are issued, filled, found redundant, dropped at the queue threshold,
// throttled, and dirty victims are written back to FAM.
module tb_enhanced_root_complex;
  import fam_pkg::*;
  localparam paddr_t DC_BASE = 48'h0000_8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic adapt_en;
  logic llc_req_valid, llc_req_ready, llc_req_write, llc_req_corepf, llc_rsp_valid;
  paddr_t llc_req_addr;
  logic [LLC_ID_W-1:0] llc_req_id, llc_rsp_id, lm_rsp_id;
  logic lm_req_valid, lm_req_ready, lm_rsp_valid, lm_rsp_ready;
  lm_req_t lm_req;
  logic fam_req_valid, fam_req_ready, fam_rsp_valid;
  fam_req_t fam_req; fam_rsp_t fam_rsp;
  rc_stats_t stats;
  logic [15:0] pf_rate_q8;
  int lm_reads, lm_writes, lm_fills, dev_reads, dev_writes;
  paddr_t lm_last;

  enhanced_root_complex #(.PQ_ENTRIES(16), .PQ_THRESH(15), .DC_BLOCKS(256), .DC_WAYS(4),
    .ST_ENTRIES(64), .PT_ENTRIES(256), .SAMPLE_CYCLES(256), .DC_BASE(DC_BASE)) dut (.*);
  local_mem_model #(.LATENCY(12)) lm (.clk, .rst_n, .lm_req_valid, .lm_req_ready, .lm_req,
    .lm_rsp_valid, .lm_rsp_ready, .lm_rsp_id, .reads(lm_reads), .writes(lm_writes),
    .fills(lm_fills), .last_addr(lm_last));
  fam_device_model #(.LATENCY(150)) dev (.clk, .rst_n, .dev_req_valid(fam_req_valid),
    .dev_req_ready(fam_req_ready), .dev_req(fam_req), .dev_rsp_valid(fam_rsp_valid),
    .dev_rsp(fam_rsp), .reads(dev_reads), .writes(dev_writes));

  // ---------------------------------------------------------------- LLC
  bit     busy[128];
  int     n_busy = 0, n_reads = 0, n_rsp = 0;
  paddr_t cur_addr; logic cur_write;

  task automatic llc(input paddr_t a, input logic wr);
    int id;
    @(negedge clk);
    do begin
      id = $urandom % 128;
      if (busy[id]) @(negedge clk);
    end while (busy[id]);
    llc_req_valid = 1; llc_req_addr = a; llc_req_write = wr; llc_req_id = 7'(id);
    llc_req_corepf = ($urandom % 8 == 0) && !wr;
    forever begin
      #1;
      if (llc_req_ready) break;
      @(negedge clk);
    end
    if (!wr) begin busy[id] = 1; n_busy++; n_reads++; end
    cur_addr = a; cur_write = wr;
    @(negedge clk);
    llc_req_valid = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (llc_rsp_valid) begin
      checks++; n_rsp++;
      if (!busy[llc_rsp_id]) begin failures++; $display("FAIL unexpected completion id %0d", llc_rsp_id); end
      else begin busy[llc_rsp_id] = 0; n_busy--; end
    end
    if (lm_req_valid && lm_req_ready && !lm_req.fill) begin
      checks++;
      if (lm_req.addr < DC_BASE ||
          lm_req.addr >= DC_BASE + 256 * 256 || lm_req.addr[7:0] != cur_addr[7:0] ||
          lm_req.write != cur_write) begin
        failures++; $display("FAIL local request %h for %h", lm_req.addr, cur_addr);
      end
    end
    if (fam_req_valid && fam_req_ready && fam_req.cls inside {CLS_DEMAND, CLS_CORE_PF}) begin
      checks++;
      if (fam_req.addr != cur_addr || fam_req.write != cur_write) begin
        failures++; $display("FAIL FAM request %h for %h", fam_req.addr, cur_addr);
      end
    end
  end

  task automatic stream(input int first_page, input int pages, input int stride, input bit wr);
    for (int p = first_page; p < first_page + pages; p++)
      for (int b = 0; b < 16; b += stride)
        llc({28'(p), 4'(b), 8'($urandom % 256)} | 48'h1_0000_0000, wr);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llc_req_valid = 0; llc_req_addr = '0; llc_req_write = 0; llc_req_corepf = 0; llc_req_id = '0;
    adapt_en = 0;
    foreach (busy[i]) busy[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (80) @(posedge clk);
    stream(0, 24, 2, 0);              // train and prefetch
    wait (n_busy == 0);
    repeat (400) @(posedge clk);
    stream(0, 8, 2, 0);               // read again: DRAM cache hits
    stream(0, 8, 2, 1);               // make them dirty
    stream(100, 40, 1, 0);            // new pages: fills evict dirty blocks
    adapt_en = 1;                     // bandwidth adaptation on,
    dev.lat = 600;                    // and the pooled memory gets congested
    stream(200, 60, 1, 0);
    wait (n_busy == 0);
    repeat (2000) @(posedge clk);
    $display("reads %0d rsp %0d: demands %0d hits %0d gen %0d issued %0d redundant %0d full %0d throttle %0d filled %0d evict %0d inflight %0d rate %0d",
      n_reads, n_rsp, stats.demands, stats.dc_hits, stats.pf_generated, stats.pf_issued,
      stats.pf_redundant, stats.pf_drop_full, stats.pf_drop_throttle, stats.pf_filled,
      stats.evictions, stats.inflight_match, pf_rate_q8);
    checks++; if (n_rsp != n_reads) begin failures++; $display("FAIL %0d of %0d reads answered", n_rsp, n_reads); end
    checks++; if (stats.dc_hits == 0)          begin failures++; $display("FAIL no hits"); end
    checks++; if (stats.pf_issued == 0)        begin failures++; $display("FAIL no prefetch"); end
    checks++; if (stats.pf_filled != stats.pf_issued) begin failures++; $display("FAIL fills"); end
    checks++; if (stats.pf_redundant == 0)     begin failures++; $display("FAIL no redundant"); end
    checks++; if (stats.pf_drop_full == 0)     begin failures++; $display("FAIL no queue-full drop"); end
    checks++; if (stats.pf_drop_throttle == 0) begin failures++; $display("FAIL no throttling"); end
    checks++; if (stats.evictions == 0 || dev_writes < stats.evictions) begin failures++; $display("FAIL no eviction"); end
    checks++; if (lm_fills != stats.pf_filled) begin failures++; $display("FAIL fill count"); end
    checks++; if (stats.dc_hits != lm_reads + lm_writes) begin failures++; $display("FAIL hit count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
