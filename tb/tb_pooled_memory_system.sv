// tb_pooled_memory_system: end-to-end test of the top with four nodes and
// reduced sizes (256-block DRAM caches, 16-entry prefetch queues, 256-cycle
// sampling period) so that every mechanism is reached in a short run.
// Each node's LLC (this testbench) streams strided reads over its own FAM
// pages, re-reads and writes part of them, then streams over new pages;
// some requests go to local (non-FAM) addresses. Behavioural local memories
// and a behavioural pooled memory device close the loop.
// It checks that every FAM read is answered once at the right node with its
// LLC id, that the HDM decoders route only window addresses to the root
// complexes, and it counts each mechanism, failing if one never happens:
// local routing, DRAM cache hits, prefetch issue and fill, redundant-
// prefetch drops, in-flight matches, queue-threshold drops, bandwidth
// throttling, dirty evictions, WFQ prefetch-queue issues, and first-come
// first-served issue of prefetches when WFQ is off.
module tb_pooled_memory_system;
  import fam_pkg::*;
  localparam int NODES = 4;
  localparam paddr_t FAM_BASE = 48'h0001_0000_0000, FAM_SIZE = 48'h0001_0000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic adapt_en, wfq_en;
  logic [NODES-1:0] hdm_prog_we; logic [0:0] hdm_prog_idx; logic hdm_prog_en;
  paddr_t hdm_prog_base, hdm_prog_size;
  logic [NODES-1:0] llc_req_valid, llc_req_ready, llc_req_write, llc_req_corepf, llc_rsp_valid;
  paddr_t [NODES-1:0] llc_req_addr;
  logic [NODES-1:0][LLC_ID_W-1:0] llc_req_id, llc_rsp_id, lm_rsp_id;
  logic [NODES-1:0] loc_req_valid, loc_req_ready, lm_req_valid, lm_req_ready, lm_rsp_valid, lm_rsp_ready;
  lm_req_t [NODES-1:0] lm_req;
  logic dev_req_valid, dev_req_ready, dev_rsp_valid;
  fam_req_t dev_req; fam_rsp_t dev_rsp;
  rc_stats_t [NODES-1:0] stats;
  logic [NODES-1:0][15:0] pf_rate_q8;
  logic [31:0] fam_issued_demand, fam_issued_prefetch;
  int dev_reads, dev_writes;

  pooled_memory_system #(.NODES(NODES), .PQ_ENTRIES(16), .PQ_THRESH(15), .DC_BLOCKS(256),
    .DC_WAYS(4), .SAMPLE_CYCLES(256)) dut (.*);
  fam_device_model #(.LATENCY(100)) dev (.clk, .rst_n, .dev_req_valid, .dev_req_ready, .dev_req,
    .dev_rsp_valid, .dev_rsp, .reads(dev_reads), .writes(dev_writes));

  for (genvar n = 0; n < NODES; n++) begin : g_lm
    int r, w, f; paddr_t la;
    local_mem_model #(.LATENCY(12)) lm (.clk, .rst_n, .lm_req_valid(lm_req_valid[n]),
      .lm_req_ready(lm_req_ready[n]), .lm_req(lm_req[n]), .lm_rsp_valid(lm_rsp_valid[n]),
      .lm_rsp_ready(lm_rsp_ready[n]), .lm_rsp_id(lm_rsp_id[n]), .reads(r), .writes(w),
      .fills(f), .last_addr(la));
  end
  assign loc_req_ready = '1;

  // ---------------------------------------------------------------- LLCs
  bit busy[NODES][128];
  int n_busy[NODES], n_reads[NODES], n_rsp[NODES], n_local[NODES], n_routed[NODES];
  int fifo_pf = 0;
  int phase = 0;
  bit done[NODES];

  for (genvar n = 0; n < NODES; n++) begin : g_llc
    logic v = 0, w = 0, pf = 0;
    paddr_t a = '0;
    logic [LLC_ID_W-1:0] id = '0;
    assign llc_req_valid[n] = v;  assign llc_req_addr[n] = a;  assign llc_req_write[n] = w;
    assign llc_req_corepf[n] = pf; assign llc_req_id[n] = id;

    // one request; returns after the handshake
    task automatic req(input paddr_t addr, input logic wr);
      int i;
      @(negedge clk);
      do begin
        i = $urandom % 128;
        if (busy[n][i]) @(negedge clk);
      end while (busy[n][i]);
      v = 1; a = addr; w = wr; id = 7'(i); pf = ($urandom % 8 == 0) && !wr;
      forever begin
        #1;
        if (llc_req_ready[n]) break;
        @(negedge clk);
      end
      // routing by the HDM decoder
      checks++;
      if (loc_req_valid[n] != !(addr >= FAM_BASE && addr < FAM_BASE + FAM_SIZE)) begin
        failures++; $display("FAIL node %0d routed %h wrongly", n, addr);
      end
      if (loc_req_valid[n]) n_local[n]++; else n_routed[n]++;
      if (!wr && !loc_req_valid[n]) begin busy[n][i] = 1; n_busy[n]++; n_reads[n]++; end
      @(posedge clk);
      v <= 0;
    endtask

    task automatic stream(input int first_page, input int pages, input int stride, input bit wr);
      for (int p = first_page; p < first_page + pages; p++)
        for (int b = 0; b < 16; b += stride) begin
          req(FAM_BASE | {4'(n), 16'(p), 4'(b), 8'($urandom % 256)}, wr);
          if ($urandom % 16 == 0) req({16'h0, 4'(n), 16'(p), 12'($urandom)}, 0);  // local
        end
    endtask

    initial begin
      wait (phase == 1);
      stream(0, 24, 2, 0);             // train and prefetch
      wait (n_busy[n] == 0);
      repeat (400) @(posedge clk);
      stream(0, 8, 2, 0);              // read again: hits
      stream(0, 8, 2, 1);              // dirty them
      stream(100, 40, 1, 0);           // new pages: evictions
      wait (n_busy[n] == 0);
      done[n] = 1;
      wait (phase == 2);
      stream(300, 16, 1, 0);           // FIFO mode
      wait (n_busy[n] == 0);
      done[n] = 0;
      wait (phase == 3);
      stream(500, 40, 1, 0);           // adaptation, congested pool
      wait (n_busy[n] == 0);
      done[n] = 1;
    end
  end

  // progress watchdog: no completion and no device request for 20,000 cycles
  int idle = 0;
  always @(posedge clk) if (rst_n && phase != 0) begin
    idle++;
    if (llc_rsp_valid != '0 || dev_req_valid) idle = 0;
    if (idle == 20000) begin
      failures++;
      $display("FAIL no progress in phase %0d", phase);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++)
      if (llc_rsp_valid[n]) begin
        checks++; n_rsp[n]++;
        if (!busy[n][llc_rsp_id[n]]) begin failures++; $display("FAIL node %0d id %0d", n, llc_rsp_id[n]); end
        else begin busy[n][llc_rsp_id[n]] = 0; n_busy[n]--; end
      end
    if (dev_req_valid && !wfq_en && dev_req.cls == CLS_DRAM_PF) fifo_pf++;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog: phase %0d", phase);
    for (int n = 0; n < NODES; n++)
      $display("node %0d busy %0d reads %0d rsp %0d routed %0d local %0d valid %b ready %b demands %0d",
        n, n_busy[n], n_reads[n], n_rsp[n], n_routed[n], n_local[n], llc_req_valid[n], llc_req_ready[n], stats[n].demands);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rc_stats_t tot;
    int pf0, nl = 0;
    adapt_en = 0; wfq_en = 1; hdm_prog_we = '0; hdm_prog_idx = '0; hdm_prog_en = 0;
    hdm_prog_base = '0; hdm_prog_size = '0;
    foreach (busy[n, i]) busy[n][i] = 0;
    foreach (n_busy[n]) begin
      n_busy[n] = 0; n_reads[n] = 0; n_rsp[n] = 0; n_local[n] = 0; n_routed[n] = 0; done[n] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // enumeration: one FAM window per node
    @(negedge clk);
    hdm_prog_we = '1; hdm_prog_en = 1; hdm_prog_base = FAM_BASE; hdm_prog_size = FAM_SIZE;
    @(negedge clk); hdm_prog_we = '0;
    repeat (80) @(posedge clk);
    // phase 1: WFQ, no adaptation
    phase = 1;
    wait (done.and() == 1);
    checks++;
    if (fam_issued_prefetch == 0) begin failures++; $display("FAIL WFQ never issued from the prefetch queue"); end
    // phase 2: single FIFO queue
    @(negedge clk); wfq_en = 0; pf0 = fam_issued_prefetch;
    phase = 2;
    wait (done.or() == 0);
    repeat (1000) @(posedge clk);
    checks++;
    if (fam_issued_prefetch != pf0 || fifo_pf == 0) begin
      failures++; $display("FAIL FIFO mode: prefetch queue %0d->%0d, prefetches in FIFO %0d", pf0, fam_issued_prefetch, fifo_pf);
    end
    // phase 3: WFQ with bandwidth adaptation, congested pool
    @(negedge clk); wfq_en = 1; adapt_en = 1; dev.lat = 600;
    phase = 3;
    wait (done.and() == 1);
    repeat (3000) @(posedge clk);

    tot = '0;
    for (int n = 0; n < NODES; n++) begin
      checks++;
      if (n_rsp[n] != n_reads[n]) begin failures++; $display("FAIL node %0d: %0d of %0d answered", n, n_rsp[n], n_reads[n]); end
      nl += n_local[n];
      tot.demands += stats[n].demands; tot.dc_hits += stats[n].dc_hits;
      tot.pf_issued += stats[n].pf_issued; tot.pf_filled += stats[n].pf_filled;
      tot.pf_redundant += stats[n].pf_redundant; tot.pf_drop_full += stats[n].pf_drop_full;
      tot.pf_drop_throttle += stats[n].pf_drop_throttle; tot.evictions += stats[n].evictions;
      tot.inflight_match += stats[n].inflight_match;
    end
    $display("local %0d demands %0d hits %0d pf issued %0d filled %0d redundant %0d full %0d throttled %0d evictions %0d inflight %0d fam demand %0d prefetch %0d fifo-pf %0d",
      nl, tot.demands, tot.dc_hits, tot.pf_issued, tot.pf_filled, tot.pf_redundant,
      tot.pf_drop_full, tot.pf_drop_throttle, tot.evictions, tot.inflight_match,
      fam_issued_demand, fam_issued_prefetch, fifo_pf);
    checks++; if (nl == 0)               begin failures++; $display("FAIL no local routing"); end
    checks++; if (tot.dc_hits == 0)           begin failures++; $display("FAIL no DRAM cache hit"); end
    checks++; if (tot.pf_issued == 0)         begin failures++; $display("FAIL no prefetch"); end
    checks++; if (tot.pf_filled != tot.pf_issued) begin failures++; $display("FAIL fills"); end
    checks++; if (tot.pf_redundant == 0)      begin failures++; $display("FAIL no redundant drop"); end
    checks++; if (tot.inflight_match == 0)    begin failures++; $display("FAIL no in-flight match"); end
    checks++; if (tot.pf_drop_full == 0)      begin failures++; $display("FAIL no queue-threshold drop"); end
    checks++; if (tot.pf_drop_throttle == 0)  begin failures++; $display("FAIL no throttling"); end
    checks++; if (tot.evictions == 0 || dev_writes < tot.evictions) begin failures++; $display("FAIL no eviction"); end
    checks++; if (dev_reads != fam_issued_demand + fam_issued_prefetch - dev_writes) begin
      failures++; $display("FAIL device saw %0d reads", dev_reads);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
