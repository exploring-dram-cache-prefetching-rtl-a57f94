// pooled_env: testbench environment around the top for a given node count
// (testbench only). It holds the top with 16-entry prefetch queues, DRAM
// caches of DC_BLOCKS blocks (256 by default), the given WFQ weight, one
// behavioural local memory per node,
// a behavioural pooled memory device, and one LLC stand-in per node.
// After start, every node streams strided reads over its own FAM pages,
// reads the first pages again and writes some of them, with local (non-FAM)
// requests mixed in. It checks that each FAM read is answered once with its
// LLC id and that routing follows the FAM window, and at the end that
// prefetches were issued and filled and that the DRAM cache was hit.
// done rises when the run is over; checks and failures count as usual.
module pooled_env
  import fam_pkg::*;
#(
  parameter int unsigned NODES     = 2,
  parameter bit          WFQ       = 1'b1,
  parameter int unsigned DC_BLOCKS = 256,
  parameter int unsigned DC_WAYS   = 4,
  parameter int unsigned WFQ_W     = 2
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam paddr_t FAM_BASE = 48'h0001_0000_0000, FAM_SIZE = 48'h0001_0000_0000;
  logic rst_n = 0;
  logic adapt_en = 0, wfq_en = WFQ;
  logic [NODES-1:0] hdm_prog_we = '0;
  logic [0:0] hdm_prog_idx = '0;
  logic hdm_prog_en = 0;
  paddr_t hdm_prog_base = '0, hdm_prog_size = '0;
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

  pooled_memory_system #(.NODES(NODES), .PQ_ENTRIES(16), .PQ_THRESH(15), .DC_BLOCKS(DC_BLOCKS),
    .DC_WAYS(DC_WAYS), .SAMPLE_CYCLES(256), .WFQ_W(WFQ_W)) dut (.*);
  fam_device_model #(.LATENCY(100)) dev (.clk, .rst_n, .dev_req_valid, .dev_req_ready, .dev_req,
    .dev_rsp_valid, .dev_rsp, .reads(dev_reads), .writes(dev_writes));
  assign loc_req_ready = '1;

  bit busy[NODES][128];
  int n_busy[NODES], n_reads[NODES], n_rsp[NODES];
  bit node_done[NODES];

  for (genvar n = 0; n < NODES; n++) begin : g_node
    int r, w, f; paddr_t la;
    local_mem_model #(.LATENCY(12)) lm (.clk, .rst_n, .lm_req_valid(lm_req_valid[n]),
      .lm_req_ready(lm_req_ready[n]), .lm_req(lm_req[n]), .lm_rsp_valid(lm_rsp_valid[n]),
      .lm_rsp_ready(lm_rsp_ready[n]), .lm_rsp_id(lm_rsp_id[n]), .reads(r), .writes(w),
      .fills(f), .last_addr(la));

    logic v = 0, wr_q = 0, pf = 0;
    paddr_t a = '0;
    logic [LLC_ID_W-1:0] id = '0;
    assign llc_req_valid[n] = v;  assign llc_req_addr[n] = a;  assign llc_req_write[n] = wr_q;
    assign llc_req_corepf[n] = pf; assign llc_req_id[n] = id;

    task automatic req(input paddr_t addr, input logic wr);
      int i;
      @(negedge clk);
      do begin
        i = $urandom % 128;
        if (busy[n][i]) @(negedge clk);
      end while (busy[n][i]);
      v = 1; a = addr; wr_q = wr; id = 7'(i); pf = ($urandom % 8 == 0) && !wr;
      forever begin
        #1;
        if (llc_req_ready[n]) break;
        @(negedge clk);
      end
      checks++;
      if (loc_req_valid[n] != !(addr >= FAM_BASE && addr < FAM_BASE + FAM_SIZE)) begin
        failures++; $display("FAIL %0d nodes: node %0d routed %h wrongly", NODES, n, addr);
      end
      if (!wr && !loc_req_valid[n]) begin busy[n][i] = 1; n_busy[n]++; n_reads[n]++; end
      @(posedge clk);
      v <= 0;
    endtask

    task automatic stream(input int first_page, input int pages, input int stride, input bit wr);
      for (int p = first_page; p < first_page + pages; p++)
        for (int b = 0; b < 16; b += stride) begin
          req(FAM_BASE | {4'(n), 16'(p), 4'(b), 8'($urandom % 256)}, wr);
          if ($urandom % 16 == 0) req({16'h0, 4'(n), 16'(p), 12'($urandom)}, 0);
        end
    endtask

    initial begin
      node_done[n] = 0;
      wait (start && rst_n && dut.g_node[n].u_rc.u_meta.req_ready);
      stream(0, 16, 2, 0);
      wait (n_busy[n] == 0);
      repeat (400) @(posedge clk);
      stream(0, 6, 2, 0);
      stream(0, 6, 2, 1);
      stream(100, 16, 1, 0);
      wait (n_busy[n] == 0);
      node_done[n] = 1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++)
      if (llc_rsp_valid[n]) begin
        checks++; n_rsp[n]++;
        if (!busy[n][llc_rsp_id[n]]) begin failures++; $display("FAIL %0d nodes: node %0d id %0d", NODES, n, llc_rsp_id[n]); end
        else begin busy[n][llc_rsp_id[n]] = 0; n_busy[n]--; end
      end
  end

  initial begin
    int hits, issued, filled;
    checks = 0; failures = 0; done = 0;
    foreach (busy[n, i]) busy[n][i] = 0;
    foreach (n_busy[n]) begin n_busy[n] = 0; n_reads[n] = 0; n_rsp[n] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    hdm_prog_we = '1; hdm_prog_en = 1; hdm_prog_base = FAM_BASE; hdm_prog_size = FAM_SIZE;
    @(negedge clk); hdm_prog_we = '0;
    wait (node_done.and() == 1);
    repeat (1000) @(posedge clk);
    hits = 0; issued = 0; filled = 0;
    for (int n = 0; n < NODES; n++) begin
      checks++;
      if (n_rsp[n] != n_reads[n]) begin failures++; $display("FAIL %0d nodes: node %0d answered %0d of %0d", NODES, n, n_rsp[n], n_reads[n]); end
      hits += stats[n].dc_hits; issued += stats[n].pf_issued; filled += stats[n].pf_filled;
      checks++;
      if (stats[n].dc_hits == 0 || stats[n].pf_issued == 0) begin
        failures++; $display("FAIL %0d nodes: node %0d had no hit or no prefetch", NODES, n);
      end
    end
    checks++;
    if (filled != issued) begin failures++; $display("FAIL %0d nodes: %0d fills of %0d prefetches", NODES, filled, issued); end
    checks++;
    if (dev_reads != fam_issued_demand + fam_issued_prefetch - dev_writes) begin
      failures++; $display("FAIL %0d nodes: device reads %0d", NODES, dev_reads);
    end
    $display("%0d node(s), %s W=%0d, %0d-block cache: hits %0d prefetches %0d, FAM demand %0d prefetch %0d", NODES,
      WFQ ? "WFQ" : "FIFO", WFQ_W, DC_BLOCKS, hits, issued, fam_issued_demand, fam_issued_prefetch);
    done = 1;
  end
endmodule
