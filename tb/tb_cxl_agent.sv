// tb_cxl_agent: offers demand, eviction and prefetch requests together and
// checks the fixed priority, the class tags, tags and addresses on the link,
// the back-pressure, the routing of completions to the LLC or to the
// prefetch side, and the measured round-trip latency of demand reads
// (completions returned a known number of cycles after issue).
module tb_cxl_agent;
  import fam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dm_valid, dm_ready, dm_write, dm_corepf, ev_valid, ev_ready, pf_valid, pf_ready;
  paddr_t dm_addr; logic [LLC_ID_W-1:0] dm_id; blk_t ev_blk, pf_blk; logic [PFQ_IDX_W-1:0] pf_idx;
  logic fam_req_valid, fam_req_ready, fam_rsp_valid;
  fam_req_t fam_req; fam_rsp_t fam_rsp;
  logic llc_rsp_valid, pf_rsp_valid, dm_issued, pf_issued, lat_valid;
  logic [LLC_ID_W-1:0] llc_rsp_id; logic [PFQ_IDX_W-1:0] pf_rsp_idx; logic [15:0] lat;
  cxl_agent #(.NODE_ID(2)) dut (.*);

  task automatic chk(string what, logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dm_valid = 0; ev_valid = 0; pf_valid = 0; fam_req_ready = 0; fam_rsp_valid = 0; fam_rsp = '0;
    dm_write = 0; dm_corepf = 0; dm_addr = 48'h1234_5678_9AC0; dm_id = 7'd33;
    ev_blk = 40'hAB_CDEF_0123; pf_blk = 40'h12_3456_789A; pf_idx = 8'd200;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    dm_valid = 1; ev_valid = 1; pf_valid = 1; fam_req_ready = 0; #1;
    chk("back-pressure", fam_req_valid && !dm_ready && !ev_ready && !pf_ready);
    fam_req_ready = 1; #1;
    chk("demand first", dm_ready && !ev_ready && !pf_ready && fam_req.cls == CLS_DEMAND &&
        fam_req.addr == dm_addr && fam_req.tag == 8'd33 && fam_req.node == 2'd2 && !fam_req.write);
    @(negedge clk); dm_valid = 0; #1;
    chk("eviction second", ev_ready && !pf_ready && fam_req.cls == CLS_EVICT && fam_req.write &&
        fam_req.addr == {ev_blk, 8'h00});
    @(negedge clk); ev_valid = 0; #1;
    chk("prefetch last", pf_ready && fam_req.cls == CLS_DRAM_PF && fam_req.tag == 8'd200 &&
        fam_req.addr == {pf_blk, 8'h00} && !fam_req.write);
    @(negedge clk); pf_valid = 0;
    // core prefetch class
    dm_valid = 1; dm_corepf = 1; dm_id = 7'd5; #1;
    chk("core prefetch tag", fam_req.cls == CLS_CORE_PF && dm_issued);
    @(negedge clk); dm_valid = 0; dm_corepf = 0;
    // completion of demand 33 issued 4 cycles before the first check cycle
    repeat (20) @(negedge clk);
    fam_rsp_valid = 1; fam_rsp = '{node: 2'd2, tag: 8'd33, cls: CLS_DEMAND}; #1;
    chk("demand completion", llc_rsp_valid && llc_rsp_id == 7'd33 && !pf_rsp_valid && lat_valid);
    chk("latency 24", lat == 16'd24);
    @(negedge clk);
    fam_rsp = '{node: 2'd2, tag: 8'd5, cls: CLS_CORE_PF}; #1;
    chk("core prefetch completion", llc_rsp_valid && llc_rsp_id == 7'd5 && lat == 16'd22);
    @(negedge clk);
    fam_rsp = '{node: 2'd2, tag: 8'd200, cls: CLS_DRAM_PF}; #1;
    chk("prefetch completion", pf_rsp_valid && pf_rsp_idx == 8'd200 && !llc_rsp_valid && !lat_valid);
    @(negedge clk); fam_rsp_valid = 0;
    // a demand write is posted: not counted as an issued read
    dm_valid = 1; dm_write = 1; #1;
    chk("write not timed", !dm_issued && fam_req.write);
    @(negedge clk); dm_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
