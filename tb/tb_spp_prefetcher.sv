// tb_spp_prefetcher: trains the signature-path prefetcher with directed
// access streams and compares the signatures and prefetch candidates with
// values worked out by hand from the signature formula
// sig' = (sig << 4) ^ delta:
//  * stride +2 within a page: candidates grow from 1 to the degree of 4,
//    a walk that leaves the page is remembered and starts the next page;
//  * stride -2: sign-magnitude delta 0x12;
//  * a 20-bit-signature instance reproducing the signature sequence
//    0x4 -> 0x44 -> 0x442 -> 0x4422 -> 0x44222 of the paper's example.
module tb_spp_prefetcher;
  import fam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tv, tr, cv, dn; blk_t tb_blk, cb; logic [11:0] sig;
  spp_prefetcher dut (.clk, .rst_n, .train_valid(tv), .train_ready(tr), .train_blk(tb_blk),
    .cand_valid(cv), .cand_ready(1'b1), .cand_blk(cb), .done(dn), .last_sig(sig));

  logic tv2, tr2, cv2, dn2; blk_t tb_blk2, cb2; logic [19:0] sig2;
  spp_prefetcher #(.SIG_BITS(20)) dut2 (.clk, .rst_n, .train_valid(tv2), .train_ready(tr2),
    .train_blk(tb_blk2), .cand_valid(cv2), .cand_ready(1'b1), .cand_blk(cb2), .done(dn2),
    .last_sig(sig2));

  blk_t got[$];
  int none[$];

  task automatic train(blk_t b);
    got.delete();
    @(negedge clk);
    while (!tr) @(negedge clk);
    tv = 1; tb_blk = b;
    @(negedge clk); tv = 0;
    forever begin
      if (cv) got.push_back(cb);
      if (dn) break;
      @(negedge clk);
    end
  endtask

  task automatic expect_c(string name, blk_t page, int exp[$], logic [11:0] esig);
    checks++;
    if (got.size() != exp.size()) begin
      failures++; $display("FAIL %s: %0d candidates, expected %0d", name, got.size(), exp.size());
    end else begin
      foreach (exp[i]) if (got[i] != {page[BLK_W-5:0], 4'(exp[i])}) begin
        failures++; $display("FAIL %s: cand %0d = %h", name, i, got[i]);
      end
    end
    checks++;
    if (sig != esig) begin failures++; $display("FAIL %s: sig %h expected %h", name, sig, esig); end
  endtask

  task automatic train2(int off, logic [19:0] esig);
    @(negedge clk);
    tv2 = 1; tb_blk2 = {36'hA00, 4'(off)};
    @(negedge clk); tv2 = 0;
    while (!tr2) @(negedge clk);
    checks++;
    if (sig2 != esig) begin failures++; $display("FAIL fig: sig %h expected %h", sig2, esig); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t p;
    tv = 0; tv2 = 0; tb_blk = '0; tb_blk2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    p = 40'h123;
    train({p[35:0], 4'd0}); expect_c("s0", p, none, 12'h000);
    train({p[35:0], 4'd2}); expect_c("s2", p, {4}, 12'h002);
    train({p[35:0], 4'd4}); expect_c("s4", p, {6}, 12'h022);
    train({p[35:0], 4'd6}); expect_c("s6", p, {8, 10, 12, 14}, 12'h222);
    train({p[35:0], 4'd8}); expect_c("s8", p, {10, 12, 14}, 12'h222);
    // next page: bootstrapped from the global history table
    p = 40'h124;
    train({p[35:0], 4'd0}); expect_c("ghr", p, {2, 4, 6, 8}, 12'h222);
    // same block again: no new delta, same signature, same prediction
    train({p[35:0], 4'd0}); expect_c("rep", p, {2, 4, 6, 8}, 12'h222);
    // descending stream on a fresh page
    p = 40'h777;
    train({p[35:0], 4'd15}); expect_c("n0", p, none, 12'h000);
    train({p[35:0], 4'd13}); expect_c("n1", p, {11}, 12'h012);
    // signature sequence of the paper's example (20-bit signatures)
    train2(0, 20'h0); train2(4, 20'h4); train2(8, 20'h44); train2(10, 20'h442);
    train2(12, 20'h4422); train2(14, 20'h44222);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
