// tb_pooled_sweep: the size and weight settings the design is evaluated at,
// each run on a two-node system with weighted fair queueing.
//   * DRAM cache sizes of 4, 8, 16 and 32 MiB: 16,384, 32,768, 65,536 and
//     131,072 blocks of 256 bytes, 8 ways, as full-size metadata tables.
//   * Fair-queueing weights W = 1, 2 and 3 (small 256-block caches).
// Each setting is a pooled_env running the same request streams and
// checking its answers, routing, prefetching and DRAM cache hits; the
// testbench adds up their checks and failures. A watchdog ends the run.
module tb_pooled_sweep;
  localparam int N = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [N-1:0] done;
  int c[N], f[N];
  int checks, failures;

  pooled_env #(.DC_BLOCKS(16384),  .DC_WAYS(8)) c4  (.clk, .start, .done(done[0]), .checks(c[0]), .failures(f[0]));
  pooled_env #(.DC_BLOCKS(32768),  .DC_WAYS(8)) c8  (.clk, .start, .done(done[1]), .checks(c[1]), .failures(f[1]));
  pooled_env #(.DC_BLOCKS(65536),  .DC_WAYS(8)) c16 (.clk, .start, .done(done[2]), .checks(c[2]), .failures(f[2]));
  pooled_env #(.DC_BLOCKS(131072), .DC_WAYS(8)) c32 (.clk, .start, .done(done[3]), .checks(c[3]), .failures(f[3]));
  pooled_env #(.WFQ_W(1)) w1 (.clk, .start, .done(done[4]), .checks(c[4]), .failures(f[4]));
  pooled_env #(.WFQ_W(2)) w2 (.clk, .start, .done(done[5]), .checks(c[5]), .failures(f[5]));
  pooled_env #(.WFQ_W(3)) w3 (.clk, .start, .done(done[6]), .checks(c[6]), .failures(f[6]));

  function automatic void total();
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin checks += c[i]; failures += f[i]; end
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    total();
    failures++;
    $display("watchdog: done %b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    start = 1;
    wait (&done);
    total();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
