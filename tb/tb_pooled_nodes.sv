// tb_pooled_nodes: the node-count configurations the design is meant for,
// run side by side: one node with the first-come first-served memory node,
// two nodes with weighted fair queueing, and four nodes with each mode.
// Each configuration is a pooled_env (small tables) running the same
// request streams; the testbench adds up their checks and failures.
module tb_pooled_nodes;
  logic clk = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [3:0] done;
  int c[4], f[4];
  int checks, failures;

  pooled_env #(.NODES(1), .WFQ(1'b0)) e1 (.clk, .start, .done(done[0]), .checks(c[0]), .failures(f[0]));
  pooled_env #(.NODES(2), .WFQ(1'b1)) e2 (.clk, .start, .done(done[1]), .checks(c[1]), .failures(f[1]));
  pooled_env #(.NODES(4), .WFQ(1'b0)) e4f (.clk, .start, .done(done[2]), .checks(c[2]), .failures(f[2]));
  pooled_env #(.NODES(4), .WFQ(1'b1)) e4w (.clk, .start, .done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (400000) @(posedge clk);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3] + 1;
    $display("watchdog: done %b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    start = 1;
    wait (done == 4'hF);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
