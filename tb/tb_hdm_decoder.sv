// tb_hdm_decoder: programs two FAM windows into the HDM decoder and checks
// the decode of directed boundary addresses and of random addresses against
// a window model kept in the testbench.
module tb_hdm_decoder;
  import fam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_we = 0, prog_en = 0;
  logic [0:0] prog_idx = '0;
  paddr_t prog_base = '0, prog_size = '0, addr = '0;
  logic to_fam;
  logic [0:0] window;
  int checks = 0, failures = 0;

  hdm_decoder #(.NRANGES(2)) dut (.*);

  paddr_t b0 = 48'h0001_0000_0000, s0 = 48'h0001_0000_0000;
  paddr_t b1 = 48'h0040_0000_0000, s1 = 48'h0000_0010_0000;

  task automatic check(paddr_t a);
    logic exp_fam; logic [0:0] exp_win;
    addr = a; #1;
    exp_fam = 1'b0; exp_win = 0;
    if (a >= b1 && a < b1 + s1) begin exp_fam = 1; exp_win = 1; end
    if (a >= b0 && a < b0 + s0) begin exp_fam = 1; exp_win = 0; end
    checks++;
    if (to_fam !== exp_fam || (exp_fam && window !== exp_win)) begin
      failures++;
      $display("FAIL addr=%h to_fam=%0d win=%0d exp %0d %0d", a, to_fam, window, exp_fam, exp_win);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // before programming everything is local
    addr = b0; #1; checks++; if (to_fam) failures++;
    @(negedge clk); prog_we = 1; prog_idx = 0; prog_en = 1; prog_base = b0; prog_size = s0;
    @(negedge clk); prog_idx = 1; prog_base = b1; prog_size = s1;
    @(negedge clk); prog_we = 0;
    check(b0 - 1); check(b0); check(b0 + s0 - 1); check(b0 + s0);
    check(b1 - 1); check(b1); check(b1 + s1 - 1); check(b1 + s1); check('0);
    for (int i = 0; i < 500; i++) begin
      paddr_t a;
      a = {$urandom, $urandom};
      case (i % 3)
        0: a = b0 + (a % (s0 + 48'h1000));
        1: a = b1 - 48'h800 + (a % (s1 + 48'h1000));
        default: ;
      endcase
      check(a);
    end
    // disabling window 0 makes it local
    @(negedge clk); prog_we = 1; prog_idx = 0; prog_en = 0;
    @(negedge clk); prog_we = 0;
    addr = b0 + 48'h100; #1; checks++; if (to_fam) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
