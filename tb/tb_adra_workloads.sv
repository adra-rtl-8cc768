// tb_adra_workloads: 32-bit in-memory subtraction and comparison on the two
// smaller evaluated array sizes, 256 x 256 (8 words per row) and 512 x 512
// (16 words per row), with a parallelism sweep. For each size, 16 rows are
// written with random signed words; then, for every number of selected words
// k = 1 .. NW (P = k/NW), one subtraction on a random row pair is issued with
// the lowest k words enabled. Selected words must give the exact 33-bit
// difference and lt/eq flags, unselected words must read zero, and each
// response must arrive exactly one cycle after its request.
module tb_adra_workloads;
  import adra_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One macro per array size, each driven by its own task instance.
  logic done256 = 0, done512 = 0;
  int   chk256 = 0, fail256 = 0, chk512 = 0, fail512 = 0;

  adra_workload_driver #(.SIZE(256)) u256 (.clk, .rst_n, .done(done256), .checks(chk256), .failures(fail256));
  adra_workload_driver #(.SIZE(512)) u512 (.clk, .rst_n, .done(done512), .checks(chk512), .failures(fail512));

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (done256 && done512);
    checks   = chk256 + chk512;
    failures = fail256 + fail512;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
