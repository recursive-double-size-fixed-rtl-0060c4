// tb_recint_expmod_sizes: runs the modular exponentiation core at the two
// smaller dedicated word sizes, K = 7 (128-bit operands) and K = 8 (256-bit
// operands), side by side, each through random full-width operations checked
// against a reference (see expmod_size_runner). The default 512-bit size is
// covered by tb_recint_expmod. Watchdog in cycles.
module tb_recint_expmod_sizes;
  logic clk = 1'b0, rst_n = 1'b0;
  logic fin7, fin8;
  int   checks7, failures7, checks8, failures8;
  int   checks, failures;

  always #5 clk = ~clk;

  expmod_size_runner #(.K(7), .NOPS(6)) u_k7 (.clk(clk), .rst_n(rst_n), .finished(fin7),
    .checks(checks7), .failures(failures7));
  expmod_size_runner #(.K(8), .NOPS(6)) u_k8 (.clk(clk), .rst_n(rst_n), .finished(fin8),
    .checks(checks8), .failures(failures8));

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    wait (fin7 && fin8);
    checks   = checks7 + checks8;
    failures = failures7 + failures8;
    $display("K=7: %0d checks, %0d failures; K=8: %0d checks, %0d failures",
             checks7, failures7, checks8, failures8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (7 * (2 * 256 + 16 + 4 * (3 + 2 * 256))) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks7 + checks8, failures7 + failures8 + 1);
    $finish;
  end
endmodule
