// tb_recint_expmod: end-to-end test of the modular exponentiation core
// recint_expmod with its default parameters (512-bit operands, 64-bit limbs).
//
// It runs b^c mod n for moduli of 512, 256 and 128 bits (the three word sizes
// the design is meant for; shorter moduli run on the same 512-bit datapath),
// with full-length random exponents, a base larger than the modulus, a zero
// exponent, an all-ones exponent and the modulus 1. Each result is compared
// with a square-and-multiply computed here with wide remainders (no Montgomery
// arithmetic), and each operation must take exactly
//   2*2^K + 1 + 4*(3 + 2^K + popcount(c))
// cycles from the start edge to done. It counts how often each mechanism of
// the design happened: exponent bits that needed the extra multiplication and
// bits that did not, a base that had to be reduced, REDC results that needed
// the final subtraction and results that did not, R^2 doublings with and
// without subtraction; each must happen at least once. Watchdog in cycles.
module tb_recint_expmod;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic         busy, done;
  logic [W-1:0] b, c, n, a;
  int checks = 0, failures = 0, ops = 0;
  int n_mul = 0, n_sqr_only = 0, n_base_reduced = 0;
  int n_redc_sub = 0, n_redc_nosub = 0, n_r2_sub = 0, n_r2_nosub = 0;

  always #5 clk = ~clk;

  recint_expmod dut (.clk(clk), .rst_n(rst_n), .start(start), .b(b), .c(c), .n(n),
    .busy(busy), .done(done), .a(a));

  // Mechanism counters, read from inside the design.
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mm.u_redc.v1_q) begin
      if (dut.u_mm.u_redc.t_ge_n) n_redc_sub++; else n_redc_nosub++;
    end
    if (dut.u_r2.busy) begin
      if (dut.u_r2.x_q[W-1] | dut.u_r2.no_borrow) n_r2_sub++; else n_r2_nosub++;
    end
  end

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // Reference: left-to-right square and multiply with plain remainders.
  function automatic logic [W-1:0] ref_expmod(input logic [W-1:0] bb, input logic [W-1:0] cc,
                                              input logic [W-1:0] nn);
    logic [2*W-1:0] x, base, m;
    m    = {{W{1'b0}}, nn};
    base = {{W{1'b0}}, bb} % m;
    x    = (2*W)'(1) % m;
    for (int i = W - 1; i >= 0; i--) begin
      x = (x * x) % m;
      if (cc[i]) x = (x * base) % m;
    end
    return x[W-1:0];
  endfunction

  task automatic run_one(input logic [W-1:0] bb, input logic [W-1:0] cc, input logic [W-1:0] nn);
    int cycles = 0, expected_cycles;
    logic [W-1:0] expected;
    wait (!busy);
    @(posedge clk);
    start <= 1'b1;
    b <= bb; c <= cc; n <= nn;
    @(posedge clk);
    start <= 1'b0;
    b <= rand_wide(); c <= rand_wide(); n <= rand_wide();   // must be sampled already
    do begin
      @(posedge clk);
      #1;
      cycles++;
    end while (!done && cycles < 16 * W);
    expected        = ref_expmod(bb, cc, nn);
    expected_cycles = 2 * W + 1 + 4 * (3 + W + $countones(cc));
    ops++;
    n_mul      += $countones(cc);
    n_sqr_only += W - $countones(cc);
    if (bb >= nn) n_base_reduced++;
    checks++;
    if (a !== expected) begin
      failures++;
      $display("FAIL expmod n=%h b=%h c=%h got %h expected %h", nn, bb, cc, a, expected);
    end
    checks++;
    if (cycles != expected_cycles) begin
      failures++;
      $display("FAIL expmod took %0d cycles, expected %0d", cycles, expected_cycles);
    end
  endtask

  task automatic mechanism(input string name, input int count);
    checks++;
    $display("%-32s %0d", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
  endtask

  initial begin
    logic [W-1:0] nn;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // 512-, 256- and 128-bit moduli with exponents of the same length.
    for (int bits = W; bits >= 128; bits /= 2) begin
      for (int j = 0; j < 2; j++) begin
        nn = rand_wide() >> (W - bits);
        nn[bits-1] = 1'b1;
        nn[0]      = 1'b1;
        run_one(rand_wide() >> (W - bits), rand_wide() >> (W - bits), nn);
      end
    end
    nn = rand_wide() >> (W / 2); nn[0] = 1'b1;
    run_one(rand_wide(), rand_wide(), nn);     // base far above the modulus
    run_one(rand_wide(), '0, nn);              // zero exponent: result 1
    run_one(rand_wide(), '1, nn);              // every bit multiplies
    run_one(rand_wide(), rand_wide(), W'(1));  // modulus 1: result 0
    run_one(W'(2), W'(100), W'(1000003));      // small numbers: 2^100 mod 1000003
    mechanism("exponent bits with multiply", n_mul);
    mechanism("exponent bits square only", n_sqr_only);
    mechanism("base reduced (b >= n)", n_base_reduced);
    mechanism("REDC final subtraction", n_redc_sub);
    mechanism("REDC no subtraction", n_redc_nosub);
    mechanism("R^2 doubling with subtraction", n_r2_sub);
    mechanism("R^2 doubling without", n_r2_nosub);
    $display("operations %0d", ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (11 * (2 * W + 16 + 4 * (3 + 2 * W))) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
