// tb_recint_redc: self-checking test of the Montgomery reduction recint_redc at
// its default size (R = 2^512). For random odd moduli N (full-size and
// shorter ones) and random T < R*N it checks that the result r satisfies
// r < N and r*R = T (mod N), computed here with wide remainders, and that it
// appears exactly two cycles after the input. N' is computed here bit by bit
// (Hensel lifting), independently of the design. A new T enters every cycle so
// the pipeline is full. Counts how often the final subtraction was taken and
// not taken and fails if either never happened. Watchdog in cycles.
module tb_recint_redc;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;
  localparam int unsigned NTEST = 200;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic           in_valid = 1'b0, out_valid;
  logic [2*W-1:0] t_in;
  logic [W-1:0]   n, np, r;
  int checks = 0, failures = 0, cycle = 0;
  int sub_taken = 0, sub_skipped = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  recint_redc #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .t_in(t_in),
    .n(n), .np(np), .out_valid(out_valid), .r(r));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // -N^-1 mod 2^W by lifting one bit at a time.
  function automatic logic [W-1:0] neg_inv(input logic [W-1:0] nn);
    logic [W-1:0] x = W'(1), prod;
    for (int i = 1; i < W; i++) begin
      prod = nn * x;
      if (prod[i]) x[i] = 1'b1;
    end
    return ~x + 1'b1;
  endfunction

  typedef struct { logic [2*W-1:0] t; logic [W-1:0] n; int issued; } item_t;
  item_t queue[$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      logic [2*W-1:0] lhs, rhs;
      it = queue.pop_front();
      lhs = {r, {W{1'b0}}} % {{W{1'b0}}, it.n};
      rhs = it.t % {{W{1'b0}}, it.n};
      checks++;
      if (r >= it.n || lhs != rhs || cycle - it.issued != 2) begin
        failures++;
        $display("FAIL redc n=%h t=%h r=%h latency=%0d", it.n, it.t, r, cycle - it.issued);
      end
    end
    if (rst_n && dut.v1_q) begin
      if (dut.t_ge_n) sub_taken++; else sub_skipped++;
    end
  end

  initial begin
    logic [W-1:0] nn;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int j = 0; j < NTEST / 10; j++) begin
      nn = rand_wide();
      if (j % 3 == 1) nn = nn >> ($urandom % (W - 8));   // shorter moduli too
      nn[0] = 1'b1;
      for (int i = 0; i < 10; i++) begin
        logic [W-1:0] hi, lo;
        hi = rand_wide() % nn;
        lo = rand_wide();
        if (i == 0) hi = nn - 1'b1;                        // largest allowed T
        in_valid <= 1'b1;
        t_in     <= {hi, lo};
        n        <= nn;
        np       <= neg_inv(nn);
        queue.push_back('{t: {hi, lo}, n: nn, issued: cycle + 1});
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (queue.size() != 0 || sub_taken == 0 || sub_skipped == 0) begin
      failures++;
      $display("FAIL left=%0d sub_taken=%0d sub_skipped=%0d", queue.size(), sub_taken, sub_skipped);
    end
    $display("final subtraction taken %0d times, skipped %0d times", sub_taken, sub_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NTEST * 4 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
