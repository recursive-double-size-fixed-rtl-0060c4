// tb_recint_montmul: self-checking test of the Montgomery multiplier
// recint_montmul at its default size (R = 2^512). For random odd moduli N
// (full-size and shorter) and operands a < R, b < N it checks that the result
// r satisfies r < N and r*R = a*b (mod N), computed here with wide
// remainders, and that it appears exactly three cycles after the operands. A
// new product starts every cycle. N' is computed here bit by bit, independently
// of the design. Watchdog in cycles.
module tb_recint_montmul;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;
  localparam int unsigned NTEST = 200;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid = 1'b0, out_valid;
  logic [W-1:0] a, b, n, np, r;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  recint_montmul #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b),
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

  typedef struct { logic [W-1:0] a, b, n; int issued; } item_t;
  item_t queue[$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      logic [2*W-1:0] lhs, rhs;
      if (queue.size() == 0) begin
        failures++;
        $display("FAIL result without operands");
      end else begin
        it  = queue.pop_front();
        lhs = {r, {W{1'b0}}} % {{W{1'b0}}, it.n};
        rhs = ({{W{1'b0}}, it.a} * {{W{1'b0}}, it.b}) % {{W{1'b0}}, it.n};
        checks++;
        if (r >= it.n || lhs != rhs || cycle - it.issued != 3) begin
          failures++;
          $display("FAIL montmul n=%h a=%h b=%h r=%h latency=%0d", it.n, it.a, it.b, r, cycle - it.issued);
        end
      end
    end
  end

  initial begin
    logic [W-1:0] nn, aa, bb;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int j = 0; j < NTEST / 10; j++) begin
      nn = rand_wide();
      if (j % 3 == 1) nn = nn >> ($urandom % (W - 8));
      nn[0] = 1'b1;
      for (int i = 0; i < 10; i++) begin
        aa = rand_wide();
        bb = rand_wide() % nn;
        if (i == 0) begin aa = '1; bb = nn - 1'b1; end   // largest allowed product
        in_valid <= 1'b1;
        a  <= aa;
        b  <= bb;
        n  <= nn;
        np <= neg_inv(nn);
        queue.push_back('{a: aa, b: bb, n: nn, issued: cycle + 1});
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (queue.size() != 0) begin
      failures++;
      $display("FAIL %0d products never came out", queue.size());
    end
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
