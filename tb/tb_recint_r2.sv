// tb_recint_r2: self-checking test of recint_r2 at its default size
// (R = 2^512). For random moduli of several lengths, and for 1, 3 and R-1, it
// checks r2 = R^2 mod N against a wide remainder computed here, and that done
// comes exactly 2*2^K cycles after start. Also counts how often a doubling
// needed the subtraction of N and how often it did not. Watchdog in cycles.
module tb_recint_r2;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;
  localparam int unsigned NTEST = 20;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [W-1:0] n, r2;
  int checks = 0, failures = 0;
  int sub_taken = 0, sub_skipped = 0;

  always #5 clk = ~clk;

  recint_r2 #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .start(start), .n(n), .done(done), .r2(r2));

  always @(posedge clk)
    if (rst_n && dut.busy) begin
      if (dut.x_q[W-1] | dut.no_borrow) sub_taken++; else sub_skipped++;
    end

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic run_one(input logic [W-1:0] nn);
    int cycles = 0;
    logic [2*W:0] expected;
    start <= 1'b1;
    n     <= nn;
    @(posedge clk);
    start <= 1'b0;
    n     <= rand_wide();
    do begin
      @(posedge clk);
      #1;                                   // look after the edge
      cycles++;
    end while (!done && cycles < 4 * W);
    expected = {1'b1, {(2*W){1'b0}}} % {{(W+1){1'b0}}, nn};
    checks++;
    if ({{(W+1){1'b0}}, r2} != expected || cycles != 2 * W) begin
      failures++;
      $display("FAIL r2 n=%h r2=%h expected=%h cycles=%0d", nn, r2, expected[W-1:0], cycles);
    end
  endtask

  initial begin
    logic [W-1:0] nn;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_one(W'(1));
    run_one(W'(3));
    run_one('1);
    for (int j = 0; j < NTEST; j++) begin
      nn = rand_wide() >> ($urandom % (W - 2));
      if (nn == '0) nn = W'(5);
      run_one(nn);
    end
    checks++;
    if (sub_taken == 0 || sub_skipped == 0) begin
      failures++;
      $display("FAIL subtraction taken %0d, skipped %0d", sub_taken, sub_skipped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NTEST + 3) * (2 * W + 4) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
