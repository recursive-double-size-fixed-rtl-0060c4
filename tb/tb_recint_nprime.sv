// tb_recint_nprime: self-checking test of recint_nprime at its default size
// (R = 2^512). For random odd moduli, and for 1 and R-1, it checks
// N * N' = -1 (mod R), i.e. R*R^-1 - N*N' = 1, with a wide product computed
// here, and that done comes exactly 2*K cycles after start. Watchdog in
// cycles.
module tb_recint_nprime;
  localparam int unsigned K = recint_pkg::K_DEFAULT;
  localparam int unsigned W = 2**K;
  localparam int unsigned NTEST = 40;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [W-1:0] n, np;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  recint_nprime #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .start(start), .n(n), .done(done), .np(np));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic run_one(input logic [W-1:0] nn);
    int cycles = 0;
    logic [W-1:0] prod;
    start <= 1'b1;
    n     <= nn;
    @(posedge clk);
    start <= 1'b0;
    n     <= rand_wide();                  // must have been sampled already
    do begin
      @(posedge clk);
      #1;                                   // look after the edge
      cycles++;
    end while (!done && cycles < 10 * K);
    prod = nn * np;                         // low 2^K bits of the product
    checks++;
    if (prod != '1 || cycles != 2 * K) begin
      failures++;
      $display("FAIL nprime n=%h np=%h n*np=%h cycles=%0d", nn, np, prod, cycles);
    end
  endtask

  initial begin
    logic [W-1:0] nn;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_one(W'(1));
    run_one('1);
    for (int j = 0; j < NTEST; j++) begin
      nn = rand_wide();
      nn[0] = 1'b1;
      run_one(nn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NTEST + 2) * (2 * K + 4) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
