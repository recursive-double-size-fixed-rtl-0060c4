// expmod_size_runner: drives one recint_expmod of size K through NOPS
// exponentiations with random odd moduli of the full 2^K bits (top bit set),
// random bases and exponents of the same width, and compares each result with
// a square-and-multiply reference computed with wide remainders, and each
// operation time with 2*2^K + 1 + 4*(3 + 2^K + popcount(c)) cycles. Reports
// its check and failure counts and raises finished when it is done. Used by
// tb_recint_expmod_sizes to run the design at the dedicated word sizes.
module expmod_size_runner #(
  parameter int unsigned K    = 7,
  parameter int unsigned NOPS = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned W = 2**K;

  logic         start = 1'b0, busy, done;
  logic [W-1:0] b, c, n, a;

  recint_expmod #(.K(K)) dut (.clk(clk), .rst_n(rst_n), .start(start), .b(b), .c(c), .n(n),
    .busy(busy), .done(done), .a(a));

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

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

  initial begin
    logic [W-1:0] bb, cc, nn;
    int cycles;
    finished = 1'b0;
    checks   = 0;
    failures = 0;
    @(posedge rst_n);
    for (int op = 0; op < NOPS; op++) begin
      nn = rand_wide();
      nn[W-1] = 1'b1;
      nn[0]   = 1'b1;
      bb = rand_wide();
      cc = rand_wide();
      @(posedge clk);
      start <= 1'b1;
      b <= bb; c <= cc; n <= nn;
      @(posedge clk);
      start <= 1'b0;
      cycles = 0;
      do begin
        @(posedge clk);
        #1;
        cycles++;
      end while (!done && cycles < 16 * W);
      checks += 2;
      if (a !== ref_expmod(bb, cc, nn)) begin
        failures++;
        $display("FAIL K=%0d expmod n=%h b=%h c=%h got %h", K, nn, bb, cc, a);
      end
      if (cycles != 2 * W + 1 + 4 * (3 + W + $countones(cc))) begin
        failures++;
        $display("FAIL K=%0d expmod took %0d cycles", K, cycles);
      end
    end
    finished = 1'b1;
  end
endmodule
