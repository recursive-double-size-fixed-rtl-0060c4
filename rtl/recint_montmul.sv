// recint_montmul: Montgomery modular multiplication r = a * b * R^-1 mod N,
// R = 2^(2^K).
//
// The complete product T = a*b (a RecInt<K+1>) is formed by recint_lmul and
// registered, then reduced by recint_redc. With a and b in Montgomery
// representation (x_bar = x*R mod N) the result is the Montgomery
// representation of the product, so a chain of products needs no division.
// Correct for any a, b with a*b < R*N; N odd, np = -N^-1 mod R.
//
// Timing: operands sampled with in_valid, result valid with out_valid three
// cycles later (one cycle for the product, two in recint_redc); fully
// pipelined, one product may start every cycle. Product-then-REDC follows the
// Montgomery multiplication of the recursive arithmetic; the register after
// the product is this design's choice.
module recint_montmul #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [2**K-1:0] a,
  input  logic [2**K-1:0] b,
  input  logic [2**K-1:0] n,
  input  logic [2**K-1:0] np,
  output logic            out_valid,
  output logic [2**K-1:0] r
);
  localparam int unsigned W = 2**K;

  logic [2*W-1:0] prod;
  recint_lmul #(.K(K), .LIMB_K(LIMB_K)) u_prod (.b(a), .c(b), .p(prod));

  logic           v_q;
  logic [2*W-1:0] prod_q;
  logic [W-1:0]   n_q, np_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      prod_q <= prod;
      n_q    <= n;
      np_q   <= np;
    end
  end

  recint_redc #(.K(K), .LIMB_K(LIMB_K)) u_redc (
    .clk(clk), .rst_n(rst_n), .in_valid(v_q), .t_in(prod_q), .n(n_q), .np(np_q),
    .out_valid(out_valid), .r(r));
endmodule
