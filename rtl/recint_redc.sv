// recint_redc: Montgomery reduction REDC(T) = T * R^-1 mod N, R = 2^(2^K),
// for 0 <= T < R*N and odd N.
//
//   m = (T mod R) * N' mod R        truncated RecInt<K> product
//   t = (T + m*N) / R                complete RecInt<K> product, then High half
//   r = (t >= N) ? t - N : t
//
// Since R is a power of two, "mod R" is the Low half and the exact division by
// R is the High half of a RecInt<K+1>, so the reduction needs one truncated
// and one complete multiplication and no division. T + m*N is formed as two
// RecInt<K> additions: the Low halves (which sum to 0 mod R; only their carry
// is used) and the High halves plus that carry. t can reach 2N-1, one bit more
// than N; t >= N is decided by the extra bit and a RecInt<K> comparison
// (recint_cmp) of the rest with N, and t - N is a RecInt<K> addition of ~N + 1.
//
// Interface and timing: t_in, n and np are sampled with in_valid; r is valid
// with out_valid two cycles later. Stage 1 registers m (with T and N), stage 2
// registers r. A new T may enter every cycle. np must satisfy
// R*R^-1 - N*N' = 1. The algorithm is Montgomery's REDC as used by the
// recursive arithmetic; the two-stage pipeline is this design's choice.
module recint_redc #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [2*(2**K)-1:0] t_in,
  input  logic [2**K-1:0]     n,
  input  logic [2**K-1:0]     np,
  output logic                out_valid,
  output logic [2**K-1:0]     r
);
  localparam int unsigned W = 2**K;

  // ---- stage 1: m = T.Low * N' mod R ----
  logic [W-1:0] m;
  recint_mul #(.K(K), .LIMB_K(LIMB_K)) u_m (.b(t_in[W-1:0]), .c(np), .a(m));

  logic           v1_q;
  logic [W-1:0]   m_q, n_q;
  logic [2*W-1:0] t_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1_q <= 1'b0;
    else        v1_q <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      m_q <= m;
      t_q <= t_in;
      n_q <= n;
    end
  end

  // ---- stage 2: t = (T + m*N) / R, conditional subtract ----
  logic [2*W-1:0] mn;
  recint_lmul #(.K(K), .LIMB_K(LIMB_K)) u_mn (.b(m_q), .c(n_q), .p(mn));

  logic [W-1:0] sum_low;   // always 0 mod R by construction of m
  logic         carry_low;
  recint_add #(.K(K), .LIMB_K(LIMB_K)) u_add_low (
    .b(t_q[W-1:0]), .c(mn[W-1:0]), .cin(1'b0), .a(sum_low), .cout(carry_low));

  logic [W-1:0] sum_high;
  logic         carry_high;
  recint_add #(.K(K), .LIMB_K(LIMB_K)) u_add_high (
    .b(t_q[2*W-1:W]), .c(mn[2*W-1:W]), .cin(carry_low), .a(sum_high), .cout(carry_high));

  // t - N as sum_high + ~N + 1; no borrow (carry set) means sum_high >= N.
  logic [W-1:0] diff;
  logic         no_borrow;
  recint_add #(.K(K), .LIMB_K(LIMB_K)) u_sub (
    .b(sum_high), .c(~n_q), .cin(1'b1), .a(diff), .cout(no_borrow));

  // t >= N: either t has its extra top bit, or its low 2^K bits are >= N.
  recint_pkg::cmp_e high_vs_n;
  recint_cmp #(.K(K), .LIMB_K(LIMB_K)) u_cmp (.a(sum_high), .b(n_q), .res(high_vs_n));

  logic t_ge_n;
  always_comb t_ge_n = carry_high | (high_vs_n != recint_pkg::CMP_LT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1_q;
  end
  always_ff @(posedge clk) begin
    if (v1_q) r <= t_ge_n ? diff : sum_high;
  end

  // The Low halves of T and m*N always cancel modulo R.
  // The comparator and the borrow of the subtraction must agree.
  a_cmp_matches_borrow: assert property (@(posedge clk) disable iff (!rst_n)
    v1_q |-> no_borrow == (high_vs_n != recint_pkg::CMP_LT));
  a_low_cancels: assert property (@(posedge clk) disable iff (!rst_n)
    v1_q |-> sum_low == '0);
endmodule
