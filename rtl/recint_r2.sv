// recint_r2: computes R^2 mod N, R = 2^(2^K), the constant that brings a value
// into Montgomery representation (Montgomery product of x and R^2 mod N is
// x*R mod N).
//
// Starting from x = 1 mod N, the module doubles x modulo N 2*2^K times:
// x <- 2x, then x - N if 2x >= N. 2x has one bit more than N; the subtraction
// is a RecInt<K> addition of ~N + 1 (recint_add) and 2x >= N is read from the
// shifted-out bit and the carry. x stays below N throughout.
//
// Interface and timing: n (any value >= 1) is sampled with start (ignored
// while busy); done pulses for one cycle 2*2^K cycles after start, with r2
// valid from then until the next start. Bit-serial doubling is this design's
// choice; the paper defines the Montgomery representation but not how it is
// entered.
module recint_r2 #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2**K-1:0] n,
  output logic            done,
  output logic [2**K-1:0] r2
);
  localparam int unsigned W  = 2**K;
  localparam int unsigned CW = $clog2(2 * W);

  logic          busy;
  logic [CW-1:0] cnt;
  logic [W-1:0]  n_q, x_q;

  // 2x - N
  logic [W-1:0] diff, dbl;
  logic         no_borrow;
  recint_add #(.K(K), .LIMB_K(LIMB_K)) u_sub (
    .b({x_q[W-2:0], 1'b0}), .c(~n_q), .cin(1'b1), .a(diff), .cout(no_borrow));
  always_comb dbl = (x_q[W-1] | no_borrow) ? diff : {x_q[W-2:0], 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cnt  <= '0;
        end
      end else begin
        cnt <= cnt + 1'b1;
        if (cnt == CW'(2 * W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!busy && start) begin
      n_q <= n;
      x_q <= (n == W'(1)) ? '0 : W'(1);
    end else if (busy) begin
      x_q <= dbl;
      if (cnt == CW'(2 * W - 1)) r2 <= dbl;
    end
  end
endmodule
