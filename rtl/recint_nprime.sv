// recint_nprime: computes N' = -N^-1 mod R, R = 2^(2^K), for an odd modulus N.
// N' is the constant of Montgomery reduction (R*R^-1 - N*N' = 1).
//
// Newton (Hensel) iteration for the inverse modulo a power of two:
//   x <- x * (2 - N*x) mod R
// doubles the number of correct low bits of x = N^-1 each time. It starts from
// x = N, which is already the inverse modulo 8 for every odd N, so K
// iterations give at least 3*2^K >= 2^K correct bits. Each iteration takes two
// cycles on one truncated multiplier (recint_mul): first y = N*x, then
// x = x*(2-y). N' is the two's complement of the final x.
//
// Interface and timing: n is sampled with start (ignored while busy); done
// pulses for one cycle 2*K cycles after start, with np valid from then until
// the next start. The iteration and its schedule are this design's choice; the
// truncated multiplier is the one of the recursive arithmetic.
module recint_nprime #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2**K-1:0] n,
  output logic            done,
  output logic [2**K-1:0] np
);
  localparam int unsigned W  = 2**K;
  localparam int unsigned IW = $clog2(K + 1);

  logic          busy, phase;
  logic [IW-1:0] iter;
  logic [W-1:0]  n_q, x_q, y_q;

  // One truncated multiplier, shared by both phases.
  logic [W-1:0] mul_b, mul_c, mul_p;
  always_comb begin
    if (!phase) begin mul_b = n_q; mul_c = x_q;               end  // y = N*x
    else        begin mul_b = x_q; mul_c = W'(2) - y_q;       end  // x*(2-y)
  end
  recint_mul #(.K(K), .LIMB_K(LIMB_K)) u_mul (.b(mul_b), .c(mul_c), .a(mul_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      phase <= 1'b0;
      iter  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          phase <= 1'b0;
          iter  <= '0;
        end
      end else begin
        phase <= ~phase;
        if (phase) begin
          iter <= iter + 1'b1;
          if (iter == IW'(K - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!busy && start) begin
      n_q <= n;
      x_q <= n;
    end else if (busy) begin
      if (!phase) y_q <= mul_p;
      else begin
        x_q <= mul_p;
        if (iter == IW'(K - 1)) np <= ~mul_p + 1'b1;
      end
    end
  end

  a_n_odd: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && start) |-> n[0]);
endmodule
