// recint_expmod: modular exponentiation a = b^c mod n on RecInt<K> operands
// (2^K bits each), computed with Montgomery multiplication so that no division
// is needed. This is the top of the design.
//
// Operation, after start:
//   1. PRE   : recint_nprime computes N' = -n^-1 mod R and, in parallel,
//              recint_r2 computes R^2 mod n (R = 2^(2^K)); the longer of the
//              two (2*2^K cycles) sets the time.
//   2. CONV_B: b_bar = MM(b, R^2)  = b*R mod n   (b may be >= n: it is reduced)
//   3. CONV_1: x     = MM(1, R^2)  = R mod n     (Montgomery form of 1)
//   4. for each exponent bit i from 2^K-1 down to 0:
//        SQR : x = MM(x, x);   MUL : if c[i] then x = MM(x, b_bar)
//   5. OUT   : a = MM(x, 1) = x*R^-1 mod n       (back to normal form)
// MM is the Montgomery product of recint_montmul (complete product plus REDC).
//
// Interface: start is taken when busy is low; b, c, n are sampled with it. n
// must be odd (checked by an assertion) and below R. done pulses for one cycle
// with a valid; a holds until the next start. rst_n is an asynchronous
// active-low reset.
//
// Timing: every Montgomery product takes 4 cycles (operands registered, then
// the 3-cycle multiplier), and products are not overlapped. From the cycle
// start is sampled to the done pulse the operation takes
//   2*2^K + 1 + 4*(3 + 2^K + popcount(c)) cycles,
// e.g. 1025 + 4*(515 + popcount(c)) for K = 9.
//
// The exponent function, the Montgomery reduction and its R = 2^(2^K) follow
// the recursive arithmetic this design implements. The square-and-multiply
// order, the way N' and R^2 mod n are obtained and the single non-overlapped
// multiplier schedule are this design's choices.
module recint_expmod #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2**K-1:0] b,
  input  logic [2**K-1:0] c,
  input  logic [2**K-1:0] n,
  output logic            busy,
  output logic            done,
  output logic [2**K-1:0] a
);
  localparam int unsigned W  = 2**K;
  localparam int unsigned BW = $clog2(W);

  typedef enum logic [2:0] {
    S_IDLE, S_PRE, S_CONV_B, S_CONV_1, S_SQR, S_MUL, S_OUT
  } state_e;

  state_e        state;
  logic [W-1:0]  b_q, c_q, n_q, bbar_q;
  logic [BW-1:0] bit_q;
  logic          np_done_q, r2_done_q;

  // ---- precomputation units ----
  logic         go;
  logic         np_done, r2_done;
  logic [W-1:0] np, r2;
  always_comb go = (state == S_IDLE) && start;

  recint_nprime #(.K(K), .LIMB_K(LIMB_K)) u_nprime (
    .clk(clk), .rst_n(rst_n), .start(go), .n(n), .done(np_done), .np(np));
  recint_r2 #(.K(K), .LIMB_K(LIMB_K)) u_r2 (
    .clk(clk), .rst_n(rst_n), .start(go), .n(n), .done(r2_done), .r2(r2));

  // ---- the Montgomery multiplier, operands registered ----
  logic         mm_go_q, mm_done;
  logic [W-1:0] mm_a_q, mm_b_q, mm_r;
  recint_montmul #(.K(K), .LIMB_K(LIMB_K)) u_mm (
    .clk(clk), .rst_n(rst_n), .in_valid(mm_go_q), .a(mm_a_q), .b(mm_b_q),
    .n(n_q), .np(np), .out_valid(mm_done), .r(mm_r));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      mm_go_q   <= 1'b0;
      np_done_q <= 1'b0;
      r2_done_q <= 1'b0;
      bit_q     <= '0;
      b_q       <= '0;
      c_q       <= '0;
      n_q       <= '0;
      bbar_q    <= '0;
      mm_a_q    <= '0;
      mm_b_q    <= '0;
      a         <= '0;
    end else begin
      done    <= 1'b0;
      mm_go_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          b_q       <= b;
          c_q       <= c;
          n_q       <= n;
          np_done_q <= 1'b0;
          r2_done_q <= 1'b0;
          state     <= S_PRE;
        end
        S_PRE: begin
          if (np_done) np_done_q <= 1'b1;
          if (r2_done) r2_done_q <= 1'b1;
          if ((np_done || np_done_q) && (r2_done || r2_done_q)) begin
            state   <= S_CONV_B;
            mm_go_q <= 1'b1;
            mm_a_q  <= b_q;
            mm_b_q  <= r2;
          end
        end
        S_CONV_B: if (mm_done) begin
          bbar_q <= mm_r;
          state   <= S_CONV_1;
          mm_go_q <= 1'b1;
          mm_a_q  <= W'(1);
          mm_b_q  <= r2;
        end
        S_CONV_1: if (mm_done) begin
          bit_q   <= BW'(W - 1);
          state   <= S_SQR;
          mm_go_q <= 1'b1;
          mm_a_q  <= mm_r;
          mm_b_q  <= mm_r;
        end
        // After the square (bit clear) or the multiply: next exponent bit,
        // or the conversion out of Montgomery form after bit 0.
        S_SQR: if (mm_done) begin
          if (c_q[bit_q]) begin
            state   <= S_MUL;
            mm_go_q <= 1'b1;
            mm_a_q  <= mm_r;
            mm_b_q  <= bbar_q;
          end else if (bit_q == '0) begin
            state   <= S_OUT;
            mm_go_q <= 1'b1;
            mm_a_q  <= mm_r;
            mm_b_q  <= W'(1);
          end else begin
            bit_q   <= bit_q - 1'b1;
            state   <= S_SQR;
            mm_go_q <= 1'b1;
            mm_a_q  <= mm_r;
            mm_b_q  <= mm_r;
          end
        end
        S_MUL: if (mm_done) begin
          if (bit_q == '0) begin
            state   <= S_OUT;
            mm_go_q <= 1'b1;
            mm_a_q  <= mm_r;
            mm_b_q  <= W'(1);
          end else begin
            bit_q   <= bit_q - 1'b1;
            state   <= S_SQR;
            mm_go_q <= 1'b1;
            mm_a_q  <= mm_r;
            mm_b_q  <= mm_r;
          end
        end
        S_OUT: if (mm_done) begin
          a     <= mm_r;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (state != S_IDLE);

  a_n_odd: assert property (@(posedge clk) disable iff (!rst_n)
    go |-> n[0]);
  a_one_product: assert property (@(posedge clk) disable iff (!rst_n)
    mm_go_q |=> !mm_go_q);
endmodule
