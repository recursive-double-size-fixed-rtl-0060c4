// recint_add: full-precision adder of two RecInt<K> with carry in and out,
// {cout, a} = b + c + cin.
//
// The adder follows the recursive representation: a RecInt<K> is split into a
// High and a Low RecInt<K-1>; the Low halves are added first and their carry
// enters the High half adder. At the limb size (K == LIMB_K) one native
// 2^LIMB_K-bit addition is done. The result is therefore a ripple of limb
// adders, 2^(K-LIMB_K) of them. Subtraction b - c is obtained by callers as
// b + ~c + 1, the borrow being ~cout.
//
// Purely combinational. The recursion and the carry handling mirror the
// recursive data structure; the one-bit carry (instead of a limb-sized one)
// is this design's choice.
//
// Lint note: Verilator keeps an unelaborated template of a module that
// instantiates itself and reports its ports and the half-size result nets as
// undriven (UNDRIVEN). The warning concerns that template only: every
// elaborated level is driven, and the warning disappears when K = LIMB_K,
// where the module does not recurse.
module recint_add #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic [2**K-1:0] b,
  input  logic [2**K-1:0] c,
  input  logic            cin,
  output logic [2**K-1:0] a,
  output logic            cout
);
  localparam int unsigned W = 2**K;
  localparam int unsigned H = W / 2;

  generate
    if (K <= LIMB_K) begin : g_limb
      // Limb addition: one machine-word add with carry.
      always_comb {cout, a} = {1'b0, b} + {1'b0, c} + {{W{1'b0}}, cin};
    end else begin : g_split
      logic carry_low;
      recint_add #(.K(K-1), .LIMB_K(LIMB_K)) u_low (
        .b(b[H-1:0]), .c(c[H-1:0]), .cin(cin), .a(a[H-1:0]), .cout(carry_low));
      recint_add #(.K(K-1), .LIMB_K(LIMB_K)) u_high (
        .b(b[W-1:H]), .c(c[W-1:H]), .cin(carry_low), .a(a[W-1:H]), .cout(cout));
    end
  endgenerate
endmodule
