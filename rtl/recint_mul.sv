// recint_mul: truncated multiplication of two RecInt<K>, a = b * c mod 2^(2^K).
//
// Only the low half of the product is kept, so with b = bh*2^H + bl and
// c = ch*2^H + cl (H = 2^(K-1)):
//   a = bl*cl + ((bh*cl + bl*ch) mod 2^H) * 2^H      (mod 2^(2H))
// The product bl*cl is a complete RecInt<K-1> multiplication (recint_lmul);
// bh*cl and bl*ch are truncated RecInt<K-1> multiplications (this module one
// level down); bh*ch is never formed. At the limb size the low limb of a
// native product is taken. One truncated RecInt<K> product thus costs one
// complete and two truncated products of the level below.
//
// Purely combinational. The decomposition is the one of the truncated
// multiplication of the recursive arithmetic; the adders are this design's
// choice.
//
// Lint note: Verilator keeps an unelaborated template of a module that
// instantiates itself and reports its ports and the half-size result nets as
// undriven (UNDRIVEN). The warning concerns that template only: every
// elaborated level is driven, and the warning disappears when K = LIMB_K,
// where the module does not recurse.
module recint_mul #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic [2**K-1:0] b,
  input  logic [2**K-1:0] c,
  output logic [2**K-1:0] a
);
  localparam int unsigned W = 2**K;
  localparam int unsigned H = W / 2;

  generate
    if (K <= LIMB_K) begin : g_limb
      always_comb a = b * c;  // low limb of the limb product
    end else begin : g_split
      logic [W-1:0] p_ll;           // complete bl*cl
      logic [H-1:0] t_hl, t_lh;     // truncated bh*cl, bl*ch
      recint_lmul #(.K(K-1), .LIMB_K(LIMB_K)) u_ll (.b(b[H-1:0]), .c(c[H-1:0]), .p(p_ll));
      recint_mul  #(.K(K-1), .LIMB_K(LIMB_K)) u_hl (.b(b[W-1:H]), .c(c[H-1:0]), .a(t_hl));
      recint_mul  #(.K(K-1), .LIMB_K(LIMB_K)) u_lh (.b(b[H-1:0]), .c(c[W-1:H]), .a(t_lh));
      always_comb a = {p_ll[W-1:H] + t_hl + t_lh, p_ll[H-1:0]};
    end
  endgenerate
endmodule
