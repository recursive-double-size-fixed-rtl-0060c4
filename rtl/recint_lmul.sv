// recint_lmul: complete multiplication of two RecInt<K>, p = {ah, al} = b * c
// (2^(K+1) bits).
//
// With b = bh*2^H + bl and c = ch*2^H + cl (H = 2^(K-1)), the product is the
// sum of four complete RecInt<K-1> products,
//   b*c = bh*ch*2^(2H) + (bh*cl + bl*ch)*2^H + bl*cl,
// each built by the same module one level down. At the limb size the product
// of two limbs into a double limb is one native multiplication (the role of a
// two-word product routine such as umul_ppmm in software). The partial
// products are summed with plain adders. A RecInt<K> product thus uses
// 4^(K-LIMB_K) limb multipliers.
//
// Purely combinational. The four-product recursion follows the naive complete
// multiplication of the recursive arithmetic; the adder tree is this design's
// choice.
//
// Lint note: Verilator keeps an unelaborated template of a module that
// instantiates itself and reports its ports and the half-size result nets as
// undriven (UNDRIVEN). The warning concerns that template only: every
// elaborated level is driven, and the warning disappears when K = LIMB_K,
// where the module does not recurse.
module recint_lmul #(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic [2**K-1:0]     b,
  input  logic [2**K-1:0]     c,
  output logic [2*(2**K)-1:0] p
);
  localparam int unsigned W = 2**K;
  localparam int unsigned H = W / 2;

  generate
    if (K <= LIMB_K) begin : g_limb
      always_comb p = {{W{1'b0}}, b} * {{W{1'b0}}, c};
    end else begin : g_split
      logic [W-1:0] p_ll, p_hl, p_lh, p_hh;
      recint_lmul #(.K(K-1), .LIMB_K(LIMB_K)) u_ll (.b(b[H-1:0]), .c(c[H-1:0]), .p(p_ll));
      recint_lmul #(.K(K-1), .LIMB_K(LIMB_K)) u_hl (.b(b[W-1:H]), .c(c[H-1:0]), .p(p_hl));
      recint_lmul #(.K(K-1), .LIMB_K(LIMB_K)) u_lh (.b(b[H-1:0]), .c(c[W-1:H]), .p(p_lh));
      recint_lmul #(.K(K-1), .LIMB_K(LIMB_K)) u_hh (.b(b[W-1:H]), .c(c[W-1:H]), .p(p_hh));
      // Middle term bh*cl + bl*ch needs W+1 bits.
      logic [W:0] mid;
      always_comb begin
        mid = {1'b0, p_hl} + {1'b0, p_lh};
        p   = {p_hh, p_ll} + {{(H-1){1'b0}}, mid, {H{1'b0}}};
      end
    end
  endgenerate
endmodule
