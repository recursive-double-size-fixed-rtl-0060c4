// recint_cmp: three-way unsigned comparison of two RecInt<K> (the RI_comp
// function: greater, equal or lower).
//
// Recursive like the operands: the High halves are compared; when they are
// equal the Low halves decide. At the limb size a native comparison is made.
// Purely combinational; res is a recint_pkg::cmp_e (CMP_LT, CMP_EQ, CMP_GT).
// The encoding of the result as a two-bit enum is this design's choice.
//
// Lint note: Verilator keeps an unelaborated template of a module that
// instantiates itself and reports its ports and the half-size result nets as
// undriven (UNDRIVEN). The warning concerns that template only: every
// elaborated level is driven, and the warning disappears when K = LIMB_K,
// where the module does not recurse.
module recint_cmp
  import recint_pkg::*;
#(
  parameter int unsigned K      = recint_pkg::K_DEFAULT,
  parameter int unsigned LIMB_K = recint_pkg::LIMB_K_DEFAULT
) (
  input  logic [2**K-1:0] a,
  input  logic [2**K-1:0] b,
  output cmp_e            res
);
  localparam int unsigned W = 2**K;
  localparam int unsigned H = W / 2;

  generate
    if (K <= LIMB_K) begin : g_limb
      always_comb begin
        if (a > b)       res = CMP_GT;
        else if (a == b) res = CMP_EQ;
        else             res = CMP_LT;
      end
    end else begin : g_split
      cmp_e res_high, res_low;
      recint_cmp #(.K(K-1), .LIMB_K(LIMB_K)) u_high (
        .a(a[W-1:H]), .b(b[W-1:H]), .res(res_high));
      recint_cmp #(.K(K-1), .LIMB_K(LIMB_K)) u_low (
        .a(a[H-1:0]), .b(b[H-1:0]), .res(res_low));
      always_comb res = (res_high == CMP_EQ) ? res_low : res_high;
    end
  endgenerate
endmodule
