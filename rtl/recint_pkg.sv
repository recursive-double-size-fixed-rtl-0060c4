// recint_pkg: shared definitions of the recursive double-size integer (RecInt)
// arithmetic. A RecInt<K> is an unsigned integer of 2^K bits, stored as two
// RecInt<K-1> halves (High, Low) down to the limb, a RecInt<LIMB_K> handled as
// one machine word. All arithmetic blocks take K and LIMB_K as parameters; the
// defaults below are a 512-bit operand (K = 9) over 64-bit limbs (LIMB_K = 6).
package recint_pkg;

  // Default operand size exponent: operands are 2^K bits wide.
  parameter int unsigned K_DEFAULT      = 9;
  // Default limb size exponent: 2^6 = 64-bit limbs.
  parameter int unsigned LIMB_K_DEFAULT = 6;

  // Result of a three-way comparison (RI_comp returns -1, 0 or +1).
  typedef enum logic [1:0] {
    CMP_LT = 2'b00,
    CMP_EQ = 2'b01,
    CMP_GT = 2'b10
  } cmp_e;

endpackage
