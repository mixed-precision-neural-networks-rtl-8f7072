// mp_mul17 -- one 17x17-bit signed multiplier (combinational).
//
// The host core's one-cycle RV32M multiplier is built from 17x17 units; the
// mixed-precision unit uses four of them (three original, one added) and runs
// them on the doubled clock. Output is the full 34-bit signed product.
module mp_mul17
  import mp_pkg::*;
(
  input  op17_t a_i,   // activation operand
  input  op17_t b_i,   // weight operand (may hold two soft-SIMD weights)
  output prod_t p_o    // a_i * b_i
);
  assign p_o = prod_t'(a_i) * prod_t'(b_i);
endmodule
