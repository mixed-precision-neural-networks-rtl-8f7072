// mp_ppa -- 34x34-bit partial product addition (combinational).
//
// Adds the products of a pair of multipliers: M1+M2 feed the first instance and
// M3+M4 the second, as in the published datapath figure. The sum wraps at
// 34 bits, which cannot overflow for the operand ranges the decoder produces.
module mp_ppa
  import mp_pkg::*;
(
  input  prod_t a_i,
  input  prod_t b_i,
  output prod_t s_o
);
  assign s_o = a_i + b_i;
endmodule
