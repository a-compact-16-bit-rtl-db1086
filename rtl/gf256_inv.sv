// gf256_inv: inverter in GF(((2^2)^2)^2) (the I8 block), Itoh-Tsujii style.
//
// For A = a_l*gamma + a_h*gamma^16 the product A*A^16 lies in GF(2^4):
//   Delta = lambda*(a_l ^ a_h)^2 ^ a_l*a_h,
// and A^-1 = Delta^-1 * (a_h*gamma + a_l*gamma^16), so
//   i_l = Delta^-1 * a_h,   i_h = Delta^-1 * a_l.
// Data path: one 4-bit adder, the merged squarer/lambda block, one gf16_mul
// for a_l*a_h, a 4-bit adder, gf16_inv, and two gf16_mul for the outputs.
// The structure follows the paper, including the merged S4-M_lambda block.
// Note the half swap at the output: the low output half is built from the
// high input half (the paper's drawing shows the halves unswapped, its
// formula shows them swapped; the formula is the correct one).
// Zero maps to zero. Interface: 8-bit a in, 8-bit i out. Combinational.
module gf256_inv
  import gf_pkg::*;
(
  input  gf256_t a,
  output gf256_t i
);
  gf16_t sq_lam, prod, delta, delta_inv;

  gf16_sq_mul_lambda u_sql (.f(a[3:0] ^ a[7:4]), .k(sq_lam));
  gf16_mul           u_lh  (.a(a[3:0]), .b(a[7:4]), .m(prod));
  assign delta = sq_lam ^ prod;
  gf16_inv           u_inv (.a(delta), .i(delta_inv));
  gf16_mul           u_ol  (.a(delta_inv), .b(a[7:4]), .m(i[3:0]));
  gf16_mul           u_oh  (.a(delta_inv), .b(a[3:0]), .m(i[7:4]));
endmodule
