// gf65536_inv: inverter in GF((((2^2)^2)^2)^2), normal basis {delta, delta^256},
// defining polynomial x^2 + x + mu (the I16 block, core of the S-box).
//
// Itoh-Tsujii reduction to GF(2^8):
//   Delta = mu*(a_l ^ a_h)^2 ^ a_l*a_h          (an element of GF(2^8))
//   i_l   = Delta^-1 * a_h,   i_h = Delta^-1 * a_l
// Data path: 8-bit adder -> merged S8-M_mu; gf256_mul for a_l*a_h; 8-bit
// adder; gf256_inv; two gf256_mul. The structure, including the merged
// squarer, is the paper's; as in gf256_inv, the output halves are swapped
// according to the formula rather than the drawing.
// Zero maps to zero (every stage maps zero to zero).
// Interface: 16-bit tower element a in, 16-bit i out; a_l = a[7:0].
// Combinational.
module gf65536_inv
  import gf_pkg::*;
(
  input  gf65536_t a,
  output gf65536_t i
);
  gf256_t sq_mu, prod, delta, delta_inv;

  gf256_sq_mul_mu u_sqm (.a(a[7:0] ^ a[15:8]), .k(sq_mu));
  gf256_mul       u_lh  (.a(a[7:0]), .b(a[15:8]), .m(prod));
  assign delta = sq_mu ^ prod;
  gf256_inv       u_inv (.a(delta), .i(delta_inv));
  gf256_mul       u_ol  (.a(delta_inv), .b(a[15:8]), .m(i[7:0]));
  gf256_mul       u_oh  (.a(delta_inv), .b(a[7:0]),  .m(i[15:8]));
endmodule
