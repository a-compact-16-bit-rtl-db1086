// gf16_mul: multiplier in GF((2^2)^2), normal basis {beta, beta^4}, defining
// polynomial x^2 + x + alpha (the M4 block).
//
// C = [(a_l^a_h)(b_l^b_h)*alpha ^ a_l*b_l]*beta + [(a_l^a_h)(b_l^b_h)*alpha ^ a_h*b_h]*beta^4.
// The two outer products use gf4_mul. The middle product, its two input
// adders and the multiplication by alpha are merged into one network of four
// XORs, four NANDs and three XORs that gives P = alpha*(X*Y) directly:
//   x0=a0^a2, x1=a1^a3, y0=b0^b2, y1=b1^b3,
//   p0 = x1*y0 ^ x0*(y1^y0),  p1 = x1*y1 ^ x0*y0.
// Totals 17 XOR + 12 NAND. Structure and equations follow the paper.
// Interface: 4-bit operands a, b, product m. Combinational.
module gf16_mul
  import gf_pkg::*;
(
  input  gf16_t a,
  input  gf16_t b,
  output gf16_t m
);
  gf4_t ll, hh, p;
  logic x0, x1, y0, y1;

  gf4_mul u_ll (.a(a[1:0]), .b(b[1:0]), .m(ll));
  gf4_mul u_hh (.a(a[3:2]), .b(b[3:2]), .m(hh));

  assign x0 = a[0] ^ a[2];
  assign x1 = a[1] ^ a[3];
  assign y0 = b[0] ^ b[2];
  assign y1 = b[1] ^ b[3];
  assign p[0] = ~(x1 & y0) ^ ~(x0 & (y1 ^ y0));
  assign p[1] = ~(x1 & y1) ^ ~(x0 & y0);

  assign m[1:0] = ll ^ p;
  assign m[3:2] = hh ^ p;
endmodule
