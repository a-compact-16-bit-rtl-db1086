// gf16_mul_lambda: multiplication of a GF((2^2)^2) element by the constant
// lambda = alpha^2*beta (the M_lambda block), the constant term of the
// GF(2^8) defining polynomial x^2 + x + lambda.
//
// lambda*A = (a_l*alpha ^ a_h)*beta + (a_l ^ a_h)*beta^4, i.e.
//   k0 = a1^a2,  k1 = a0^a1^a3,  k2 = a0^a2,  k3 = a1^a3.
// Four XORs (a1^a3 and a0^a1 shared into k1). Equations are the paper's.
// Interface: 4-bit a in, 4-bit k out. Combinational.
module gf16_mul_lambda
  import gf_pkg::*;
(
  input  gf16_t a,
  output gf16_t k
);
  assign k[0] = a[1] ^ a[2];
  assign k[3] = a[1] ^ a[3];
  assign k[1] = k[3] ^ a[0];
  assign k[2] = a[0] ^ a[2];
endmodule
