// gf256_sq_mul_mu: squaring in GF(((2^2)^2)^2) followed by multiplication by
// mu = beta + lambda*gamma, merged into one linear block (S8-M_mu). It forms
// the mu*(a_l ^ a_h)^2 term of the GF(2^16) inverter.
//
// Both operations are GF(2)-linear, so their composition is one 8x8 binary
// matrix; written out, every output bit is an XOR of three to six inputs:
//   k0 = a0^a2^a6            k4 = a2^a3^a5^a6^a7
//   k1 = a0^a1^a2^a3^a6^a7   k5 = a3^a4^a7
//   k2 = a3^a4^a5^a6         k6 = a1^a2^a3^a4^a5^a7
//   k3 = a2^a5^a6^a7         k7 = a0^a3^a5^a6
// These are the paper's final expressions. The paper shares sub-terms to
// reach 17 two-input XORs at depth three; here the pairs a2^a6, a3^a7 and
// a5^a6 are shared by hand and further sharing is left to synthesis.
// Interface: 8-bit a in, 8-bit k = mu*a^2 out. Combinational.
module gf256_sq_mul_mu
  import gf_pkg::*;
(
  input  gf256_t a,
  output gf256_t k
);
  logic t26, t37, t56;
  assign t26  = a[2] ^ a[6];
  assign t37  = a[3] ^ a[7];
  assign t56  = a[5] ^ a[6];
  assign k[0] = t26 ^ a[0];
  assign k[1] = t26 ^ t37 ^ a[1] ^ a[0];
  assign k[2] = t56 ^ a[3] ^ a[4];
  assign k[3] = t56 ^ a[2] ^ a[7];
  assign k[4] = t56 ^ t37 ^ a[2];
  assign k[5] = t37 ^ a[4];
  assign k[6] = t37 ^ a[4] ^ a[2] ^ a[5] ^ a[1];
  assign k[7] = t56 ^ a[3] ^ a[0];
endmodule
