// gf16_sq_mul_lambda: squaring followed by multiplication by lambda in
// GF((2^2)^2), merged into one block (S4-M_lambda). It forms the
// lambda*(a_l ^ a_h)^2 term of the GF(2^8) inverter.
//
// Composing S4 and M_lambda and cancelling terms leaves three XORs and a wire:
//   k0 = f0^f1,  k1 = f1,  k2 = f1^f3,  k3 = f0^f2.
// The merged equations are the paper's.
// Interface: 4-bit f in, 4-bit k = lambda*f^2 out. Combinational.
module gf16_sq_mul_lambda
  import gf_pkg::*;
(
  input  gf16_t f,
  output gf16_t k
);
  assign k[0] = f[1] ^ f[0];
  assign k[1] = f[1];
  assign k[2] = f[1] ^ f[3];
  assign k[3] = f[2] ^ f[0];
endmodule
