// gf4_mul: multiplier in GF(2^2), normal basis {alpha, alpha^2} (the M2 block).
//
// c0 = a0*b1 ^ a1*(b1^b0),  c1 = a1*b0 ^ a0*(b1^b0).
// Both AND terms of each output are replaced by NAND terms, which leaves the
// XOR of the pair unchanged ((f ^ e) == (~f ^ ~e)); the cell count is then
// 3 XOR + 4 NAND with a depth of two XORs and one NAND. The equations and the
// NAND substitution follow the paper; nothing here is a local choice.
// Interface: a, b, m are 2-bit GF(2^2) elements [bit1, bit0]. Combinational.
module gf4_mul
  import gf_pkg::*;
(
  input  gf4_t a,
  input  gf4_t b,
  output gf4_t m
);
  logic bx;
  assign bx   = b[1] ^ b[0];
  assign m[0] = ~(a[0] & b[1]) ^ ~(a[1] & bx);
  assign m[1] = ~(a[1] & b[0]) ^ ~(a[0] & bx);
endmodule
