// gf16_inv: inverter in GF((2^2)^2) (the I4 block).
//
// Instead of the Itoh-Tsujii structure (S2, M_alpha, M2, I2, two M2), the
// four output bits are written as minimised two-level functions of the four
// input bits, obtained from the 16-row truth table of the inverse:
//   i0 = a3(~a2 + a0) + a2 (a1 xnor a0)(~a3 + a0 a1)
//   i1 = a3(~a1 + a2) + a2 (a1 xor a0)
//   i2 = a1(a2 + ~a0) + a0 (a3 xnor a2)(a2 a3 + ~a1)
//   i3 = a1(~a3 + a0) + a0 (a3 xor a2)
// The paper maps these onto 22 NAND/NOR, 2 XOR/XNOR and 4 inverters; this
// RTL keeps the sum-of-products form and leaves the cell mapping to
// synthesis. Zero maps to zero. The equations are the paper's.
// Interface: 4-bit a in, 4-bit i = a^-1 out. Combinational.
module gf16_inv
  import gf_pkg::*;
(
  input  gf16_t a,
  output gf16_t i
);
  assign i[0] = (a[3] & (~a[2] | a[0])) | (a[2] & ~(a[1] ^ a[0]) & (~a[3] | (a[0] & a[1])));
  assign i[1] = (a[3] & (~a[1] | a[2])) | (a[2] & (a[1] ^ a[0]));
  assign i[2] = (a[1] & (a[2] | ~a[0])) | (a[0] & ~(a[3] ^ a[2]) & ((a[2] & a[3]) | ~a[1]));
  assign i[3] = (a[1] & (~a[3] | a[0])) | (a[0] & (a[3] ^ a[2]));
endmodule
