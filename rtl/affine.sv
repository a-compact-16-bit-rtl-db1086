// affine: the S-box output transformation AT(A) = M x A (the AT block).
//
// M is a 16x16 binary matrix with no constant term. It maps the low byte of
// A onto the high byte of B and the high byte onto the low byte, each output
// bit being the XOR of three input bits of the other byte. Pairs of input
// bits that two outputs have in common are XORed once (eight shared XORs),
// so the whole transformation is 24 two-input XORs, two levels deep.
// Equations are taken from the paper's matrix M, read with A = (a15..a0) as
// the column vector. For b0 the paper's written equation (a14^a13^a8)
// disagrees with its matrix (a14^a12^a8); the matrix is followed, since only
// it is inverted by the paper's inverse matrix N.
// Interface: 16-bit a in, 16-bit b out. Combinational.
module affine
  import gf_pkg::*;
(
  input  gf65536_t a,
  output gf65536_t b
);
  logic h8_14, h9_15, h10_12, h11_13;  // shared pairs of the high byte
  logic l0_6,  l1_7,  l2_4,   l3_5;    // shared pairs of the low byte

  assign h8_14  = a[8]  ^ a[14];
  assign h9_15  = a[9]  ^ a[15];
  assign h10_12 = a[10] ^ a[12];
  assign h11_13 = a[11] ^ a[13];
  assign l0_6   = a[0]  ^ a[6];
  assign l1_7   = a[1]  ^ a[7];
  assign l2_4   = a[2]  ^ a[4];
  assign l3_5   = a[3]  ^ a[5];

  assign b[0]  = h8_14  ^ a[12];
  assign b[1]  = h9_15  ^ a[13];
  assign b[2]  = h8_14  ^ a[10];
  assign b[3]  = h9_15  ^ a[11];
  assign b[4]  = h10_12 ^ a[8];
  assign b[5]  = h11_13 ^ a[9];
  assign b[6]  = h10_12 ^ a[14];
  assign b[7]  = h11_13 ^ a[15];
  assign b[8]  = l0_6   ^ a[4];
  assign b[9]  = l1_7   ^ a[5];
  assign b[10] = l0_6   ^ a[2];
  assign b[11] = l1_7   ^ a[3];
  assign b[12] = l2_4   ^ a[0];
  assign b[13] = l3_5   ^ a[1];
  assign b[14] = l2_4   ^ a[6];
  assign b[15] = l3_5   ^ a[7];
endmodule
