// affine_inv: the inverse output transformation AT^-1(B) = N x B (the AT^-1
// block), used at the input of the inverse S-box.
//
// Like AT, N swaps the two bytes and forms each output bit as the XOR of
// three bits of the other byte; eight shared pairs give 24 two-input XORs in
// two levels. Equations follow the paper's matrix N and its written
// equations, which agree.
// Interface: 16-bit b in, 16-bit a out. Combinational.
module affine_inv
  import gf_pkg::*;
(
  input  gf65536_t b,
  output gf65536_t a
);
  logic h10_12, h11_13, h8_14, h9_15;  // shared pairs of the high byte
  logic l2_4,   l3_5,   l0_6,  l1_7;   // shared pairs of the low byte

  assign h10_12 = b[10] ^ b[12];
  assign h11_13 = b[11] ^ b[13];
  assign h8_14  = b[8]  ^ b[14];
  assign h9_15  = b[9]  ^ b[15];
  assign l2_4   = b[2]  ^ b[4];
  assign l3_5   = b[3]  ^ b[5];
  assign l0_6   = b[0]  ^ b[6];
  assign l1_7   = b[1]  ^ b[7];

  assign a[0]  = h10_12 ^ b[8];
  assign a[1]  = h11_13 ^ b[9];
  assign a[2]  = h10_12 ^ b[14];
  assign a[3]  = h11_13 ^ b[15];
  assign a[4]  = h8_14  ^ b[12];
  assign a[5]  = h9_15  ^ b[13];
  assign a[6]  = h8_14  ^ b[10];
  assign a[7]  = h9_15  ^ b[11];
  assign a[8]  = l2_4   ^ b[0];
  assign a[9]  = l3_5   ^ b[1];
  assign a[10] = l2_4   ^ b[6];
  assign a[11] = l3_5   ^ b[7];
  assign a[12] = l0_6   ^ b[4];
  assign a[13] = l1_7   ^ b[5];
  assign a[14] = l0_6   ^ b[2];
  assign a[15] = l1_7   ^ b[3];
endmodule
