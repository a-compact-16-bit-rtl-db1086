// sbox16: the 16-bit S-box, S(A) = AT(M_TN(Inv(M_NT(A)))).
//
// The input, taken as an element of GF(2^16) in the normal basis, is moved
// to the tower representation, inverted there (gf65536_inv), moved back to
// the normal basis and passed through the linear transformation AT. Zero is
// mapped to zero. The order of the four stages is the paper's. There is no
// register: the S-box is one combinational path, as the paper presents it.
// Interface: 16-bit a in, 16-bit s out. Combinational.
module sbox16
  import gf_pkg::*;
(
  input  gf65536_t a,
  output gf65536_t s
);
  gf65536_t t, ti, n;

  nb_to_tower u_nt  (.a(a),  .t(t));
  gf65536_inv u_inv (.a(t),  .i(ti));
  tower_to_nb u_tn  (.t(ti), .a(n));
  affine      u_at  (.a(n),  .b(s));
endmodule
