// sbox16_inv: the inverse 16-bit S-box, S^-1(S) = M_TN(Inv(M_NT(AT^-1(S)))).
//
// The inverse linear transformation is undone first; field inversion is its
// own inverse, so the remaining stages are the same three as in the forward
// S-box. The stage order is the paper's. Combinational, no register.
// Interface: 16-bit s in, 16-bit a out.
module sbox16_inv
  import gf_pkg::*;
(
  input  gf65536_t s,
  output gf65536_t a
);
  gf65536_t n, t, ti;

  affine_inv  u_ati (.b(s),  .a(n));
  nb_to_tower u_nt  (.a(n),  .t(t));
  gf65536_inv u_inv (.a(t),  .i(ti));
  tower_to_nb u_tn  (.t(ti), .a(a));
endmodule
