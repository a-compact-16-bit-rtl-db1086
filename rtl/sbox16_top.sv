// sbox16_top: the forward and the inverse 16-bit S-box side by side.
//
// fwd_out = S(fwd_in) and inv_out = S^-1(inv_in) are two independent
// combinational paths that share no logic; a cipher would use the first for
// encryption and the second for decryption. Placing both in one top, with
// separate ports and no clock, is this design's choice: the paper presents
// the two structures separately and says nothing about how they are combined.
// Interface: four 16-bit ports. Timing: combinational, no latency.
module sbox16_top
  import gf_pkg::*;
(
  input  gf65536_t fwd_in,
  output gf65536_t fwd_out,
  input  gf65536_t inv_in,
  output gf65536_t inv_out
);
  sbox16     u_fwd (.a(fwd_in), .s(fwd_out));
  sbox16_inv u_inv (.s(inv_in), .a(inv_out));
endmodule
