// gf256_mul: multiplier in GF(((2^2)^2)^2), normal basis {gamma, gamma^16},
// defining polynomial x^2 + x + lambda (the M8 block).
//
// C = [(a_l^a_h)(b_l^b_h)*lambda ^ a_l*b_l]*gamma + [(a_l^a_h)(b_l^b_h)*lambda ^ a_h*b_h]*gamma^16
// Three gf16_mul instances, one multiplication by lambda and eight output
// XORs plus eight input XORs. The three-multiplier structure is the paper's.
// The paper's drawing of this block labels the constant multiplier "M_mu";
// the defining polynomial and the 4-bit width of that path make it the
// multiplication by lambda, which is what is built here.
// Interface: 8-bit a, b in, 8-bit m out; a_l = a[3:0]. Combinational.
module gf256_mul
  import gf_pkg::*;
(
  input  gf256_t a,
  input  gf256_t b,
  output gf256_t m
);
  gf16_t ll, hh, mid, mid_l;

  gf16_mul        u_ll  (.a(a[3:0]), .b(b[3:0]), .m(ll));
  gf16_mul        u_hh  (.a(a[7:4]), .b(b[7:4]), .m(hh));
  gf16_mul        u_mid (.a(a[3:0] ^ a[7:4]), .b(b[3:0] ^ b[7:4]), .m(mid));
  gf16_mul_lambda u_lam (.a(mid), .k(mid_l));

  assign m[3:0] = ll ^ mid_l;
  assign m[7:4] = hh ^ mid_l;
endmodule
