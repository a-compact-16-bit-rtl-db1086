// gf_pkg: element types of the four-level normal-basis tower
//   GF(2) -> GF(2^2) -> GF((2^2)^2) -> GF(((2^2)^2)^2) -> GF((((2^2)^2)^2)^2)
// and the two one-gate GF(2^2) helpers (multiplication by alpha, squaring).
//
// Bit layout used by every module of the S-box:
//   GF(2^2)  [1:0]  : A = a0*alpha + a1*alpha^2             (alpha^2 + alpha + 1 = 0)
//   GF(2^4)  [3:0]  : A = a_l*beta  + a_h*beta^4,   a_l=[1:0], a_h=[3:2]   (x^2+x+alpha)
//   GF(2^8)  [7:0]  : A = a_l*gamma + a_h*gamma^16, a_l=[3:0], a_h=[7:4]   (x^2+x+lambda)
//   GF(2^16) [15:0] : A = a_l*delta + a_h*delta^256,a_l=[7:0], a_h=[15:8]  (x^2+x+mu)
// with lambda = alpha^2*beta and mu = beta + lambda*gamma. The unit element
// of every level is all ones (alpha + alpha^2 = 1, beta + beta^4 = 1, ...).
package gf_pkg;

  typedef logic [1:0]  gf4_t;
  typedef logic [3:0]  gf16_t;
  typedef logic [7:0]  gf256_t;
  typedef logic [15:0] gf65536_t;

  // alpha*A = a1*alpha + (a0^a1)*alpha^2
  function automatic gf4_t gf4_mul_alpha(gf4_t a);
    return {a[0] ^ a[1], a[1]};
  endfunction

  // A^2 = a1*alpha + a0*alpha^2 : a swap of the two coordinates. It is also
  // the inverse in GF(2^2).
  function automatic gf4_t gf4_sq(gf4_t a);
    return {a[0], a[1]};
  endfunction

endpackage
