// gf_ref_pkg: reference arithmetic for the testbenches, independent of the
// tower circuits under test.
//
// GF(2^16) is built directly as polynomials over GF(2) modulo
// p(x) = x^16 + x^5 + x^3 + x^2 + 1, with omega = x. The tower basis elements
// are the powers of omega that define the tower (alpha = omega^21845,
// beta = omega^4369, gamma = omega^14392, delta = omega^45049), and the
// normal basis is {theta^(2^i)} with theta = omega^1091. A tower vector or a
// normal-basis vector is checked by mapping it into the polynomial field
// (a linear, forward-only map) and doing the arithmetic there:
//   to_poly(mul(a,b)) == pmul(to_poly(a), to_poly(b)).
// Tower bit k stands for alpha^(2^k0) * beta^(4^k1) * gamma^(16^k2) * delta^(256^k3),
// with (k3,k2,k1,k0) the binary digits of k; for the 2-, 4- and 8-bit
// sub-fields the factors of the absent upper levels are left out.
package gf_ref_pkg;

  localparam logic [16:0] POLY = 17'h1002D;  // x^16 + x^5 + x^3 + x^2 + 1

  function automatic logic [15:0] pmul(logic [15:0] a, logic [15:0] b);
    logic [16:0] x;
    logic [15:0] r;
    x = {1'b0, a};
    r = '0;
    for (int k = 0; k < 16; k++) begin
      if (b[k]) r ^= x[15:0];
      x = x << 1;
      if (x[16]) x ^= POLY;
    end
    return r;
  endfunction

  function automatic logic [15:0] ppow(logic [15:0] a, int unsigned e);
    logic [15:0] r, s;
    r = 16'h0001;
    s = a;
    for (int k = 0; k < 32; k++) begin
      if (e[k]) r = pmul(r, s);
      s = pmul(s, s);
    end
    return r;
  endfunction

  localparam logic [15:0] OMEGA = 16'h0002;
  localparam logic [15:0] ALPHA = ppow(OMEGA, 21845);
  localparam logic [15:0] BETA  = ppow(OMEGA, 4369);
  localparam logic [15:0] GAMMA = ppow(OMEGA, 14392);
  localparam logic [15:0] DELTA = ppow(OMEGA, 45049);
  localparam logic [15:0] THETA = ppow(OMEGA, 1091);
  // lambda = alpha^2 * beta, mu = beta + lambda * gamma (constants of the tower)
  localparam logic [15:0] LAMBDA = pmul(pmul(ALPHA, ALPHA), BETA);
  localparam logic [15:0] MU     = BETA ^ pmul(LAMBDA, GAMMA);

  // Basis element for bit k of a w-bit tower vector (w = 2, 4, 8 or 16).
  // Levels at or above w are absent: a sub-field element is embedded as
  // itself, since every level's two basis elements add up to one.
  function automatic logic [15:0] tower_basis(logic [3:0] k, int w);
    logic [15:0] e;
    e = k[0] ? pmul(ALPHA, ALPHA) : ALPHA;
    if (w > 2) e = pmul(e, k[1] ? ppow(BETA, 4)    : BETA);
    if (w > 4) e = pmul(e, k[2] ? ppow(GAMMA, 16)  : GAMMA);
    if (w > 8) e = pmul(e, k[3] ? ppow(DELTA, 256) : DELTA);
    return e;
  endfunction

  // Tower and normal basis elements as polynomials, computed at elaboration.
  localparam logic [15:0] TBASIS2 [2] = '{
    tower_basis(4'd0, 2), tower_basis(4'd1, 2)
  };
  localparam logic [15:0] TBASIS4 [4] = '{
    tower_basis(4'd0, 4), tower_basis(4'd1, 4), tower_basis(4'd2, 4), tower_basis(4'd3, 4)
  };
  localparam logic [15:0] TBASIS8 [8] = '{
    tower_basis(4'd0, 8), tower_basis(4'd1, 8), tower_basis(4'd2, 8), tower_basis(4'd3, 8),
    tower_basis(4'd4, 8), tower_basis(4'd5, 8), tower_basis(4'd6, 8), tower_basis(4'd7, 8)
  };
  localparam logic [15:0] TBASIS16 [16] = '{
    tower_basis(4'd0, 16), tower_basis(4'd1, 16), tower_basis(4'd2, 16), tower_basis(4'd3, 16),
    tower_basis(4'd4, 16), tower_basis(4'd5, 16), tower_basis(4'd6, 16), tower_basis(4'd7, 16),
    tower_basis(4'd8, 16), tower_basis(4'd9, 16), tower_basis(4'd10, 16), tower_basis(4'd11, 16),
    tower_basis(4'd12, 16), tower_basis(4'd13, 16), tower_basis(4'd14, 16), tower_basis(4'd15, 16)
  };

  localparam logic [15:0] NBASIS [16] = '{
    ppow(THETA, 32'd1 << 0), ppow(THETA, 32'd1 << 1), ppow(THETA, 32'd1 << 2), ppow(THETA, 32'd1 << 3),
    ppow(THETA, 32'd1 << 4), ppow(THETA, 32'd1 << 5), ppow(THETA, 32'd1 << 6), ppow(THETA, 32'd1 << 7),
    ppow(THETA, 32'd1 << 8), ppow(THETA, 32'd1 << 9), ppow(THETA, 32'd1 << 10), ppow(THETA, 32'd1 << 11),
    ppow(THETA, 32'd1 << 12), ppow(THETA, 32'd1 << 13), ppow(THETA, 32'd1 << 14), ppow(THETA, 32'd1 << 15)
  };

  // Maps a w-bit tower vector (w = 2, 4, 8 or 16) into the polynomial field.
  function automatic logic [15:0] tower_to_poly(logic [15:0] t, int w);
    logic [15:0] r;
    r = '0;
    for (int k = 0; k < w; k++) begin
      if (t[k]) begin
        case (w)
          2:       r ^= TBASIS2[k];
          4:       r ^= TBASIS4[k];
          8:       r ^= TBASIS8[k];
          default: r ^= TBASIS16[k];
        endcase
      end
    end
    return r;
  endfunction

  function automatic logic [15:0] nb_to_poly(logic [15:0] n);
    logic [15:0] r;
    r = '0;
    for (int k = 0; k < 16; k++) if (n[k]) r ^= NBASIS[k];
    return r;
  endfunction

  // The S-box output transformation as the paper prints its matrix: row r
  // gives output bit 15-r, column c takes input bit 15-c.
  localparam logic [15:0] AT_ROWS [16] = '{
    16'b0000_0000_1010_1000, 16'b0000_0000_0101_0100, 16'b0000_0000_0010_1010, 16'b0000_0000_0001_0101,
    16'b0000_0000_1000_1010, 16'b0000_0000_0100_0101, 16'b0000_0000_1010_0010, 16'b0000_0000_0101_0001,
    16'b1010_1000_0000_0000, 16'b0101_0100_0000_0000, 16'b0010_1010_0000_0000, 16'b0001_0101_0000_0000,
    16'b1000_1010_0000_0000, 16'b0100_0101_0000_0000, 16'b1010_0010_0000_0000, 16'b0101_0001_0000_0000
  };
  localparam logic [15:0] ATI_ROWS [16] = '{
    16'b0000_0000_1000_1010, 16'b0000_0000_0100_0101, 16'b0000_0000_1010_0010, 16'b0000_0000_0101_0001,
    16'b0000_0000_1010_1000, 16'b0000_0000_0101_0100, 16'b0000_0000_0010_1010, 16'b0000_0000_0001_0101,
    16'b1000_1010_0000_0000, 16'b0100_0101_0000_0000, 16'b1010_0010_0000_0000, 16'b0101_0001_0000_0000,
    16'b1010_1000_0000_0000, 16'b0101_0100_0000_0000, 16'b0010_1010_0000_0000, 16'b0001_0101_0000_0000
  };

  // With A = (a15..a0) as the column vector, column c of a row literal
  // (leftmost = c = 0) lines up with bit 15-c of the literal, i.e. with a[15-c]:
  // the literal and A share the same bit numbering.
  function automatic logic [15:0] apply_rows(logic [15:0] rows [16], logic [15:0] a);
    logic [15:0] b;
    for (int r = 0; r < 16; r++) b[15-r] = ^(rows[r] & a);
    return b;
  endfunction

endpackage
