// nb_to_tower: change of basis from the normal basis of GF(2^16) to the tower
// representation (the M_NT block).
//
// The normal basis is {theta, theta^2, ..., theta^(2^15)} with theta = omega^1091
// and omega a root of p(x) = x^16 + x^5 + x^3 + x^2 + 1; the tower
// representation is the one described in gf_pkg. The map is GF(2)-linear:
// output bit r is the XOR of the input bits a[c] for which row r of the
// matrix has a one in column c. The rows below are the matrix exactly as the
// paper prints it, written left to right as column 0 ... column 15; this
// orientation (row r -> output bit r, column c -> input bit c) is the one
// under which the matrix agrees with the basis change computed from the
// field elements and under which the two conversion matrices are inverses.
// The paper reduces the matrix to a 57-XOR, depth-3 network without listing
// it; here each row is an XOR tree and sharing is left to synthesis.
// Interface: 16-bit a (normal basis) in, 16-bit t (tower) out. Combinational.
module nb_to_tower
  import gf_pkg::*;
(
  input  gf65536_t a,
  output gf65536_t t
);
  // Row r, written column 0 (leftmost) to column 15 (rightmost).
  localparam logic [15:0] ROWS [16] = '{
    16'b1101_0001_1011_0000,  // row  0
    16'b0000_0011_0101_0010,  // row  1
    16'b1000_1001_0100_1000,  // row  2
    16'b0111_0001_0000_0111,  // row  3
    16'b1001_0100_1000_0010,  // row  4
    16'b0000_0010_0001_0111,  // row  5
    16'b0010_0010_0011_1110,  // row  6
    16'b0010_0010_0100_0101,  // row  7
    16'b1011_0000_1101_0001,  // row  8
    16'b0101_0010_0000_0011,  // row  9
    16'b0100_1000_1000_1001,  // row 10
    16'b0000_0111_0111_0001,  // row 11
    16'b1000_0010_1001_0100,  // row 12
    16'b0001_0111_0000_0010,  // row 13
    16'b0011_1110_0010_0010,  // row 14
    16'b0100_0101_0010_0010   // row 15
  };

  gf65536_t a_rev;  // a_rev[15-c] = a[c], so that column c lines up with a[c]
  assign a_rev = {<<{a}};

  always_comb begin
    for (int r = 0; r < 16; r++) begin
      t[r] = ^(ROWS[r] & a_rev);
    end
  end
endmodule
