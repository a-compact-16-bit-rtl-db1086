// tower_to_nb: change of basis from the tower representation back to the
// normal basis of GF(2^16) (the M_TN block), the inverse of nb_to_tower.
//
// GF(2)-linear: output bit r is the XOR of the input bits t[c] for which row
// r of the matrix has a one in column c. The rows are the paper's matrix as
// printed, column 0 first; see nb_to_tower for the orientation. The paper's
// optimised 60-XOR network is not listed there; each row is an XOR tree here.
// Interface: 16-bit t (tower) in, 16-bit a (normal basis) out. Combinational.
module tower_to_nb
  import gf_pkg::*;
(
  input  gf65536_t t,
  output gf65536_t a
);
  // Row r, written column 0 (leftmost) to column 15 (rightmost).
  localparam logic [15:0] ROWS [16] = '{
    16'b1110_0010_0000_1011,  // row  0
    16'b1101_1000_1000_1001,  // row  1
    16'b1010_0100_1110_1101,  // row  2
    16'b0000_0001_1000_1000,  // row  3
    16'b1001_1100_0000_0010,  // row  4
    16'b0100_0000_0101_0101,  // row  5
    16'b0011_0100_1010_0000,  // row  6
    16'b1101_0101_0100_1101,  // row  7
    16'b0000_1011_1110_0010,  // row  8
    16'b1000_1001_1101_1000,  // row  9
    16'b1110_1101_1010_0100,  // row 10
    16'b1000_1000_0000_0001,  // row 11
    16'b0000_0010_1001_1100,  // row 12
    16'b0101_0101_0100_0000,  // row 13
    16'b1010_0000_0011_0100,  // row 14
    16'b0100_1101_1101_0101   // row 15
  };

  gf65536_t t_rev;  // t_rev[15-c] = t[c], so that column c lines up with t[c]
  assign t_rev = {<<{t}};

  always_comb begin
    for (int r = 0; r < 16; r++) begin
      a[r] = ^(ROWS[r] & t_rev);
    end
  end
endmodule
