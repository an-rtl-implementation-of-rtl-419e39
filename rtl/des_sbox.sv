// des_sbox -- one DES substitution box, S1..S8 chosen by BOX (0..7).
//
// Maps a 6-bit group b1..b6 (b1 = b[5]) to a 4-bit value: the outer bits
// b1 b6 select one of four rows, the inner bits b2..b5 one of sixteen
// columns of the box's table. The tables are the DES standard's; the paper
// describes the 4-by-16 lookup but does not print the contents.
// Combinational, a 64-entry constant lookup.
module des_sbox
  import des_pkg::*;
#(
  parameter int unsigned BOX = 0
) (
  input  logic [5:0] b,
  output logic [3:0] s
);
  logic [1:0] row;
  logic [3:0] col;

  assign row = {b[5], b[0]};
  assign col = b[4:1];
  assign s   = SBOX[BOX][{row, col}];
endmodule
