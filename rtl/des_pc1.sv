// des_pc1 -- DES permuted choice 1 (PC-1).
//
// Takes the 64-bit key, drops its eight parity bits (8, 16, ..., 64) and
// permutes the other 56 into C0 (upper 28 bits of cd) and D0 (lower 28).
// Output bit n is key bit PC1_TAB[n], bits numbered 1..64 from the left.
// The 56 entries are the first seven columns of the paper's PC-1 table.
// Pure wiring, no clock.
module des_pc1
  import des_pkg::*;
(
  input  block_t key,
  output cd_t    cd
);
  for (genvar n = 0; n < 56; n++) begin : g_bit
    assign cd[55-n] = key[64-PC1_TAB[n]];
  end
endmodule
