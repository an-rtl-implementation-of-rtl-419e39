// des_pc2 -- DES permuted choice 2 (PC-2), the key contraction.
//
// Selects 48 of the 56 bits of CiDi, in permuted order, as the round key Ki.
// Output bit n is cd bit PC2_TAB[n], bits numbered 1..56 from the left.
// The 48 entries are the first six columns of the paper's PC-2 table.
// Pure wiring, no clock.
module des_pc2
  import des_pkg::*;
(
  input  cd_t     cd,
  output subkey_t k
);
  for (genvar n = 0; n < 48; n++) begin : g_bit
    assign k[47-n] = cd[56-PC2_TAB[n]];
  end
endmodule
