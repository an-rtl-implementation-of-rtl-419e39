// des_pperm -- DES straight permutation P, last step of the round function.
//
// Shuffles the 32 S-box output bits: output bit n is input bit P_TAB[n]
// (bits numbered 1..32 from the left). The 32 entries are the first four
// rows of the paper's straight permutation table. Pure wiring, no clock.
module des_pperm
  import des_pkg::*;
(
  input  half_t din,
  output half_t dout
);
  for (genvar n = 0; n < 32; n++) begin : g_bit
    assign dout[31-n] = din[32-P_TAB[n]];
  end
endmodule
