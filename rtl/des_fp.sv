// des_fp -- DES final permutation (IP^-1).
//
// Applied to the pre-output R16L16 after the last round to give the result
// block: output bit n is input bit FP_TAB[n] (bits numbered 1..64 from the
// left, so bit 40 of the pre-output becomes the first output bit). The table
// is the exact inverse of the initial permutation, as the paper states; one
// printed entry (row 6, column 3) is taken as 43, the value that makes it so.
// Pure wiring, no clock.
module des_fp
  import des_pkg::*;
(
  input  block_t din,
  output block_t dout
);
  for (genvar n = 0; n < 64; n++) begin : g_bit
    assign dout[63-n] = din[64-FP_TAB[n]];
  end
endmodule
