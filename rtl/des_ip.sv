// des_ip -- DES initial permutation (IP).
//
// A keyless 64-bit bit shuffle applied once to each block before round 1:
// output bit n is input bit IP_TAB[n] (bits numbered 1..64 from the left, so
// the 58th input bit becomes the first output bit). The upper half of the
// result is L0 and the lower half R0. Pure wiring, no logic and no clock.
// The table is the standard's, as printed in the paper.
module des_ip
  import des_pkg::*;
(
  input  block_t din,
  output block_t dout
);
  for (genvar n = 0; n < 64; n++) begin : g_bit
    assign dout[63-n] = din[64-IP_TAB[n]];
  end
endmodule
