// des_expansion -- DES expansion D-box (E).
//
// Widens the 32-bit right half to 48 bits so it can be XORed with a round
// key. The half is read as eight 4-bit groups; each becomes six bits: the
// last bit of the previous group, the four bits themselves, and the first bit
// of the next group, with groups 1 and 8 treated as neighbours. That is the
// rule of E_TAB. Pure wiring, no clock.
module des_expansion
  import des_pkg::*;
(
  input  half_t   r,
  output subkey_t e
);
  for (genvar n = 0; n < 48; n++) begin : g_bit
    assign e[47-n] = r[32-E_TAB[n]];
  end
endmodule
