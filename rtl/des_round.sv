// des_round -- one Feistel round of DES.
//
//   L_i = R_{i-1}
//   R_i = L_{i-1} xor f(R_{i-1}, K_i)
//
// Combinational. The core instantiates a single copy and feeds it from its
// L/R registers once per clock, so sixteen clock cycles make the sixteen
// rounds. Decryption uses the same round with the round keys in reverse.
module des_round
  import des_pkg::*;
(
  input  half_t   l_in,
  input  half_t   r_in,
  input  subkey_t k,
  output half_t   l_out,
  output half_t   r_out
);
  half_t f;

  des_f u_f (.r(r_in), .k(k), .f(f));

  assign l_out = r_in;
  assign r_out = l_in ^ f;
endmodule
