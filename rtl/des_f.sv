// des_f -- the DES round function f(R, K) = P(S(E(R) xor K)).
//
// Four stages, all combinational: the expansion D-box widens the 32-bit right
// half to 48 bits, the whitener XORs it with the 48-bit round key, the S-box
// array substitutes it back down to 32 bits, and the straight permutation P
// shuffles the result. Input and output widths follow the paper's drawing of
// the function (48, 48, 32, 32). Not pipelined.
module des_f
  import des_pkg::*;
(
  input  half_t   r,
  input  subkey_t k,
  output half_t   f
);
  subkey_t e;
  subkey_t x;
  half_t   s;

  des_expansion  u_e (.r(r), .e(e));
  assign x = e ^ k;                 // whitener
  des_sbox_array u_s (.din(x), .dout(s));
  des_pperm      u_p (.din(s), .dout(f));
endmodule
