// des_sbox_array -- the eight DES S-boxes side by side.
//
// The 48-bit whitened word is cut into eight 6-bit groups B1..B8 (B1 in the
// top bits); group i goes through S-box Si and the eight 4-bit results are
// concatenated, S1's in the top nibble, into a 32-bit word. This is the only
// non-linear step of DES. Combinational.
module des_sbox_array
  import des_pkg::*;
(
  input  subkey_t din,
  output half_t   dout
);
  for (genvar i = 0; i < 8; i++) begin : g_box
    des_sbox #(.BOX(i)) u_sbox (
      .b (din[47-6*i -: 6]),
      .s (dout[31-4*i -: 4])
    );
  end
endmodule
