// des_key_schedule -- on-the-fly DES round-key generator.
//
// Holds the two 28-bit key halves C and D in one 56-bit register. On load the
// register takes PC1(key) = C0D0. While a block is in progress the round key
// of the round being computed is PC2 of the register rotated by that round's
// amount, and on advance the rotated value is written back, so one round key
// comes out per clock with no extra cycle.
//
// Encryption (decrypt = 0) rotates both halves left by 1,1,2,2,2,2,2,2,1,2,
// 2,2,2,2,2,1 places, giving K1..K16. Decryption (decrypt = 1) rotates right
// by 0,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1, giving K16..K1: the rotations add up to
// 28, so C16D16 = C0D0 and the schedule can be walked backwards from the same
// loaded value. Generating the reversed order this way is a choice of this
// design; the paper only says the subkeys are applied in reverse order.
//
// Interface: load has priority over advance; round (0..15) is the index of
// the round whose key subkey carries; decrypt must stay steady for a block.
// Timing: subkey is combinational from the register and round.
module des_key_schedule
  import des_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       advance,
  input  logic       decrypt,
  input  logic [3:0] round,
  input  block_t     key,
  output subkey_t    subkey
);
  cd_t cd_q;
  cd_t cd_init;
  cd_t cd_rot;

  des_pc1 u_pc1 (.key(key), .cd(cd_init));

  always_comb begin
    if (decrypt) begin
      cd_rot = {rotr28(cd_q[55:28], KEY_SHIFT_DEC[round]),
                rotr28(cd_q[27:0],  KEY_SHIFT_DEC[round])};
    end else begin
      cd_rot = {rotl28(cd_q[55:28], KEY_SHIFT[round]),
                rotl28(cd_q[27:0],  KEY_SHIFT[round])};
    end
  end

  des_pc2 u_pc2 (.cd(cd_rot), .k(subkey));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       cd_q <= '0;
    else if (load)    cd_q <= cd_init;
    else if (advance) cd_q <= cd_rot;
  end
endmodule
