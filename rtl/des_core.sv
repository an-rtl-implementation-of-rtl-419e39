// des_core -- iterative DES encryption/decryption core (top level).
//
// DES enciphers a 64-bit block under a 64-bit key of which 56 bits are used.
// The block goes through the initial permutation IP, sixteen Feistel rounds
// and, after the two halves are swapped, the final permutation IP^-1.
// Decryption is the same circuit with the round keys applied in reverse.
//
// This core computes one round per clock on a single round circuit:
//   * on start the L/R register pair takes IP(din), the key schedule takes
//     PC1(key) and the mode (decrypt) is captured;
//   * for 16 cycles des_round updates L/R with the round key the key
//     schedule produces for that cycle;
//   * dout is IP^-1 of the swapped halves R16L16, taken straight from the
//     registers; it is valid while done is high and stays so until the next
//     start.
// State: 64 (L/R) + 56 (C/D) + 1 (mode) + 6 (control) = 127 flip-flops.
//
// Interface: start is accepted when busy is low; done pulses for one cycle
// 17 cycles after the accepting edge's cycle (see des_control). Bits are
// numbered as in DES: bit 1 is the MSB of din, key and dout. Key parity bits
// (8, 16, ..., 64) are ignored. Reset is active-low and asynchronous.
//
// The round structure, tables and example values follow the paper. The
// iterative organisation, the handshake and the backwards key schedule for
// decryption are this design's choices: the paper draws the rounds unrolled
// but reports 139 flip-flops, which only an iterative core can meet.
module des_core
  import des_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   decrypt,
  input  block_t key,
  input  block_t din,
  output logic   busy,
  output logic   done,
  output block_t dout
);
  logic       load;
  logic       advance;
  logic [3:0] round;
  logic       dec_q;
  half_t      l_q, r_q;
  half_t      l_nxt, r_nxt;
  block_t     ip_out;
  subkey_t    subkey;

  des_control #(.ROUNDS(NUM_ROUNDS)) u_ctl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .load    (load),
    .advance (advance),
    .round   (round),
    .busy    (busy),
    .done    (done)
  );

  des_ip u_ip (.din(din), .dout(ip_out));

  des_key_schedule u_ks (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (load),
    .advance (advance),
    .decrypt (dec_q),
    .round   (round),
    .key     (key),
    .subkey  (subkey)
  );

  des_round u_round (
    .l_in  (l_q),
    .r_in  (r_q),
    .k     (subkey),
    .l_out (l_nxt),
    .r_out (r_nxt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_q   <= '0;
      r_q   <= '0;
      dec_q <= 1'b0;
    end else if (load) begin
      l_q   <= ip_out[63:32];
      r_q   <= ip_out[31:0];
      dec_q <= decrypt;
    end else if (advance) begin
      l_q   <= l_nxt;
      r_q   <= r_nxt;
    end
  end

  // 32-bit swap, then the final permutation.
  des_fp u_fp (.din({r_q, l_q}), .dout(dout));
endmodule
