// des_paper_example_pkg -- values of the published DES worked example (key 133457799BBCDFF1,
// plaintext 0123456789ABCDEF), shared by the key-schedule testbenches.
// CD_EX[i] is CiDi (Ci in the upper 28 bits) for i = 0..16; K_EX[i] is the
// round key K(i+1).
package des_paper_example_pkg;
localparam logic [63:0] KEY_EX = 64'h133457799BBCDFF1;
localparam logic [55:0] CD_EX [17] = '{
  {28'b1111000011001100101010101111, 28'b0101010101100110011110001111},
  {28'b1110000110011001010101011111, 28'b1010101011001100111100011110},
  {28'b1100001100110010101010111111, 28'b0101010110011001111000111101},
  {28'b0000110011001010101011111111, 28'b0101011001100111100011110101},
  {28'b0011001100101010101111111100, 28'b0101100110011110001111010101},
  {28'b1100110010101010111111110000, 28'b0110011001111000111101010101},
  {28'b0011001010101011111111000011, 28'b1001100111100011110101010101},
  {28'b1100101010101111111100001100, 28'b0110011110001111010101010110},
  {28'b0010101010111111110000110011, 28'b1001111000111101010101011001},
  {28'b0101010101111111100001100110, 28'b0011110001111010101010110011},
  {28'b0101010111111110000110011001, 28'b1111000111101010101011001100},
  {28'b0101011111111000011001100101, 28'b1100011110101010101100110011},
  {28'b0101111111100001100110010101, 28'b0001111010101010110011001111},
  {28'b0111111110000110011001010101, 28'b0111101010101011001100111100},
  {28'b1111111000011001100101010101, 28'b1110101010101100110011110001},
  {28'b1111100001100110010101010111, 28'b1010101010110011001111000111},
  {28'b1111000011001100101010101111, 28'b0101010101100110011110001111}
};
localparam logic [47:0] K_EX [16] = '{
  48'b000110_110000_001011_101111_111111_000111_000001_110010,
  48'b011110_011010_111011_011001_110110_111100_100111_100101,
  48'b010101_011111_110010_001010_010000_101100_111110_011001,
  48'b011100_101010_110111_010110_110110_110011_010100_011101,
  48'b011111_001110_110000_000111_111010_110101_001110_101000,
  48'b011000_111010_010100_111110_010100_000111_101100_101111,
  48'b111011_001000_010010_110111_111101_100001_100010_111100,
  48'b111101_111000_101000_111010_110000_010011_101111_111011,
  48'b111000_001101_101111_101011_111011_011110_011110_000001,
  48'b101100_011111_001101_000111_101110_100100_011001_001111,
  48'b001000_010101_111111_010011_110111_101101_001110_000110,
  48'b011101_010111_000111_110101_100101_000110_011111_101001,
  48'b100101_111100_010111_010001_111110_101011_101001_000001,
  48'b010111_110100_001110_110111_111100_101110_011100_111010,
  48'b101111_111001_000110_001101_001111_010011_111100_001010,
  48'b110010_110011_110110_001011_000011_100001_011111_110101
};
endpackage
