// tb_des_pc1 -- self-checking test of permuted choice 1.
//
// Checks the published example (key 133457799BBCDFF1 -> C0D0), then a single
// 1 at every key position against the 56-entry table written out below
// (independently of the design's package): parity positions 8, 16, ..., 64
// must disappear, every other position must land where the table puts it.
// Ends with 200 random keys.
module tb_des_pc1;
  import des_paper_example_pkg::*;
  logic [63:0] key;
  logic [55:0] cd;
  int checks = 0, failures = 0;
  int pc1_tab [56] = '{57, 49, 41, 33, 25, 17,  9,
                        1, 58, 50, 42, 34, 26, 18,
                       10,  2, 59, 51, 43, 35, 27,
                       19, 11,  3, 60, 52, 44, 36,
                       63, 55, 47, 39, 31, 23, 15,
                        7, 62, 54, 46, 38, 30, 22,
                       14,  6, 61, 53, 45, 37, 29,
                       21, 13,  5, 28, 20, 12,  4};

  des_pc1 dut (.key(key), .cd(cd));

  function automatic logic [55:0] pc1_ref(logic [63:0] x);
    logic [55:0] y;
    for (int n = 0; n < 56; n++) y[55-n] = x[64-pc1_tab[n]];
    return y;
  endfunction

  task automatic check(logic [63:0] x, logic [55:0] exp);
    key = x;
    #1;
    checks++;
    if (cd !== exp) begin
      failures++;
      $display("FAIL pc1(%016h) = %014h, expected %014h", x, cd, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(KEY_EX, CD_EX[0]);
    for (int i = 0; i < 64; i++) check(64'd1 << i, pc1_ref(64'd1 << i));
    for (int p = 8; p <= 64; p += 8) check(64'd1 << (64 - p), 56'd0);
    for (int i = 0; i < 200; i++) begin
      automatic logic [63:0] x = {$urandom, $urandom};
      check(x, pc1_ref(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
