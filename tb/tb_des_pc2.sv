// tb_des_pc2 -- self-checking test of permuted choice 2.
//
// Feeds the sixteen published values C1D1..C16D16 and compares with the
// published round keys K1..K16, then checks 56 one-hot inputs against the
// 48-entry table written out below (the eight positions 9, 18, 22, 25, 35,
// 38, 43 and 54 must be dropped).
module tb_des_pc2;
  import des_paper_example_pkg::*;
  logic [55:0] cd;
  logic [47:0] k;
  int checks = 0, failures = 0;
  int pc2_tab [48] = '{14, 17, 11, 24,  1,  5,
                        3, 28, 15,  6, 21, 10,
                       23, 19, 12,  4, 26,  8,
                       16,  7, 27, 20, 13,  2,
                       41, 52, 31, 37, 47, 55,
                       30, 40, 51, 45, 33, 48,
                       44, 49, 39, 56, 34, 53,
                       46, 42, 50, 36, 29, 32};

  des_pc2 dut (.cd(cd), .k(k));

  function automatic logic [47:0] pc2_ref(logic [55:0] x);
    logic [47:0] y;
    for (int n = 0; n < 48; n++) y[47-n] = x[56-pc2_tab[n]];
    return y;
  endfunction

  task automatic check(logic [55:0] x, logic [47:0] exp);
    cd = x;
    #1;
    checks++;
    if (k !== exp) begin
      failures++;
      $display("FAIL pc2(%014h) = %012h, expected %012h", x, k, exp);
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
    for (int i = 1; i <= 16; i++) check(CD_EX[i], K_EX[i-1]);
    for (int i = 0; i < 56; i++) check(56'd1 << i, pc2_ref(56'd1 << i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
