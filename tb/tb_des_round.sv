// tb_des_round -- self-checking test of one Feistel round.
//
// Checks the published round 1 (L0 = CC00CCFF, R0 = F0AAF0AA, K1 ->
// L1 = F0AAF0AA, R1 = EF4A6544), then 64 random rounds whose f values come
// from tb/des_f_vectors.hex with a random left half: the expected output is
// L' = R and R' = L xor f.
module tb_des_round;
  logic [31:0]  l_in, r_in, l_out, r_out;
  logic [47:0]  k;
  logic [111:0] vec [64];
  int checks = 0, failures = 0;

  des_round dut (.l_in(l_in), .r_in(r_in), .k(k), .l_out(l_out), .r_out(r_out));

  task automatic check(logic [31:0] l, logic [31:0] r, logic [47:0] kk,
                       logic [31:0] exp_l, logic [31:0] exp_r);
    l_in = l;
    r_in = r;
    k    = kk;
    #1;
    checks++;
    if (l_out !== exp_l || r_out !== exp_r) begin
      failures++;
      $display("FAIL round(%08h %08h, %012h) = %08h %08h, expected %08h %08h",
               l, r, kk, l_out, r_out, exp_l, exp_r);
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
    $readmemh("tb/des_f_vectors.hex", vec);
    check(32'hCC00CCFF, 32'hF0AAF0AA,
          48'b000110_110000_001011_101111_111111_000111_000001_110010,
          32'hF0AAF0AA, 32'hEF4A6544);
    for (int i = 0; i < 64; i++) begin
      automatic logic [31:0] l = $urandom;
      check(l, vec[i][111:80], vec[i][79:32], vec[i][111:80], l ^ vec[i][31:0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
