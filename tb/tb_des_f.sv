// tb_des_f -- self-checking test of the round function f(R, K).
//
// Checks the published round-1 value f(F0AAF0AA, K1) = 234AA9BB, then 64
// random (R, K) pairs from tb/des_f_vectors.hex (R 32 bits, K 48 bits,
// expected f 32 bits per line), generated by an independent software model.
module tb_des_f;
  logic [31:0]  r, f;
  logic [47:0]  k;
  logic [111:0] vec [64];
  int checks = 0, failures = 0;

  des_f dut (.r(r), .k(k), .f(f));

  task automatic check(logic [31:0] rr, logic [47:0] kk, logic [31:0] exp);
    r = rr;
    k = kk;
    #1;
    checks++;
    if (f !== exp) begin
      failures++;
      $display("FAIL f(%08h, %012h) = %08h, expected %08h", rr, kk, f, exp);
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
    check(32'hF0AAF0AA, 48'b000110_110000_001011_101111_111111_000111_000001_110010,
          32'h234AA9BB);
    for (int i = 0; i < 64; i++) check(vec[i][111:80], vec[i][79:32], vec[i][31:0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
