// tb_des_expansion -- self-checking test of the expansion D-box.
//
// Checks the published worked example (R0 = F0AAF0AA -> E(R0) =
// 011110 100001 010101 010101 011110 100001 010101 010101), then checks the
// rule in its word form on 32 one-hot and 200 random inputs: 6-bit group g
// (g = 0..7, from the left) is input bit 4g (cyclic, 1-based, so 32 for
// g = 0), followed by bits 4g+1..4g+4, followed by bit 4g+5 (1 for g = 7).
module tb_des_expansion;
  logic [31:0] r;
  logic [47:0] e;
  int checks = 0, failures = 0;

  des_expansion dut (.r(r), .e(e));

  function automatic logic bit_at(logic [31:0] x, int n);  // 1-based, cyclic
    int m = ((n - 1 + 32) % 32) + 1;
    return x[32-m];
  endfunction

  function automatic logic [47:0] e_ref(logic [31:0] x);
    logic [47:0] y;
    for (int g = 0; g < 8; g++)
      for (int j = 0; j < 6; j++)
        y[47-(6*g+j)] = bit_at(x, 4 * g + j);
    return y;
  endfunction

  task automatic check(logic [31:0] x, logic [47:0] exp);
    r = x;
    #1;
    checks++;
    if (e !== exp) begin
      failures++;
      $display("FAIL E(%08h) = %012h, expected %012h", x, e, exp);
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
    check(32'hF0AAF0AA, 48'b011110_100001_010101_010101_011110_100001_010101_010101);
    for (int i = 0; i < 32; i++) check(32'd1 << i, e_ref(32'd1 << i));
    for (int i = 0; i < 200; i++) begin
      automatic logic [31:0] x = $urandom;
      check(x, e_ref(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
