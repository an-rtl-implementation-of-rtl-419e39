// tb_des_pperm -- self-checking test of the straight permutation P.
//
// Checks the published worked example (5C82B597 -> 234AA9BB), then 32
// one-hot and 200 random inputs against the table below, written out here
// independently of the design's package.
module tb_des_pperm;
  logic [31:0] din, dout;
  int checks = 0, failures = 0;
  int p_tab [32] = '{16,  7, 20, 21, 29, 12, 28, 17,
                      1, 15, 23, 26,  5, 18, 31, 10,
                      2,  8, 24, 14, 32, 27,  3,  9,
                     19, 13, 30,  6, 22, 11,  4, 25};

  des_pperm dut (.din(din), .dout(dout));

  function automatic logic [31:0] p_ref(logic [31:0] x);
    logic [31:0] y;
    for (int n = 0; n < 32; n++) y[31-n] = x[32-p_tab[n]];
    return y;
  endfunction

  task automatic check(logic [31:0] x, logic [31:0] exp);
    din = x;
    #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL P(%08h) = %08h, expected %08h", x, dout, exp);
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
    check(32'h5C82B597, 32'h234AA9BB);
    for (int i = 0; i < 32; i++) check(32'd1 << i, p_ref(32'd1 << i));
    for (int i = 0; i < 200; i++) begin
      automatic logic [31:0] x = $urandom;
      check(x, p_ref(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
