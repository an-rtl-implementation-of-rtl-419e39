// tb_des_ip -- self-checking test of the initial permutation.
//
// Checks the published worked example (0123456789ABCDEF -> CC00CCFFF0AAF0AA),
// then walks a single 1 through all 64 input positions and compares with the
// closed form of IP: output bit n (row r = (n-1)/8, column c = (n-1)%8) is
// input bit 58+2r-8c for r < 4 and 57+2(r-4)-8c otherwise. Finally 200
// random blocks are checked against the same formula.
module tb_des_ip;
  logic [63:0] din, dout;
  int checks = 0, failures = 0;

  des_ip dut (.din(din), .dout(dout));

  function automatic int ip_src(int n);  // n = 1..64, returns 1..64
    int r = (n - 1) / 8, c = (n - 1) % 8;
    return (r < 4) ? (58 + 2 * r - 8 * c) : (57 + 2 * (r - 4) - 8 * c);
  endfunction

  function automatic logic [63:0] ip_ref(logic [63:0] x);
    logic [63:0] y;
    for (int n = 1; n <= 64; n++) y[64-n] = x[64-ip_src(n)];
    return y;
  endfunction

  task automatic check(logic [63:0] x, logic [63:0] exp);
    din = x;
    #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL ip(%016h) = %016h, expected %016h", x, dout, exp);
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
    check(64'h0123456789ABCDEF, 64'hCC00CCFFF0AAF0AA);
    for (int i = 0; i < 64; i++) check(64'd1 << i, ip_ref(64'd1 << i));
    for (int i = 0; i < 200; i++) begin
      automatic logic [63:0] x = {$urandom, $urandom};
      check(x, ip_ref(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
