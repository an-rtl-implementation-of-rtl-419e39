// tb_des_fp -- self-checking test of the final permutation IP^-1.
//
// Checks the published worked example (pre-output R16L16 =
// 0A4CD99543423234 -> 85E813540F0AB405), then checks that the block is the
// inverse of IP: a single 1 at input position IP(n) must come out at
// position n, with IP written in closed form (see tb_des_ip), for all 64
// positions and for 200 random blocks.
module tb_des_fp;
  logic [63:0] din, dout;
  int checks = 0, failures = 0;

  des_fp dut (.din(din), .dout(dout));

  function automatic int ip_src(int n);
    int r = (n - 1) / 8, c = (n - 1) % 8;
    return (r < 4) ? (58 + 2 * r - 8 * c) : (57 + 2 * (r - 4) - 8 * c);
  endfunction

  // IP^-1 applied to y: IP moves bit ip_src(n) to n, so the inverse moves n back.
  function automatic logic [63:0] fp_ref(logic [63:0] y);
    logic [63:0] x;
    for (int n = 1; n <= 64; n++) x[64-ip_src(n)] = y[64-n];
    return x;
  endfunction

  task automatic check(logic [63:0] x, logic [63:0] exp);
    din = x;
    #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL fp(%016h) = %016h, expected %016h", x, dout, exp);
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
    check(64'h0A4CD99543423234, 64'h85E813540F0AB405);
    for (int i = 0; i < 64; i++) check(64'd1 << i, fp_ref(64'd1 << i));
    for (int i = 0; i < 200; i++) begin
      automatic logic [63:0] x = {$urandom, $urandom};
      check(x, fp_ref(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
