// tb_des_sbox_array -- self-checking test of the eight S-boxes.
//
// Checks the published round-1 value (011000 010001 011110 111010 100001
// 100110 010100 100111 -> 5C82B597), then all 512 table entries: for each
// 6-bit value b the same b is fed to all eight boxes and the 32-bit result is
// compared with tb/des_sbox_vectors.hex, line b (S1 in the top nibble),
// generated by an independent software model of the DES standard.
module tb_des_sbox_array;
  logic [47:0] din;
  logic [31:0] dout;
  logic [31:0] exp_tab [64];
  int checks = 0, failures = 0;

  des_sbox_array dut (.din(din), .dout(dout));

  task automatic check(logic [47:0] x, logic [31:0] exp);
    din = x;
    #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL S(%012h) = %08h, expected %08h", x, dout, exp);
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
    $readmemh("tb/des_sbox_vectors.hex", exp_tab);
    check(48'b011000_010001_011110_111010_100001_100110_010100_100111, 32'h5C82B597);
    for (int b = 0; b < 64; b++) check({8{6'(b)}}, exp_tab[b]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
