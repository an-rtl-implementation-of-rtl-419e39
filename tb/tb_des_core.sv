// tb_des_core -- end-to-end test of the DES core at its default parameters.
//
// Runs the published worked example (key 133457799BBCDFF1, plaintext
// 0123456789ABCDEF, ciphertext 85E813540F0AB405) in both directions, then
// 100 (key, plaintext, ciphertext) triples from tb/des_vectors.hex, produced
// by an independent software model of the DES standard. Each triple is run
// as an encryption or a decryption at random, so both directions and the
// switch between them are exercised in random order.
//
// Per block it checks the result, that done comes exactly 17 cycles after the
// cycle in which start was accepted, and that busy is high in between. It
// also, at random: pulses start with other data while the core is busy (the
// request must be ignored), starts the next block in the cycle done is high
// (back to back), or idles for a few cycles and checks that dout holds.
// Each of these mechanisms is counted and one that never happened is a
// failure.
module tb_des_core;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        start = 1'b0;
  logic        decrypt = 1'b0;
  logic [63:0] key = '0;
  logic [63:0] din = '0;
  logic        busy, done;
  logic [63:0] dout;

  logic [191:0] vec [100];
  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_switch = 0, n_ignored = 0, n_b2b = 0, n_hold = 0;
  longint cyc = 0;
  bit prev_dec = 1'b0;
  bit in_done_cycle = 1'b0;

  des_core dut (
    .clk(clk), .rst_n(rst_n), .start(start), .decrypt(decrypt),
    .key(key), .din(din), .busy(busy), .done(done), .dout(dout)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Called at a negedge with the core idle (or in its done cycle).
  task automatic run_block(logic [63:0] k, logic [63:0] x, bit dec,
                           logic [63:0] exp, bit poke_busy, int gap);
    longint t0;
    if (in_done_cycle) n_b2b++;
    if (dec) n_dec++; else n_enc++;
    if ((n_enc + n_dec) > 1 && dec != prev_dec) n_switch++;
    prev_dec = dec;
    check(!busy, "core busy when a block was offered");
    key = k; din = x; decrypt = dec; start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    key = {$urandom, $urandom}; din = {$urandom, $urandom}; decrypt = ~dec;
    while (!done) begin
      check(busy, "busy low before done");
      if (poke_busy && cyc - t0 == 5) begin
        start = 1'b1;          // must be ignored
        n_ignored++;
      end else begin
        start = 1'b0;
      end
      @(negedge clk);
      if (cyc - t0 > 40) break;
    end
    start = 1'b0;
    check(cyc - t0 == 17, $sformatf("latency %0d cycles, expected 17", cyc - t0));
    check(!busy, "busy high together with done");
    check(dout === exp, $sformatf("%s key %016h in %016h: got %016h, expected %016h",
                                  dec ? "dec" : "enc", k, x, dout, exp));
    in_done_cycle = 1'b1;
    if (gap > 0) begin
      for (int i = 0; i < gap; i++) begin
        @(negedge clk);
        check(!done && dout === exp, "dout not held after done");
      end
      n_hold++;
      in_done_cycle = 1'b0;
    end
  endtask

  initial begin
    $readmemh("tb/des_vectors.hex", vec);
    repeat (3) @(negedge clk);
    check(!busy && !done, "state after reset");
    rst_n = 1'b1;
    @(negedge clk);

    run_block(64'h133457799BBCDFF1, 64'h0123456789ABCDEF, 1'b0, 64'h85E813540F0AB405, 1'b0, 2);
    run_block(64'h133457799BBCDFF1, 64'h85E813540F0AB405, 1'b1, 64'h0123456789ABCDEF, 1'b1, 0);

    for (int i = 0; i < 100; i++) begin
      automatic logic [63:0] k = vec[i][191:128];
      automatic logic [63:0] p = vec[i][127:64];
      automatic logic [63:0] c = vec[i][63:0];
      automatic bit dec = 1'($urandom);
      automatic bit poke = ($urandom % 4) == 0;
      automatic int gap = (($urandom % 3) == 0) ? 0 : int'($urandom % 4) + 1;
      if (dec) run_block(k, c, 1'b1, p, poke, gap);
      else     run_block(k, p, 1'b0, c, poke, gap);
    end
    @(negedge clk);

    $display("mechanisms: encrypt=%0d decrypt=%0d mode_switch=%0d ignored_start=%0d back_to_back=%0d held_output=%0d",
             n_enc, n_dec, n_switch, n_ignored, n_b2b, n_hold);
    check(n_enc > 0, "no encryption ran");
    check(n_dec > 0, "no decryption ran");
    check(n_switch > 0, "mode never switched");
    check(n_ignored > 0, "no start was ignored while busy");
    check(n_b2b > 0, "no back-to-back block");
    check(n_hold > 0, "output hold never checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
