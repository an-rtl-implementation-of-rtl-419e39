// tb_des_key_schedule -- self-checking test of the on-the-fly key schedule.
//
// Loads the published key and steps through sixteen rounds, comparing the
// round key of every cycle with the published K1..K16; then does the same in
// decrypt mode, where K16..K1 must come out in that order. A third pass loads
// the key, holds advance low for a few cycles (the key must not move) and
// then runs. One round key per clock is checked, as the core relies on.
module tb_des_key_schedule;
  import des_paper_example_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        load = 1'b0;
  logic        advance = 1'b0;
  logic        decrypt = 1'b0;
  logic [3:0]  round = '0;
  logic [63:0] key = '0;
  logic [47:0] subkey;
  int checks = 0, failures = 0;

  des_key_schedule dut (
    .clk(clk), .rst_n(rst_n), .load(load), .advance(advance),
    .decrypt(decrypt), .round(round), .key(key), .subkey(subkey)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic dec, int idle_cycles);
    @(negedge clk);
    key     = KEY_EX;
    decrypt = dec;
    load    = 1'b1;
    @(negedge clk);
    load = 1'b0;
    repeat (idle_cycles) @(negedge clk);
    for (int i = 0; i < 16; i++) begin
      int exp_idx = dec ? 15 - i : i;
      round   = 4'(i);
      advance = 1'b1;
      #1;
      checks++;
      if (subkey !== K_EX[exp_idx]) begin
        failures++;
        $display("FAIL dec=%0d round %0d: subkey %012h, expected K%0d = %012h",
                 dec, i + 1, subkey, exp_idx + 1, K_EX[exp_idx]);
      end
      @(negedge clk);
    end
    advance = 1'b0;
    round   = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1'b0, 0);
    run(1'b1, 0);
    run(1'b0, 3);
    run(1'b1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
