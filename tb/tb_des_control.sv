// tb_des_control -- self-checking test of the round sequencer.
//
// For several blocks it checks, cycle by cycle: load only in the accepting
// cycle, advance and busy high for exactly 16 cycles with round counting
// 0..15, and done high for exactly one cycle, 17 cycles after the accepting
// cycle. It also holds start high through a run (the extra requests must be
// ignored) and accepts a new block in the cycle done is high.
module tb_des_control;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  logic       load, advance, busy, done;
  logic [3:0] round;
  int checks = 0, failures = 0;

  des_control dut (
    .clk(clk), .rst_n(rst_n), .start(start), .load(load), .advance(advance),
    .round(round), .busy(busy), .done(done)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(logic exp_load, logic exp_adv, logic exp_busy,
                         logic exp_done, int exp_round, string what);
    checks++;
    if (load !== exp_load || advance !== exp_adv || busy !== exp_busy ||
        done !== exp_done || (exp_adv && round !== 4'(exp_round))) begin
      failures++;
      $display("FAIL %s: load=%b advance=%b busy=%b done=%b round=%0d", what,
               load, advance, busy, done, round);
    end
  endtask

  // Drive start now (at a negedge) and check one whole block.
  // hold_start keeps start high during the run; after_done says the
  // previous block's done is expected in the accepting cycle.
  task automatic block(bit hold_start, bit after_done);
    start = 1'b1;
    #1 expect_(1, 0, 0, after_done, 0, "accept");
    @(negedge clk);
    if (!hold_start) start = 1'b0;
    for (int i = 0; i < 16; i++) begin
      #1 expect_(0, 1, 1, 0, i, "round");
      @(negedge clk);
    end
    start = 1'b0;
    #1 expect_(0, 0, 0, 1, 0, "done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    #1 expect_(0, 0, 0, 0, 0, "reset");
    rst_n = 1'b1;
    @(negedge clk);
    block(0, 0);
    @(negedge clk);
    #1 expect_(0, 0, 0, 0, 0, "idle");
    @(negedge clk);
    block(1, 0);            // start held high through the run
    block(0, 1);            // back to back: accepted in the done cycle
    @(negedge clk);
    #1 expect_(0, 0, 0, 0, 0, "idle again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
