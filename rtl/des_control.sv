// des_control -- round sequencer and start/done handshake of the DES core.
//
// Two states. In IDLE a high start at a rising edge is accepted: load is
// asserted in that cycle so the datapath captures its inputs, and the
// sequencer moves to RUN with the round counter at 0. In RUN, advance is high
// and one round is computed per clock; round tells which (0 = round 1).
// After the last round the sequencer returns to IDLE and pulses done for one
// cycle. start is ignored while RUN.
//
// Timing: with ROUNDS = 16, done is high in the 17th cycle after the cycle in
// which start was accepted (1 load cycle + 16 round cycles), and the next
// block can be accepted in that same cycle. The paper does not describe the
// control; this handshake and latency are this design's own.
// Reset is active-low and asynchronous. The assertions at the end use it in
// their 'disable iff', so a linter sees rst_n both as an asynchronous reset
// and as a sampled signal; that is intended.
module des_control #(
  parameter int unsigned ROUNDS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       load,
  output logic       advance,
  output logic [3:0] round,
  output logic       busy,
  output logic       done
);
  typedef enum logic {IDLE, RUN} state_t;

  state_t     state_q;
  logic [3:0] round_q;
  logic       done_q;

  assign load    = (state_q == IDLE) && start;
  assign advance = (state_q == RUN);
  assign busy    = (state_q == RUN);
  assign round   = round_q;
  assign done    = done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      round_q <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        IDLE: if (start) begin
          state_q <= RUN;
          round_q <= '0;
        end
        RUN: begin
          if (round_q == 4'(ROUNDS - 1)) begin
            state_q <= IDLE;
            done_q  <= 1'b1;
            round_q <= '0;
          end else begin
            round_q <= round_q + 4'd1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // The counter never leaves 0..ROUNDS-1, and done never overlaps a run.
  a_round_range: assert property (@(posedge clk) disable iff (!rst_n)
    32'(round_q) < ROUNDS);
  a_done_idle: assert property (@(posedge clk) disable iff (!rst_n)
    done_q |-> state_q == IDLE);
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    done_q |=> !done_q);
endmodule
