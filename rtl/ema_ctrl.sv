// ema_ctrl: EMA mini controller (states Idle, Mult1, Mult2, Done).
//
// On `start` it launches the first product (i * Chat) in the same cycle,
// waits in Mult1 for the multiplier's final cycle, launches the second
// product (f * C_{t-1}, accumulated onto the first) in the first cycle of
// Mult2, waits for its final cycle and spends one cycle in Done, where
// `done` tells the top controller that C_j is ready. States follow the
// paper's controller diagram; the cycle-level timing is this design's.
// Latency from start to done: (|N(i)|>>1) + (|N(f)|>>1) + 2 cycles, done
// in the next.
module ema_ctrl
  import elsa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       am_last,
  output logic       start1,
  output logic       start2,
  output logic       done,
  output emc_state_e state
);

  emc_state_e st_n;
  logic       pend2, pend2_n;   // Mult2 not yet launched

  always_comb begin
    st_n    = state;
    pend2_n = 1'b0;
    start1  = 1'b0;
    start2  = 1'b0;
    done    = 1'b0;
    unique case (state)
      EC_IDLE: if (start) begin
        start1 = 1'b1;
        if (am_last) begin
          st_n    = EC_MULT2;
          pend2_n = 1'b1;
        end else begin
          st_n = EC_MULT1;
        end
      end
      EC_MULT1: if (am_last) begin
        st_n    = EC_MULT2;
        pend2_n = 1'b1;
      end
      EC_MULT2: begin
        start2 = pend2;
        if (am_last) st_n = EC_DONE;
      end
      EC_DONE: begin
        done = 1'b1;
        st_n = EC_IDLE;
      end
      default: st_n = EC_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= EC_IDLE;
      pend2 <= 1'b0;
    end else begin
      state <= st_n;
      pend2 <= pend2_n;
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == EC_IDLE);

endmodule
