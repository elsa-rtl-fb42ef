// em_ctrl: EM mini controller (states Idle, Mult1, Done).
//
// On `start` from the top controller it launches the EM multiplier in the
// same cycle and stays in Mult1 until the multiplier's final cycle, then
// spends one cycle in Done, where `done` tells the top controller that h_j
// is ready. The states follow the paper's controller diagram; launching in
// the Idle cycle and the one-cycle Done are this design's timing.
// Latency from start to done: (|N(o)|>>1) + 1 cycles, done in the next.
module em_ctrl
  import elsa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       am_last,
  output logic       am_start,
  output logic       done,
  output emc_state_e state
);

  emc_state_e st_n;

  always_comb begin
    st_n     = state;
    am_start = 1'b0;
    done     = 1'b0;
    unique case (state)
      EC_IDLE: if (start) begin
        am_start = 1'b1;
        st_n     = am_last ? EC_DONE : EC_MULT1;
      end
      EC_MULT1: if (am_last) st_n = EC_DONE;
      EC_DONE: begin
        done = 1'b1;
        st_n = EC_IDLE;
      end
      default: st_n = EC_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= EC_IDLE;
    else        state <= st_n;
  end

  // a new request is only accepted in Idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == EC_IDLE);

endmodule
