// elsa_pkg: constants and types shared by the LSTM accelerator.
//
// Number format: every stored operand (weights, biases, inputs x, hidden
// state h, memory state C, gate activations) is an 8-bit two's complement
// fraction with one sign bit and seven fraction bits, so its value is
// N(v)/2^7 in [-1, 1). Accumulators in the multipliers are 11 bits wide in
// the same scale (three integer bits of headroom), the width the design
// uses for intermediate results.
//
// The eight matrix-vector multipliers are numbered by gate and operand:
// index 2*g + 0 multiplies W_xg by x_t, index 2*g + 1 multiplies W_hg by
// h_{t-1}, with g the gate number below.
package elsa_pkg;

  // Default sizes: 8-bit data, 11-bit intermediate results, 128 hidden
  // nodes, room for 1000 time steps of input and output.
  localparam int unsigned DEF_DW    = 8;
  localparam int unsigned DEF_ACC_W = 11;
  localparam int unsigned DEF_NH    = 128;
  localparam int unsigned DEF_T_MAX = 1000;

  localparam int unsigned NUM_MVM   = 8;
  localparam int unsigned NUM_GATES = 4;

  typedef enum logic [1:0] {
    GATE_F = 2'd0,   // forget gate
    GATE_C = 2'd1,   // candidate memory (tanh)
    GATE_I = 2'd2,   // input gate
    GATE_O = 2'd3    // output gate
  } gate_e;

  // States of the top controller; S1..S7 are the controller states of the
  // pipelined schedule.
  typedef enum logic [3:0] {
    TC_IDLE = 4'd0,
    TC_S1   = 4'd1,   // MVMs: full pass (first step) or last column
    TC_S2   = 4'd2,   // stage 2 for node 0
    TC_S3   = 4'd3,   // stage 3 (EMA) for node 0
    TC_S4   = 4'd4,   // stage 2 for j+1, stage 4 and 5 for j
    TC_S5   = 4'd5,   // stage 6 (EM) for j then MVM partial column j, EMA for j+1
    TC_S6   = 4'd6,   // stage 4 and 5 for the last node
    TC_S7   = 4'd7,   // stage 6 (EM) for the last node
    TC_DONE = 4'd8
  } top_state_e;

  typedef enum logic [1:0] {
    MC_IDLE    = 2'd0,
    MC_FULL    = 2'd1,
    MC_PARTIAL = 2'd2,
    MC_DONE    = 2'd3
  } mvmc_state_e;

  typedef enum logic [1:0] {
    EC_IDLE  = 2'd0,
    EC_MULT1 = 2'd1,
    EC_MULT2 = 2'd2,
    EC_DONE  = 2'd3
  } emc_state_e;

endpackage
