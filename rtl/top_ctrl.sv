// top_ctrl: top controller (Top-C) of the LSTM layer.
//
// Seven controller states schedule the six pipeline stages of a layer
// over the N hidden nodes and the T time steps (t and j count from 0):
//   S1  MVMs. At t = 0 the MVM mini controller runs a Full pass over all
//       columns; for t > 0 only column N-1 is left, run as a Partial.
//       When it is done the eight result vectors are copied to the
//       intermediate buffer (`snap`).
//   S2  stage 2 for node 0: ternary adders and activations give f, Chat, i.
//   S3  stage 3 for node 0: EMA computes C_0.
//   S4  (j = 0..N-2, one cycle) stage 2 for node j+1, stage 4 (o_j) and
//       stage 5 (tanh C_j).
//   S5  (j = 0..N-2) EM computes h_j; once h_j exists the MVMs of step
//       t+1 run Partial on column j with scalars x_{t+1,j} and h_j (not at
//       the last step). In parallel EMA computes C_{j+1}. S5 ends when all
//       of them are done; S4/S5 repeat N-1 times.
//   S6  stage 4 and 5 for node N-1.
//   S7  EM computes h_{N-1}; then S1 of the next step, or Done.
// The state list, what each state overlaps and the loops over nodes and
// time steps follow the paper's schedule. This design adds: S6 also
// computes o_{N-1} (the schedule lists only tanh there, but h_{N-1} needs
// it), each multi-cycle state starts its mini controllers in its first
// cycle, and every mini controller reports back with a one-cycle `done`.
//
// Memory addressing: read addresses of the synchronous memories (biases,
// C) are given for the *next* state (`*_n`), so the data is there when
// the state begins; the register buffer is read with the current indices.
module top_ctrl
  import elsa_pkg::*;
#(
  parameter int unsigned N     = elsa_pkg::DEF_NH,
  parameter int unsigned T_MAX = elsa_pkg::DEF_T_MAX,
  localparam int unsigned JW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned TW   = $clog2(T_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] seq_len,     // T, sampled at start
  input  logic          mvm_done,
  input  logic          ema_done,
  input  logic          em_done,
  output logic          mvm_start,
  output logic          mvm_full,
  output logic [JW-1:0] mvm_pcol,
  output logic [TW-1:0] mvm_t,       // time step the MVMs work on
  output logic          ema_start,
  output logic          em_start,
  output logic          snap,
  output logic          st2_en,      // capture f, Chat, i of node idx_a
  output logic          st45_en,     // capture o, tanh C of node idx_b
  output logic [JW-1:0] idx_a,
  output logic [JW-1:0] idx_b,
  output logic [JW-1:0] idx_a_n,
  output logic [JW-1:0] idx_b_n,
  output logic [JW-1:0] idx_e,       // node of the running EMA
  output logic [JW-1:0] idx_e_n,
  output logic          h_we,
  output logic [TW-1:0] t,
  output logic [JW-1:0] j,
  output logic          first_step,
  output logic          busy,
  output logic          done,
  output top_state_e    state
);

  top_state_e    st_n;
  logic [JW-1:0] j_n;
  logic [TW-1:0] t_n, seq_q;
  logic          entry, entry_n;
  logic          em_fin, ema_fin, mvm_fin;
  logic          em_fin_n, ema_fin_n, mvm_fin_n;
  logic          last_t, em_ok, ema_ok, mvm_ok;

  function automatic logic [JW-1:0] fci_idx(top_state_e s, logic [JW-1:0] jj);
    return (s == TC_S1 || s == TC_S2) ? '0 : jj + 1'b1;
  endfunction

  function automatic logic [JW-1:0] ema_idx(top_state_e s, logic [JW-1:0] jj);
    return (s == TC_S1 || s == TC_S2 || s == TC_S3) ? '0 : jj + 1'b1;
  endfunction

  assign last_t = (t == seq_q - 1'b1);
  assign em_ok  = em_fin  | em_done;
  assign ema_ok = ema_fin | ema_done;
  assign mvm_ok = last_t | mvm_fin | mvm_done;

  always_comb begin
    st_n      = state;
    j_n       = j;
    t_n       = t;
    entry_n   = 1'b0;
    em_fin_n  = em_fin;
    ema_fin_n = ema_fin;
    mvm_fin_n = mvm_fin;
    mvm_start = 1'b0;
    mvm_full  = 1'b0;
    mvm_pcol  = JW'(N-1);
    mvm_t     = t;
    ema_start = 1'b0;
    em_start  = 1'b0;
    snap      = 1'b0;
    st2_en    = 1'b0;
    st45_en   = 1'b0;
    h_we      = 1'b0;
    done      = 1'b0;
    unique case (state)
      TC_IDLE: if (start && seq_len != '0) begin
        st_n    = TC_S1;
        t_n     = '0;
        j_n     = '0;
        entry_n = 1'b1;
      end
      TC_S1: begin
        mvm_start = entry;
        mvm_full  = (t == '0);
        if (mvm_done) begin
          snap = 1'b1;
          st_n = TC_S2;
        end
      end
      TC_S2: begin
        st2_en  = 1'b1;
        st_n    = TC_S3;
        entry_n = 1'b1;
      end
      TC_S3: begin
        ema_start = entry;
        if (ema_done) st_n = (N > 1) ? TC_S4 : TC_S6;
      end
      TC_S4: begin
        st2_en    = 1'b1;
        st45_en   = 1'b1;
        st_n      = TC_S5;
        entry_n   = 1'b1;
        em_fin_n  = 1'b0;
        ema_fin_n = 1'b0;
        mvm_fin_n = 1'b0;
      end
      TC_S5: begin
        em_start  = entry;
        ema_start = entry;
        mvm_pcol  = j;
        mvm_t     = t + 1'b1;
        if (em_done) begin
          h_we      = 1'b1;
          mvm_start = !last_t;
        end
        em_fin_n  = em_ok;
        ema_fin_n = ema_ok;
        mvm_fin_n = mvm_fin | mvm_done;
        if (em_ok && ema_ok && mvm_ok && !(em_done && !last_t)) begin
          j_n  = j + 1'b1;
          st_n = (j == JW'(N-2)) ? TC_S6 : TC_S4;
        end
      end
      TC_S6: begin
        st45_en = 1'b1;
        st_n    = TC_S7;
        entry_n = 1'b1;
      end
      TC_S7: begin
        em_start = entry;
        if (em_done) begin
          h_we = 1'b1;
          if (last_t) begin
            st_n = TC_DONE;
          end else begin
            st_n    = TC_S1;
            t_n     = t + 1'b1;
            j_n     = '0;
            entry_n = 1'b1;
          end
        end
      end
      TC_DONE: begin
        done = 1'b1;
        st_n = TC_IDLE;
      end
      default: st_n = TC_IDLE;
    endcase
  end

  assign idx_a      = fci_idx(state, j);
  assign idx_b      = j;
  assign idx_e      = ema_idx(state, j);
  assign idx_a_n    = fci_idx(st_n, j_n);
  assign idx_b_n    = j_n;
  assign idx_e_n    = ema_idx(st_n, j_n);
  assign first_step = (t == '0);
  assign busy       = (state != TC_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= TC_IDLE;
      t       <= '0;
      j       <= '0;
      seq_q   <= '0;
      entry   <= 1'b0;
      em_fin  <= 1'b0;
      ema_fin <= 1'b0;
      mvm_fin <= 1'b0;
    end else begin
      state   <= st_n;
      t       <= t_n;
      j       <= j_n;
      entry   <= entry_n;
      em_fin  <= em_fin_n;
      ema_fin <= ema_fin_n;
      mvm_fin <= mvm_fin_n;
      if (state == TC_IDLE && start) seq_q <= seq_len;
    end
  end

  a_seq_len: assert property (@(posedge clk) disable iff (!rst_n)
    (state == TC_IDLE && start) |-> seq_len <= TW'(T_MAX));

endmodule
