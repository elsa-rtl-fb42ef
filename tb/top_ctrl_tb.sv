// top_ctrl_tb: runs the top controller with models of the three mini
// controllers that answer each start with a one-cycle `done` after a random
// delay. For N = 5 nodes and several sequence lengths it checks the whole
// schedule: one Full MVM pass, then Partial passes for every column of
// every later step in the order the hidden state appears (column j of step
// t+1 only after h_j of step t was written, never at the last step), the
// per-step visits of S1..S7, the snapshot, every h write at the right
// (t, j) in order, and that the EMA of node j+1 overlaps the EM of node j.
module top_ctrl_tb;
  import elsa_pkg::*;

  localparam int N = 5;
  localparam int TM = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       start, mvm_done, ema_done, em_done;
  logic [3:0] seq_len, mvm_t, t;
  logic       mvm_start, mvm_full, ema_start, em_start, snap, st2_en, st45_en, h_we;
  logic       first_step, busy, done;
  logic [2:0] mvm_pcol, idx_a, idx_b, idx_a_n, idx_b_n, idx_e, idx_e_n, j;
  top_state_e state;

  top_ctrl #(.N(N), .T_MAX(TM)) dut (.clk, .rst_n, .start, .seq_len, .mvm_done, .ema_done, .em_done,
    .mvm_start, .mvm_full, .mvm_pcol, .mvm_t, .ema_start, .em_start, .snap, .st2_en, .st45_en,
    .idx_a, .idx_b, .idx_a_n, .idx_b_n, .idx_e, .idx_e_n, .h_we, .t, .j, .first_step, .busy, .done,
    .state);

  // mini controller models
  int c_mvm = 0, c_ema = 0, c_em = 0;
  always_ff @(posedge clk) begin
    if (mvm_start) c_mvm <= $urandom_range(1, 6);
    else if (c_mvm > 0) c_mvm <= c_mvm - 1;
    if (ema_start) c_ema <= $urandom_range(1, 9);
    else if (c_ema > 0) c_ema <= c_ema - 1;
    if (em_start) c_em <= $urandom_range(1, 6);
    else if (c_em > 0) c_em <= c_em - 1;
  end
  assign mvm_done = (c_mvm == 1);
  assign ema_done = (c_ema == 1);
  assign em_done  = (c_em == 1);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int T, nfull, npart, nsnap, nh, nvis[9], ema_em_overlap;
    int exp_t, exp_j, exp_pt, exp_pc;
    start = 0; seq_len = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      T = (run == 0) ? 1 : $urandom_range(2, TM);
      nfull = 0; npart = 0; nsnap = 0; nh = 0; ema_em_overlap = 0;
      foreach (nvis[s]) nvis[s] = 0;
      exp_t = 0; exp_j = 0; exp_pt = 1; exp_pc = 0;
      @(negedge clk);
      start = 1; seq_len = 4'(T);
      @(negedge clk);
      start = 0;
      while (!done) begin
        #1;
        if (mvm_start && mvm_full) nfull++;
        if (mvm_start && !mvm_full) begin
          npart++;
          if (state == TC_S1) begin
            check(mvm_pcol == 3'(N - 1) && int'(mvm_t) == exp_pt, "S1 partial: wrong column or step");
            exp_pt++;
            exp_pc = 0;
          end else begin
            check(state == TC_S5 && em_done, "partial MVM outside S5 or before h_j");
            check(int'(mvm_pcol) == exp_pc && int'(mvm_t) == exp_pt, $sformatf("S5 partial col %0d step %0d, want %0d %0d", mvm_pcol, mvm_t, exp_pc, exp_pt));
            exp_pc++;
          end
        end
        if (snap) nsnap++;
        if (h_we) begin
          check(int'(t) == exp_t && int'(j) == exp_j, $sformatf("h write (%0d,%0d) want (%0d,%0d)", t, j, exp_t, exp_j));
          nh++;
          exp_j++;
          if (exp_j == N) begin exp_j = 0; exp_t++; end
        end
        if (c_ema > 0 && c_em > 0) ema_em_overlap++;
        nvis[int'(state)] += (dut.entry || state == TC_S2 || state == TC_S4 || state == TC_S6) ? 1 : 0;
        @(negedge clk);
      end
      check(nfull == 1, $sformatf("T=%0d: %0d full passes", T, nfull));
      check(npart == (T - 1) * N, $sformatf("T=%0d: %0d partial passes, want %0d", T, npart, (T - 1) * N));
      check(nsnap == T, "snapshot count");
      check(nh == N * T, $sformatf("T=%0d: %0d h writes", T, nh));
      check(nvis[TC_S4] == (N - 1) * T && nvis[TC_S5] == (N - 1) * T, "S4/S5 loop count");
      check(nvis[TC_S1] == T && nvis[TC_S3] == T && nvis[TC_S7] == T && nvis[TC_S6] == T, "S1/S3/S6/S7 count");
      check(ema_em_overlap > 0, "EMA never overlapped EM");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
