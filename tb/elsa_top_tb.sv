// elsa_top_tb: end-to-end test of one LSTM layer (reduced size: 12 hidden nodes, room for 8 steps).
//
// Loads random weights, biases and an input sequence through the host
// ports, runs the layer for each sequence length in RUNS, reads every h_t
// back and compares it with a bit-exact model of the layer written from
// the equations (LSTM gates, hard sigmoid/tanh, approximate multiplier
// defined by its bit stream). It also checks the run's cycle count
// against a schedule model built from the operand magnitudes (every
// multiplier costs 1 + |N(w)|>>1 cycles, see the controllers), reports the
// speed-up over running the same operations one after another, and counts
// the mechanisms of the design: Full and Partial MVM passes, EMA
// overlapping EM and the next step's MVMs, stream-free (zero) operands,
// accumulator saturation, and the saturated pieces of the activations. A
// mechanism that never happens counts as a failure.
module elsa_top_tb;
  import elsa_ref_pkg::*;
  import elsa_pkg::*;

  localparam int N  = 12;
  localparam int TM = 8;
  localparam int DW = 8;
  localparam int ACC_W = 11;
  localparam int ONE = 1 << (DW - 1);   // 1.0 in data units
  localparam int MASK = (1 << DW) - 1;
  localparam int NR = 4;
  localparam int RUNS[NR] = '{6, 3, 1, 8};
  localparam bit LM = 0;        // workload runs instead of random ones
  localparam int LM_IN = 65;       // symbols of the one-hot input
  localparam int TW  = $clog2(TM + 1);
  localparam int XAW = $clog2(TM * N);
  localparam int JW  = (N > 1) ? $clog2(N) : 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic           start, busy, done, w_we, b_we, x_we, h_re;
  logic [TW-1:0]  seq_len;
  logic [2:0]     w_mat;
  logic [JW-1:0]  w_row, w_col, b_idx;
  logic [1:0]     b_gate;
  logic [DW-1:0]  w_data, b_data, x_data, h_data;
  logic [XAW-1:0] x_addr, h_addr;

  elsa_top #(.N(N), .T_MAX(TM)) dut (
    .clk, .rst_n, .start, .seq_len, .busy, .done,
    .w_we, .w_mat, .w_row, .w_col, .w_data,
    .b_we, .b_gate, .b_idx, .b_data,
    .x_we, .x_addr, .x_data,
    .h_re, .h_addr, .h_data
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int W[8][N][N];
  int B[4][N];
  int X[][N];
  int H[][N];
  int Cs[][N];
  int Fa[][N];
  int Ia[][N];
  int Oa[][N];

  // coverage counters
  int n_full = 0, n_part = 0, n_ov_mvm = 0, n_ov_em = 0, n_zero = 0, n_sat = 0;
  int n_sig_hi = 0, n_sig_lo = 0, n_tanh_clip = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_topc.mvm_start && dut.mvm_full) n_full++;
    if (dut.u_topc.mvm_start && !dut.mvm_full) n_part++;
    if (dut.emac_state != EC_IDLE && dut.mc_state != MC_IDLE) n_ov_mvm++;
    if (dut.emac_state != EC_IDLE && dut.emc_state != EC_IDLE) n_ov_em++;
    if (dut.mvm_go && (&dut.mvm_last)) n_zero++;
    if (dut.snap)
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++)
          if (dut.mvm_z[m][r] == (1 << (ACC_W - 1)) - 1 || dut.mvm_z[m][r] == -(1 << (ACC_W - 1))) n_sat++;
    if (dut.st2_en) begin
      if (dut.s_f > 2 * ONE || dut.s_i > 2 * ONE) n_sig_hi++;
      if (dut.s_f <= -2 * ONE || dut.s_i <= -2 * ONE) n_sig_lo++;
      if (dut.s_c >= ONE || dut.s_c <= -ONE) n_tanh_clip++;
    end
  end

  function automatic int kk(int v);
    return am_k(v & MASK, DW);
  endfunction

  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  task automatic reference(int T);
    int acc[8][N];
    int y, pre, chat, cprev, e;
    for (int t = 0; t < T; t++) begin
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++) begin
          acc[m][r] = 0;
          for (int c = 0; c < N; c++) begin
            y = (m % 2 == 0) ? X[t][c] : ((t == 0) ? 0 : H[t-1][c]);
            acc[m][r] = am_ref(acc[m][r], c != 0, W[m][r][c] & MASK, y & MASK, DW, ACC_W);
          end
        end
      for (int r = 0; r < N; r++) begin
        Fa[t][r] = hsig_ref(acc[0][r] + acc[1][r] + B[0][r], DW);
        chat     = htanh_ref(acc[2][r] + acc[3][r] + B[1][r], DW);
        Ia[t][r] = hsig_ref(acc[4][r] + acc[5][r] + B[2][r], DW);
        Oa[t][r] = hsig_ref(acc[6][r] + acc[7][r] + B[3][r], DW);
        cprev = (t == 0) ? 0 : Cs[t-1][r];
        e = am_ref(0, 1'b0, chat & MASK, Ia[t][r], DW, ACC_W);
        e = am_ref(e, 1'b1, cprev & MASK, Fa[t][r], DW, ACC_W);
        Cs[t][r] = sat(e, DW);
        H[t][r] = sat(am_ref(0, 1'b0, htanh_ref(Cs[t][r], DW) & MASK, Oa[t][r], DW, ACC_W), DW);
      end
    end
  endtask

  // cycles from the start cycle to the done cycle, both counted
  function automatic longint sched_cycles(int T);
    longint tot;
    int em, ema, path;
    tot = 1;
    for (int t = 0; t < T; t++) begin
      if (t == 0) begin
        tot += 2;
        for (int c = 0; c < N; c++) tot += 1 + kk(X[0][c]);
      end else tot += 3 + imax(kk(X[t][N-1]), kk(H[t-1][N-1]));
      tot += 1 + kk(Ia[t][0]) + kk(Fa[t][0]) + 3;
      for (int j = 0; j < N - 1; j++) begin
        em   = kk(Oa[t][j]) + 2;
        path = (t == T - 1) ? em : em + 2 + imax(kk(X[t+1][j]), kk(H[t][j]));
        ema  = kk(Ia[t][j+1]) + kk(Fa[t][j+1]) + 3;
        tot += 1 + imax(path, ema);
      end
      tot += 1 + kk(Oa[t][N-1]) + 2;
    end
    return tot + 1;
  endfunction

  // the same operations one after another: all columns of all steps,
  // then per node stage 2, EMA, stages 4/5 and EM
  function automatic longint seq_cycles(int T);
    longint tot;
    tot = 0;
    for (int t = 0; t < T; t++) begin
      tot += 2;
      for (int c = 0; c < N; c++) tot += 1 + imax(kk(X[t][c]), (t == 0) ? 0 : kk(H[t-1][c]));
      for (int j = 0; j < N; j++)
        tot += 1 + (kk(Ia[t][j]) + kk(Fa[t][j]) + 3) + 1 + (kk(Oa[t][j]) + 2);
    end
    return tot;
  endfunction

  initial begin
    longint cyc, exp_cyc, seq_c;
    int T, nh, ni, sym;
    start = 0; seq_len = '0; w_we = 0; b_we = 0; x_we = 0; h_re = 0;
    w_mat = '0; w_row = '0; w_col = '0; w_data = '0; b_gate = '0; b_idx = '0; b_data = '0;
    x_addr = '0; x_data = '0; h_addr = '0;
    X = new[TM]; H = new[TM]; Cs = new[TM]; Fa = new[TM]; Ia = new[TM]; Oa = new[TM];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < NR; run++) begin
      T = RUNS[run];
      // parameters: run 1 drives row 0 of W_xf into accumulator saturation
      // active sizes: all N nodes and inputs, except in the workload runs
      nh = (LM && run >= 2) ? N / 2 : N;
      ni = (LM && run == 0) ? LM_IN : nh;
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            W[m][r][c] = $urandom_range(0, MASK) - ONE;
            if (!LM && run == 1 && m == 0 && r == 0) W[m][r][c] = ONE - 1;
            if (r >= nh || c >= ((m % 2 == 0) ? ni : nh)) W[m][r][c] = 0;
          end
      for (int g = 0; g < 4; g++)
        for (int r = 0; r < N; r++) B[g][r] = (r < nh) ? $urandom_range(0, MASK) - ONE : 0;
      for (int t = 0; t < T; t++) begin
        sym = $urandom_range(0, LM_IN - 1);
        for (int c = 0; c < N; c++) begin
          X[t][c] = $urandom_range(0, MASK) - ONE;
          if (!LM && run == 1) X[t][c] = ONE - 1;
          if (!LM && run == 0 && c == 1) X[t][c] = 0;
          if (LM && run == 0) X[t][c] = (c == sym) ? ONE - 1 : 0;  // one-hot symbol
          if (LM && run == 1) X[t][c] = H[t][c];               // layer 1 output
          if (c >= ni) X[t][c] = 0;
        end
      end
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            @(negedge clk);
            w_we = 1; w_mat = 3'(m); w_row = JW'(r); w_col = JW'(c); w_data = DW'(W[m][r][c]);
          end
      @(negedge clk);
      w_we = 0;
      for (int g = 0; g < 4; g++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          b_we = 1; b_gate = 2'(g); b_idx = JW'(r); b_data = DW'(B[g][r]);
        end
      @(negedge clk);
      b_we = 0;
      for (int t = 0; t < T; t++)
        for (int c = 0; c < N; c++) begin
          @(negedge clk);
          x_we = 1; x_addr = XAW'(t * N + c); x_data = DW'(X[t][c]);
        end
      @(negedge clk);
      x_we = 0;
      reference(T);
      // run
      @(negedge clk);
      start = 1; seq_len = TW'(T);
      cyc = 1;
      @(negedge clk);
      start = 0;
      cyc++;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      @(negedge clk);
      exp_cyc = sched_cycles(T);
      seq_c = seq_cycles(T);
      check(cyc == exp_cyc, $sformatf("T=%0d: %0d cycles, schedule model %0d", T, cyc, exp_cyc));
      check(cyc < seq_c, "pipelined run not faster than sequential operation");
      $display("run %0d: N=%0d T=%0d cycles=%0d (one-after-another %0d, speed-up %0.2f)",
               run, N, T, cyc, seq_c, real'(seq_c) / real'(cyc));
      // read back
      for (int t = 0; t < T; t++)
        for (int r = 0; r < N; r++) begin
          h_re = 1; h_addr = XAW'(t * N + r);
          @(negedge clk);
          h_re = 0;
          check(h_data == DW'(H[t][r]), $sformatf("run %0d h[%0d][%0d]=%0d want %0d", run, t, r, $signed(h_data), H[t][r]));
        end
    end
    $display("mechanisms: full=%0d partial=%0d ema||mvm=%0d ema||em=%0d zero-stream columns=%0d saturated accs=%0d sig>2=%0d sig<=-2=%0d tanh clip=%0d",
             n_full, n_part, n_ov_mvm, n_ov_em, n_zero, n_sat, n_sig_hi, n_sig_lo, n_tanh_clip);
    check(n_full == NR, "Full MVM passes");
    check(n_part > 0, "no Partial MVM pass");
    check(n_ov_mvm > 0, "EMA never overlapped the MVMs");
    check(n_ov_em > 0, "EMA never overlapped EM");
    check(n_zero > 0, "no zero-length column");
    if (!LM) begin
      check(n_sat > 0, "accumulators never saturated");
      check(n_sig_hi > 0 && n_sig_lo > 0, "sigmoid saturation not reached");
      check(n_tanh_clip > 0, "tanh clipping not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
