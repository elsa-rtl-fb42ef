// mvm_ctrl_tb: checks the MVM mini controller against a model of the MVM
// units' `last` signal (each started column gets a random stream length).
// Full: columns are read 0..N-1 in order, each read is followed by exactly
// one start in the next cycle, `first` only on column 0, and `done` comes
// 2 + sum(1 + k_c) cycles after the start request. Partial: one read of
// the requested column, `first` only when that column is 0, done after
// 3 + k cycles.
module mvm_ctrl_tb;
  import elsa_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic         start, full, all_last, rd_en, mvm_start, mvm_first, done;
  logic [2:0]   pcol, rd_col;
  mvmc_state_e  state;
  mvm_ctrl #(.N(N)) dut (.clk, .rst_n, .start, .full, .pcol, .all_last, .rd_en,
    .rd_col, .mvm_start, .mvm_first, .done, .state);

  // MVM model: stream length chosen per started column
  int ks[N];
  int cnt = 0;
  int started = 0;
  int k_now;
  assign k_now = ks[started % N];
  assign all_last = mvm_start ? (k_now == 0) : (cnt <= 1);
  always_ff @(posedge clk) begin
    if (mvm_start) begin
      cnt <= k_now;
      started <= started + 1;
    end else if (cnt > 0) cnt <= cnt - 1;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cyc, exp_cyc, nreads, nstarts, last_rd, pend_rd, p;
    bit isfull;
    start = 0; full = 0; pcol = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      isfull = (n % 3 == 0);
      p = $urandom_range(0, N - 1);
      for (int c = 0; c < N; c++) ks[c] = (n % 5 == 1) ? 0 : $urandom_range(0, 64);
      @(negedge clk);
      started = 0;
      start = 1'b1; full = isfull; pcol = 3'(p);
      cyc = 1; nreads = 0; nstarts = 0; last_rd = -1; pend_rd = -1;
      #1;
      while (!done) begin
        if (mvm_start) begin
          nstarts++;
          check(pend_rd >= 0, "start without a read in the previous cycle");
          check(mvm_first == (pend_rd == 0), "first flag wrong");
        end
        pend_rd = -1;
        if (rd_en) begin
          nreads++;
          check(int'(rd_col) == (isfull ? last_rd + 1 : p), $sformatf("read column %0d", rd_col));
          last_rd = rd_col;
          pend_rd = rd_col;
        end
        @(negedge clk);
        start = 1'b0;
        cyc++;
        #1;
      end
      exp_cyc = 0;
      if (isfull) begin
        exp_cyc = 2;
        for (int c = 0; c < N; c++) exp_cyc += 1 + ks[c];
      end else exp_cyc = 3 + ks[0];
      check(nreads == (isfull ? N : 1), $sformatf("%0d reads", nreads));
      check(nstarts == (isfull ? N : 1), $sformatf("%0d starts", nstarts));
      check(cyc == exp_cyc, $sformatf("full=%0d done after %0d cycles, want %0d", isfull, cyc, exp_cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
