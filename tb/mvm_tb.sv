// mvm_tb: checks the matrix-vector multiplier (6 rows) column by column
// against the reference AM: accumulated values after every column, the
// restart of the accumulators on `first`, saturation of the 11-bit
// accumulators, and the cycle count of a column (1 + |N(y)|>>1).
module mvm_tb;
  import elsa_ref_pkg::*;

  localparam int N = 6;
  localparam int M = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic                         start, first;
  logic [N-1:0][7:0]            col;
  logic [7:0]                   y;
  logic signed [N-1:0][10:0]    z;
  logic                         busy, last;

  mvm #(.N(N), .DW(8), .ACC_W(11)) dut (.clk, .rst_n, .start, .first, .col, .y, .z, .busy, .last);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int X[N][M];
  int Y[M];
  int ref_acc[N];

  task automatic run_product(input int sat_test);
    int cyc;
    for (int r = 0; r < N; r++) ref_acc[r] = 0;
    for (int c = 0; c < M; c++) begin
      @(negedge clk);
      for (int r = 0; r < N; r++) col[r] = 8'(X[r][c]);
      y = 8'(Y[c]); first = (c == 0); start = 1'b1;
      cyc = 1;
      #1;
      while (!last) begin
        @(negedge clk);
        start = 1'b0;
        cyc++;
        #1;
      end
      @(negedge clk);
      start = 1'b0;
      check(cyc == am_k(Y[c], 8) + 1, $sformatf("column %0d took %0d cycles, want %0d", c, cyc, am_k(Y[c], 8) + 1));
      for (int r = 0; r < N; r++) begin
        ref_acc[r] = am_ref(ref_acc[r], c != 0, X[r][c], Y[c], 8, 11);
        check(z[r] == 11'(ref_acc[r]), $sformatf("sat=%0d col %0d row %0d: z=%0d want %0d", sat_test, c, r, z[r], ref_acc[r]));
      end
    end
  endtask

  initial begin
    start = 0; first = 0; col = '0; y = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < M; c++) X[r][c] = $urandom_range(0, 255);
      for (int c = 0; c < M; c++) Y[c] = (rep == 0 && c < 3) ? 0 : $urandom_range(0, 255);
      run_product(0);
    end
    // drive the accumulators into saturation: 1 * 1 repeated
    for (int r = 0; r < N; r++)
      for (int c = 0; c < M; c++) X[r][c] = (r % 2 == 0) ? 8'h7f : 8'h80;
    for (int c = 0; c < M; c++) Y[c] = 8'h80;
    run_product(1);
    check(z[1] == 11'sd1023 && z[0] == -11'sd1024, "accumulators did not reach both limits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
