// mvm_buffer_tb: snapshots of random MVM results are read back through
// both ports at every index; without `snap` the contents must not change.
module mvm_buffer_tb;
  localparam int N = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic snap;
  logic signed [7:0][N-1:0][10:0] z_in;
  logic [2:0] idx_a, idx_b;
  logic signed [7:0][10:0] out_a, out_b;
  mvm_buffer #(.N(N)) dut (.clk, .snap, .z_in, .idx_a, .idx_b, .out_a, .out_b);

  logic signed [7:0][N-1:0][10:0] held;

  initial begin
    snap = 0; z_in = '0; idx_a = 0; idx_b = 0;
    for (int rep = 0; rep < 50; rep++) begin
      @(negedge clk);
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++) z_in[m][r] = 11'($urandom_range(0, 2047));
      snap = (rep % 4 != 3);
      if (snap) held = z_in;
      @(negedge clk);
      snap = 0;
      for (int m = 0; m < 8; m++)
        for (int r = 0; r < N; r++) z_in[m][r] = 11'($urandom_range(0, 2047));
      for (int a = 0; a < N; a++) begin
        idx_a = 3'(a); idx_b = 3'(N - 1 - a);
        #1;
        for (int m = 0; m < 8; m++) begin
          checks += 2;
          if (out_a[m] != held[m][a] || out_b[m] != held[m][N - 1 - a]) begin
            failures++;
            $display("FAIL: rep %0d mvm %0d index %0d", rep, m, a);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
