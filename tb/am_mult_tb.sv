// am_mult_tb: checks the accelerated approximate multiplier.
//  - the 4-bit worked example (X = 0.101, W = 0.110): Z = 4/8 after a
//    start cycle and three stream cycles;
//  - 8-bit operands, corner values and random pairs, against the reference
//    model (value and cycle count: 1 + |N(W)|>>1 cycles to `last`);
//  - that the approximation stays within 4 LSBs of the exact product;
//  - accumulation onto a previous result.
module am_mult_tb;
  import elsa_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // 4-bit instance
  logic        s4, acc4;
  logic [3:0]  x4, w4;
  logic signed [6:0] z4;
  logic        b4, l4;
  am_mult #(.DW(4), .ACC_W(7)) dut4 (.clk, .rst_n, .start(s4), .accumulate(acc4),
    .x(x4), .w(w4), .z(z4), .busy(b4), .last(l4));

  // 8-bit instance
  logic        s8, acc8;
  logic [7:0]  x8, w8;
  logic signed [10:0] z8;
  logic        b8, l8;
  am_mult dut8 (.clk, .rst_n, .start(s8), .accumulate(acc8),
    .x(x8), .w(w8), .z(z8), .busy(b8), .last(l8));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // run one 8-bit multiplication, return cycles from start to last
  task automatic mul8(input int x, input int w, input bit accumulate, output int cyc);
    @(negedge clk);
    x8 = 8'(x); w8 = 8'(w); acc8 = accumulate; s8 = 1'b1;
    cyc = 1;
    #1;
    while (!l8) begin
      @(negedge clk);
      s8 = 1'b0;
      cyc++;
      #1;
    end
    @(negedge clk);
    s8 = 1'b0;
  endtask

  initial begin
    int cyc, exp_z, prev, ex, k, maxerr;
    s4 = 0; acc4 = 0; x4 = 0; w4 = 0;
    s8 = 0; acc8 = 0; x8 = 0; w8 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // worked example of the accelerated AM
    @(negedge clk);
    x4 = 4'b0101; w4 = 4'b0110; s4 = 1'b1;
    cyc = 1;
    #1;
    while (!l4) begin
      @(negedge clk);
      s4 = 1'b0;
      cyc++;
      #1;
    end
    @(negedge clk);
    check(z4 == 7'sd4, $sformatf("4-bit example Z=%0d, want 4", z4));
    check(cyc == 4, $sformatf("4-bit example took %0d cycles, want 1+3", cyc));

    // corner and random operands
    maxerr = 0;
    for (int n = 0; n < 3000; n++) begin
      int x, w;
      if (n < 25) begin
        int cv[5] = '{8'h80, 8'h7f, 8'h00, 8'h01, 8'hff};
        x = cv[n % 5]; w = cv[n / 5];
      end else begin
        x = $urandom_range(0, 255); w = $urandom_range(0, 255);
      end
      mul8(x, w, 1'b0, cyc);
      exp_z = am_ref(0, 1'b0, x, w, 8, 11);
      k = am_k(w, 8);
      check(z8 == 11'(exp_z), $sformatf("x=%02h w=%02h z=%0d want %0d", x, w, z8, exp_z));
      check(cyc == k + 1, $sformatf("x=%02h w=%02h cycles=%0d want %0d", x, w, cyc, k + 1));
      ex = sx(x, 8) * sx(w, 8);            // exact, units 2^-14
      ex = int'(z8) * 128 - ex;            // error, units 2^-14
      if (ex < 0) ex = -ex;
      if (ex > maxerr) maxerr = ex;
    end
    check(maxerr <= 4 * 128, $sformatf("max error %0d/16384 above 4 LSB", maxerr));
    $display("max |Z - XW| = %0.3f LSB of 2^-7", real'(maxerr) / 128.0);

    // accumulation
    for (int n = 0; n < 200; n++) begin
      int x1, w1, x2, w2;
      x1 = $urandom_range(0, 255); w1 = $urandom_range(0, 255);
      x2 = $urandom_range(0, 255); w2 = $urandom_range(0, 255);
      mul8(x1, w1, 1'b0, cyc);
      prev = am_ref(0, 1'b0, x1, w1, 8, 11);
      mul8(x2, w2, 1'b1, cyc);
      exp_z = am_ref(prev, 1'b1, x2, w2, 8, 11);
      check(z8 == 11'(exp_z), $sformatf("accumulate z=%0d want %0d", z8, exp_z));
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
