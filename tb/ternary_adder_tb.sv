// ternary_adder_tb: random and extreme operands against integer addition.
module ternary_adder_tb;
  int checks = 0;
  int failures = 0;
  logic signed [10:0] a, b;
  logic signed [7:0]  bias;
  logic signed [12:0] sum;
  ternary_adder dut (.a, .b, .bias, .sum);

  initial begin
    int av, bv, cv;
    for (int n = 0; n < 5000; n++) begin
      av = (n < 4) ? ((n % 2) ? 1023 : -1024) : $urandom_range(0, 2047) - 1024;
      bv = (n < 4) ? ((n % 2) ? 1023 : -1024) : $urandom_range(0, 2047) - 1024;
      cv = (n < 4) ? ((n % 2) ? 127 : -128) : $urandom_range(0, 255) - 128;
      a = 11'(av); b = 11'(bv); bias = 8'(cv);
      #1;
      checks++;
      if (int'(sum) != av + bv + cv) begin
        failures++;
        $display("FAIL: %0d+%0d+%0d gave %0d", av, bv, cv, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
