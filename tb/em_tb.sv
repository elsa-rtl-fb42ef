// em_tb: checks the EM unit h = o * tanhC against the reference AM
// (saturated to 8 bits), with o as the latency operand: the unit must
// take 1 + |N(o)|>>1 cycles to its final cycle.
module em_tb;
  import elsa_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       start, busy, last;
  logic [7:0] o, tc, h;
  em dut (.clk, .rst_n, .start, .o, .tc, .h, .busy, .last);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cyc, exp_h, ov, tv;
    start = 0; o = 0; tc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      ov = (n < 4) ? ((n % 2) ? 8'h80 : 8'h7f) : $urandom_range(0, 255);
      tv = (n < 4) ? ((n / 2) ? 8'h80 : 8'h7f) : $urandom_range(0, 255);
      @(negedge clk);
      o = 8'(ov); tc = 8'(tv); start = 1'b1; cyc = 1;
      #1;
      while (!last) begin
        @(negedge clk);
        start = 1'b0;
        cyc++;
        #1;
      end
      @(negedge clk);
      start = 1'b0;
      exp_h = sat(am_ref(0, 1'b0, tv, ov, 8, 11), 8);
      check(h == 8'(exp_h), $sformatf("o=%02h tc=%02h h=%0d want %0d", ov, tv, $signed(h), exp_h));
      check(cyc == am_k(ov, 8) + 1, $sformatf("o=%02h: %0d cycles", ov, cyc));
    end
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
