// ema_ctrl_tb: runs the EMA mini controller with an EMA unit. It checks
// the states Idle -> Mult1 -> Mult2 -> Done, that Mult2 is launched once,
// that `done` comes |N(i)|>>1 + |N(f)|>>1 + 3 cycles after `start` (start
// cycle counted as 1) and that C is correct at `done`.
module ema_ctrl_tb;
  import elsa_ref_pkg::*;
  import elsa_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       start, start1, start2, am_last, done, busy;
  logic [7:0] i, chat, f, cprev, c;
  emc_state_e state;
  ema_ctrl dut (.clk, .rst_n, .start, .am_last, .start1, .start2, .done, .state);
  ema u_ema (.clk, .rst_n, .start1, .start2, .i, .chat, .f, .cprev, .c, .busy, .last(am_last));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cyc, iv, cv, fv, pv, n2, saw_m2, e;
    start = 0; i = 0; chat = 0; f = 0; cprev = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 800; n++) begin
      iv = (n < 2) ? n : $urandom_range(0, 255);
      fv = (n < 4) ? n / 2 : $urandom_range(0, 255);
      cv = $urandom_range(0, 255); pv = $urandom_range(0, 255);
      @(negedge clk);
      check(state == EC_IDLE, "not idle before start");
      i = 8'(iv); chat = 8'(cv); f = 8'(fv); cprev = 8'(pv); start = 1'b1; cyc = 1; n2 = 0; saw_m2 = 0;
      #1;
      while (!done) begin
        @(negedge clk);
        start = 1'b0;
        cyc++;
        #1;
        if (start2) n2++;
        if (state == EC_MULT2) saw_m2 = 1;
      end
      check(cyc == am_k(iv, 8) + am_k(fv, 8) + 3, $sformatf("done after %0d cycles, want %0d", cyc, am_k(iv, 8) + am_k(fv, 8) + 3));
      check(n2 == 1 && saw_m2 == 1, "Mult2 not launched exactly once");
      e = sat(am_ref(am_ref(0, 1'b0, cv, iv, 8, 11), 1'b1, pv, fv, 8, 11), 8);
      check(c == 8'(e), $sformatf("C=%0d want %0d", $signed(c), e));
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
