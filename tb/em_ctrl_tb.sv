// em_ctrl_tb: runs the EM mini controller with an EM unit. For random
// operands it checks the state sequence Idle -> Mult1 -> Done -> Idle, that
// `done` comes exactly |N(o)|>>1 + 2 cycles after `start` (start cycle
// counted as 1) and lasts one cycle, and that h is correct at `done`.
module em_ctrl_tb;
  import elsa_ref_pkg::*;
  import elsa_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       start, am_start, am_last, done, busy;
  logic [7:0] o, tc, h;
  emc_state_e state;
  em_ctrl dut (.clk, .rst_n, .start, .am_last, .am_start, .done, .state);
  em u_em (.clk, .rst_n, .start(am_start), .o, .tc, .h, .busy, .last(am_last));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cyc, ov, tv, k, mult1_cycles;
    start = 0; o = 0; tc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 800; n++) begin
      ov = (n < 3) ? n : $urandom_range(0, 255);
      tv = $urandom_range(0, 255);
      k = am_k(ov, 8);
      @(negedge clk);
      check(state == EC_IDLE, "not idle before start");
      o = 8'(ov); tc = 8'(tv); start = 1'b1; cyc = 1; mult1_cycles = 0;
      #1;
      while (!done) begin
        @(negedge clk);
        start = 1'b0;
        if (state == EC_MULT1) mult1_cycles++;
        cyc++;
        #1;
      end
      check(cyc == k + 2, $sformatf("o=%02h done after %0d cycles, want %0d", ov, cyc, k + 2));
      check(mult1_cycles == k, $sformatf("o=%02h %0d cycles in Mult1, want %0d", ov, mult1_cycles, k));
      check(state == EC_DONE, "done outside Done");
      check(h == 8'(sat(am_ref(0, 1'b0, tv, ov, 8, 11), 8)), "h wrong at done");
      @(negedge clk);
      check(!done && state == EC_IDLE, "done longer than one cycle");
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
