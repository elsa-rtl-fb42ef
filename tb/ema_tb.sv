// ema_tb: checks the EMA unit C = i*Chat + f*Cprev: Mult1 (latency from
// i) presets the counter, Mult2 (latency from f) adds to it; the result,
// saturated to 8 bits, is compared with the reference AM, and each
// product's cycle count with 1 + |N(w)|>>1. The operands f and Cprev are
// changed after start1 to check that the unit registered them.
module ema_tb;
  import elsa_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       start1, start2, busy, last;
  logic [7:0] i, chat, f, cprev, c;
  ema dut (.clk, .rst_n, .start1, .start2, .i, .chat, .f, .cprev, .c, .busy, .last);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cyc, e, iv, cv, fv, pv;
    start1 = 0; start2 = 0; i = 0; chat = 0; f = 0; cprev = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      iv = $urandom_range(0, 255); cv = $urandom_range(0, 255);
      fv = (n < 10) ? 8'h80 : $urandom_range(0, 255);
      pv = (n < 10) ? 8'h80 : $urandom_range(0, 255);
      @(negedge clk);
      i = 8'(iv); chat = 8'(cv); f = 8'(fv); cprev = 8'(pv); start1 = 1'b1; cyc = 1;
      #1;
      while (!last) begin
        @(negedge clk);
        start1 = 1'b0; f = ~f; cprev = ~cprev;
        cyc++;
        #1;
      end
      check(cyc == am_k(iv, 8) + 1, $sformatf("mult1 %0d cycles", cyc));
      @(negedge clk);
      start1 = 1'b0; start2 = 1'b1; cyc = 1;
      #1;
      while (!last) begin
        @(negedge clk);
        start2 = 1'b0;
        cyc++;
        #1;
      end
      @(negedge clk);
      start2 = 1'b0;
      check(cyc == am_k(fv, 8) + 1, $sformatf("mult2 %0d cycles", cyc));
      e = sat(am_ref(am_ref(0, 1'b0, cv, iv, 8, 11), 1'b1, pv, fv, 8, 11), 8);
      check(c == 8'(e), $sformatf("i=%02h chat=%02h f=%02h cp=%02h c=%0d want %0d", iv, cv, fv, pv, $signed(c), e));
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
