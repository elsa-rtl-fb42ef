// hsig_tb: every 13-bit input of the hard sigmoid against its definition
// (0 below -2, x/4 + 0.5 between, 1 - 2^-7 at the top), and that all three
// pieces are reached.
module hsig_tb;
  import elsa_ref_pkg::*;
  int checks = 0;
  int failures = 0;
  logic signed [12:0] x;
  logic [7:0] y;
  hsig dut (.x, .y);

  initial begin
    int lo = 0, mid = 0, hi = 0;
    for (int v = -4096; v < 4096; v++) begin
      x = 13'(v);
      #1;
      checks++;
      if (int'(y) != hsig_ref(v, 8)) begin
        failures++;
        $display("FAIL: hsig(%0d)=%0d want %0d", v, y, hsig_ref(v, 8));
      end
      if (v <= -256) lo++; else if (v > 256) hi++; else mid++;
    end
    checks++;
    if (lo == 0 || mid == 0 || hi == 0) failures++;
    // spot values: 0 -> 0.5, 1 -> 0.75, -1 -> 0.25
    x = 13'sd0;    #1; checks++; if (y != 8'd64) failures++;
    x = 13'sd128;  #1; checks++; if (y != 8'd96) failures++;
    x = -13'sd128; #1; checks++; if (y != 8'd32) failures++;
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
