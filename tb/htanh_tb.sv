// htanh_tb: every 13-bit input of the hard tanh against its definition
// (-1 at or below -1, x between, 1 - 2^-7 at the top).
module htanh_tb;
  import elsa_ref_pkg::*;
  int checks = 0;
  int failures = 0;
  logic signed [12:0] x;
  logic [7:0] y;
  htanh dut (.x, .y);

  initial begin
    for (int v = -4096; v < 4096; v++) begin
      x = 13'(v);
      #1;
      checks++;
      if (int'($signed(y)) != htanh_ref(v, 8)) begin
        failures++;
        $display("FAIL: htanh(%0d)=%0d want %0d", v, $signed(y), htanh_ref(v, 8));
      end
    end
    x = 13'sd50;   #1; checks++; if (y != 8'd50) failures++;
    x = -13'sd500; #1; checks++; if (y != 8'h80) failures++;
    x = 13'sd500;  #1; checks++; if (y != 8'h7f) failures++;
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
