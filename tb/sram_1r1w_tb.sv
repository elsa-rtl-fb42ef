// sram_1r1w_tb: lane writes into a 16-word, 4-lane memory, read back with
// one cycle of latency against a model; the read data must hold while re
// is low.
module sram_1r1w_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic we, re;
  logic [3:0] waddr, raddr;
  logic [1:0] wlane;
  logic [7:0] wdata;
  logic [3:0][7:0] rdata;
  sram_1r1w #(.DEPTH(16), .LANES(4), .LANE_W(8)) dut (.clk, .we, .waddr, .wlane, .wdata, .re, .raddr, .rdata);

  logic [3:0][7:0] model [16];

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wlane = 0; wdata = 0;
    for (int a = 0; a < 16; a++)
      for (int l = 0; l < 4; l++) begin
        @(negedge clk);
        we = 1; waddr = 4'(a); wlane = 2'(l); wdata = 8'($urandom_range(0, 255));
        model[a][l] = wdata;
      end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = 4'($urandom_range(0, 15)); wlane = 2'($urandom_range(0, 3)); wdata = 8'($urandom_range(0, 255));
      re = 1; raddr = 4'($urandom_range(0, 15));
      @(negedge clk);
      checks++;
      if (rdata != model[raddr]) begin
        failures++;
        $display("FAIL: addr %0d read %h want %h", raddr, rdata, model[raddr]);
      end
      if (we) model[waddr][wlane] = wdata;
      we = 0; re = 0;
      @(negedge clk);
      checks++;
      if (rdata != model[raddr] && !(we)) begin
        // data must hold (the write above may have hit the same word)
        if (!(waddr == raddr)) begin
          failures++;
          $display("FAIL: read data did not hold");
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
