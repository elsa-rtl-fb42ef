// ternary_adder: adds a gate's two MVM results and its bias,
// W_x*x_t + W_h*h_{t-1} + b.
//
// The MVM results are ACC_W-bit and the bias DW-bit two's complement
// numbers in the same scale (2^-(DW-1)); the sum is two bits wider than
// the accumulators so it cannot overflow. Combinational. The widths are
// this design's choice.
module ternary_adder #(
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W
) (
  input  logic signed [ACC_W-1:0] a,
  input  logic signed [ACC_W-1:0] b,
  input  logic signed [DW-1:0]    bias,
  output logic signed [ACC_W+1:0] sum
);

  assign sum = (ACC_W+2)'(a) + (ACC_W+2)'(b) + (ACC_W+2)'(bias);

endmodule
