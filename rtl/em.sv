// em: element-wise multiplier for the hidden state, h_j = o_j * tanh(C_j).
//
// One accelerated approximate multiplier with the output-gate value o_j
// as the latency operand (the unit runs |N(o_j)|>>1 stream cycles after
// its start cycle, matching the o/2 term of the performance model) and
// tanh(C_j) as the bit-stream operand. The 11-bit counter result is
// saturated to the 8-bit data format to give h_j; which operand drives
// the latency follows the performance model, the saturation is this
// design's choice.
//
// Interface: `start` from the EM mini controller, operands valid with it;
// `last` marks the final cycle, h is valid from the next cycle on.
module em #(
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] o,     // output gate, latency operand
  input  logic [DW-1:0] tc,    // tanh(C_j), bit-stream operand
  output logic [DW-1:0] h,
  output logic          busy,
  output logic          last
);

  localparam logic signed [ACC_W-1:0] HI = ACC_W'((1 << (DW-1)) - 1);
  localparam logic signed [ACC_W-1:0] LO = -ACC_W'(1 << (DW-1));

  logic signed [ACC_W-1:0] z;

  am_mult #(.DW(DW), .ACC_W(ACC_W)) u_am (
    .clk, .rst_n, .start, .accumulate(1'b0), .x(tc), .w(o), .z, .busy, .last
  );

  always_comb begin
    if (z > HI)      h = HI[DW-1:0];
    else if (z < LO) h = LO[DW-1:0];
    else             h = z[DW-1:0];
  end

endmodule
