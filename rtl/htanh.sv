// htanh: piece-wise linear ("hard") tanh, HTanh(x) = -1 for x <= -1, x in
// between, +1 for x > 1.
//
// The input is an IW-bit two's complement number with DW-1 fraction bits,
// the output a DW-bit fraction in [-1, 1); +1 is clipped to 1 - 2^-(DW-1)
// because the format cannot hold it. Pieces follow the paper, the clipping
// is this design's. Combinational.
module htanh #(
  parameter int unsigned DW = elsa_pkg::DEF_DW,
  parameter int unsigned IW = elsa_pkg::DEF_ACC_W + 2
) (
  input  logic signed [IW-1:0] x,
  output logic [DW-1:0]        y
);

  localparam int unsigned FRAC = DW - 1;
  localparam logic signed [IW+1:0] ONE   = (IW+2)'(1 << FRAC);
  localparam logic signed [IW+1:0] ONE_M = (IW+2)'((1 << FRAC) - 1);

  logic signed [IW+1:0] xe;
  assign xe = (IW+2)'(x);

  always_comb begin
    if (xe >= ONE)       y = ONE_M[DW-1:0];
    else if (xe <= -ONE) y = {1'b1, {(DW-1){1'b0}}};
    else                 y = xe[DW-1:0];
  end

endmodule
