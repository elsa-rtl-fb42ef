// hsig: piece-wise linear ("hard") sigmoid, HSig(x) = 0 for x <= -2,
// x/4 + 0.5 in between, 1 for x > 2.
//
// The input is an IW-bit two's complement number with DW-1 fraction bits;
// the output is a DW-bit fraction in [0, 1). The value 1 is not
// representable in that format, so the top of the range is 1 - 2^-(DW-1);
// x/4 rounds towards minus infinity (arithmetic shift). The three pieces
// follow the paper; rounding and the clipped top are this design's.
// Combinational.
module hsig #(
  parameter int unsigned DW = elsa_pkg::DEF_DW,
  parameter int unsigned IW = elsa_pkg::DEF_ACC_W + 2
) (
  input  logic signed [IW-1:0] x,
  output logic [DW-1:0]        y
);

  localparam int unsigned FRAC = DW - 1;
  localparam logic signed [IW+1:0] TWO  = (IW+2)'(2 << FRAC);
  localparam logic signed [IW+1:0] HALF = (IW+2)'(1 << (FRAC-1));
  localparam logic signed [IW+1:0] ONE_M = (IW+2)'((1 << FRAC) - 1);

  logic signed [IW+1:0] xe, lin;

  assign xe  = (IW+2)'(x);
  assign lin = (xe >>> 2) + HALF;

  always_comb begin
    if (xe > TWO)        y = ONE_M[DW-1:0];
    else if (xe <= -TWO) y = '0;
    else if (lin > ONE_M) y = ONE_M[DW-1:0];
    else if (lin < 0)    y = '0;
    else                 y = lin[DW-1:0];
  end

endmodule
