// ema: element-wise multiplier and adder for the memory state,
// C_j = i_j * Chat_j + f_j * C_{t-1,j}.
//
// A single accelerated approximate multiplier does both products in turn.
// Mult1 multiplies Chat_j by i_j (i_j sets the latency) and presets the
// up-down counter; Mult2 multiplies C_{t-1,j} by f_j (f_j sets the
// latency) and adds into the same counter, so the counter is also the
// adder and the unit takes (|N(i)|>>1) + (|N(f)|>>1) stream cycles plus
// one start cycle per product, as in the (i + f)/2 term of the
// performance model. Sharing one multiplier between the two products is
// this design's reading of "two consecutive multiplications"; the result
// is saturated to 8 bits, also this design's choice.
//
// Interface: `start1` (with i, chat, f, cprev valid) and later `start2`
// come from the EMA mini controller; f and cprev are registered at
// start1. `last` marks the final cycle of each product; c is valid after
// the last cycle of Mult2.
module ema #(
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start1,
  input  logic          start2,
  input  logic [DW-1:0] i,
  input  logic [DW-1:0] chat,
  input  logic [DW-1:0] f,
  input  logic [DW-1:0] cprev,
  output logic [DW-1:0] c,
  output logic          busy,
  output logic          last
);

  localparam logic signed [ACC_W-1:0] HI = ACC_W'((1 << (DW-1)) - 1);
  localparam logic signed [ACC_W-1:0] LO = -ACC_W'(1 << (DW-1));

  logic [DW-1:0]           f_q, cprev_q;
  logic signed [ACC_W-1:0] z;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q     <= '0;
      cprev_q <= '0;
    end else if (start1) begin
      f_q     <= f;
      cprev_q <= cprev;
    end
  end

  am_mult #(.DW(DW), .ACC_W(ACC_W)) u_am (
    .clk, .rst_n,
    .start(start1 | start2),
    .accumulate(start2),
    .x(start1 ? chat : cprev_q),
    .w(start1 ? i : f_q),
    .z, .busy, .last
  );

  always_comb begin
    if (z > HI)      c = HI[DW-1:0];
    else if (z < LO) c = LO[DW-1:0];
    else             c = z[DW-1:0];
  end

endmodule
