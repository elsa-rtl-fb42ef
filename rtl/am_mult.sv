// am_mult: one accelerated approximate multiplier (AM), Z ~= X * W.
//
// X and W are DW-bit two's complement fractions in [-1, 1). W sets the
// latency: after the start cycle, in which the preprocessing unit presets
// the up-down counter, the unit runs |N(W)|>>1 stream cycles, N(W) being
// W's numerator (W * 2^(DW-1)). Z is the up-down counter in the same
// scale as the inputs (units of 2^-(DW-1)), ACC_W bits wide, saturating.
// With DW = 4, X = 0.101 and W = 0.110 the counter is preset to 3, the
// stream X2 X1 X2 gives +1 -1 +1 and Z = 4/8, as in the worked example of
// the accelerated AM.
//
// Interface: pulse `start` with x, w and accumulate valid. `busy` marks
// stream cycles, `last` the final cycle of the operation; z is final in
// the cycle after `last`. With `accumulate` the product is added to the
// present z, which the EMA unit uses to add its two products.
module am_mult
#(
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W,
  localparam int unsigned SW   = $clog2(DW)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    accumulate,
  input  logic [DW-1:0]           x,
  input  logic [DW-1:0]           w,
  output logic signed [ACC_W-1:0] z,
  output logic                    busy,
  output logic                    last
);

  logic [DW-2:0] k;
  logic          w_neg_q;
  logic [SW-1:0] sel;

  am_seq #(.DW(DW)) u_seq (
    .clk, .rst_n, .start, .w, .k, .w_neg_q, .busy, .last, .sel
  );

  am_acc #(.DW(DW), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .start, .accumulate, .x,
    .w_msb(w[DW-1]), .k, .step(busy), .sel, .w_neg_q, .acc(z)
  );

endmodule
