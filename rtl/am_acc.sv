// am_acc: the per-product half of the accelerated approximate multiplier:
// preprocessing unit, bit-select mux, XOR and up-down counter.
//
// At `start` the preprocessing unit presets the up-down counter with
// +/-(|N(W)|>>1): the inverted sign bit of X would have appeared on half of
// the original stream's cycles, and the XOR with W's sign decides whether
// each of those counts up or down, so the sign of the preset is + when
// (~X_msb xor W_msb) is 1 and - otherwise. With `accumulate` high the
// preset is added to the counter instead of replacing it, which turns the
// counter into the accumulator of a MAC (MVM) or into the adder of the
// EMA unit. In each later stream cycle the mux picks X[sel], the XOR with
// W's sign gives the count direction and the counter moves by one.
//
// The counter saturates at the limits of its ACC_W-bit two's complement
// range on every step; the paper widens the counter "by a few bits" but
// does not say what happens at its ends, so saturation is this design's
// choice. X is registered at start so the source may change afterwards.
module am_acc
#(
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W,
  localparam int unsigned SW   = $clog2(DW)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    accumulate,  // add to the counter at start
  input  logic [DW-1:0]           x,           // bit-stream operand
  input  logic                    w_msb,       // sign of W, with start
  input  logic [DW-2:0]           k,           // |N(W)|>>1, with start
  input  logic                    step,        // stream cycle
  input  logic [SW-1:0]           sel,         // bit of X for this cycle
  input  logic                    w_neg_q,     // sign of W during the stream
  output logic signed [ACC_W-1:0] acc
);

  localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((1 << (ACC_W-1)) - 1);
  localparam logic signed [ACC_W:0] MINV = -(ACC_W+1)'(1 << (ACC_W-1));

  logic [DW-1:0]           xr;
  logic signed [ACC_W:0]   preset, base, sum_start, sum_step;
  logic signed [ACC_W-1:0] acc_start, acc_step;

  // preprocessing unit
  assign preset = (~x[DW-1] ^ w_msb) ? (ACC_W+1)'(k) : -(ACC_W+1)'(k);
  assign base   = accumulate ? (ACC_W+1)'(acc) : '0;
  assign sum_start = base + preset;
  assign sum_step  = (ACC_W+1)'(acc) + (((xr[sel] ^ w_neg_q) == 1'b1) ? (ACC_W+1)'(1) : -(ACC_W+1)'(1));

  always_comb begin
    if (sum_start > MAXV)      acc_start = MAXV[ACC_W-1:0];
    else if (sum_start < MINV) acc_start = MINV[ACC_W-1:0];
    else                       acc_start = sum_start[ACC_W-1:0];
    if (sum_step > MAXV)       acc_step = MAXV[ACC_W-1:0];
    else if (sum_step < MINV)  acc_step = MINV[ACC_W-1:0];
    else                       acc_step = sum_step[ACC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xr  <= '0;
      acc <= '0;
    end else if (start) begin
      xr  <= x;
      acc <= acc_start;
    end else if (step) begin
      acc <= acc_step;
    end
  end

endmodule
