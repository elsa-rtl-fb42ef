// am_seq: the shared sequencing half of the accelerated approximate
// multiplier (AM): the down counter and the selector FSM.
//
// The AM forms an approximate product X*W of two n-bit fractions by
// running a bit stream for |N(W)| cycles, N(W) being the numerator of W.
// In the original stream the inverted sign bit of X appears on every odd
// cycle and X_{n-1-k} on cycles whose index has k trailing zeros. The
// accelerated AM folds all the sign-bit cycles into a preset of the
// up-down counter (see am_acc), so only the even cycles remain: |N(W)|/2
// cycles, where cycle c selects bit X_{n-2-tz(c)}, tz = trailing zeros.
//
// This module holds the parts one multiplier, or a whole row of them in
// the MVM, shares: a down counter loaded with |N(W)|>>1 and a selector
// counter with 2^(n-1) states whose trailing-zero count drives the bit
// select. Both follow the paper; the one-hot-free trailing-zero decode is
// this design's own.
//
// Timing: `start` is the preprocessing cycle (counters load). Then `busy`
// is high for exactly |N(W)|>>1 stream cycles. `last` is high in the final
// cycle of an operation (the start cycle itself when |N(W)|>>1 is 0) and
// stays high while idle, so a controller can launch the next operation in
// the following cycle.
module am_seq
#(
  parameter int unsigned DW = elsa_pkg::DEF_DW,
  localparam int unsigned SW = $clog2(DW)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] w,        // latency operand, two's complement
  output logic [DW-2:0] k,        // |N(w)| >> 1, valid with start
  output logic          w_neg_q,  // sign of w latched at start
  output logic          busy,     // a stream cycle happens this cycle
  output logic          last,     // operation ends this cycle
  output logic [SW-1:0] sel       // bit of X selected this stream cycle
);

  logic [DW-1:0] mag;
  logic [DW-2:0] dcnt;   // down counter
  logic [DW-2:0] scnt;   // selector FSM, 2^(n-1) states
  logic [SW-1:0] tz;

  // |N(w)|; the most negative value gives 2^(n-1), which still fits
  assign mag = w[DW-1] ? (~w + 1'b1) : w;
  assign k   = mag[DW-1:1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcnt    <= '0;
      scnt    <= '0;
      w_neg_q <= 1'b0;
    end else if (start) begin
      dcnt    <= k;
      scnt    <= {{(DW-2){1'b0}}, 1'b1};
      w_neg_q <= w[DW-1];
    end else if (dcnt != '0) begin
      dcnt <= dcnt - 1'b1;
      scnt <= scnt + 1'b1;
    end
  end

  always_comb begin
    tz = '0;
    for (int b = DW-2; b >= 0; b--) begin
      if (scnt[b]) tz = SW'(b);
    end
  end

  assign sel  = SW'(DW-2) - tz;
  assign busy = (dcnt != '0);
  assign last = start ? (k == '0) : (dcnt <= 1);

endmodule
