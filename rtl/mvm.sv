// mvm: matrix-vector multiplier built from N approximate multipliers that
// share one selector FSM and one down counter.
//
// The product Z = X * Y of an N x M matrix and an M-vector is formed one
// column at a time: a column of X (one element per row) is multiplied by
// one element y of Y in all rows at once, and the rows' up-down counters
// accumulate the partial products without being cleared between columns.
// Because y is the latency operand of every row, one down counter and one
// selector FSM serve all N rows; each row only has its mux, XOR and
// up-down counter (am_acc). A column therefore takes 1 + (|N(y)|>>1)
// cycles: the start cycle (preprocessing) plus the stream cycles.
//
// Interface: pulse `start` with `col` and `y` valid; `first` marks the
// first column of a product and clears the accumulators instead of adding
// to them. `last` is high in the final cycle of the column (start cycle if
// y's stream is empty, and while idle), so the next column may start in
// the following cycle. z is the running (and, after the last column, the
// final) result, ACC_W bits per row, saturating, scale 2^-(DW-1).
module mvm #(
  parameter int unsigned N     = elsa_pkg::DEF_NH,
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W,
  localparam int unsigned SW   = $clog2(DW)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic                           first,
  input  logic [N-1:0][DW-1:0]           col,
  input  logic [DW-1:0]                  y,
  output logic signed [N-1:0][ACC_W-1:0] z,
  output logic                           busy,
  output logic                           last
);

  logic [DW-2:0] k;
  logic          w_neg_q;
  logic [SW-1:0] sel;

  am_seq #(.DW(DW)) u_seq (
    .clk, .rst_n, .start, .w(y), .k, .w_neg_q, .busy, .last, .sel
  );

  for (genvar r = 0; r < N; r++) begin : g_row
    am_acc #(.DW(DW), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n, .start, .accumulate(!first), .x(col[r]),
      .w_msb(y[DW-1]), .k, .step(busy), .sel, .w_neg_q, .acc(z[r])
    );
  end

endmodule
