// mvm_buffer: intermediate buffer for the eight MVM result vectors.
//
// When the MVMs finish the products of a time step, `snap` copies all
// eight N-element result vectors (ACC_W bits each) into registers in one
// cycle. The MVMs are then free to start accumulating the next time step
// while the element-wise stages keep reading this step's values here, one
// node at a time. Two read ports with combinational output serve the two
// node indices the schedule needs in the same cycle: port A (node j+1,
// forget/candidate/input gates) and port B (node j, output gate). The
// buffer follows the paper's intermediate buffers; their organisation is
// this design's choice. The buffer has no reset: nothing reads it before
// the first snap.
module mvm_buffer #(
  parameter int unsigned N     = elsa_pkg::DEF_NH,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W,
  parameter int unsigned NM    = elsa_pkg::NUM_MVM,
  localparam int unsigned JW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                                   clk,
  input  logic                                   snap,
  input  logic signed [NM-1:0][N-1:0][ACC_W-1:0] z_in,
  input  logic [JW-1:0]                          idx_a,
  input  logic [JW-1:0]                          idx_b,
  output logic signed [NM-1:0][ACC_W-1:0]        out_a,
  output logic signed [NM-1:0][ACC_W-1:0]        out_b
);

  logic signed [NM-1:0][N-1:0][ACC_W-1:0] buf_q;

  // not reset: the schedule reads the buffer only after the first snap
  always_ff @(posedge clk) begin
    if (snap) buf_q <= z_in;
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      out_a[m] = buf_q[m][idx_a];
      out_b[m] = buf_q[m][idx_b];
    end
  end

endmodule
