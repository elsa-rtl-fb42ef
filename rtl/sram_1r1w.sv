// sram_1r1w: synchronous on-chip memory with one write and one read port.
//
// Stands for the SRAM macros that hold the network parameters (weights,
// biases), the input sequence and the computed hidden and memory states.
// A word is LANES lanes of LANE_W bits; the write port writes one lane of
// one word per cycle, the read port returns a whole word one cycle after
// the address is presented (registered output, held while `re` is low).
// The weight memories use one word per matrix column so that a whole
// column reaches the MVM in one read. The memory is an array; the paper
// used library SRAM macros whose interface it does not give, so ports,
// width and read latency are this design's choices. Contents are not
// reset.
module sram_1r1w #(
  parameter int unsigned DEPTH  = 128,
  parameter int unsigned LANES  = 1,
  parameter int unsigned LANE_W = elsa_pkg::DEF_DW,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [AW-1:0]                  waddr,
  input  logic [LW-1:0]                  wlane,
  input  logic [LANE_W-1:0]              wdata,
  input  logic                           re,
  input  logic [AW-1:0]                  raddr,
  output logic [LANES-1:0][LANE_W-1:0]   rdata
);

  logic [LANES-1:0][LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
