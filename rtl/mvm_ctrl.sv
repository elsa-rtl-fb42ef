// mvm_ctrl: MVM mini controller (states Idle, Full, Partial, Done).
//
// It drives all eight MVM units in lock step. In Full it walks every
// column 0..N-1 of the weight matrices: it reads column c from the weight
// memories (and the matching input element from the input memory), starts
// the MVMs on it in the next cycle, and as soon as every MVM reports its
// final cycle it reads column c+1, so the read of the next column overlaps
// the end of the current one. Full is used once, to fill the pipeline at
// the first time step. In Partial it runs a single given column, which is
// how the top controller overlaps the next time step's MVMs with the
// current step's element-wise work. `first` (column 0) makes the MVMs
// restart their accumulators. Done lasts one cycle and raises `done`,
// after which the MVM results are final.
//
// The Full/Partial/Done structure follows the paper; the read-ahead of
// the next column is this design's choice.
// Timing, from the start cycle to the done cycle inclusive:
//   Full:    2 + sum over columns (1 + max_k), Partial: 3 + max_k,
// with max_k the largest |N(y)|>>1 among the eight MVMs for that column.
module mvm_ctrl
  import elsa_pkg::*;
#(
  parameter int unsigned N   = elsa_pkg::DEF_NH,
  localparam int unsigned JW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          full,      // 1: Full, 0: Partial
  input  logic [JW-1:0] pcol,      // column for Partial
  input  logic          all_last,  // every MVM is in its final cycle
  output logic          rd_en,     // read column rd_col this cycle
  output logic [JW-1:0] rd_col,
  output logic          mvm_start,
  output logic          mvm_first,
  output logic          done,
  output mvmc_state_e   state
);

  mvmc_state_e   st_n;
  logic [JW-1:0] col, col_n;
  logic          pend, pend_n;    // column data arrives this cycle

  always_comb begin
    st_n      = state;
    col_n     = col;
    pend_n    = 1'b0;
    rd_en     = 1'b0;
    rd_col    = col + 1'b1;
    mvm_start = 1'b0;
    mvm_first = (col == '0);
    done      = 1'b0;
    unique case (state)
      MC_IDLE: if (start) begin
        rd_en  = 1'b1;
        rd_col = full ? '0 : pcol;
        col_n  = rd_col;
        pend_n = 1'b1;
        st_n   = full ? MC_FULL : MC_PARTIAL;
      end
      MC_FULL, MC_PARTIAL: begin
        mvm_start = pend;
        if (all_last) begin
          if (state == MC_FULL && col != JW'(N-1)) begin
            rd_en  = 1'b1;
            col_n  = col + 1'b1;
            pend_n = 1'b1;
          end else begin
            st_n = MC_DONE;
          end
        end
      end
      MC_DONE: begin
        done = 1'b1;
        st_n = MC_IDLE;
      end
      default: st_n = MC_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= MC_IDLE;
      col   <= '0;
      pend  <= 1'b0;
    end else begin
      state <= st_n;
      col   <= col_n;
      pend  <= pend_n;
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == MC_IDLE);

endmodule
