// elsa_top: one LSTM layer on approximate multipliers with a multi-level
// elastic pipeline.
//
// The layer computes, for t = 1..T and N hidden nodes,
//   f,i,o = HSig(W_x* x_t + W_h* h_{t-1} + b_*),  Chat = HTanh(W_xc x_t + W_hc h_{t-1} + b_c)
//   C_t = i .* Chat + f .* C_{t-1},               h_t = o .* HTanh(C_t)
// with h_0 = C_0 = 0. The input vector has N elements (pad a shorter
// input with zeros; a zero element costs no multiplier cycles).
//
// Blocks: eight MVM units (one per weight matrix, N approximate
// multipliers each, column by column), the MVM, EMA and EM mini
// controllers, the top controller, the intermediate buffer for the MVM
// results, four ternary adders, three hard sigmoids and two hard tanh
// units, the EMA unit (memory state) and the EM unit (hidden state), and
// the memories: eight weight memories (one N*DW-bit word per column), four
// bias memories, the input-sequence memory, the output (h) sequence memory
// and the memory-state memory. The blocks and the schedule follow the
// paper; the host interface and memory organisation are this design's.
//
// Number format: 8-bit fractions (1 sign + 7 fraction bits) for all stored
// values, 11-bit accumulators; see elsa_pkg.
//
// Host interface (use only while `busy` is low):
//   w_we/w_mat/w_row/w_col/w_data  write W[w_mat][w_row][w_col]; w_mat =
//        2*gate + 0 for W_x, 2*gate + 1 for W_h, gate order f, c, i, o.
//   b_we/b_gate/b_idx/b_data       write bias b_gate[b_idx].
//   x_we/x_addr/x_data             write x_t[j] at address t*N + j.
//   h_re/h_addr -> h_data          read h_t[j] (address t*N + j), one
//        cycle latency; while busy the port belongs to nobody else, but
//        the layer only writes it.
//   start with seq_len = T (1..T_MAX) runs the layer; `done` pulses once
//   when h_1..h_T are all written.
module elsa_top
  import elsa_pkg::*;
#(
  parameter int unsigned N     = elsa_pkg::DEF_NH,
  parameter int unsigned DW    = elsa_pkg::DEF_DW,
  parameter int unsigned ACC_W = elsa_pkg::DEF_ACC_W,
  parameter int unsigned T_MAX = elsa_pkg::DEF_T_MAX,
  localparam int unsigned JW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned TW   = $clog2(T_MAX + 1),
  localparam int unsigned XD   = T_MAX * N,
  localparam int unsigned XAW  = $clog2(XD)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [TW-1:0]  seq_len,
  output logic           busy,
  output logic           done,
  input  logic           w_we,
  input  logic [2:0]     w_mat,
  input  logic [JW-1:0]  w_row,
  input  logic [JW-1:0]  w_col,
  input  logic [DW-1:0]  w_data,
  input  logic           b_we,
  input  logic [1:0]     b_gate,
  input  logic [JW-1:0]  b_idx,
  input  logic [DW-1:0]  b_data,
  input  logic           x_we,
  input  logic [XAW-1:0] x_addr,
  input  logic [DW-1:0]  x_data,
  input  logic           h_re,
  input  logic [XAW-1:0] h_addr,
  output logic [DW-1:0]  h_data
);

  localparam int unsigned NM = NUM_MVM;
  localparam int unsigned SW = ACC_W + 2;

  // ---------------- controllers ----------------
  logic          mvm_start_t, mvm_full, mvm_done, ema_start, em_start, ema_done, em_done;
  logic [JW-1:0] mvm_pcol, idx_a, idx_b, idx_a_n, idx_b_n, idx_e, idx_e_n, j;
  logic [TW-1:0] mvm_t, t;
  logic          snap, st2_en, st45_en, h_we, first_step;
  top_state_e    tc_state;

  top_ctrl #(.N(N), .T_MAX(T_MAX)) u_topc (
    .clk, .rst_n, .start, .seq_len,
    .mvm_done, .ema_done, .em_done,
    .mvm_start(mvm_start_t), .mvm_full, .mvm_pcol, .mvm_t,
    .ema_start, .em_start, .snap, .st2_en, .st45_en,
    .idx_a, .idx_b, .idx_a_n, .idx_b_n, .idx_e, .idx_e_n,
    .h_we, .t, .j, .first_step, .busy, .done, .state(tc_state)
  );

  logic          rd_en, mvm_go, mvm_first;
  logic [JW-1:0] rd_col;
  logic [NM-1:0] mvm_last;
  mvmc_state_e   mc_state;

  mvm_ctrl #(.N(N)) u_mvmc (
    .clk, .rst_n, .start(mvm_start_t), .full(mvm_full), .pcol(mvm_pcol),
    .all_last(&mvm_last), .rd_en, .rd_col, .mvm_start(mvm_go),
    .mvm_first, .done(mvm_done), .state(mc_state)
  );

  // ---------------- memories ----------------
  logic [NM-1:0][N-1:0][DW-1:0] wcol;
  for (genvar m = 0; m < NM; m++) begin : g_wmem
    sram_1r1w #(.DEPTH(N), .LANES(N), .LANE_W(DW)) u_wmem (
      .clk, .we(w_we && w_mat == 3'(m)), .waddr(w_col), .wlane(w_row),
      .wdata(w_data), .re(rd_en), .raddr(rd_col), .rdata(wcol[m])
    );
  end

  logic [NUM_GATES-1:0][DW-1:0] bias;
  for (genvar g = 0; g < NUM_GATES; g++) begin : g_bmem
    sram_1r1w #(.DEPTH(N), .LANES(1), .LANE_W(DW)) u_bmem (
      .clk, .we(b_we && b_gate == 2'(g)), .waddr(b_idx), .wlane(1'b0),
      .wdata(b_data), .re(1'b1),
      .raddr((g == int'(GATE_O)) ? idx_b_n : idx_a_n), .rdata(bias[g])
    );
  end

  // input sequence: the MVMs read x_{mvm_t}[rd_col]
  logic [DW-1:0]  x_q;
  logic [XAW-1:0] x_raddr;
  assign x_raddr = XAW'(mvm_t) * XAW'(N) + XAW'(rd_col);
  sram_1r1w #(.DEPTH(XD), .LANES(1), .LANE_W(DW)) u_xmem (
    .clk, .we(x_we), .waddr(x_addr), .wlane(1'b0), .wdata(x_data),
    .re(rd_en), .raddr(x_raddr), .rdata(x_q)
  );

  // hidden-state sequence: written by EM, read by the host
  logic [DW-1:0]  h_res;
  logic [XAW-1:0] h_waddr;
  assign h_waddr = XAW'(t) * XAW'(N) + XAW'(j);
  sram_1r1w #(.DEPTH(XD), .LANES(1), .LANE_W(DW)) u_hmem (
    .clk, .we(h_we), .waddr(h_waddr), .wlane(1'b0), .wdata(h_res),
    .re(h_re), .raddr(h_addr), .rdata(h_data)
  );

  // memory state C: read C_{t-1}[e] for the EMA, write C_t[e] back
  logic [DW-1:0] c_q, c_res;
  sram_1r1w #(.DEPTH(N), .LANES(1), .LANE_W(DW)) u_cmem (
    .clk, .we(ema_done), .waddr(idx_e), .wlane(1'b0), .wdata(c_res),
    .re(1'b1), .raddr(idx_e_n), .rdata(c_q)
  );

  // ---------------- stage 1: eight MVMs ----------------
  logic signed [NM-1:0][N-1:0][ACC_W-1:0] mvm_z;
  logic [NM-1:0] mvm_busy;
  logic [DW-1:0] h_r;

  for (genvar m = 0; m < NM; m++) begin : g_mvm
    // even units multiply by x_t, odd ones by h_{t-1} (0 before the first step)
    logic [DW-1:0] y;
    assign y = (m % 2 == 0) ? x_q : (mvm_full ? '0 : h_r);
    mvm #(.N(N), .DW(DW), .ACC_W(ACC_W)) u_mvm (
      .clk, .rst_n, .start(mvm_go), .first(mvm_first), .col(wcol[m]), .y,
      .z(mvm_z[m]), .busy(mvm_busy[m]), .last(mvm_last[m])
    );
  end

  logic signed [NM-1:0][ACC_W-1:0] pre_a, pre_b;
  mvm_buffer #(.N(N), .ACC_W(ACC_W), .NM(NM)) u_buf (
    .clk, .snap, .z_in(mvm_z), .idx_a, .idx_b, .out_a(pre_a), .out_b(pre_b)
  );

  // ---------------- stages 2, 4, 5 ----------------
  logic signed [SW-1:0] s_f, s_c, s_i, s_o;
  ternary_adder #(.DW(DW), .ACC_W(ACC_W)) u_add_f (.a(pre_a[2*GATE_F]), .b(pre_a[2*GATE_F+1]), .bias(bias[GATE_F]), .sum(s_f));
  ternary_adder #(.DW(DW), .ACC_W(ACC_W)) u_add_c (.a(pre_a[2*GATE_C]), .b(pre_a[2*GATE_C+1]), .bias(bias[GATE_C]), .sum(s_c));
  ternary_adder #(.DW(DW), .ACC_W(ACC_W)) u_add_i (.a(pre_a[2*GATE_I]), .b(pre_a[2*GATE_I+1]), .bias(bias[GATE_I]), .sum(s_i));
  ternary_adder #(.DW(DW), .ACC_W(ACC_W)) u_add_o (.a(pre_b[2*GATE_O]), .b(pre_b[2*GATE_O+1]), .bias(bias[GATE_O]), .sum(s_o));

  logic [DW-1:0] a_f, a_c, a_i, a_o, a_tc;
  logic [DW-1:0] f_r, ch_r, i_r, o_r, tc_r, c_r;
  hsig  #(.DW(DW), .IW(SW)) u_sig_f  (.x(s_f), .y(a_f));
  htanh #(.DW(DW), .IW(SW)) u_tanh_c (.x(s_c), .y(a_c));
  hsig  #(.DW(DW), .IW(SW)) u_sig_i  (.x(s_i), .y(a_i));
  hsig  #(.DW(DW), .IW(SW)) u_sig_o  (.x(s_o), .y(a_o));
  htanh #(.DW(DW), .IW(DW)) u_tanh_m (.x(c_r),  .y(a_tc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_r  <= '0;
      ch_r <= '0;
      i_r  <= '0;
      o_r  <= '0;
      tc_r <= '0;
      c_r  <= '0;
      h_r  <= '0;
    end else begin
      if (st2_en) begin
        f_r  <= a_f;
        ch_r <= a_c;
        i_r  <= a_i;
      end
      if (st45_en) begin
        o_r  <= a_o;
        tc_r <= a_tc;
      end
      if (ema_done) c_r <= c_res;
      if (em_done)  h_r <= h_res;
    end
  end

  // ---------------- stage 3: EMA ----------------
  logic          ema_s1, ema_s2, ema_last, ema_busy;
  emc_state_e    emac_state;
  ema_ctrl u_emac (
    .clk, .rst_n, .start(ema_start), .am_last(ema_last),
    .start1(ema_s1), .start2(ema_s2), .done(ema_done), .state(emac_state)
  );
  ema #(.DW(DW), .ACC_W(ACC_W)) u_ema (
    .clk, .rst_n, .start1(ema_s1), .start2(ema_s2),
    .i(i_r), .chat(ch_r), .f(f_r), .cprev(first_step ? '0 : c_q),
    .c(c_res), .busy(ema_busy), .last(ema_last)
  );

  // ---------------- stage 6: EM ----------------
  logic       em_go, em_last, em_busy;
  emc_state_e emc_state;
  em_ctrl u_emc (
    .clk, .rst_n, .start(em_start), .am_last(em_last),
    .am_start(em_go), .done(em_done), .state(emc_state)
  );
  em #(.DW(DW), .ACC_W(ACC_W)) u_em (
    .clk, .rst_n, .start(em_go), .o(o_r), .tc(tc_r), .h(h_res),
    .busy(em_busy), .last(em_last)
  );

endmodule
