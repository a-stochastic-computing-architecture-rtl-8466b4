// sc_sk_top: stochastic-computing Sparse Kaczmarz estimator.
//
// Solves y = A x + w for x by N iterations of the Sparse Kaczmarz update
//   x^(k)   = shrink(v^(k), lambda)
//   v^(k+1) = v^(k) + a_i (y_i - a_i^T x^(k)) / ||a_i||^2,  i = (k-1) mod m
// with every arithmetic operation done on two-line bipolar (TLB) streams of
// L bits.  Per iteration: the stored v^(k) and the row values are turned
// into streams (sc_d2s); the shrink and cancellation block gives x^(k); the
// scalar product a_i^T x^(k) is negated (line swap) and added to y_i; the
// sum is multiplied by 1/||a_i||^2, delayed by DELAY clocks, multiplied by
// each a_ij and added to v_j; counters (sc_s2d) turn the result back into
// v^(k+1), which the UPDATE clock stores.  During the last iteration the x
// streams are also counted into x_out, which then holds x^(N) (scaled as
// all stored values: c stands for c / (2^W - 1), counted over L clocks).
// lambda = 0 bypasses the shrink blocks (Kaczmarz / NLMS mode).
//
// Interface: the host loads A, y, 1/||a_i||^2 and lambda through the write
// port (sk_problem_mem) while idle, pulses start with num_iter = N, and
// reads x_out (and v_out) after done.  A run takes 1 + N (L + 1) clocks.
// carry_ovf flags a clock in which an adder or the scalar product lost a
// carry.  The dataflow follows the architecture's block diagram; the
// converters, the sequencing and the clears between iterations are this
// design's choices.
module sc_sk_top
  import sc_pkg::*;
#(
  parameter int unsigned N_DIM  = DEF_N,
  parameter int unsigned M_ROWS = DEF_M,
  parameter int unsigned W      = LFSR_W,
  parameter int unsigned L      = STREAM_L,
  parameter int unsigned M_MAX  = MAX_SR,
  parameter int unsigned DEPTH  = CARRY_D,
  parameter int unsigned DELAY  = DELAY_D,
  localparam int unsigned RW    = (M_ROWS > 1) ? $clog2(M_ROWS) : 1,
  localparam int unsigned CLW   = (N_DIM > 1) ? $clog2(N_DIM) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write port of the problem memory
  input  logic              wr_en,
  input  wr_sel_e           wr_sel,
  input  logic [RW-1:0]     wr_row,
  input  logic [CLW-1:0]    wr_col,
  input  logic signed [W:0] wr_data,
  // run control
  input  logic              start,
  input  logic [ITER_W-1:0] num_iter,
  output logic              busy,
  output logic              done,
  output logic              carry_ovf,
  // results
  output logic signed [W:0] x_out [N_DIM],
  output logic signed [W:0] v_out [N_DIM]
);
  // ---------------------------------------------------------------- control
  logic              init, streaming, update, clr, last_iter;
  logic [RW-1:0]     row;
  logic [ITER_W-1:0] iter;

  sk_ctrl #(.M_ROWS(M_ROWS), .L(L)) u_ctrl (
    .clk, .rst_n, .start, .num_iter, .busy, .init, .streaming, .update, .clr,
    .last_iter, .done, .row, .iter
  );

  // ------------------------------------------------------- problem memory
  logic signed [W:0] a_row [N_DIM];
  logic signed [W:0] y_val, inv_norm, lambda_val;

  sk_problem_mem #(.N_DIM(N_DIM), .M_ROWS(M_ROWS), .W(W)) u_mem (
    .clk, .rst_n, .wr_en(wr_en && !busy), .wr_sel, .wr_row, .wr_col, .wr_data,
    .rd_row(row), .a_row, .y_val, .inv_norm, .lambda_val
  );

  // ---------------------------------------------------- v store (v^(k))
  logic signed [W:0] v_mem [N_DIM];
  logic signed [W:0] v_cnt [N_DIM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_DIM; j++) v_mem[j] <= '0;
    end else if (init) begin
      for (int j = 0; j < N_DIM; j++) v_mem[j] <= '0;
    end else if (update) begin
      for (int j = 0; j < N_DIM; j++) v_mem[j] <= v_cnt[j];
    end
  end
  assign v_out = v_mem;

  // ------------------------------------------------------ stream generation
  tlb_t lam_s, y_s, w_s;
  tlb_t a_s [N_DIM];
  tlb_t v_s [N_DIM];

  sc_d2s #(.W(W), .SEED(lfsr_seed(0, W))) u_d2s_lam (.clk, .rst_n, .value(lambda_val), .out_s(lam_s));
  sc_d2s #(.W(W), .SEED(lfsr_seed(1, W))) u_d2s_y   (.clk, .rst_n, .value(y_val),      .out_s(y_s));
  sc_d2s #(.W(W), .SEED(lfsr_seed(2, W))) u_d2s_w   (.clk, .rst_n, .value(inv_norm),   .out_s(w_s));

  for (genvar j = 0; j < N_DIM; j++) begin : g_gen
    sc_d2s #(.W(W), .SEED(lfsr_seed(3 + j, W)))
      u_d2s_a (.clk, .rst_n, .value(a_row[j]), .out_s(a_s[j]));
    sc_d2s #(.W(W), .SEED(lfsr_seed(3 + N_DIM + j, W)))
      u_d2s_v (.clk, .rst_n, .value(v_mem[j]), .out_s(v_s[j]));
  end

  // ------------------------------------------------ shrink and cancellation
  logic bypass;
  tlb_t x_s [N_DIM];

  assign bypass = (lambda_val == '0);

  sc_shrink_cancel #(.N_DIM(N_DIM), .M(M_MAX)) u_shrink (
    .clk, .rst_n, .clr, .bypass, .lam(lam_s.p), .v_s, .x_s
  );

  // ------------------------------------------------- scalar error path
  tlb_t sp_s, e_s, g_s, gd_s;
  logic sp_ovf, e_ovf;

  sc_scalar_product #(.N_DIM(N_DIM), .DEPTH(DEPTH)) u_sp (
    .clk, .rst_n, .clr, .x_s, .a_s, .y_s(sp_s), .overflow(sp_ovf)
  );

  // y_i - a_i^T x : negation of a TLB stream is a swap of its lines
  sc_add #(.DEPTH(DEPTH)) u_err (
    .clk, .rst_n, .clr, .a_s(y_s), .b_s(tlb_neg(sp_s)), .y_s(e_s), .overflow(e_ovf)
  );

  sc_mult u_norm (.a_s(e_s), .b_s(w_s), .y_s(g_s));

  sc_delay #(.DELAY(DELAY)) u_delay (.clk, .rst_n, .clr, .in_s(g_s), .out_s(gd_s));

  // ------------------------------------------------------- vector update
  logic [N_DIM-1:0] upd_ovf;

  for (genvar j = 0; j < N_DIM; j++) begin : g_upd
    tlb_t u_s, vn_s;
    sc_mult u_mul (.a_s(a_s[j]), .b_s(gd_s), .y_s(u_s));
    sc_add #(.DEPTH(DEPTH)) u_add (
      .clk, .rst_n, .clr, .a_s(v_s[j]), .b_s(u_s), .y_s(vn_s), .overflow(upd_ovf[j])
    );
    sc_s2d #(.W(W)) u_s2d_v (
      .clk, .rst_n, .clr, .en(streaming), .in_s(vn_s), .count(v_cnt[j])
    );
    // x^(N): the shrink output of the final iteration goes to the memory
    sc_s2d #(.W(W)) u_s2d_x (
      .clk, .rst_n, .clr(init), .en(streaming && last_iter), .in_s(x_s[j]), .count(x_out[j])
    );
  end

  assign carry_ovf = streaming && (sp_ovf || e_ovf || (|upd_ovf));
endmodule
