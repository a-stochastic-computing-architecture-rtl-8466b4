// tb_sc_sk_lms: the engine used as an adaptive filter.  When the rows of A
// are the shifted input vectors of a convolution, a_i = (u_i, u_{i-1}, ...,
// u_{i-n+1}), and every row is used once (N = m), the Kaczmarz update is the
// normalised LMS (NLMS) filter with lambda = 0 and the Sparse LMS filter with
// lambda > 0.  Size: n = 8 taps, m = N = 40 samples, 12-bit generators.
//
// The unknown system h has 2 non-zero taps; y_i = a_i^T h.  The input is
// u = +-[0.5, 1] so that ||a_i||^2 >= 2 and 1/||a_i||^2 fits.  Both modes
// are run.  Every iteration is checked against one floating-point NLMS /
// Sparse LMS step from the stored v (x streams within TOL_X, v within TOL);
// x_out must match a floating-point run of the whole filter within TOL_RUN.
module tb_sc_sk_lms;
  import sc_pkg::*;
  localparam int N = 8, M = 40, W = 12, L = (1 << W) - 2, NIT = M;
  localparam real S = real'((1 << W) - 1);
  localparam real TOL = 0.04, TOL_X = 0.05, TOL_RUN = 0.08;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done, carry_ovf;
  wr_sel_e wr_sel = SEL_A;
  logic [5:0] wr_row = '0;
  logic [2:0] wr_col = '0;
  logic signed [W:0] wr_data = '0;
  logic [ITER_W-1:0] num_iter = ITER_W'(NIT);
  logic signed [W:0] x_out [N], v_out [N];
  always #5 clk = ~clk;

  sc_sk_top #(.N_DIM(N), .M_ROWS(M), .W(W), .L(L)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_row, .wr_col, .wr_data, .start, .num_iter,
    .busy, .done, .carry_ovf, .x_out, .v_out
  );

  int aq [M][N], yq [M], wq [M], lamq;
  real h [N];

  task automatic wr(wr_sel_e s, int r, int c, int d);
    wr_en = 1; wr_sel = s; wr_row = 6'(r); wr_col = 3'(c); wr_data = (W+1)'(d);
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  function automatic real shrink(real v, real lam);
    real m = (v < 0) ? -v : v;
    if (m <= lam) return 0.0;
    return (v < 0) ? -(m - lam) : (m - lam);
  endfunction

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  task automatic load_problem(real lam);
    real u [M + N];
    foreach (h[j]) h[j] = 0.0;
    h[0] = 0.4; h[3] = -0.3;
    foreach (u[t]) u[t] = (0.5 + real'($urandom % 1000) / 2000.0) * ((($urandom % 2) == 1) ? 1.0 : -1.0);
    for (int i = 0; i < M; i++) begin
      real nrm = 0.0, yv = 0.0;
      for (int j = 0; j < N; j++) begin
        aq[i][j] = int'(u[i + N - 1 - j] * S);   // convolution row: newest sample first
        nrm += (aq[i][j] / S) ** 2;
        yv += aq[i][j] / S * h[j];
      end
      if (yv > 1.0) yv = 1.0;
      if (yv < -1.0) yv = -1.0;
      yq[i] = int'(yv * S);
      wq[i] = int'(S / nrm);
      for (int j = 0; j < N; j++) wr(SEL_A, i, j, aq[i][j]);
      wr(SEL_Y, i, 0, yq[i]);
      wr(SEL_INVNORM, i, 0, wq[i]);
    end
    lamq = int'(lam * S);
    wr(SEL_LAMBDA, 0, 0, lamq);
  endtask

  task automatic run(real lam_in, string name);
    int  cyc, xc [N], row;
    real vk [N], vf [N], lam, maxerr_v, maxerr_x, maxerr_run;
    load_problem(lam_in);
    lam = lamq / S;
    maxerr_v = 0.0; maxerr_x = 0.0; maxerr_run = 0.0;
    foreach (xc[j]) xc[j] = 0;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (!done && cyc < 2 * NIT * (L + 1)) begin
      if (dut.streaming) for (int j = 0; j < N; j++) xc[j] += int'(dut.x_s[j].p) - int'(dut.x_s[j].n);
      if (dut.update) begin
        real xk [N], e;
        row = int'(dut.row);
        for (int j = 0; j < N; j++) begin
          vk[j] = dut.v_mem[j] / S;
          xk[j] = shrink(vk[j], lam);
          if (absr(xc[j] / S - xk[j]) > maxerr_x) maxerr_x = absr(xc[j] / S - xk[j]);
          xc[j] = 0;
        end
        e = yq[row] / S;
        for (int j = 0; j < N; j++) e -= aq[row][j] / S * xk[j];
        for (int j = 0; j < N; j++) begin
          real vn;
          vn = vk[j] + aq[row][j] / S * (wq[row] / S) * e;
          if (absr(dut.v_cnt[j] / S - vn) > maxerr_v) maxerr_v = absr(dut.v_cnt[j] / S - vn);
        end
      end
      @(posedge clk); #1;
      cyc++;
    end
    // floating-point filter over the same samples
    foreach (vf[j]) vf[j] = 0.0;
    for (int i = 0; i < NIT; i++) begin
      real e;
      e = yq[i] / S;
      for (int j = 0; j < N; j++) e -= aq[i][j] / S * shrink(vf[j], lam);
      for (int j = 0; j < N; j++) vf[j] += aq[i][j] / S * (wq[i] / S) * e;
    end
    for (int j = 0; j < N; j++)
      if (absr(x_out[j] / S - shrink(vf[j], lam)) > maxerr_run) maxerr_run = absr(x_out[j] / S - shrink(vf[j], lam));
    $display("%s: %0d clocks, max error x^(k) %f, v^(k+1) %f, final x vs floating point %f",
             name, cyc, maxerr_x, maxerr_v, maxerr_run);
    for (int j = 0; j < N; j++) $write("%7.3f", x_out[j] / S);
    $display("  <- SC estimate of h");
    for (int j = 0; j < N; j++) $write("%7.3f", shrink(vf[j], lam));
    $display("  <- floating point");
    checks++; if (cyc != 1 + NIT * (L + 1)) begin failures++; $display("FAIL run length"); end
    checks++; if (maxerr_x > TOL_X) begin failures++; $display("FAIL x streams"); end
    checks++; if (maxerr_v > TOL) begin failures++; $display("FAIL v update"); end
    checks++; if (maxerr_run > TOL_RUN) begin failures++; $display("FAIL final estimate"); end
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(0.0, "NLMS (lambda = 0)");
    run(0.5, "Sparse LMS (lambda = 0.5)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5 * NIT * (L + 1) + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
