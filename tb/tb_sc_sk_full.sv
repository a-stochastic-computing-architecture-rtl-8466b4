// tb_sc_sk_full: the SC Sparse Kaczmarz engine at its full default size
// (n = 16 unknowns, m = 10 measurements, 16-bit generators, L = 2^16 - 2
// clocks per iteration, max blocks of 10 cells, carry registers of 20).
//
// Workload: the compressive-sampling cases of the architecture's
// evaluation, one random case for each z = 1, 2, 3: a 16-element x with z
// non-zero entries at random positions, a 10 x 16 matrix A with entries uniform in [-1,1], and
// y = A x + w with white Gaussian noise w at 30 dB SNR.  The non-zero entries
// are drawn from +-[0.2, 0.45] (not [-1,1]) so that y stays inside the
// [-1,1] range of the streams.  lambda = 0.5, N = 200 iterations (twenty
// passes over the rows).
//
// Checks: each iteration against one floating-point Sparse Kaczmarz step
// from the stored v^(k) (x^(k) streams within TOL_X, v^(k+1) within TOL);
// x_out against shrink(v^(N)) within TOL_X; x_out against a floating-point run of the whole
// algorithm from v = 0 within TOL_RUN; and the run length 1 + N (L + 1).
// The RMSE against the true x is printed for the SC engine and for the
// floating-point algorithm.
module tb_sc_sk_full;
  import sc_pkg::*;
  localparam int N = DEF_N, M = DEF_M, W = LFSR_W, L = STREAM_L, NIT = 200;
  localparam real S = real'((1 << W) - 1);
  // TOL_X allows the shrink's worst-case error 0.25 / (M+1) = 0.023 near
  // |v| = lambda (maximum-block analysis) plus stream noise.
  localparam real TOL = 0.02, TOL_X = 0.035, TOL_RUN = 0.06;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done, carry_ovf;
  wr_sel_e wr_sel = SEL_A;
  logic [3:0] wr_row = '0;
  logic [3:0] wr_col = '0;
  logic signed [W:0] wr_data = '0;
  logic [ITER_W-1:0] num_iter = NIT;
  logic signed [W:0] x_out [N], v_out [N];
  always #5 clk = ~clk;

  sc_sk_top dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_row, .wr_col, .wr_data, .start, .num_iter,
    .busy, .done, .carry_ovf, .x_out, .v_out
  );

  int aq [M][N], yq [M], wq [M], lamq;
  real xt [N];

  task automatic wr(wr_sel_e s, int r, int c, int d);
    wr_en = 1; wr_sel = s; wr_row = 4'(r); wr_col = 4'(c); wr_data = (W+1)'(d);
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

  function automatic real urand();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  function automatic real gauss();   // Box-Muller
    real u1 = urand() + 1.0e-6, u2 = urand();
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  task automatic load_problem(int z);
    real y [M], ps, pn, g [M];
    int pos [$];
    foreach (xt[j]) xt[j] = 0.0;
    while (pos.size() < z) begin
      int p = $urandom % N;
      if (xt[p] == 0.0) begin
        pos.push_back(p);
        xt[p] = (0.2 + 0.25 * urand()) * ((($urandom % 2) == 1) ? 1.0 : -1.0);
      end
    end
    ps = 0.0; pn = 0.0;
    for (int i = 0; i < M; i++) begin
      real nrm = 0.0;
      for (int j = 0; j < N; j++) begin
        aq[i][j] = int'((2.0 * urand() - 1.0) * S);
        nrm += (aq[i][j] / S) ** 2;
      end
      y[i] = 0.0;
      for (int j = 0; j < N; j++) y[i] += aq[i][j] / S * xt[j];
      ps += y[i] * y[i];
      g[i] = gauss();
      pn += g[i] * g[i];
      wq[i] = int'(S / nrm);
    end
    // noise scaled to 30 dB signal-to-noise power ratio
    for (int i = 0; i < M; i++) begin
      y[i] += g[i] * $sqrt(ps / pn / 1000.0);
      if (y[i] > 1.0) y[i] = 1.0;
      if (y[i] < -1.0) y[i] = -1.0;
      yq[i] = int'(y[i] * S);
      for (int j = 0; j < N; j++) wr(SEL_A, i, j, aq[i][j]);
      wr(SEL_Y, i, 0, yq[i]);
      wr(SEL_INVNORM, i, 0, wq[i]);
    end
    lamq = int'(0.5 * S);
    wr(SEL_LAMBDA, 0, 0, lamq);
  endtask

  task automatic run_case(int z);
    int  cyc, xc [N], row;
    real vk [N], vf [N], lam, maxerr_v, maxerr_x, se, sef;
    load_problem(z);
    lam = lamq / S;
    maxerr_v = 0.0; maxerr_x = 0.0;
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
          real vn = vk[j] + aq[row][j] / S * (wq[row] / S) * e;
          if (absr(dut.v_cnt[j] / S - vn) > maxerr_v) maxerr_v = absr(dut.v_cnt[j] / S - vn);
        end
      end
      @(posedge clk); #1;
      cyc++;
    end
    $display("z = %0d: %0d clocks, max |x^(k) error| %f, max |v^(k+1) error| %f", z, cyc, maxerr_x, maxerr_v);
    checks++; if (cyc != 1 + NIT * (L + 1)) begin failures++; $display("FAIL run length"); end
    checks++; if (maxerr_x > TOL_X) begin failures++; $display("FAIL x^(k) streams"); end
    checks++; if (maxerr_v > TOL) begin failures++; $display("FAIL v^(k+1)"); end
    // floating-point Sparse Kaczmarz on the stored problem, from v = 0
    foreach (vf[j]) vf[j] = 0.0;
    for (int k = 1; k <= NIT; k++) begin
      int i = (k - 1) % M;
      real e = yq[i] / S;
      for (int j = 0; j < N; j++) e -= aq[i][j] / S * shrink(vf[j], lam);
      for (int j = 0; j < N; j++) vf[j] += aq[i][j] / S * (wq[i] / S) * e;
    end
    se = 0.0; sef = 0.0;
    for (int j = 0; j < N; j++) begin
      real xh = x_out[j] / S;
      $display("x[%2d] true %7.3f  float SK %7.3f  SC %7.3f", j, xt[j], shrink(vf[j], lam), xh);
      checks++;
      if (absr(xh - shrink(vk[j], lam)) > TOL_X) begin failures++; $display("FAIL x_out vs shrink(v^(N))"); end
      checks++;
      if (absr(xh - shrink(vf[j], lam)) > TOL_RUN) begin failures++; $display("FAIL x_out vs floating-point run"); end
      se += (xh - xt[j]) ** 2;
      sef += (shrink(vf[j], lam) - xt[j]) ** 2;
    end
    $display("z = %0d: RMSE against true x: SC %f, floating point %f", z, $sqrt(se / N), $sqrt(sef / N));
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int z = 1; z <= 3; z++) run_case(z);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * NIT * (L + 1) + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
