// tb_sc_sk_rmse: estimation accuracy of the SC Sparse Kaczmarz engine over
// several random compressive-sampling cases, at every default parameter
// (n = 16, m = 10, 16-bit generators, L = 2^16 - 2, max blocks of 10 cells).
//
// Workload: NCASE cases for each z = 1, 2, 3 non-zero entries, drawn as in
// the architecture's evaluation: A uniform in [-1,1], y = A x + w at 30 dB
// SNR, lambda = 0.5, N = 200 iterations.  Non-zero entries are drawn from
// +-[0.2, 0.45] so that y stays inside [-1,1].  The engine only runs here; its
// internal streams are not monitored, which keeps each case to the DUT's own
// simulation time (13.1 million clocks).
//
// For comparison the same problems are solved with floating-point Sparse
// Kaczmarz and with a binary fixed-point model at B = 8..12 bits.  The
// fixed-point model is this testbench's own: every stored value, product and
// sum is rounded to a B-bit fraction in [-1,1) and saturated.  The RMSE
// sqrt(mean ||x - x_hat||^2 / n) against the true x is averaged per z and
// printed for all of them.
//
// Checks: every run has the length 1 + N (L + 1) clocks, and for each z the
// SC mean RMSE stays within RMSE_MARGIN of the floating-point mean RMSE.  The
// fixed-point figures are printed only: the model is not the published
// fixed-point design, and a few cases are too few to rank close bit widths.
module tb_sc_sk_rmse;
  import sc_pkg::*;
  localparam int N = DEF_N, M = DEF_M, W = LFSR_W, L = STREAM_L, NIT = 200, NCASE = 2;
  localparam real S = real'((1 << W) - 1);
  localparam real RMSE_MARGIN = 0.02;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done, carry_ovf;
  wr_sel_e wr_sel = SEL_A;
  logic [3:0] wr_row = '0;
  logic [3:0] wr_col = '0;
  logic signed [W:0] wr_data = '0;
  logic [ITER_W-1:0] num_iter = ITER_W'(NIT);
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

  function automatic real urand();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  function automatic real gauss();   // Box-Muller
    real u1 = urand() + 1.0e-6, u2 = urand();
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  // round to a B-bit two's-complement fraction and saturate to [-1, 1 - 2^-(B-1)]
  function automatic real q(real v, int b);
    real step = 1.0 / real'(1 << (b - 1));
    real r = $floor(v / step + 0.5) * step;
    if (r > 1.0 - step) r = 1.0 - step;
    if (r < -1.0) r = -1.0;
    return r;
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
    for (int i = 0; i < M; i++) begin
      y[i] += g[i] * $sqrt(ps / pn / 1000.0);   // 30 dB signal-to-noise ratio
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

  // squared error of Sparse Kaczmarz on the loaded problem; b = 0 is floating point
  function automatic real sk_model_se(int b);
    real vf [N], lam, se;
    lam = lamq / S;
    foreach (vf[j]) vf[j] = 0.0;
    for (int k = 1; k <= NIT; k++) begin
      int i = (k - 1) % M;
      real e = yq[i] / S;
      if (b == 0) begin
        for (int j = 0; j < N; j++) e -= aq[i][j] / S * shrink(vf[j], lam);
        for (int j = 0; j < N; j++) vf[j] += aq[i][j] / S * (wq[i] / S) * e;
      end else begin
        real c;
        e = q(e, b);
        for (int j = 0; j < N; j++) e = q(e - q(q(aq[i][j] / S, b) * shrink(vf[j], lam), b), b);
        c = q(q(wq[i] / S, b) * e, b);
        for (int j = 0; j < N; j++) vf[j] = q(vf[j] + q(q(aq[i][j] / S, b) * c, b), b);
      end
    end
    se = 0.0;
    for (int j = 0; j < N; j++) se += (shrink(vf[j], lam) - xt[j]) ** 2;
    return se;
  endfunction

  initial begin
    real r_sc [4], r_fl [4], r_fx [4][13];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int z = 1; z <= 3; z++) begin
      r_sc[z] = 0.0; r_fl[z] = 0.0;
      for (int b = 8; b <= 12; b++) r_fx[z][b] = 0.0;
      for (int c = 0; c < NCASE; c++) begin
        int cyc;
        real se;
        load_problem(z);
        start = 1; @(posedge clk); #1; start = 0;
        cyc = 0;
        while (!done && cyc < 2 * NIT * (L + 1)) begin
          @(posedge clk); #1;
          cyc++;
        end
        checks++; if (cyc != 1 + NIT * (L + 1)) begin failures++; $display("FAIL run length %0d", cyc); end
        se = 0.0;
        for (int j = 0; j < N; j++) se += (x_out[j] / S - xt[j]) ** 2;
        r_sc[z] += $sqrt(se / N) / NCASE;
        r_fl[z] += $sqrt(sk_model_se(0) / N) / NCASE;
        for (int b = 8; b <= 12; b++) r_fx[z][b] += $sqrt(sk_model_se(b) / N) / NCASE;
        repeat (3) @(posedge clk);
        #1;
      end
      $display("z = %0d, %0d cases: mean RMSE SC %f, floating point %f", z, NCASE, r_sc[z], r_fl[z]);
      for (int b = 8; b <= 12; b++) $display("        fixed point %2d bit: %f", b, r_fx[z][b]);
      checks++;
      if (r_sc[z] > r_fl[z] + RMSE_MARGIN) begin failures++; $display("FAIL SC RMSE far above floating point"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * NCASE * (NIT * (L + 1) + 1000) + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
