// tb_sc_sk_top: end-to-end test of the SC Sparse Kaczmarz engine at reduced
// size (n = 8, m = 4, 12-bit generators, L = 4094, N = 10).
//
// Three runs on a random problem y = A x with a 2-sparse x:
//   1. lambda = 0.5 (Sparse Kaczmarz),
//   2. lambda = 0 (shrink bypassed: ordinary Kaczmarz),
//   3. rows built so that y_i - a_i^T x leaves [-1,1], to force carry loss.
// In runs 1 and 2, every iteration is checked against a floating-point
// evaluation of one Sparse Kaczmarz step started from the v^(k) the engine
// actually stored: the x^(k) streams (counted here) must give
// shrink(v^(k), lambda), and the stored v^(k+1) must match
// v^(k) + a_i w_i (y_i - a_i^T x^(k)) within TOL.  The final x_out must
// match shrink(v^(N)).  The run length must be 1 + N (L + 1) clocks.
// Mechanisms counted (each must occur): shrink zeroing, shrink passing,
// cancellation of a one pair, bypass, carry overflow, row wrap-around,
// iteration update.
module tb_sc_sk_top;
  import sc_pkg::*;
  localparam int N = 8, M = 4, W = 12, L = (1 << W) - 2, NIT = 10;
  localparam real S = real'((1 << W) - 1);
  localparam real TOL = 0.04;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done, carry_ovf;
  wr_sel_e wr_sel = SEL_A;
  logic [1:0] wr_row = '0;
  logic [2:0] wr_col = '0;
  logic signed [W:0] wr_data = '0;
  logic [ITER_W-1:0] num_iter = NIT;
  logic signed [W:0] x_out [N], v_out [N];
  always #5 clk = ~clk;

  sc_sk_top #(.N_DIM(N), .M_ROWS(M), .W(W), .L(L)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_row, .wr_col, .wr_data, .start, .num_iter,
    .busy, .done, .carry_ovf, .x_out, .v_out
  );

  // problem as stored (integers, value = q / S)
  int aq [M][N], yq [M], wq [M], lamq;

  // mechanism counters
  int n_zero = 0, n_pass = 0, n_bypass = 0, n_ovf = 0, n_wrap = 0, n_update = 0;
  int n_cancel [N];
  for (genvar j = 0; j < N; j++) begin : g_mon
    initial n_cancel[j] = 0;
    always @(posedge clk) if (dut.streaming && !dut.bypass && dut.u_shrink.g_lane[j].shr == 2'b11) n_cancel[j]++;
  end
  always @(posedge clk) begin
    if (dut.streaming && dut.bypass) n_bypass++;
    if (carry_ovf) n_ovf++;
  end

  task automatic wr(wr_sel_e s, int r, int c, int d);
    wr_en = 1; wr_sel = s; wr_row = 2'(r); wr_col = 3'(c); wr_data = (W+1)'(d);
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

  task automatic load_problem(int kind);
    real xt [N];
    foreach (xt[j]) xt[j] = 0.0;
    xt[1] = 0.35; xt[5] = -0.25;
    for (int i = 0; i < M; i++) begin
      real nrm, yv;
      do begin
        nrm = 0.0;
        for (int j = 0; j < N; j++) begin
          real a;
          if (kind == 3) a = 0.9;
          else a = (real'($urandom % 20001) - 10000.0) / 10000.0;
          aq[i][j] = int'(a * S);
          nrm += (aq[i][j] / S) ** 2;
        end
      end while (nrm < 1.0);
      yv = 0.0;
      for (int j = 0; j < N; j++) yv += aq[i][j] / S * xt[j];
      if (kind == 3) yv = (i % 2 == 0) ? 0.9 : -0.9;
      yq[i] = int'(yv * S);
      wq[i] = int'(S / nrm);
      for (int j = 0; j < N; j++) wr(SEL_A, i, j, aq[i][j]);
      wr(SEL_Y, i, 0, yq[i]);
      wr(SEL_INVNORM, i, 0, wq[i]);
    end
    lamq = (kind == 1) ? int'(0.5 * S) : 0;
    wr(SEL_LAMBDA, 0, 0, lamq);
  endtask

  task automatic run(int kind);
    int   cyc, xc [N];
    real  vk [N], lam, maxerr_v, maxerr_x;
    int   row;
    load_problem(kind);
    lam = lamq / S;
    maxerr_v = 0.0; maxerr_x = 0.0;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (!done && cyc < 100 * L) begin
      if (dut.init) foreach (xc[j]) xc[j] = 0;
      if (dut.streaming) for (int j = 0; j < N; j++) xc[j] += int'(dut.x_s[j].p) - int'(dut.x_s[j].n);
      if (dut.update) begin
        real xk [N], e;
        n_update++;
        row = int'(dut.row);
        if (row == 0 && dut.iter > 1) n_wrap++;
        for (int j = 0; j < N; j++) begin
          vk[j] = dut.v_mem[j] / S;
          xk[j] = shrink(vk[j], lam);
          if (lam > 0 && vk[j] != 0.0) begin
            if (absr(vk[j]) < lam - 0.05) n_zero++;
            if (absr(vk[j]) > lam + 0.05) n_pass++;
          end
          if (kind != 3 && absr(xc[j] / S - xk[j]) > maxerr_x) maxerr_x = absr(xc[j] / S - xk[j]);
          xc[j] = 0;
        end
        e = yq[row] / S;
        for (int j = 0; j < N; j++) e -= aq[row][j] / S * xk[j];
        for (int j = 0; j < N; j++) begin
          real vn = vk[j] + aq[row][j] / S * (wq[row] / S) * e;
          if (kind != 3 && absr(dut.v_cnt[j] / S - vn) > maxerr_v) maxerr_v = absr(dut.v_cnt[j] / S - vn);
        end
      end
      @(posedge clk); #1;
      cyc++;
    end
    $display("run %0d: %0d clocks, max |x^(k) error| %f, max |v^(k+1) error| %f", kind, cyc, maxerr_x, maxerr_v);
    checks++; if (cyc != 1 + NIT * (L + 1)) begin failures++; $display("FAIL run length %0d", cyc); end
    if (kind != 3) begin
      checks++; if (maxerr_x > TOL) begin failures++; $display("FAIL x^(k) streams"); end
      checks++; if (maxerr_v > TOL) begin failures++; $display("FAIL v^(k+1)"); end
      // x_out holds shrink(v^(N)) from the final iteration
      for (int j = 0; j < N; j++) begin
        checks++;
        if (absr(x_out[j] / S - shrink(vk[j], lam)) > TOL) begin
          failures++; $display("FAIL x_out[%0d] %f expected %f", j, x_out[j] / S, shrink(vk[j], lam));
        end
      end
      for (int j = 0; j < N; j++) $write("%7.3f", x_out[j] / S);
      $display("  <- x^(N)");
    end
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    int nc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(1);
    run(2);
    run(3);
    foreach (n_cancel[j]) nc += n_cancel[j];
    $display("mechanisms: shrink zero %0d, shrink pass %0d, cancel %0d, bypass %0d, overflow %0d, wrap %0d, update %0d",
             n_zero, n_pass, nc, n_bypass, n_ovf, n_wrap, n_update);
    checks++; if (n_zero == 0)   begin failures++; $display("FAIL no shrink zeroing"); end
    checks++; if (n_pass == 0)   begin failures++; $display("FAIL no shrink pass"); end
    checks++; if (nc == 0)       begin failures++; $display("FAIL no cancellation"); end
    checks++; if (n_bypass == 0) begin failures++; $display("FAIL no bypass"); end
    checks++; if (n_ovf == 0)    begin failures++; $display("FAIL no overflow"); end
    checks++; if (n_wrap == 0)   begin failures++; $display("FAIL no row wrap"); end
    checks++; if (n_update != 3 * NIT) begin failures++; $display("FAIL update count"); end
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
