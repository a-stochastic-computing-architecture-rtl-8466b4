// tb_sc_shrink_mstudy: error of the stochastic shrink against the length M
// of its maximum blocks, for M = 5, 10, 15, 20, 30 side by side.
//
// Every lane is a shrink followed by a cancellation circuit, fed the same
// streams: a positive v with |v| = P_A below lambda, and lambda = 0.5.  The
// exact result is zero, so every one that survives is an error.  P_A takes
// NPT values evenly spaced over (0, 0.5); for each, all lanes are cleared
// and run for NCYC clocks.  The testbench integrates the maximum-block
// formula numerically over the same grid:
//   P_e(P_A) = r^M / sum_{j=0..M} r^j * P_A (1 - P_B),
//   r = P_A (1 - P_B) / (P_B (1 - P_A)),
// and compares the measured mean absolute output value of each lane with it
// (within 20 % plus 0.0005).  It also checks that the error falls as M
// grows and that the largest measured error stays below 0.25 / M.
module tb_sc_shrink_mstudy;
  import sc_pkg::*;
  localparam int NM = 5, NPT = 20, NCYC = 100000;
  localparam int MS [NM] = '{5, 10, 15, 20, 30};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, lam = 0;
  tlb_t v_s;
  tlb_t out_s [NM];
  always #5 clk = ~clk;

  for (genvar g = 0; g < NM; g++) begin : g_lane
    tlb_t shr;
    sc_shrink #(.M(MS[g])) u_shr (.clk, .rst_n, .clr, .v_s, .lam, .out_s(shr));
    sc_cancel u_can (.in_s(shr), .out_s(out_s[g]));
  end

  function automatic real pe(real pa, real pb, int m);
    real r = pa * (1.0 - pb) / (pb * (1.0 - pa)), s = 0.0;
    for (int j = 0; j <= m; j++) s += r ** j;
    return (r ** m) / s * pa * (1.0 - pb);
  endfunction

  initial begin
    real meas [NM], pred [NM], worst [NM];
    foreach (meas[i]) begin meas[i] = 0.0; pred[i] = 0.0; worst[i] = 0.0; end
    v_s = '{p: 1'b0, n: 1'b0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NPT; k++) begin
      automatic real pa = 0.5 * (real'(k) + 0.5) / real'(NPT);
      automatic int acc [NM];
      foreach (acc[i]) acc[i] = 0;
      clr = 1; @(posedge clk); #1; clr = 0;
      for (int t = 0; t < NCYC; t++) begin
        v_s.p = real'($urandom % 1000000) < pa * 1000000.0;
        v_s.n = 1'b0;
        lam   = ($urandom % 2) == 1;
        #1;
        for (int i = 0; i < NM; i++) acc[i] += int'(out_s[i].p) - int'(out_s[i].n);
        @(posedge clk); #1;
      end
      for (int i = 0; i < NM; i++) begin
        automatic real e = real'(acc[i] < 0 ? -acc[i] : acc[i]) / real'(NCYC);
        meas[i] += e / NPT;
        pred[i] += pe(pa, 0.5, MS[i]) / NPT;
        if (e > worst[i]) worst[i] = e;
      end
    end
    for (int i = 0; i < NM; i++) begin
      $display("M = %2d: mean error measured %f, formula %f; largest %f, bound 0.25/M %f",
               MS[i], meas[i], pred[i], worst[i], 0.25 / MS[i]);
      checks++;
      if (meas[i] > 1.2 * pred[i] + 0.0005 || meas[i] < 0.8 * pred[i] - 0.0005) begin
        failures++; $display("FAIL mean error differs from the formula");
      end
      checks++;
      if (worst[i] > 0.25 / MS[i]) begin failures++; $display("FAIL largest error above 0.25/M"); end
      if (i > 0) begin
        checks++;
        if (meas[i] >= meas[i-1]) begin failures++; $display("FAIL error does not fall with M"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPT * (NCYC + 2) + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
