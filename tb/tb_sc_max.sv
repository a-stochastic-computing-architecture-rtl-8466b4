// tb_sc_max: test of the stochastic maximum (M = 10).
//  1. Clock by clock against a reference written as a saturating counter
//     s in 0..M: C = B, or 1 when A=1, B=0 and s = M; s moves up on A&!B and
//     down on !A&B.
//  2. The rate of leaked A ones for P_A = 0.4 < P_B = 0.5 must match the
//     closed form P_e = r^M / sum_{j=0..M} r^j * P_A (1 - P_B),
//     r = P_A (1 - P_B) / (P_B (1 - P_A)).
//  3. For P_A = 0.7 > P_B = 0.3 the output rate must be close to 0.7, and
//     every one of B must always appear at C.
//  4. For P_A = P_B = 0.5 (the worst case of the shrink) the leak rate must
//     be close to the limit of the closed form, 0.25 / (M + 1), and so below
//     the bound 0.25 / M.
module tb_sc_max;
  localparam int M = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, a = 0, b = 0, c;
  always #5 clk = ~clk;

  sc_max #(.M(M)) dut (.clk, .rst_n, .clr, .a, .b, .c);

  int s = 0;              // reference state
  int mism = 0, bmiss = 0, ones = 0, leaks = 0;

  task automatic run(input int pa, input int pb, input int ncyc);
    mism = 0; bmiss = 0; ones = 0; leaks = 0;
    for (int t = 0; t < ncyc; t++) begin
      logic exp_c;
      a = ($urandom % 1000) < pa;
      b = ($urandom % 1000) < pb;
      #1;
      exp_c = b | (a & ~b & (s == M));
      if (c !== exp_c) mism++;
      if (b && !c) bmiss++;
      if (c) ones++;
      if (c && !b) leaks++;
      @(posedge clk);
      if (a && !b && s < M) s++;
      else if (!a && b && s > 0) s--;
      #1;
    end
  endtask

  initial begin
    real pa, pb, r, den, pe, meas;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // 1 + 2: P_A = 0.4, P_B = 0.5
    run(400, 500, 400000);
    checks++; if (mism != 0) begin failures++; $display("FAIL reference mismatches %0d", mism); end
    checks++; if (bmiss != 0) begin failures++; $display("FAIL ones of B lost %0d", bmiss); end
    pa = 0.4; pb = 0.5;
    r = pa * (1.0 - pb) / (pb * (1.0 - pa));
    den = 0.0;
    for (int j = 0; j <= M; j++) den += r ** j;
    pe = (r ** M) / den * pa * (1.0 - pb);
    meas = real'(leaks) / 400000.0;
    $display("leak rate measured %f, closed form %f", meas, pe);
    checks++; if (meas < 0.7 * pe || meas > 1.3 * pe) begin failures++; $display("FAIL leak rate"); end
    // 3: P_A = 0.7, P_B = 0.3
    run(700, 300, 200000);
    checks++; if (mism != 0) begin failures++; $display("FAIL reference mismatches %0d", mism); end
    checks++; if (bmiss != 0) begin failures++; $display("FAIL ones of B lost %0d", bmiss); end
    meas = real'(ones) / 200000.0;
    $display("max(0.7,0.3) measured %f", meas);
    checks++; if (meas < 0.69 || meas > 0.71) begin failures++; $display("FAIL max value"); end
    // 4: P_A = P_B = 0.5
    run(500, 500, 400000);
    checks++; if (mism != 0) begin failures++; $display("FAIL reference mismatches %0d", mism); end
    meas = real'(leaks) / 400000.0;
    $display("worst-case leak rate measured %f, limit %f, bound %f", meas, 0.25 / (M + 1), 0.25 / M);
    checks++; if (meas < 0.8 * 0.25 / (M + 1) || meas > 0.25 / M) begin failures++; $display("FAIL worst-case leak"); end
    // clr empties the register: a lone A one right after must not pass
    clr = 1; @(posedge clk); #1; clr = 0; s = 0;
    a = 1; b = 0; #1;
    checks++; if (c !== 1'b0) begin failures++; $display("FAIL clr"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
