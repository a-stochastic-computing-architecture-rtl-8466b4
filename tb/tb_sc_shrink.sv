// tb_sc_shrink: statistical test of the stochastic shrink (M = 10).
// Input streams are random with one line all-zero, lambda = 0.5.  Over
// 200000 clocks the value (ones(p) - ones(n)) / L of the output must be
// within 0.02 of max(|v| - 0.5, 0) sign(v); for |v| < lambda the positive
// and negative outputs must both follow the lambda stream.
module tb_sc_shrink;
  import sc_pkg::*;
  localparam int NCYC = 200000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, lam = 0;
  tlb_t v_s, out_s;
  always #5 clk = ~clk;

  sc_shrink #(.M(10)) dut (.clk, .rst_n, .clr, .v_s, .lam, .out_s);

  task automatic run(input real v, output real got, output int lam_diff);
    int acc = 0;
    lam_diff = 0;
    clr = 1; @(posedge clk); #1; clr = 0;
    for (int t = 0; t < NCYC; t++) begin
      logic bit_v;
      bit_v = real'($urandom % 100000) < (v < 0 ? -v : v) * 100000.0;
      v_s.p = (v > 0) && bit_v;
      v_s.n = (v < 0) && bit_v;
      lam   = ($urandom % 2) == 1;
      #1;
      acc += int'(out_s.p) - int'(out_s.n);
      if (out_s.p != lam || out_s.n != lam) lam_diff++;
      @(posedge clk); #1;
    end
    got = real'(acc) / real'(NCYC);
  endtask

  real vals [6] = '{0.8, -0.7, 0.3, -0.2, 0.0, 0.95};

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (vals[i]) begin
      real got, expv, mag;
      int lam_diff;
      run(vals[i], got, lam_diff);
      mag  = (vals[i] < 0) ? -vals[i] : vals[i];
      expv = (mag > 0.5) ? (mag - 0.5) * (vals[i] < 0 ? -1.0 : 1.0) : 0.0;
      $display("v=%f shrink=%f expected %f (clocks off lambda %0d)", vals[i], got, expv, lam_diff);
      checks++;
      if (got - expv > 0.02 || expv - got > 0.02) begin failures++; $display("FAIL value"); end
      if (mag < 0.4) begin
        // below lambda both outputs are the lambda stream up to rare leaks
        checks++;
        if (real'(lam_diff) > 0.005 * NCYC) begin failures++; $display("FAIL zero case"); end
      end
    end
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
