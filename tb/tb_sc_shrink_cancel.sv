// tb_sc_shrink_cancel: 4-lane shrink and cancellation block.
// With lambda = 0.5 each lane's output value must be shrink(v, 0.5) within
// 0.02 and no clock may carry ones on both lines.  With bypass the output
// must equal the input bit for bit (the input has one line all-zero).
module tb_sc_shrink_cancel;
  import sc_pkg::*;
  localparam int N = 4, NCYC = 100000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, lam = 0, bypass = 0;
  tlb_t v_s [N], x_s [N];
  always #5 clk = ~clk;

  sc_shrink_cancel #(.N_DIM(N), .M(10)) dut (.clk, .rst_n, .clr, .bypass, .lam, .v_s, .x_s);

  real vals [N] = '{0.9, -0.75, 0.2, -0.35};
  int  acc [N];
  int  both, diff;

  task automatic run(input logic byp);
    bypass = byp; both = 0; diff = 0;
    foreach (acc[j]) acc[j] = 0;
    clr = 1; @(posedge clk); #1; clr = 0;
    for (int t = 0; t < NCYC; t++) begin
      lam = ($urandom % 2) == 1;
      for (int j = 0; j < N; j++) begin
        logic bit_v;
        bit_v = real'($urandom % 100000) < (vals[j] < 0 ? -vals[j] : vals[j]) * 100000.0;
        v_s[j].p = (vals[j] > 0) && bit_v;
        v_s[j].n = (vals[j] < 0) && bit_v;
      end
      #1;
      for (int j = 0; j < N; j++) begin
        acc[j] += int'(x_s[j].p) - int'(x_s[j].n);
        if (x_s[j].p && x_s[j].n) both++;
        if (x_s[j] != v_s[j]) diff++;
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1'b0);
    for (int j = 0; j < N; j++) begin
      real got, expv, mag;
      got  = real'(acc[j]) / NCYC;
      mag  = vals[j] < 0 ? -vals[j] : vals[j];
      expv = (mag > 0.5) ? (mag - 0.5) * (vals[j] < 0 ? -1.0 : 1.0) : 0.0;
      $display("lane %0d v=%f x=%f expected %f", j, vals[j], got, expv);
      checks++;
      if (got - expv > 0.02 || expv - got > 0.02) begin failures++; $display("FAIL lane %0d", j); end
    end
    checks++; if (both != 0) begin failures++; $display("FAIL uncancelled pairs %0d", both); end
    run(1'b1);
    checks++; if (diff != 0) begin failures++; $display("FAIL bypass differs in %0d clocks", diff); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
