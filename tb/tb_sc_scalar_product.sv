// tb_sc_scalar_product: 16-input non-scaled scalar product, DEPTH = 20.
// Random sparse TLB streams; the testbench computes the exact per-clock sum
// of the bit products (ap - an)(xp - xn) itself.  The output units must trail
// that sum by at most DEPTH, carry its sign, and equal it after a drain.  A
// second phase with all products +1 must overflow in clock DEPTH / 15.
module tb_sc_scalar_product;
  import sc_pkg::*;
  localparam int N = 16, DEPTH = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, overflow;
  tlb_t x_s [N], a_s [N], y_s;
  always #5 clk = ~clk;

  sc_scalar_product #(.N_DIM(N), .DEPTH(DEPTH)) dut (.clk, .rst_n, .clr, .x_s, .a_s, .y_s, .overflow);

  function automatic tlb_t rnd(int p1000);
    tlb_t s;
    logic one = ($urandom % 1000) < p1000;
    s.p = one && $urandom % 2;
    s.n = one && !s.p;
    return s;
  endfunction

  initial begin
    longint in_sum = 0, out_sum = 0;
    int lag_bad = 0, sign_bad = 0, ovf = 0, first_ovf = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 50000; t++) begin
      for (int j = 0; j < N; j++) begin
        x_s[j] = rnd(250);
        a_s[j] = rnd(200);
      end
      #1;
      for (int j = 0; j < N; j++)
        in_sum += (int'(x_s[j].p) - int'(x_s[j].n)) * (int'(a_s[j].p) - int'(a_s[j].n));
      out_sum += int'(y_s.p) - int'(y_s.n);
      if (y_s.p && y_s.n) sign_bad++;
      if (y_s.p && in_sum - out_sum < 0) sign_bad++;
      if (y_s.n && in_sum - out_sum > 0) sign_bad++;
      if (overflow) ovf++;
      else if (in_sum - out_sum > DEPTH || out_sum - in_sum > DEPTH) lag_bad++;
      if (ovf > 0) begin
        in_sum = out_sum;   // resynchronise after a legitimate loss
      end
      @(posedge clk); #1;
    end
    for (int j = 0; j < N; j++) begin x_s[j] = '0; a_s[j] = '0; end
    repeat (DEPTH + 2) begin
      #1; out_sum += int'(y_s.p) - int'(y_s.n);
      @(posedge clk); #1;
    end
    $display("in %0d out %0d lag_bad %0d sign_bad %0d ovf %0d", in_sum, out_sum, lag_bad, sign_bad, ovf);
    checks++; if (lag_bad != 0) begin failures++; $display("FAIL lag"); end
    checks++; if (sign_bad != 0) begin failures++; $display("FAIL sign"); end
    checks++; if (ovf != 0) begin failures++; $display("FAIL unexpected overflow"); end
    checks++; if (in_sum != out_sum) begin failures++; $display("FAIL sum"); end
    // all products +1: 16 units in, 1 out: carry grows by 15 per clock
    clr = 1; @(posedge clk); #1; clr = 0;
    for (int j = 0; j < N; j++) begin x_s[j] = '{p: 1'b1, n: 1'b0}; a_s[j] = '{p: 1'b0, n: 1'b1}; end
    for (int t = 0; t < 5; t++) begin
      #1;
      if (overflow && first_ovf < 0) first_ovf = t;
      checks++; if (!y_s.n) begin failures++; $display("FAIL sign of saturated output"); end
      @(posedge clk); #1;
    end
    $display("first overflow in clock %0d", first_ovf);
    checks++; if (first_ovf != DEPTH / 15) begin failures++; $display("FAIL overflow clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
