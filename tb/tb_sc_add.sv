// tb_sc_add: non-scaled adder with DEPTH = 20 carry registers.
//  1. Random streams whose sum stays inside [-1,1]: the units output must
//     trail the units input by at most DEPTH at every clock, output ones must
//     have the sign of the pending sum, and after a drain with zero inputs the
//     totals must be equal (exact non-scaled sum).
//  2. Saturation: with +1 on both inputs every clock the carry fills by one
//     per clock, so the first overflow must come in clock DEPTH (0-based).
module tb_sc_add;
  import sc_pkg::*;
  localparam int DEPTH = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, overflow;
  tlb_t a_s, b_s, y_s;
  always #5 clk = ~clk;

  sc_add #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clr, .a_s, .b_s, .y_s, .overflow);

  function automatic tlb_t rnd_stream(int p1000);
    tlb_t s;
    logic one = ($urandom % 1000) < p1000;
    s.p = one && ($urandom % 3 != 0);   // mostly positive
    s.n = one && !s.p;
    return s;
  endfunction

  initial begin
    longint in_sum = 0, out_sum = 0;
    int lag_bad = 0, sign_bad = 0, ovf = 0, first_ovf;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 100000; t++) begin
      a_s = rnd_stream(400);
      b_s = rnd_stream(300);
      #1;
      in_sum  += int'(a_s.p) - int'(a_s.n) + int'(b_s.p) - int'(b_s.n);
      out_sum += int'(y_s.p) - int'(y_s.n);
      if (y_s.p && y_s.n) sign_bad++;
      if (y_s.p && in_sum - out_sum < 0) sign_bad++;
      if (y_s.n && in_sum - out_sum > 0) sign_bad++;
      if (in_sum - out_sum > DEPTH || out_sum - in_sum > DEPTH) lag_bad++;
      if (overflow) ovf++;
      @(posedge clk); #1;
    end
    a_s = '0; b_s = '0;
    repeat (DEPTH + 2) begin
      #1; out_sum += int'(y_s.p) - int'(y_s.n);
      @(posedge clk); #1;
    end
    $display("in %0d out %0d lag_bad %0d sign_bad %0d ovf %0d", in_sum, out_sum, lag_bad, sign_bad, ovf);
    checks++; if (ovf != 0 || lag_bad != 0) begin failures++; $display("FAIL lag/overflow"); end
    checks++; if (sign_bad != 0) begin failures++; $display("FAIL sign"); end
    checks++; if (in_sum != out_sum) begin failures++; $display("FAIL sum"); end
    // 2: saturation
    clr = 1; @(posedge clk); #1; clr = 0;
    a_s = '{p: 1'b1, n: 1'b0}; b_s = '{p: 1'b1, n: 1'b0};
    first_ovf = -1;
    for (int t = 0; t < 3 * DEPTH; t++) begin
      #1;
      if (overflow && first_ovf < 0) first_ovf = t;
      checks++; if (!y_s.p) begin failures++; $display("FAIL no output at %0d", t); end
      @(posedge clk); #1;
    end
    $display("first overflow in clock %0d", first_ovf);
    checks++; if (first_ovf != DEPTH) begin failures++; $display("FAIL overflow clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
