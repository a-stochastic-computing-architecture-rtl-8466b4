// tb_sc_mult: exhaustive test of the TLB multiplier.  For all 16 input bit
// combinations the output's (p - n) must equal (ap - an)(bp - bn), and the
// output must never carry ones on both lines.
module tb_sc_mult;
  import sc_pkg::*;
  int checks = 0, failures = 0;
  tlb_t a_s, b_s, y_s;

  sc_mult dut (.a_s, .b_s, .y_s);

  initial begin
    for (int i = 0; i < 16; i++) begin
      int expv;
      {a_s, b_s} = 4'(i);
      #1;
      expv = (int'(a_s.p) - int'(a_s.n)) * (int'(b_s.p) - int'(b_s.n));
      checks++;
      if ((int'(y_s.p) - int'(y_s.n)) != expv || (y_s.p && y_s.n)) begin
        failures++;
        $display("FAIL a=%b b=%b y=%b expected %0d", a_s, b_s, y_s, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
