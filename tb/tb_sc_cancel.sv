// tb_sc_cancel: exhaustive test of the cancellation circuit.  For all four
// input pairs the output must keep the value (p - n) and never carry a one
// on both lines.
module tb_sc_cancel;
  import sc_pkg::*;
  int checks = 0, failures = 0;
  tlb_t in_s, out_s;

  sc_cancel dut (.in_s, .out_s);

  initial begin
    for (int i = 0; i < 4; i++) begin
      in_s = tlb_t'(i);
      #1;
      checks++;
      if ((int'(out_s.p) - int'(out_s.n)) != (int'(in_s.p) - int'(in_s.n)) || (out_s.p && out_s.n)) begin
        failures++;
        $display("FAIL in=%b out=%b", in_s, out_s);
      end
      // exact expected output: a lone one passes, a pair vanishes
      checks++;
      if (out_s != ((in_s == 2'b11) ? 2'b00 : in_s)) failures++;
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
