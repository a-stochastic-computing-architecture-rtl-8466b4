// tb_sc_delay: the output must equal the input from exactly DELAY = 10
// clocks earlier (a queue in the testbench keeps the history), and clr must
// empty the register.
module tb_sc_delay;
  import sc_pkg::*;
  localparam int DELAY = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  tlb_t in_s, out_s;
  tlb_t hist [$];
  always #5 clk = ~clk;

  sc_delay #(.DELAY(DELAY)) dut (.clk, .rst_n, .clr, .in_s, .out_s);

  initial begin
    int bad = 0;
    in_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DELAY; i++) hist.push_back('0);
    for (int t = 0; t < 2000; t++) begin
      in_s = tlb_t'($urandom % 4);
      #1;
      if (out_s != hist[0]) bad++;
      @(posedge clk); #1;
      void'(hist.pop_front());
      hist.push_back(in_s);
    end
    checks++; if (bad != 0) begin failures++; $display("FAIL %0d mismatches", bad); end
    in_s = 2'b11;
    @(posedge clk); #1;
    clr = 1; @(posedge clk); #1; clr = 0; in_s = '0;
    for (int t = 0; t < DELAY; t++) begin
      checks++; if (out_s != '0) begin failures++; $display("FAIL not cleared"); end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
