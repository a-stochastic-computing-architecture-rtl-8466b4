// tb_sc_s2d: the counter must equal an independent running sum of
// (p - n) over the enabled clocks, hold while en is low, and clear on clr
// even when en is high.
module tb_sc_s2d;
  import sc_pkg::*;
  localparam int W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  tlb_t in_s;
  logic signed [W:0] count;
  always #5 clk = ~clk;

  sc_s2d #(.W(W)) dut (.clk, .rst_n, .clr, .en, .in_s, .count);

  initial begin
    int ref_cnt = 0, bad = 0;
    in_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 20000; t++) begin
      en   = ($urandom % 4) != 0;
      in_s = tlb_t'($urandom % 4);
      in_s.n = in_s.n && ($urandom % 3 == 0);   // drift positive
      if (en) ref_cnt += int'(in_s.p) - int'(in_s.n);
      @(posedge clk); #1;
      if (int'(count) != ref_cnt) bad++;
    end
    $display("count %0d reference %0d", count, ref_cnt);
    checks++; if (bad != 0) begin failures++; $display("FAIL %0d mismatches", bad); end
    checks++; if (ref_cnt < 1000) begin failures++; $display("FAIL test too weak"); end
    en = 1; clr = 1; in_s = '{p: 1'b1, n: 1'b0};
    @(posedge clk); #1; clr = 0; en = 0;
    checks++; if (count != '0) begin failures++; $display("FAIL clear"); end
    // all-negative stream: count goes down to -500
    en = 1; in_s = '{p: 1'b0, n: 1'b1};
    repeat (500) @(posedge clk);
    #1;
    checks++; if (int'(count) != -500) begin failures++; $display("FAIL negative count %0d", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
