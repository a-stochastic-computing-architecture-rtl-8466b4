// tb_sc_d2s: stochastic number generator at the full 16-bit width.
// Its LFSR must return to its start state after exactly 2^16 - 1 clocks and
// not before.  Over one full period a value c must give exactly |c| ones on
// the line of its sign and none on the other line; over L = 2^16 - 2 clocks
// at most one fewer.
module tb_sc_d2s;
  import sc_pkg::*;
  localparam int W = 16;
  localparam int PERIOD = (1 << W) - 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [W:0] value;
  tlb_t out_s;
  always #5 clk = ~clk;

  sc_d2s #(.W(W), .SEED(32'h1234)) dut (.clk, .rst_n, .value, .out_s);

  int vals [6] = '{0, 1, 12345, -40000, 65535, -65535};

  initial begin
    logic [W-1:0] s0;
    int first_ret;
    value = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    s0 = dut.r;
    first_ret = -1;
    for (int t = 1; t <= PERIOD; t++) begin
      @(posedge clk); #1;
      if (dut.r == s0 && first_ret < 0) first_ret = t;
    end
    checks++; if (first_ret != PERIOD) begin failures++; $display("FAIL LFSR period %0d", first_ret); end
    foreach (vals[i]) begin
      int np, nn, np_l, nn_l, mag;
      np = 0; nn = 0; np_l = 0; nn_l = 0;
      value = (W+1)'(vals[i]);
      mag = vals[i] < 0 ? -vals[i] : vals[i];
      for (int t = 0; t < PERIOD; t++) begin
        #1;
        np += int'(out_s.p); nn += int'(out_s.n);
        if (t == PERIOD - 2) begin np_l = np; nn_l = nn; end
        @(posedge clk);
      end
      $display("value %0d: p %0d n %0d (L clocks: %0d %0d)", vals[i], np, nn, np_l, nn_l);
      checks++;
      if (vals[i] >= 0 ? (np != mag || nn != 0) : (nn != mag || np != 0)) begin
        failures++; $display("FAIL full period count");
      end
      checks++;
      if ((vals[i] >= 0 ? np_l : nn_l) < mag - 1) begin failures++; $display("FAIL L count"); end
    end
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
