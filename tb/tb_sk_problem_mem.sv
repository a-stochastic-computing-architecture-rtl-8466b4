// tb_sk_problem_mem: fill A (10 x 16), y, 1/||a||^2 and lambda with random
// values through the write port, then read every row back and compare with
// a copy kept in the testbench.  Writes to rows or columns outside the
// tables must change nothing.
module tb_sk_problem_mem;
  import sc_pkg::*;
  localparam int N = 16, M = 10, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0;
  wr_sel_e wr_sel;
  logic [3:0] wr_row, rd_row;
  logic [3:0] wr_col;
  logic signed [W:0] wr_data, a_row [N], y_val, inv_norm, lambda_val;
  always #5 clk = ~clk;

  sk_problem_mem #(.N_DIM(N), .M_ROWS(M), .W(W)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_row, .wr_col, .wr_data, .rd_row,
    .a_row, .y_val, .inv_norm, .lambda_val
  );

  logic signed [W:0] ra [M][N], ry [M], rw [M], rl;

  task automatic wr(wr_sel_e s, int r, int c, logic signed [W:0] d);
    wr_en = 1; wr_sel = s; wr_row = 4'(r); wr_col = 4'(c); wr_data = d;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  initial begin
    wr_sel = SEL_A; wr_row = 0; wr_col = 0; wr_data = 0; rd_row = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < M; r++) begin
      for (int c = 0; c < N; c++) begin
        ra[r][c] = (W+1)'($urandom); wr(SEL_A, r, c, ra[r][c]);
      end
      ry[r] = (W+1)'($urandom); wr(SEL_Y, r, 0, ry[r]);
      rw[r] = (W+1)'($urandom); wr(SEL_INVNORM, r, 0, rw[r]);
    end
    rl = 17'd32767; wr(SEL_LAMBDA, 0, 0, rl);
    // out-of-range rows are ignored
    wr(SEL_Y, 12, 0, 17'd5);
    wr(SEL_A, 11, 3, 17'd5);
    for (int r = 0; r < M; r++) begin
      rd_row = 4'(r); #1;
      for (int c = 0; c < N; c++) begin
        checks++; if (a_row[c] != ra[r][c]) begin failures++; $display("FAIL A[%0d][%0d]", r, c); end
      end
      checks++; if (y_val != ry[r]) begin failures++; $display("FAIL y[%0d]", r); end
      checks++; if (inv_norm != rw[r]) begin failures++; $display("FAIL w[%0d]", r); end
    end
    checks++; if (lambda_val != rl) begin failures++; $display("FAIL lambda"); end
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
