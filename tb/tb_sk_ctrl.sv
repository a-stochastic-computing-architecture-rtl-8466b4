// tb_sk_ctrl: sequencer with M_ROWS = 3, L = 20, N = 7.
// Checks: done comes 1 + N (L + 1) clocks after start; each iteration
// streams exactly L clocks with row (k-1) mod 3; one update clock per
// iteration; last_iter only during iteration N; clr during init and update.
module tb_sk_ctrl;
  import sc_pkg::*;
  localparam int M = 3, L = 20, N = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [ITER_W-1:0] num_iter, iter;
  logic busy, init, streaming, update, clr, last_iter, done;
  logic [1:0] row;
  always #5 clk = ~clk;

  sk_ctrl #(.M_ROWS(M), .L(L)) dut (
    .clk, .rst_n, .start, .num_iter, .busy, .init, .streaming, .update, .clr,
    .last_iter, .done, .row, .iter
  );

  initial begin
    int cyc = 0, stream_cnt [N+1], upd = 0, row_bad = 0, last_bad = 0, clr_bad = 0, inits = 0;
    foreach (stream_cnt[i]) stream_cnt[i] = 0;
    num_iter = N;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    start = 1; @(posedge clk); #1; start = 0;
    while (!done && cyc < 10000) begin
      cyc++;
      if (streaming) begin
        stream_cnt[iter]++;
        if (int'(row) != (int'(iter) - 1) % M) row_bad++;
        if (last_iter != (int'(iter) == N)) last_bad++;
      end
      if (update) upd++;
      if (init) inits++;
      if (clr != (init || update)) clr_bad++;
      @(posedge clk); #1;
    end
    $display("done after %0d clocks, expected %0d", cyc, 1 + N * (L + 1));
    checks++; if (cyc != 1 + N * (L + 1)) begin failures++; $display("FAIL run length"); end
    for (int k = 1; k <= N; k++) begin
      checks++; if (stream_cnt[k] != L) begin failures++; $display("FAIL iteration %0d streamed %0d", k, stream_cnt[k]); end
    end
    checks++; if (upd != N || inits != 1) begin failures++; $display("FAIL update/init count"); end
    checks++; if (row_bad != 0) begin failures++; $display("FAIL row sequence"); end
    checks++; if (last_bad != 0) begin failures++; $display("FAIL last_iter"); end
    checks++; if (clr_bad != 0) begin failures++; $display("FAIL clr"); end
    checks++; if (busy) begin failures++; $display("FAIL still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
