// sc_max: stochastic maximum of two unipolar streams A and B.
//
// A bidirectional shift register of M cells follows how far the ones of A
// have run ahead of the ones of B.  It shifts only when A and B differ: on
// A=1,B=0 it shifts a one in from the left end, on A=0,B=1 it shifts a zero in
// from the right end, so it holds a thermometer code of the running excess
// of A over B, saturating at 0 and at M.  The output C is B, except in a
// clock with A=1,B=0, where C is the right-end cell: a lone one of A is passed
// only when the register is full, i.e. when A has been ahead for at least M
// ones.  Hence every one of B appears at C, and for P_A < P_B a one of A leaks
// out with probability P(full) * P_A * (1 - P_B), the error of the paper's
// Eq. (4).  C is combinational from A, B and the register (value before this
// clock's shift).  `clr` empties the register synchronously (own addition,
// used at the start of every iteration).
module sc_max #(
  parameter int unsigned M = sc_pkg::MAX_SR
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic a,
  input  logic b,
  output logic c
);
  logic [M-1:0] sr;   // sr[0] left end, sr[M-1] right end
  logic         en;

  assign en = a ^ b;
  assign c  = (en && !b) ? sr[M-1] : b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sr <= '0;
    else if (clr)    sr <= '0;
    else if (en) begin
      if (a) sr <= {sr[M-2:0], 1'b1};  // 1 shifted in at the left
      else   sr <= {1'b0, sr[M-1:1]};  // 0 shifted in at the right
    end
  end
endmodule
