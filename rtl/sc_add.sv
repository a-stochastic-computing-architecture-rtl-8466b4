// sc_add: non-scaled adder for two two-line bipolar streams.
//
// Output value = a + b (not (a + b) / 2 as in a scaled SC adder), valid as
// long as the sum stays in [-1,1].  In a clock the inputs may carry up to two
// units of either sign; one unit is output and the rest is kept in a positive
// or a negative carry shift register of DEPTH cells (sc_carry_core) and
// output in later clocks.  The output is combinational from inputs and carry
// store; `clr` empties the store; `overflow` flags a lost carry.  The carry
// registers of length 20 follow the architecture; the adder's inner rule is
// this design's.
module sc_add
  import sc_pkg::*;
#(
  parameter int unsigned DEPTH = CARRY_D
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  tlb_t a_s,
  input  tlb_t b_s,
  output tlb_t y_s,
  output logic overflow
);
  logic [1:0] pos_cnt, neg_cnt;
  assign pos_cnt = 2'(a_s.p) + 2'(b_s.p);
  assign neg_cnt = 2'(a_s.n) + 2'(b_s.n);

  sc_carry_core #(.N_IN(2), .DEPTH(DEPTH)) u_core (
    .clk, .rst_n, .clr, .pos_cnt, .neg_cnt, .y_s, .overflow
  );
endmodule
