// sc_shrink: stochastic shrink(v, lambda) = max(|v| - lambda, 0) sign(v).
//
// The input is a TLB stream with one line all-zero.  Each line goes to input A
// of its own stochastic maximum; the lambda stream goes to both B inputs.  If
// |v| < lambda both maxima output (about) the lambda stream, which a following
// cancellation removes; if |v| > lambda the line carrying v outputs max(|v|,
// lambda) = |v| while the other outputs lambda, and the TLB difference of the
// two lines is |v| - lambda with the sign of v.  Output is before cancellation
// (out_s.p = Xp', out_s.n = Xn'), combinational from the inputs and the two
// registers.  Structure as in the architecture; M is the max-block length.
module sc_shrink
  import sc_pkg::*;
#(
  parameter int unsigned M = MAX_SR
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  tlb_t v_s,
  input  logic lam,
  output tlb_t out_s
);
  sc_max #(.M(M)) u_max_p (.clk, .rst_n, .clr, .a(v_s.p), .b(lam), .c(out_s.p));
  sc_max #(.M(M)) u_max_n (.clk, .rst_n, .clr, .a(v_s.n), .b(lam), .c(out_s.n));
endmodule
