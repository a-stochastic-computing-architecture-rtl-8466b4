// sc_d2s: deterministic-to-stochastic converter (the "D/S" boxes).
//
// Turns a stored signed value c (W+1 bits, c / (2^W - 1) in [-1,1]) into a
// two-line bipolar stream in which one line is all-zero: the line chosen by
// the sign of c carries a one whenever the LFSR state r (1 .. 2^W-1) satisfies
// r <= |c|, so over a full LFSR period it holds exactly |c| ones.  The other
// line stays zero, as the architecture assumes for regenerated streams (this
// is what lets the shrink block work).  The output is combinational from the
// LFSR register and `value`; a new value is followed from the same clock.
// Each converter owns an LFSR; SEED gives it its own phase (own choice).
module sc_d2s
  import sc_pkg::*;
#(
  parameter int unsigned W    = LFSR_W,
  parameter logic [31:0] SEED = 32'd1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W:0]   value,
  output tlb_t                out_s
);
  logic [W-1:0] r;
  logic [W:0]   mag;

  sc_lfsr #(.W(W), .SEED(SEED)) u_lfsr (.clk, .rst_n, .state(r));

  always_comb begin
    mag     = value[W] ? (W+1)'(-value) : value;
    out_s.p = !value[W] && ({1'b0, r} <= mag);
    out_s.n =  value[W] && ({1'b0, r} <= mag);
  end
endmodule
