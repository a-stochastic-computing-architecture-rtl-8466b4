// sc_s2d: stochastic-to-deterministic converter (the "S/D" boxes).
//
// A signed up/down counter: while `en` is high it adds one for a one on the
// positive line and subtracts one for a one on the negative line (both at
// once cancel).  After L enabled clocks `count` holds L times the stream's
// value, i.e. the stored form read back by sc_d2s.  `clr` zeroes the count
// synchronously (it wins over `en`).  The counter form is this design's
// choice; the architecture only asks for a conversion to a storage form.
module sc_s2d
  import sc_pkg::*;
#(
  parameter int unsigned W = LFSR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  tlb_t              in_s,
  output logic signed [W:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   count <= '0;
    else if (clr)                 count <= '0;
    else if (en && in_s.p && !in_s.n) count <= count + 1'b1;
    else if (en && in_s.n && !in_s.p) count <= count - 1'b1;
  end
endmodule
