// sc_shrink_cancel: the "shrink and cancellation" block.
//
// N_DIM lanes, each a shrink block followed by a cancellation circuit, turn
// the streams of v^(k) into the streams of x^(k) = shrink(v^(k), lambda).
// With `bypass` high (lambda = 0, the ordinary Kaczmarz / NLMS mode) the
// shrink blocks are skipped and v goes straight to the cancellation, so
// x = v.  All lanes share the lambda stream.  Combinational from inputs and
// the max-block registers.  Lanes and cancellation follow the architecture;
// the bypass multiplexer is this design's way of skipping shrink.
module sc_shrink_cancel
  import sc_pkg::*;
#(
  parameter int unsigned N_DIM = DEF_N,
  parameter int unsigned M     = MAX_SR
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic bypass,
  input  logic lam,
  input  tlb_t v_s [N_DIM],
  output tlb_t x_s [N_DIM]
);
  for (genvar j = 0; j < N_DIM; j++) begin : g_lane
    tlb_t shr, sel;
    sc_shrink #(.M(M)) u_shrink (.clk, .rst_n, .clr, .v_s(v_s[j]), .lam, .out_s(shr));
    assign sel = bypass ? v_s[j] : shr;
    sc_cancel u_cancel (.in_s(sel), .out_s(x_s[j]));
  end
endmodule
