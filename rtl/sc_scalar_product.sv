// sc_scalar_product: non-scaled scalar product sum_j a_j x_j of N_DIM pairs
// of two-line bipolar streams.
//
// Each pair goes through a TLB multiplier (sc_mult).  The positive and the
// negative product bits of a clock are counted and handed to the carry core
// (sc_carry_core), which outputs at most one unit per clock and keeps the
// rest in a positive and a negative carry shift register of DEPTH cells.
// The result is exact as long as the running excess stays within DEPTH and
// the product's value within [-1,1].  Output combinational from the inputs
// and the carry store; `clr` empties it; `overflow` flags a lost carry.  The
// register length 20 follows the architecture; the counting form of the
// shift-based scalar product it cites is this design's.
module sc_scalar_product
  import sc_pkg::*;
#(
  parameter int unsigned N_DIM = DEF_N,
  parameter int unsigned DEPTH = CARRY_D,
  localparam int unsigned CW   = $clog2(N_DIM + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  tlb_t x_s [N_DIM],
  input  tlb_t a_s [N_DIM],
  output tlb_t y_s,
  output logic overflow
);
  tlb_t          prod [N_DIM];
  logic [CW-1:0] pos_cnt, neg_cnt;

  for (genvar j = 0; j < N_DIM; j++) begin : g_mul
    sc_mult u_mult (.a_s(x_s[j]), .b_s(a_s[j]), .y_s(prod[j]));
  end

  always_comb begin
    pos_cnt = '0;
    neg_cnt = '0;
    for (int j = 0; j < N_DIM; j++) begin
      pos_cnt = pos_cnt + CW'(prod[j].p);
      neg_cnt = neg_cnt + CW'(prod[j].n);
    end
  end

  sc_carry_core #(.N_IN(N_DIM), .DEPTH(DEPTH)) u_core (
    .clk, .rst_n, .clr, .pos_cnt, .neg_cnt, .y_s, .overflow
  );
endmodule
