// sc_carry_core: summing core shared by the non-scaled adder and the scalar
// product.
//
// Each clock it receives how many positive ones (pos_cnt) and negative ones
// (neg_cnt) its inputs carry.  Their difference plus the stored carry is the
// amount still to be output.  One one of the matching sign is output (a TLB
// stream carries at most one unit per clock) and the rest is stored.  The
// store is two thermometer-coded shift registers of DEPTH cells, one for
// positive and one for negative carries; since opposite carries cancel, at
// most one of them is non-empty.  A carry beyond DEPTH is lost and flagged on
// `overflow` for that clock.  y_s is registered-free: combinational from the
// counts and the store.  `clr` empties the store.  The architecture gives
// the two registers of length 20; their update rule is this design's.
module sc_carry_core
  import sc_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned DEPTH = CARRY_D,
  localparam int unsigned CW   = $clog2(N_IN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic [CW-1:0] pos_cnt,
  input  logic [CW-1:0] neg_cnt,
  output tlb_t          y_s,
  output logic          overflow
);
  logic [DEPTH-1:0] pc, nc, pc_d, nc_d;   // thermometer codes, cell 0 fills first
  int               c, t;

  always_comb begin
    c = 0;
    for (int i = 0; i < DEPTH; i++) c = c + int'(pc[i]) - int'(nc[i]);
    t = c + int'(pos_cnt) - int'(neg_cnt);
    y_s = '0;
    if (t > 0) begin
      y_s.p = 1'b1;
      t     = t - 1;
    end else if (t < 0) begin
      y_s.n = 1'b1;
      t     = t + 1;
    end
    overflow = (t > int'(DEPTH)) || (t < -int'(DEPTH));
    for (int i = 0; i < DEPTH; i++) begin
      pc_d[i] = (t > i);
      nc_d[i] = (-t > i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0;
      nc <= '0;
    end else if (clr) begin
      pc <= '0;
      nc <= '0;
    end else begin
      pc <= pc_d;
      nc <= nc_d;
    end
  end
endmodule
