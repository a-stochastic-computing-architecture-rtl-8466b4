// sc_delay: decorrelation delay for a two-line bipolar stream.
//
// A shift register of DELAY flip-flops per line; out_s is in_s from DELAY
// clocks earlier.  In the architecture it sits between the scalar error term
// and the multipliers that use the a_i streams a second time, so that the
// two uses of a_i meet different bits.  `clr` zeroes the register (used at
// the start of every iteration; own choice).  The length of 10 follows the
// architecture.
module sc_delay
  import sc_pkg::*;
#(
  parameter int unsigned DELAY = DELAY_D
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  tlb_t in_s,
  output tlb_t out_s
);
  tlb_t sr [DELAY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DELAY; i++) sr[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < DELAY; i++) sr[i] <= '0;
    end else begin
      sr[0] <= in_s;
      for (int i = 1; i < DELAY; i++) sr[i] <= sr[i-1];
    end
  end
  assign out_s = sr[DELAY-1];
endmodule
