// sc_lfsr: W-bit maximum-length Fibonacci LFSR, the random source of one
// stochastic number generator.
//
// The state shifts towards the MSB every clock and the new LSB is the XOR of
// the tap bits (taps from sc_pkg::lfsr_taps).  It visits every non-zero W-bit
// value once in 2^W - 1 clocks.  Reset loads SEED (which must be non-zero).
// Output `state` is the register itself, valid from the clock after reset.
// The architecture uses maximum-length LFSRs for all streams; the polynomial
// and the seeding are this design's choice.
module sc_lfsr #(
  parameter int unsigned W    = sc_pkg::LFSR_W,
  parameter logic [31:0] SEED = 32'd1
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] state
);
  localparam logic [W-1:0] TAPS = W'(sc_pkg::lfsr_taps(W));
  localparam logic [W-1:0] INIT = (W'(SEED) == '0) ? W'(1) : W'(SEED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= INIT;
    else        state <= {state[W-2:0], ^(state & TAPS)};
  end
endmodule
