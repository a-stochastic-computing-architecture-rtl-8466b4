// sc_pkg: types and constants shared by the stochastic-computing (SC) Sparse
// Kaczmarz datapath.
//
// A number x in [-1,1] travels as a two-line bipolar (TLB) stream: every clock
// carries one bit of a positive line p and one bit of a negative line n, and
// over L clocks x = (ones(p) - ones(n)) / L.  The struct tlb_t is one clock of
// such a stream.  Deterministic (stored) values are signed integers of W+1
// bits; a stored value c stands for c / (2^W - 1), so W = 16 matches the
// 16-bit maximum-length LFSRs and L = 2^16 - 2 used by the architecture.
package sc_pkg;

  // One clock of a two-line bipolar stream.
  typedef struct packed {
    logic p;   // a one here counts +1
    logic n;   // a one here counts -1
  } tlb_t;

  localparam int unsigned LFSR_W   = 16;              // stream generator width
  localparam int unsigned STREAM_L = (1 << LFSR_W) - 2; // clocks per iteration
  localparam int unsigned DEF_N    = 16;              // unknowns n
  localparam int unsigned DEF_M    = 10;              // measurements m
  localparam int unsigned MAX_SR   = 10;              // max-block shift register
  localparam int unsigned CARRY_D  = 20;              // adder / scalar product carries
  localparam int unsigned DELAY_D  = 10;              // decorrelation delay
  localparam int unsigned ITER_W   = 16;              // width of the iteration count

  // Which table a host write goes to.
  typedef enum logic [1:0] {
    SEL_A       = 2'd0,   // entry (row, col) of the system matrix A
    SEL_Y       = 2'd1,   // measurement y_row
    SEL_INVNORM = 2'd2,   // 1 / ||a_row||^2
    SEL_LAMBDA  = 2'd3    // lambda (unipolar, >= 0)
  } wr_sel_e;

  // TLB negation: swap the two lines.
  function automatic tlb_t tlb_neg(tlb_t s);
    return '{p: s.n, n: s.p};
  endfunction

  // Taps of a maximum-length Fibonacci LFSR (XAPP052 table), as a bit mask
  // where bit (t-1) set means tap t.
  function automatic logic [31:0] lfsr_taps(int unsigned w);
    case (w)
      4:  return 32'h0000_000C;  // 4,3
      5:  return 32'h0000_0014;  // 5,3
      6:  return 32'h0000_0030;  // 6,5
      7:  return 32'h0000_0060;  // 7,6
      8:  return 32'h0000_00B8;  // 8,6,5,4
      9:  return 32'h0000_0110;  // 9,5
      10: return 32'h0000_0240;  // 10,7
      11: return 32'h0000_0500;  // 11,9
      12: return 32'h0000_0829;  // 12,6,4,1
      13: return 32'h0000_100D;  // 13,4,3,1
      14: return 32'h0000_2015;  // 14,5,3,1
      15: return 32'h0000_6000;  // 15,14
      16: return 32'h0000_D008;  // 16,15,13,4
      17: return 32'h0001_2000;  // 17,14
      18: return 32'h0002_0400;  // 18,11
      19: return 32'h0004_0023;  // 19,6,2,1
      20: return 32'h0009_0000;  // 20,17
      default: return 32'h0000_D008;
    endcase
  endfunction

  // A non-zero seed for generator number idx of a W-bit LFSR, spread over the
  // state space so that different generators run at far-apart phases.
  function automatic logic [31:0] lfsr_seed(int unsigned idx, int unsigned w);
    logic [31:0] s;
    s = (idx + 32'd1) * 32'h9E37_79B1 ^ 32'h5A5A_1234;
    s = s & ((32'd1 << w) - 32'd1);
    if (s == 32'd0) s = 32'd1;
    return s;
  endfunction

endpackage
