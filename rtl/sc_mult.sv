// sc_mult: multiplier for two-line bipolar streams.
//
// Per clock the product of the bits is (ap - an)(bp - bn), which is -1, 0 or
// +1.  The positive line collects the like-signed pairs, the negative line
// the unlike-signed ones, and a cancellation circuit removes a clock in which
// both occur (then all four bits are one and the product is zero).  The
// output bit therefore equals the exact bit product, and for independent
// streams its mean is the product of the values.  Combinational.  The
// architecture takes its multiplier from earlier work without drawing it;
// this gate form is this design's.
module sc_mult
  import sc_pkg::*;
(
  input  tlb_t a_s,
  input  tlb_t b_s,
  output tlb_t y_s
);
  tlb_t raw;
  assign raw.p = (a_s.p & b_s.p) | (a_s.n & b_s.n);
  assign raw.n = (a_s.p & b_s.n) | (a_s.n & b_s.p);
  sc_cancel u_cancel (.in_s(raw), .out_s(y_s));
endmodule
