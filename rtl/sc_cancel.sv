// sc_cancel: cancellation circuit for a two-line bipolar stream.
//
// When the positive and the negative line both carry a one in the same clock
// the pair is worth zero, so both are removed; otherwise the bits pass.  The
// value of the stream is unchanged and the output has the least variance a
// TLB stream of that value can have.  Purely combinational.  Follows the
// architecture's cancellation circuit.
module sc_cancel
  import sc_pkg::*;
(
  input  tlb_t in_s,
  output tlb_t out_s
);
  assign out_s.p = in_s.p & ~in_s.n;
  assign out_s.n = in_s.n & ~in_s.p;
endmodule
