// cmp_slice: one bit-pair slice of the request-driven magnitude comparator.
//
// When its request eval is high and both operand bits hold codewords, the
// slice raises exactly one of gt (a=1, b=0), lt (a=0, b=1) or eq (bits
// equal); eq is the request to the next less significant slice. With eval low
// or either bit a spacer, all three outputs stay low, so the outputs form a
// 1-of-3 code with the all-zero spacer. Pin names follow the paper; the gate
// equations are this design's:
//   gt = eval a.t b.f   lt = eval a.f b.t   eq = eval (a.t b.t + a.f b.f)
// Purely combinational.
module cmp_slice
  import dr_pkg::*;
(
  input  dr_t  a,
  input  dr_t  b,
  input  logic eval,
  output logic gt,
  output logic eq,
  output logic lt
);

  always_comb begin
    gt = eval & a.t & b.f;
    lt = eval & a.f & b.t;
    eq = eval & ((a.t & b.t) | (a.f & b.f));
  end

endmodule
