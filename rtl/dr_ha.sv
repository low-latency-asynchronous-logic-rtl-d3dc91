// dr_ha: dual-rail half adder.
//
// Two complex gates form the sum rails and two simple gates the carry rails:
//   s.t = a.t b.f + a.f b.t     s.f = a.t b.t + a.f b.f
//   c.t = a.t b.t               c.f = a.f + b.f
// All gates are unate and non-inverting, so the spacer keeps its polarity
// (all-zero here). c.f rises early when either operand is 0. The gate count
// follows the paper; the equations are this design's. Purely combinational.
module dr_ha
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  output dr_t s,
  output dr_t c
);

  always_comb begin
    s.t = (a.t & b.f) | (a.f & b.t);
    s.f = (a.t & b.t) | (a.f & b.f);
    c.t = a.t & b.t;
    c.f = a.f | b.f;
  end

endmodule
