// dr_fa: dual-rail full adder with inverted-spacer carries.
//
// Operands a, b and sum s use the all-zero spacer; carry-in ci and carry-out
// co use the all-one spacer, as in the paper. Inside, two inverters bring ci
// to the all-zero spacer (rails swapped), one AND-OR complex gate per rail
// computes the majority (carry) and one the odd or even parity (sum), and two
// inverters put the carry back on the all-one spacer:
//   k   = {~ci.f, ~ci.t}
//   s.t = parity-odd(a, b, k)   s.f = parity-even(a, b, k)
//   c.t = maj(a.t, b.t, k.t)    c.f = maj(a.f, b.f, k.f)
//   co  = {~c.f, ~c.t}
// The carry propagates early when a and b agree, before ci arrives. The
// inverted-spacer carries and the four inverters follow the paper; the paper
// builds the rest from six complex and two simple gates whose equations it
// does not give, so the four AND-OR terms here are this design's own.
// Combinational.
module dr_fa
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t ci,
  output dr_t s,
  output dr_t co
);

  dr_t k, c;

  always_comb begin
    k.t  = ~ci.f;
    k.f  = ~ci.t;
    s.t  = (a.t & b.f & k.f) | (a.f & b.t & k.f) | (a.f & b.f & k.t) | (a.t & b.t & k.t);
    s.f  = (a.f & b.f & k.f) | (a.t & b.t & k.f) | (a.t & b.f & k.t) | (a.f & b.t & k.t);
    c.t  = (a.t & b.t) | (a.t & k.t) | (b.t & k.t);
    c.f  = (a.f & b.f) | (a.f & k.f) | (b.f & k.f);
    co.t = ~c.f;
    co.f = ~c.t;
  end

endmodule
