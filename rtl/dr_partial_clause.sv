// dr_partial_clause: dual-rail partial clause for one feature.
//
// In single-rail terms the partial clause is (f | e0) & (~f | e1): exclude
// signal e0 = e[2m] masks the literal f[m], and e1 = e[2m+1] masks its
// complement; a masked literal reads as logic 1 at the clause AND. Since f is
// dual-rail, ~f is simply its negative rail. After negative-gate optimisation
// each output rail is one inverting complex gate:
//   pc.t = NOT(f.f & e0.f | f.t & e1.f)        (AOI22)
//   pc.f = NOT((f.t | e0.t) & (f.f | e1.t))    (OAI22)
// Every path has one inversion, so the inputs' all-zero spacer becomes the
// all-one spacer at pc (inverting spacer). The input grouping follows the
// paper's figure; the gate equations are derived from its text.
//
// Interface: f, e0, e1 dual-rail in (spacer 00); pc dual-rail out (spacer 11).
// Purely combinational.
module dr_partial_clause
  import dr_pkg::*;
(
  input  dr_t f,
  input  dr_t e0,
  input  dr_t e1,
  output dr_t pc
);

  always_comb begin
    pc.t = ~((f.f & e0.f) | (f.t & e1.f));
    pc.f = ~((f.t | e0.t) & (f.f | e1.t));
  end

endmodule
