// dr_or: dual-rail OR gate.
//
// One single-rail OR on the positive rails and one AND on the negative rails:
// y.t = a.t | b.t, y.f = a.f & b.f. Unate and non-inverting, so the all-zero
// spacer passes unchanged. The true rail rises early when either operand is 1.
// Purely combinational; structure as in the paper.
module dr_or
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  output dr_t y
);

  always_comb begin
    y.t = a.t | b.t;
    y.f = a.f & b.f;
  end

endmodule
