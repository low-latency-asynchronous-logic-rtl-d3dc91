// dr_spinv: dual-rail spacer inverter.
//
// Swaps the two rails and inverts them: y.t = ~a.f, y.f = ~a.t. A codeword
// keeps its logical value while the spacer changes polarity (00 <-> 11). It
// joins parts of the popcount whose spacers differ (the full-adder carries use
// the all-one spacer). Purely combinational.
module dr_spinv
  import dr_pkg::*;
(
  input  dr_t a,
  output dr_t y
);

  always_comb begin
    y.t = ~a.f;
    y.f = ~a.t;
  end

endmodule
