// c_element: two-input Muller C-element with an asynchronous reset.
//
// The output goes high when both inputs are high, low when both are low, and
// holds its value while they disagree. The datapath uses one per input rail as
// a latch (dr_latch). The state is written as a level-sensitive latch whose
// enable is "inputs agree"; a synthesis flow maps it to a C-element cell.
// rst forces the output low (the spacer), which the two-state start needs; the
// reset is this design's own addition.
//
// Circuit warning: the latch inferred here is the intended storage element.
// Once this module is inlined into dr_latch, the Verilator lint reports that it
// finds no latch in the always_latch block; synthesis does infer one.
module c_element (
  input  logic a,
  input  logic b,
  input  logic rst,
  output logic q
);

  always_latch begin
    if (rst)         q = 1'b0;
    else if (a == b) q = a;
  end

endmodule
