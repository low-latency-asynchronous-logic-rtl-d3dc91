// delay_fall: asymmetric delay element (behavioural model).
//
// Behavioural model of a delay line, not synthesizable logic. A rising edge
// on a appears on y at once; a falling edge appears TD time units later
// (a rise within TD cancels the pending fall). In the datapath it delays the falling edge of
// done so that every internal net has returned to spacer before the
// environment applies the next codeword: TD = t_int - t_io, where t_int is the
// longest codeword-to-spacer time of any internal net (false paths included)
// and t_io the longest such time from inputs to outputs. The formula is the
// paper's; the default TD is this design's placeholder, to be set from static
// timing analysis of the target netlist. y starts low.
module delay_fall #(
  parameter int unsigned TD = 200
) (
  input  logic a,
  output logic y
);

  int unsigned gen;  // counts edges of a; a stale fall is dropped

  initial begin
    gen = 0;
    y   = 1'b0;
  end

  always @(a) begin
    gen++;
    if (a) y = 1'b1;
    else fork
      begin
        automatic int unsigned g = gen;
        #(TD);
        if (g == gen) y = 1'b0;
      end
    join_none
  end

endmodule
