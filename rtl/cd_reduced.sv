// cd_reduced: reduced completion detection for the 1-of-3 comparator output.
//
// Only the spacer-to-codeword transition of the primary outputs is detected:
// since the output is a 1-of-3 code, one OR gate tells that a codeword has
// arrived, and done rises with it. The return to spacer is not detected;
// instead the falling edge of done is delayed by TD (delay_fall), a grace
// period long enough for every internal net, including those off the
// input-to-output paths, to reach spacer. Following the paper.
//
// Interface: res 1-of-3 (spacer all-zero); done = 1 from codeword arrival
// until TD after the return to spacer.
module cd_reduced
  import dr_pkg::*;
#(
  parameter int unsigned TD = 200
) (
  input  cmp3_t res,
  output logic  done
);

  logic any;

  assign any = res.gt | res.eq | res.lt;

  delay_fall #(.TD(TD)) u_delay (.a(any), .y(done));

endmodule
