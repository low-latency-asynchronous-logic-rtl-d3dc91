// dr_mag_cmp: early-terminating dual-rail magnitude comparator, 1-of-3 output.
//
// W slices (cmp_slice) compare a and b one bit pair at a time from the most
// significant bit. The top slice's request is tied to 1; every slice that
// finds its bits equal passes the request down through eq. The first slice
// whose bits differ raises gt or lt, and the lower slices are never asked, so
// the answer appears after as many slice delays as there are equal leading
// bits. greater is the OR of all gt outputs, less the OR of all lt outputs,
// and equal is the eq output of the least significant slice. Exactly one of
// the three rises per codeword (1-of-3 code); all fall when the inputs return
// to the all-zero spacer. Structure as in the paper.
//
// Interface: a, b W dual-rail bits; res = {gt: greater, eq: equal, lt: less}.
// Purely combinational.
module dr_mag_cmp
  import dr_pkg::*;
#(
  parameter int unsigned W = 4
) (
  input  dr_t   [W-1:0] a,
  input  dr_t   [W-1:0] b,
  output cmp3_t         res
);

  logic [W:0]   req;      // req[i+1] is the eval input of slice i
  logic [W-1:0] gt, lt;

  assign req[W] = 1'b1;

  for (genvar i = W - 1; i >= 0; i--) begin : g_slice
    cmp_slice u_slice (
      .a(a[i]), .b(b[i]), .eval(req[i+1]),
      .gt(gt[i]), .eq(req[i]), .lt(lt[i])
    );
  end

  always_comb begin
    res.gt = |gt;
    res.lt = |lt;
    res.eq = req[0];
  end

  // The result is a 1-of-3 code: never more than one wire high.
  always_comb assert ($onehot0({res.gt, res.eq, res.lt}))
    else $error("dr_mag_cmp: 1-of-3 output violated: %b", res);

endmodule
