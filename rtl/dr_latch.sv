// dr_latch: dual-rail input latch built from one C-element per rail.
//
// Each rail is q = C(d, en). With en high a codeword on d passes to q (a rail
// rises once both d and en are high); after the datapath signals completion
// the environment drops en, the latch holds the codeword, and it passes the
// following spacer (a rail falls once d and en are both low). en then rises
// again and the latch is ready for the next codeword. This is a half-buffer
// latch stage. Using C-elements as the input latches, one per rail, follows
// the paper; the choice of en = not done as the latch control is this
// design's own.
//
// Interface: d, q are W dual-rail bits (all-zero spacer); rst clears q to spacer.
module dr_latch
  import dr_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic         rst,
  input  logic         en,
  input  dr_t  [W-1:0] d,
  output dr_t  [W-1:0] q
);

  for (genvar i = 0; i < W; i++) begin : g_bit
    c_element u_ct (.a(d[i].t), .b(en), .rst(rst), .q(q[i].t));
    c_element u_cf (.a(d[i].f), .b(en), .rst(rst), .q(q[i].f));
  end

endmodule
