// dr_clause: one conjunctive Tsetlin-machine clause in dual-rail logic.
//
// NF partial clauses (dr_partial_clause) mask each feature and its complement
// with the automata's exclude actions e[2m] and e[2m+1]; the clause is the AND
// of all partial clauses. The partial clauses come with the all-one spacer, so
// the AND tree is built in negative logic and inverts the spacer back:
//   c.t = NOR of all pc.f   (every partial clause true)
//   c.f = NAND of all pc.t  (some partial clause false)
// The clause therefore leaves with the all-zero spacer. The false rail rises
// as soon as any one partial clause is false: early propagation, without
// waiting for the other features. The partial clause circuit and the AND tree
// follow the paper; the number of features NF and the spacer-restoring form of
// the tree are this design's choices.
//
// Interface: f[NF], e[2NF] dual-rail in (spacer 00); c dual-rail out (spacer 00).
// Purely combinational.
module dr_clause
  import dr_pkg::*;
#(
  parameter int unsigned NF = 16
) (
  input  dr_t [NF-1:0]   f,
  input  dr_t [2*NF-1:0] e,
  output dr_t            c
);

  dr_t [NF-1:0] pc;
  logic [NF-1:0] pc_t, pc_f;

  for (genvar m = 0; m < NF; m++) begin : g_pc
    dr_partial_clause u_pc (.f(f[m]), .e0(e[2*m]), .e1(e[2*m+1]), .pc(pc[m]));
    assign pc_t[m] = pc[m].t;
    assign pc_f[m] = pc[m].f;
  end

  always_comb begin
    c.t = ~(|pc_f);
    c.f = ~(&pc_t);
  end

endmodule
