// tm_infer_dr: self-timed dual-rail Tsetlin-machine inference datapath.
//
// Decides, for one class, whether a Boolean feature vector f belongs to it.
// NC positive and NC negative clauses (dr_clause) each AND the features and
// their complements that their automata include (exclude action e = 0). Two
// eight-input population counts (dr_popcount8) count the true positive and
// the true negative clauses; the magnitude comparator (dr_mag_cmp) compares
// the counts MSB first and gives a 1-of-3 result. The input belongs to the
// class when the positive votes are at least the negative votes, given as the
// dual-rail output cls. All inputs and outputs are dual-rail (res is 1-of-3).
//
// Handshake (four-phase, return-to-spacer), the environment's side:
//   1. drive a codeword on every input rail pair (monotonic rising);
//   2. wait for done = 1 (res, cls hold the result);
//   3. drive the spacer (all rails 0);
//   4. wait for done = 0, then continue with 1.
// done rises as soon as res holds a codeword, which can be long before every
// internal net has settled (early propagation), and falls TD after res
// returns to spacer (reduced completion detection, cd_reduced). The inputs
// pass through C-element latches (dr_latch) enabled by not done, so they hold
// the codeword until done and pass the spacer after it.
//
// Immediate assertions check the environment's side: no forbidden 11 input
// state, and no input rail falling before done has risen.
//
// Following the paper: the clause, popcount and comparator structure, the
// spacer polarities, the 1-of-3 output and the delayed-done scheme. This
// design's own choices: NF, TD, the reset, the latch control, and the positive
// count on the comparator's a side.
module tm_infer_dr
  import dr_pkg::*;
#(
  parameter int unsigned NF = 16,   // features per clause
  parameter int unsigned NC = 8,    // clauses per polarity (popcount width)
  parameter int unsigned TD = 200   // done fall delay, time units
) (
  input  logic                      rst,
  input  dr_t   [NF-1:0]            f,
  input  dr_t   [NC-1:0][2*NF-1:0]  e_pos,
  input  dr_t   [NC-1:0][2*NF-1:0]  e_neg,
  output cmp3_t                     res,
  output dr_t                       cls,
  output logic                      done
);

  localparam int unsigned NE = NC * 2 * NF;

  if (NC > 8 || NC == 0) begin : g_check
    $error("tm_infer_dr: NC must be 1..8 (eight-input popcount)");
  end

  dr_t [NF-1:0]           f_q;
  dr_t [NE-1:0]           ep_q, en_q;
  dr_t [NC-1:0][2*NF-1:0] ep_l, en_l;
  dr_t [7:0]              vote_pos, vote_neg;
  dr_t [3:0]              cnt_pos, cnt_neg;

  // Input latches, one C-element per rail.
  dr_latch #(.W(NF)) u_lat_f  (.rst(rst), .en(~done), .d(f),     .q(f_q));
  dr_latch #(.W(NE)) u_lat_ep (.rst(rst), .en(~done), .d(e_pos), .q(ep_q));
  dr_latch #(.W(NE)) u_lat_en (.rst(rst), .en(~done), .d(e_neg), .q(en_q));

  assign ep_l = ep_q;
  assign en_l = en_q;

  // Clauses; unused popcount inputs (NC < 8) read as a constant 0 codeword.
  for (genvar j = 0; j < 8; j++) begin : g_clause
    if (j < NC) begin : g_used
      dr_clause #(.NF(NF)) u_cp (.f(f_q), .e(ep_l[j]), .c(vote_pos[j]));
      dr_clause #(.NF(NF)) u_cn (.f(f_q), .e(en_l[j]), .c(vote_neg[j]));
    end else begin : g_unused
      // A constant-0 input would break the spacer; follow the clause inputs'
      // first rail pair instead: valid exactly when the features are.
      assign vote_pos[j] = '{t: 1'b0, f: f_q[0].t | f_q[0].f};
      assign vote_neg[j] = '{t: 1'b0, f: f_q[0].t | f_q[0].f};
    end
  end

  dr_popcount8 u_pop_pos (.a(vote_pos), .y(cnt_pos));
  dr_popcount8 u_pop_neg (.a(vote_neg), .y(cnt_neg));

  dr_mag_cmp #(.W(4)) u_cmp (.a(cnt_pos), .b(cnt_neg), .res(res));

  // Class threshold: in the class when positive >= negative.
  always_comb begin
    cls.t = res.gt | res.eq;
    cls.f = res.lt;
  end

  cd_reduced #(.TD(TD)) u_cd (.res(res), .done(done));

  // Environment rules. Every input pair is a codeword or the all-zero spacer
  // (11 is forbidden), and the input latches never hold 11 either.
  always_comb begin
    for (int i = 0; i < NF; i++)
      assert (!(f[i].t && f[i].f)) else $error("tm_infer_dr: forbidden state on f[%0d]", i);
    for (int i = 0; i < NE; i++)
      assert (!(ep_q[i].t && ep_q[i].f) && !(en_q[i].t && en_q[i].f))
        else $error("tm_infer_dr: forbidden state on latched exclude %0d", i);
  end

  // Environment rule: the inputs go from codeword to spacer only after the
  // output has signalled completion, so no input rail may fall while done is
  // low (outside reset).
  localparam int unsigned NPI = 2 * (NF + 2 * NE);

  logic [NPI-1:0] pi_rails;

  assign pi_rails = {f, e_pos, e_neg};

  for (genvar k = 0; k < NPI; k++) begin : g_pi_rule
    always @(negedge pi_rails[k])
      assert (rst || done) else $error("tm_infer_dr: input rail %0d fell before done", k);
  end

  // The class output is a codeword or spacer, never 11.
  always_comb assert (!(cls.t && cls.f)) else $error("tm_infer_dr: forbidden state on cls");

endmodule
