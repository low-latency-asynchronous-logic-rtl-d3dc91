// tb_tm_infer_dr: end-to-end test of the dual-rail inference datapath at its
// default size (16 features, 8 positive and 8 negative clauses).
//
// The testbench plays the four-phase environment. In even operations it
// drives the exclude actions, then the features one at a time in random
// order; in odd operations every input pair, feature or exclude action,
// arrives on its own in a fully random order, and the spacer is applied in
// random order too, in small groups that all land well within TD. After every single input change the outputs must be spacer or the
// final answer, never another value (no hazard, no wrong early answer). It
// waits for done, checks the 1-of-3 result and the class against a
// single-rail model, drives the spacer, and waits for done to fall. For each operation it picks the
// number of true positive and negative clauses (0..8) and builds the exclude
// actions to match, so every count and every comparator outcome occurs.
// Counted mechanisms (each must occur): comparator decisions at bits 3, 2, 1
// and 0 and equality; greater, equal and less; completion before the last
// feature arrived (early propagation through the clauses and the input
// latches closing); the delayed fall of done after the output spacer.
module tb_tm_infer_dr;
  import dr_pkg::*;
  localparam int NF = 16;
  localparam int NC = 8;
  localparam int TD = 200;
  localparam int NOPS = 400;
  localparam int NPI  = NF + 2*NC*2*NF;   // input pairs

  logic                     rst;
  dr_t   [NF-1:0]           f;
  dr_t   [NC-1:0][2*NF-1:0] e_pos, e_neg;
  cmp3_t                    res;
  dr_t                      cls;
  logic                     done;

  int checks = 0, failures = 0;
  int n_bit[4] = '{0, 0, 0, 0};
  int n_gt = 0, n_eq = 0, n_lt = 0, n_early = 0, n_grace = 0, n_early_any = 0;
  int pi_order[NPI];

  tm_infer_dr dut (
    .rst(rst), .f(f), .e_pos(e_pos), .e_neg(e_neg),
    .res(res), .cls(cls), .done(done)
  );

  // Exclude actions for one clause: true under fv when want is set. A true
  // clause includes only literals that fv satisfies; a false one includes at
  // least one literal that fv contradicts.
  function automatic logic [2*NF-1:0] make_clause(input logic [NF-1:0] fv, input logic want);
    logic [2*NF-1:0] ev;
    int m;
    ev = '1;
    for (int k = 0; k < NF; k++)
      if ($urandom % 4 == 0) begin
        if (fv[k]) ev[2*k] = 1'b0;      // include f[k], satisfied
        else       ev[2*k+1] = 1'b0;    // include ~f[k], satisfied
      end
    if (!want) begin
      m = $urandom % NF;
      if (fv[m]) ev[2*m+1] = 1'b0;      // include ~f[m], contradicted
      else       ev[2*m] = 1'b0;        // include f[m], contradicted
    end
    return ev;
  endfunction

  // Drive input pair k: features first, then e_pos, then e_neg.
  task automatic set_pi(input int k, input dr_t v);
    int r;
    if (k < NF) f[k] = v;
    else begin
      r = k - NF;
      if (r < NC*2*NF) e_pos[r / (2*NF)][r % (2*NF)] = v;
      else begin
        r -= NC*2*NF;
        e_neg[r / (2*NF)][r % (2*NF)] = v;
      end
    end
  endtask

  // After any input change the outputs may only be spacer or the answer.
  task automatic check_monotonic(input cmp3_t exp, input int op);
    checks++;
    if (!(res === '0 || res === exp)) begin
      failures++; $display("FAIL op %0d hazard res=%b exp=%b", op, res, exp);
    end
    checks++;
    if (!(cls === DR_SPACER0 || cls === dr_enc(exp.gt | exp.eq))) begin
      failures++; $display("FAIL op %0d hazard cls=%b", op, cls);
    end
  endtask

  function automatic logic clause_ref(input logic [NF-1:0] fv, input logic [2*NF-1:0] ev);
    logic r = 1'b1;
    for (int m = 0; m < NF; m++) r &= (fv[m] | ev[2*m]) & (~fv[m] | ev[2*m+1]);
    return r;
  endfunction

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1'b1; f = '0; e_pos = '0; e_neg = '0;
    #10 rst = 1'b0; #(2*TD);
    checks++; if (done !== 1'b0 || res !== '0) begin failures++; $display("FAIL after reset"); end

    for (int op = 0; op < NOPS; op++) begin
      logic [NF-1:0] fv;
      logic [NC-1:0][2*NF-1:0] evp, evn;
      logic [NC-1:0] want_p, want_n;
      int kp, kn, cp, cn, first, order[NF];
      cmp3_t exp;
      time t_sp;
      bit early;

      fv = NF'($urandom);
      kp = $urandom % (NC + 1);
      kn = (op % 7 == 0) ? kp : $urandom % (NC + 1);
      want_p = '0; want_n = '0;
      for (int j = 0; j < kp; j++) want_p[j] = 1'b1;
      for (int j = 0; j < kn; j++) want_n[j] = 1'b1;
      want_p = NC'(({want_p, want_p} >> ($urandom % NC)));
      want_n = NC'(({want_n, want_n} >> ($urandom % NC)));
      cp = 0; cn = 0;
      for (int j = 0; j < NC; j++) begin
        evp[j] = make_clause(fv, want_p[j]);
        evn[j] = make_clause(fv, want_n[j]);
        cp += clause_ref(fv, evp[j]);
        cn += clause_ref(fv, evn[j]);
      end
      checks++;
      if (cp != kp || cn != kn) begin failures++; $display("FAIL stimulus %0d/%0d %0d/%0d", cp, kp, cn, kn); end
      exp = '{gt: cp > cn, eq: cp == cn, lt: cp < cn};
      first = 0;
      for (int i = 3; i >= 0; i--) if (first == 0 && cp[i] != cn[i]) first = i + 1;

      early = 0;
      if (op % 2 == 0) begin
        // codeword phase: exclude actions first, then the features one by one
        for (int j = 0; j < NC; j++)
          for (int i = 0; i < 2*NF; i++) begin
            e_pos[j][i] = dr_enc(evp[j][i]);
            e_neg[j][i] = dr_enc(evn[j][i]);
          end
        #5;
        checks++; if (done !== 1'b0) begin failures++; $display("FAIL done before features"); end
        for (int i = 0; i < NF; i++) order[i] = i;
        order.shuffle();
        for (int i = 0; i < NF; i++) begin
          if (done) early = 1;
          f[order[i]] = dr_enc(fv[order[i]]);
          #5;
          check_monotonic(exp, op);
        end
      end else begin
        // codeword phase: every input pair on its own, in random order
        for (int k = 0; k < NPI; k++) pi_order[k] = k;
        pi_order.shuffle();
        for (int n = 0; n < NPI; n++) begin
          int k;
          k = pi_order[n];
          if (done) early = 1;
          if (k < NF) set_pi(k, dr_enc(fv[k]));
          else if (k < NF + NC*2*NF) set_pi(k, dr_enc(evp[(k-NF) / (2*NF)][(k-NF) % (2*NF)]));
          else set_pi(k, dr_enc(evn[(k-NF-NC*2*NF) / (2*NF)][(k-NF-NC*2*NF) % (2*NF)]));
          #1;
          check_monotonic(exp, op);
        end
        if (early) n_early_any++;
      end
      wait (done === 1'b1);
      #1;
      checks += 2;
      if (res !== exp) begin failures++; $display("FAIL op %0d pos=%0d neg=%0d res=%b", op, cp, cn, res); end
      if (cls !== dr_enc(cp >= cn)) begin failures++; $display("FAIL op %0d cls=%b", op, cls); end
      if (early) n_early++;
      if (first == 0) n_eq++; else n_bit[first-1]++;
      n_gt += exp.gt; n_lt += exp.lt;

      // spacer phase: the output returns to spacer, done falls TD later
      t_sp = $time;
      if (op % 2 == 1) begin
        pi_order.shuffle();
        // in groups of six pairs, so that the whole spacer is applied well
        // within TD (the grace period assumes a prompt spacer)
        for (int n = 0; n < NPI; n++) begin
          set_pi(pi_order[n], DR_SPACER0);
          if (n % 6 == 5 || n == NPI - 1) begin
            #1;
            check_monotonic(exp, op);
          end
        end
      end
      f = '0; e_pos = '0; e_neg = '0;
      #1;
      checks += 2;
      if (res !== '0 || cls !== DR_SPACER0) begin failures++; $display("FAIL op %0d no spacer res=%b", op, res); end
      if (done !== 1'b1) begin failures++; $display("FAIL op %0d done fell with the output", op); end
      else n_grace++;
      wait (done === 1'b0);
      checks++;
      if ($time - t_sp < time'(TD)) begin failures++; $display("FAIL op %0d grace period %0t", op, $time - t_sp); end
      #5;
    end

    $display("decided at bit3=%0d bit2=%0d bit1=%0d bit0=%0d equal=%0d", n_bit[3], n_bit[2], n_bit[1], n_bit[0], n_eq);
    $display("greater=%0d less=%0d early_done=%0d (random order %0d) delayed_done_fall=%0d", n_gt, n_lt, n_early, n_early_any, n_grace);
    for (int i = 0; i < 4; i++) if (n_bit[i] == 0) begin failures++; $display("FAIL never decided at bit %0d", i); end
    if (n_eq == 0 || n_gt == 0 || n_lt == 0) begin failures++; $display("FAIL outcome coverage"); end
    if (n_early == 0) begin failures++; $display("FAIL early completion never seen"); end
    if (n_early_any == 0) begin failures++; $display("FAIL early completion in random order never seen"); end
    if (n_grace == 0) begin failures++; $display("FAIL delayed done never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
