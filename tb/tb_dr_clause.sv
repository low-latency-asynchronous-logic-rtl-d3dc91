// tb_dr_clause: random check of a 6-feature clause against the single-rail
// conjunction, spacer return, and early propagation of a false clause.
module tb_dr_clause;
  import dr_pkg::*;
  localparam int NF = 6;
  dr_t [NF-1:0]   f;
  dr_t [2*NF-1:0] e;
  dr_t            c;
  int checks = 0, failures = 0, n_true = 0, n_early = 0;

  dr_clause #(.NF(NF)) dut (.f(f), .e(e), .c(c));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [NF-1:0] fv;
      logic [2*NF-1:0] ev;
      logic exp;
      fv = NF'($urandom);
      for (int i = 0; i < 2*NF; i++) ev[i] = ($urandom % 4) != 0;  // mostly excluded
      exp = 1'b1;
      for (int m = 0; m < NF; m++) exp &= (fv[m] | ev[2*m]) & (~fv[m] | ev[2*m+1]);
      f = '0; e = '0; #1;
      checks++; if (c !== DR_SPACER0) begin failures++; $display("FAIL spacer c=%b", c); end
      for (int i = 0; i < 2*NF; i++) e[i] = dr_enc(ev[i]);
      // features arrive one at a time; a false clause may resolve early
      for (int m = 0; m < NF; m++) begin
        f[m] = dr_enc(fv[m]); #1;
        // before the last feature, c may already hold a codeword; if so it
        // must be the final value (false: a contradicted literal; true: the
        // remaining features are fully excluded)
        if (m < NF - 1 && (c.t | c.f)) begin
          n_early++;
          checks++; if (c !== dr_enc(exp)) begin failures++; $display("FAIL early c=%b exp=%b", c, exp); end
        end
      end
      checks++;
      if (c !== dr_enc(exp)) begin failures++; $display("FAIL f=%b e=%b c=%b exp=%b", fv, ev, c, exp); end
      n_true += exp;
    end
    if (n_true == 0 || n_early == 0) begin failures++; $display("FAIL coverage true=%0d early=%0d", n_true, n_early); end
    $display("clauses true=%0d, resolved early=%0d", n_true, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
