// tb_dr_partial_clause: exhaustive check of the partial clause against
// (f | e0) & (~f | e1), and of its inverted (all-one) output spacer.
module tb_dr_partial_clause;
  import dr_pkg::*;
  dr_t f, e0, e1, pc;
  int checks = 0, failures = 0;

  dr_partial_clause dut (.f(f), .e0(e0), .e1(e1), .pc(pc));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic fv, e0v, e1v, exp;
      {fv, e0v, e1v} = 3'(v);
      exp = (fv | e0v) & (~fv | e1v);
      f = '0; e0 = '0; e1 = '0; #1;
      checks++; if (pc !== DR_SPACER1) begin failures++; $display("FAIL spacer pc=%b", pc); end
      f = dr_enc(fv); e0 = dr_enc(e0v); e1 = dr_enc(e1v); #1;
      checks++;
      if (pc !== dr_enc(exp)) begin failures++; $display("FAIL f=%b e0=%b e1=%b pc=%b", fv, e0v, e1v, pc); end
    end
    // early propagation: an included literal that is 0 decides pc alone
    f = dr_enc(1'b0); e0 = dr_enc(1'b0); e1 = '0; #1;
    checks++; if (pc.f !== 1'b1 || pc.t !== 1'b0) begin failures++; $display("FAIL early pc=%b", pc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
