// tb_dr_fa: exhaustive check of the dual-rail full adder with its
// inverted-spacer carries, spacer behaviour and early carry-out.
module tb_dr_fa;
  import dr_pkg::*;
  dr_t a, b, ci, s, co;
  int checks = 0, failures = 0;

  dr_fa dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic [1:0] sum;
      sum = 2'(v[0]) + 2'(v[1]) + 2'(v[2]);
      a = '0; b = '0; ci = DR_SPACER1; #1; checks++;
      if (s !== DR_SPACER0 || co !== DR_SPACER1) begin failures++; $display("FAIL spacer s=%b co=%b", s, co); end
      a = dr_enc(v[0]); b = dr_enc(v[1]); ci = dr_enc(v[2]); #1; checks += 2;
      if (s !== dr_enc(sum[0])) begin failures++; $display("FAIL v=%0d s=%b", v, s); end
      if (co !== dr_enc(sum[1])) begin failures++; $display("FAIL v=%0d co=%b", v, co); end
    end
    // early carry: a = b decides co while ci is still spacer
    for (int v = 0; v < 2; v++) begin
      a = '0; b = '0; ci = DR_SPACER1; #1;
      a = dr_enc(v[0]); b = dr_enc(v[0]); #1; checks += 2;
      if (co !== dr_enc(v[0])) begin failures++; $display("FAIL early co=%b", co); end
      if (s !== DR_SPACER0) begin failures++; $display("FAIL sum before ci s=%b", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
