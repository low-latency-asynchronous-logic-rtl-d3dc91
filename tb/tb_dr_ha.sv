// tb_dr_ha: exhaustive check of the dual-rail half adder, spacer and early carry.
module tb_dr_ha;
  import dr_pkg::*;
  dr_t a, b, s, c;
  int checks = 0, failures = 0;

  dr_ha dut (.a(a), .b(b), .s(s), .c(c));

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      a = dr_enc(v[0]); b = dr_enc(v[1]); #1; checks += 2;
      if (s !== dr_enc(v[0] ^ v[1])) begin failures++; $display("FAIL v=%0d s=%b", v, s); end
      if (c !== dr_enc(v[0] & v[1])) begin failures++; $display("FAIL v=%0d c=%b", v, c); end
    end
    a = '0; b = '0; #1; checks++;
    if (s !== DR_SPACER0 || c !== DR_SPACER0) begin failures++; $display("FAIL spacer"); end
    a = dr_enc(1'b0); #1; checks++;
    if (c !== dr_enc(1'b0) || s !== DR_SPACER0) begin failures++; $display("FAIL early carry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
