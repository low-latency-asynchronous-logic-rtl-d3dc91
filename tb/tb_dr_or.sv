// tb_dr_or: exhaustive check of the dual-rail OR, spacer and early 1.
module tb_dr_or;
  import dr_pkg::*;
  dr_t a, b, y;
  int checks = 0, failures = 0;

  dr_or dut (.a(a), .b(b), .y(y));

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      a = dr_enc(v[0]); b = dr_enc(v[1]); #1; checks++;
      if (y !== dr_enc(v[0] | v[1])) begin failures++; $display("FAIL v=%0d y=%b", v, y); end
    end
    a = '0; b = '0; #1; checks++; if (y !== DR_SPACER0) failures++;
    a = dr_enc(1'b1); #1; checks++; if (y !== dr_enc(1'b1)) failures++;
    a = dr_enc(1'b0); #1; checks++; if (y !== DR_SPACER0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
