// tb_dr_spinv: checks that codewords keep their value and spacers flip.
module tb_dr_spinv;
  import dr_pkg::*;
  dr_t a, y;
  int checks = 0, failures = 0;

  dr_spinv dut (.a(a), .y(y));

  task automatic t(input dr_t ai, input dr_t exp);
    a = ai; #1; checks++;
    if (y !== exp) begin failures++; $display("FAIL a=%b y=%b exp=%b", ai, y, exp); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    t(DR_SPACER0, DR_SPACER1); t(DR_SPACER1, DR_SPACER0);
    t(dr_enc(1'b0), dr_enc(1'b0)); t(dr_enc(1'b1), dr_enc(1'b1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
