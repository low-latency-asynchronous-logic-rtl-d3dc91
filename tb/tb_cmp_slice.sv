// tb_cmp_slice: exhaustive check of one comparator slice, including the
// all-low outputs when the request or either operand is absent.
module tb_cmp_slice;
  import dr_pkg::*;
  dr_t a, b;
  logic ev, gt, eq, lt;
  int checks = 0, failures = 0;

  cmp_slice dut (.a(a), .b(b), .eval(ev), .gt(gt), .eq(eq), .lt(lt));

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic [2:0] exp;
      a = dr_enc(v[0]); b = dr_enc(v[1]); ev = v[2]; #1; checks++;
      exp = !v[2] ? 3'b000 : (v[0] && !v[1]) ? 3'b100 : (!v[0] && v[1]) ? 3'b001 : 3'b010;
      if ({gt, eq, lt} !== exp) begin failures++; $display("FAIL v=%0d out=%b exp=%b", v, {gt, eq, lt}, exp); end
    end
    ev = 1; a = '0; b = dr_enc(1'b1); #1; checks++;
    if ({gt, eq, lt} !== 3'b000) begin failures++; $display("FAIL spacer a"); end
    a = dr_enc(1'b1); b = '0; #1; checks++;
    if ({gt, eq, lt} !== 3'b000) begin failures++; $display("FAIL spacer b"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
