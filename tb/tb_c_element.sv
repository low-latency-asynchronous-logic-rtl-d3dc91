// tb_c_element: checks the C-element truth table, its hold behaviour and reset.
module tb_c_element;
  logic a, b, rst, q;
  int checks = 0, failures = 0;

  c_element dut (.a(a), .b(b), .rst(rst), .q(q));

  task automatic step(input logic na, input logic nb, input logic exp);
    a = na; b = nb; #1;
    checks++;
    if (q !== exp) begin failures++; $display("FAIL a=%b b=%b q=%b exp=%b", na, nb, q, exp); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; a = 1; b = 1; #1;
    checks++; if (q !== 1'b0) failures++;
    rst = 0;
    step(0, 0, 0); step(1, 0, 0); step(1, 1, 1); step(0, 1, 1); step(1, 1, 1);
    step(1, 0, 1); step(0, 0, 0); step(0, 1, 0); step(1, 1, 1); step(0, 0, 0);
    // random walk against a model
    begin
      logic m = 0;
      for (int i = 0; i < 200; i++) begin
        logic na, nb;
        na = 1'($urandom); nb = 1'($urandom);
        if (na == nb) m = na;
        step(na, nb, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
