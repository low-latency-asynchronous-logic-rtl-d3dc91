// tb_delay_fall: checks the immediate rise and the TD-delayed fall.
module tb_delay_fall;
  localparam int TD = 50;
  logic a, y;
  int checks = 0, failures = 0;

  delay_fall #(.TD(TD)) dut (.a(a), .y(y));

  task automatic expect_y(input logic exp, input string what);
    checks++;
    if (y !== exp) begin failures++; $display("FAIL %0t %s y=%b", $time, what, y); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a = 0; #(2*TD); expect_y(0, "idle");
    for (int n = 0; n < 5; n++) begin
      a = 1; #1; expect_y(1, "rise");
      #20; a = 0; #1; expect_y(1, "just after fall");
      #(TD - 3); expect_y(1, "before TD");
      #4; expect_y(0, "after TD");
      #10;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
