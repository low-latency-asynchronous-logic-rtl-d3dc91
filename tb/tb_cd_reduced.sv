// tb_cd_reduced: done rises with any 1-of-3 codeword, falls TD after spacer.
module tb_cd_reduced;
  import dr_pkg::*;
  localparam int TD = 40;
  cmp3_t res;
  logic done;
  int checks = 0, failures = 0;

  cd_reduced #(.TD(TD)) dut (.res(res), .done(done));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    res = '0; #(2*TD); checks++; if (done !== 0) failures++;
    for (int k = 0; k < 3; k++) begin
      res = cmp3_t'(3'b1 << k); #1; checks++;
      if (done !== 1) begin failures++; $display("FAIL no done for %b", res); end
      #10; res = '0; #(TD - 2); checks++;
      if (done !== 1) begin failures++; $display("FAIL done fell early"); end
      #4; checks++;
      if (done !== 0) begin failures++; $display("FAIL done stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
