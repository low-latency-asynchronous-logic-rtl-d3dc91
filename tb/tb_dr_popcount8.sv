// tb_dr_popcount8: exhaustive check of the eight-input dual-rail popcount,
// with a spacer between every codeword.
module tb_dr_popcount8;
  import dr_pkg::*;
  dr_t [7:0] a;
  dr_t [3:0] y;
  int checks = 0, failures = 0;

  dr_popcount8 dut (.a(a), .y(y));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      logic [7:0] bits;
      logic [3:0] cnt;
      dr_t [3:0] exp;
      bits = 8'(v);
      cnt = 4'($countones(bits));
      for (int i = 0; i < 4; i++) exp[i] = dr_enc(cnt[i]);
      a = '0; #1; checks++;
      if (y !== '0) begin failures++; $display("FAIL spacer y=%b", y); end
      for (int i = 0; i < 8; i++) a[i] = dr_enc(bits[i]);
      #1; checks++;
      if (y !== exp) begin failures++; $display("FAIL a=%b y=%b exp=%0d", bits, y, cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
