// tb_dr_latch: checks that the C-element latch passes codewords only while
// enabled, holds them while disabled, and passes the spacer only when disabled.
module tb_dr_latch;
  import dr_pkg::*;
  localparam int W = 4;
  logic rst, en;
  dr_t [W-1:0] d, q;
  int checks = 0, failures = 0;

  dr_latch #(.W(W)) dut (.rst(rst), .en(en), .d(d), .q(q));

  function automatic dr_t [W-1:0] enc(input logic [W-1:0] v);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  task automatic chk(input dr_t [W-1:0] exp, input string what);
    #1; checks++;
    if (q !== exp) begin failures++; $display("FAIL %s q=%b exp=%b", what, q, exp); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 1; d = '0; #1; rst = 0;
    chk('0, "reset");
    for (int n = 0; n < 50; n++) begin
      logic [W-1:0] v;
      v = W'($urandom);
      en = 1; d = enc(v);        chk(enc(v), "pass codeword");
      en = 0;                    chk(enc(v), "hold after disable");
      d = '0;                    chk('0, "spacer passes while disabled");
      d = enc(v);                chk('0, "codeword blocked while disabled");
      d = '0; en = 1;            chk('0, "spacer held");
      d = enc(v); en = 1;        chk(enc(v), "codeword after re-enable");
      d = '0;                    chk(enc(v), "spacer blocked while enabled");
      en = 0;                    chk('0, "spacer passes after disable");
      en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
