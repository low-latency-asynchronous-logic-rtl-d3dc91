// tb_dr_mag_cmp: exhaustive check of the 4-bit comparator, its 1-of-3 output
// and spacer, and early termination: the answer appears when only the bits
// down to the first difference are valid.
module tb_dr_mag_cmp;
  import dr_pkg::*;
  localparam int W = 4;
  dr_t [W-1:0] a, b;
  cmp3_t res;
  int checks = 0, failures = 0, n_early = 0;

  dr_mag_cmp #(.W(W)) dut (.a(a), .b(b), .res(res));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      logic [W-1:0] av, bv;
      cmp3_t exp;
      int first;
      {av, bv} = 8'(v);
      exp = '{gt: av > bv, eq: av == bv, lt: av < bv};
      a = '0; b = '0; #1; checks++;
      if (res !== '0) begin failures++; $display("FAIL spacer res=%b", res); end
      // bits arrive MSB first; result must stay spacer until the first
      // differing bit, then be correct at once
      first = -1;
      for (int i = W - 1; i >= 0; i--) if (first < 0 && av[i] != bv[i]) first = i;
      for (int i = W - 1; i >= 0; i--) begin
        a[i] = dr_enc(av[i]); b[i] = dr_enc(bv[i]); #1; checks++;
        if (i > first && i > 0) begin
          if (res !== '0) begin failures++; $display("FAIL premature a=%0d b=%0d bit %0d", av, bv, i); end
        end else begin
          if (res !== exp) begin failures++; $display("FAIL a=%0d b=%0d bit %0d res=%b", av, bv, i, res); end
        end
        if (i == first && i > 0) n_early++;
      end
    end
    if (n_early == 0) failures++;
    $display("early decisions: %0d", n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
