// dr_popcount8: eight-input dual-rail population count.
//
// Counts the ones among a[7:0] into a 4-bit result y (0..8) with nine half
// adders, two OR gates and two full adders, after the optimised counter of
// Dalalah et al. that the paper builds on:
//   level 1  HA0..HA3 add the input pairs (a0,a1) .. (a6,a7);
//   level 2  HA4 adds the two sums and HA5 the two carries of HA0/HA1
//            (HA6, HA7 likewise for HA2/HA3); HA4.c and HA5.s can never both
//            be 1, so an OR merges them into the weight-2 bit of the 4-input
//            count {HA5.c, OR, HA4.s};
//   level 3  HA8 adds the weight-1 bits (y0), FA0 the weight-2 bits with HA8's
//            carry (y1), FA1 the weight-4 bits with FA0's carry (y2), and
//            FA1's carry is y3.
// The full adders keep their carries on the all-one spacer, so a spacer
// inverter sits between HA8 and FA0 and another between FA1 and y3; input and
// output both use the all-zero spacer. The structure and spacer inverter
// positions follow the paper. Purely combinational.
module dr_popcount8
  import dr_pkg::*;
(
  input  dr_t [7:0] a,
  output dr_t [3:0] y
);

  dr_t [3:0] s1, c1;          // HA0..HA3
  dr_t [3:0] s2, c2;          // HA4..HA7
  dr_t [1:0] w2;              // OR outputs (weight 2 of each half)
  dr_t       c8, c8i, co0, co1;

  for (genvar i = 0; i < 4; i++) begin : g_l1
    dr_ha u_ha (.a(a[2*i]), .b(a[2*i+1]), .s(s1[i]), .c(c1[i]));
  end

  for (genvar h = 0; h < 2; h++) begin : g_l2
    // HA4 / HA6: sums of the pair of level-1 adders
    dr_ha u_has (.a(s1[2*h]), .b(s1[2*h+1]), .s(s2[2*h]),   .c(c2[2*h]));
    // HA5 / HA7: carries of the pair of level-1 adders
    dr_ha u_hac (.a(c1[2*h]), .b(c1[2*h+1]), .s(s2[2*h+1]), .c(c2[2*h+1]));
    dr_or u_or  (.a(c2[2*h]), .b(s2[2*h+1]), .y(w2[h]));
  end

  dr_ha   u_ha8  (.a(s2[0]), .b(s2[2]), .s(y[0]), .c(c8));
  dr_spinv u_inv0 (.a(c8), .y(c8i));
  dr_fa   u_fa0  (.a(w2[0]), .b(w2[1]), .ci(c8i), .s(y[1]), .co(co0));
  dr_fa   u_fa1  (.a(c2[1]), .b(c2[3]), .ci(co0), .s(y[2]), .co(co1));
  dr_spinv u_inv1 (.a(co1), .y(y[3]));

endmodule
