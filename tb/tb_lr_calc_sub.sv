// tb_lr_calc_sub: random and corner-case operands for one path-cost lane,
// compared with C + min(L1, L2, L3, minLr + P2) - minLr. Operands respect
// the invariant of the recursion (minLr <= L1, and L2, L3 >= minLr + P1).
module tb_lr_calc_sub;
  import sgm_pkg::*;
  cpd_t cpd;
  logic [LR_W:0] l1, l2, l3;
  lr_t min_prev, lr;
  p2_t p2r;
  int checks = 0, failures = 0;
  lr_calc_sub dut (.cpd, .l1, .l2, .l3, .min_prev, .p2r, .lr);

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int mp, a, b, c, p, cc, m, e;
      mp = $urandom % 3000;
      a  = mp + $urandom % ((n % 3 == 0) ? 4 : 1500);
      b  = (n % 7 == 0) ? (1 << (LR_W + 1)) - 1 : mp + 8 + $urandom % 1500;
      c  = (n % 11 == 0) ? (1 << (LR_W + 1)) - 1 : mp + 8 + $urandom % 1500;
      p  = 8 + $urandom % 1016;
      cc = $urandom % 4096;
      cpd = cpd_t'(cc); l1 = (LR_W+1)'(a); l2 = (LR_W+1)'(b); l3 = (LR_W+1)'(c);
      min_prev = lr_t'(mp); p2r = p2_t'(p);
      m = a;
      if (b < m) m = b;
      if (c < m) m = c;
      if (mp + p < m) m = mp + p;
      e = cc + m - mp;
      #1;
      checks++;
      if (int'(lr) != e) begin
        failures++;
        if (failures < 10) $display("C=%0d L=%0d,%0d,%0d min=%0d P2=%0d: got %0d expected %0d", cc, a, b, c, mp, p, lr, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
