// tb_pam_metric_gen: compares every table entry K2 p^2 + K1 p - b^T lambda
// with the reference for random constants, priors and all five dimension
// sizes (1..16 levels); entries above the level count must read 0.
module tb_pam_metric_gen;
  import mimo_pkg::*;
  import tb_ref_pkg::*;

  logic [2:0] kbits = '0;
  coef_t      k2 = '0, k1 = '0;
  llr_t       lam [KMAX];
  dist_t      m [PMAX];

  pam_metric_gen dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int l [4];
    for (int t = 0; t < 400; t++) begin
      kbits = 3'(t % 5);
      k2 = coef_t'($urandom);
      k1 = coef_t'($urandom);
      for (int j = 0; j < 4; j++) begin
        l[j] = int'($urandom_range(255, 0)) - 128;
        lam[j] = llr_t'(l[j]);
      end
      #1;
      for (int i = 0; i < PMAX; i++) begin
        automatic longint exp = (i < (1 << int'(kbits)))
          ? pam(int'(kbits), longint'(k2), longint'(k1), l[0], l[1], l[2], l[3], i) : 0;
        checks++;
        if (longint'(m[i]) != exp) begin
          failures++;
          if (failures < 5) $display("FAIL: k=%0d i=%0d got %0d exp %0d", kbits, i, m[i], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
