// tb_boundary_gen: for random B, G, priors and every dimension size, sweeps
// u over a range covering all boundaries (plus random far values) and checks
// that exactly one level has lo <= u < hi and that it is the exhaustive
// minimiser of u p + B p^2 + G p - b^T lambda (lowest index on ties).
// Unused levels must have an empty range.
module tb_boundary_gen;
  import mimo_pkg::*;
  import tb_ref_pkg::*;

  logic [2:0] kbits = '0;
  coef_t      kb = '0, kg = '0;
  llr_t       lam [KMAX];
  dist_t      lo [PMAX], hi [PMAX];

  boundary_gen dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int l [4];
    for (int t = 0; t < 100; t++) begin
      automatic int k = t % 5;
      kbits = 3'(k);
      kb = coef_t'($urandom_range((t < 50) ? 40 : 30000, 0));
      kg = coef_t'(int'($urandom_range(60000, 0)) - 30000);
      for (int j = 0; j < 4; j++) begin
        l[j] = (t % 3 == 0) ? 0 : int'($urandom_range(255, 0)) - 128;
        lam[j] = llr_t'(l[j]);
      end
      #1;
      for (int s = 0; s < 300; s++) begin
        longint u, v;
        int idx, nhit, got;
        if (s < 200) u = -longint'(kg) + (longint'(s) - 100) * (longint'(kb) * 32 + 300) / 100
                         + int'($urandom_range(20, 0)) - 10;
        else         u = longint'(int'($urandom_range(4000000, 0)) - 2000000);
        slice(k, u, longint'(kb), longint'(kg), l[0], l[1], l[2], l[3], idx, v);
        nhit = 0; got = -1;
        for (int i = 0; i < PMAX; i++)
          if (u >= longint'(lo[i]) && u < longint'(hi[i])) begin
            nhit++;
            got = i;
          end
        checks++;
        if (nhit != 1 || got != idx) begin
          failures++;
          if (failures < 5) $display("FAIL: k=%0d B=%0d G=%0d u=%0d hits=%0d got %0d exp %0d",
                                     k, kb, kg, u, nhit, got, idx);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
