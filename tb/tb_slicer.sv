// tb_slicer: random increasing decision thresholds t1 < ... < t(P-1) give
// lo[i] = t(i), hi[i] = t(i+1) (open ends at the extremes, empty ranges for
// unused levels); the sliced index must equal the number of thresholds not
// above u, for u near every threshold and at random.
module tb_slicer;
  import mimo_pkg::*;

  dist_t u = '0;
  dist_t lo [PMAX], hi [PMAX];
  pidx_t idx;

  slicer dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint th [PMAX];
    for (int t = 0; t < 200; t++) begin
      automatic int p = 1 << (t % 5);
      th[0] = longint'(int'($urandom_range(200000, 0))) - 100000;
      for (int i = 1; i < PMAX; i++) th[i] = th[i - 1] + 1 + $urandom_range(5000, 0);
      for (int i = 0; i < PMAX; i++) begin
        lo[i] = (i >= p) ? DIST_MAX : (i == 0 ? DIST_MIN : dist_t'(th[i - 1]));
        hi[i] = (i >= p) ? DIST_MIN : (i == p - 1 ? DIST_MAX : dist_t'(th[i]));
      end
      for (int s = 0; s < 3 * PMAX + 20; s++) begin
        automatic longint uu;
        int exp;
        if (s < 3 * PMAX) uu = th[s / 3] + (s % 3) - 1;
        else              uu = longint'(int'($urandom_range(400000, 0))) - 200000;
        u = dist_t'(uu);
        #1;
        exp = 0;
        for (int i = 0; i < p - 1; i++) if (uu >= th[i]) exp = i + 1;
        checks++;
        if (int'(idx) != exp) begin
          failures++;
          if (failures < 5) $display("FAIL: P=%0d u=%0d got %0d exp %0d", p, uu, idx, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
