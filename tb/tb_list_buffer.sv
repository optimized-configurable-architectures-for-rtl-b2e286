// tb_list_buffer: random writes of symbol rows (bank, list, layer) and
// distance lists (bank, list) into a reference copy; after every write cycle
// a random (bank, list) is read back and compared in full. Writes of the two
// kinds happen in the same cycle and to both banks.
module tb_list_buffer;
  import mimo_pkg::*;

  logic       clk = 1'b0;
  logic       sym_we = 1'b0, sym_bank = 1'b0;
  logic [1:0] sym_list = '0, sym_layer = '0;
  sym_t       sym_in [NCAND];
  logic       dist_we = 1'b0, dist_bank = 1'b0;
  logic [1:0] dist_list = '0;
  dist_t      dist_in [NCAND];
  logic       rd_bank = 1'b0;
  logic [1:0] rd_list = '0;
  dist_t      rd_dist [NCAND];
  sym_t       rd_sym  [NCAND][NLMAX];

  list_buffer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  dist_t rdm [2][NLMAX][NCAND];
  sym_t  rsm [2][NLMAX][NCAND][NLMAX];

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // fill everything once so that reads are defined
    for (int b = 0; b < 2; b++)
      for (int l = 0; l < NLMAX; l++) begin
        @(negedge clk);
        dist_we = 1'b1; dist_bank = 1'(b); dist_list = 2'(l);
        for (int e = 0; e < NCAND; e++) begin
          dist_in[e] = dist_t'($urandom); rdm[b][l][e] = dist_in[e];
        end
        for (int n = 0; n < NLMAX; n++) begin
          sym_we = 1'b1; sym_bank = 1'(b); sym_list = 2'(l); sym_layer = 2'(n);
          for (int e = 0; e < NCAND; e++) begin
            sym_in[e] = sym_t'($urandom); rsm[b][l][e][n] = sym_in[e];
          end
          @(negedge clk);
          dist_we = 1'b0;
        end
        sym_we = 1'b0;
      end
    for (int t = 0; t < 200; t++) begin
      sym_we = $urandom_range(1, 0); dist_we = $urandom_range(1, 0);
      sym_bank = $urandom_range(1, 0); sym_list = 2'($urandom); sym_layer = 2'($urandom);
      dist_bank = $urandom_range(1, 0); dist_list = 2'($urandom);
      for (int e = 0; e < NCAND; e++) begin
        sym_in[e] = sym_t'($urandom); dist_in[e] = dist_t'($urandom);
        if (sym_we) rsm[sym_bank][sym_list][e][sym_layer] = sym_in[e];
        if (dist_we) rdm[dist_bank][dist_list][e] = dist_in[e];
      end
      @(negedge clk);
      sym_we = 1'b0; dist_we = 1'b0;
      rd_bank = $urandom_range(1, 0); rd_list = 2'($urandom);
      #1;
      for (int e = 0; e < NCAND; e++) begin
        checks++;
        if (rd_dist[e] != rdm[rd_bank][rd_list][e]) failures++;
        for (int n = 0; n < NLMAX; n++) begin
          checks++;
          if (rd_sym[e][n] != rsm[rd_bank][rd_list][e][n]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
