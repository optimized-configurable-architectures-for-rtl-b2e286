// list_buffer: distance buffer and sliced-symbol buffer (Figs. 4, 8, 9).
//
// Holds, for each of up to four lists m (one per WL decomposition, or one
// per interferer hypothesis in MU-MIMO mode), the 256 accumulated
// distances g_m(x) and, for every candidate, the sliced symbol of each
// layer (the set O_m of eq. 41). Two banks are kept so that the LLR stage
// can read the lists of one received vector while the core writes the lists
// of the next one; the ping-pong arrangement is this design's choice, the
// paper only names the buffers.
//
// Write ports (synchronous, whole list at once, as the core produces all
// candidates in parallel):
//   sym_we  : symbols of layer sym_layer into list sym_list of bank sym_bank
//   dist_we : distances into list dist_list of bank dist_bank
// Read port (combinational): list rd_list of bank rd_bank.
// Symbols are {real index, imaginary index}; the symbol of the enumerated
// layer is not stored, the reader knows it from the candidate index.
module list_buffer
  import mimo_pkg::*;
(
  input  logic       clk,
  input  logic       sym_we,
  input  logic       sym_bank,
  input  logic [1:0] sym_list,
  input  logic [1:0] sym_layer,
  input  sym_t       sym_in  [NCAND],
  input  logic       dist_we,
  input  logic       dist_bank,
  input  logic [1:0] dist_list,
  input  dist_t      dist_in [NCAND],
  input  logic       rd_bank,
  input  logic [1:0] rd_list,
  output dist_t      rd_dist [NCAND],
  output sym_t       rd_sym  [NCAND][NLMAX]
);

  dist_t dmem [2][NLMAX][NCAND];
  sym_t  smem [2][NLMAX][NCAND][NLMAX];

  always_ff @(posedge clk) begin
    if (dist_we)
      for (int e = 0; e < NCAND; e++)
        dmem[dist_bank][dist_list][e] <= dist_in[e];
    if (sym_we)
      for (int e = 0; e < NCAND; e++)
        smem[sym_bank][sym_list][e][sym_layer] <= sym_in[e];
  end

  always_comb
    for (int e = 0; e < NCAND; e++) begin
      rd_dist[e] = dmem[rd_bank][rd_list][e];
      for (int n = 0; n < NLMAX; n++) rd_sym[e][n] = smem[rd_bank][rd_list][e][n];
    end

endmodule
