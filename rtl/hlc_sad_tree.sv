// hlc_sad_tree: sum of absolute differences between two 16x4 CUs over all
// three components (64 x 3 terms, at most 48960). Used for the DP mode
// decision and for the distortion D of both RDO paths. Written as a
// balanced adder tree: per-pixel SADs, then pairwise sums over six levels.
// Combinational.
module hlc_sad_tree
  import hlc_pkg::*;
(
  input  cu_t          a,
  input  cu_t          b,
  output logic [15:0]  sad
);
  logic [15:0] lvl [7][CU_PIX];
  always_comb begin
    for (int l = 0; l < 7; l++) for (int p = 0; p < CU_PIX; p++) lvl[l][p] = '0;
    for (int p = 0; p < CU_PIX; p++) lvl[0][p] = 16'(pix_sad(a[p], b[p]));
    for (int l = 1; l < 7; l++)
      for (int p = 0; p < (CU_PIX >> l); p++)
        lvl[l][p] = lvl[l-1][2*p] + lvl[l-1][2*p+1];
    sad = lvl[6][0];
  end
endmodule
