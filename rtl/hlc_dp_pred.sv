// hlc_dp_pred: builds the directional prediction of a 16x4 CU for one of the
// three modes the paper keeps: DC (one flat value), VT (each column copies
// the pixel above it) and HT (each row copies the pixel left of it).
// Missing neighbours (first CU row or column) are replaced by 128. The DC
// value is (sum(top) + 4*sum(left) + 16) >> 5 when both sides exist, the
// mean of the existing side otherwise; both are this design's choices.
// Combinational.
module hlc_dp_pred
  import hlc_pkg::*;
(
  input  dp_mode_e         mode,
  input  pix_t [CU_W-1:0]  top,
  input  pix_t [CU_H-1:0]  left,
  input  logic             top_ok,
  input  logic             left_ok,
  output cu_t              pred
);
  pix_t dc;
  always_comb begin
    for (int c = 0; c < NCOMP; c++) begin
      logic [11:0] st, sl;
      st = '0; sl = '0;
      for (int x = 0; x < CU_W; x++) st += 12'(top[x][c]);
      for (int y = 0; y < CU_H; y++) sl += 12'(left[y][c]);
      if (top_ok && left_ok) dc[c] = 8'((13'(st) + 13'(sl << 2) + 13'd16) >> 5);
      else if (top_ok)       dc[c] = 8'((st + 12'd8) >> 4);
      else if (left_ok)      dc[c] = 8'((sl + 12'd2) >> 2);
      else                   dc[c] = 8'd128;
    end
    for (int y = 0; y < CU_H; y++)
      for (int x = 0; x < CU_W; x++)
        unique case (mode)
          DP_VT:   pred[y*CU_W+x] = top_ok  ? top[x]  : {NCOMP{8'd128}};
          DP_HT:   pred[y*CU_W+x] = left_ok ? left[y] : {NCOMP{8'd128}};
          default: pred[y*CU_W+x] = dc;
        endcase
  end
endmodule
