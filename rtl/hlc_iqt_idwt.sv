// hlc_iqt_idwt: inverse quantization and inverse Haar wavelet, the exact
// counterpart of hlc_dwt_qt. A non-zero level q becomes
// sign(q) * ((|q| << s) + (s ? 1 << (s-1) : 0)) with s = QP>>1 (mid-point
// reconstruction, this design's choice); then the vertical and horizontal
// lifting steps are undone: b = L - (H >>> 1), a = H + b. Output is the
// reconstructed residual (12-bit signed; the caller adds the prediction and
// clips). Combinational.
module hlc_iqt_idwt
  import hlc_pkg::*;
(
  input  cucoef_t     coef,
  input  logic [3:0]  qp,
  output cucoef_t     res
);
  always_comb begin
    logic signed [11:0] u [CU_H][CU_W];
    logic signed [11:0] t [CU_H][CU_W];
    logic signed [11:0] l, h, b;
    logic [11:0]        m;
    logic [2:0]         qs;
    qs = 3'(qp >> 1);
    for (int c = 0; c < NCOMP; c++) begin
      for (int y = 0; y < CU_H; y++)
        for (int x = 0; x < CU_W; x++) begin
          m = coef[y*CU_W + x][c][11] ? 12'(-coef[y*CU_W + x][c]) : 12'(coef[y*CU_W + x][c]);
          if (m != '0) m = (m << qs) + ((qs != '0) ? (12'd1 << (qs - 3'd1)) : 12'd0);
          u[y][x] = coef[y*CU_W + x][c][11] ? -coef_t'(m) : coef_t'(m);
        end
      for (int x = 0; x < CU_W; x++)
        for (int j = 0; j < CU_H/2; j++) begin
          l = u[j][x];
          h = u[j + CU_H/2][x];
          b = l - (h >>> 1);
          t[2*j+1][x] = b;
          t[2*j][x]   = h + b;
        end
      for (int y = 0; y < CU_H; y++)
        for (int i = 0; i < CU_W/2; i++) begin
          l = t[y][i];
          h = t[y][i + CU_W/2];
          b = l - (h >>> 1);
          res[y*CU_W + 2*i + 1][c] = b;
          res[y*CU_W + 2*i][c]     = h + b;
        end
    end
  end
endmodule
