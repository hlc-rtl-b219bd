// hlc_dwt_qt: forward wavelet and quantization of the 16x4 DP residual.
// The paper names a multidimensional DWT, made cheap by the 16x4 CU shape,
// followed by quantization, without giving the filter or quantizer. This
// block uses one level of the integer Haar lifting (S-) transform,
// H = a - b, L = b + (H >>> 1), first along each row (pairs of columns),
// then along each column (pairs of rows). Coefficients are laid out in the
// 16x4 array as subbands: columns 0-7 low / 8-15 high horizontally, rows
// 0-1 low / 2-3 high vertically. Quantization drops QP>>1 magnitude bits,
// rounding toward zero. With QP 0 or 1 the path is lossless. Per component,
// combinational.
module hlc_dwt_qt
  import hlc_pkg::*;
(
  input  cures_t      res,
  input  logic [3:0]  qp,
  output cucoef_t     coef
);
  always_comb begin
    logic signed [11:0] t  [CU_H][CU_W];
    logic signed [11:0] u  [CU_H][CU_W];
    logic signed [11:0] a, b, h;
    logic [11:0]        m;
    logic [2:0]         qs;
    qs = 3'(qp >> 1);
    for (int c = 0; c < NCOMP; c++) begin
      for (int y = 0; y < CU_H; y++)
        for (int i = 0; i < CU_W/2; i++) begin
          a = 12'(res[y*CU_W + 2*i][c]);
          b = 12'(res[y*CU_W + 2*i + 1][c]);
          h = a - b;
          t[y][i]          = b + (h >>> 1);
          t[y][i + CU_W/2] = h;
        end
      for (int x = 0; x < CU_W; x++)
        for (int j = 0; j < CU_H/2; j++) begin
          a = t[2*j][x];
          b = t[2*j+1][x];
          h = a - b;
          u[j][x]          = b + (h >>> 1);
          u[j + CU_H/2][x] = h;
        end
      for (int y = 0; y < CU_H; y++)
        for (int x = 0; x < CU_W; x++) begin
          m = u[y][x][11] ? 12'(-u[y][x]) : 12'(u[y][x]);
          m = m >> qs;
          coef[y*CU_W + x][c] = u[y][x][11] ? -coef_t'(m) : coef_t'(m);
        end
    end
  end
endmodule
