// tb_hlc_dwt_qt: random residual CUs (full range and small values) at all
// QPs. A reference written with plain integers applies the Haar lifting
// (H = a - b, L = b + floor(H/2)) along rows, then columns, places the
// subbands, and quantizes by dropping QP>>1 magnitude bits; every
// coefficient must match.
module tb_hlc_dwt_qt;
  import hlc_pkg::*;
  cures_t res; logic [3:0] qp; cucoef_t coef;
  int checks = 0, failures = 0;
  hlc_dwt_qt dut (.res, .qp, .coef);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int r[4][16], t[4][16], u[4][16];
    for (int it = 0; it < 400; it++) begin
      qp = 4'(it % 16);
      for (int c = 0; c < 3; c++) begin
        for (int p = 0; p < 64; p++) res[p][c] = (it % 2) ? res_t'($urandom_range(0, 510) - 255) : res_t'($urandom_range(0, 8) - 4);
      end
      #1;
      for (int c = 0; c < 3; c++) begin
        for (int y = 0; y < 4; y++) for (int x = 0; x < 16; x++) r[y][x] = int'(res[y*16+x][c]);
        for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
          automatic int h = r[y][2*i] - r[y][2*i+1];
          t[y][i] = r[y][2*i+1] + (h >>> 1); t[y][i+8] = h;
        end
        for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
          automatic int h = t[2*j][x] - t[2*j+1][x];
          u[j][x] = t[2*j+1][x] + (h >>> 1); u[j+2][x] = h;
        end
        for (int y = 0; y < 4; y++) for (int x = 0; x < 16; x++) begin
          automatic int m = (u[y][x] < 0 ? -u[y][x] : u[y][x]) >> (qp >> 1);
          automatic int e = u[y][x] < 0 ? -m : m;
          checks++;
          if (int'(coef[y*16+x][c]) != e) begin
            failures++; if (failures < 5) $display("it %0d y%0d x%0d c%0d got %0d exp %0d", it, y, x, c, coef[y*16+x][c], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
