// tb_hlc_iqt_idwt: (1) at QP 0 and 1 the block must exactly undo the
// forward Haar computed here, giving back the original residual; (2) for
// random quantized levels at every QP the output is compared with a plain
// integer reference of mid-point dequantization and inverse lifting.
module tb_hlc_iqt_idwt;
  import hlc_pkg::*;
  cucoef_t coef, res; logic [3:0] qp;
  int checks = 0, failures = 0;
  hlc_iqt_idwt dut (.coef, .qp, .res);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int r[3][4][16], t[4][16], u[4][16];
    for (int it = 0; it < 400; it++) begin
      if (it < 100) begin
        qp = 4'(it % 2);
        for (int c = 0; c < 3; c++) begin
          for (int y = 0; y < 4; y++) for (int x = 0; x < 16; x++) r[c][y][x] = $urandom_range(0, 510) - 255;
          for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
            automatic int h = r[c][y][2*i] - r[c][y][2*i+1];
            t[y][i] = r[c][y][2*i+1] + (h >>> 1); t[y][i+8] = h;
          end
          for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
            automatic int h = t[2*j][x] - t[2*j+1][x];
            u[j][x] = t[2*j+1][x] + (h >>> 1); u[j+2][x] = h;
          end
          for (int y = 0; y < 4; y++) for (int x = 0; x < 16; x++) coef[y*16+x][c] = coef_t'(u[y][x]);
        end
        #1;
        for (int c = 0; c < 3; c++) for (int p = 0; p < 64; p++) begin
          checks++; if (int'(res[p][c]) != r[c][p/16][p%16]) failures++;
        end
      end else begin
        automatic int s;
        qp = 4'($urandom_range(0, 15)); s = qp >> 1;
        for (int c = 0; c < 3; c++) for (int p = 0; p < 64; p++)
          coef[p][c] = coef_t'(($urandom_range(0, 60) - 30) >>> s);
        #1;
        for (int c = 0; c < 3; c++) begin
          for (int y = 0; y < 4; y++) for (int x = 0; x < 16; x++) begin
            automatic int q = int'(coef[y*16+x][c]);
            automatic int m = q < 0 ? -q : q;
            if (m != 0) m = (m << s) + (s > 0 ? (1 << (s - 1)) : 0);
            u[y][x] = q < 0 ? -m : m;
          end
          for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
            automatic int b = u[j][x] - (u[j+2][x] >>> 1);
            t[2*j+1][x] = b; t[2*j][x] = u[j+2][x] + b;
          end
          for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
            automatic int b = t[y][i] - (t[y][i+8] >>> 1);
            checks += 2;
            if (int'(res[y*16+2*i+1][c]) != b) failures++;
            if (int'(res[y*16+2*i][c]) != t[y][i+8] + b) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
