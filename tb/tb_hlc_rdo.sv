// tb_hlc_rdo: stage S1 against a complete reference model written here.
// A 64x8 picture (4x2 CUs) is sent twice, at a low and a high QP. Its CUs
// mix flat two-colour "text" blocks (which fit in a palette) with
// gradients and noise. For every CU the reference keeps its own
// reconstructed picture, rebuilds the DP prediction from it, runs the Haar
// transform, quantization, bit-width rate, dequantization and inverse
// transform, forms the palette reconstruction and run-length rate, and
// applies J = 16*D + lambda*R. The decision, D and R of both paths, the
// bit-planes, run count and reconstruction must all match, one clock after
// the input. Both decisions must occur.
module tb_hlc_rdo;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid; s0_t in; s1_t out;
  int checks = 0, failures = 0, n_plt = 0, n_dp = 0;
  int lam[16] = '{3, 4, 5, 7, 10, 14, 19, 26, 35, 48, 66, 91, 125, 172, 236, 324};
  pix_t recpic [8][64];
  hlc_rdo #(.WIDTH(64)) dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask
  function automatic int bw(input int v);
    int m = v < 0 ? -v : v; int n = 0;
    while (m > 0) begin n++; m >>= 1; end
    return (v == 0) ? 0 : n + 1;
  endfunction
  function automatic int ubw(input int v);
    int n = 0; while (v > 0) begin n++; v >>= 1; end return n;
  endfunction

  initial begin
    in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 4; pass++)
      for (int cy = 0; cy < 2; cy++)
        for (int cx = 0; cx < 4; cx++) begin
          automatic cu_t ori, pred, recd, recp; automatic int q = (pass % 2 == 0) ? 2 : 12;
          automatic int kind = (cx + cy + pass) % 3;
          automatic int dcv[3]; automatic int coef[64][3]; automatic int rdp = 0; automatic int bp[16];
          automatic int ddp = 0, dplt = 0, rplt = 0, nr = 0, jd, jp; automatic bit isp;
          automatic int idx[64]; automatic int sym[64]; automatic int rl[64];
          automatic pix_t c0 = pix_t'($urandom), c1 = pix_t'($urandom);
          automatic int mode = $urandom_range(0, 2);
          // source CU and a palette built from it
          for (int p = 0; p < 64; p++) begin
            idx[p] = ((p % 16) / (2 + pass) + p / 16) % 2;
            for (int c = 0; c < 3; c++)
              ori[p][c] = (kind == 0) ? (idx[p] ? c1[c] : c0[c]) :
                          (kind == 1) ? 8'(p * 3 + c * 20) : 8'($urandom);
          end
          in = '0;
          in.ori = ori; in.qp = 4'(q); in.dp_mode = dp_mode_e'(mode); in.cu_x = 8'(cx); in.cu_y = 10'(cy);
          in.plt_ok = (kind == 0); in.ncc = 4'd2; in.palette[0] = c0; in.palette[1] = c1;
          for (int p = 0; p < 64; p++) in.idx_map[p] = cidx_t'(idx[p]);
          // DP reference
          for (int c = 0; c < 3; c++) begin
            automatic int st = 0, sl = 0;
            for (int x = 0; x < 16; x++) st += (cy > 0) ? recpic[cy*4-1][cx*16+x][c] : 0;
            for (int y = 0; y < 4; y++) sl += (cx > 0) ? recpic[cy*4+y][cx*16-1][c] : 0;
            dcv[c] = (cy > 0 && cx > 0) ? (st + 4 * sl + 16) / 32 : (cy > 0) ? (st + 8) / 16 : (cx > 0) ? (sl + 2) / 4 : 128;
          end
          for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++)
            pred[p][c] = (mode == 0) ? 8'(dcv[c]) :
                         (mode == 1) ? ((cy > 0) ? recpic[cy*4-1][cx*16 + p%16][c] : 8'd128) :
                                       ((cx > 0) ? recpic[cy*4 + p/16][cx*16-1][c] : 8'd128);
          for (int c = 0; c < 3; c++) begin
            automatic int t[4][16], u[4][16];
            for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
              automatic int a = int'(ori[y*16+2*i][c]) - int'(pred[y*16+2*i][c]);
              automatic int b = int'(ori[y*16+2*i+1][c]) - int'(pred[y*16+2*i+1][c]);
              t[y][i] = b + ((a - b) >>> 1); t[y][i+8] = a - b;
            end
            for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
              automatic int h = t[2*j][x] - t[2*j+1][x];
              u[j][x] = t[2*j+1][x] + (h >>> 1); u[j+2][x] = h;
            end
            for (int p = 0; p < 64; p++) begin
              automatic int v = u[p/16][p%16]; automatic int m = (v < 0 ? -v : v) >> (q >> 1);
              coef[p][c] = v < 0 ? -m : m;
              rdp += bw(coef[p][c]);
            end
            // inverse
            for (int p = 0; p < 64; p++) begin
              automatic int m = coef[p][c] < 0 ? -coef[p][c] : coef[p][c];
              if (m != 0) m = (m << (q >> 1)) + (1 << ((q >> 1) - 1));
              u[p/16][p%16] = coef[p][c] < 0 ? -m : m;
            end
            for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
              automatic int b = u[j][x] - (u[j+2][x] >>> 1);
              t[2*j+1][x] = b; t[2*j][x] = u[j+2][x] + b;
            end
            for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
              automatic int b = t[y][i] - (t[y][i+8] >>> 1);
              automatic int a = t[y][i+8] + b;
              a += pred[y*16+2*i][c]; b += pred[y*16+2*i+1][c];
              recd[y*16+2*i][c]   = 8'(a < 0 ? 0 : a > 255 ? 255 : a);
              recd[y*16+2*i+1][c] = 8'(b < 0 ? 0 : b > 255 ? 255 : b);
            end
          end
          for (int k = 0; k < 16; k++) bp[k] = 0;
          for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++) begin
            automatic int k = (p / 32) * 8 + (p % 16) / 2;
            if (bw(coef[p][c]) > bp[k]) bp[k] = bw(coef[p][c]);
          end
          // PLT reference
          for (int p = 0; p < 64; p++) begin
            recp[p] = idx[p] ? c1 : c0;
            sym[p] = (p % 16 != 0 && idx[p] == idx[p-1]) ? 0 : (p >= 16 && idx[p] == idx[p-16]) ? 1 : 2;
            if (p == 0 || sym[p] != sym[p-1]) begin rl[nr] = 1; nr++; end else rl[nr-1]++;
          end
          for (int r = 0; r < nr; r++) rplt += ubw(rl[r]);
          for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++) begin
            automatic int d1 = int'(ori[p][c]) - int'(recd[p][c]);
            automatic int d2 = int'(ori[p][c]) - int'(recp[p][c]);
            ddp += d1 < 0 ? -d1 : d1; dplt += d2 < 0 ? -d2 : d2;
          end
          jd = ddp * 16 + lam[q] * rdp; jp = dplt * 16 + lam[q] * rplt;
          isp = (kind == 0) && jp < jd;
          for (int p = 0; p < 64; p++) recpic[cy*4 + p/16][cx*16 + p%16] = isp ? recp[p] : recd[p];
          // drive and compare
          @(negedge clk); in_valid = 1;
          @(posedge clk); #1; in_valid = 0;
          chk(out_valid, "valid");
          chk(int'(out.d_dp) == ddp, $sformatf("d_dp %0d exp %0d", out.d_dp, ddp));
          chk(int'(out.r_dp) == rdp, $sformatf("r_dp %0d exp %0d", out.r_dp, rdp));
          chk(int'(out.d_plt) == dplt, $sformatf("d_plt %0d exp %0d", out.d_plt, dplt));
          chk(int'(out.r_plt) == rplt, $sformatf("r_plt %0d exp %0d", out.r_plt, rplt));
          chk(int'(out.nruns) == nr, "nruns");
          chk(out.is_plt == isp, "decision");
          for (int k = 0; k < 16; k++) chk(int'(out.bitplane[k]) == bp[k], "bitplane");
          for (int p = 0; p < 64; p++) chk(out.rec[p] == (isp ? recp[p] : recd[p]), "rec");
          if (isp) n_plt++; else n_dp++;
          repeat (3) @(posedge clk);
        end
    chk(n_plt > 0 && n_dp > 0, "both decisions");
    $display("plt=%0d dp=%0d", n_plt, n_dp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
