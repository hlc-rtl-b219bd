// tb_hlc_top: end-to-end test of the encoder. Synthetic frames of
// PW x PH pixels (default 64x16, i.e. 4x4 CUs) mix text-like blocks (two or
// three colours in glyph patterns), blocks with twelve colours (too many for
// the palette), vertical and horizontal stripes, gradients and noise; the
// second frame is flat. Frames are streamed in raster order, four pixels
// per clock, at 1.75, 4.00 (flat frame, so the rate control must lower the
// QP again) and 1.00 bits per pixel.
// An independent decoder written here parses every CU's bits (header, then
// the palette or DP syntax), rebuilds the CU from its own decoded picture
// and must reproduce exactly the reconstruction the encoder reports, so the
// bitstream, the RDO choice and the reference handling are all checked.
// Also checked: CU order, the 16-clock CU spacing within a stripe, and that
// each mechanism occurred: PLT chosen, DP chosen, each DP mode, palette
// overflow, QP raised and lowered by rate control, input stalls.
module tb_hlc_top;
  import hlc_pkg::*;
  localparam int PW = 64, PH = 16, NFRAMES = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  logic [7:0] bpp_q4;
  pix_t [PPC-1:0] in_pix;
  logic cu_valid, cu_is_plt, cu_plt_ok; cubits_t cu_bits; logic [11:0] cu_len; logic [3:0] cu_qp;
  dp_mode_e cu_dp_mode; logic [7:0] cu_x; logic [9:0] cu_y; cu_t cu_rec;
  int checks = 0, failures = 0;
  int n_plt = 0, n_dp = 0, n_mode[3] = '{0, 0, 0}, n_ovf = 0, n_qup = 0, n_qdn = 0, n_stall = 0;
  pix_t dec [PH][PW];
  int pos;

  hlc_top #(.WIDTH(PW), .HEIGHT(PH)) dut (.clk, .rst_n, .bpp_q4, .in_pix, .in_valid, .in_ready,
    .cu_valid, .cu_bits, .cu_len, .cu_is_plt, .cu_qp, .cu_dp_mode, .cu_plt_ok, .cu_x, .cu_y, .cu_rec);

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  function automatic pix_t src(int f, int x, int y);
    int bx = x / 16, by = y / 4, kind = (f == 1) ? 6 : (bx + 2 * by + f) % 6;
    pix_t fg = {8'(30 + 40 * f), 8'(200 - bx * 10), 8'(90)};
    pix_t bg = {8'(240), 8'(235), 8'(220 - by * 5)};
    case (kind)
      0: return (((x * 7 + y * 3) % 5) < 2) ? fg : bg;                         // glyph-like, 2 colours
      1: return (x % 6 == 0) ? fg : (y == 2) ? {8'd200, 8'd20, 8'd20} : bg;   // 3 colours
      2: return {8'(x * 16 + y), 8'(x * 4), 8'(y * 60)};                      // 12+ colours
      3: return {8'(16 * (x % 16)), 8'(255 - 16 * (x % 16)), 8'(x * 3)};      // vertical structure
      4: return {8'(60 * y + f), 8'(200 - 50 * y), 8'(10 * y)};               // horizontal structure
      5: return pix_t'($urandom);                                             // noise
      default: return bg;                                                     // flat
    endcase
  endfunction

  function automatic int get(int n);
    int v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(cu_bits[pos]); pos++; end
    return v;
  endfunction
  function automatic int egc();
    int z = 0;
    while (cu_bits[pos] == 1'b0 && z < 20) begin z++; pos++; end
    return get(z + 1) - 1;
  endfunction

  // decoder for one CU at (cx, cy); returns the decoded CU
  function automatic cu_t decode(int cx, int cy, output int is_plt, output int qp, output int mode);
    cu_t o;
    pos = 0;
    is_plt = get(1); qp = get(4); mode = 0;
    if (is_plt) begin
      automatic int n = get(3) + 1; automatic pix_t pal[8]; automatic int idx[64]; automatic int p = 0;
      automatic int nr;
      for (int k = 0; k < n; k++) for (int c = 0; c < 3; c++) pal[k][c] = 8'(get(8));
      nr = egc() + 1;
      for (int r = 0; r < nr && p < 64; r++) begin
        automatic int s = get(2); automatic int l = egc() + 1;
        for (int j = 0; j < l && p < 64; j++) begin
          idx[p] = (s == 0) ? idx[p-1] : (s == 1) ? idx[p-16] : get(3);
          o[p] = pal[idx[p]];
          p++;
        end
      end
    end else begin
      automatic int bp[16]; automatic int u[4][16], t[4][16]; automatic int s; automatic int dcv[3];
      automatic cu_t pred; automatic int cf[64][3];
      mode = get(2); s = qp >> 1;
      for (int k = 0; k < 16; k++) bp[k] = get(4);
      for (int k = 0; k < 16; k++)
        for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) for (int c = 0; c < 3; c++) begin
          automatic int v = get(bp[k]);
          if (bp[k] > 0 && v >= (1 << (bp[k] - 1))) v -= (1 << bp[k]);
          cf[(2*(k/8)+dy)*16 + 2*(k%8) + dx][c] = v;
        end
      for (int c = 0; c < 3; c++) begin
        automatic int st = 0, sl = 0;
        for (int x = 0; x < 16; x++) st += (cy > 0) ? dec[cy*4-1][cx*16+x][c] : 0;
        for (int y = 0; y < 4; y++) sl += (cx > 0) ? dec[cy*4+y][cx*16-1][c] : 0;
        dcv[c] = (cy > 0 && cx > 0) ? (st + 4 * sl + 16) / 32 : (cy > 0) ? (st + 8) / 16 : (cx > 0) ? (sl + 2) / 4 : 128;
      end
      for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++)
        pred[p][c] = (mode == 0) ? 8'(dcv[c]) :
                     (mode == 1) ? ((cy > 0) ? dec[cy*4-1][cx*16 + p%16][c] : 8'd128) :
                                   ((cx > 0) ? dec[cy*4 + p/16][cx*16-1][c] : 8'd128);
      for (int c = 0; c < 3; c++) begin
        for (int p = 0; p < 64; p++) begin
          automatic int m = cf[p][c] < 0 ? -cf[p][c] : cf[p][c];
          if (m != 0) m = (m << s) + (s > 0 ? (1 << (s - 1)) : 0);
          u[p/16][p%16] = cf[p][c] < 0 ? -m : m;
        end
        for (int x = 0; x < 16; x++) for (int j = 0; j < 2; j++) begin
          automatic int b = u[j][x] - (u[j+2][x] >>> 1);
          t[2*j+1][x] = b; t[2*j][x] = u[j+2][x] + b;
        end
        for (int y = 0; y < 4; y++) for (int i = 0; i < 8; i++) begin
          automatic int b = t[y][i] - (t[y][i+8] >>> 1);
          automatic int a = t[y][i+8] + b;
          a += pred[y*16+2*i][c]; b += pred[y*16+2*i+1][c];
          o[y*16+2*i][c]   = 8'(a < 0 ? 0 : a > 255 ? 255 : a);
          o[y*16+2*i+1][c] = 8'(b < 0 ? 0 : b > 255 ? 255 : b);
        end
      end
    end
    return o;
  endfunction

  // stimulus
  initial begin
    bpp_q4 = 8'd28; in_pix = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      automatic int n = 0;
      bpp_q4 = (f == 0) ? 8'd28 : (f == 1) ? 8'd64 : 8'd16;   // 1.75, 4.00, then 1.00 bit per pixel
      while (n < PW * PH / 4) begin
        @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < 4; j++) in_pix[j] = src(f, (n * 4) % PW + j, (n * 4) / PW);
        @(posedge clk);
        if (!in_ready) n_stall++;
        else n++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (PW + 300) @(posedge clk);
    finish_up();
  end

  int ncu = 0, last_cyc = -100, cyc = 0, prev_qp = -1, prev_x = -1;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    #1;
    if (cu_valid) begin
      automatic int isp, q, m; automatic cu_t d;
      automatic int ex = ncu % (PW / 16), ey = (ncu / (PW / 16)) % (PH / 4);
      chk(int'(cu_x) == ex && int'(cu_y) == ey, $sformatf("cu order %0d,%0d exp %0d,%0d", cu_x, cu_y, ex, ey));
      if (ex != 0) chk(cyc - last_cyc == 16, $sformatf("CU spacing %0d", cyc - last_cyc));
      last_cyc = cyc;
      d = decode(ex, ey, isp, q, m);
      chk(pos == int'(cu_len), $sformatf("parsed %0d of %0d bits", pos, cu_len));
      chk(isp == int'(cu_is_plt) && q == int'(cu_qp), "header");
      chk(cu_len <= 12'(MAXBITS), "capacity");
      for (int p = 0; p < 64; p++) chk(d[p] == cu_rec[p], $sformatf("cu %0d pixel %0d", ncu, p));
      for (int p = 0; p < 64; p++) dec[ey*4 + p/16][ex*16 + p%16] = d[p];
      if (isp) n_plt++; else begin n_dp++; n_mode[m]++; end
      if (!cu_plt_ok) n_ovf++;
      if (prev_qp >= 0 && q > prev_qp) n_qup++;
      if (prev_qp >= 0 && q < prev_qp) n_qdn++;
      prev_qp = q;
      ncu++;
    end
  end

  task automatic finish_up();
    chk(ncu == NFRAMES * (PW / 16) * (PH / 4), $sformatf("CUs %0d", ncu));
    chk(n_plt > 0, "PLT chosen");
    chk(n_dp > 0, "DP chosen");
    chk(n_mode[0] > 0, "DC chosen");
    chk(n_mode[1] > 0, "VT chosen");
    chk(n_mode[2] > 0, "HT chosen");
    chk(n_ovf > 0, "palette overflow");
    chk(n_qup > 0 && n_qdn > 0, "QP raised and lowered");
    chk(n_stall > 0, "input stall");
    $display("CUs=%0d plt=%0d dp=%0d DC=%0d VT=%0d HT=%0d overflow=%0d qp_up=%0d qp_down=%0d stalls=%0d",
             ncu, n_plt, n_dp, n_mode[0], n_mode[1], n_mode[2], n_ovf, n_qup, n_qdn, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
