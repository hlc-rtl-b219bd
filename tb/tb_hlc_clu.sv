// tb_hlc_clu: streams CUs back to back (16 groups of 4 pixels each) into
// the eight-PCE clustering unit. CUs are built from 1..10 base colours plus
// small noise, so some fit in eight clusters and some need a ninth. A
// sequential reference (each pixel in raster order: minimum SAD over the
// existing centres, join if below 1<<(QP>>1), else open a new centre, fail
// on a ninth) predicts plt_ok, the cluster count, the index map and the
// palette (rounded mean of each cluster). The result must come out
// NPCE+1 = 9 clocks after the last group is taken.
module tb_hlc_clu;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0;
  pix_t [PPC-1:0] in_pix; logic in_valid = 0, in_first = 0, in_last = 0; logic [3:0] qp;
  logic out_valid, plt_ok; idxmap_t idx_map; pix_t [NCC-1:0] palette; logic [3:0] ncc;
  int checks = 0, failures = 0, n_ok = 0, n_fail = 0;
  hlc_clu dut (.clk, .rst_n, .in_pix, .in_valid, .in_first, .in_last, .qp,
               .out_valid, .idx_map, .palette, .ncc, .plt_ok);
  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int sadf(pix_t a, pix_t b);
    automatic int s = 0;
    for (int c = 0; c < 3; c++) s += (a[c] > b[c]) ? a[c] - b[c] : b[c] - a[c];
    return s;
  endfunction
  typedef struct { bit ok; int n; int idx[64]; pix_t pal[8]; } ref_t;
  ref_t expq[$];
  int   last_cyc[$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  task automatic make_ref(input cu_t cu, input logic [3:0] q);
    ref_t r; pix_t cc[8]; int sum[8][3]; int cnt[8]; int thr;
    thr = 1 << (q >> 1);
    r.ok = 1; r.n = 0;
    for (int k = 0; k < 8; k++) begin cnt[k] = 0; for (int c = 0; c < 3; c++) sum[k][c] = 0; end
    for (int p = 0; p < 64; p++) begin
      automatic int best = -1, bs = 1 << 20;
      for (int k = 0; k < r.n; k++) begin
        automatic int s = sadf(cu[p], cc[k]);
        if (s < thr && s < bs) begin bs = s; best = k; end
      end
      if (best < 0) begin
        if (r.n < 8) begin cc[r.n] = cu[p]; best = r.n; r.n++; end
        else r.ok = 0;
      end
      r.idx[p] = best;
      if (best >= 0) begin
        cnt[best]++;
        for (int c = 0; c < 3; c++) sum[best][c] += cu[p][c];
      end
    end
    for (int k = 0; k < 8; k++)
      for (int c = 0; c < 3; c++) r.pal[k][c] = (cnt[k] > 0) ? 8'((sum[k][c] + cnt[k] / 2) / cnt[k]) : 8'd0;
    expq.push_back(r);
  endtask

  initial begin
    cu_t cu; pix_t base[10]; int nb; logic [3:0] nq;
    in_pix = '0; qp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      nb = $urandom_range(1, 10);
      for (int b = 0; b < nb; b++) base[b] = pix_t'($urandom);
      for (int p = 0; p < 64; p++) begin
        automatic int b = (t % 5 == 0) ? p % nb : $urandom_range(0, nb - 1);
        for (int c = 0; c < 3; c++) cu[p][c] = base[b][c] + 8'($urandom_range(0, (t % 3) * 4));
      end
      nq = 4'($urandom_range(2, 15));
      make_ref(cu, nq);
      for (int g = 0; g < 16; g++) begin
        @(negedge clk);
        if (g == 0) qp = nq;
        in_valid = 1; in_first = (g == 0); in_last = (g == 15);
        for (int j = 0; j < 4; j++) in_pix[j] = cu[g*4 + j];
        if (g == 15) last_cyc.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0 || n_ok == 0 || n_fail == 0) failures++;
    $display("plt_ok CUs=%0d overflow CUs=%0d", n_ok, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      ref_t r; int lc;
      r = expq.pop_front(); lc = last_cyc.pop_front();
      checks++;
      if (cyc - lc != 9) begin failures++; $display("latency %0d", cyc - lc); end
      checks++;
      if (plt_ok != r.ok) begin failures++; $display("plt_ok %0d exp %0d", plt_ok, r.ok); end
      if (r.ok) begin
        n_ok++;
        checks++; if (int'(ncc) != r.n) begin failures++; $display("ncc %0d exp %0d", ncc, r.n);
          for (int p = 0; p < 64; p++) $write("%0d/%0d ", idx_map[p], r.idx[p]); $display(""); end
        for (int p = 0; p < 64; p++) begin checks++; if (int'(idx_map[p]) != r.idx[p]) failures++; end
        for (int k = 0; k < r.n; k++) begin checks++; if (palette[k] != r.pal[k]) begin failures++; $display("pal %0d %h exp %h", k, palette[k], r.pal[k]); end end
      end else n_fail++;
    end
  end
endmodule
