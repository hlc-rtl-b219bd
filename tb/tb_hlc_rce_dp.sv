// tb_hlc_rce_dp: random coefficient arrays (sparse and dense); the rate
// (sum of signed bit-widths) and the sixteen cube bit-planes (largest
// bit-width in each 2x2x3 cube) are compared with a reference.
module tb_hlc_rce_dp;
  import hlc_pkg::*;
  cucoef_t coef; logic [11:0] rate; logic [NCUBE-1:0][3:0] bitplane;
  int checks = 0, failures = 0;
  hlc_rce_dp dut (.coef, .rate, .bitplane);
  function automatic int bw(input int v);
    int m = v < 0 ? -v : v; int n = 0;
    if (v == 0) return 0;
    while (m > 0) begin n++; m >>= 1; end
    return n + 1;
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 300; it++) begin
      automatic int er = 0; automatic int bp[16];
      for (int k = 0; k < 16; k++) bp[k] = 0;
      for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++)
        coef[p][c] = ($urandom_range(0, 3) == 0 || it % 2 == 1) ? coef_t'($urandom_range(0, 2040) - 1020) >>> $urandom_range(0, 10) : '0;
      #1;
      for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++) begin
        automatic int w = bw(int'(coef[p][c]));
        automatic int k = (p / 16 / 2) * 8 + (p % 16) / 2;
        er += w; if (w > bp[k]) bp[k] = w;
      end
      checks++; if (int'(rate) != er) begin failures++; $display("rate %0d exp %0d", rate, er); end
      for (int k = 0; k < 16; k++) begin checks++; if (int'(bitplane[k]) != bp[k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
