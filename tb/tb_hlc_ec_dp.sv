// tb_hlc_ec_dp: random quantized coefficients; bit-planes are computed here
// as the largest signed bit-width of each cube. The coded bits are parsed
// (sixteen 4-bit bit-planes, then each cube's 12 coefficients in
// bit-plane-wide two's complement) and must give back every coefficient;
// the bit count must be 64 + 12 * sum(bit-planes).
module tb_hlc_ec_dp;
  import hlc_pkg::*;
  cucoef_t coef; logic [NCUBE-1:0][3:0] bitplane; cubits_t bits; logic [11:0] len;
  int checks = 0, failures = 0, pos;
  hlc_ec_dp dut (.coef, .bitplane, .bits, .len);
  function automatic int get(int n);
    int v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction
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
      automatic int bp[16]; automatic int tot = 64;
      for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++)
        coef[p][c] = ($urandom_range(0, 2) == 0) ? coef_t'($urandom_range(0, 2040) - 1020) >>> $urandom_range(0, 10) : '0;
      for (int k = 0; k < 16; k++) bp[k] = 0;
      for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++) begin
        automatic int k = (p / 32) * 8 + (p % 16) / 2;
        if (bw(int'(coef[p][c])) > bp[k]) bp[k] = bw(int'(coef[p][c]));
      end
      for (int k = 0; k < 16; k++) begin bitplane[k] = 4'(bp[k]); tot += 12 * bp[k]; end
      #1;
      pos = 0;
      for (int k = 0; k < 16; k++) begin checks++; if (get(4) != bp[k]) failures++; end
      for (int k = 0; k < 16; k++)
        for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) for (int c = 0; c < 3; c++) begin
          automatic int v = get(bp[k]);
          if (bp[k] > 0 && v >= (1 << (bp[k] - 1))) v -= (1 << bp[k]);
          checks++;
          if (v != int'(coef[(2*(k/8)+dy)*16 + 2*(k%8) + dx][c])) failures++;
        end
      checks++; if (int'(len) != tot || pos != tot) begin failures++; $display("len %0d exp %0d", len, tot); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
