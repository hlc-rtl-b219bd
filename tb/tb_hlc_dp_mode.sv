// tb_hlc_dp_mode: random neighbours and CUs shaped to favour each mode
// (copies of the top row, of the left column, flat, or noise), with all four
// availability cases. A reference builds the DC, VT and HT predictions and
// their SADs and picks the smallest (DC before VT before HT on ties); the
// chosen mode and its SAD must match, and each mode must win at least once.
module tb_hlc_dp_mode;
  import hlc_pkg::*;
  cu_t ori; pix_t [CU_W-1:0] top; pix_t [CU_H-1:0] left; logic top_ok, left_ok;
  dp_mode_e mode; logic [15:0] best_sad;
  int checks = 0, failures = 0; int wins[3] = '{0, 0, 0};
  hlc_dp_mode dut (.ori, .top, .left, .top_ok, .left_ok, .mode, .best_sad);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 400; it++) begin
      automatic int sads[3]; automatic int dc[3]; automatic int em; automatic int kind = it % 4;
      for (int x = 0; x < 16; x++) top[x] = pix_t'($urandom);
      for (int y = 0; y < 4; y++) left[y] = pix_t'($urandom);
      top_ok = ($urandom_range(0, 3) != 0); left_ok = ($urandom_range(0, 3) != 0);
      for (int p = 0; p < 64; p++)
        for (int c = 0; c < 3; c++)
          ori[p][c] = (kind == 0) ? top[p%16][c] + 8'($urandom_range(0, 3)) :
                      (kind == 1) ? left[p/16][c] + 8'($urandom_range(0, 3)) :
                      (kind == 2) ? 8'(100 + $urandom_range(0, 3)) : 8'($urandom);
      #1;
      for (int c = 0; c < 3; c++) begin
        automatic int st = 0, sl = 0;
        for (int x = 0; x < 16; x++) st += top[x][c];
        for (int y = 0; y < 4; y++) sl += left[y][c];
        dc[c] = (top_ok && left_ok) ? (st + 4 * sl + 16) / 32 : top_ok ? (st + 8) / 16 : left_ok ? (sl + 2) / 4 : 128;
      end
      for (int m = 0; m < 3; m++) begin
        sads[m] = 0;
        for (int p = 0; p < 64; p++) for (int c = 0; c < 3; c++) begin
          automatic int pr = (m == 0) ? dc[c] : (m == 1) ? (top_ok ? int'(top[p%16][c]) : 128) : (left_ok ? int'(left[p/16][c]) : 128);
          automatic int d = int'(ori[p][c]) - pr;
          sads[m] += d < 0 ? -d : d;
        end
      end
      em = 0; if (sads[1] < sads[em]) em = 1; if (sads[2] < sads[em]) em = 2;
      checks++; if (int'(mode) != em) begin failures++; if (failures < 5) $display("mode %0d exp %0d (%0d %0d %0d)", mode, em, sads[0], sads[1], sads[2]); end
      checks++; if (int'(best_sad) != sads[em]) failures++;
      wins[em]++;
    end
    checks++; if (wins[0] == 0 || wins[1] == 0 || wins[2] == 0) failures++;
    $display("wins DC=%0d VT=%0d HT=%0d", wins[0], wins[1], wins[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
