// tb_hlc_rli_map: random and structured 16x4 index maps; every symbol is
// compared with a reference that applies the L / T / N rule directly.
module tb_hlc_rli_map;
  import hlc_pkg::*;
  idxmap_t map;
  rli_sym_e [CU_PIX-1:0] sym;
  int checks = 0, failures = 0;
  hlc_rli_map dut (.idx_map(map), .sym);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < CU_PIX; p++)
        map[p] = (t % 3 == 0) ? cidx_t'($urandom_range(0, 7)) : cidx_t'($urandom_range(0, 1) + (p % 16 > 8 ? 2 : 0));
      #1;
      for (int y = 0; y < 4; y++)
        for (int x = 0; x < 16; x++) begin
          automatic rli_sym_e e;
          automatic int p = y * 16 + x;
          if (x != 0 && map[p] == map[p-1]) e = SYM_L;
          else if (y != 0 && map[p] == map[p-16]) e = SYM_T;
          else e = SYM_N;
          checks++;
          if (sym[p] != e) begin
            failures++;
            if (failures < 5) $display("mismatch t=%0d p=%0d got %0d exp %0d", t, p, sym[p], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
