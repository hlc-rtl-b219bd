// tb_hlc_plt_rec: random palettes and index maps; each reconstructed pixel
// must be the palette entry its index names.
module tb_hlc_plt_rec;
  import hlc_pkg::*;
  idxmap_t map; pix_t [NCC-1:0] pal; cu_t rec;
  int checks = 0, failures = 0;
  hlc_plt_rec dut (.idx_map(map), .palette(pal), .rec);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 100; t++) begin
      for (int k = 0; k < NCC; k++) pal[k] = pix_t'($urandom);
      for (int p = 0; p < CU_PIX; p++) map[p] = cidx_t'($urandom);
      #1;
      for (int p = 0; p < CU_PIX; p++) begin
        automatic int k = int'(map[p]);
        checks++;
        if (rec[p] != pal[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
