// tb_hlc_ec_plt: random palettes and index maps with long runs. The run
// data is built here from the L/T/N rule; the coded bits are then parsed
// by a small decoder written here (3-bit ncc-1, colours, EGC0 run count,
// per run symbol + EGC0 length, 3-bit indices for N pixels), which rebuilds
// the index map and palette. Both must equal the inputs, and the bit count
// must equal what the parser consumed.
module tb_hlc_ec_plt;
  import hlc_pkg::*;
  pix_t [NCC-1:0] palette; logic [3:0] ncc; idxmap_t idx_map; logic [6:0] nruns;
  rli_sym_e [CU_PIX-1:0] run_sym; logic [CU_PIX-1:0][6:0] run_len; cubits_t bits; logic [11:0] len;
  int checks = 0, failures = 0, pos;
  hlc_ec_plt dut (.palette, .ncc, .idx_map, .nruns, .run_sym, .run_len, .bits, .len);
  function automatic int get(int n);
    int v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction
  function automatic int egc();
    int z = 0;
    while (bits[pos] == 1'b0 && z < 20) begin z++; pos++; end
    return get(z + 1) - 1;
  endfunction
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 300; it++) begin
      automatic int n = $urandom_range(1, 8);
      automatic int sym[64]; automatic int r = 0; automatic int dn; automatic int dmap[64];
      ncc = 4'(n);
      palette = '0;
      for (int k = 0; k < n; k++) palette[k] = pix_t'($urandom);
      for (int p = 0; p < 64; p++)
        idx_map[p] = (p > 0 && $urandom_range(0, 3) != 0) ? idx_map[p-1] : cidx_t'($urandom_range(0, n - 1));
      for (int p = 0; p < 64; p++)
        sym[p] = (p % 16 != 0 && idx_map[p] == idx_map[p-1]) ? 0 : (p >= 16 && idx_map[p] == idx_map[p-16]) ? 1 : 2;
      run_sym = '{default: SYM_L}; run_len = '0;
      for (int p = 0; p < 64; p++) begin
        if (p > 0 && sym[p] != sym[p-1]) r++;
        run_sym[r] = rli_sym_e'(sym[p]); run_len[r] = run_len[r] + 7'd1;
      end
      nruns = 7'(r + 1);
      #1;
      pos = 0;
      dn = get(3) + 1;
      chk(dn == n, "ncc");
      for (int k = 0; k < dn; k++) for (int c = 0; c < 3; c++) chk(get(8) == int'(palette[k][c]), "colour");
      begin
        automatic int nr = egc() + 1; automatic int p = 0;
        chk(nr == r + 1, "nruns");
        for (int i = 0; i < nr && p < 64; i++) begin
          automatic int s = get(2); automatic int l = egc() + 1;
          for (int j = 0; j < l && p < 64; j++) begin
            dmap[p] = (s == 0) ? dmap[p-1] : (s == 1) ? dmap[p-16] : get(3);
            p++;
          end
        end
        chk(p == 64, "pixels covered");
      end
      for (int p = 0; p < 64; p++) chk(dmap[p] == int'(idx_map[p]), "index");
      chk(int'(len) == pos, $sformatf("len %0d parsed %0d", len, pos));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
