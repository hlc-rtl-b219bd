// tb_hlc_rce_plt: random symbol maps (mostly long runs, some noise); the run
// count, run symbols, run lengths and the rate (sum of the bit-widths of the
// run lengths) are compared with a reference computed here.
module tb_hlc_rce_plt;
  import hlc_pkg::*;
  rli_sym_e [CU_PIX-1:0] sym, run_sym;
  logic [6:0] nruns;
  logic [CU_PIX-1:0][6:0] run_len;
  logic [9:0] rate;
  int checks = 0, failures = 0;
  hlc_rce_plt dut (.sym, .nruns, .run_sym, .run_len, .rate);
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask
  function automatic int bw(input int v); int n = 0; while (v > 0) begin n++; v >>= 1; end return n; endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      automatic int rs[$], rl[$]; automatic int er;
      for (int p = 0; p < CU_PIX; p++)
        if (p == 0 || $urandom_range(0, (t % 4 == 0) ? 1 : 9) == 0) sym[p] = rli_sym_e'($urandom_range(0, 2));
        else sym[p] = sym[p-1];
      if (t == 0) sym = '{default: SYM_L};
      #1;
      for (int p = 0; p < CU_PIX; p++)
        if (p == 0 || sym[p] != sym[p-1]) begin rs.push_back(int'(sym[p])); rl.push_back(1); end
        else rl[rl.size()-1]++;
      er = 0; foreach (rl[i]) er += bw(rl[i]);
      chk(nruns == 7'(rs.size()), $sformatf("nruns %0d exp %0d", nruns, rs.size()));
      chk(rate == 10'(er), $sformatf("rate %0d exp %0d", rate, er));
      foreach (rs[i]) begin
        chk(int'(run_sym[i]) == rs[i], "run sym");
        chk(int'(run_len[i]) == rl[i], "run len");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
