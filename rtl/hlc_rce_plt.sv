// hlc_rce_plt: rate cost estimation for the palette (RCE_PLT).
// The 64 RLI symbols, read in raster order, are cut into runs of equal
// symbols. The estimated rate is the sum, over all runs, of the bit-width
// of the run length, as the paper defines it. The run count, each run's
// symbol and each run's length are also output: the entropy coder reuses
// them instead of recomputing them. Runs may continue across row ends
// (this design's choice). Purely combinational.
module hlc_rce_plt
  import hlc_pkg::*;
(
  input  rli_sym_e [CU_PIX-1:0]  sym,
  output logic [6:0]             nruns,     // 1..64
  output rli_sym_e [CU_PIX-1:0]  run_sym,   // entries 0..nruns-1 used
  output logic [CU_PIX-1:0][6:0] run_len,
  output logic [9:0]             rate
);
  always_comb begin
    int r;
    r = 0;
    run_sym = '{default: SYM_L};
    run_len = '0;
    rate    = '0;
    run_sym[0] = sym[0];
    run_len[0] = 7'd1;
    for (int p = 1; p < CU_PIX; p++) begin
      if (sym[p] == sym[p-1]) begin
        run_len[r] = run_len[r] + 7'd1;
      end else begin
        r = r + 1;
        run_sym[r] = sym[p];
        run_len[r] = 7'd1;
      end
    end
    nruns = 7'(r + 1);
    for (int k = 0; k < CU_PIX; k++)
      if (k <= r) rate = rate + 10'(ubits(12'(run_len[k])));
  end
endmodule
