// tb_hlc_ec: random S1 bundles, half palette and half DP. Checks, one clock
// after each input: the header (PLT flag, QP, DP mode for DP CUs), that the
// body after the header is exactly the selected coding path's output
// (compared bit by bit with separately instantiated path coders), and that
// the length is header + body.
module tb_hlc_ec;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  s1_t in; cubits_t out_bits, pb, db; logic [11:0] out_len, pl, dl;
  int checks = 0, failures = 0, n_plt = 0, n_dp = 0;
  hlc_ec dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out_bits, .out_len);
  hlc_ec_plt ref_plt (.palette(in.palette), .ncc(in.ncc), .idx_map(in.idx_map), .nruns(in.nruns),
                      .run_sym(in.run_sym), .run_len(in.run_len), .bits(pb), .len(pl));
  hlc_ec_dp  ref_dp  (.coef(in.coef), .bitplane(in.bitplane), .bits(db), .len(dl));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      automatic int hl; automatic cubits_t eb; automatic int el;
      @(negedge clk);
      in = '0;
      in.is_plt = it[0];
      in.qp = 4'($urandom);
      in.dp_mode = dp_mode_e'($urandom_range(0, 2));
      in.ncc = 4'($urandom_range(1, 8));
      for (int k = 0; k < 8; k++) in.palette[k] = pix_t'($urandom);
      for (int p = 0; p < 64; p++) begin
        in.idx_map[p] = cidx_t'($urandom);
        for (int c = 0; c < 3; c++) in.coef[p][c] = coef_t'($urandom_range(0, 6) - 3);
      end
      for (int k = 0; k < 16; k++) in.bitplane[k] = 4'd3;
      in.nruns = 7'd64;
      for (int r = 0; r < 64; r++) begin in.run_sym[r] = SYM_N; in.run_len[r] = 7'd1; end
      in_valid = 1;
      #1;
      eb = in.is_plt ? pb : db; el = in.is_plt ? int'(pl) : int'(dl);
      @(posedge clk); #1;
      in_valid = 0;
      checks++; if (!out_valid) failures++;
      hl = in.is_plt ? 5 : 7;
      checks++; if (out_bits[0] != in.is_plt) failures++;
      checks++; if ({out_bits[1], out_bits[2], out_bits[3], out_bits[4]} != in.qp) failures++;
      if (!in.is_plt) begin checks++; if ({out_bits[5], out_bits[6]} != in.dp_mode) failures++; n_dp++; end
      else n_plt++;
      checks++; if (int'(out_len) != hl + el) begin failures++; $display("len %0d exp %0d", out_len, hl + el); end
      for (int i = 0; i < el; i++) begin checks++; if (out_bits[hl + i] != eb[i]) failures++; end
    end
    checks++; if (n_plt == 0 || n_dp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
