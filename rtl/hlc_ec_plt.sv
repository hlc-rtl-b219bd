// hlc_ec_plt: palette coding path of the entropy coder (stage S2).
// It reuses the run count and run lengths found by RCE_PLT in S1 rather
// than scanning the index map again. Syntax written (this design's; the
// paper fixes only that run counts and lengths use zero-order Exp-Golomb
// codes): ncc-1 in 3 bits; ncc palette colours, 3 x 8 bits each; EGC0 of
// nruns-1; then per run its symbol (2 bits, L/T/N) and EGC0 of length-1,
// and for every pixel of an N run its cluster index in 3 bits.
// Output: the bits (stream bit i at bits[i]) and their count.
// Combinational.
module hlc_ec_plt
  import hlc_pkg::*;
(
  input  pix_t [NCC-1:0]          palette,
  input  logic [3:0]              ncc,
  input  idxmap_t                 idx_map,
  input  logic [6:0]              nruns,
  input  rli_sym_e [CU_PIX-1:0]   run_sym,
  input  logic [CU_PIX-1:0][6:0]  run_len,
  output cubits_t                 bits,
  output logic [11:0]             len
);
  always_comb begin
    logic [11:0] pos;
    logic [6:0]  r, rem;
    rli_sym_e    cur;
    bits = '0; pos = '0; r = '0; rem = '0; cur = SYM_L;
    put_bits(bits, pos, 32'(ncc - 4'd1), 6'd3);
    for (int k = 0; k < NCC; k++)
      if (k < 32'(ncc))
        for (int c = 0; c < NCOMP; c++) put_bits(bits, pos, 32'(palette[k][c]), 6'd8);
    put_egc0(bits, pos, 12'(nruns - 7'd1));
    for (int p = 0; p < CU_PIX; p++) begin
      if (rem == '0) begin
        cur = run_sym[r[5:0]];
        rem = run_len[r[5:0]];
        put_bits(bits, pos, 32'(cur), 6'd2);
        put_egc0(bits, pos, 12'(rem - 7'd1));
        r = r + 7'd1;
      end
      if (cur == SYM_N) put_bits(bits, pos, 32'(idx_map[p]), 6'd3);
      rem = rem - 7'd1;
    end
    len = pos;
  end
endmodule
