// hlc_plt_rec: palette reconstruction (PLT REC). Each pixel of the CU is
// replaced by the palette colour of its cluster index. The palette holds the
// virtual cluster centres (member means) from hlc_clu. Combinational.
module hlc_plt_rec
  import hlc_pkg::*;
(
  input  idxmap_t         idx_map,
  input  pix_t [NCC-1:0]  palette,
  output cu_t             rec
);
  always_comb
    for (int p = 0; p < CU_PIX; p++) rec[p] = palette[idx_map[p]];
endmodule
