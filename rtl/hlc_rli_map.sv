// hlc_rli_map: run-length index (RLI) mapping of a 16x4 palette index map.
// Every position gets one of three symbols: L (0) when its cluster index
// equals that of its left neighbour, T (1) when it equals the one above, and
// N (2) otherwise, in which case the index itself must be sent. Turning the
// 2-D index map into these symbols makes horizontal repetition appear as runs
// of L. The three symbols and their codes follow the paper; checking L before
// T when both match is this design's choice. Purely combinational.
module hlc_rli_map
  import hlc_pkg::*;
(
  input  idxmap_t                 idx_map,
  output rli_sym_e [CU_PIX-1:0]   sym
);
  always_comb begin
    for (int y = 0; y < CU_H; y++) begin
      for (int x = 0; x < CU_W; x++) begin
        automatic int p = y * CU_W + x;
        if (x > 0 && idx_map[p] == idx_map[p-1])          sym[p] = SYM_L;
        else if (y > 0 && idx_map[p] == idx_map[p-CU_W])  sym[p] = SYM_T;
        else                                              sym[p] = SYM_N;
      end
    end
  end
endmodule
