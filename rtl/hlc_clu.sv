// hlc_clu: palette clustering unit (CLU). Eight hlc_pce stages in a chain
// form the cluster table of a 16x4 CU; a pixel group enters each clock and
// leaves the last PCE eight clocks later with its final cluster index.
// Behind the chain sits the virtual cluster table: for every cluster a sum
// and a count of the pixels finally assigned to it. When the last group of a
// CU leaves the chain, each palette colour is the rounded mean
// (sum + cnt/2) / cnt of its members: the value used to reconstruct PLT
// pixels, while clustering itself only ever used the static first pixel of
// each cluster. A pixel that reaches the end unassigned would need a ninth
// cluster, and the CU is then flagged as unsuitable for the palette.
// Interface: PPC pixels per clock with first/last markers (16 groups per CU,
// raster order) and the CU's QP; results are valid for one clock,
// NPCE + 1 clocks after the last group enters. The chain length (eight) and
// threshold follow the paper; the mean arithmetic is this design's choice.
module hlc_clu
  import hlc_pkg::*;
#(
  parameter int unsigned NPCE = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pix_t [PPC-1:0]       in_pix,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic [3:0]           qp,
  output logic                 out_valid,
  output idxmap_t              idx_map,
  output pix_t [NCC-1:0]       palette,
  output logic [3:0]           ncc,
  output logic                 plt_ok
);
  pgrp_t chain [NPCE+1];

  always_comb begin
    chain[0].valid = in_valid;
    chain[0].first = in_first;
    chain[0].last  = in_last;
    chain[0].thr   = plt_thr(qp);
    for (int j = 0; j < PPC; j++) begin
      chain[0].lane[j].pix = in_pix[j];
      chain[0].lane[j].sad = '0;
      chain[0].lane[j].idx = '0;
      chain[0].lane[j].asg = 1'b0;
    end
  end

  for (genvar k = 0; k < NPCE; k++) begin : g_pce
    hlc_pce #(.IDX(k)) u_pce (
      .clk, .rst_n, .in_grp(chain[k]), .out_grp(chain[k+1]),
      .cc_set(), .cc_val()
    );
  end

  // Virtual cluster table.
  logic [NCC-1:0][NCOMP-1:0][13:0] vsum_q, vsum_d;
  logic [NCC-1:0][6:0]             vcnt_q, vcnt_d;
  logic                            fail_q, fail_d;
  logic [3:0]                      grp_q;
  idxmap_t                         map_q, map_d;
  pgrp_t                           tl;

  assign tl = chain[NPCE];

  always_comb begin
    vsum_d = tl.first ? '0 : vsum_q;
    vcnt_d = tl.first ? '0 : vcnt_q;
    fail_d = tl.first ? 1'b0 : fail_q;
    map_d  = map_q;
    for (int j = 0; j < PPC; j++) begin
      map_d[(tl.first ? 0 : 32'(grp_q)) * PPC + j] = tl.lane[j].idx;
      if (!tl.lane[j].asg) fail_d = 1'b1;
      else begin
        vcnt_d[tl.lane[j].idx] = vcnt_d[tl.lane[j].idx] + 7'd1;
        for (int c = 0; c < NCOMP; c++)
          vsum_d[tl.lane[j].idx][c] = vsum_d[tl.lane[j].idx][c] + 14'(tl.lane[j].pix[c]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vsum_q <= '0; vcnt_q <= '0; fail_q <= 1'b0; grp_q <= '0; map_q <= '0;
      out_valid <= 1'b0; idx_map <= '0; palette <= '0; ncc <= '0; plt_ok <= 1'b0;
    end else begin
      out_valid <= tl.valid && tl.last;
      if (tl.valid) begin
        vsum_q <= vsum_d; vcnt_q <= vcnt_d; fail_q <= fail_d; map_q <= map_d;
        grp_q  <= tl.first ? 4'd1 : grp_q + 4'd1;
        if (tl.last) begin
          idx_map <= map_d;
          plt_ok  <= !fail_d;
          ncc     <= '0;
          for (int k = 0; k < NCC; k++) begin
            if (vcnt_d[k] != '0) begin
              ncc <= 4'(k + 1);
              for (int c = 0; c < NCOMP; c++)
                palette[k][c] <= 8'((vsum_d[k][c] + 14'(vcnt_d[k] >> 1)) / 14'(vcnt_d[k]));
            end else begin
              palette[k] <= '0;
            end
          end
        end
      end
    end
  end
endmodule
