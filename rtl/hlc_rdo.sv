// hlc_rdo: stage S1, rate-distortion optimization between directional
// prediction (DP) and palette (PLT) for one CU.
//  DP path: the mode chosen in S0 is rebuilt from reconstructed neighbours
//   (REF Buf (Rec), an hlc_ref_buf inside this block), the residual ORI-PRE
//   goes through DWT+QT; RCE_DP gives R_DP and the cube bit-planes;
//   IQT+IDWT and the prediction give the reconstruction, and a SAD tree
//   against ORI gives D_DP.
//  PLT path: the cluster index map is turned into RLI symbols; RCE_PLT
//   gives R_PLT, the run count and run lengths; PLT REC rebuilds the CU from
//   the palette and a SAD tree gives D_PLT.
//  Decision: J = 16*D + lambda*R (lambda from the QP-lambda table, with four
//   fractional bits); PLT is taken only if the CU fitted in eight clusters
//   and its J is strictly smaller.
// The chosen reconstruction is written into the reference buffer for the
// next CUs. The whole CU is evaluated in one clock; the output bundle is
// registered (one clock latency). The structure follows the paper's
// architecture figure; the J scaling and tie rule are this design's.
module hlc_rdo
  import hlc_pkg::*;
#(
  parameter int unsigned WIDTH = 3840
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  s0_t   in,
  output logic  out_valid,
  output s1_t   out
);
  // DP R-D cost path
  pix_t [CU_W-1:0] top;
  pix_t [CU_H-1:0] left;
  logic            top_ok, left_ok;
  cu_t             pred, rec_dp, rec_plt, rec_sel;
  cures_t          res;
  cucoef_t         coef, rres;
  logic [11:0]     r_dp;
  logic [NCUBE-1:0][3:0] bitplane;
  logic [15:0]     d_dp, d_plt;

  hlc_dp_pred u_pred (.mode(in.dp_mode), .top, .left, .top_ok, .left_ok, .pred);

  always_comb
    for (int p = 0; p < CU_PIX; p++)
      for (int c = 0; c < NCOMP; c++)
        res[p][c] = res_t'({2'b00, in.ori[p][c]}) - res_t'({2'b00, pred[p][c]});

  hlc_dwt_qt   u_dwt  (.res, .qp(in.qp), .coef);
  hlc_rce_dp   u_rced (.coef, .rate(r_dp), .bitplane);
  hlc_iqt_idwt u_idwt (.coef, .qp(in.qp), .res(rres));

  always_comb
    for (int p = 0; p < CU_PIX; p++)
      for (int c = 0; c < NCOMP; c++) begin
        logic signed [12:0] v;
        v = 13'(signed'({1'b0, pred[p][c]})) + 13'(rres[p][c]);
        rec_dp[p][c] = (v < 0) ? 8'd0 : (v > 13'sd255) ? 8'd255 : 8'(v);
      end

  hlc_sad_tree u_sad_dp (.a(in.ori), .b(rec_dp), .sad(d_dp));

  // PLT R-D cost path
  rli_sym_e [CU_PIX-1:0]  sym, run_sym;
  logic [6:0]             nruns;
  logic [CU_PIX-1:0][6:0] run_len;
  logic [9:0]             r_plt;

  hlc_rli_map u_rli  (.idx_map(in.idx_map), .sym);
  hlc_rce_plt u_rcep (.sym, .nruns, .run_sym, .run_len, .rate(r_plt));
  hlc_plt_rec u_prec (.idx_map(in.idx_map), .palette(in.palette), .rec(rec_plt));
  hlc_sad_tree u_sad_plt (.a(in.ori), .b(rec_plt), .sad(d_plt));

  // J = D + lambda R
  logic [9:0]  lambda;
  logic [23:0] j_dp, j_plt;
  logic        is_plt;
  hlc_qp_lambda u_lam (.qp(in.qp), .lambda);

  assign j_dp    = (24'(d_dp)  << 4) + 24'(lambda) * 24'(r_dp);
  assign j_plt   = (24'(d_plt) << 4) + 24'(lambda) * 24'(r_plt);
  assign is_plt  = in.plt_ok && (j_plt < j_dp);
  assign rec_sel = is_plt ? rec_plt : rec_dp;

  hlc_ref_buf #(.WIDTH(WIDTH)) u_ref (
    .clk, .rst_n, .wr_en(in_valid), .wr_cu_x(in.cu_x), .wr_cu(rec_sel),
    .rd_cu_x(in.cu_x), .rd_cu_y(in.cu_y), .top, .left, .top_ok, .left_ok
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out.is_plt   <= is_plt;
        out.plt_ok   <= in.plt_ok;
        out.qp       <= in.qp;
        out.dp_mode  <= in.dp_mode;
        out.rec      <= rec_sel;
        out.coef     <= coef;
        out.bitplane <= bitplane;
        out.palette  <= in.palette;
        out.ncc      <= in.ncc;
        out.idx_map  <= in.idx_map;
        out.nruns    <= nruns;
        out.run_sym  <= run_sym;
        out.run_len  <= run_len;
        out.d_dp     <= d_dp;
        out.d_plt    <= d_plt;
        out.r_dp     <= r_dp;
        out.r_plt    <= r_plt;
        out.cu_x     <= in.cu_x;
        out.cu_y     <= in.cu_y;
      end
    end
  end
endmodule
