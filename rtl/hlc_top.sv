// hlc_top: the HLC encoder. Raster pixels (three 8-bit components, PPC per
// clock) enter a four-line buffer and leave it as 16x4 CUs. Three CU-level
// pipeline stages follow:
//  S0: palette clustering (hlc_clu, eight PCEs), rate control
//      (hlc_rate_control, QP sampled at the first group of each CU) and the
//      DP mode decision on original neighbours (hlc_dp_mode + REF Buf (Ori));
//  S1: RDO between DP and PLT (hlc_rdo);
//  S2: entropy coding (hlc_ec), whose CU size is fed back to rate control.
// One CU is taken every 16 clocks; a CU's bitstream appears NPCE+1+2 clocks
// after its last pixel group leaves the line buffer. Outputs per CU: the bits
// (stream bit i at cu_bits[i]), their number, and for observation the mode,
// QP and the reconstruction the encoder itself keeps as reference.
module hlc_top
  import hlc_pkg::*;
#(
  parameter int unsigned WIDTH  = 3840,
  parameter int unsigned HEIGHT = 2160
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      bpp_q4,      // target bits per pixel, Q4.4
  input  pix_t [PPC-1:0]  in_pix,
  input  logic            in_valid,
  output logic            in_ready,
  output logic            cu_valid,
  output cubits_t         cu_bits,
  output logic [11:0]     cu_len,
  output logic            cu_is_plt,
  output logic [3:0]      cu_qp,
  output dp_mode_e        cu_dp_mode,
  output logic            cu_plt_ok,
  output logic [7:0]      cu_x,
  output logic [9:0]      cu_y,
  output cu_t             cu_rec
);
  // Line buffer
  pix_t [PPC-1:0] g_pix;
  logic           g_valid, g_first, g_last;
  logic [7:0]     g_cux;
  logic [9:0]     g_cuy;

  hlc_line_buffer #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_lb (
    .clk, .rst_n, .in_pix, .in_valid, .in_ready,
    .out_pix(g_pix), .out_valid(g_valid), .out_first(g_first), .out_last(g_last),
    .out_cu_x(g_cux), .out_cu_y(g_cuy)
  );

  // Rate control
  logic [3:0]  rc_qp, qp_q, g_qp;
  logic        ec_valid;
  logic [11:0] ec_len;
  logic signed [19:0] b_err;

  hlc_rate_control u_rc (.clk, .rst_n, .bpp_q4, .bits_valid(ec_valid), .bits_act(ec_len),
                         .qp(rc_qp), .b_err);
  assign g_qp = g_first ? rc_qp : qp_q;

  // S0: palette clustering
  logic       clu_valid, clu_ok;
  idxmap_t    clu_map;
  pix_t [NCC-1:0] clu_pal;
  logic [3:0] clu_ncc;

  hlc_clu u_clu (.clk, .rst_n, .in_pix(g_pix), .in_valid(g_valid), .in_first(g_first),
                 .in_last(g_last), .qp(g_qp), .out_valid(clu_valid), .idx_map(clu_map),
                 .palette(clu_pal), .ncc(clu_ncc), .plt_ok(clu_ok));

  // S0: ORI buffer (CU assembly) and DP mode decision
  cu_t        acc_q, acc_d, ori_q;
  logic [3:0] grp_q;
  logic       ori_done;
  logic [7:0] ori_x;
  logic [9:0] ori_y;
  logic [3:0] ori_qp;

  always_comb begin
    acc_d = acc_q;
    for (int j = 0; j < PPC; j++) acc_d[(g_first ? 0 : 32'(grp_q)) * PPC + j] = g_pix[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; ori_q <= '0; grp_q <= '0; ori_done <= 1'b0; qp_q <= '0;
      ori_x <= '0; ori_y <= '0; ori_qp <= '0;
    end else begin
      ori_done <= g_valid && g_last;
      if (g_valid) begin
        acc_q <= acc_d;
        grp_q <= g_first ? 4'd1 : grp_q + 4'd1;
        if (g_first) qp_q <= rc_qp;
        if (g_last) begin
          ori_q <= acc_d; ori_x <= g_cux; ori_y <= g_cuy; ori_qp <= g_qp;
        end
      end
    end
  end

  pix_t [CU_W-1:0] otop;
  pix_t [CU_H-1:0] oleft;
  logic            otop_ok, oleft_ok;
  dp_mode_e        mode_c, mode_q;
  logic [15:0]     mode_sad;

  hlc_ref_buf #(.WIDTH(WIDTH)) u_ref_ori (
    .clk, .rst_n, .wr_en(ori_done), .wr_cu_x(ori_x), .wr_cu(ori_q),
    .rd_cu_x(ori_x), .rd_cu_y(ori_y), .top(otop), .left(oleft), .top_ok(otop_ok), .left_ok(oleft_ok)
  );
  hlc_dp_mode u_dpm (.ori(ori_q), .top(otop), .left(oleft), .top_ok(otop_ok), .left_ok(oleft_ok),
                     .mode(mode_c), .best_sad(mode_sad));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        mode_q <= DP_DC;
    else if (ori_done) mode_q <= mode_c;
  end

  // S0 -> S1
  s0_t s0;
  always_comb begin
    s0.ori     = ori_q;
    s0.idx_map = clu_map;
    s0.palette = clu_pal;
    s0.ncc     = clu_ncc;
    s0.plt_ok  = clu_ok;
    s0.dp_mode = mode_q;
    s0.qp      = ori_qp;
    s0.cu_x    = ori_x;
    s0.cu_y    = ori_y;
  end

  // S1
  logic s1_valid;
  s1_t  s1;
  hlc_rdo #(.WIDTH(WIDTH)) u_rdo (.clk, .rst_n, .in_valid(clu_valid), .in(s0),
                                  .out_valid(s1_valid), .out(s1));

  // S2
  hlc_ec u_ec (.clk, .rst_n, .in_valid(s1_valid), .in(s1), .out_valid(ec_valid),
               .out_bits(cu_bits), .out_len(ec_len));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cu_is_plt <= 1'b0; cu_qp <= '0; cu_dp_mode <= DP_DC; cu_plt_ok <= 1'b0;
      cu_x <= '0; cu_y <= '0; cu_rec <= '0;
    end else if (s1_valid) begin
      cu_is_plt <= s1.is_plt; cu_qp <= s1.qp; cu_dp_mode <= s1.dp_mode;
      cu_plt_ok <= s1.plt_ok;
      cu_x <= s1.cu_x; cu_y <= s1.cu_y; cu_rec <= s1.rec;
    end
  end

  assign cu_valid = ec_valid;
  assign cu_len   = ec_len;
endmodule
