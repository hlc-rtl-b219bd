// hlc_pkg: types, constants and small arithmetic helpers shared by the HLC
// encoder. A pixel is three 8-bit components; a coding unit (CU) is a 16x4
// block of 64 pixels kept in raster order (index = y*16 + x). Coefficients
// of the wavelet are 12-bit signed, residuals 10-bit signed.
// The QP-lambda and QP-BPP tables are this design's own fill (see below);
// the paper gives only the R-D model they are derived from.
package hlc_pkg;
  localparam int unsigned NCOMP   = 3;
  localparam int unsigned CU_W    = 16;
  localparam int unsigned CU_H    = 4;
  localparam int unsigned CU_PIX  = CU_W * CU_H;   // 64
  localparam int unsigned PPC     = 4;             // pixels per clock in S0
  localparam int unsigned NCC     = 8;             // palette clusters
  localparam int unsigned NCUBE   = 16;            // 2x2 cubes per CU
  localparam int unsigned MAXBITS = 2560;          // CU bitstream capacity

  typedef logic [NCOMP-1:0][7:0]              pix_t;
  typedef pix_t [CU_PIX-1:0]                  cu_t;
  typedef logic signed [9:0]                  res_t;
  typedef logic signed [11:0]                 coef_t;
  typedef coef_t [NCOMP-1:0]                  coefpix_t;
  typedef coefpix_t [CU_PIX-1:0]              cucoef_t;
  typedef res_t [NCOMP-1:0]                   respix_t;
  typedef respix_t [CU_PIX-1:0]               cures_t;
  typedef logic [2:0]                         cidx_t;
  typedef cidx_t [CU_PIX-1:0]                 idxmap_t;

  typedef enum logic [1:0] {DP_DC = 2'd0, DP_VT = 2'd1, DP_HT = 2'd2} dp_mode_e;
  typedef enum logic [1:0] {SYM_L = 2'd0, SYM_T = 2'd1, SYM_N = 2'd2} rli_sym_e;

  // One pixel travelling down the PCE chain with the best match so far.
  typedef struct packed {
    pix_t        pix;
    logic [9:0]  sad;   // SAD to the best cluster found so far
    cidx_t       idx;   // that cluster
    logic        asg;   // assigned (best SAD below threshold, or created)
  } lane_t;

  // A group of PPC pixels of one CU, moving one PCE per clock.
  typedef struct packed {
    logic                 valid;
    logic                 first;  // first group of a CU
    logic                 last;   // last group of a CU
    logic [9:0]           thr;    // 1 << (QP >> 1)
    lane_t [PPC-1:0]      lane;
  } pgrp_t;

  // Stage S0 -> S1: one CU with its palette and DP mode decision.
  typedef struct packed {
    cu_t                 ori;
    idxmap_t             idx_map;
    pix_t [NCC-1:0]      palette;
    logic [3:0]          ncc;
    logic                plt_ok;
    dp_mode_e            dp_mode;
    logic [3:0]          qp;
    logic [7:0]          cu_x;
    logic [9:0]          cu_y;
  } s0_t;

  // Stage S1 -> S2: decision, reconstruction and the reused RCE results.
  typedef struct packed {
    logic                    is_plt;
    logic                    plt_ok;
    logic [3:0]              qp;
    dp_mode_e                dp_mode;
    cu_t                     rec;
    cucoef_t                 coef;
    logic [NCUBE-1:0][3:0]   bitplane;
    pix_t [NCC-1:0]          palette;
    logic [3:0]              ncc;
    idxmap_t                 idx_map;
    logic [6:0]              nruns;
    rli_sym_e [CU_PIX-1:0]   run_sym;
    logic [CU_PIX-1:0][6:0]  run_len;
    logic [15:0]             d_dp, d_plt;
    logic [11:0]             r_dp;
    logic [9:0]              r_plt;
    logic [7:0]              cu_x;
    logic [9:0]              cu_y;
  } s1_t;

  // QP -> lambda, 4 fractional bits. lambda = -dD/dR of D = 1e6 * R^-1.291,
  // i.e. 1.291e6 * R^-2.291, evaluated at an assumed operating rate
  // R(QP) = 1000 * 2^(-QP/5) bits per CU, times 16 and rounded.
  localparam logic [9:0] LAMBDA_TAB [16] = '{10'd3, 10'd4, 10'd5, 10'd7, 10'd10, 10'd14, 10'd19, 10'd26,
                                             10'd35, 10'd48, 10'd66, 10'd91, 10'd125, 10'd172, 10'd236, 10'd324};
  // QP -> expected bits per CU, round(1536 * 2^(-0.4*QP)) (assumed model).
  localparam logic [11:0] BQP_TAB [16] = '{12'd1536, 12'd1164, 12'd882, 12'd669, 12'd507, 12'd384, 12'd291, 12'd221,
                                           12'd167, 12'd127, 12'd96, 12'd73, 12'd55, 12'd42, 12'd32, 12'd24};

  // Palette clustering threshold 1 << (QP >> 1).
  function automatic logic [9:0] plt_thr(input logic [3:0] qp);
    return 10'd1 << (qp >> 1);
  endfunction

  function automatic logic [7:0] absdiff8(input logic [7:0] a, input logic [7:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  // SAD of two pixels over all components (max 765).
  function automatic logic [9:0] pix_sad(input pix_t a, input pix_t b);
    logic [9:0] s;
    s = '0;
    for (int c = 0; c < NCOMP; c++) s += 10'(absdiff8(a[c], b[c]));
    return s;
  endfunction

  // Number of bits to hold an unsigned value (0 for 0).
  function automatic logic [3:0] ubits(input logic [11:0] v);
    logic [3:0] n;
    n = '0;
    for (int i = 0; i < 12; i++) if (v[i]) n = 4'(i + 1);
    return n;
  endfunction

  // Bit-width of a signed coefficient: 0 for 0, else magnitude bits + sign.
  function automatic logic [3:0] sbits(input coef_t v);
    logic [11:0] m;
    if (v == '0) return 4'd0;
    m = v[11] ? 12'(-v) : 12'(v);
    return ubits(m) + 4'd1;
  endfunction

  // Length of the zero-order Exp-Golomb code of v.
  function automatic logic [4:0] egc0_len(input logic [11:0] v);
    logic [12:0] v1;
    logic [3:0]  n;
    v1 = 13'(v) + 13'd1;
    n  = '0;
    for (int i = 0; i < 13; i++) if (v1[i]) n = 4'(i);
    return 5'(2 * n + 1);
  endfunction

  typedef logic [MAXBITS-1:0] cubits_t;

  // Append the n low bits of val to a CU bitstream, most significant first.
  // Stream bit i is bits[i].
  function automatic void put_bits(inout cubits_t bits, inout logic [11:0] pos,
                                   input logic [31:0] val, input logic [5:0] n);
    for (int i = 0; i < 32; i++)
      if (i < 32'(n) && 32'(pos) + 32'(i) < MAXBITS)
        bits[32'(pos) + 32'(i)] = val[32'(n) - 1 - i];
    pos = pos + 12'(n);
  endfunction

  // Append the zero-order Exp-Golomb code of v.
  function automatic void put_egc0(inout cubits_t bits, inout logic [11:0] pos,
                                   input logic [11:0] v);
    put_bits(bits, pos, 32'(v) + 32'd1, 6'(egc0_len(v)));
  endfunction
endpackage
