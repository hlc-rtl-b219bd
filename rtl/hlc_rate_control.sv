// hlc_rate_control: CU-level rate control (RC). The target B_tar (bits per
// CU, from the target bits per pixel) minus the actual size B_act of each
// coded CU is added to an accumulated bit error B_err. The adjusted target
// B'_tar = B_tar + (B_err >>> 3) is compared with a QP-BPP table, and the
// QP chosen is the smallest one whose expected size B_QP does not exceed
// B'_tar (15 when none does). The data flow (difference, accumulation, >>3,
// addition, table compare) is the one of the paper's architecture figure;
// the QP range 0..15, the table values (hlc_pkg::BQP_TAB) and saturation of
// B_err to +/-2^17 are this design's choices.
// Interface: bpp_q4 is bits per pixel with 4 fractional bits (1.75 -> 28).
// bits_valid/bits_act report one coded CU; qp is combinational from the
// registered error and is sampled by the encoder at the start of each CU.
module hlc_rate_control
  import hlc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [7:0]   bpp_q4,
  input  logic         bits_valid,
  input  logic [11:0]  bits_act,
  output logic [3:0]   qp,
  output logic signed [19:0] b_err
);
  localparam logic signed [19:0] ERR_MAX = 20'sd131072;
  logic signed [19:0] b_tar, b_tar_adj, nxt;

  assign b_tar = 20'(bpp_q4) <<< 2;   // bpp * 64 pixels

  always_comb begin
    nxt = b_err + b_tar - 20'(bits_act);
    if (nxt > ERR_MAX)  nxt = ERR_MAX;
    if (nxt < -ERR_MAX) nxt = -ERR_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          b_err <= '0;
    else if (bits_valid) b_err <= nxt;
  end

  always_comb begin
    b_tar_adj = b_tar + (b_err >>> 3);
    qp = 4'd15;
    for (int q = 15; q >= 0; q--)
      if (b_tar_adj >= signed'({8'b0, BQP_TAB[q]})) qp = 4'(q);
  end
endmodule
