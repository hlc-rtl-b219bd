// hlc_pce: one Pixel Clustering Engine of the palette clustering chain.
// Each PCE owns one cluster centre (CC Reg). A group of PPC pixels enters per
// clock together with, per pixel, the smallest SAD found in the PCEs before
// it. If the CC Reg is set, the SAD of the pixel to it is computed and the
// pixel takes this cluster when the SAD is below 1<<(QP>>1) and below the
// incoming best. If the CC Reg is not set and the pixel is still unassigned,
// the pixel becomes this PCE's CC. The CC Reg is written only once per CU and
// never averaged, so no later pixel ever has to be re-evaluated: this is the
// dependency-free clustering of the paper. The running average (the paper's
// Virtual CC Reg) is kept by hlc_clu, where a pixel's final cluster is known.
// Within a group, a CC created by lane j is visible to lanes j+1.. in the same
// clock (a short combinational chain); that choice and PPC are this design's.
// Timing: registered output, one clock of latency. A group marked `first`
// clears the CC for the new CU before it is used.
module hlc_pce
  import hlc_pkg::*;
#(
  parameter int unsigned IDX = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  pgrp_t in_grp,
  output pgrp_t out_grp,
  output logic  cc_set,   // CC Reg holds a centre (for observation)
  output pix_t  cc_val
);
  pix_t  cc_q, cc_d;
  logic  ccv_q, ccv_d;
  pgrp_t nxt;

  always_comb begin
    logic [9:0] s;
    s    = '0;
    nxt  = in_grp;
    cc_d = cc_q;
    ccv_d = in_grp.first ? 1'b0 : ccv_q;
    if (in_grp.valid) begin
      for (int j = 0; j < PPC; j++) begin
        if (ccv_d) begin
          s = pix_sad(in_grp.lane[j].pix, cc_d);
          if (s < in_grp.thr && (!in_grp.lane[j].asg || s < in_grp.lane[j].sad)) begin
            nxt.lane[j].sad = s;
            nxt.lane[j].idx = cidx_t'(IDX);
            nxt.lane[j].asg = 1'b1;
          end
        end else if (!in_grp.lane[j].asg) begin
          cc_d  = in_grp.lane[j].pix;
          ccv_d = 1'b1;
          nxt.lane[j].sad = '0;
          nxt.lane[j].idx = cidx_t'(IDX);
          nxt.lane[j].asg = 1'b1;
        end
      end
    end else begin
      ccv_d = ccv_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ccv_q   <= 1'b0;
      cc_q    <= '0;
      out_grp <= '0;
    end else begin
      ccv_q   <= ccv_d;
      cc_q    <= cc_d;
      out_grp <= nxt;
    end
  end

  assign cc_set = ccv_q;
  assign cc_val = cc_q;
endmodule
