// hlc_dp_mode: stage-S0 directional prediction mode decision. The DC, VT and
// HT predictions are formed from original-pixel neighbours, each is compared
// with the original CU by a SAD tree, and the mode with the smallest SAD is
// passed to S1, where the prediction is rebuilt from reconstructed
// neighbours. On equal SADs DC wins over VT and VT over HT (this design's
// choice). Combinational; the caller registers the result.
module hlc_dp_mode
  import hlc_pkg::*;
(
  input  cu_t              ori,
  input  pix_t [CU_W-1:0]  top,
  input  pix_t [CU_H-1:0]  left,
  input  logic             top_ok,
  input  logic             left_ok,
  output dp_mode_e         mode,
  output logic [15:0]      best_sad
);
  cu_t         pred [3];
  logic [15:0] sad  [3];
  for (genvar m = 0; m < 3; m++) begin : g_mode
    hlc_dp_pred u_pred (.mode(dp_mode_e'(m)), .top, .left, .top_ok, .left_ok, .pred(pred[m]));
    hlc_sad_tree u_sad (.a(ori), .b(pred[m]), .sad(sad[m]));
  end
  always_comb begin
    mode = DP_DC; best_sad = sad[0];
    if (sad[1] < best_sad) begin mode = DP_VT; best_sad = sad[1]; end
    if (sad[2] < best_sad) begin mode = DP_HT; best_sad = sad[2]; end
  end
endmodule
