// hlc_rce_dp: rate cost estimation for directional prediction (RCE_DP).
// The quantized 16x4 coefficient array is split into sixteen 2x2 cubes;
// a cube holds the 2x2 positions of all three components (12 coefficients),
// which is how this design reads the paper's "sixteen 2x2 coefficient cubes".
// The bit-width of a coefficient is 0 for zero, else its magnitude bits plus
// a sign bit. The rate R_DP is the sum of all bit-widths; the largest
// bit-width in each cube is its bit-plane, handed to the entropy coder,
// which sends every coefficient of the cube with that many bits.
// Cube k covers rows 2*(k/8).. and columns 2*(k%8).. . Combinational.
module hlc_rce_dp
  import hlc_pkg::*;
(
  input  cucoef_t                 coef,
  output logic [11:0]             rate,
  output logic [NCUBE-1:0][3:0]   bitplane
);
  always_comb begin
    logic [3:0] w;
    rate = '0;
    bitplane = '0;
    for (int k = 0; k < NCUBE; k++)
      for (int dy = 0; dy < 2; dy++)
        for (int dx = 0; dx < 2; dx++)
          for (int c = 0; c < NCOMP; c++) begin
            w = sbits(coef[(2*(k/8) + dy)*CU_W + 2*(k%8) + dx][c]);
            rate = rate + 12'(w);
            if (w > bitplane[k]) bitplane[k] = w;
          end
  end
endmodule
