// hlc_ec_dp: directional-prediction coding path of the entropy coder.
// Fixed-length coding (FLC) first writes the bit-plane of each of the 16
// cubes in 4 bits; these bit-planes are the ones RCE_DP computed in S1.
// Variable-length coding (VLC) then writes every coefficient of cube k, in
// two's complement, with exactly bitplane[k] bits (nothing for a zero cube).
// Because the lengths are known from the fixed-length part, a decoder (or a
// parallel packer) knows where every coefficient starts. Coefficient order
// inside a cube: row, column, component. Combinational.
module hlc_ec_dp
  import hlc_pkg::*;
(
  input  cucoef_t                 coef,
  input  logic [NCUBE-1:0][3:0]   bitplane,
  output cubits_t                 bits,
  output logic [11:0]             len
);
  always_comb begin
    logic [11:0] pos;
    bits = '0; pos = '0;
    for (int k = 0; k < NCUBE; k++) put_bits(bits, pos, 32'(bitplane[k]), 6'd4);
    for (int k = 0; k < NCUBE; k++)
      for (int dy = 0; dy < 2; dy++)
        for (int dx = 0; dx < 2; dx++)
          for (int c = 0; c < NCOMP; c++)
            put_bits(bits, pos, 32'(signed'(coef[(2*(k/8) + dy)*CU_W + 2*(k%8) + dx][c])),
                     6'(bitplane[k]));
    len = pos;
  end
endmodule
