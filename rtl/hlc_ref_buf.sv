// hlc_ref_buf: prediction neighbour store (REF Buf). For the CU at column
// cu_x of CU row cu_y it provides the 16 pixels just above the CU (the bottom
// row of the CU above, kept for every CU column of the picture) and the 4
// pixels just left of it (the right column of the previous CU). The encoder
// uses one instance fed with original pixels (S0 mode decision) and one fed
// with reconstructed pixels (S1 prediction). Writes happen on wr_en at the
// clock edge; reads are combinational. Availability is reported so that the
// first CU row and column can fall back to a default. What is stored is this
// design's reading of the block's name in the paper's architecture figure.
module hlc_ref_buf
  import hlc_pkg::*;
#(
  parameter int unsigned WIDTH = 3840
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [7:0]          wr_cu_x,
  input  cu_t                 wr_cu,
  input  logic [7:0]          rd_cu_x,
  input  logic [9:0]          rd_cu_y,
  output pix_t [CU_W-1:0]     top,
  output pix_t [CU_H-1:0]     left,
  output logic                top_ok,
  output logic                left_ok
);
  localparam int unsigned NCU = WIDTH / CU_W;

  pix_t [CU_W-1:0] row_mem [NCU];
  pix_t [CU_H-1:0] col_q;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int x = 0; x < CU_W; x++) row_mem[wr_cu_x][x] <= wr_cu[(CU_H-1)*CU_W + x];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) col_q <= '0;
    else if (wr_en)
      for (int y = 0; y < CU_H; y++) col_q[y] <= wr_cu[y*CU_W + CU_W - 1];
  end

  assign top     = row_mem[rd_cu_x];
  assign left    = col_q;
  assign top_ok  = (rd_cu_y != '0);
  assign left_ok = (rd_cu_x != '0);
endmodule
