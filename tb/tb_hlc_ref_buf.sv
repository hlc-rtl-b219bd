// tb_hlc_ref_buf: writes random CUs over two CU rows of a 64-pixel-wide
// picture and, before each write, checks the top neighbours (bottom row of
// the CU above, written one CU row earlier), the left neighbours (right
// column of the previous CU) and the availability flags.
module tb_hlc_ref_buf;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0; logic [7:0] wr_cu_x, rd_cu_x; logic [9:0] rd_cu_y;
  cu_t wr_cu; pix_t [CU_W-1:0] top; pix_t [CU_H-1:0] left; logic top_ok, left_ok;
  cu_t hist [4][4];
  int checks = 0, failures = 0;
  hlc_ref_buf #(.WIDTH(64)) dut (.clk, .rst_n, .wr_en, .wr_cu_x, .wr_cu, .rd_cu_x, .rd_cu_y, .top, .left, .top_ok, .left_ok);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 4; x++) begin
        @(negedge clk);
        rd_cu_x = 8'(x); rd_cu_y = 10'(y); wr_cu_x = 8'(x);
        for (int p = 0; p < 64; p++) wr_cu[p] = pix_t'($urandom);
        hist[y][x] = wr_cu;
        #1;
        checks++; if (top_ok != (y > 0) || left_ok != (x > 0)) failures++;
        if (y > 0) for (int i = 0; i < 16; i++) begin checks++; if (top[i] != hist[y-1][x][48 + i]) failures++; end
        if (x > 0) for (int i = 0; i < 4; i++) begin checks++; if (left[i] != hist[y][x-1][i*16 + 15]) failures++; end
        wr_en = 1;
        @(posedge clk); #1; wr_en = 0;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
