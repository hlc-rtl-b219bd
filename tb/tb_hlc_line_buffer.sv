// tb_hlc_line_buffer: a 64x12 picture whose pixels encode their own
// coordinates is offered four pixels per clock with random gaps. Every
// output group must carry the right CU position, first/last markers and the
// four pixels of the right row segment of that CU, in CU raster order;
// CUs of a stripe come out in consecutive 16-clock bursts; and the input
// must be held off while a stripe drains.
module tb_hlc_line_buffer;
  import hlc_pkg::*;
  localparam int W = 64, H = 12;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_first, out_last;
  pix_t [PPC-1:0] in_pix, out_pix; logic [7:0] out_cu_x; logic [9:0] out_cu_y;
  int checks = 0, failures = 0, stalls = 0, ngrp = 0;
  hlc_line_buffer #(.WIDTH(W), .HEIGHT(H)) dut (.clk, .rst_n, .in_pix, .in_valid, .in_ready,
    .out_pix, .out_valid, .out_first, .out_last, .out_cu_x, .out_cu_y);
  always #5 clk = ~clk;
  function automatic pix_t pv(int x, int y); return {8'(x), 8'(y), 8'(x ^ y)}; endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    automatic int n = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (n < W * H / 4) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      for (int j = 0; j < 4; j++) in_pix[j] = pv((n * 4) % W + j, (n * 4) / W);
      @(posedge clk);
      if (in_valid && !in_ready) stalls++;
      if (in_valid && in_ready) n++;
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(posedge clk);
    checks++; if (ngrp != W * H / 4) begin failures++; $display("groups %0d", ngrp); end
    checks++; if (stalls == 0) failures++;
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // expected output order
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      automatic int cu = ngrp / 16, g = ngrp % 16;
      automatic int cux = cu % (W / 16), cuy = cu / (W / 16);
      checks++;
      if (int'(out_cu_x) != cux || int'(out_cu_y) != cuy || out_first != (g == 0) || out_last != (g == 15)) begin
        failures++; if (failures < 5) $display("grp %0d pos %0d,%0d", ngrp, out_cu_x, out_cu_y);
      end
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (out_pix[j] != pv(cux * 16 + (g % 4) * 4 + j, cuy * 4 + g / 4)) failures++;
      end
      ngrp++;
    end
  end
  // a CU, once started, is delivered in 16 consecutive clocks
  int run = 0;
  always @(posedge clk) begin
    #2;
    if (out_valid) run++;
    else begin
      if (run % 16 != 0) begin failures++; $display("broken burst %0d", run); end
      run = 0;
    end
  end
endmodule
