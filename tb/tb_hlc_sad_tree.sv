// tb_hlc_sad_tree: random and extreme CU pairs; the SAD is compared with a
// plain sum of absolute component differences.
module tb_hlc_sad_tree;
  import hlc_pkg::*;
  cu_t a, b; logic [15:0] sad;
  int checks = 0, failures = 0;
  hlc_sad_tree dut (.a, .b, .sad);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      automatic int e = 0;
      for (int p = 0; p < CU_PIX; p++) begin
        a[p] = (t == 0) ? '1 : pix_t'($urandom);
        b[p] = (t == 0) ? '0 : pix_t'($urandom);
        for (int c = 0; c < 3; c++) e += (a[p][c] > b[p][c]) ? a[p][c] - b[p][c] : b[p][c] - a[p][c];
      end
      #1;
      checks++;
      if (int'(sad) != e) begin failures++; if (failures < 4) $display("sad %0d exp %0d", sad, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
