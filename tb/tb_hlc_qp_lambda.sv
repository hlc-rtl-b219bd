// tb_hlc_qp_lambda: every QP's lambda is recomputed from the R-D model
// D = 1e6 * R^-1.291 (lambda = -dD/dR) at R = 1000 * 2^(-QP/5), scaled by
// 16 and rounded, and compared with the table; lambda must also grow with QP.
module tb_hlc_qp_lambda;
  import hlc_pkg::*;
  logic [3:0] qp; logic [9:0] lambda;
  int checks = 0, failures = 0;
  hlc_qp_lambda dut (.qp, .lambda);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int prev = 0;
    for (int q = 0; q < 16; q++) begin
      real r, l;
      qp = 4'(q); #1;
      r = 1000.0 * (2.0 ** (-q / 5.0));
      l = 1.0e6 * 1.291 * (r ** (-2.291)) * 16.0;
      checks++;
      if (int'(lambda) != $rtoi(l + 0.5)) begin
        failures++; $display("qp %0d lambda %0d exp %f", q, lambda, l);
      end
      checks++;
      if (int'(lambda) <= prev) failures++;
      prev = int'(lambda);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
