// tb_hlc_rate_control: feeds CU sizes that are sometimes far above and
// sometimes far below the target and checks, after each, the accumulated
// error and the QP against a reference of the rule: B_err += B_tar - B_act
// (saturated at +/-2^17), B'_tar = B_tar + B_err/8 (floor), QP = smallest
// QP whose table size fits B'_tar, else 15. QP must both rise and fall.
module tb_hlc_rate_control;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0, bits_valid = 0; logic [7:0] bpp_q4; logic [11:0] bits_act;
  logic [3:0] qp; logic signed [19:0] b_err;
  int checks = 0, failures = 0, rises = 0, falls = 0;
  int bqp[16] = '{1536, 1164, 882, 669, 507, 384, 291, 221, 167, 127, 96, 73, 55, 42, 32, 24};
  hlc_rate_control dut (.clk, .rst_n, .bpp_q4, .bits_valid, .bits_act, .qp, .b_err);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    automatic int err = 0; automatic int prev = -1;
    bpp_q4 = 8'd28; bits_act = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      automatic int tar, adj, eq;
      @(negedge clk);
      if (it % 500 == 0) bpp_q4 = 8'($urandom_range(16, 28));
      bits_valid = ($urandom_range(0, 3) != 0);
      bits_act = ((it / 100) % 2 == 0) ? 12'($urandom_range(0, 60)) : 12'($urandom_range(150, 2400));
      tar = int'(bpp_q4) * 4;
      if (bits_valid) begin
        err = err + tar - int'(bits_act);
        if (err > 131072) err = 131072;
        if (err < -131072) err = -131072;
      end
      @(posedge clk); #1;
      bits_valid = 0;
      adj = tar + (err >>> 3);
      eq = 15;
      for (int q = 15; q >= 0; q--) if (adj >= bqp[q]) eq = q;
      checks++; if (int'(b_err) != err) begin failures++; if (failures < 5) $display("err %0d exp %0d", b_err, err); end
      checks++; if (int'(qp) != eq) begin failures++; if (failures < 5) $display("qp %0d exp %0d", qp, eq); end
      if (prev >= 0 && int'(qp) > prev) rises++;
      if (prev >= 0 && int'(qp) < prev) falls++;
      prev = int'(qp);
    end
    checks++; if (rises == 0 || falls == 0) failures++;
    $display("qp rises=%0d falls=%0d", rises, falls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
