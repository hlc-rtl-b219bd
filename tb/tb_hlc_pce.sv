// tb_hlc_pce: drives a PCE (position 3) with random pixel groups whose lanes
// carry random incoming best SADs and assignment flags. A reference model
// of the PCE rule (static CC written by the first unassigned pixel of a CU;
// a pixel moves to this cluster when its SAD is below 1<<(QP>>1) and below
// the incoming best) predicts every outgoing lane and the CC Reg.
module tb_hlc_pce;
  import hlc_pkg::*;
  logic clk = 0, rst_n = 0;
  pgrp_t in_grp, out_grp, exp_grp;
  logic cc_set; pix_t cc_val;
  int checks = 0, failures = 0;
  int creates = 0, joins = 0;
  hlc_pce #(.IDX(3)) dut (.clk, .rst_n, .in_grp, .out_grp, .cc_set, .cc_val);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int sadf(pix_t a, pix_t b);
    automatic int s = 0;
    for (int c = 0; c < 3; c++) s += (a[c] > b[c]) ? a[c] - b[c] : b[c] - a[c];
    return s;
  endfunction
  initial begin
    bit mv; pix_t mcc; pix_t base;
    mv = 0; mcc = '0;
    in_grp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 2000; g++) begin
      @(negedge clk);
      in_grp = '0;
      in_grp.valid = ($urandom_range(0, 7) != 0);
      in_grp.first = (g % 16 == 0);
      in_grp.last  = (g % 16 == 15);
      in_grp.thr   = plt_thr(4'($urandom_range(2, 12)));
      if (g % 16 == 0) base = pix_t'($urandom);
      for (int j = 0; j < PPC; j++) begin
        for (int c = 0; c < 3; c++) in_grp.lane[j].pix[c] = base[c] + 8'($urandom_range(0, 12));
        in_grp.lane[j].asg = ($urandom_range(0, 2) == 0);
        in_grp.lane[j].sad = in_grp.lane[j].asg ? 10'($urandom_range(0, 40)) : '0;
        in_grp.lane[j].idx = in_grp.lane[j].asg ? cidx_t'($urandom_range(0, 2)) : '0;
      end
      // reference
      exp_grp = in_grp;
      if (in_grp.valid) begin
        if (in_grp.first) mv = 0;
        for (int j = 0; j < PPC; j++) begin
          if (mv) begin
            automatic int s = sadf(in_grp.lane[j].pix, mcc);
            if (s < int'(in_grp.thr) && (!in_grp.lane[j].asg || s < int'(in_grp.lane[j].sad))) begin
              exp_grp.lane[j].sad = 10'(s); exp_grp.lane[j].idx = 3'd3; exp_grp.lane[j].asg = 1; joins++;
            end
          end else if (!in_grp.lane[j].asg) begin
            mv = 1; mcc = in_grp.lane[j].pix; creates++;
            exp_grp.lane[j].sad = '0; exp_grp.lane[j].idx = 3'd3; exp_grp.lane[j].asg = 1;
          end
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_grp != exp_grp) begin
        failures++; if (failures < 5) $display("group %0d mismatch", g);
      end
      checks++;
      if (cc_set != mv || (mv && cc_val != mcc)) failures++;
    end
    checks++;
    if (creates == 0 || joins == 0) failures++;
    $display("creates=%0d joins=%0d", creates, joins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
