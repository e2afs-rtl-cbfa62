// tb_e2afs_core -- exhaustive check of the combinational E2AFS datapath.
// All 65536 binary16 operands are applied. Each result is checked against the
// real-valued approximation table (within 3 ulp) or the special-value rule, and its
// relative error against the exact square root is bounded by 6.5% (the worst case is
// odd r with Y = 0, where 1.5 replaces sqrt(2): +6.1%). Over all positive
// normal operands the error statistics are accumulated and compared with the accuracy
// the method reports for this design: MED 0.4024, MRED 1.5264e-2, NMED 0.1572e-2
// (mean error distance, mean relative error distance, MED over the largest exact
// output sqrt(65504)). MSE and the largest error distance are printed.
// The worked example of the method, M = 0x785A -> 0x5A21 (196.125), is checked exactly.
module tb_e2afs_core;
  import e2afs_pkg::*;
  import e2afs_ref_pkg::*;
  int unsigned checks = 0, failures = 0;
  fp16_t m, q;
  int    n_region[4];

  e2afs_core dut (.m(m), .q(q));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic real sum_ed = 0.0, sum_red = 0.0, sum_sq = 0.0, ed_max = 0.0;
    real med, mred, nmed, mse;
    automatic int n = 0;
    for (int k = 0; k < 4; k++) n_region[k] = 0;
    for (int i = 0; i < 65536; i++) begin
      m = fp16_t'(16'(i));
      #1;
      checks++;
      if (!result_ok(16'(i), 16'(q))) begin
        failures++;
        if (failures < 10) $display("FAIL m=%04h q=%04h", i, q);
      end
      if (i >= 16'h0400 && i < 16'h7c00) begin
        real ex, ap, ed;
        ex = $sqrt(fp16_to_real(16'(i)));
        ap = fp16_to_real(16'(q));
        ed = (ap > ex) ? ap - ex : ex - ap;
        sum_ed  += ed;
        sum_red += ed / ex;
        sum_sq  += ed * ed;
        if (ed > ed_max) ed_max = ed;
        n++;
        n_region[region(16'(i))]++;
        checks++;
        if (ed / ex > 0.065) begin
          failures++;
          if (failures < 10) $display("FAIL rel error m=%04h q=%04h", i, q);
        end
      end
    end
    med  = sum_ed / n;
    mred = sum_red / n;
    nmed = med / $sqrt(65504.0);
    mse  = sum_sq / n;
    $display("operands=%0d MED=%f MRED=%fe-2 NMED=%fe-2 MSE=%f EDmax=%f",
             n, med, mred * 100.0, nmed * 100.0, mse, ed_max);
    checks += 3;
    if (med < 0.4014 || med > 0.4034) failures++;
    if (mred * 100.0 < 1.5244 || mred * 100.0 > 1.5284) failures++;
    if (nmed * 100.0 < 0.1562 || nmed * 100.0 > 0.1582) failures++;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_region[k] == 0) failures++;
    end
    // worked example
    m = fp16_t'(16'b0_11110_0001011010);
    #1;
    checks++;
    if (16'(q) !== 16'b0_10110_1000100001 || fp16_to_real(16'(q)) != 196.125) begin
      failures++;
      $display("FAIL worked example q=%04h", q);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
