// tb_e2afs_threshold_cmp -- exhaustive check of the mantissa threshold comparator.
// Every 10-bit mantissa is compared, as a real fraction Y = y/1024, against the
// default breakpoint 0.5 and, on a second instance, against the alternative
// breakpoint 0.51 (threshold 522) that needs a true comparator.
module tb_e2afs_threshold_cmp;
  int unsigned checks = 0, failures = 0;
  logic [9:0] y;
  logic       hi, hi_51;

  e2afs_threshold_cmp dut (.y(y), .hi(hi));
  e2afs_threshold_cmp #(.THRESH(10'd522)) dut_51 (.y(y), .hi(hi_51));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      real yf;
      y  = 10'(i);
      #1;
      yf = real'(i) / 1024.0;
      checks += 2;
      if (hi !== (yf >= 0.5)) begin
        failures++;
        $display("FAIL y=%0d hi=%0b", i, hi);
      end
      if (hi_51 !== (yf >= 522.0 / 1024.0)) begin
        failures++;
        $display("FAIL y=%0d hi_51=%0b", i, hi_51);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
