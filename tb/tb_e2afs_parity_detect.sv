// tb_e2afs_parity_detect -- exhaustive check of the exponent parity detector.
// For every 5-bit exponent field e, the expected parity of r = e - 15 is computed with
// integer arithmetic and compared with the detector's output.
module tb_e2afs_parity_detect;
  int unsigned checks = 0, failures = 0;
  logic [4:0] e;
  logic       odd;

  e2afs_parity_detect dut (.e(e), .odd(odd));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      int r;
      e = 5'(i);
      #1;
      r = i - 15;
      checks++;
      if (odd !== ((r % 2) != 0)) begin
        failures++;
        $display("FAIL e=%0d r=%0d odd=%0b", i, r, odd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
