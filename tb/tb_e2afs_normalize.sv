// tb_e2afs_normalize -- exhaustive check of the normalization block.
// All 65536 binary16 patterns are applied. The expected unbiased exponent, mantissa,
// sign and class flags are derived with integer arithmetic on the pattern.
module tb_e2afs_normalize;
  import e2afs_pkg::*;
  int unsigned checks = 0, failures = 0;
  fp16_t            m;
  uexp_t            r;
  logic [EXP_W-1:0] e;
  logic [MAN_W-1:0] y;
  logic             sign;
  fp_class_t        cls;

  e2afs_normalize dut (.m(m), .r(r), .e(e), .y(y), .sign(sign), .cls(cls));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      int ex, mn, sg;
      bit zero, inf, nan, neg;
      m  = fp16_t'(16'(i));
      #1;
      ex = (i / 1024) % 32;
      mn = i % 1024;
      sg = i / 32768;
      zero = (ex == 0);
      inf  = (ex == 31) && (mn == 0);
      nan  = (ex == 31) && (mn != 0);
      neg  = (sg == 1) && (ex != 0);
      checks++;
      if (int'(r) != ex - 15 || int'(y) != mn || int'(sign) != sg || int'(e) != ex ||
          cls.zero != zero || cls.inf != inf || cls.nan != nan || cls.neg != neg) begin
        failures++;
        if (failures < 10)
          $display("FAIL m=%04h r=%0d y=%0d sign=%0b cls=%b", i, r, y, sign, cls);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
