// tb_e2afs_reconstruct -- check of the output reconstruction block.
// Random class flags, signs, exponents and mantissa terms are applied; the expected
// binary16 result is built in the testbench from the priority NaN/negative > zero >
// infinity > normal, with the normal result the concatenation {0, r2, S - 1}.
module tb_e2afs_reconstruct;
  import e2afs_pkg::*;
  int unsigned checks = 0, failures = 0;
  fp_class_t         cls;
  logic              sign;
  logic [EXP_W-1:0]  r2;
  logic [TERM_W-1:0] s;
  fp16_t             q;
  int                n_normal = 0, n_special = 0;

  e2afs_reconstruct dut (.cls(cls), .sign(sign), .r2(r2), .s(s), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [15:0] exp_q;
      int          sel;
      sel  = int'($urandom_range(0, 7));
      cls  = '0;
      if (sel == 1) cls.zero = 1'b1;
      if (sel == 2) cls.inf  = 1'b1;
      if (sel == 3) cls.nan  = 1'b1;
      if (sel == 4) cls.neg  = 1'b1;
      if (sel == 5) begin cls.neg = 1'b1; cls.inf = 1'b1; end
      sign = 1'($urandom);
      r2   = 5'($urandom_range(1, 30));
      s    = 11'($urandom_range(1024, 2047));
      #1;
      if (cls.nan || cls.neg)  exp_q = 16'h7e00;
      else if (cls.zero)       exp_q = sign ? 16'h8000 : 16'h0000;
      else if (cls.inf)        exp_q = 16'h7c00;
      else                     exp_q = (32'(r2) << 10) | 32'(s - 11'd1024);
      if (sel == 0 || sel > 5) n_normal++; else n_special++;
      checks++;
      if (16'(q) !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL cls=%b sign=%0b r2=%0d s=%0d q=%04h exp=%04h",
                                    cls, sign, r2, s, q, exp_q);
      end
    end
    // worked example output: r2 = 10110b, y2 = 1000100001b -> 0 10110 1000100001
    cls = '0; sign = 1'b0; r2 = 5'b10110; s = 11'd1569;
    #1;
    checks++;
    if (16'(q) !== 16'b0_10110_1000100001) begin
      failures++;
      $display("FAIL worked example q=%04h", q);
    end
    if (n_normal == 0 || n_special == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
