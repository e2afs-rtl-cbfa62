// tb_e2afs_first_level -- check of the first-level adder/shifter unit.
// Every unbiased exponent r in [-15, 16] is applied with its parity and with mantissa
// terms T over the range each parity can produce (all of [1,2) for even r, [1, 1365/1024]
// for odd r). Expected: r2 = floor(r/2) + 15 from real arithmetic, and S = T for even r,
// S = floor(1.5 T) for odd r (the 1 + 1/2 factor with the half truncated to the grid).
module tb_e2afs_first_level;
  import e2afs_pkg::*;
  int unsigned checks = 0, failures = 0;
  uexp_t             r;
  logic              odd;
  logic [TERM_W-1:0] t;
  logic [EXP_W-1:0]  r2;
  logic [TERM_W-1:0] s;

  e2afs_first_level dut (.r(r), .odd(odd), .t(t), .r2(r2), .s(s));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ri = -15; ri <= 16; ri++) begin
      int tmax;
      tmax = ((ri % 2) != 0) ? 1365 : 2047;
      for (int ti = 1024; ti <= tmax; ti += 3) begin
        int exp_r2, exp_s;
        r   = uexp_t'(ri);
        odd = (ri % 2) != 0;
        t   = 11'(ti);
        #1;
        exp_r2 = int'($floor(real'(ri) / 2.0)) + 15;
        exp_s  = odd ? int'($floor(1.5 * real'(ti))) : ti;
        checks++;
        if (int'(r2) != exp_r2 || int'(s) != exp_s) begin
          failures++;
          if (failures < 10)
            $display("FAIL r=%0d t=%0d r2=%0d (exp %0d) s=%0d (exp %0d)",
                     ri, ti, r2, exp_r2, s, exp_s);
        end
      end
    end
    // worked example: r1' = 15 -> r2 = 22; term 1046 -> 1569 (fraction 1000100001b)
    r = uexp_t'(15); odd = 1'b1; t = 11'd1046;
    #1;
    checks++;
    if (r2 != 5'd22 || s != 11'd1569) begin
      failures++;
      $display("FAIL worked example r2=%0d s=%0d", r2, s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
