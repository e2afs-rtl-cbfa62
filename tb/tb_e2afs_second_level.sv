// tb_e2afs_second_level -- exhaustive check of the second-level adder/shifter unit.
// For all 1024 mantissas and both exponent parities, the threshold decision is formed
// in the testbench (Y >= 0.5) and the unit's term T/1024 is compared with the real
// value of the approximation table (without the 1.5 factor of odd exponents). The
// RTL truncates shifted-out bits and rounds the constants to 2^-10, so it must lie
// within one unit of 2^-10 of the real value.
module tb_e2afs_second_level;
  import e2afs_pkg::*;
  int unsigned checks = 0, failures = 0;
  logic [MAN_W-1:0]  y;
  logic              odd, hi;
  logic [TERM_W-1:0] t;

  e2afs_second_level dut (.y(y), .odd(odd), .hi(hi), .t(t));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 2; p++) begin
      for (int i = 0; i < 1024; i++) begin
        real yf, ref_t, got;
        y   = 10'(i);
        odd = p[0];
        yf  = real'(i) / 1024.0;
        hi  = (yf >= 0.5);
        #1;
        if (!odd) ref_t = hi ? 1.0 + yf / 2.0 - 0.045 : 1.0 + yf / 2.0;
        else      ref_t = hi ? 1.0 + (yf + 0.3333) / 4.0 : 1.0 + yf / 4.0;
        got = real'(t) / 1024.0;
        checks++;
        if (got - ref_t >= 1.0 / 1024.0 || ref_t - got >= 1.0 / 1024.0) begin
          failures++;
          if (failures < 10)
            $display("FAIL odd=%0b y=%0d t=%0d ref=%f", odd, i, t, ref_t * 1024.0);
        end
      end
    end
    // worked example of the method: y1 = 90, odd r -> y1/4 = 22, term 1 + 22/1024
    y = 10'd90; odd = 1'b1; hi = 1'b0;
    #1;
    checks++;
    if (t != 11'(1024 + 22)) begin
      failures++;
      $display("FAIL worked example t=%0d", t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
