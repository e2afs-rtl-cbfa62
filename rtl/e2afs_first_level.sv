// e2afs_first_level -- first-level adder/shifter approximation of E2AFS.
//
// Handles the first factor 2^(r/2) of sqrt(M) = 2^(r/2) sqrt(1+Y). For even r the
// result exponent is r/2 and the mantissa term T passes unchanged. For odd r the
// factor is rewritten as 2^((r-1)/2) * sqrt(2) and sqrt(2) is overestimated as 1.5,
// so the result exponent is (r-1)/2 and the mantissa becomes S = T + T/2, one adder and
// one shift (the 1.5 overestimate is offset by the 1 + Y/4 underestimate that the
// second-level unit built into T). The exponent is then re-biased: r2 = r/2 + BIAS.
// This is the method's exponent processing (r1' = e - 15, r2' = (r1'-1)/2,
// r2 = r2' + 15); the halving is an arithmetic right shift, so negative r works too.
//
// T < 1365/1024 for odd r, so S <= 2047/1024 stays below 2 and the result needs no
// renormalisation; an assertion checks that S keeps its leading one.
//
// Interface: r, odd, t in; r2 (biased result exponent) and s (1.F term) out.
// Purely combinational.
module e2afs_first_level
  import e2afs_pkg::*;
(
  input  uexp_t             r,
  input  logic              odd,
  input  logic [TERM_W-1:0] t,
  output logic [EXP_W-1:0]  r2,
  output logic [TERM_W-1:0] s
);

  uexp_t           r_half;
  logic [TERM_W:0] s_wide;

  always_comb begin
    r_half = (r - uexp_t'(odd)) >>> 1;          // r/2 or (r-1)/2
    r2     = EXP_W'(r_half + uexp_t'(BIAS));
    s_wide = odd ? ({1'b0, t} + {2'b00, t[TERM_W-1:1]}) : {1'b0, t};
    s      = s_wide[TERM_W-1:0];
  end

  // The mantissa must stay in [1,2): leading one present, no carry out.
  always_comb begin
    if (t[TERM_W-1]) begin
      assert (s_wide[TERM_W:TERM_W-1] == 2'b01)
        else $error("e2afs_first_level: mantissa term left [1,2): t=%0d", t);
    end
  end

endmodule
