// e2afs_normalize -- floating-point normalization block of E2AFS.
//
// Splits the binary16 operand M = 2^r (1 + Y) into its fields: the unbiased exponent
// r = exp - BIAS (signed, one bit wider than the field), the 10-bit mantissa fraction
// Y, and the sign. It also classifies the operand so that the output stage can return
// IEEE-style results for operands outside the approximation's domain (positive
// normal numbers): zero/subnormal (flushed to zero), infinity, NaN and negative.
// The split and bias removal follow the method's worked example; the classification
// and the flush of subnormals to zero are this implementation's choice, since the
// method only treats normal operands.
//
// Interface: m in, r / y / sign / cls out. Purely combinational.
module e2afs_normalize
  import e2afs_pkg::*;
(
  input  fp16_t            m,
  output uexp_t            r,
  output logic [EXP_W-1:0] e,
  output logic [MAN_W-1:0] y,
  output logic             sign,
  output fp_class_t        cls
);

  always_comb begin
    e    = m.exp;
    y    = m.man;
    sign = m.sign;
    r    = uexp_t'({1'b0, m.exp}) - uexp_t'(BIAS);

    cls.zero = (m.exp == '0);
    cls.inf  = (m.exp == '1) && (m.man == '0);
    cls.nan  = (m.exp == '1) && (m.man != '0);
    cls.neg  = m.sign && (m.exp != '0);
  end

endmodule
