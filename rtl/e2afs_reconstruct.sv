// e2afs_reconstruct -- output reconstruction (concatenation) block of E2AFS.
//
// Assembles the binary16 result {sign, r2, y2} from the result exponent r2 of the
// first-level unit and the fraction bits y2 = S - 1 of the mantissa term S in [1,2),
// i.e. its 10 low bits. A square root is non-negative, so the sign of a normal result
// is 0. The concatenation is the method's; the handling of special operands is this
// implementation's choice, modelled on IEEE-754 square root:
//   NaN, or a negative non-zero operand (incl. -inf) -> quiet NaN 0x7E00
//   zero or subnormal (flushed)                      -> zero of the operand's sign
//   +inf                                             -> +inf
//
// Interface: cls, sign, r2, s in; q out. Purely combinational.
module e2afs_reconstruct
  import e2afs_pkg::*;
(
  input  fp_class_t         cls,
  input  logic              sign,
  input  logic [EXP_W-1:0]  r2,
  input  logic [TERM_W-1:0] s,
  output fp16_t             q
);

  always_comb begin
    if (cls.nan || cls.neg) q = FP16_QNAN;
    else if (cls.zero)      q = '{sign: sign, exp: '0, man: '0};
    else if (cls.inf)       q = FP16_PINF;
    else                    q = '{sign: 1'b0, exp: r2, man: s[MAN_W-1:0]};
  end

endmodule
