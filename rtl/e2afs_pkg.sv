// e2afs_pkg -- shared types and constants of the E2AFS approximate FP16 square rooter.
//
// The operand format is IEEE-754 binary16 (1 sign bit, 5 exponent bits with bias 15,
// 10 mantissa bits), as the design is defined for. Mantissa-domain quantities are fixed
// point with 10 fractional bits, so a constant c is stored as round(c * 1024).
// The two compensation constants (0.045 for even exponents, 0.333 for odd exponents)
// and the breakpoint Y = 0.5 come from the approximation table of the method; their
// 10-bit encodings (46, 341, 512) and the special-value encodings are this
// implementation's choice.
package e2afs_pkg;

  localparam int unsigned EXP_W = 5;    // exponent field width
  localparam int unsigned MAN_W = 10;   // mantissa field width
  localparam int unsigned FP_W  = 1 + EXP_W + MAN_W;
  localparam int unsigned BIAS  = 15;   // binary16 exponent bias

  // 1.F mantissa term: one integer bit and MAN_W fraction bits, value in [1,2)
  localparam int unsigned TERM_W = MAN_W + 1;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } fp16_t;

  // Unbiased exponent r = exp - BIAS, one bit wider than the field, two's complement.
  typedef logic signed [EXP_W:0] uexp_t;

  // Operand class flags from the normalization block.
  typedef struct packed {
    logic zero;   // exponent field 0: zero or subnormal (flushed to zero)
    logic inf;    // exponent all ones, mantissa 0
    logic nan;    // exponent all ones, mantissa non-zero
    logic neg;    // sign set on a non-zero operand (square root undefined)
  } fp_class_t;

  // Constants in units of 2^-MAN_W.
  localparam logic [MAN_W-1:0] C_EVEN_Q10 = MAN_W'(46);   // 0.045  * 1024 = 46.08
  localparam logic [MAN_W-1:0] C_ODD_Q10  = MAN_W'(341);  // 0.3333 * 1024 = 341.3
  localparam logic [MAN_W-1:0] THRESH_Q10 = MAN_W'(512);  // breakpoint Y = 0.5

  // Results returned for special operands.
  localparam fp16_t FP16_QNAN = '{sign: 1'b0, exp: '1, man: MAN_W'(10'h200)};
  localparam fp16_t FP16_PINF = '{sign: 1'b0, exp: '1, man: '0};

endpackage
