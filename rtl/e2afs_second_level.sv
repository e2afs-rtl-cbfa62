// e2afs_second_level -- second-level adder/shifter approximation of E2AFS.
//
// Forms the linearised mantissa term T (one integer bit, 10 fraction bits, T in [1,2))
// that replaces sqrt(1 + Y), for the four regions set by the parity of r and by the
// threshold comparator (hi = Y >= 0.5):
//
//   even r, Y <  0.5 :  T = 1 + Y/2
//   even r, Y >= 0.5 :  T = 1 + Y/2 - 0.045          (cancels the overestimate)
//   odd  r, Y <  0.5 :  T = 1 + Y/4                   (deliberate underestimate)
//   odd  r, Y >= 0.5 :  T = 1 + (Y + 0.333)/4         (compensation inside the term)
//
// For odd r the first-level unit then scales T by 1.5. The four formulas are the
// method's; the bit-level realisation is this implementation's: Y/2 and Y/4 are right
// shifts of the 10-bit field that drop the shifted-out bits, the constants are
// 46 and 341 in units of 2^-10, and for odd r the constant is added to Y before the
// shift, as the formula is written. No region can leave [1,2): the even-r subtraction
// is only done when Y/2 >= 0.25 > 0.045, and for odd r (Y + 0.333)/4 < 0.34.
//
// Interface: y, odd, hi in; t out. Purely combinational.
module e2afs_second_level
  import e2afs_pkg::*;
#(
  parameter logic [MAN_W-1:0] C_EVEN = C_EVEN_Q10,
  parameter logic [MAN_W-1:0] C_ODD  = C_ODD_Q10
) (
  input  logic [MAN_W-1:0]  y,
  input  logic              odd,
  input  logic              hi,
  output logic [TERM_W-1:0] t
);

  localparam logic [TERM_W-1:0] ONE = TERM_W'(1) << MAN_W;

  logic [MAN_W:0]  y_comp;   // Y or Y + 0.333, one carry bit wider
  logic [MAN_W:0]  y_even;   // Y/2 or Y/2 - 0.045

  always_comb begin
    // odd r: compensation added ahead of the divide-by-4 shift
    y_comp = (odd && hi) ? ({1'b0, y} + {1'b0, C_ODD}) : {1'b0, y};
    // even r: compensation subtracted after the divide-by-2 shift
    y_even = {2'b00, y[MAN_W-1:1]} - ((!odd && hi) ? {1'b0, C_EVEN} : '0);

    if (odd) t = ONE + TERM_W'(y_comp >> 2);
    else     t = ONE + TERM_W'(y_even);
  end

endmodule
