// e2afs_parity_detect -- exponent parity detector of E2AFS.
//
// Tells whether the unbiased exponent r = e - BIAS is odd. An even r lets 2^(r/2) be
// formed by a plain exponent shift; an odd r selects the first-level approximation
// 2^((r-1)/2) * 1.5. The detector works from the biased exponent field e, so it runs
// in parallel with the bias subtraction: the parity of e - BIAS is e[0] xor BIAS[0],
// which for the binary16 bias of 15 is the inverse of e[0]. Feeding the field rather
// than r is this implementation's choice; the result is the parity of r.
//
// Interface: e in, odd out. Purely combinational.
module e2afs_parity_detect #(
  parameter int unsigned EXP_W = e2afs_pkg::EXP_W,
  parameter int unsigned BIAS  = e2afs_pkg::BIAS
) (
  input  logic [EXP_W-1:0] e,
  output logic             odd
);

  localparam logic BIAS_LSB = BIAS[0];

  always_comb odd = e[0] ^ BIAS_LSB;

endmodule
