// e2afs_core -- combinational E2AFS datapath: approximate square root of a binary16.
//
// Computes sqrt(M) for M = 2^r (1 + Y) without multipliers or iterations, using the
// dual-level approximation of the method:
//
//              Y < 0.5                      Y >= 0.5
//   even r   2^(r/2) (1 + Y/2)             2^(r/2) (1 + Y/2 - 0.045)
//   odd  r   2^((r-1)/2) 1.5 (1 + Y/4)     2^((r-1)/2) 1.5 (1 + (Y + 0.333)/4)
//
// Dataflow: the normalization block splits M; the parity detector (on the exponent)
// and the threshold comparator (on the mantissa) decide the region; the second-level
// unit builds the mantissa term with its compensation, the first-level unit halves the
// exponent and applies the 1.5 factor for odd r; the reconstruction block concatenates
// the result. In the method's block diagram the two adder/shifter units feed the
// reconstruction side by side; here the second-level term feeds the first-level unit,
// because for odd r the compensation sits inside the term that is scaled by 1.5.
//
// Interface: m in, q out, both binary16. Purely combinational, no clock.
module e2afs_core
  import e2afs_pkg::*;
(
  input  fp16_t m,
  output fp16_t q
);

  uexp_t             r;
  logic [EXP_W-1:0]  e;
  logic [MAN_W-1:0]  y;
  logic              sign;
  fp_class_t         cls;
  logic              odd;
  logic              hi;
  logic [TERM_W-1:0] t;
  logic [EXP_W-1:0]  r2;
  logic [TERM_W-1:0] s;

  e2afs_normalize u_norm (
    .m    (m),
    .r    (r),
    .e    (e),
    .y    (y),
    .sign (sign),
    .cls  (cls)
  );

  e2afs_parity_detect u_parity (
    .e   (e),
    .odd (odd)
  );

  e2afs_threshold_cmp u_thresh (
    .y  (y),
    .hi (hi)
  );

  e2afs_second_level u_second (
    .y   (y),
    .odd (odd),
    .hi  (hi),
    .t   (t)
  );

  e2afs_first_level u_first (
    .r   (r),
    .odd (odd),
    .t   (t),
    .r2  (r2),
    .s   (s)
  );

  e2afs_reconstruct u_recon (
    .cls  (cls),
    .sign (sign),
    .r2   (r2),
    .s    (s),
    .q    (q)
  );

endmodule
