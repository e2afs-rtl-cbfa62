// e2afs_threshold_cmp -- mantissa threshold comparator of E2AFS.
//
// Reports whether the mantissa fraction Y (10-bit field, Y = y / 1024) is at or above
// the breakpoint that splits the linear approximation into two regions. The method
// places the breakpoint at Y = 0.5 (THRESH = 512), where the comparison reduces to the
// mantissa MSB; a search found 0.51 marginally better but it needs a full comparator.
// THRESH is kept as a parameter so other breakpoints can be tried; any value other
// than a power of two synthesizes to a real magnitude comparator.
//
// Interface: y in, hi out (1 when Y >= THRESH/1024). Purely combinational.
module e2afs_threshold_cmp #(
  parameter int unsigned              MAN_W  = e2afs_pkg::MAN_W,
  parameter logic [MAN_W-1:0]         THRESH = MAN_W'(e2afs_pkg::THRESH_Q10)
) (
  input  logic [MAN_W-1:0] y,
  output logic             hi
);

  always_comb hi = (y >= THRESH);

endmodule
