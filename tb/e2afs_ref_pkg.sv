// e2afs_ref_pkg -- reference arithmetic for the E2AFS testbenches.
//
// Real-valued models written straight from the approximation table, independent of the
// RTL's bit-level shifts and constants:
//   fp16_to_real : value of a binary16 pattern (normals and subnormals)
//   real_to_fp16 : nearest binary16 of a non-negative real (ties away, saturates to max)
//   approx_term  : the mantissa factor of the table for exponent parity and Y
//   approx_sqrt  : the table's approximation of sqrt(M) for a positive normal M
package e2afs_ref_pkg;

  function automatic real pow2(input int k);
    real v = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) v = v * 2.0;
    else        for (int i = 0; i < -k; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e = int'(h[14:10]);
    real f = real'(h[9:0]) / 1024.0;
    real v;
    if (e == 0) v = pow2(-14) * f;
    else        v = pow2(e - 15) * (1.0 + f);
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real x);
    int  e;
    real m;
    int  q;
    if (x <= 0.0) return 16'h0000;
    if (x >= 65504.0) return 16'h7bff;
    e = 0;
    m = x;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e < -14) return 16'h0000;                 // no subnormals needed here
    q = int'($floor((m - 1.0) * 1024.0 + 0.5));
    if (q == 1024) begin q = 0; e++; end
    if (e > 15) return 16'h7bff;
    return {1'b0, 5'(e + 15), 10'(q)};
  endfunction

  // Mantissa factor of the table (for odd r it includes the 1.5 of sqrt(2)).
  function automatic real approx_term(input bit odd, input real y);
    if (!odd) return (y < 0.5) ? (1.0 + y / 2.0) : (1.0 + y / 2.0 - 0.045);
    else      return (y < 0.5) ? 1.5 * (1.0 + y / 4.0) : 1.5 * (1.0 + (y + 0.3333) / 4.0);
  endfunction

  function automatic real approx_sqrt(input logic [15:0] h);
    int  r   = int'(h[14:10]) - 15;
    bit  odd = (r % 2) != 0;
    real y   = real'(h[9:0]) / 1024.0;
    int  rh  = odd ? (r - 1) / 2 : r / 2;
    return pow2(rh) * approx_term(odd, y);
  endfunction

  // Expected result class of the unit for operand h: special operands follow IEEE
  // square root with subnormals flushed to zero; for positive normal operands the
  // result must be a positive normal within 3 units in the last place of the table's
  // real-valued approximation (the RTL truncates on a 2^-10 grid).
  function automatic bit result_ok(input logic [15:0] h, input logic [15:0] q);
    int  e = int'(h[14:10]);
    int  f = int'(h[9:0]);
    real a, g, ulp;
    if (e == 31 && f != 0)        return q == 16'h7e00;            // NaN
    if (e == 0)                   return q == {h[15], 15'h0};      // zero, flushed subnormal
    if (h[15])                    return q == 16'h7e00;            // negative
    if (e == 31)                  return q == 16'h7c00;            // +inf
    if (q[15] || q[14:10] == 5'd0 || q[14:10] == 5'd31) return 1'b0;
    a   = approx_sqrt(h);
    g   = fp16_to_real(q);
    ulp = pow2(int'(q[14:10]) - 25);
    return (g - a < 3.0 * ulp) && (a - g < 3.0 * ulp);
  endfunction

  // Region of the approximation table an operand falls in: bit 1 = odd r, bit 0 = Y >= 0.5.
  function automatic int region(input logic [15:0] h);
    int r = int'(h[14:10]) - 15;
    return (((r % 2) != 0) ? 2 : 0) + (h[9:0] >= 10'd512 ? 1 : 0);
  endfunction

endpackage
