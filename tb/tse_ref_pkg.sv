// tse_ref_pkg: reference models used by the testbenches. They are written
// from the algorithm, not from the RTL: the LFSR is modelled stage by
// stage (stages 1..25), logarithms use real arithmetic, and the Toeplitz
// product is evaluated row by row.
package tse_ref_pkg;

  // Toeplitz string of len bits from an LFSR seeded {1, raw23, 1}:
  // stage 25 = 1, stages 24..2 = raw[22..0], stage 1 = 1. Each clock the
  // output is stage 1, stages move towards stage 1, and stage 25 gets
  // stage1 ^ stage2 ^ stage17 ^ stage23.
  function automatic void lfsr_bits(input logic [22:0] raw, input int len,
                                    ref bit out[$]);
    bit s[1:25];
    bit fb;
    s[25] = 1;
    s[1]  = 1;
    for (int n = 2; n <= 24; n++) s[n] = raw[n-2];
    out.delete();
    for (int i = 0; i < len; i++) begin
      out.push_back(s[1]);
      fb = s[1] ^ s[2] ^ s[17] ^ s[23];
      for (int n = 1; n < 25; n++) s[n] = s[n+1];
      s[25] = fb;
    end
  endfunction

  // log2 by real arithmetic.
  function automatic real rlog2(input real x);
    return $ln(x) / $ln(2.0);
  endfunction

  // Expected output length: floor(bs*H/8 - pen), clamped to [0, mmax].
  function automatic int lhl_m(input real h, input int bs, input int pen,
                               input int mmax);
    real v;
    int  m;
    v = real'(bs) * h / 8.0 - real'(pen);
    m = (v <= 0.0) ? 0 : int'($floor(v));
    if (m > mmax) m = mmax;
    return m;
  endfunction

  // Distance of bs*H/8 from the nearest integer: when small, fixed-point
  // rounding may legitimately land on either side.
  function automatic real lhl_margin(input real h, input int bs);
    real v;
    v = real'(bs) * h / 8.0;
    return (v - $floor(v) < $ceil(v) - v) ? v - $floor(v) : $ceil(v) - v;
  endfunction

endpackage
