// fp_ref_pkg: reference helpers for the testbenches, independent of the RTL.
// Converts between fp32 bit patterns and real (double) values, rounds a real
// to the nearest fp32 (ties to even, subnormals flushed to zero like the RTL),
// and emulates fp32 add/multiply as "compute in double, round once".
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'b0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [52:0] m;
    int          e;
    logic [24:0] m24;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'b0};
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    m24 = {1'b0, m[52:29]};
    g   = m[28];
    st  = |m[27:0];
    if (g && (st || m24[0])) m24 = m24 + 25'd1;
    if (m24[24]) begin m24 = m24 >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 31'b0};
    if (e >= 255) return {d[63], 8'hff, 23'b0};
    return {d[63], 8'(e), m24[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal fp32 with exponent in [127-span, 127+span]
  function automatic logic [31:0] rand_f(int span);
    logic [7:0] e;
    e = 8'(127 - span + int'($urandom_range(2 * span)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  function automatic real absr(real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
