// fp_ref_pkg: reference conversions between binary32 bit patterns and real
// (binary64) values, used by the testbenches to compute expected results
// without the design's floating-point units.
//
// f2r() widens a binary32 pattern exactly. r2f() rounds a real value to
// binary32, to nearest with ties to even, flushing subnormals to zero like
// the design does. A binary32 product is exact in binary64, so
// r2f(f2r(a) * f2r(b)) is the correctly rounded product; a sum is exact in
// binary64 when the exponents differ by less than about 29.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(32'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real x);
    logic [63:0] d;
    logic        s, g, st, up;
    int          e;
    logic [24:0] m;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    up = g & (st | m[0]);
    m  = m + 25'(up);
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  // Random binary32 number with exponent in [emin, emax] (biased) and a
  // random sign.
  function automatic logic [31:0] rand_f(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
