// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// Works through the simulator's 64-bit real type: a float is widened to a
// double exactly, the operation is done in double precision, and the result
// is rounded back to single precision (round to nearest even, results below
// the normal range flushed to zero to match the hardware convention). For
// one addition or multiplication of two floats this double rounding gives the
// correctly rounded single-precision result.
package tb_fp_pkg;
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal float with magnitude in [2^(lo-127), 2^(hi-127))
  function automatic logic [31:0] rnd_f32(int lo, int hi, bit allow_neg);
    logic [31:0] f;
    f[31]    = allow_neg ? 1'($urandom_range(0, 1)) : 1'b0;
    f[30:23] = 8'($urandom_range(lo, hi - 1));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction
endpackage
