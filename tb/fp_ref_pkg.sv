// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Values are widened to the simulator's double-precision real, operated on
// there, and rounded back to single precision with round-to-nearest-even.
// One add or multiply done in double and rounded once to single gives the
// correctly rounded single-precision result, so this is an independent model
// of the hardware units.  Like the hardware, subnormals are flushed to zero.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fmax(logic [31:0] a, logic [31:0] b);
    return (f2r(a) >= f2r(b)) ? a : b;
  endfunction

  // random normal number with exponent in [127-er, 127+er)
  function automatic logic [31:0] frand(int er);
    logic [31:0] f;
    f = $urandom;
    f[30:23] = 8'(127 - er + int'($urandom_range(0, 2*er - 1)));
    return f;
  endfunction

endpackage
