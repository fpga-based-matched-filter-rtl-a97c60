// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Converts binary32 bit patterns to and from double-precision reals exactly (the
// conversion to reals goes through the binary64 layout, with no rounding), so that the
// testbenches can compute expected results in double precision, independently of the
// design's own floating-point functions, and compare with a relative tolerance.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] b;
    if (f[30:23] == 8'd0) return 0.0;
    b = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  // real -> binary32, round to nearest-even, subnormals flushed to zero
  function automatic logic [31:0] r2f(input real v);
    logic [63:0] b;
    logic [23:0] r;
    int          e;
    if (v == 0.0) return 32'd0;
    b = $realtobits(v);
    e = int'(b[62:52]) - 1023 + 127;
    r = {1'b0, b[51:29]};
    if (b[28] && (b[27:0] != 0 || b[29])) r = r + 24'd1;
    if (r[23]) e = e + 1;
    if (e <= 0) return {b[63], 31'd0};
    return {b[63], 8'(e), r[22:0]};
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // |got - exp| <= tol * scale, scale being the size of the quantities summed
  function automatic bit close(input real got, input real exp, input real scale, input real tol);
    return rabs(got - exp) <= tol * ((scale > 1.0e-30) ? scale : 1.0e-30);
  endfunction

  // uniform random value in [-1, 1) with a coarse grid so that it is exact in binary32
  function automatic real rnd();
    return (real'(int'($urandom_range(0, 2047))) - 1024.0) / 1024.0;
  endfunction

endpackage
