// mfg_pkg: types, constants and arithmetic shared by the matched filter group node.
//
// All samples and coefficients are complex single-precision floating-point numbers
// (IEEE 754 binary32 real part and imaginary part, 64 bits per complex value), which is
// the data type the design is specified for. The floating-point functions below are
// combinational and synthesizable. They round to nearest-even, flush subnormal inputs
// and results to zero, and saturate overflow to infinity; NaN inputs are not treated
// specially. Those simplifications are this design's own choice: the filtering only
// needs normal numbers, and dropping subnormals keeps the adder short.
package mfg_pkg;

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    fp32_t re;
    fp32_t im;
  } cplx_t;

  localparam cplx_t CZERO = '0;

  // Address width for every off-chip array; input arrays reach 2^30 points.
  localparam int unsigned ADDR_W = 32;

  // ---------------------------------------------------------------- fp32 helpers
  function automatic logic [4:0] lzc28(input logic [27:0] v);
    logic [4:0] n;
    logic       found;
    n = 5'd28;
    found = 1'b0;
    for (int i = 27; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 5'(27 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  // Round a normalised 24-bit significand (hidden bit at [26]) carrying three
  // guard bits [2:0] and pack it with sign and biased exponent.
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [26:0] m);
    logic [24:0] r;
    logic        up;
    int          ee;
    up = m[2] & (m[1] | m[0] | m[3]);
    r  = {1'b0, m[26:3]} + 25'(up);
    ee = e;
    if (r[24]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return {s, 8'hff, 23'd0};
    if (ee <= 0) return {s, 31'd0};
    return {s, 8'(ee), r[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [26:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = {p[47:22], |p[21:0]};
      e = e + 1;
    end else begin
      m = {p[46:21], |p[20:0]};
    end
    return fp_pack(s, e, m);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [27:0] mx, my, sum;
    logic [4:0]  lz;
    int          d, e;
    // Order the operands so that |x| >= |y|.
    if (a[30:0] >= b[30:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    if (x[30:23] == 8'd0) return 32'd0;
    if (y[30:23] == 8'd0) return x;
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    if (d > 26) begin
      my = 28'd1;  // only the sticky bit survives
    end else if (d > 0) begin
      logic [27:0] lost;
      lost = my & ((28'd1 << d) - 28'd1);
      my = (my >> d) | 28'(|lost);
    end
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return 32'd0;
      lz  = lzc28(sum);
      // sum[27] is clear here, so a normalised value has its leading one at [26].
      sum = sum << (lz - 5'd1);
      e   = e - (int'(lz) - 1);
    end
    return fp_pack(x[31], e, sum[26:0]);
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // ---------------------------------------------------------------- complex helpers
  function automatic cplx_t c_add(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = fp_add(a.re, b.re);
    r.im = fp_add(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t c_sub(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = fp_sub(a.re, b.re);
    r.im = fp_sub(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t c_mul(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = fp_sub(fp_mul(a.re, b.re), fp_mul(a.im, b.im));
    r.im = fp_add(fp_mul(a.re, b.im), fp_mul(a.im, b.re));
    return r;
  endfunction

  // Elaboration-time conversion of a real number to binary32 (round to nearest-even),
  // used only to build constant tables such as FFT twiddle factors.
  function automatic fp32_t real_to_fp32(input real v);
    logic [63:0] b;
    logic [22:0] f;
    logic [28:0] rest;
    logic [23:0] r;
    int          e;
    if (v == 0.0) return 32'd0;
    b = $realtobits(v);
    e = int'(b[62:52]) - 1023 + 127;
    f = b[51:29];
    rest = b[28:0];
    r = {1'b0, f};
    if (rest[28] && (rest[27:0] != 0 || f[0])) r = r + 24'd1;
    if (r[23]) e = e + 1;
    if (e <= 0) return {b[63], 31'd0};
    return {b[63], 8'(e), r[22:0]};
  endfunction

endpackage
