// fp_ref_pkg: reference single precision arithmetic for the testbenches.
//
// Values are converted to double precision, operated on there and rounded back to
// single precision (round to nearest even, subnormals flushed to zero). For one addition
// or multiplication of two single precision numbers this double rounding gives the
// correctly rounded single precision result, so it is an independent model of the
// fp32 units. Also holds a small random number helper.
package fp_ref_pkg;

  typedef logic [31:0] fp32_t;

  function automatic real f2r(fp32_t f);
    logic [63:0] b;
    if (f[30:23] == 8'h00)      b = {f[31], 63'd0};
    else if (f[30:23] == 8'hFF) b = {f[31], 11'h7FF, f[22:0], 29'd0};
    else                        b = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  function automatic fp32_t r2f(real r);
    logic [63:0] b;
    logic [52:0] m;
    logic [24:0] k;
    int          e;
    logic        up;
    b = $realtobits(r);
    if (b[62:52] == 11'h7FF) return (b[51:0] != 0) ? 32'h7FC0_0000 : {b[63], 8'hFF, 23'd0};
    if (b[62:52] == 11'h000) return {b[63], 31'd0};
    e  = int'(b[62:52]) - 1023 + 127;
    m  = {1'b1, b[51:0]};
    if (e <= 0) return {b[63], 31'd0};
    up = m[28] & ((|m[27:0]) | m[29]);
    k  = {1'b0, m[52:29]} + 25'(up);
    if (k[24]) begin
      k = k >> 1;
      e = e + 1;
    end
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    return {b[63], 8'(e), k[22:0]};
  endfunction

  function automatic fp32_t fadd(fp32_t a, fp32_t b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic fp32_t fsub(fp32_t a, fp32_t b);
    return r2f(f2r(a) - f2r(b));
  endfunction

  function automatic fp32_t fmul(fp32_t a, fp32_t b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal number with exponent in [127-span, 127+span]
  function automatic fp32_t rand_fp(int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // random value in (-1, 1) on a coarse grid, for convolution data
  function automatic real rand_val();
    return (real'(int'($urandom_range(2000, 0))) - 1000.0) / 1024.0;
  endfunction

  // |a - b| small relative to the magnitude of the terms that produced them
  function automatic bit close(real a, real b, real scale);
    real d;
    d = a - b;
    if (d < 0.0) d = -d;
    return d <= 1.0e-5 * (scale + 1.0);
  endfunction

endpackage
