// tb_fp_pkg: reference floating-point model for the RayFlex testbenches.
//
// Golden values are computed in double precision (`real`) and rounded once to
// binary32 with round-to-nearest-even.  For +, - and * of binary32 operands this
// double rounding gives exactly the correctly rounded binary32 result, because double
// carries more than 2*24+2 significand bits; so the model is bit-exact without
// sharing any code with the design.  The package also has its own conversion between
// binary32 and the 33-bit recoded format (through the double exponent), and a random
// binary32 generator that mixes ordinary values with zeros, subnormals, infinities
// and NaNs.
package tb_fp_pkg;

  // ------------------------------------------------------------ conversions
  function automatic real fp32_to_real(bit [31:0] x);
    bit [63:0] d;
    real       r;
    if (x[30:23] == 8'hFF)
      d = (x[22:0] == 0) ? {x[31], 11'h7FF, 52'd0} : {1'b0, 11'h7FF, 1'b1, 51'd0};
    else if (x[30:23] == 0) begin
      r = real'(x[22:0]) * (2.0 ** -149);
      return x[31] ? -r : r;           // -0.0 for negative zero
    end else
      d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // round a double to binary32, nearest-even, with gradual underflow
  function automatic bit [31:0] real_to_fp32(real r);
    bit [63:0]  d;
    bit         s;
    int         e;
    bit [52:0]  sig;
    bit [23:0]  keep;
    bit [28:0]  rest;
    bit [24:0]  m;
    int         sh;
    bit [127:0] q, rem, half;
    d   = $realtobits(r);
    s   = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] == 0) ? {s, 8'hFF, 23'd0} : 32'h7FC00000;
    if (d[62:52] == 0) return {s, 31'd0};
    e   = int'(d[62:52]) - 1023;
    sig = {1'b1, d[51:0]};
    if (e > 127) return {s, 8'hFF, 23'd0};
    if (e >= -126) begin
      keep = sig[52:29];
      rest = sig[28:0];
      m = {1'b0, keep} + ((rest[28] && (rest[27:0] != 0 || keep[0])) ? 25'd1 : 25'd0);
      if (m[24]) begin
        m = m >> 1;
        e = e + 1;
      end
      if (e > 127) return {s, 8'hFF, 23'd0};
      return {s, 8'(e + 127), m[22:0]};
    end
    sh = 29 + (-126 - e);
    if (sh > 100) return {s, 31'd0};
    q    = 128'(sig) >> sh;
    rem  = 128'(sig) & ((128'd1 << sh) - 1);
    half = 128'd1 << (sh - 1);
    if (rem > half || (rem == half && q[0])) q = q + 1;
    return {s, 31'(q)};
  endfunction

  function automatic bit is_nan32(bit [31:0] x);
    return x[30:23] == 8'hFF && x[22:0] != 0;
  endfunction

  // binary32 equality for checking: all NaNs are equal, otherwise bit-exact
  function automatic bit same32(bit [31:0] a, bit [31:0] b);
    if (is_nan32(a) || is_nan32(b)) return is_nan32(a) && is_nan32(b);
    return a == b;
  endfunction

  // binary32 -> recoded, through the double exponent
  function automatic bit [32:0] to_rec(bit [31:0] x);
    bit [63:0] d;
    int        e;
    if (x[30:23] == 8'hFF) return (x[22:0] == 0) ? {x[31], 9'h180, 23'd0} : {1'b0, 9'h1C0, 23'h400000};
    if (x[30:0] == 0) return {x[31], 32'd0};
    d = $realtobits(fp32_to_real(x));
    e = int'(d[62:52]) - 1023;
    return {x[31], 9'(e + 256), d[51:29]};
  endfunction

  // recoded -> binary32 (valid for any value on the binary32 grid)
  function automatic bit [31:0] from_rec(bit [32:0] x);
    int  e;
    if (x[31:29] == 3'b111) return 32'h7FC00000;
    if (x[31:29] == 3'b110) return {x[32], 8'hFF, 23'd0};
    if (x[31:29] == 3'b000) return {x[32], 31'd0};
    e = int'(x[31:23]) - 256;
    return real_to_fp32($bitstoreal({x[32], 11'(e + 1023), x[22:0], 29'd0}));
  endfunction

  // ------------------------------------------------------------ golden ops
  function automatic bit [31:0] g_add(bit [31:0] a, bit [31:0] b);
    return real_to_fp32(fp32_to_real(a) + fp32_to_real(b));
  endfunction
  function automatic bit [31:0] g_sub(bit [31:0] a, bit [31:0] b);
    return real_to_fp32(fp32_to_real(a) - fp32_to_real(b));
  endfunction
  function automatic bit [31:0] g_mul(bit [31:0] a, bit [31:0] b);
    return real_to_fp32(fp32_to_real(a) * fp32_to_real(b));
  endfunction
  function automatic bit g_lt(bit [31:0] a, bit [31:0] b);
    return fp32_to_real(a) < fp32_to_real(b);
  endfunction
  function automatic bit g_gt(bit [31:0] a, bit [31:0] b);
    return fp32_to_real(a) > fp32_to_real(b);
  endfunction
  function automatic bit g_eq(bit [31:0] a, bit [31:0] b);
    return fp32_to_real(a) == fp32_to_real(b);
  endfunction
  // NaN-propagating max / min
  function automatic bit [31:0] g_max(bit [31:0] a, bit [31:0] b);
    if (is_nan32(a) || is_nan32(b)) return 32'h7FC00000;
    return g_lt(a, b) ? b : a;
  endfunction
  function automatic bit [31:0] g_min(bit [31:0] a, bit [31:0] b);
    if (is_nan32(a) || is_nan32(b)) return 32'h7FC00000;
    return g_lt(b, a) ? b : a;
  endfunction
  // numeric equality for checks where the sign of a zero does not matter
  function automatic bit same_val(bit [31:0] a, bit [31:0] b);
    if (is_nan32(a) || is_nan32(b)) return is_nan32(a) && is_nan32(b);
    return g_eq(a, b);
  endfunction

  function automatic bit [31:0] fp(real r);
    return real_to_fp32(r);
  endfunction

  // ------------------------------------------------------------ stimulus
  // ordinary value with exponent in [lo, hi] (biased)
  function automatic bit [31:0] rand_normal(int lo, int hi);
    return {1'($urandom), 8'(lo + int'($urandom % 32'(hi - lo + 1))), 23'($urandom)};
  endfunction

  function automatic bit [31:0] rand_fp();
    int unsigned p = $urandom % 100;
    if (p < 60) return rand_normal(110, 144);
    if (p < 70) return rand_normal(1, 254);
    if (p < 78) return {1'($urandom), 31'd0};
    if (p < 86) return {1'($urandom), 8'd0, 23'($urandom >> ($urandom % 23))};
    if (p < 92) return {1'($urandom), 8'hFF, 23'd0};
    if (p < 95) return {1'($urandom), 8'hFF, 23'($urandom | 1)};
    return rand_normal(1, 30);
  endfunction

endpackage
