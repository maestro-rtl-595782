// Reference floating-point helpers for the testbenches.
//
// Conversions between IEEE-754 half/single bit patterns and `real`, and rounding of a `real`
// to half or single precision (round to nearest, ties to even, with subnormals). They work on
// the bit pattern of the double, independently of the RTL arithmetic, so the testbenches can
// compute expected results as exact double-precision sums and round them once.
package fp_ref_pkg;

  function automatic real fp_to_real(input logic [31:0] x, input int ew, input int mw);
    int   bias, e;
    logic s;
    longint unsigned m;
    real  v;
    bias = (1 << (ew - 1)) - 1;
    s = x[ew+mw];
    e = int'((x >> mw) & ((1 << ew) - 1));
    m = longint'(x & ((1 << mw) - 1));
    if (e == 0) v = real'(m) * (2.0 ** (1 - bias - mw));
    else        v = (real'(m) + 2.0 ** mw) * (2.0 ** (e - bias - mw));
    return s ? -v : v;
  endfunction

  function automatic real h2r(input logic [15:0] x);
    return fp_to_real({16'h0, x}, 5, 10);
  endfunction

  function automatic real f2r(input logic [31:0] x);
    return fp_to_real(x, 8, 23);
  endfunction

  // Round a double (taken as exact) to the format (ew, mw).
  function automatic logic [31:0] real_to_fp(input real r, input int ew, input int mw);
    logic [63:0] d;
    logic        s;
    int          de, ue, bias, sh, be;
    longint unsigned m, kept, rem, half;
    d = $realtobits(r);
    s = d[63];
    de = int'(d[62:52]);
    bias = (1 << (ew - 1)) - 1;
    if (de == 0) return 32'(s) << (ew + mw);          // zero (double subnormals not used)
    m  = {12'h001, d[51:0]};                           // 53-bit significand
    ue = de - 1023;
    if (ue >= 1 - bias) sh = 52 - mw;
    else                sh = 52 - mw + (1 - bias - ue);
    if (sh > 60) return 32'(s) << (ew + mw);
    kept = m >> sh;
    rem  = m & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    if (ue >= 1 - bias) begin
      be = ue + bias;
      if (kept >= (64'd1 << (mw + 1))) begin kept = kept >> 1; be = be + 1; end
    end else begin
      be = (kept >= (64'd1 << mw)) ? 1 : 0;
    end
    if (be >= (1 << ew) - 1) return (32'(s) << (ew + mw)) | (32'((1 << ew) - 1) << mw);
    return (32'(s) << (ew + mw)) | (32'(be) << mw) | 32'(kept & ((64'd1 << mw) - 1));
  endfunction

  function automatic logic [15:0] r2h(input real r);
    logic [31:0] t;
    t = real_to_fp(r, 5, 10);
    return t[15:0];
  endfunction

  function automatic logic [31:0] r2f(input real r);
    return real_to_fp(r, 8, 23);
  endfunction

  // Random half-precision value with a limited exponent range (keeps sums exact in double).
  function automatic logic [15:0] rand_h(input int emin, input int emax);
    logic [15:0] v;
    int e;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    v = {1'($urandom), 5'(e + 15), 10'($urandom)};
    return v;
  endfunction

  // Random single-precision value with 12 significant bits (products stay exact in double).
  function automatic logic [31:0] rand_f(input int emin, input int emax);
    logic [31:0] v;
    int e;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    v = {1'($urandom), 8'(e + 127), 11'($urandom), 12'h000};
    return v;
  endfunction

endpackage
