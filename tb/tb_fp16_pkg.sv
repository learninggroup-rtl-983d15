// tb_fp16_pkg: reference half-precision arithmetic for the testbenches.
//
// Works through double precision: an FP16 sum or product is exact in a
// double, so converting the exact double result to FP16 with one
// round-to-nearest-even step gives the correctly rounded answer.  The same
// conventions as the RTL are modelled: subnormals are zero, results below
// 2^-14 flush to zero, overflow goes to infinity.  Also gives a random
// normal FP16 generator with a bounded exponent range.
package tb_fp16_pkg;

  function automatic real fp2real(logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real2fp(real v);
    logic [63:0] b;
    int          e;
    logic [10:0] sig;
    logic        g, st;
    logic [11:0] r;
    if (v == 0.0) return 16'h0000;
    b   = $realtobits(v);
    e   = int'(b[62:52]) - 1023 + 15;
    if (e <= 0) return {b[63], 15'd0};
    sig = {1'b1, b[51:42]};
    g   = b[41];
    st  = |b[40:0];
    r   = {1'b0, sig} + {11'd0, g & (st | sig[0])};
    if (r[11]) begin r = r >> 1; e = e + 1; end
    if (e >= 31) return {b[63], 5'd31, 10'd0};
    return {b[63], 5'(e), r[9:0]};
  endfunction

  // Random normal FP16 with exponent in [15-span, 15+span].
  function automatic logic [15:0] rand_fp(int span);
    int e;
    e = 15 - span + int'($urandom_range(0, 2 * span));
    return {1'($urandom_range(0, 1)), 5'(e), 10'($urandom_range(0, 1023))};
  endfunction

  function automatic real fp_abs(real v);
    return v < 0.0 ? -v : v;
  endfunction

endpackage
