// tb_fp16_pkg: reference FP16 arithmetic for the testbenches.
//
// The reference FMA is computed with double-precision reals, independently
// of the RTL's fixed-point method: the product of two binary16 values is
// exact in double; the sum with the addend is formed with the TwoSum
// algorithm, which gives the rounded double sum s and its exact error e.
// s is then rounded to binary16 (nearest, ties to even); when s lies
// exactly halfway between two binary16 values the sign of e decides.
package tb_fp16_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m, v;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) v = m * (2.0 ** -24);
    else        v = (1024.0 + m) * (2.0 ** (e - 25));
    return h[15] ? -v : v;
  endfunction

  function automatic bit fp16_is_nan(input logic [15:0] h);
    return (h[14:10] == 5'h1F) && (h[9:0] != 0);
  endfunction

  function automatic bit fp16_is_inf(input logic [15:0] h);
    return (h[14:10] == 5'h1F) && (h[9:0] == 0);
  endfunction

  // Round s (+ a tiny exact error e) to binary16.
  function automatic logic [15:0] real_to_fp16(input real s, input real e);
    logic        sgn;
    real         a, q, n, fl, fr;
    int          ex, eq;
    longint      f, enc;
    logic [63:0] bits;
    if (s == 0.0) return 16'h0000;
    sgn  = (s < 0.0);
    a    = sgn ? -s : s;
    if (sgn) e = -e;
    bits = $realtobits(a);
    ex   = int'(bits[62:52]) - 1023;   // floor(log2(a)), a is normal in double
    eq   = (ex < -14) ? -14 : ex;
    q    = 2.0 ** (eq - 10);
    n    = a / q;
    fl   = $floor(n);
    fr   = n - fl;
    f    = longint'(fl);
    if (fr > 0.5) f = f + 1;
    else if (fr == 0.5) begin
      if (e > 0.0) f = f + 1;
      else if (e == 0.0 && f[0]) f = f + 1;
    end
    enc = (longint'(eq + 14) << 10) + f;
    if (enc >= 64'h7C00) enc = 64'h7C00;
    return {sgn, enc[14:0]};
  endfunction

  function automatic logic [15:0] fma_ref(input logic [15:0] a, input logic [15:0] b,
                                          input logic [15:0] c);
    real p, cc, s, bb, e;
    bit  sp;
    sp = a[15] ^ b[15];
    if (fp16_is_nan(a) || fp16_is_nan(b) || fp16_is_nan(c)) return 16'h7E00;
    if ((fp16_is_inf(a) && b[14:0] == 0) || (fp16_is_inf(b) && a[14:0] == 0)) return 16'h7E00;
    if (fp16_is_inf(a) || fp16_is_inf(b)) begin
      if (fp16_is_inf(c) && c[15] != sp) return 16'h7E00;
      return {sp, 15'h7C00};
    end
    if (fp16_is_inf(c)) return c;
    p  = fp16_to_real(a) * fp16_to_real(b);
    cc = fp16_to_real(c);
    s  = p + cc;
    bb = s - p;
    e  = (p - (s - bb)) + (cc - bb);
    if (s == 0.0) begin
      // Exact zero: -0 only when both terms are -0.
      if (p == 0.0 && cc == 0.0 && sp && c[15]) return 16'h8000;
      return 16'h0000;
    end
    return real_to_fp16(s, e);
  endfunction

endpackage
