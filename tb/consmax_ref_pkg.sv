// consmax_ref_pkg -- reference arithmetic for the ConSmax testbenches.
//
// Works in double-precision reals, independently of the integer datapath of the RTL:
// a floating-point word (8-bit exponent, bias 127, F fraction bits, exponent 0 = zero) is
// turned into a real, the arithmetic is done in real (products of the short significands
// used here are exact in a double), and the result is rounded back to F fraction bits,
// nearest-even, by inspecting the bits of the double. Results below the normal range give
// zero; above it, the largest magnitude (exponent 255, fraction all ones).
package consmax_ref_pkg;

  function automatic real fp_to_real(input logic [31:0] w, input int unsigned f);
    logic        s;
    int unsigned e;
    logic [63:0] d;
    s = w[8+f];
    e = (w >> f) & 32'hFF;
    if (e == 0) return $bitstoreal({s, 63'd0});   // signed zero
    // Same value as a double: rebias the exponent, left-align the fraction.
    d = {s, 11'(e + 1023 - 127), 52'(64'(w & ((32'd1 << f) - 1)) << (52 - f))};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_fp(input real r, input int unsigned f);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] sig;
    logic [52:0] keep;
    logic        g, st, up;
    int unsigned drop;
    logic [31:0] w;
    d    = $realtobits(r);
    s    = d[63];
    w    = 32'(s) << (8 + f);
    if (d[62:0] == 0) return w;
    e    = int'(d[62:52]) - 1023;
    sig  = {1'b1, d[51:0]};
    drop = 52 - f;
    keep = sig >> drop;
    g    = sig[drop-1];
    st   = (drop >= 2) ? |(sig & ((53'd1 << (drop - 1)) - 1)) : 1'b0;
    up   = g & (st | keep[0]);
    keep = keep + 53'(up);
    if (keep[f+1]) begin
      keep = keep >> 1;
      e    = e + 1;
    end
    e = e + 127;
    if (e <= 0) return w;
    if (e > 255) return w | (32'hFF << f) | ((32'd1 << f) - 1);
    return w | (32'(e) << f) | 32'(keep & ((53'd1 << f) - 1));
  endfunction

  // Round to nearest integer, ties to even, saturate to a signed w-bit range.
  function automatic longint real_to_int(input real r, input int unsigned w);
    real    fl, fr;
    longint v, lo, hi;
    fl = $floor(r);
    fr = r - fl;
    v  = longint'(fl);
    if (fr > 0.5 || (fr == 0.5 && (v % 2 != 0))) v = v + 1;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (r > real'(hi) + 1.0) v = hi;
    if (r < real'(lo) - 1.0) v = lo;
    if (v > hi) v = hi;
    if (v < lo) v = lo;
    return v;
  endfunction

  function automatic logic [15:0] bf16(input real r);
    return 16'(real_to_fp(r, 7));
  endfunction

  function automatic logic [23:0] fp24(input real r);
    return 24'(real_to_fp(r, 15));
  endfunction

endpackage
