// opope_fp_ref: reference binary16 arithmetic for the testbenches.
//
// Values are converted to IEEE double (`real`), combined there, and rounded
// back to binary16 with round-to-nearest-even.  The testbenches keep operand
// exponents within a window where a*b + c is exact in double, so the single
// final rounding matches a fused multiply-add.
package opope_fp_ref;

  function automatic real h2r(input logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) * (2.0 ** -24);
    else        m = real'(32'(h[9:0]) + 32'd1024) * (2.0 ** (e - 25));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    logic [63:0] d;
    logic [52:0] sig;
    int          ue, lsbexp, sh;
    logic [52:0] r;
    logic        g, st;
    int          enc;
    d = $realtobits(x);
    if (x == 0.0) return {d[63], 15'd0};
    sig    = {1'b1, d[51:0]};
    ue     = int'(d[62:52]) - 1023;
    lsbexp = (ue - 10 > -24) ? ue - 10 : -24;
    sh     = lsbexp - (ue - 52);
    if (sh > 53) begin
      r = '0; g = 1'b0; st = 1'b1;
    end else begin
      r  = sig >> sh;
      g  = sig[sh-1];
      st = (sh > 1) ? ((sig & ((53'd1 << (sh - 1)) - 53'd1)) != 0) : 1'b0;
    end
    if (g && (st || r[0])) r = r + 1;
    enc = ((lsbexp + 24) << 10) + int'(r);
    if (enc >= 32'h7C00) return {d[63], 15'h7C00};
    return {d[63], enc[14:0]};
  endfunction

  // exact-in-double a*b + c, rounded once
  function automatic logic [15:0] fma16(input logic [15:0] a, b, c);
    return r2h(h2r(a) * h2r(b) + h2r(c));
  endfunction

  // random finite binary16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_h(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

endpackage
