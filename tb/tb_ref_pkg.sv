// tb_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL (wide integer arithmetic and the simulator's own real numbers).
package tb_ref_pkg;
  typedef logic signed [63:0]  w_t;
  typedef logic signed [127:0] ww_t;

  function automatic w_t ref_mul(w_t a, w_t b);
    ww_t p;
    p = ww_t'(a) * ww_t'(b);
    return w_t'(p >>> 32);
  endfunction

  // Quotient truncated toward zero; saturated result for a zero divisor.
  function automatic w_t ref_div(w_t a, w_t b);
    ww_t n, q;
    if (b == 0) return a < 0 ? w_t'(64'h8000_0000_0000_0000) : w_t'(64'h7FFF_FFFF_FFFF_FFFF);
    n = ww_t'(a) <<< 32;
    q = n / ww_t'(b);
    return w_t'(q);
  endfunction

  function automatic real fx2real(w_t x);
    return real'(x) / 4294967296.0;
  endfunction

  // Real to Q32.32 for values with a short binary expansion (exact).
  function automatic w_t real2fx(real r);
    return w_t'(longint'(r * 4294967296.0));
  endfunction
endpackage
