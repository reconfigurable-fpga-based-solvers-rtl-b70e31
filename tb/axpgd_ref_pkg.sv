// axpgd_ref_pkg -- bit-exact reference of the solver arithmetic, for testbenches.
//
// Works on 256-bit signed integers so that any word length up to 64 bits and
// any product fits without care. The shift toward minus infinity is written
// as a floor division and saturation as explicit comparisons, so the model
// shares no code or idiom with the RTL datapath. `ref_update` is one
// coordinate of u <- S_tau(u - s*(H u - b)) with FRAC fraction bits.
package axpgd_ref_pkg;

  typedef logic signed [255:0] wide_t;

  // floor(x / 2^f)
  function automatic wide_t floor_div(wide_t x, int f);
    wide_t d, q, r;
    d = wide_t'(1) << f;
    q = x / d;
    r = x % d;
    if (x < 0 && r != 0) q = q - 1;
    return q;
  endfunction

  function automatic wide_t wmax(int w);
    return (wide_t'(1) << (w - 1)) - 1;
  endfunction

  function automatic wide_t wmin(int w);
    return -(wide_t'(1) << (w - 1));
  endfunction

  function automatic wide_t clip(wide_t x, int w, inout bit flag);
    if (x > wmax(w)) begin flag = 1'b1; return wmax(w); end
    if (x < wmin(w)) begin flag = 1'b1; return wmin(w); end
    return x;
  endfunction

  // soft threshold by magnitude and sign
  function automatic wide_t soft_thr(wide_t x, wide_t tau);
    wide_t m;
    m = (x < 0) ? -x : x;
    if (m <= tau) return 0;
    return (x < 0) ? -(m - tau) : (m - tau);
  endfunction

  // hu: sum_j H_ij u_j with 2*frac fraction bits
  function automatic wide_t ref_update(wide_t hu, wide_t b, wide_t u, wide_t step,
                                       wide_t tau, int w, int frac, inout bit sat);
    wide_t g, v;
    g = clip(floor_div(hu, frac) - b, w, sat);
    v = clip(u - floor_div(step * g, frac), w, sat);
    return soft_thr(v, tau);
  endfunction

  // sign-extend a w-bit word held in the low bits of x
  function automatic wide_t sext(logic [63:0] x, int w);
    wide_t r;
    r = wide_t'(x) & ((wide_t'(1) << w) - 1);
    if (x[w-1]) r = r - (wide_t'(1) << w);
    return r;
  endfunction

endpackage
