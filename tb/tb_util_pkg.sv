// tb_util_pkg: reference arithmetic for the EVA testbenches, written with
// real numbers so that it is independent of the fixed-point arithmetic of
// the design. Also a random FP16 generator with a bounded exponent range.
package tb_util_pkg;

  function automatic real pow2(input int k);
    real r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  // FP16 bits -> real (subnormals taken as zero, as in the design)
  function automatic real h2r(input logic [15:0] h);
    real v;
    if (h[14:10] == 0) return 0.0;
    v = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    return h[15] ? -v : v;
  endfunction

  // extended format (e, m) -> real, value = m * 2^(e-56)
  function automatic real x2r(input logic [7:0] e, input logic signed [31:0] m);
    return real'(m) * pow2(int'(e) - 56);
  endfunction

  function automatic real absr(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // random normal FP16 with biased exponent in [lo, hi]
  function automatic logic [15:0] rand_h(input int lo, input int hi);
    logic [15:0] h;
    int e;
    e = lo + int'($urandom_range(hi - lo));
    h = {1'($urandom), 5'(e), 10'($urandom)};
    return h;
  endfunction

  // FP16 within tolerance of a reference: |h - ref| <= rel*|ref| + abs_tol
  function automatic bit close(input logic [15:0] h, input real ref_v, input real rel, input real abs_tol);
    return absr(h2r(h) - ref_v) <= rel * absr(ref_v) + abs_tol;
  endfunction

endpackage
