// tb_ref_pkg: reference arithmetic for the testbenches.
//
// olm_ref models the value delivered by an N-digit radix-2 serial-parallel
// online multiplication written directly from the textbook recurrence in
// real arithmetic (exact for these word lengths): two initialisation steps,
// then v = 2w + x_k*Y/4, digit = +1 if floor4(v) >= 1/2, -1 if
// floor4(v) < -1/2, else 0, w = v - digit. It returns the product in units of
// 2^-n. The testbenches also check the product against the exact x*Y within
// 2^-(n+1), which does not depend on this model.
package tb_ref_pkg;

  function automatic int olm_ref(input int unsigned x, input int y, input int n);
    real yv, w, v, vh, zsum;
    int  d, xk;
    yv   = real'(y) / real'(1 << (n - 1));
    w    = 0.0;
    zsum = 0.0;
    for (int k = 1; k <= n + 2; k++) begin
      xk = (k <= n) ? int'((x >> (n - k)) & 1) : 0;
      v  = 2.0 * w + real'(xk) * yv / 4.0;
      if (k <= 2) begin
        w = v;
      end else begin
        vh = $floor(v * 4.0) / 4.0;
        d  = (vh >= 0.5) ? 1 : ((vh < -0.5) ? -1 : 0);
        w  = v - real'(d);
        zsum = zsum + real'(d) * (2.0 ** (-(k - 2)));
      end
    end
    return int'(zsum * real'(1 << n));
  endfunction

  // Exact product x*Y in units of 2^-n, as a real.
  function automatic real exact_prod(input int unsigned x, input int y, input int n);
    return real'(x) * real'(y) / real'(1 << (n - 1)) / real'(1 << n) * real'(1 << n);
  endfunction

  // Sign-extend an n-bit code.
  function automatic int sext(input int unsigned v, input int n);
    return (v >= (1 << (n - 1))) ? int'(v) - (1 << n) : int'(v);
  endfunction

endpackage
