// tb_ref_pkg: real-valued reference models used by the testbenches.
//
// These models work in double precision, not in the design's fixed point, so
// they check the RTL's arithmetic independently; the testbenches compare with a
// tolerance that covers Q4.12 truncation. The activation reference is the same
// four-segment piecewise-linear sigmoid the design specifies (breakpoints 1,
// 2.375 and 5), with tanh(x) = 2*sigmoid(2x) - 1.
package tb_ref_pkg;

  function automatic real fx2r(input logic signed [15:0] v);
    return real'(v) / 4096.0;
  endfunction

  function automatic logic signed [15:0] r2fx(input real r);
    real s;
    s = r * 4096.0;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return 16'(int'($floor(s)));
  endfunction

  function automatic real clip(input real r);
    if (r > 32767.0/4096.0) return 32767.0/4096.0;
    if (r < -8.0) return -8.0;
    return r;
  endfunction

  function automatic real ref_sigmoid(input real x);
    real a, s;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        s = 1.0;
    else if (a >= 2.375) s = a / 32.0 + 0.84375;
    else if (a >= 1.0)   s = a / 8.0 + 0.625;
    else                 s = a / 4.0 + 0.5;
    return (x < 0.0) ? 1.0 - s : s;
  endfunction

  function automatic real ref_tanh(input real x);
    return 2.0 * ref_sigmoid(2.0 * x) - 1.0;
  endfunction

  // Slopes of the same approximations (the upper segment owns a breakpoint).
  function automatic real ref_dsigmoid(input real x);
    real a;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        return 0.0;
    else if (a >= 2.375) return 1.0 / 32.0;
    else if (a >= 1.0)   return 1.0 / 8.0;
    else                 return 0.25;
  endfunction

  function automatic real ref_dtanh(input real x);
    return 4.0 * ref_dsigmoid(2.0 * x);
  endfunction

  // Exact functions, to bound the approximation error.
  function automatic real exact_sigmoid(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real abs_r(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
