// tb_fp16_pkg: conversions between FP16 bit patterns and real numbers for the testbenches.
// They are written independently of the RTL's arithmetic so that the testbenches can compute
// reference results in double precision.
package tb_fp16_pkg;
  function automatic real h2r(logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    if (e == 31) return h[15] ? -1.0e9 : 1.0e9;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(real x);
    logic s;
    int   e, f;
    real  m;
    if (x == 0.0) return 16'h0000;
    s = (x < 0.0);
    m = s ? -x : x;
    e = 15;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    f = int'($floor((m - 1.0) * 1024.0 + 0.5));
    if (f == 1024) begin f = 0; e++; end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'h0000};
    return {s, 5'(e), 10'(f)};
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // random real uniformly in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom % 65536) / 65536.0);
  endfunction
endpackage
