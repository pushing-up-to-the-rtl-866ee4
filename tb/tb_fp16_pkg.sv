// tb_fp16_pkg: reference conversions between real and FP16 bit patterns for
// the testbenches. Written independently of the RTL arithmetic: it goes
// through real numbers, rounds to nearest and flushes subnormals to zero, so
// testbenches compare the hardware against double-precision results with a
// tolerance in units of the last place.
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

  function automatic logic [15:0] r2h(real r);
    logic s;
    real  a, m;
    int   e;
    int   f;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.103515625e-05) return {s, 15'd0};
    if (a >= 65520.0) return {s, 15'h7C00};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = (a - 1.0) * 1024.0;
    f = int'(m);                     // round to nearest
    if (f == 1024) begin f = 0; e++; end
    if (e + 15 >= 31) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  // relative closeness with an absolute floor
  function automatic bit close(real got, real want, real rel, real abs_tol);
    real d;
    d = got - want;
    if (d < 0.0) d = -d;
    return (d <= abs_tol) || (d <= rel * ((want < 0.0) ? -want : want));
  endfunction

endpackage
