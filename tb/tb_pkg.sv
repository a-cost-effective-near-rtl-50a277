// tb_pkg: helpers shared by the testbenches. Reference values are computed in
// double-precision `real` arithmetic, independently of the FP32 operators in
// hilos_pkg; FP16 values are converted by their IEEE definition.
package tb_pkg;
  function automatic real h2r(logic [15:0] h);
    int  e;
    real v;
    e = int'(h[14:10]);
    if (e == 0) v = real'(h[9:0]) / 1024.0 * (2.0 ** (-14));
    else v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2h(real r);
    logic s;
    real  a;
    int   e, m;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e < -14) begin
      m = int'((s ? -r : r) * (2.0 ** 24));
      return {s, 15'(m)};
    end
    m = int'((a - 1.0) * 1024.0);     // round to nearest
    if (m == 1024) begin m = 0; e++; end
    if (e > 15) return {s, 5'h1F, 10'b0};
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  function automatic real f2r(logic [31:0] f);
    int  e;
    real v;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    if (e == 255) return f[31] ? -1e300 : 1e300;
    v = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -v : v;
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic s;
    real  a;
    int   e;
    longint m;
    if (r == 0.0) return 32'h0;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e < -126) return {s, 31'b0};
    m = longint'((a - 1.0) * 8388608.0);
    if (m >= 8388608) begin m = 0; e++; end
    if (e > 127) return {s, 8'hFF, 23'b0};
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - exp| <= abs_tol + rel_tol*|exp|
  function automatic bit close(real got, real expv, real rel_tol, real abs_tol);
    return rabs(got - expv) <= abs_tol + rel_tol * rabs(expv);
  endfunction
endpackage
