// tb_util_pkg: testbench helpers: FP16 <-> real conversion done with real
// arithmetic, independent of the FP16 logic under test, and a tolerance check.
package tb_util_pkg;
  function automatic real f2r(logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    m = m * (2.0 ** e);
    return h[15] ? -m : m;
  endfunction

  // nearest FP16 (ties away), for building stimuli
  function automatic logic [15:0] r2f(real x);
    logic s;
    int   e;
    real  a, m;
    int   mi;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a < 6.2e-5) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    mi = int'((a - 1.0) * 1024.0 + 0.5);
    if (mi == 1024) begin mi = 0; e++; end
    if (e + 15 >= 31) return {s, 15'h7BFF};
    return {s, 5'(e + 15), 10'(mi)};
  endfunction

  function automatic bit close(real got, real exp, real rel, real abs_tol);
    real d;
    d = got - exp;
    if (d < 0) d = -d;
    return (d <= abs_tol) || (d <= rel * ((exp < 0) ? -exp : exp));
  endfunction
endpackage
