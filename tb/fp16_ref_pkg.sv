// fp16_ref_pkg: reference conversions between IEEE half precision and real, used by the
// testbenches to compute expected values independently of the design's FP16 arithmetic.
package fp16_ref_pkg;
  function automatic real h2r(input logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = (1024.0 + real'(h[9:0])) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real r);
    real a, m;
    int  e;
    logic [10:0] mi;
    logic s;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.104e-5) return {s, 15'h0};
    if (a >= 65520.0) return {s, 15'h7C00};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = a * 1024.0;
    mi = 11'($rtoi(m + 0.5));
    if (mi == 0) begin mi = 11'h400; e++; end   // rounded up to 2.0 (wrapped)
    return {s, 5'(e + 15), mi[9:0]};
  endfunction

  // relative-or-absolute closeness test
  function automatic bit close(input real got, input real exp, input real rel, input real abs_tol);
    real d;
    d = got - exp;
    if (d < 0.0) d = -d;
    return (d <= abs_tol) || (d <= rel * ((exp < 0.0) ? -exp : exp));
  endfunction
endpackage
