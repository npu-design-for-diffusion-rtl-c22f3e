// dart_tb_pkg: testbench-only helpers. Converts between BF16 bit patterns and
// real numbers independently of the RTL's arithmetic, so that testbenches can
// compute reference results with real arithmetic and compare within a tolerance.
package dart_tb_pkg;

  function automatic real bf2r(input logic [15:0] b);
    real m;
    int  e;
    if (b[14:7] == 0) return 0.0;
    m = 1.0 + real'(b[6:0]) / 128.0;
    e = int'(b[14:7]) - 127;
    m = m * (2.0 ** e);
    return b[15] ? -m : m;
  endfunction

  // nearest BF16 (round to nearest) of a real
  function automatic logic [15:0] r2bf(input real r);
    real  a, m;
    int   e;
    logic s;
    int   mi;
    if (r == 0.0) return 16'h0000;
    s = r < 0.0;
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    mi = int'($floor((a - 1.0) * 128.0 + 0.5));
    if (mi == 128) begin mi = 0; e++; end
    if (e + 127 <= 0) return 16'h0000;
    return {s, 8'(e + 127), 7'(mi)};
  endfunction

  // relative closeness
  function automatic bit close(input real got, input real want, input real rtol, input real atol);
    real d;
    d = got - want;
    if (d < 0.0) d = -d;
    return d <= atol + rtol * ((want < 0.0) ? -want : want);
  endfunction

endpackage
