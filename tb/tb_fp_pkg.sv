// tb_fp_pkg: reference arithmetic for the testbenches, in double precision.
//
// Converts between IEEE single-precision bit patterns and `real`, and gives
// the same piecewise-linear sigmoid/tanh the hardware uses, computed in
// double precision, so hardware results can be compared within a tolerance.
package tb_fp_pkg;

  function automatic real fp2r(logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2fp(real r);
    logic s;
    real  a;
    int   e;
    longint fr;
    if (r == 0.0) return 32'd0;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    fr = longint'((a - 1.0) * 8388608.0);   // the cast rounds to nearest
    if (fr >= 64'd8388608) begin fr = 0; e++; end
    if (e + 127 <= 0) return 32'd0;
    return {s, 8'(e + 127), 23'(fr)};
  endfunction

  function automatic real r_abs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic real r_sig(real x);
    real a, y;
    a = r_abs(x);
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  function automatic real r_tanh(real x);
    return 2.0 * r_sig(2.0 * x) - 1.0;
  endfunction

  function automatic real r_relu(real x);
    return (x < 0.0) ? 0.0 : x;
  endfunction

  // |got - want| <= abs_tol + rel_tol*|want|
  function automatic bit near(logic [31:0] got, real want, real abs_tol, real rel_tol);
    return r_abs(fp2r(got) - want) <= abs_tol + rel_tol * r_abs(want);
  endfunction

  // a random value in [-range, range], rounded to single precision
  function automatic logic [31:0] rnd_fp(real range);
    real u;
    u = real'($urandom_range(0, 1000000)) / 1000000.0;
    return r2fp((2.0 * u - 1.0) * range);
  endfunction

endpackage
