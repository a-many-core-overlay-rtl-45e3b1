// tb_fp_pkg: reference conversions between real (double) and IEEE single
// bit patterns for the testbenches.  Only normal numbers and zero are
// handled; conversion to single rounds to nearest, ties to even.
package tb_fp_pkg;

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, s;
    int          e;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return 32'h0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 1;
    if (m[23]) e = e + 1;
    if (e <= 0) return {d[63], 31'b0};
    if (e >= 255) return {d[63], 8'hff, 23'b0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    int          e;
    if (f[30:23] == 8'h00) return 0.0;
    e = int'(f[30:23]) - 127 + 1023;
    d = {f[31], e[10:0], f[22:0], 29'b0};
    return $bitstoreal(d);
  endfunction

  // distance in units in the last place between two single bit patterns
  function automatic int ulp_diff(input logic [31:0] x, input logic [31:0] y);
    int a, b;
    a = x[31] ? -int'(x[30:0]) : int'(x[30:0]);
    b = y[31] ? -int'(y[30:0]) : int'(y[30:0]);
    return (a > b) ? a - b : b - a;
  endfunction

  // random normal single in +/-[2^-8, 2^8)
  function automatic logic [31:0] rand_f();
    logic [31:0] v;
    v = $urandom;
    return {v[31], 8'd119 + 8'(v[30:27]), v[22:0]};
  endfunction

  // Quadratic through 1/m at the start, middle and end of segment s of
  // [1,2) split into 2^seg_bits parts (Newton form expanded to c0+c1*m+c2*m^2).
  function automatic logic [95:0] recip_coef(input int s, input int seg_bits);
    real h, m0, m1, m2, f0, f1, f2, d1, d2, c0, c1, c2;
    h  = 1.0 / real'(1 << seg_bits);
    m0 = 1.0 + s * h; m1 = m0 + h / 2.0; m2 = m0 + h;
    f0 = 1.0 / m0; f1 = 1.0 / m1; f2 = 1.0 / m2;
    d1 = (f1 - f0) / (m1 - m0);
    d2 = ((f2 - f1) / (m2 - m1) - d1) / (m2 - m0);
    c2 = d2;
    c1 = d1 - d2 * (m0 + m1);
    c0 = f0 - d1 * m0 + d2 * m0 * m1;
    return {r2f(c2), r2f(c1), r2f(c0)};
  endfunction

  // Quadratic through 1/sqrt(m) at the start, middle and end of segment s
  // of the inverse-square-root table: s = {h, k}, m in
  // (1+h) * (1 + [k, k+1)/2^(seg_bits-1)).
  function automatic logic [95:0] rsqrt_coef(input int s, input int seg_bits);
    real h, m0, m1, m2, f0, f1, f2, d1, d2, c0, c1, c2, sc;
    sc = (s >> (seg_bits - 1)) != 0 ? 2.0 : 1.0;
    h  = sc / real'(1 << (seg_bits - 1));
    m0 = sc * (1.0 + real'(s & ((1 << (seg_bits - 1)) - 1)) / real'(1 << (seg_bits - 1)));
    m1 = m0 + h / 2.0; m2 = m0 + h;
    f0 = 1.0 / $sqrt(m0); f1 = 1.0 / $sqrt(m1); f2 = 1.0 / $sqrt(m2);
    d1 = (f1 - f0) / (m1 - m0);
    d2 = ((f2 - f1) / (m2 - m1) - d1) / (m2 - m0);
    c2 = d2;
    c1 = d1 - d2 * (m0 + m1);
    c0 = f0 - d1 * m0 + d2 * m0 * m1;
    return {r2f(c2), r2f(c1), r2f(c0)};
  endfunction

endpackage
