// fp32_pkg: single-precision arithmetic used by the core arithmetic unit.
//
// fp_fma computes +/-(a*b) + c with one rounding (round to nearest, ties to
// even), as a fused multiply-add.  The 48-bit product and the addend are
// aligned in a 74-bit window (26 guard bits below the product), added, then
// normalised and rounded.  Simplifications chosen here: subnormal inputs
// are read as zero, results below the normal range flush to zero, results
// above it become infinity, and any infinity or NaN input gives the quiet
// NaN 0x7fc00000.
//
// fp_recip computes 1/a with a piecewise quadratic of the mantissa,
// evaluated by two chained FMAs (Horner's rule) from the segment's three
// coefficients; the exponent is negated separately.  The accuracy is set by
// the coefficients the host loads.
package fp32_pkg;

  localparam logic [31:0] FP_QNAN = 32'h7fc0_0000;
  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;

  function automatic logic [31:0] fp_fma(input logic [31:0] a, input logic [31:0] b,
                                         input logic [31:0] c, input logic neg);
    logic        sp, sbig, ssml, sres;
    logic [47:0] mp;
    logic [73:0] xp, xc, big, sml;
    logic [74:0] sum, norm;
    logic        sticky, guard, rup;
    logic [23:0] frac;
    int          ep, ec, ebig, d, lead, eres;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff || c[30:23] == 8'hff) return FP_QNAN;
    if (a[30:23] == 8'h00 || b[30:23] == 8'h00)
      return (c[30:23] == 8'h00) ? 32'h0 : c;
    sp = a[31] ^ b[31] ^ neg;
    mp = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    xp = {mp, 26'b0};
    ep = int'(a[30:23]) + int'(b[30:23]) - 254;
    if (c[30:23] == 8'h00) begin
      xc = '0;
      ec = ep;
    end else begin
      xc = {1'b0, 1'b1, c[22:0], 49'b0};
      ec = int'(c[30:23]) - 127;
    end
    if (ep >= ec) begin
      big = xp; sbig = sp; sml = xc; ssml = c[31]; ebig = ep; d = ep - ec;
    end else begin
      big = xc; sbig = c[31]; sml = xp; ssml = sp; ebig = ec; d = ec - ep;
    end
    // align the smaller operand, jamming shifted-out bits into bit 0
    if (d >= 74) begin
      sticky = |sml;
      sml    = '0;
    end else begin
      sticky = |(sml & ((74'd1 << d) - 74'd1));
      sml    = sml >> d;
    end
    sml[0] = sml[0] | sticky;
    if (sbig == ssml) begin
      sum  = {1'b0, big} + {1'b0, sml};
      sres = sbig;
    end else if (big >= sml) begin
      sum  = {1'b0, big} - {1'b0, sml};
      sres = sbig;
    end else begin
      sum  = {1'b0, sml} - {1'b0, big};
      sres = ssml;
    end
    if (sum == '0) return 32'h0;
    lead = 0;
    for (int i = 0; i < 75; i++) if (sum[i]) lead = i;
    eres = ebig - 72 + lead + 127;
    norm = sum << (74 - lead);
    frac = {1'b0, norm[73:51]};
    guard = norm[50];
    sticky = |norm[49:0];
    rup = guard & (sticky | frac[0]);
    frac = frac + {23'b0, rup};
    if (frac[23]) eres = eres + 1;  // mantissa rounded up to 2.0
    if (eres >= 255) return {sres, 8'hff, 23'b0};
    if (eres <= 0) return {sres, 31'b0};
    return {sres, eres[7:0], frac[22:0]};
  endfunction

  // Reciprocal from the coefficients {c2, c1, c0} of a's mantissa segment.
  function automatic logic [31:0] fp_recip(input logic [31:0] a, input logic [95:0] coef);
    logic [31:0] m, p, r;
    int          e;
    if (a[30:23] == 8'h00) return {a[31], 8'hff, 23'b0};   // 1/0 = inf
    if (a[30:23] == 8'hff) return FP_QNAN;
    m = {1'b0, 8'd127, a[22:0]};                            // mantissa in [1,2)
    p = fp_fma(coef[95:64], m, coef[63:32], 1'b0);          // c2*m + c1
    r = fp_fma(p, m, coef[31:0], 1'b0);                     // (c2*m + c1)*m + c0
    e = int'(r[30:23]) + 127 - int'(a[30:23]);
    if (e <= 0) return {a[31], 31'b0};
    if (e >= 255) return {a[31], 8'hff, 23'b0};
    return {a[31], e[7:0], r[22:0]};
  endfunction

  // Inverse square root by the same scheme as the reciprocal.  With
  // a = 1.f * 2^u, the exponent is made even: m = 1.f, u' = u for even u,
  // m = 2*1.f, u' = u-1 for odd u, so m lies in [1,4) and
  // 1/sqrt(a) = (1/sqrt(m)) * 2^(-u'/2).  The caller selects the segment
  // from the parity of u and the leading fraction bits; 1/sqrt(m) is the
  // quadratic of that segment evaluated with two FMAs.
  function automatic logic [31:0] fp_rsqrt(input logic [31:0] a, input logic [95:0] coef);
    logic [31:0] m, p, r;
    int          u, e;
    if (a[30:23] == 8'h00) return {a[31], 8'hff, 23'b0};   // 1/sqrt(+-0) = +-inf
    if (a[31] || a[30:23] == 8'hff) return FP_QNAN;
    u = int'(a[30:23]) - 127;
    m = {1'b0, 8'd127 + 8'(u & 1), a[22:0]};                // [1,2) or [2,4)
    p = fp_fma(coef[95:64], m, coef[63:32], 1'b0);
    r = fp_fma(p, m, coef[31:0], 1'b0);
    e = int'(r[30:23]) - ((u - (u & 1)) >>> 1);
    if (e <= 0) return 32'b0;
    if (e >= 255) return {1'b0, 8'hff, 23'b0};
    return {1'b0, e[7:0], r[22:0]};
  endfunction

  // Square root as a * (1/sqrt(a)): one more FMA after fp_rsqrt.
  function automatic logic [31:0] fp_sqrt(input logic [31:0] a, input logic [95:0] coef);
    if (a[30:23] == 8'h00) return {a[31], 31'b0};           // sqrt(+-0) = +-0
    if (a[31] || a[30:23] == 8'hff) return FP_QNAN;
    return fp_fma(a, fp_rsqrt(a, coef), 32'b0, 1'b0);
  endfunction

endpackage
