// posit_ref_pkg - reference arithmetic for the testbenches.
//
// Works on exact fixed-point numbers: fx_t is a 1024-bit two's-complement
// integer scaled by 2^-FXP (FXP = 500), wide enough to hold any posit up to
// 32 bits, any product or quotient of two of them, any binary32 value and
// any quire value without error. Conversions are done by value, not by
// manipulating fields the way the RTL does:
//   posit_to_fx  walks the posit bit by bit (sign, regime run, exponent, fraction);
//   fx_to_posit  uses the fact that posit bit patterns, read as signed
//                integers, are ordered like their values: a binary search
//                finds the two neighbours and the nearer one is chosen, ties to
//                the even pattern; results never round to zero or NaR;
//   float_to_fx / fx_to_float do the same for binary32 (finite values).
// Value-based ties agree with the posit standard's encoding-based rounding
// wherever at least one fraction bit survives, which the tests keep to.
package posit_ref_pkg;

  localparam int FXW = 1024;
  localparam int FXP = 500;
  typedef logic signed [FXW-1:0] fx_t;

  function automatic fx_t fx_pow2(int e);
    fx_t one;
    one = 1;
    return one <<< (FXP + e);
  endfunction

  // Decode a posit by walking its bits. Returns 0 for zero; nar flags NaR.
  function automatic fx_t posit_to_fx(logic [63:0] p, int n, int es, output bit nar);
    logic [63:0] a;
    int i, run, k, e, fbits;
    bit neg, r0;
    fx_t v;
    logic [63:0] fr;
    nar = 0;
    p = p & ((64'd1 << n) - 1);
    if (p == 0) return '0;
    if (p == (64'd1 << (n - 1))) begin nar = 1; return '0; end
    neg = p[n-1];
    a = neg ? (((~p) + 1) & ((64'd1 << n) - 1)) : p;
    i = n - 2;
    r0 = a[i];
    run = 0;
    while (i >= 0 && a[i] == r0) begin run++; i--; end
    i--;                                  // skip terminator (may go below 0)
    k = r0 ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e << 1;
      if (i >= 0) begin e = e | int'(a[i]); i--; end
    end
    fbits = (i >= 0) ? i + 1 : 0;
    fr = (fbits > 0) ? (a & ((64'd1 << fbits) - 1)) : 0;
    v = fx_t'(fr | (64'd1 << fbits));
    v = v <<< (FXP + k * (1 << es) + e - fbits);
    return neg ? -v : v;
  endfunction

  function automatic logic [63:0] fx_to_posit(fx_t x, int n, int es);
    logic signed [63:0] lo, hi, mid, pick;
    fx_t vlo, vhi, vm, dlo, dhi;
    bit nar;
    logic [63:0] mask;
    mask = (64'd1 << n) - 1;
    if (x == 0) return 0;
    // search over signed patterns in [-(2^(n-1)-1), 2^(n-1)-1], excluding 0 side
    lo = -((64'sd1 <<< (n - 1)) - 1);
    hi =  ((64'sd1 <<< (n - 1)) - 1);
    // clamp beyond maxpos / below -maxpos
    if (x >= posit_to_fx(hi, n, es, nar)) return hi & mask;
    if (x <= posit_to_fx(lo & mask, n, es, nar)) return lo & mask;
    // invariant: val(lo) <= x < val(hi)
    while (hi - lo > 1) begin
      mid = (lo + hi) >>> 1;
      vm = posit_to_fx(mid & mask, n, es, nar);
      if (vm <= x) lo = mid; else hi = mid;
    end
    vlo = posit_to_fx(lo & mask, n, es, nar);
    vhi = posit_to_fx(hi & mask, n, es, nar);
    dlo = x - vlo;
    dhi = vhi - x;
    if (dlo < dhi)      pick = lo;
    else if (dhi < dlo) pick = hi;
    else                pick = lo[0] ? hi : lo;
    if (pick == 0) pick = (x > 0) ? 1 : -1;   // never round to zero
    return pick & mask;
  endfunction

  function automatic fx_t float_to_fx(logic [31:0] f);
    int e;
    fx_t v;
    e = int'(f[30:23]);
    if (e == 0) begin
      v = fx_t'(f[22:0]);
      v = v <<< (FXP - 149);
    end else begin
      v = fx_t'({1'b1, f[22:0]});
      v = v <<< (FXP + e - 150);
    end
    return f[31] ? -v : v;
  endfunction

  // Round to nearest binary32, ties to even; overflow gives infinity.
  function automatic logic [31:0] fx_to_float(fx_t x);
    logic [31:0] lo, hi, mid, pick;
    fx_t ax, dlo, dhi, vlo, vhi;
    bit neg;
    if (x == 0) return 0;
    neg = x < 0;
    ax = neg ? -x : x;
    if (ax >= float_to_fx(32'h7F7F_FFFF) + (float_to_fx(32'h7F7F_FFFF) - float_to_fx(32'h7F7F_FFFE)) / 2)
      return {neg, 8'hFF, 23'd0};
    lo = 0; hi = 32'h7F80_0000;
    while (hi - lo > 1) begin
      mid = (lo + hi) >> 1;
      if (float_to_fx(mid) <= ax) lo = mid; else hi = mid;
    end
    vlo = float_to_fx(lo);
    vhi = (hi == 32'h7F80_0000) ? fx_pow2(128) : float_to_fx(hi);
    dlo = ax - vlo;
    dhi = vhi - ax;
    if (dlo < dhi)      pick = lo;
    else if (dhi < dlo) pick = hi;
    else                pick = lo[0] ? hi : lo;
    return {neg, pick[30:0]};
  endfunction

  // Random posit whose magnitude stays within 2^-lim .. 2^lim (not zero/NaR).
  function automatic logic [63:0] rand_posit(int n, int es, int lim);
    fx_t v;
    bit nar;
    logic [63:0] p;
    forever begin
      p = {$urandom, $urandom} & ((64'd1 << n) - 1);
      v = posit_to_fx(p, n, es, nar);
      if (v < 0) v = -v;
      if (!nar && v != 0 && v <= fx_pow2(lim) && v >= fx_pow2(-lim)) return p;
    end
  endfunction

endpackage
