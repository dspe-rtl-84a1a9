// tb_posit_pkg: reference arithmetic for the posit testbenches.
//
// posit_val() turns an 8-bit, es = 2 posit into a real by walking its bits
// one at a time, independently of the decoder in rtl/. check_round() decides
// whether a result code is an acceptable rounding of an exact real value:
// exact values must be hit exactly, values outside the range saturate, values
// whose two neighbours share one binade must round to the nearer neighbour
// (ties to the even code), and values between binades may take either
// neighbour.
package tb_posit_pkg;

  function automatic real pow2(int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real posit_val(logic [7:0] x);
    logic [7:0] m;
    int pos, k, run, e, nf;
    logic r0;
    real f;
    if (x == 8'h00 || x == 8'h80) return 0.0;
    m   = x[7] ? (8'h00 - x) : x;
    pos = 6;
    r0  = m[6];
    run = 0;
    while (pos >= 0 && m[pos] == r0) begin run++; pos--; end
    pos--;                                    // skip terminator
    k = r0 ? run - 1 : -run;
    e = 0;
    for (int i = 0; i < 2; i++) begin
      e = e * 2;
      if (pos >= 0) begin e = e + int'(m[pos]); pos--; end
    end
    f  = 1.0;
    nf = 0;
    while (pos >= 0) begin
      nf++;
      if (m[pos]) f = f + pow2(-nf);
      pos--;
    end
    return (x[7] ? -1.0 : 1.0) * pow2(4 * k + e) * f;
  endfunction

  function automatic int floor_log2(real v);
    int n;
    n = 0;
    while (v >= 2.0) begin v = v / 2.0; n++; end
    while (v < 1.0)  begin v = v * 2.0; n--; end
    return n;
  endfunction

  // 1 if code y is an acceptable posit rounding of exact value v (v != 0)
  function automatic bit check_round(real v, logic [7:0] y);
    real a, lo_v, hi_v;
    logic [7:0] lo, hi, ya, want;
    bit neg;
    neg = (v < 0.0);
    a   = neg ? -v : v;
    if (y == 8'h00 || y == 8'h80) return 0;
    if (neg != y[7]) return 0;
    ya = y[7] ? (8'h00 - y) : y;
    if (a >= posit_val(8'h7F)) return ya == 8'h7F;
    if (a <= posit_val(8'h01)) return ya == 8'h01;
    lo = 8'h01;
    for (int c = 1; c < 128; c++) if (posit_val(8'(c)) <= a) lo = 8'(c);
    lo_v = posit_val(lo);
    if (lo_v == a) return ya == lo;
    hi   = lo + 8'd1;
    hi_v = posit_val(hi);
    if (floor_log2(lo_v) == floor_log2(hi_v)) begin
      if (a - lo_v < hi_v - a)      want = lo;
      else if (a - lo_v > hi_v - a) want = hi;
      else                          want = lo[0] ? hi : lo;
      return ya == want;
    end
    return (ya == lo) || (ya == hi);
  endfunction

endpackage
