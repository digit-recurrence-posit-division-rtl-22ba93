// posit_ref_pkg: bit-serial reference model of Posit<n,2> division for the
// testbenches. It works on plain integers up to 128 bits, walks the posit bit
// string one bit at a time, divides significands with an exact integer
// division and rounds a bit list to nearest-even, so it shares no structure
// with the pipelined divider it checks.
package posit_ref_pkg;

  typedef logic [127:0] big_t;

  // Decode: sign, zero/NaR, scale 4k+e, fraction as an integer of n-5 bits.
  function automatic void decode(input int n, input big_t p, output bit s, output bit zero,
                                 output bit nar, output int scale, output big_t frac);
    big_t m, mask;
    int   i, l, k, e;
    bit   r0;
    s = p[n-1];
    mask = (big_t'(1) << n) - 1;
    zero = ((p & mask) == 0);
    nar  = ((p & mask) == (big_t'(1) << (n - 1)));
    scale = 0; frac = 0;
    if (zero || nar) return;
    m = s ? ((~p + 1) & ((big_t'(1) << n) - 1)) : p;
    i = n - 2;
    r0 = m[i];
    l = 0;
    while (i >= 0 && m[i] == r0) begin l++; i--; end
    i--;                                   // skip the terminating bit
    k = r0 ? l - 1 : -l;
    e = 0;
    for (int j = 0; j < 2; j++) begin
      e = e * 2 + ((i >= 0) ? int'(m[i]) : 0);
      i--;
    end
    for (int j = 0; j < n - 5; j++) begin
      frac = frac * 2 + ((i >= 0) ? big_t'(m[i]) : 0);
      i--;
    end
    scale = 4 * k + e;
  endfunction

  // Encode sign, scale t = 4k+e, significand sig/2^fb in [1,2) and sticky.
  function automatic big_t encode(input int n, input bit s, input int t, input big_t sig,
                                  input int fb, input bit sticky);
    bit   bits[$];
    int   k, e, nb;
    big_t body, mag;
    bit   rb, st, lsb;
    k = (t >= 0) ? t / 4 : -((-t + 3) / 4);
    e = t - 4 * k;
    if (k >= n - 2)       mag = (big_t'(1) << (n - 1)) - 1;
    else if (k <= -(n - 1)) mag = 1;
    else begin
      if (k >= 0) begin
        for (int j = 0; j <= k; j++) bits.push_back(1);
        bits.push_back(0);
      end else begin
        for (int j = 0; j < -k; j++) bits.push_back(0);
        bits.push_back(1);
      end
      bits.push_back(e[1]); bits.push_back(e[0]);
      for (int j = fb - 1; j >= 0; j--) bits.push_back(sig[j]);
      body = 0;
      for (int j = 0; j < n - 1; j++) body = body * 2 + big_t'(bits[j]);
      rb = bits[n-1];
      st = sticky;
      for (int j = n; j < bits.size(); j++) st |= bits[j];
      lsb = body[0];
      if (rb && (lsb || st)) body = body + 1;
      mag = body;
    end
    if (s) mag = (~mag + 1) & ((big_t'(1) << n) - 1);
    return mag;
  endfunction

  // Reference quotient x / d of two Posit<n,2> (n <= 64).
  function automatic big_t divide(input int n, input big_t x, input big_t d);
    bit   sx, zx, nx, sd, zd, nd;
    int   tx, td, t, kk;
    big_t fx, fd, mx, md, qq, rr;
    decode(n, x, sx, zx, nx, tx, fx);
    decode(n, d, sd, zd, nd, td, fd);
    if (nx || zd || nd) return big_t'(1) << (n - 1);
    if (zx) return 0;
    mx = (big_t'(1) << (n - 5)) | fx;
    md = (big_t'(1) << (n - 5)) | fd;
    // Restoring long division, one quotient bit per step: qq = mx*2^kk / md.
    kk = n + 8;
    qq = 0;
    rr = 0;
    for (int j = n - 5; j >= -kk; j--) begin
      rr = rr * 2 + ((j >= 0) ? big_t'(mx[j]) : 0);
      qq = qq * 2;
      if (rr >= md) begin rr = rr - md; qq = qq + 1; end
    end
    t = tx - td;
    if (qq < (big_t'(1) << kk)) begin
      qq = qq << 1;
      t = t - 1;
    end
    return encode(n, sx ^ sd, t, qq, kk, rr != 0);
  endfunction

endpackage
