// tb_ref_pkg: reference model of the SiRF TRNG algorithm for the testbenches.
//
// Each function computes a step of the algorithm directly from its definition,
// written independently of the RTL: the de Bruijn address walk is computed bit
// by bit on x^11 + x^9 + 1, the SF fold uses a rounded division instead of the
// RTL's step-by-step loop, and GPEV works on plain integers. The testbenches
// compare the RTL's RAM contents and outputs with these results.
package tb_ref_pkg;

  // Next address of the 11-bit de Bruijn walk (LFSR x^11 + x^9 + 1 with the
  // all-zero state inserted after 10000000000).
  function automatic int unsigned ref_debruijn11(int unsigned s);
    bit [10:0] v;
    bit        fb;
    v  = 11'(s);
    fb = v[10] ^ v[8];
    if (v[9:0] == 10'd0) fb = ~fb;
    return int'({v[9:0], fb});
  endfunction

  // Generic width, written from a list of exponents.
  function automatic int unsigned ref_debruijn(int unsigned s, int unsigned w);
    int unsigned t2;
    int unsigned fb, low;
    case (w)
      3: t2 = 2;  4: t2 = 3;  5: t2 = 3;  6: t2 = 5;  7: t2 = 6;
      9: t2 = 5; 10: t2 = 7; 11: t2 = 9;
      default: t2 = 0;
    endcase
    if (w == 8) fb = ((s >> 7) ^ (s >> 5) ^ (s >> 4) ^ (s >> 3)) & 1;
    else        fb = ((s >> (w - 1)) ^ (s >> (t2 - 1))) & 1;
    low = s % (1 << (w - 1));
    if (low == 0) fb ^= 1;
    return ((s << 1) | fb) % (1 << w);
  endfunction

  // DVD of iteration it: dvd[k] = dva[a_k] - dvb[b_k].
  function automatic void ref_dvdiff(input int dva[], input int dvb[], input int it,
                                     ref int dvd[]);
    int unsigned a, b, w, n;
    n = dva.size();
    w = $clog2(n);
    a = it;
    b = n - 1 - it;
    for (int k = 0; k < n; k++) begin
      dvd[k] = dva[a] - dvb[b];
      a = ref_debruijn(a, w);
      b = ref_debruijn(b, w);
    end
  endfunction

  // floor(a / 2^s) for signed a.
  function automatic longint fdiv2(longint a, int s);
    longint d;
    d = longint'(1) << s;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  // GPEV: returns DVD_c in Q.4.
  function automatic void ref_gpev(input int dvd[], input int rc, ref int dvdc[]);
    longint sum, mx, mn, mu4, maxb, minb, rng, scale, p;
    int n;
    n = dvd.size();
    sum = 0; mx = -32768; mn = 32767;
    foreach (dvd[k]) begin
      sum += longint'(dvd[k]);
      if (longint'(dvd[k]) > mx) mx = longint'(dvd[k]);
      if (longint'(dvd[k]) < mn) mn = longint'(dvd[k]);
    end
    mu4  = fdiv2(sum * 16, $clog2(n));
    maxb = mx * 16 - fdiv2(mx * 205, 8);
    minb = mn * 16 + fdiv2(mn * 205, 8);
    rng  = maxb - minb;
    if (rng <= 0) rng = 1;
    scale = (longint'(rc) << 20) / rng;
    foreach (dvd[k]) begin
      p = fdiv2((longint'(dvd[k]) * 16 - mu4) * scale, 16);
      if (p > 32767) p = 32767;
      if (p < -32768) p = -32768;
      dvdc[k] = int'(p);
    end
  endfunction

  // SF step for one element (all values in Q.4). tcc is the integer TCC.
  function automatic void ref_sf(input int dvdc, input int sf, input int tcc,
                                 output int dvdcs, output int sf_new, output bit odd);
    int t, x, n, r, s;
    t = tcc * 16;
    x = dvdc - sf;
    // n = number of TCC steps, rounding half toward zero (a value exactly on
    // +-TCC/2 is already inside the band).
    if (x >= 0) n = (x - t / 2 + t - 1) / t;
    else        n = -((-x - t / 2 + t - 1) / t);
    if (x >= 0 && x <= t / 2) n = 0;
    if (x < 0 && -x <= t / 2) n = 0;
    r = x - n * t;
    odd = (n % 2) != 0;
    if (odd) begin
      dvdcs = -r;
      s = sf + 2 * r;
      // keep 11 bits, sign-extend
      s = s & 32'h7ff;
      if (s >= 1024) s -= 2048;
      sf_new = s;
    end else begin
      dvdcs = r;
      sf_new = sf;
    end
  endfunction

  // BitGen for one value; tog is the zero-alternation state (updated).
  function automatic bit ref_bit(input int v, ref bit tog);
    bit b;
    if (v < 0) return 1'b0;
    if (v > 0) return 1'b1;
    b = tog;
    tog = ~tog;
    return b;
  endfunction

endpackage
