// lpa_ref_pkg: reference model of the LP accelerator arithmetic, for the testbenches.
//
// Written independently of the RTL: LP words are decoded by walking their bits one at a time,
// lanes are added as whole integers rather than 4-bit slices, the log/linear tables use
// floating-point math ($pow/$ln), and output words are assembled bit by bit.
package lpa_ref_pkg;

  typedef struct {
    int s;      // sign bit
    int k;      // regime value
    int e;      // exponent field value
    int f;      // fraction bits, left-aligned in w-1 bits
  } lp_fields_t;

  function automatic int bitof(input int v, input int i);
    if (i < 0) return 0;
    return (v >> i) & 1;
  endfunction

  // Negate each sub-word of width w whose sign bit is set.
  function automatic int ref_twos(input int op, input int w);
    int r, v;
    r = 0;
    for (int o = 0; o < 8; o += w) begin
      v = (op >> o) & ((1 << w) - 1);
      if (bitof(v, w - 1) != 0) v = ((1 << w) - v) & ((1 << w) - 1);
      r |= v << o;
    end
    return r;
  endfunction

  // Leading zeros of a w-bit field.
  function automatic int ref_lzc(input int v, input int w);
    int c;
    c = 0;
    for (int i = w - 1; i >= 0; i--) begin
      if (bitof(v, i) != 0) break;
      c++;
    end
    return c;
  endfunction

  // Decode a w-bit LP word (regime runs to the end of the word).
  function automatic lp_fields_t ref_fields(input int v, input int w, input int es);
    lp_fields_t d;
    int idx, r0, m, nf;
    d.s = bitof(v, w - 1);
    if (d.s != 0) v = ((1 << w) - v) & ((1 << w) - 1);
    idx = w - 2;
    r0  = bitof(v, idx);
    m   = 0;
    while (idx >= 0 && bitof(v, idx) == r0) begin m++; idx--; end
    if (idx >= 0) idx--;                    // terminating bit
    d.k = (r0 != 0) ? m - 1 : -m;
    d.e = 0;
    for (int j = 0; j < es; j++) begin
      d.e = (d.e << 1) | bitof(v, idx);
      idx--;
    end
    nf  = (idx >= 0) ? idx + 1 : 0;
    d.f = (nf > 0) ? ((v & ((1 << nf) - 1)) << (w - 1 - nf)) : 0;
    return d;
  endfunction

  function automatic int sat(input int v, input int bits);
    int hi, lo;
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int sext(input int v, input int bits);
    v = v & ((1 << bits) - 1);
    return (bitof(v, bits - 1) != 0) ? v - (1 << bits) : v;
  endfunction

  // mode: 0 = A (2-bit), 1 = B (4-bit), 2 = C (8-bit)
  function automatic int wbits(input int mode);
    return (mode == 0) ? 2 : (mode == 1) ? 4 : 8;
  endfunction
  function automatic int nlanes(input int mode);
    return 8 / wbits(mode);
  endfunction

  // Decoded weight byte: sign[3:0], regime[15:0], ulfx[15:0]
  function automatic logic [35:0] ref_wdec(input int x, input int mode, input int es, input int sf);
    logic [3:0] s; logic [15:0] rg, ul;
    int w;
    lp_fields_t d;
    w = wbits(mode);
    s = '0; rg = '0; ul = '0;
    for (int i = 0; i < nlanes(mode); i++) begin
      int v, lane_r, lane_u;
      v = (x >> (i * w)) & ((1 << w) - 1);
      d = ref_fields(v, w, es);
      lane_r = sat(d.k * (1 << es) - sf, 2 * w) & ((1 << (2 * w)) - 1);
      lane_u = ((d.e & ((1 << w) - 1)) << w) | (d.f << 1);
      s[i] = d.s[0];
      rg |= 16'(lane_r << (2 * w * i));
      ul |= 16'(lane_u << (2 * w * i));
    end
    return {s, rg, ul};
  endfunction

  // Decoded activation byte: sign, regime[3:0], ulfx[3:0]
  function automatic logic [8:0] ref_adec(input int x, input int act4, input int es, input int sf);
    int w, v, rg, fr2;
    lp_fields_t d;
    w = (act4 != 0) ? 4 : 8;
    v = (act4 != 0) ? (x >> 4) & 15 : x & 255;
    d = ref_fields(v, w, es);
    rg  = sat(d.k * (1 << es) - sf + 4 * (d.e >> 2), 4);
    fr2 = d.f >> (w - 3);
    return {d.s[0], 4'(rg), 2'(d.e), 2'(fr2)};
  endfunction

  function automatic int ref_log2lin(input int x, input int fb);
    real v;
    int r, n;
    n = 1 << fb;
    v = ($pow(2.0, real'(x) / real'(n)) - 1.0) * real'(n);
    r = int'($floor(v + 0.5));
    return (r > n - 1) ? n - 1 : r;
  endfunction

  function automatic int ref_lin2log(input int x, input int fb);
    real v;
    int r, n;
    n = 1 << fb;
    v = $ln(1.0 + real'(x) / real'(n)) / $ln(2.0) * real'(n);
    r = int'($floor(v + 0.5));
    return (r > n - 1) ? n - 1 : r;
  endfunction

  typedef struct {
    int s;    // sign
    int r;    // regime (signed integer)
    int e;    // exponent
    int lf;   // magnitude, LW bits with 1 integer bit; 0 = zero
  } lane_t;

  int unsigned cnt_renorm, cnt_cancel, cnt_align_out, cnt_sat_hi, cnt_sat_lo;

  // Product of weight lane i and an activation, in lane form.
  function automatic lane_t ref_product(input int mode, input logic [35:0] wd, input logic [8:0] ad,
                                        input int i);
    lane_t p;
    int w, lw, fb, rw, uw, ra, ua, um, lnf;
    w  = wbits(mode);
    lw = 2 * w;
    fb = w;
    rw = sext(int'(wd[35-4:16] >> (lw * i)), lw);
    uw = int'(wd[15:0] >> (lw * i)) & ((1 << lw) - 1);
    ra = sext(int'(ad[7:4]), 4);
    ua = int'(ad[3:0]);
    p.s = int'(wd[32 + i]) ^ int'(ad[8]);
    p.r = sext(rw + ra, lw);
    um  = (uw + (ua << (fb - 2))) & ((1 << lw) - 1);
    p.e = um >> fb;
    lnf = um & ((1 << fb) - 1);
    p.lf = (1 << (lw - 1)) | (ref_log2lin(lnf, fb) << (lw - 1 - fb));
    return p;
  endfunction

  function automatic lane_t ref_add(input lane_t p, input lane_t a, input int lw);
    lane_t o, b, sm;
    int xp, xa, d, ms, sum, mag;
    if (a.lf == 0) return p;
    xp = p.r + p.e;
    xa = a.r + a.e;
    if (xp >= xa) begin b = p; sm = a; d = xp - xa; end
    else          begin b = a; sm = p; d = xa - xp; end
    ms  = (d >= lw) ? 0 : sm.lf >> d;
    if (d > 0 && ms != sm.lf) cnt_align_out++;
    sum = ((b.s != 0) ? -b.lf : b.lf) + ((sm.s != 0) ? -ms : ms);
    if (b.s != sm.s) cnt_cancel++;
    mag = (sum < 0) ? -sum : sum;
    o.e = b.e;
    o.r = b.r;
    if (mag >= (1 << lw)) begin
      cnt_renorm++;
      mag = mag >> 1;
      if (o.r < (1 << (lw - 1)) - 1) o.r = o.r + 1;
    end
    o.lf = mag;
    o.s  = (sum < 0 && mag != 0) ? 1 : 0;
    return o;
  endfunction

  // Encode one lane into an n-bit LP word placed in an 8-bit byte.
  function automatic int ref_encode(input lane_t a, input int lw, input int n, input int es,
                                    input int sf);
    int fb, x, mant, lq, q, k, ev, fr, word, kmax, nb, body;
    int bits [64];
    if (a.lf == 0) return 0;
    fb   = lw / 2;
    x    = a.r + a.e;
    mant = a.lf;
    while (mant < (1 << (lw - 1))) begin mant = mant << 1; x--; end
    lq = x * (1 << fb) + ref_lin2log((mant >> (lw - 1 - fb)) & ((1 << fb) - 1), fb)
         + sf * (1 << fb);
    q  = lq >>> fb;
    fr = lq & ((1 << fb) - 1);
    k  = q >>> es;
    ev = q - k * (1 << es);
    kmax = n - 2;
    if (k > kmax) begin
      cnt_sat_hi++;
      body = (1 << (n - 1)) - 1;
    end else if (k < -kmax) begin
      cnt_sat_lo++;
      body = 1;
    end else begin
      nb = 0;
      if (k >= 0) begin
        for (int j = 0; j <= k; j++) bits[nb++] = 1;
        bits[nb++] = 0;
      end else begin
        for (int j = 0; j < -k; j++) bits[nb++] = 0;
        bits[nb++] = 1;
      end
      for (int j = es - 1; j >= 0; j--) bits[nb++] = bitof(ev, j);
      for (int j = fb - 1; j >= 0; j--) bits[nb++] = bitof(fr, j);
      body = 0;
      for (int j = 0; j < n - 1; j++) body = (body << 1) | ((j < nb) ? bits[j] : 0);
    end
    word = (a.s != 0) ? ((1 << n) - body) & ((1 << n) - 1) : body;
    return (n == 8) ? word : (word << 4) & 255;
  endfunction

endpackage
