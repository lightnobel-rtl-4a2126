// tb_ln_ref_pkg: reference models shared by the LightNobel testbenches.
//
// Written from the specification of the number formats, independently of the RTL:
// token-wise symmetric quantization with top-k outliers (quantize_token), the
// quantized-token memory layout (pack / unpack), and the dot product of a quantized
// token with a 16-bit weight row as the RMPU must compute it.
package tb_ln_ref_pkg;
  import ln_pkg::*;

  typedef logic signed [15:0] v16_t;
  typedef v16_t vec_t [HZ];

  typedef struct {
    int   code [HZ];       // inlier code, or raw value for outliers
    bit   is_out [HZ];
    int   oidx [KMAX];     // outlier channels, largest magnitude first
    int   k;
    int   bits;
    int   sigma;
  } qtok_t;

  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  // rank channels by magnitude (descending, lower index first on ties)
  function automatic void rank(vec_t v, output int order [HZ]);
    bit used [HZ];
    for (int c = 0; c < HZ; c++) used[c] = 0;
    for (int r = 0; r < HZ; r++) begin
      int best; best = -1;
      for (int c = 0; c < HZ; c++)
        if (!used[c] && (best < 0 || iabs(v[c]) > iabs(v[best]))) best = c;
      used[best] = 1;
      order[r] = best;
    end
  endfunction

  function automatic qtok_t quantize_token(vec_t v, int bits, int k);
    qtok_t q;
    int order [HZ];
    int m, qmax;
    longint recip, t;
    rank(v, order);
    q.k = k; q.bits = bits;
    for (int c = 0; c < HZ; c++) q.is_out[c] = 0;
    for (int j = 0; j < KMAX; j++) q.oidx[j] = 0;
    for (int j = 0; j < k; j++) begin q.oidx[j] = order[j]; q.is_out[order[j]] = 1; end
    m    = iabs(v[order[k]]);
    qmax = (1 << (bits-1)) - 1;
    q.sigma = (m + qmax/2) / qmax;
    if (q.sigma == 0) q.sigma = 1;
    recip = (m == 0) ? 0 : ((longint'(qmax) << 16) + m/2) / m;
    for (int c = 0; c < HZ; c++) begin
      if (q.is_out[c]) q.code[c] = v[c];
      else begin
        t = (longint'(v[c]) * recip + 32768) >>> 16;
        if (t > qmax) t = qmax;
        if (t < -qmax) t = -qmax;
        q.code[c] = int'(t);
      end
    end
    return q;
  endfunction

  function automatic int qbits_len(int bits, int k);
    return (bits == 16) ? HZ*16 : (HZ-k)*bits + k*16 + 16 + k*IDXW;
  endfunction

  function automatic line_t pack(qtok_t q);
    line_t l;
    int p, n;
    l = '0;
    p = 0;
    for (int c = 0; c < HZ; c++) if (!q.is_out[c]) begin
      for (int b = 0; b < q.bits; b++) l[p+b] = q.code[c][b];
      p += q.bits;
    end
    for (int j = 0; j < q.k; j++) begin
      for (int b = 0; b < 16; b++) l[p+b] = q.code[q.oidx[j]][b];
      p += 16;
    end
    for (int b = 0; b < 16; b++) l[p+b] = q.sigma[b];
    p += 16;
    for (int j = 0; j < q.k; j++) begin
      for (int b = 0; b < IDXW; b++) l[p+b] = q.oidx[j][b];
      p += IDXW;
    end
    n = p;
    return l;
  endfunction

  function automatic line_t pack_raw(vec_t v);
    line_t l;
    for (int c = 0; c < HZ; c++) l[c*16 +: 16] = v[c];
    return l;
  endfunction

  // dot product of quantized token with weight row, in RMPU product units
  function automatic longint qdot(qtok_t q, vec_t w, longint bias);
    longint si, so;
    si = 0; so = 0;
    for (int c = 0; c < HZ; c++)
      if (q.is_out[c]) so += longint'(q.code[c]) * longint'(w[c]);
      else             si += longint'(q.code[c]) * longint'(w[c]);
    return si * longint'(q.sigma) + so + bias;
  endfunction

  function automatic longint rawdot(vec_t a, vec_t w, longint bias);
    longint s; s = bias;
    for (int c = 0; c < HZ; c++) s += longint'(a[c]) * longint'(w[c]);
    return s;
  endfunction

  // product units -> 16-bit fixed point, as the VVPU stores results
  function automatic v16_t to_fix(longint y);
    longint s; s = y >>> FRAC;
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return 16'sh8000;
    return v16_t'(s);
  endfunction

  // random activation token: small values with a few large outliers
  function automatic vec_t rand_token(int amp, int n_out, int out_amp);
    vec_t v;
    for (int c = 0; c < HZ; c++) v[c] = v16_t'($signed($urandom_range(2*amp, 0)) - amp);
    for (int j = 0; j < n_out; j++) begin
      int c; c = $urandom_range(HZ-1, 0);
      v[c] = v16_t'(($urandom_range(1,0) ? 1 : -1) * (out_amp + $urandom_range(out_amp, 0)));
    end
    return v;
  endfunction
endpackage
