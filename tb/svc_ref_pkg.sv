// svc_ref_pkg: plain-loop reference models used by the testbenches. They are written
// from the algorithm descriptions (9/7 lifting, temporal Haar, sub-band order, Table of
// K -> j -> M, EAMP) with 64-bit integer arithmetic, independently of the RTL structure.
package svc_ref_pkg;
  import svc_pkg::sym_t, svc_pkg::SYM_BL, svc_pkg::SYM_HDR, svc_pkg::SYM_MEAS;

  function automatic longint rq14(input longint c, input longint v);
    return (c * v + 8192) >>> 14;
  endfunction

  function automatic int mir(input int i, input int len);
    if (i < 0) return -i;
    if (i >= len) return 2 * (len - 1) - i;
    return i;
  endfunction

  // One level of 1-D 9/7 lifting on x[0..len-1]. Forward: natural in, Mallat out.
  // Inverse: Mallat in, natural out.
  function automatic void lift1d(ref longint x[], input int len, input bit inv);
    longint c [4] = '{-25987, -868, 14466, 7266};
    longint t [];
    int half = len / 2;
    t = new[len];
    if (!inv) begin
      for (int s = 0; s < 4; s++)
        for (int i = (s % 2 == 0) ? 1 : 0; i < len; i += 2)
          x[i] = x[i] + rq14(c[s], x[mir(i - 1, len)] + x[mir(i + 1, len)]);
      for (int i = 0; i < len; i++)
        x[i] = rq14((i % 2 == 0) ? 18835 : 14252, x[i]);
      for (int i = 0; i < half; i++) begin
        t[i] = x[2 * i];
        t[half + i] = x[2 * i + 1];
      end
      for (int i = 0; i < len; i++) x[i] = t[i];
    end else begin
      for (int i = 0; i < half; i++) begin
        t[2 * i] = x[i];
        t[2 * i + 1] = x[half + i];
      end
      for (int i = 0; i < len; i++) x[i] = rq14((i % 2 == 0) ? 14252 : 18835, t[i]);
      for (int s = 3; s >= 0; s--)
        for (int i = (s % 2 == 0) ? 1 : 0; i < len; i += 2)
          x[i] = x[i] - rq14(c[s], x[mir(i - 1, len)] + x[mir(i + 1, len)]);
    end
  endfunction

  function automatic void line_op(ref longint m[], input int base, input int stride,
                                  input int len, input bit inv);
    longint x [];
    x = new[len];
    for (int i = 0; i < len; i++) x[i] = m[base + i * stride];
    lift1d(x, len, inv);
    for (int i = 0; i < len; i++) m[base + i * stride] = x[i];
  endfunction

  // Truncation of a value to a signed 32-bit word (the RTL word size).
  function automatic longint s32(input longint v);
    return longint'(int'(v));
  endfunction

  // 3-D DWT of a GOF stored as m[slot*W*H + row*W + col].
  function automatic void dwt3d_ref(ref longint m[], input int W, input int H,
                                    input int GOF, input int LEVELS, input bit inv);
    longint v [];
    v = new[GOF];
    for (int step = 0; step < LEVELS; step++) begin
      int l = inv ? LEVELS - 1 - step : step;
      int wl = W >> l, hl = H >> l, fl = GOF >> l, fh = fl / 2;
      if (!inv) begin
        for (int f = 0; f < fl; f++) begin
          for (int r = 0; r < hl; r++) line_op(m, f * W * H + r * W, 1, wl, 0);
          for (int c = 0; c < wl; c++) line_op(m, f * W * H + c, W, hl, 0);
        end
      end
      for (int r = 0; r < hl; r++)
        for (int c = 0; c < wl; c++) begin
          int a0 = r * W + c;
          for (int f = 0; f < fl; f++) v[f] = m[f * W * H + a0];
          for (int p = 0; p < fh; p++) begin
            longint hh, aa;
            if (!inv) begin
              hh = s32(v[2 * p + 1] - v[2 * p]);
              m[(fh + p) * W * H + a0] = hh;
              m[p * W * H + a0] = s32(v[2 * p] + (hh >>> 1));
            end else begin
              aa = s32(v[p] - (v[fh + p] >>> 1));
              m[(2 * p) * W * H + a0] = aa;
              m[(2 * p + 1) * W * H + a0] = s32(v[fh + p] + aa);
            end
          end
        end
      if (inv) begin
        for (int f = 0; f < fl; f++) begin
          for (int c = 0; c < wl; c++) line_op(m, f * W * H + c, W, hl, 1);
          for (int r = 0; r < hl; r++) line_op(m, f * W * H + r * W, 1, wl, 1);
        end
      end
    end
  endfunction

  // Number of measurements per codebook index, and the K ranges that select the index.
  int m_tab [16] = '{0, 50, 130, 240, 370, 470, 650, 780, 920, 1080, 1220, 1400, 1550,
                     1700, 1850, 2000};
  int k_hi  [15] = '{0, 10, 20, 50, 100, 150, 200, 250, 300, 350, 400, 450, 500, 550, 600};

  function automatic int j_ref(input int k, input int mdiv);
    for (int i = 0; i < 15; i++) if (k <= k_hi[i] / mdiv) return i;
    return 15;
  endfunction

  function automatic int m_ref(input int j, input int mdiv);
    return (m_tab[j] + mdiv - 1) / mdiv;
  endfunction

  // Codebook entry: 1 = -1. Same integer hash as the specification of the codebook.
  function automatic bit bern_ref(input int j, input int r, input int c);
    bit [31:0] h;
    h = (32'(c) * 32'h9E3779B1) ^ (32'(r) * 32'h85EBCA77) ^ (32'(j) * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h[31];
  endfunction

  // y = Phi_j s, wrapped to 32 bits.
  function automatic void measure_ref(input longint s[], input int j, input int m,
                                      output longint y[]);
    y = new[m];
    for (int r = 0; r < m; r++) begin
      longint a = 0;
      for (int c = 0; c < s.size(); c++) a += bern_ref(j, r, c) ? -s[c] : s[c];
      y[r] = s32(a);
    end
  endfunction

  // EAMP with a full sort for the thresholds (stable on ties).
  function automatic void eamp_ref(input longint y[], input int j, input int k,
                                   input int mdiv, input int iter, input int rs,
                                   ref longint s[]);
    int n, m;
    longint z [], g [], mag [], sorted [];
    int ord [];
    longint recip, recip_iht, dd, sq;
    n = s.size();
    m = m_ref(j, mdiv);
    recip = ((longint'(1) <<< rs) + m / 2) / m;
    sq = 0;
    while ((sq + 1) * (sq + 1) <= longint'(m) * n) sq++;
    dd = m + n + 2 * sq;
    recip_iht = ((longint'(1) <<< rs) + dd / 2) / dd;
    z = new[m]; g = new[n]; mag = new[n]; ord = new[n];
    for (int c = 0; c < n; c++) s[c] = 0;
    for (int r = 0; r < m; r++) z[r] = y[r];
    for (int it = 1; it <= iter; it++) begin
      bit amp;
      int target;
      longint delta, fac;
      int gt;
      amp = (it < iter / 4);
      for (int c = 0; c < n; c++) begin
        longint a = 0;
        for (int r = 0; r < m; r++) a += bern_ref(j, r, c) ? -z[r] : z[r];
        g[c] = s32(s[c] + ((a * (amp ? recip : recip_iht)) >>> rs));
        mag[c] = (g[c] < 0) ? -g[c] : g[c];
      end
      target = amp ? m : k;
      if (target > n) target = n;
      // stable descending order of magnitudes
      for (int c = 0; c < n; c++) ord[c] = c;
      for (int a = 1; a < n; a++) begin
        int t = ord[a];
        int b = a - 1;
        while (b >= 0 && mag[ord[b]] < mag[t]) begin ord[b + 1] = ord[b]; b--; end
        ord[b + 1] = t;
      end
      delta = mag[ord[target - 1]];
      gt = 0;
      for (int c = 0; c < n; c++) if (mag[c] > delta) gt++;
      if (amp) begin
        for (int c = 0; c < n; c++)
          s[c] = (mag[c] > delta) ? ((g[c] < 0) ? -(mag[c] - delta) : (mag[c] - delta)) : 0;
        fac = longint'(gt) * recip;
      end else begin
        for (int c = 0; c < n; c++) s[c] = 0;
        for (int a = 0; a < target; a++) s[ord[a]] = g[ord[a]];
        fac = 0;
      end
      for (int r = 0; r < m; r++) begin
        longint a = 0;
        for (int c = 0; c < n; c++) a += bern_ref(j, r, c) ? -s[c] : s[c];
        z[r] = s32(y[r] - s32(a) + s32((z[r] * fac) >>> rs));
      end
    end
  endfunction

  // Scan order of the layers: base layer, then high-frequency sub-bands of levels
  // LEVELS..1, each column by column.
  function automatic void scan_ref(input int W, input int H, input int GOF, input int LEVELS,
                                   ref int addr[$], ref bit bl[$]);
    addr.delete();
    bl.delete();
    for (int l = LEVELS; l >= 0; l--) begin
      int lv, fl;
      lv = (l == LEVELS) ? LEVELS : l + 1;
      fl = GOF >> (lv - 1);
      for (int f = 0; f < fl; f++)
        for (int q = 0; q < 4; q++) begin
          int ws, hs, x0, y0;
          bit isbl;
          isbl = (l == LEVELS);
          if (isbl && (f != 0 || q != 0)) continue;
          if (!isbl && f < fl / 2 && q == 0) continue;
          ws = W >> lv; hs = H >> lv;
          x0 = (q % 2) ? ws : 0; y0 = (q / 2) ? hs : 0;
          for (int c = 0; c < ws; c++)
            for (int r = 0; r < hs; r++) begin
              addr.push_back(f * W * H + (y0 + r) * W + x0 + c);
              bl.push_back(isbl);
            end
        end
    end
  endfunction

  // Uniform quantiser: round half up, divide by 2^qs, saturate to qb bits.
  function automatic longint quant_ref(input longint v, input int qs, input int qb);
    longint e, lim;
    e = (v + (longint'(1) <<< (qs - 1))) >>> qs;
    lim = (longint'(1) <<< (qb - 1)) - 1;
    if (e > lim) e = lim;
    if (e < -lim - 1) e = -lim - 1;
    return e;
  endfunction

  // Test video: a gradient with a bright square and a small dot that move frame by frame.
  function automatic void video_ref(ref longint pix[], input int W, input int H,
                                    input int GOF, input int g);
    pix = new[W * H * GOF];
    for (int f = 0; f < GOF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          int v;
          v = 40 + c % 128 + 2 * (r % 64);
          if (c >= 10 + f + 4 * g && c < 22 + f + 4 * g && r >= 4 && r < 12) v += 90;
          if (c == 50 && r == (f + g) % H) v += 60;
          pix[f * W * H + r * W + c] = v;
        end
  endfunction

  // Reference encoder: symbol stream of one GOF of 8-bit pixels.
  function automatic void encode_ref(input longint pix[], input int W, input int H,
      input int GOF, input int LEVELS, input int N, input int MDIV, input longint t,
      input int QS, input int QB, ref sym_t syms[$]);
    longint m [], s [], y [];
    int addr [$];
    bit bl [$];
    int pos;
    m = new[W * H * GOF];
    for (int a = 0; a < W * H * GOF; a++) m[a] = pix[a] <<< 8;
    dwt3d_ref(m, W, H, GOF, LEVELS, 0);
    scan_ref(W, H, GOF, LEVELS, addr, bl);
    syms.delete();
    pos = 0;
    while (pos < addr.size() && bl[pos]) begin
      sym_t e;
      e = '0; e.kind = SYM_BL; e.data = 32'(quant_ref(m[addr[pos]], QS, QB));
      syms.push_back(e);
      pos++;
    end
    while (pos < addr.size()) begin
      sym_t e;
      int kk, jj, mm;
      s = new[N];
      kk = 0;
      for (int i = 0; i < N; i++) begin
        longint v;
        v = m[addr[pos + i]];
        s[i] = ((v < 0 ? -v : v) < t) ? 0 : v;
        if (s[i] != 0) kk++;
      end
      jj = j_ref(kk, MDIV);
      mm = m_ref(jj, MDIV);
      e = '0; e.kind = SYM_HDR; e.j = 4'(jj); e.k = 16'(kk);
      syms.push_back(e);
      measure_ref(s, jj, mm, y);
      for (int r = 0; r < mm; r++) begin
        e.kind = SYM_MEAS;
        e.data = 32'(quant_ref(y[r], QS, QB));
        syms.push_back(e);
      end
      pos += N;
    end
  endfunction

  // Reference decoder: reconstructed 8-bit pixels of one GOF from its symbol stream.
  function automatic void decode_ref(input sym_t syms[$], input int W, input int H,
      input int GOF, input int LEVELS, input int N, input int MDIV, input int ITER,
      input int QS, ref longint pix[]);
    longint dm [], y [], sh [];
    int addr [$];
    bit bl [$];
    int pos, si;
    dm = new[W * H * GOF];
    pix = new[W * H * GOF];
    for (int a = 0; a < W * H * GOF; a++) dm[a] = 0;
    scan_ref(W, H, GOF, LEVELS, addr, bl);
    pos = 0; si = 0;
    while (pos < addr.size() && bl[pos]) begin
      dm[addr[pos]] = longint'(syms[si].data) <<< QS;
      pos++; si++;
    end
    while (pos < addr.size()) begin
      int jj, kk, mm;
      jj = int'(syms[si].j); kk = int'(syms[si].k); si++;
      mm = m_ref(jj, MDIV);
      y = new[mm]; sh = new[N];
      for (int r = 0; r < mm; r++) begin y[r] = longint'(syms[si].data) <<< QS; si++; end
      if (mm == 0) for (int i = 0; i < N; i++) sh[i] = 0;
      else eamp_ref(y, jj, kk, MDIV, ITER, 24, sh);
      for (int i = 0; i < N; i++) dm[addr[pos + i]] = sh[i];
      pos += N;
    end
    dwt3d_ref(dm, W, H, GOF, LEVELS, 1);
    for (int a = 0; a < W * H * GOF; a++) begin
      longint e;
      e = (dm[a] + 128) >>> 8;
      pix[a] = (e < 0) ? 0 : (e > 255) ? 255 : e;
    end
  endfunction

endpackage
