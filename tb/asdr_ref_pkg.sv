// asdr_ref_pkg: golden reference model of the ASDR datapath for the
// testbenches. Written independently of the RTL (integer arithmetic on
// plain ints and longints, bit loops instead of vector slicing) so that the
// testbenches compare two implementations of the same specification.
package asdr_ref_pkg;

  // grid resolution per level, 16 * 2^(l/3)
  const int RES [16] = '{16, 20, 25, 32, 40, 50, 64, 80, 101, 128, 161, 203, 256, 322, 406, 512};
  localparam int TBITS = 16;

  function automatic int ref_cb(int l);
    int b = 0;
    while ((1 << b) < RES[l]) b++;
    return b;
  endfunction

  function automatic bit ref_dense(int l);
    return 3 * ref_cb(l) <= TBITS;
  endfunction

  function automatic int ref_hash(int x, int y, int z);
    longint h;
    h = (longint'(x) * 1) ^ (longint'(y) * 64'd2654435761) ^ (longint'(z) * 64'd805459861);
    return int'(h & 64'hFFFF);
  endfunction

  // bit-by-bit construction: copy | x1 x0 y1 y0 z1 z0 | x[cb-1:2] | y[cb-1:2] | z[cb-1:2]
  function automatic int ref_lowres(int x, int y, int z, int cb, int copy);
    int a = 0;
    int nbits = 0;
    // low part: z high bits, then y, then x (from LSB upwards)
    for (int i = 2; i < cb; i++) begin a |= ((z >> i) & 1) << nbits; nbits++; end
    for (int i = 2; i < cb; i++) begin a |= ((y >> i) & 1) << nbits; nbits++; end
    for (int i = 2; i < cb; i++) begin a |= ((x >> i) & 1) << nbits; nbits++; end
    for (int i = 0; i < 2; i++) begin a |= ((z >> i) & 1) << nbits; nbits++; end
    for (int i = 0; i < 2; i++) begin a |= ((y >> i) & 1) << nbits; nbits++; end
    for (int i = 0; i < 2; i++) begin a |= ((x >> i) & 1) << nbits; nbits++; end
    for (int i = 0; nbits < TBITS; i++) begin a |= ((copy >> i) & 1) << nbits; nbits++; end
    return a;
  endfunction

  function automatic int ref_vaddr(int l, int px, int py, int pz, int lane, int v);
    int bx, by, bz, vx, vy, vz, loc;
    bx = (px * RES[l]) >> 16;
    by = (py * RES[l]) >> 16;
    bz = (pz * RES[l]) >> 16;
    vx = (bx + ((v >> 2) & 1)) & 1023;
    vy = (by + ((v >> 1) & 1)) & 1023;
    vz = (bz + (v & 1)) & 1023;
    if (ref_dense(l)) loc = ref_lowres(vx, vy, vz, ref_cb(l), lane);
    else              loc = ref_hash(vx, vy, vz);
    return (l << 16) | loc;
  endfunction

  function automatic int ref_frac(int l, int p);
    return ((p * RES[l]) >> 8) & 255;
  endfunction

  // table content used by all testbenches: a function of the table position
  // (the level and, for dense levels, the copy-independent index)
  function automatic int ref_entry(int addr);
    int l, loc, key;
    l   = (addr >> 16) & 15;
    loc = addr & 16'hFFFF;
    key = ref_dense(l) ? (loc & ((1 << (3 * ref_cb(l))) - 1)) : loc;
    key = key * 40503 + l * 977 + 12345;
    key = key ^ (key >> 7);
    return key & 16'hFFFF;
  endfunction

  function automatic int sx8(int v);
    v = v & 255;
    return (v >= 128) ? v - 256 : v;
  endfunction

  // trilinear interpolation of feature f from the 8 vertex entries
  function automatic int ref_trilinear(int e[8], int fx, int fy, int fz, int f);
    longint acc = 0;
    for (int v = 0; v < 8; v++) begin
      longint w;
      w = (((v >> 2) & 1) ? fx : 256 - fx);
      w = w * (((v >> 1) & 1) ? fy : 256 - fy);
      w = w * ((v & 1) ? fz : 256 - fz);
      acc += w * sx8(e[v] >> (8 * f));
    end
    // floor division by 2^24
    if (acc >= 0) return int'(acc / 64'sd16777216);
    return int'(-((-acc + 64'sd16777215) / 64'sd16777216));
  endfunction

  // encoding of one point (lane decides the copy of dense tables)
  function automatic void ref_encode(int px, int py, int pz, int lane, output int feat[32]);
    for (int l = 0; l < 16; l++) begin
      int e[8];
      for (int v = 0; v < 8; v++) e[v] = ref_entry(ref_vaddr(l, px, py, pz, lane, v));
      for (int f = 0; f < 2; f++)
        feat[2*l+f] = ref_trilinear(e, ref_frac(l, px), ref_frac(l, py), ref_frac(l, pz), f);
    end
  endfunction

  // one CIM layer: int8 x[IN], int8 w[o][i]; per bit plane and weight bit
  // the crossbar column count saturates at 31 (5-bit ADC)
  typedef int mat_t [64][64];
  typedef int vec_t [64];
  function automatic void ref_layer(input mat_t w, input vec_t x, int nin, int nout,
                                    output longint y[64]);
    for (int o = 0; o < 64; o++) y[o] = 0;
    for (int o = 0; o < nout; o++)
      for (int b = 0; b < 8; b++)
        for (int k = 0; k < 8; k++) begin
          int cnt = 0;
          longint term;
          for (int i = 0; i < nin; i++)
            if (((x[i] >> b) & 1) && ((w[o][i] >> k) & 1)) cnt++;
          if (cnt > 31) cnt = 31;
          term = longint'(cnt) * (longint'(1) << (b + k));
          if ((b == 7) != (k == 7)) y[o] -= term;
          else y[o] += term;
        end
  endfunction

  function automatic longint asr(longint v, int s);
    return v >>> s;
  endfunction

  function automatic int clampi(longint v, int lo, int hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return int'(v);
  endfunction

  // density net: 32 -> 64 -> 16; color net: 16 -> 64 -> 64 -> 3
  function automatic void ref_mlp(input mat_t wd0, input mat_t wd1,
                                  input mat_t wc0, input mat_t wc1, input mat_t wc2,
                                  input vec_t feat, int sd, int sc,
                                  output int sigma, output int rgb[3]);
    longint y[64];
    vec_t a, dv;
    ref_layer(wd0, feat, 32, 64, y);
    for (int i = 0; i < 64; i++) a[i] = clampi(asr(y[i], sd), 0, 127);
    ref_layer(wd1, a, 64, 16, y);
    sigma = clampi(asr(y[0], sd), 0, 255);
    for (int i = 0; i < 64; i++) dv[i] = (i < 16) ? clampi(asr(y[i], sd), -128, 127) : 0;
    ref_layer(wc0, dv, 16, 64, y);
    for (int i = 0; i < 64; i++) a[i] = clampi(asr(y[i], sc), 0, 127);
    ref_layer(wc1, a, 64, 64, y);
    for (int i = 0; i < 64; i++) a[i] = clampi(asr(y[i], sc), 0, 127);
    ref_layer(wc2, a, 64, 3, y);
    for (int c = 0; c < 3; c++) rgb[c] = clampi(asr(y[c], sc) + 128, 0, 255);
  endfunction

  // exp(-sigma * delta / 256) in Q0.16 (see the RGB unit)
  function automatic longint ref_exp(longint s, longint d);
    longint x, y, yi, yf, e;
    x  = s * d;
    y  = (x * 369) / 256;
    yi = y / 256;
    yf = y % 256;
    if (yi >= 16) return 0;
    e = 65536 - (43027 * yf) / 256 + (10525 * yf * yf) / 65536;
    return e / (longint'(1) << yi);
  endfunction

  // color approximation
  function automatic int ref_approx(int ca, int cb, bit bv, int k, int nl);
    int diff, q;
    if (!bv) return ca;
    diff = (cb - ca) * k;
    q = diff / (1 << nl);
    if (diff < 0 && (diff % (1 << nl)) != 0) q = q - 1;
    return (ca + q) & 255;
  endfunction

  // volume rendering of m points, render r uses every 2^r-th point;
  // col[r][c] = 16-bit result, pixel = col[0] >> 8
  function automatic void ref_render(int m, input int sig[256], input int rgb[256][3],
                                     int delta, output int col[5][3]);
    for (int r = 0; r < 5; r++) begin
      longint t = 65536;
      longint acc[3] = '{0, 0, 0};
      for (int j = 0; j < m; j += (1 << r)) begin
        longint e, a, w;
        e = ref_exp(sig[j], longint'(delta) << r);
        a = 65536 - e;
        w = (t * a) / 65536;
        for (int c = 0; c < 3; c++) acc[c] = (acc[c] + w * rgb[j][c]) & 64'hFFFFFFFF;
        t = (t * e) / 65536;
      end
      for (int c = 0; c < 3; c++) col[r][c] = int'((acc[c] / 256) & 16'hFFFF);
    end
  endfunction

  function automatic int ref_pick(input int col[5][3], int thr);
    int code = 0;
    for (int i = 1; i < 5; i++) begin
      int m = 0;
      for (int c = 0; c < 3; c++) begin
        int dd = col[0][c] - col[i][c];
        if (dd < 0) dd = -dd;
        if (dd > m) m = dd;
      end
      if (m <= thr) code = i;
    end
    return code;
  endfunction

  // crossbar row 'row' of PE 'pe' for weight matrix w[o][i] with nout outputs:
  // column 8*(o%8)+k holds bit k of w[o][row], o = 8*pe + o%8
  function automatic logic [63:0] ref_pe_row(input mat_t w, int nin, int nout, int pe, int row);
    logic [63:0] d = '0;
    for (int c = 0; c < 64; c++) begin
      int o = pe * 8 + c / 8;
      if (o < nout && row < nin) d[c] = (w[o][row] >> (c % 8)) & 1;
    end
    return d;
  endfunction

  // random int8 matrix; 'scale' limits magnitude so the 5-bit ADC saturates
  // only sometimes
  function automatic void ref_rand_mat(output mat_t w, input int mag);
    for (int o = 0; o < 64; o++)
      for (int i = 0; i < 64; i++) w[o][i] = int'($urandom % (2 * mag + 1)) - mag;
  endfunction

  // faster form of the same layer model for long end-to-end runs: weight
  // bit columns and input bit planes as 64-bit vectors, counts by popcount
  typedef logic [63:0] wbits_t [64][8];
  function automatic void ref_wbits(input mat_t w, input int nin, output wbits_t wb);
    for (int o = 0; o < 64; o++)
      for (int k = 0; k < 8; k++) begin
        wb[o][k] = '0;
        for (int i = 0; i < nin; i++) wb[o][k][i] = (w[o][i] >> k) & 1;
      end
  endfunction

  function automatic void ref_layer_fast(input wbits_t wb, input vec_t x, input int nout,
                                         output longint y[64]);
    logic [63:0] xb [8];
    for (int b = 0; b < 8; b++)
      for (int i = 0; i < 64; i++) xb[b][i] = (x[i] >> b) & 1;
    for (int o = 0; o < 64; o++) begin
      y[o] = 0;
      if (o < nout)
        for (int b = 0; b < 8; b++)
          for (int k = 0; k < 8; k++) begin
            int cnt = $countones(xb[b] & wb[o][k]);
            longint term;
            if (cnt > 31) cnt = 31;
            term = longint'(cnt) << (b + k);
            if ((b == 7) != (k == 7)) y[o] -= term;
            else y[o] += term;
          end
    end
  endfunction

  // density net always, color net only when need_color; one layer call
  // site (wb[0..1] density, wb[2..4] color)
  typedef wbits_t wset_t [5];
  function automatic void ref_mlp_fast(input wset_t wb, input vec_t feat,
                                       input int sd, input int sc, input bit need_color,
                                       output int sigma, output int rgb[3]);
    longint y[64];
    vec_t a;
    int nout[5] = '{64, 16, 64, 64, 3};
    int nl = need_color ? 5 : 2;
    a = feat;
    sigma = 0;
    rgb = '{0, 0, 0};
    for (int l = 0; l < nl; l++) begin
      int sh = (l < 2) ? sd : sc;
      ref_layer_fast(wb[l], a, nout[l], y);
      for (int i = 0; i < 64; i++)
        case (l)
          1: a[i] = (i < 16) ? clampi(asr(y[i], sh), -128, 127) : 0;
          4: a[i] = clampi(asr(y[i], sh) + 128, 0, 255);
          default: a[i] = clampi(asr(y[i], sh), 0, 127);
        endcase
      if (l == 1) sigma = clampi(asr(y[0], sh), 0, 255);
    end
    if (need_color) for (int c = 0; c < 3; c++) rgb[c] = a[c];
  endfunction

endpackage
