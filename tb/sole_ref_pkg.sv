// sole_ref_pkg: bit-level reference models used by the testbenches.
//
// The models are written from the algorithm descriptions, not from the RTL: they use real
// arithmetic where the hardware uses shift-and-add, loops where it uses trees, and work
// element by element. Formats match the RTL: Softmax input signed Q4.4, Softmax output
// unsigned Q0.8, reduced sum with 15 fraction bits; LayerNorm mean with 4, variance with 8
// and 1/sigma with 16 fraction bits, gamma Q1.6, beta and output Q3.4.
package sole_ref_pkg;
  localparam int LANES = 32;

  // round(d/16 * 1.4375), clipped to 15
  function automatic int l2e(input int d);
    real t;
    t = (real'(d) / 16.0) * 1.4375;
    l2e = int'($floor(t + 0.5));
    if (l2e > 15) l2e = 15;
  endfunction

  // approximate log division: (1.636 - q(s))/2 * 2^-(k+ks), Q0.8
  function automatic int aldiv(input int k, input longint sum);
    real s_r, m;
    int  ks, c;
    s_r = real'(sum) / 32768.0;
    ks  = 0;
    while ((2.0 ** (ks + 1)) <= s_r) ks++;
    m   = s_r / (2.0 ** ks) - 1.0;
    c   = (m >= 0.5) ? int'(0.568 * 256.0 + 0.5) - 1 : int'(0.818 * 256.0);
    // 0.568*256 = 145.4 -> 145, 0.818*256 = 209.4 -> 209
    c   = (m >= 0.5) ? 145 : 209;
    if (k + ks > 7) return 0;
    return c >> (k + ks);
  endfunction

  // E2Softmax of one vector at slice granularity; x has L entries (Q4.4)
  function automatic void softmax_model(input int x[], output int y[]);
    int     L, ns, m, gmax, corr, local_max;
    int     yk[], smax[];
    longint sum;
    L  = x.size();
    ns = (L + LANES - 1) / LANES;
    yk = new[L];
    smax = new[ns];
    y  = new[L];
    sum = 0; gmax = 0;
    for (int j = 0; j < ns; j++) begin
      local_max = -1000;
      for (int i = j*LANES; i < L && i < (j+1)*LANES; i++)
        if (x[i] > local_max) local_max = x[i];
      if (j == 0) begin m = local_max; corr = 0; end
      else begin
        m = (local_max > gmax) ? local_max : gmax;
        corr = l2e(m - gmax);
      end
      sum = (j == 0) ? 0 : (sum >> corr);
      for (int i = j*LANES; i < L && i < (j+1)*LANES; i++) begin
        yk[i] = l2e(m - x[i]);
        sum += longint'(1) << (15 - yk[i]);
      end
      smax[j] = m;
      gmax = m;
    end
    for (int i = 0; i < L; i++) begin
      int k;
      k = yk[i] + l2e(gmax - smax[i / LANES]);
      if (k > 15) k = 15;
      y[i] = aldiv(k, sum);
    end
  endfunction

  // dynamic compression of an unsigned 8-bit value: {s, y}
  function automatic int compress(input int x, output int s);
    real q;
    s = (x >= 64);
    q = s ? real'(x) / 16.0 : real'(x) / 4.0;
    compress = int'($floor(q + 0.5));
    if (compress > 15) compress = 15;
  endfunction

  // x^-0.5 of v (8 fraction bits), result with 16 fraction bits, as the 32-entry table does
  function automatic longint rsqrt(input longint v);
    int  p, f4, r, h;
    real mant;
    longint e;
    if (v <= 0) v = 1;
    p = 0;
    while ((longint'(1) << (p + 1)) <= v) p++;
    f4 = (p >= 4) ? int'((v >> (p - 4)) & 15) : int'((v << (4 - p)) & 15);
    r = p % 2; h = p / 2;
    mant = (2.0 ** r) * (1.0 + (real'(f4) + 0.5) / 16.0);
    e = longint'($floor(256.0 / $sqrt(mant) + 0.5));
    return (e << 12) >> h;
  endfunction

  // mean (4 fraction bits) of d << alpha, with 1/n in 20 fraction bits
  function automatic longint ln_mean(input int d[], input int a[], input longint inv_n);
    longint sx;
    sx = 0;
    foreach (d[i]) sx += longint'(d[i]) * (longint'(1) << a[i]);
    return (sx * inv_n) >>> 16;
  endfunction

  function automatic longint ln_ex2(input int d[], input int a[], input longint inv_n);
    longint sx2;
    int y, s, mag;
    sx2 = 0;
    foreach (d[i]) begin
      mag = (d[i] < 0) ? -d[i] : d[i];
      y = compress(mag, s);
      sx2 += longint'(y * y) * (s ? 16 : 1) * (longint'(1) << (2 * a[i]));
    end
    return (sx2 * 16 * inv_n) >> 12;
  endfunction

  function automatic int affine(input int d, input int a, input longint mean, input longint stdi,
                                input int gamma, input int beta);
    longint pr, q;
    pr = longint'(gamma) * stdi * ((longint'(d) * (longint'(1) << a)) * 16 - mean);
    q  = ((pr + (longint'(1) << 21)) >>> 22) + beta;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  // full AILayerNorm of one token
  function automatic void layernorm_model(input int x[], input int a[], input int zp,
                                          input longint inv_n, input int g[], input int b[],
                                          output int y[], output longint mean, output longint stdi);
    int d[];
    longint ex2, v;
    d = new[x.size()];
    y = new[x.size()];
    foreach (x[i]) d[i] = x[i] - zp;
    mean = ln_mean(d, a, inv_n);
    ex2  = ln_ex2(d, a, inv_n);
    v    = ex2 - mean * mean;
    if (v < 0) v = 0;
    stdi = rsqrt(v);
    foreach (x[i]) y[i] = affine(d[i], a[i], mean, stdi, g[i], b[i]);
  endfunction
endpackage
