// tb_ref_pkg: reference models for the hybrid polar decoder testbenches.
//
// Everything here works on plain integers, independently of the RTL structure:
// LLRs are ints clamped to +/-63 (6-bit magnitude), min-sum with scaling
// factor 15/16 (truncated), a bit-level SC decoder, a BP decoder with the same
// stage schedule as the hardware, the polar encoder x = uG written from the
// matrix definition, a Bhattacharyya-bound code construction and a BPSK/AWGN
// channel with 2 fractional LLR bits.
package tb_ref_pkg;
  import polar_pkg::*;

  localparam int LMAX = 63;

  function automatic int sat(int v);
    return (v > LMAX) ? LMAX : ((v < -LMAX) ? -LMAX : v);
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic llr_t to_llr(int v);
    llr_t r;
    int s;
    s = sat(v);
    r.sgn = (s < 0);
    r.mag = MAGW'(iabs(s));
    return r;
  endfunction

  function automatic int from_llr(llr_t x);
    return x.sgn ? -int'(x.mag) : int'(x.mag);
  endfunction

  function automatic int scale(int m);
    return m - (m >>> 4);
  endfunction

  // sign(x) sign(y) min(|x|,|y|), optionally scaled
  function automatic int minsum(int x, int y, bit scaled);
    int m;
    m = (iabs(x) < iabs(y)) ? iabs(x) : iabs(y);
    if (scaled) m = scale(m);
    return (((x < 0) != (y < 0)) ? -m : m);
  endfunction

  function automatic int ref_f(int a, int b);
    return minsum(a, b, 1'b0);
  endfunction

  function automatic int ref_g(int a, int b, bit u);
    return sat((u ? -a : a) + b);
  endfunction

  // Eq. (3): s sign(in1) sign(in2+in3) min(|in1|,|in2+in3|)
  function automatic int ref_t1_bp(int in1, int in2, int in3);
    return minsum(in1, sat(in2 + in3), 1'b1);
  endfunction

  // Eq. (4): in1 + s sign(in2) sign(in3) min(|in2|,|in3|)
  function automatic int ref_t2_bp(int in1, int in2, int in3);
    return sat(in1 + minsum(in2, in3, 1'b1));
  endfunction

  // x = uG, G[r][c] = 1 iff every 1-bit of c is also set in r
  function automatic void encode(input bit u[], output bit x[]);
    int n;
    n = u.size();
    x = new[n];
    for (int c = 0; c < n; c++) begin
      x[c] = 1'b0;
      for (int r = 0; r < n; r++) if ((c & ~r) == 0) x[c] ^= u[r];
    end
  endfunction

  // Frozen set: the n-k indices with the largest Bhattacharyya bound.
  function automatic void construct(input int n, input int k, input real design_db, output bit frozen[]);
    real z[];
    int  m, idx;
    real z0;
    bit  taken[];
    m = $clog2(n);
    z = new[n];
    frozen = new[n];
    taken = new[n];
    z0 = $exp(-(real'(k) / real'(n)) * (10.0 ** (design_db / 10.0)));
    for (int i = 0; i < n; i++) begin
      z[i] = z0;
      for (int b = m - 1; b >= 0; b--) z[i] = ((i >> b) & 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
      frozen[i] = 1'b0;
    end
    for (int f = 0; f < n - k; f++) begin
      idx = -1;
      for (int i = 0; i < n; i++) if (!taken[i] && (idx < 0 || z[i] > z[idx])) idx = i;
      taken[idx] = 1'b1;
      frozen[idx] = 1'b1;
    end
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = (real'($urandom) + 1.0) / 4294967297.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK over AWGN at Eb/N0 = ebn0_db for code rate k/n, LLRs quantised to
  // 2 fractional bits and clamped.
  function automatic void channel(input bit x[], input real ebn0_db, input real rate, output int llr[]);
    real sigma, y, l;
    int n;
    n = x.size();
    llr = new[n];
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    for (int i = 0; i < n; i++) begin
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      l = 2.0 * y / (sigma * sigma) * 4.0;
      llr[i] = sat(int'(l));
    end
  endfunction

  // Bit-by-bit SC decoder (natural order), same f/g/h arithmetic as the design.
  function automatic void sc_decode(input int ch[], input bit frozen[], output bit u[]);
    int n, m, base, s, j0, t;
    int L[];
    bit B[];
    n = ch.size();
    m = $clog2(n);
    L = new[(m + 2) * n];
    B = new[(m + 2) * n];
    u = new[n];
    for (int r = 0; r < n; r++) L[(m + 1) * n + r] = ch[r];
    for (int i = 0; i < n; i++) begin
      if (i == 0) j0 = m + 1;
      else begin
        t = 0;
        while (((i >> t) & 1) == 0) t++;
        j0 = t + 1;
        base = (i >> j0) << j0;
        s = 1 << (j0 - 1);
        for (int r = base; r < base + s; r++)
          L[j0 * n + r + s] = ref_g(L[(j0 + 1) * n + r], L[(j0 + 1) * n + r + s], B[j0 * n + r]);
      end
      for (int j = j0 - 1; j >= 1; j--) begin
        base = (i >> j) << j;
        s = 1 << (j - 1);
        for (int r = base; r < base + s; r++)
          L[j * n + r] = ref_f(L[(j + 1) * n + r], L[(j + 1) * n + r + s]);
      end
      u[i] = frozen[i] ? 1'b0 : (L[n + i] < 0);
      B[n + i] = u[i];
      for (int j = 1; j <= m; j++) begin
        if (((i >> (j - 1)) & 1) == 0) break;
        base = (i >> j) << j;
        s = 1 << (j - 1);
        for (int r = base; r < base + s; r++) begin
          B[(j + 1) * n + r]     = B[j * n + r] ^ B[j * n + r + s];
          B[(j + 1) * n + r + s] = B[j * n + r + s];
        end
      end
    end
  endfunction

  // BP decoder state, flat arrays indexed [col*n + row], col 1..m+1.
  function automatic void bp_init(input int ch[], input bit frozen[], output int L[], output int R[]);
    int n, m;
    n = ch.size();
    m = $clog2(n);
    L = new[(m + 2) * n];
    R = new[(m + 2) * n];
    for (int r = 0; r < n; r++) begin
      L[(m + 1) * n + r] = ch[r];
      R[n + r] = frozen[r] ? LMAX : 0;
    end
  endfunction

  // One update of stage j (all n/2 butterflies).
  function automatic void bp_stage(input int n, input int j, ref int L[], ref int R[]);
    int s, lu, ll, ru, rl;
    s = 1 << (j - 1);
    for (int i = 0; i < n; i++) begin
      if ((i & s) != 0) continue;
      lu = L[(j + 1) * n + i];
      ll = L[(j + 1) * n + i + s];
      ru = R[j * n + i];
      rl = R[j * n + i + s];
      L[j * n + i]           = ref_t1_bp(lu, ll, rl);
      L[j * n + i + s]       = ref_t2_bp(ll, ru, lu);
      R[(j + 1) * n + i]     = ref_t1_bp(ru, ll, rl);
      R[(j + 1) * n + i + s] = ref_t2_bp(rl, ru, lu);
    end
  endfunction

  function automatic void bp_hard(input int n, input int L[], input int R[], input bit frozen[],
                                  output bit uh[], output bit xh[]);
    int m;
    m = $clog2(n);
    uh = new[n];
    xh = new[n];
    for (int r = 0; r < n; r++) begin
      uh[r] = !frozen[r] && (sat(L[n + r] + R[n + r]) < 0);
      xh[r] = sat(L[(m + 1) * n + r] + R[(m + 1) * n + r]) < 0;
    end
  endfunction

  // Full BP phase with the hardware schedule and early stopping.
  function automatic void bp_decode(input int ch[], input bit frozen[], input int max_iter,
                                    output bit u[], output int iters, output bit ok, output int denoised[]);
    int n, m, c;
    int L[], R[];
    bit uh[], xh[], xe[];
    n = ch.size();
    m = $clog2(n);
    bp_init(ch, frozen, L, R);
    ok = 1'b0;
    iters = 0;
    c = 0;
    while (1) begin
      c++;
      for (int j = 1; j <= m; j++)
        if (c >= j && ((c - j) % 2) == 0 && ((c - j) / 2) < max_iter) bp_stage(n, j, L, R);
      if (c >= m && ((c - m) % 2) == 0) begin
        iters = (c - m) / 2 + 1;
        bp_hard(n, L, R, frozen, uh, xh);
        encode(uh, xe);
        ok = (xe == xh);
        if (ok || iters >= max_iter) break;
      end
    end
    u = uh;
    denoised = new[n];
    for (int r = 0; r < n; r++) denoised[r] = sat(L[(m + 1) * n + r] + R[(m + 1) * n + r]);
  endfunction
endpackage
