// Reference model of the blind detector, written independently of the RTL
// for the testbenches: polar encoding, SC-list decoding with the same
// fixed-point arithmetic (min-sum f, saturated g, saturating path metrics,
// ties broken by lower candidate index), early stopping on ID bits, and the
// cycle count the RTL schedule should reach. It recomputes each leaf LLR
// from the channel values instead of keeping per-stage memories, so it
// shares no structure with the hardware.
package bd_ref_pkg;

  localparam int MAXN = 512;

  typedef struct {
    bit          vld;
    int          pm;
    int          rel;
    bit          match;
    bit [MAXN-1:0] u;
    int          est;
    int          cycles;
  } ref_res_t;

  function automatic int satw(int v, int w);
    int m;
    m = (1 << (w - 1)) - 1;
    if (v > m) return m;
    if (v < -m) return -m;
    return v;
  endfunction

  function automatic int absi(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int f_ms(int a, int b);
    int m;
    m = (absi(a) < absi(b)) ? absi(a) : absi(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  // x = u G^(x)m, natural order
  function automatic void encode(ref bit v[], input int len);
    for (int s = 1; s < len; s *= 2)
      for (int j = 0; j < len; j++)
        if ((j & s) == 0) v[j] = v[j] ^ v[j + s];
  endfunction

  // LLR of leaf i given the bits u[0..i-1] of one path.
  function automatic int leaf_llr(int y[], int n, int i, bit u[], int w);
    int  cur[];
    int  nx[];
    int  len, base, half;
    bit  bl[];
    len  = 1 << n;
    base = 0;
    cur  = new[len];
    foreach (cur[j]) cur[j] = y[j];
    while (len > 1) begin
      half = len / 2;
      nx   = new[half];
      if (i < base + half) begin
        for (int j = 0; j < half; j++) nx[j] = f_ms(cur[j], cur[j + half]);
      end else begin
        bl = new[half];
        for (int j = 0; j < half; j++) bl[j] = u[base + j];
        encode(bl, half);
        for (int j = 0; j < half; j++)
          nx[j] = satw(bl[j] ? cur[j + half] - cur[j] : cur[j + half] + cur[j], w);
        base += half;
      end
      cur = nx;
      len = half;
    end
    return cur[0];
  endfunction

  function automatic int ctz(int v, int n);
    for (int b = 0; b < n; b++) if (v & (1 << b)) return b;
    return n;
  endfunction

  // Cycles the RTL spends on the stages of leaf i (without the sort cycle).
  function automatic int leaf_cycles(int i, int n, int p);
    int top, c;
    top = (i == 0) ? n - 1 : ctz(i, n);
    c = 0;
    for (int s = top; s >= 0; s--) c += ((1 << s) > p) ? (1 << s) / p : 1;
    return c;
  endfunction

  // SC-list decoding of one candidate. bt: 0 frozen, 1 info, 2 ID.
  function automatic ref_res_t scl(int y[], int n, int bt[], int L, bit es,
                                   bit [31:0] ue, int w, int pmw, int p);
    ref_res_t r;
    int  nn, pmsat, idi, best;
    int  pm[], rel[], npm[], nrel[];
    bit  act[], idm[], nact[], nidm[];
    bit  u[][];
    bit  nu[][];
    int  a[];
    nn    = 1 << n;
    pmsat = (1 << pmw) - 1;
    pm  = new[L]; rel = new[L]; act = new[L]; idm = new[L]; u = new[L];
    foreach (u[l]) begin u[l] = new[nn]; pm[l] = 0; rel[l] = 0; act[l] = (l == 0); idm[l] = 1; end
    a   = new[L];
    idi = 0;
    r.cycles = 0;
    r.est    = nn;
    for (int i = 0; i < nn; i++) begin
      bit ub;
      r.cycles += leaf_cycles(i, n, p);
      for (int l = 0; l < L; l++) a[l] = leaf_llr(y, n, i, u[l], w);
      ub = (idi < 32) ? ue[idi] : 1'b0;
      if (bt[i] == 0 || L == 1) begin
        for (int l = 0; l < L; l++) begin
          bit hb, b;
          hb = (a[l] < 0);
          b  = (bt[i] == 0) ? 1'b0 : hb;
          if (b != hb) pm[l] = (pm[l] + absi(a[l]) > pmsat) ? pmsat : pm[l] + absi(a[l]);
          rel[l] = absi(a[l]);
          u[l][i] = b;
          if (bt[i] == 2 && b != ub) begin idm[l] = 0; if (es) act[l] = 0; end
        end
      end else begin
        int cpm[], rk[];
        bit cv[];
        cpm = new[2*L]; cv = new[2*L]; rk = new[2*L];
        for (int l = 0; l < L; l++)
          for (int b = 0; b < 2; b++) begin
            int add;
            add = ((a[l] < 0) != b) ? absi(a[l]) : 0;
            cpm[2*l+b] = (pm[l] + add > pmsat) ? pmsat : pm[l] + add;
            cv[2*l+b]  = act[l];
          end
        foreach (rk[c]) begin
          rk[c] = 0;
          foreach (rk[d])
            if (d != c && cv[d] && (cpm[d] < cpm[c] || (cpm[d] == cpm[c] && d < c))) rk[c]++;
        end
        npm = new[L]; nrel = new[L]; nact = new[L]; nidm = new[L]; nu = new[L];
        for (int s = 0; s < L; s++) begin
          nact[s] = 0; npm[s] = 0; nrel[s] = 0; nidm[s] = 0; nu[s] = new[nn];
          // a slot with no survivor keeps a copy of path 0 (inactive)
          nu[s] = u[0];
          for (int c = 0; c < 2*L; c++)
            if (cv[c] && rk[c] == s) begin
              int src; bit b;
              src = c / 2; b = c % 2;
              nu[s]    = u[src];
              nu[s][i] = b;
              npm[s]   = cpm[c];
              nrel[s]  = absi(a[src]);
              nact[s]  = 1;
              nidm[s]  = idm[src];
              if (bt[i] == 2 && b != ub) begin nidm[s] = 0; if (es) nact[s] = 0; end
            end
        end
        pm = npm; rel = nrel; act = nact; idm = nidm; u = nu;
        r.cycles += 1;
      end
      if (bt[i] == 2) idi++;
      begin
        bit live;
        live = 0;
        foreach (act[l]) if (act[l]) live = 1;
        if (!live) begin
          r.est = i + 1;
          if (i != nn - 1) r.cycles += 1;
          break;
        end
      end
    end
    best = -1;
    for (int l = 0; l < L; l++)
      if (act[l] && (best < 0 || pm[l] < pm[best])) best = l;
    r.vld = (best >= 0);
    r.u   = '0;
    if (best >= 0) begin
      r.pm = pm[best]; r.rel = rel[best]; r.match = idm[best];
      for (int j = 0; j < nn; j++) r.u[j] = u[best][j];
    end else begin
      r.pm = 0; r.rel = 0; r.match = 0;
    end
    return r;
  endfunction

  // BPSK/AWGN-like channel LLRs for u, quantised to q bits. noise is the
  // peak of a uniform perturbation (sum of two uniforms, roughly bell shaped).
  function automatic void channel(bit u[], int n, int amp, int noise, int q,
                                  ref int y[]);
    bit x[];
    int nn;
    nn = 1 << n;
    x  = new[nn];
    foreach (x[j]) x[j] = u[j];
    encode(x, nn);
    y = new[nn];
    foreach (y[j]) begin
      int v, e;
      e = (noise > 0) ? (int'($urandom_range(0, 2*noise)) - noise
                         + int'($urandom_range(0, 2*noise)) - noise) / 2 : 0;
      v = (x[j] ? -amp : amp) + e;
      y[j] = satw(v, q);
    end
  endfunction

  // Code description: K information bits and nid ID bits on random
  // positions above a random cut; everything else frozen.
  function automatic void make_code(int n, int k, int nid, ref int bt[]);
    int nn, placed;
    nn = 1 << n;
    bt = new[nn];
    foreach (bt[j]) bt[j] = 0;
    placed = 0;
    while (placed < k + nid) begin
      int j;
      j = int'($urandom_range(nn / 4, nn - 1));
      if (bt[j] == 0) begin bt[j] = (placed < nid) ? 2 : 1; placed++; end
    end
  endfunction

  // Code built the way the evaluated system builds it (ID mode 1): bit
  // channels ranked by polarization weight PW(i) = sum_j b_j 2^(j/4), where
  // b_j are the bits of i; the K best carry information, the next nid the
  // UE ID, the rest are frozen.
  // late_id = 1 keeps the same K + nid positions but gives the ID the last
  // nid of them in decoding order, so the list is full when IDs are checked.
  function automatic void make_code_pw(int n, int k, int nid, bit late_id, ref int bt[]);
    int  nn;
    real w[];
    int  ord[$];
    nn = 1 << n;
    bt = new[nn];
    w  = new[nn];
    foreach (w[i]) begin
      w[i] = 0.0;
      for (int j = 0; j < n; j++) if (i & (1 << j)) w[i] += 2.0 ** (real'(j) / 4.0);
    end
    ord = {};
    for (int i = 0; i < nn; i++) begin
      int pos;
      pos = ord.size();
      for (int q = 0; q < ord.size(); q++)
        if (w[i] > w[ord[q]]) begin pos = q; break; end
      ord.insert(pos, i);
    end
    foreach (bt[i]) bt[i] = 0;
    for (int q = 0; q < k + nid; q++) bt[ord[q]] = (q < k) ? 1 : 2;
    if (late_id) begin
      int cnt;
      cnt = 0;
      for (int i = nn - 1; i >= 0; i--)
        if (bt[i] != 0) begin bt[i] = (cnt < nid) ? 2 : 1; cnt++; end
    end
  endfunction

  // Selection of the second-phase list from first-phase results: all ID
  // matches (or, if more than c2, the c2 matches of highest reliability),
  // then the least reliable non-matching candidates.
  function automatic void select_list(int rel[], bit mt[], int c2, ref int lst[$]);
    int nm, c1;
    bit used[];
    c1 = rel.size();
    used = new[c1];
    lst = {};
    nm = 0;
    foreach (mt[c]) if (mt[c]) nm++;
    foreach (used[c]) used[c] = 0;
    if (nm > c2) begin
      for (int k = 0; k < c2; k++) begin
        int b; b = -1;
        foreach (rel[c]) if (mt[c] && !used[c] && (b < 0 || rel[c] > rel[b])) b = c;
        used[b] = 1; lst.push_back(b);
      end
    end else begin
      int mins[$];
      mins = {};
      for (int k = 0; k < c2; k++) begin
        int b; b = -1;
        foreach (rel[c]) if (!used[c] && (b < 0 || rel[c] < rel[b])) b = c;
        used[b] = 1; mins.push_back(b);
      end
      foreach (mt[c]) if (mt[c]) lst.push_back(c);
      foreach (mins[k]) if (!mt[mins[k]] && lst.size() < c2) lst.push_back(mins[k]);
    end
  endfunction

endpackage
