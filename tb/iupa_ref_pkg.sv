// iupa_ref_pkg: behavioural reference of the IUPA decoder arithmetic, written
// directly from the decoding equations and independent of the RTL structure.
// Vectors are dynamic arrays of int. Used by the testbenches to compute the
// expected outputs, and to make noisy Reed-Muller codewords.
package iupa_ref_pkg;

  function automatic int hib(int x);
    int h = 0;
    for (int i = 0; i < 31; i++) if ((x >> i) & 1) h = i;
    return h;
  endfunction

  function automatic int delb(int z, int h);
    return ((z >> (h + 1)) << h) | (z & ((1 << h) - 1));
  endfunction

  // coset number of z for B_k: the smaller member with bit hib(k) deleted
  function automatic int coset(int z, int k);
    int a = (z < (z ^ k)) ? z : (z ^ k);
    return delb(a, hib(k));
  endfunction

  function automatic int parity(int x);
    int p = 0;
    for (int i = 0; i < 31; i++) p ^= (x >> i) & 1;
    return p;
  endfunction

  function automatic int sat(int v, int q);
    int hi = (1 << (q - 1)) - 1;
    int lo = -(1 << (q - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int favg(int a, int b);
    return (a + b) >>> 1;
  endfunction

  // MinSum projection onto B_k
  function automatic void project(input int l[], input int k, input int q, output int y[]);
    int n = l.size();
    int mx = (1 << (q - 1)) - 1;
    y = new[n / 2];
    for (int z = 0; z < n; z++) begin
      if (k == 0) begin
        if (z < n / 2) y[z] = 0;
      end else if (z < (z ^ k)) begin
        int a = l[z], b = l[z ^ k];
        int ma = (a < 0) ? -a : a;
        int mb = (b < 0) ? -b : b;
        int mn;
        if (ma > mx) ma = mx;
        if (mb > mx) mb = mx;
        mn = (ma < mb) ? ma : mb;
        y[coset(z, k)] = ((a < 0) != (b < 0)) ? -mn : mn;
      end
    end
  endfunction

  // Maximum-correlation first-order decoder (brute force over all u)
  function automatic void fod_decode(input int l[], output int c[]);
    int n = l.size();
    int best_u = 0, best_c = 0, best_m = -1;
    for (int u = 0; u < n; u++) begin
      int s = 0;
      for (int z = 0; z < n; z++) s += parity(u & z) ? -l[z] : l[z];
      if (((s < 0) ? -s : s) > best_m) begin
        best_m = (s < 0) ? -s : s;
        best_u = u;
        best_c = s;
      end
    end
    c = new[n];
    for (int z = 0; z < n; z++) c[z] = parity(best_u & z) ^ ((best_c < 0) ? 1 : 0);
  endfunction

  // (1 - 2 c([z + B_k])) L(z ^ k)
  function automatic void preagg(input int l[], input int c[], input int k, output int o[]);
    int n = l.size();
    o = new[n];
    for (int z = 0; z < n; z++)
      o[z] = (k == 0) ? 0 : (c[coset(z, k)] ? -l[z ^ k] : l[z ^ k]);
  endfunction

  // First left-half column of group gi.
  function automatic int clo(int m, int g, int gi);
    int r = (1 << (m - 1)) / g;
    int jmin = (gi == 0) ? 1 : gi * r;
    return 1 << hib(jmin);
  endfunction

  // Second-order decoding of lj (length 2^(m-1)) in group gi: returns the
  // full sum before the hard decision.
  function automatic void dec2_sum(input int lj[], input int m, input int q, input int g,
                                   input int lambda, input int gi, output int s[]);
    int n2 = 1 << (m - 1);
    int half = 1 << (m - 2);
    int pr = half / lambda;
    int lpr = 0;
    int y[], c[], o[];
    while ((1 << lpr) < pr) lpr++;
    s = new[n2];
    foreach (s[z]) s[z] = 0;
    for (int k = clo(m, g, gi); k < half; k++) begin
      project(lj, k, q, y);
      fod_decode(y, c);
      preagg(lj, c, k, o);
      foreach (s[z]) s[z] += o[z];
    end
    for (int cy = 0; cy < lambda; cy++) begin
      int v[][];
      v = new[pr];
      for (int p = 0; p < pr; p++) begin
        project(lj, half + p * lambda + cy, q, y);
        fod_decode(y, c);
        preagg(lj, c, half + p * lambda + cy, v[p]);
      end
      for (int w = pr; w > 1; w /= 2)
        for (int i = 0; i < w / 2; i++)
          foreach (v[i][z]) v[i][z] = favg(v[2*i][z], v[2*i+1][z]);
      foreach (s[z]) s[z] += v[0][z] <<< lpr;
    end
  endfunction

  // One IUPA iteration: returns the Q+1-bit averaged LLRs.
  function automatic void iteration(input int l[], input int m, input int q, input int g,
                                    input int lambda, output int lh[]);
    int n = 1 << m;
    int r = (n / 2) / g;
    int slots[][];
    slots = new[r];
    for (int sl = 0; sl < r; sl++) begin
      int v[][];
      v = new[g];
      for (int gi = 0; gi < g; gi++) begin
        int j = gi * r + sl;
        int lj[], s[], c[];
        project(l, j, q, lj);
        dec2_sum(lj, m, q, g, lambda, gi, s);
        c = new[s.size()];
        foreach (s[z]) c[z] = (s[z] < 0) ? 1 : 0;
        preagg(l, c, j, v[gi]);
      end
      for (int w = g; w > 1; w /= 2)
        for (int i = 0; i < w / 2; i++)
          foreach (v[i][z]) v[i][z] = favg(v[2*i][z], v[2*i+1][z]);
      slots[sl] = v[0];
    end
    for (int w = r; w > 1; w /= 2)
      for (int i = 0; i < w / 2; i++)
        foreach (slots[i][z]) slots[i][z] = favg(slots[2*i][z], slots[2*i+1][z]);
    lh = slots[0];
  endfunction

  // Full decoder: NITER iterations with saturation to Q bits in between.
  function automatic void decode(input int l[], input int m, input int q, input int g,
                                 input int lambda, input int niter, output int lh[]);
    int cur[];
    cur = l;
    for (int it = 0; it < niter; it++) begin
      iteration(cur, m, q, g, lambda, lh);
      if (it < niter - 1) begin
        cur = new[lh.size()];
        foreach (lh[z]) cur[z] = sat(lh[z], q);
      end
    end
  endfunction

  // Random RM(m,r) codeword: random polynomial of degree <= r in m variables.
  function automatic void rm_codeword(input int m, input int r, output int c[]);
    int n = 1 << m;
    c = new[n];
    foreach (c[z]) c[z] = 0;
    for (int mon = 0; mon < n; mon++) begin
      int deg = 0;
      for (int i = 0; i < m; i++) deg += (mon >> i) & 1;
      if (deg <= r && ($urandom & 1)) begin
        for (int z = 0; z < n; z++) if ((z & mon) == mon) c[z] ^= 1;
      end
    end
  endfunction

  // Q-bit LLRs of a codeword: amplitude amp, uniform noise in [-noise, noise]
  function automatic void noisy_llr(input int c[], input int amp, input int noise, input int q,
                                    output int l[]);
    l = new[c.size()];
    foreach (c[z]) begin
      int nz = (noise > 0) ? int'($urandom % (2 * noise + 1)) - noise : 0;
      l[z] = sat((c[z] ? -amp : amp) + nz, q);
    end
  endfunction

endpackage
