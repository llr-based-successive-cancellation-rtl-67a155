// scl_ref_pkg: bit-true software model of the multi-bit LLR list decoder,
// used by the testbenches as the independent reference.
//
// It does not copy the hardware's structure: for each live path and leaf
// block it recomputes the leaf LLRs from the channel LLRs straight down the
// tree, re-encoding the sibling's decided bits with the polar transform for
// every g step, then extends, zero-forces, ranks on the LSB-dropped metric
// and keeps the L best, exactly as the decoding scheme prescribes. Integer
// arithmetic with the same saturation points as the hardware (LLR +-31,
// metric +-127) makes the result bit-exact. Also holds channel helpers:
// frozen-set construction, encoder, AWGN/BPSK LLR generation.
package scl_ref_pkg;

  localparam int LMAX = 31;
  localparam int PMAX = 127;

  function automatic int sat(int v, int m);
    return (v > m) ? m : ((v < -m) ? -m : v);
  endfunction

  // in-place polar transform x = u * F^{(x)log2(n)} (natural order)
  function automatic void polar_encode(ref bit x[], input int n);
    for (int s = 1; s < n; s = s * 2)
      for (int i = 0; i < n; i++)
        if ((i & s) == 0) x[i] = x[i] ^ x[i+s];
  endfunction

  // leaf LLRs of block blk (nb LLRs) for a path whose first blk*nb bits are u
  function automatic void leaf_llrs(input int llr[], input bit u[], input int n,
                                    input int k, input int blk, ref int s[]);
    int cur[], nxt[];
    int m, mk, sz;
    m = $clog2(n); mk = m - k;
    cur = new[n];
    for (int i = 0; i < n; i++) cur[i] = llr[i];
    sz = n;
    for (int lv = 1; lv <= mk; lv++) begin
      int node, half;
      half = sz / 2;
      node = blk >> (mk - lv);
      nxt = new[half];
      if ((node & 1) == 0) begin
        for (int i = 0; i < half; i++) begin
          int a, b, mg;
          a = cur[i]; b = cur[i+half];
          mg = ((a < 0 ? -a : a) < (b < 0 ? -b : b)) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
          nxt[i] = ((a < 0) != (b < 0)) ? -mg : mg;
        end
      end else begin
        bit beta[];
        beta = new[half];
        for (int i = 0; i < half; i++) beta[i] = u[(node - 1) * half + i];
        polar_encode(beta, half);
        for (int i = 0; i < half; i++)
          nxt[i] = sat(cur[i+half] + (beta[i] ? -cur[i] : cur[i]), LMAX);
      end
      cur = nxt;
      sz = half;
    end
    for (int j = 0; j < (1 << k); j++) s[j] = cur[j];
  endfunction

  function automatic int key_of(int pm);
    return (pm < 0) ? -((-pm) >> 1) : (pm >> 1);
  endfunction

  // full list decode; returns decided bits and the final best metric
  function automatic void scl_decode(input int llr[], input bit frozen[], input int n,
                                     input int k, input int l, ref bit uhat[],
                                     output int best_pm, output int n_clone,
                                     output int n_zf, output int n_sat);
    int nb, nc, nblk;
    int pm[], cpm[], s[];
    bit val[], cval[];
    bit u[][], nu[][];
    int sel[];
    nb = 1 << k; nc = 1 << nb; nblk = n / nb;
    pm = new[l]; val = new[l]; u = new[l]; nu = new[l]; sel = new[l];
    cpm = new[l*nc]; cval = new[l*nc]; s = new[nb];
    n_clone = 0; n_zf = 0; n_sat = 0;
    for (int p = 0; p < l; p++) begin
      u[p] = new[n]; nu[p] = new[n];
      pm[p] = 0; val[p] = (p == 0);
    end
    for (int b = 0; b < nblk; b++) begin
      for (int p = 0; p < l; p++) begin
        if (val[p]) leaf_llrs(llr, u[p], n, k, b, s);
        for (int a = 0; a < nc; a++) begin
          int pen, o;
          bit bad;
          pen = 0; bad = 0;
          for (int j = 0; j < nb; j++) begin
            o = 0;
            for (int r = 0; r < nb; r++) if (((a >> r) & 1) && ((j & ~r) == 0)) o ^= 1;
            if (val[p]) pen += (o == 0) ? ((s[j] < 0) ? s[j] : 0) : ((s[j] > 0) ? -s[j] : 0);
            if (frozen[b*nb + j] && ((a >> j) & 1)) bad = 1;
          end
          cpm[p*nc + a]  = sat(pm[p] + pen, PMAX);
          cval[p*nc + a] = val[p] && !bad;
          if (val[p] && bad) n_zf++;
        end
      end
      // keep the l best on the S-bit key, lower index first on ties
      for (int r = 0; r < l; r++) begin
        int bi;
        bi = -1;
        for (int c = 0; c < l*nc; c++)
          if (cval[c] && (bi < 0 || key_of(cpm[c]) > key_of(cpm[bi]))) bi = c;
        sel[r] = bi;
        if (bi >= 0) cval[bi] = 0;
      end
      for (int r = 0; r < l; r++) begin
        if (sel[r] >= 0) begin
          int par, a;
          par = sel[r] / nc; a = sel[r] % nc;
          if (par != r) n_clone++;
          for (int i = 0; i < n; i++) nu[r][i] = u[par][i];
          for (int j = 0; j < nb; j++) nu[r][b*nb + j] = (a >> j) & 1;
        end
      end
      for (int r = 0; r < l; r++) begin
        if (sel[r] >= 0) begin
          pm[r] = cpm[sel[r]]; val[r] = 1;
          if (pm[r] <= -PMAX) n_sat++;
          for (int i = 0; i < n; i++) u[r][i] = nu[r][i];
        end else val[r] = 0;
      end
    end
    begin
      int bp;
      bp = -1;
      for (int p = 0; p < l; p++) if (val[p] && (bp < 0 || pm[p] > pm[bp])) bp = p;
      for (int i = 0; i < n; i++) uhat[i] = u[bp][i];
      best_pm = pm[bp];
    end
  endfunction

  // frozen set: the n-kinfo least reliable positions by the Bhattacharyya
  // parameter of a BEC with erasure probability 0.5 (natural order)
  function automatic void make_frozen(input int n, input int kinfo, ref bit frozen[]);
    real z[], t[];
    z = new[1]; z[0] = 0.5;
    for (int len = 1; len < n; len = len * 2) begin
      t = new[2*len];
      for (int i = 0; i < len; i++) begin
        t[2*i]   = 2.0 * z[i] - z[i] * z[i];
        t[2*i+1] = z[i] * z[i];
      end
      z = t;
    end
    // the first split above is the most significant index bit, so z is
    // already in natural order
    for (int i = 0; i < n; i++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < n; j++)
        if (z[j] > z[i] || (z[j] == z[i] && j < i)) rank++;
      frozen[i] = (rank < n - kinfo);
    end
  endfunction

  // standard normal sample (Box-Muller on $urandom)
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (0 -> +1) over AWGN, LLR = 2y/sigma^2 scaled by 'scale' and
  // rounded to the +-31 integer range
  function automatic void channel(input bit x[], input int n, input real sigma,
                                  input real scale, ref int llr[]);
    for (int i = 0; i < n; i++) begin
      real y, v;
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      v = scale * 2.0 * y / (sigma * sigma);
      llr[i] = sat($rtoi(v + ((v < 0) ? -0.5 : 0.5)), LMAX);
    end
  endfunction

endpackage
