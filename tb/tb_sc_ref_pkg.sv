// tb_sc_ref_pkg: reference models used by the testbenches of the polar decoder.
//
// Everything here is written independently of the RTL, in plain integer arithmetic:
//  - pw_mask:    polarisation-weight frozen-set construction (same rule as the decoder's
//                default mask: weight sum_j p[j]*round(1024*2**((n-1-j)/4)), ties to the
//                larger position, the K heaviest positions free);
//  - polar_enc:  the polar transform in the decoder's bit order (butterfly on bit j pairs
//                p and p+2**j: v[p] ^= v[p+2**j]); it is its own inverse;
//  - sys_enc:    systematic encoding (data on the free positions of the codeword);
//  - ref_sc:     recursive SC decoder with min-sum F, G, per-level clamping and the
//                Rate-0 / Rate-1 / repetition / SPC shortcuts, returning the re-encoded
//                estimate; LLRs are kept as (sign, magnitude) pairs like the hardware.
package tb_sc_ref_pkg;

  function automatic int pw_weight(int p, int n);
    int beta [10] = '{1024, 1218, 1448, 1722, 2048, 2435, 2896, 3444, 4096, 4871};
    int w;
    w = 0;
    for (int j = 0; j < n; j++) if ((p >> j) & 1) w += beta[n-1-j];
    return w;
  endfunction

  // Returns fz[p] = 1 for frozen positions.
  function automatic void pw_mask(int n, int k, output bit fz[]);
    int nn, wp, wq, rank;
    nn = 1 << n;
    fz = new[nn];
    for (int p = 0; p < nn; p++) begin
      wp = pw_weight(p, n);
      rank = 0;
      for (int q = 0; q < nn; q++) begin
        wq = pw_weight(q, n);
        if (wq > wp || (wq == wp && q > p)) rank++;
      end
      fz[p] = (rank >= k);
    end
  endfunction

  function automatic void polar_enc(input bit u[], output bit x[]);
    int nn;
    nn = u.size();
    x = u;
    for (int st = 1; st < nn; st *= 2)
      for (int p = 0; p < nn; p++)
        if ((p & st) == 0) x[p] = x[p] ^ x[p + st];
  endfunction

  // Systematic encoding; returns 0 if the data did not land on the free positions.
  function automatic bit sys_enc(input bit d[], input bit fz[], output bit x[]);
    bit a[], v[];
    int j;
    a = new[fz.size()];
    j = 0;
    for (int p = 0; p < fz.size(); p++) begin
      a[p] = fz[p] ? 1'b0 : d[j];
      if (!fz[p]) j++;
    end
    polar_enc(a, v);
    for (int p = 0; p < fz.size(); p++) if (fz[p]) v[p] = 1'b0;
    polar_enc(v, x);
    j = 0;
    for (int p = 0; p < fz.size(); p++) if (!fz[p]) begin
      if (x[p] != d[j]) return 1'b0;
      j++;
    end
    return 1'b1;
  endfunction

  function automatic int clampi(int v, int lim);
    return (v > lim) ? lim : v;
  endfunction

  // qs[l] = LLR width (sign included) at the input of level-l nodes.
  function automatic void ref_sc(input bit s[], input int m[], input bit fz[], input int qs[],
                                 input int maxrep, input int maxspc, output bit x[]);
    int mm, h, lv, nf, lim, sum, va, vb, mi;
    bit fs[], gs[], fz0[], fz1[], z[], x2[], par;
    int fm[], gm[];
    mm = s.size();
    x = new[mm];
    nf = 0;
    for (int i = 0; i < mm; i++) nf += fz[i];
    if (nf == mm) begin
      for (int i = 0; i < mm; i++) x[i] = 0;
    end else if (nf == 0) begin
      for (int i = 0; i < mm; i++) x[i] = s[i];
    end else if (mm >= 2 && mm <= maxrep && nf == mm - 1 && !fz[mm-1]) begin
      sum = 0;
      for (int i = 0; i < mm; i++) sum += s[i] ? -m[i] : m[i];
      for (int i = 0; i < mm; i++) x[i] = (sum < 0);
    end else if (mm >= 4 && mm <= maxspc && nf == 1 && fz[0]) begin
      par = 0;
      mi = 0;
      for (int i = 0; i < mm; i++) begin
        x[i] = s[i];
        par ^= s[i];
        if (m[i] < m[mi]) mi = i;
      end
      if (par) x[mi] = ~x[mi];
    end else begin
      h = mm / 2;
      lv = $clog2(mm);
      lim = (1 << (qs[lv-1] - 1)) - 1;
      fs = new[h]; fm = new[h]; gs = new[h]; gm = new[h]; fz0 = new[h]; fz1 = new[h];
      for (int i = 0; i < h; i++) begin
        fs[i] = s[2*i] ^ s[2*i+1];
        fm[i] = clampi((m[2*i] < m[2*i+1]) ? m[2*i] : m[2*i+1], lim);
        fz0[i] = fz[2*i];
        fz1[i] = fz[2*i+1];
      end
      ref_sc(fs, fm, fz0, qs, maxrep, maxspc, z);
      for (int i = 0; i < h; i++) begin
        va = (s[2*i] ^ z[i]) ? -m[2*i] : m[2*i];
        vb = s[2*i+1] ? -m[2*i+1] : m[2*i+1];
        sum = va + vb;
        if (sum < 0)      gs[i] = 1;
        else if (sum > 0) gs[i] = 0;
        else              gs[i] = ((s[2*i] ^ z[i]) == s[2*i+1]) ? s[2*i+1] : 1'b0;
        gm[i] = clampi(clampi((sum < 0) ? -sum : sum, 15), lim);
      end
      ref_sc(gs, gm, fz1, qs, maxrep, maxspc, x2);
      for (int i = 0; i < h; i++) begin
        x[2*i]   = z[i] ^ x2[i];
        x[2*i+1] = x2[i];
      end
    end
  endfunction

  // Whole decoder: clamp channel LLRs to the top width, decode, extract the data bits.
  function automatic void ref_decode(input bit s[], input int m[], input bit fz[], input int qs[],
                                     input int maxrep, input int maxspc, output bit d[]);
    bit x[];
    int mq[], lim, j, k;
    mq = new[m.size()];
    lim = (1 << (qs[$clog2(m.size())] - 1)) - 1;
    for (int i = 0; i < m.size(); i++) mq[i] = clampi(m[i], lim);
    ref_sc(s, mq, fz, qs, maxrep, maxspc, x);
    k = 0;
    for (int p = 0; p < fz.size(); p++) k += !fz[p];
    d = new[k];
    j = 0;
    for (int p = 0; p < fz.size(); p++) if (!fz[p]) begin d[j] = x[p]; j++; end
  endfunction

  // BPSK over an approximately Gaussian channel (sum of 4 uniforms), integer LLR in
  // sign-magnitude form with a 4-bit magnitude. amp = LLR of a noiseless symbol,
  // spread = half-width of each uniform term.
  function automatic void channel(input bit x[], input int amp, input int spread,
                                  output bit s[], output int m[]);
    int y;
    s = new[x.size()];
    m = new[x.size()];
    for (int i = 0; i < x.size(); i++) begin
      y = x[i] ? -amp : amp;
      for (int r = 0; r < 4; r++) y += int'($urandom_range(2 * spread, 0)) - spread;
      s[i] = (y < 0);
      m[i] = clampi((y < 0) ? -y : y, 15);
    end
  endfunction

endpackage
