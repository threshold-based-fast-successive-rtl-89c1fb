// srfsc_sched_pkg: off-line tools for the SRFSC decoder testbenches (not hardware).
//
//   * ga_mean / build_info_set: Gaussian-approximation construction. The mean LLR of every tree
//     node follows the recursion m_n = 2/sigma^2, m_left = phi^-1(1 - (1 - phi(m))^2),
//     m_right = 2m; phi uses the common two-piece approximation
//     phi(x) = exp(-0.4527 x^0.86 + 0.0218) for x < 10 and sqrt(pi/x) exp(-x/4) (1 - 10/(7x))
//     otherwise. The K leaves with the largest mean are information bits.
//   * compile: walks the decoding tree and emits the decoder schedule. Rate-0, Rate-1 and
//     EG-PC nodes become leaf instructions; a node whose left child is Rate-0 or REP starts an
//     SR node, followed down the right branch while left children stay Rate-0/REP and |S| stays
//     within 16; every other node is a general node (F, left, G, right, C), which gets a TA test
//     when its mean satisfies m >= m_min, with T = |-m + c sqrt(2m)| in LLR units.
//   * encode / crc_append / awgn helpers for the frames.
package srfsc_sched_pkg;
  import srfsc_pkg::*;

  instr_t prog_q[$];
  bit     dmask[];        // 1 = information bit
  real    mnode[];        // mean LLR of node (level j, index i) at [2^(LOG_N-j) + i]
  int     log_n;
  real    ta_c;           // c of the threshold
  real    ta_mmin;        // minimum mean for a TA test; huge disables TA
  real    llr_scale;      // fixed-point LLR = real LLR * llr_scale
  real    thr_gain = 1.0; // extra factor on T (tests force wrong hard decisions with 0)

  // node statistics of the last compile
  int n_leaf_r0, n_leaf_r1, n_egpc, n_egpc_rep, n_sr, n_sr_multi, n_general, n_ta_nodes;

  function automatic real phi(real x);
    if (x <= 0.0) return 1.0;
    if (x < 10.0) return $exp(-0.4527 * $pow(x, 0.86) + 0.0218);
    return $sqrt(3.14159265358979 / x) * $exp(-x / 4.0) * (1.0 - 10.0 / (7.0 * x));
  endfunction

  function automatic real phi_inv(real y);
    real lo = 1.0e-9, hi = 1.0e5, mid;
    for (int it = 0; it < 200; it++) begin
      mid = (lo + hi) / 2.0;
      if (phi(mid) > y) lo = mid; else hi = mid;
    end
    return (lo + hi) / 2.0;
  endfunction

  // means of all nodes; node (j, i), i = 0..2^(n-j)-1, stored at [2^(n-j) + i]
  function automatic void ga_mean(int n, real sigma2);
    int nn = 1 << n;
    mnode = new[2 * nn];
    mnode[1] = 2.0 / sigma2;
    for (int j = n; j > 0; j--) begin
      for (int i = 0; i < (1 << (n - j)); i++) begin
        real m = mnode[(1 << (n - j)) + i];
        mnode[(1 << (n - j + 1)) + 2 * i]     = phi_inv(1.0 - (1.0 - phi(m)) ** 2);
        mnode[(1 << (n - j + 1)) + 2 * i + 1] = 2.0 * m;
      end
    end
  endfunction

  function automatic void build_info_set(int n, int k, real sigma2);
    int nn = 1 << n;
    real lm[];
    int  idx[];
    log_n = n;
    ga_mean(n, sigma2);
    lm = new[nn];
    idx = new[nn];
    for (int i = 0; i < nn; i++) begin
      lm[i] = mnode[nn + i];
      idx[i] = i;
    end
    // selection sort for the k best leaves (small sizes only)
    dmask = new[nn];
    for (int i = 0; i < nn; i++) dmask[i] = 0;
    for (int t = 0; t < k; t++) begin
      int b = -1;
      for (int i = 0; i < nn; i++)
        if (!dmask[i] && (b < 0 || lm[i] > lm[b])) b = i;
      dmask[b] = 1;
    end
  endfunction

  function automatic real node_mean(int j, int off);
    return mnode[(1 << (log_n - j)) + (off >> j)];
  endfunction

  function automatic bit all_val(int off, int len, bit v);
    for (int i = 0; i < len; i++) if (dmask[off + i] != v) return 0;
    return 1;
  endfunction

  function automatic bit is_r0(int off, int j);  return all_val(off, 1 << j, 0); endfunction
  function automatic bit is_r1(int off, int j);  return all_val(off, 1 << j, 1); endfunction
  function automatic bit is_rep(int off, int j);
    if (j == 0) return 0;
    return all_val(off, (1 << j) - 1, 0) && dmask[off + (1 << j) - 1];
  endfunction

  // EG-PC: leftmost node at level q (Rate-0 or REP), every other bit information
  function automatic bit is_egpc(int off, int j, output int q, output bit rep);
    q = 0; rep = 0;
    if (j == 0 || is_r1(off, j)) return 0;
    for (int qq = 0; qq < j; qq++) begin
      if (all_val(off + (1 << qq), (1 << j) - (1 << qq), 1)) begin
        if (is_r0(off, qq))  begin q = qq; rep = 0; return 1; end
        if (is_rep(off, qq)) begin q = qq; rep = 1; return 1; end
      end
    end
    return 0;
  endfunction

  function automatic instr_t mk(op_e op, int j, int r = 0, bit side = 0);
    instr_t x;
    x = '0;
    x.op = op; x.j = LVLW'(j); x.r = LVLW'(r); x.side = side;
    return x;
  endfunction

  function automatic void gen(int off, int j, bit side);
    int q; bit rep;
    if (is_r0(off, j)) begin prog_q.push_back(mk(OP_R0, j, 0, side)); n_leaf_r0++; return; end
    if (is_r1(off, j)) begin prog_q.push_back(mk(OP_R1, j, 0, side)); n_leaf_r1++; return; end
    if (is_egpc(off, j, q, rep)) begin
      instr_t x = mk(OP_EGPC, j, q, side);
      x.rep_left = rep;
      prog_q.push_back(x);
      n_egpc++; if (rep) n_egpc_rep++;
      return;
    end
    if (j >= 2 && (is_r0(off, j - 1) || is_rep(off, j - 1))) begin
      int k = j, cur = off, w = 0;
      logic [15:0] ef = '0;
      instr_t x;
      while (k > 0) begin
        int dq; bit drep;
        if (is_r0(cur, k) || is_r1(cur, k) || is_egpc(cur, k, dq, drep)) break;
        if (is_r0(cur, k - 1)) begin cur += 1 << (k - 1); k--; end
        else if (is_rep(cur, k - 1) && w < LOG_SMAX) begin
          ef[k - 1] = 1'b1; w++; cur += 1 << (k - 1); k--;
        end else break;
      end
      x = mk(OP_SRS, j, k, 0);
      x.eta_free = ef;
      prog_q.push_back(x);
      n_sr++; if (w > 0) n_sr_multi++;
      gen(cur, k, 1'b1);
      prog_q.push_back(mk(OP_SRX, j, k, side));
      return;
    end
    begin : general
      int fi;
      instr_t x = mk(OP_F, j, 0, side);
      real m = node_mean(j, off);
      n_general++;
      if (m >= ta_mmin) begin
        real t = m - ta_c * $sqrt(2.0 * m);
        int ti;
        if (t < 0) t = -t;
        ti = int'(t * llr_scale * thr_gain);
        if (ti > 255) ti = 255;
        x.ta_en = 1'b1;
        x.thr = 8'(ti);
        n_ta_nodes++;
      end
      fi = prog_q.size();
      prog_q.push_back(x);
      gen(off, j - 1, 1'b0);
      prog_q.push_back(mk(OP_G, j, 0, side));
      gen(off + (1 << (j - 1)), j - 1, 1'b1);
      prog_q.push_back(mk(OP_C, j, 0, side));
      x = prog_q[fi];
      x.skip = PCW'(prog_q.size());
      prog_q[fi] = x;
    end
  endfunction

  function automatic void compile(int n);
    prog_q.delete();
    n_leaf_r0 = 0; n_leaf_r1 = 0; n_egpc = 0; n_egpc_rep = 0; n_sr = 0; n_sr_multi = 0;
    n_general = 0; n_ta_nodes = 0;
    gen(0, n, 1'b0);
    prog_q.push_back(mk(OP_END, 0));
  endfunction

  // u -> x through the tree (beta_j[2k] = L[k] ^ R[k], beta_j[2k+1] = R[k], 0-based)
  function automatic void encode(input bit u[], output bit x[]);
    int nn = u.size();
    bit a[];
    a = new[nn];
    foreach (u[i]) a[i] = u[i];
    for (int m = 2; m <= nn; m *= 2) begin
      bit t[];
      t = new[nn];
      for (int o = 0; o < nn; o += m)
        for (int k = 0; k < m / 2; k++) begin
          t[o + 2 * k]     = a[o + k] ^ a[o + m / 2 + k];
          t[o + 2 * k + 1] = a[o + m / 2 + k];
        end
      a = t;
    end
    x = a;
  endfunction

  // CRC remainder by polynomial long division (poly without the leading term)
  function automatic int unsigned crc_of(input bit msg[], input int len, input int L,
                                         input int unsigned poly);
    int unsigned rem = 0;
    for (int i = 0; i < len; i++) begin
      bit fb = ((rem >> (L - 1)) & 1) ^ msg[i];
      rem = (rem << 1) & ((1 << L) - 1);
      if (fb) rem ^= poly;
    end
    return rem;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  function automatic int qllr(real v, int qw);
    int mx = (1 << (qw - 1)) - 1;
    int q = int'(v * llr_scale);
    if (q > mx) q = mx;
    if (q < -mx) q = -mx;
    return q;
  endfunction

  // ------------------------------------------------------------------ reference decoder
  // Recursive model of the same decoding rules, written on arrays, used as the golden model:
  // min-sum f, saturating g, Rate-0/Rate-1/EG-PC (Wagner) leaves, SR nodes with path metric
  // sum |alpha_src| (full precision) and saturated source LLRs, TA tests on general nodes.
  // ref_cycles adds the cycles the sequencer should spend: ceil(M/P) per pass over M values.
  int ref_p;
  int ref_qw;
  bit ref_ta;
  longint ref_cycles;
  int ref_ta_taken;

  function automatic int satq(longint v);
    longint mx = (1 << (ref_qw - 1)) - 1;
    if (v > mx) return int'(mx);
    if (v < -mx) return int'(-mx);
    return int'(v);
  endfunction

  function automatic longint cdiv(longint a);
    return (a + ref_p - 1) / ref_p;
  endfunction

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  function automatic bit seqbit(logic [15:0] eta, int j, int r, int p);
    bit s = 0;
    for (int t = 0; t < j - r; t++)
      if (eta[r + t] && !((p >> (j - r - 1 - t)) & 1)) s ^= 1;
    return s;
  endfunction

  function automatic void ref_dec(input int a[], input int off, input int j, output bit b[]);
    int nj = 1 << j;
    int q; bit rep;
    b = new[nj];
    if (is_r0(off, j)) begin
      foreach (b[i]) b[i] = 0;
      ref_cycles += cdiv(nj); return;
    end
    if (is_r1(off, j)) begin
      foreach (b[i]) b[i] = a[i] < 0;
      ref_cycles += cdiv(nj); return;
    end
    if (is_egpc(off, j, q, rep)) begin
      int bl = 1 << (j - q);
      int par[]; int mn[]; int ix[];
      longint zs = 0; bit z;
      par = new[1 << q]; mn = new[1 << q]; ix = new[1 << q];
      for (int k = 0; k < (1 << q); k++) begin
        par[k] = 0; mn[k] = 1 << 30; ix[k] = 0;
        for (int m = 0; m < bl; m++) begin
          int v = a[k * bl + m];
          b[k * bl + m] = v < 0;
          par[k] ^= (v < 0);
          if (iabs(v) < mn[k]) begin mn[k] = iabs(v); ix[k] = k * bl + m; end
        end
        zs += par[k] ? -mn[k] : mn[k];
      end
      z = rep ? (zs < 0) : 0;
      for (int k = 0; k < (1 << q); k++) if (par[k] != z) b[ix[k]] ^= 1;
      ref_cycles += cdiv(nj) + cdiv(1 << q);
      return;
    end
    if (j >= 2 && (is_r0(off, j - 1) || is_rep(off, j - 1))) begin
      int k = j, cur = off, w = 0;
      logic [15:0] ef = '0;
      logic [15:0] best_eta;
      longint best_m;
      int bsz, src[];
      bit bs[];
      while (k > 0) begin
        int dq; bit drep;
        if (is_r0(cur, k) || is_r1(cur, k) || is_egpc(cur, k, dq, drep)) break;
        if (is_r0(cur, k - 1)) begin cur += 1 << (k - 1); k--; end
        else if (is_rep(cur, k - 1) && w < LOG_SMAX) begin
          ef[k - 1] = 1'b1; w++; cur += 1 << (k - 1); k--;
        end else break;
      end
      bsz = 1 << (j - k);
      best_m = -1; best_eta = 0;
      for (int l = 0; l < (1 << w); l++) begin
        logic [15:0] eta = eta_of_path(ef, l);
        longint met = 0;
        for (int kk = 0; kk < (1 << k); kk++) begin
          longint sm = 0;
          for (int m = 0; m < bsz; m++)
            sm += seqbit(eta, j, k, m) ? -a[kk * bsz + m] : a[kk * bsz + m];
          met += sm < 0 ? -sm : sm;
        end
        if (met > best_m) begin best_m = met; best_eta = eta; end
      end
      src = new[1 << k];
      for (int kk = 0; kk < (1 << k); kk++) begin
        longint sm = 0;
        for (int m = 0; m < bsz; m++)
          sm += seqbit(best_eta, j, k, m) ? -a[kk * bsz + m] : a[kk * bsz + m];
        src[kk] = satq(sm);
      end
      ref_cycles += (w > 0 ? 2 : 1) * cdiv(nj);
      ref_dec(src, cur, k, bs);
      for (int o = 0; o < nj; o++) b[o] = bs[o / bsz] ^ seqbit(best_eta, j, k, o % bsz);
      ref_cycles += cdiv(nj);
      return;
    end
    begin : general
      int h = nj / 2;
      int al[], ar[];
      bit bl[], br[];
      real m = node_mean(j, off);
      ref_cycles += cdiv(h);   // F
      if (ref_ta && m >= ta_mmin) begin
        real t = m - ta_c * $sqrt(2.0 * m);
        int ti; bit ok = 1;
        if (t < 0) t = -t;
        ti = int'(t * llr_scale * thr_gain);
        if (ti > 255) ti = 255;
        foreach (a[i]) if (!(iabs(a[i]) > ti)) ok = 0;
        if (ok) begin
          foreach (b[i]) b[i] = a[i] < 0;
          ref_ta_taken++;
          return;
        end
      end
      al = new[h]; ar = new[h];
      for (int k = 0; k < h; k++) begin
        int x = a[2 * k], y = a[2 * k + 1];
        int mg = iabs(x) < iabs(y) ? iabs(x) : iabs(y);
        al[k] = ((x < 0) ^ (y < 0)) ? -mg : mg;
      end
      ref_dec(al, off, j - 1, bl);
      ref_cycles += cdiv(h);   // G
      for (int k = 0; k < h; k++) ar[k] = satq(bl[k] ? a[2*k+1] - a[2*k] : a[2*k+1] + a[2*k]);
      ref_dec(ar, off + h, j - 1, br);
      ref_cycles += cdiv(h);   // C
      for (int k = 0; k < h; k++) begin
        b[2 * k] = bl[k] ^ br[k];
        b[2 * k + 1] = br[k];
      end
    end
  endfunction
endpackage
