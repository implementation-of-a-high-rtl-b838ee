// srfsc_ref_pkg: software side of the SR-node Fast-SSC decoder testbenches.
//
// * pw_construct: frozen set of a polar code P(N,K) by polarization weight,
//   w(i) = sum_b bit_b(i) * 2^(b/4); the N-K lowest weights are frozen.
// * compile: the instruction list of a code (one instruction per leaf of the
//   pruned decoding tree, visiting order) and the table of repetition
//   sequences addressed by NodeType. A node becomes an SR leaf when, going
//   down its right-most path through left children that are Rate-0 or
//   repetition nodes, a source node "frozen bits at the left, then only
//   information bits" is found with 0..3 frozen bits and the SR module's
//   limits hold; otherwise it is split in two.
// * encode: x = u G for the tree convention of the decoder
//   (parent[2k] = left[k] ^ right[k], parent[2k+1] = right[k]).
// * ref_sr / ref_decode: integer model of SR-node decoding and of the whole
//   decoding schedule with the same LLR widths (6-bit sign and magnitude,
//   saturation after every addition), used as the expected values.
package srfsc_ref_pkg;
  import srfsc_pkg::*;

  localparam int P_REF  = 64;
  localparam int SR_LAT = 2;
  typedef logic [3:0][P_REF-1:0] seqs_t;

  bit      frozen [];
  int      n_code;
  instr_t  prog   [$];
  seqs_t   rs_tab [7];   // rs_tab[t-1] = sequences of NodeType t
  int      rs_cnt;       // NodeTypes in use

  // Leaves of each kind in the last compiled program.
  int cnt_rate0, cnt_rate1, cnt_sr, cnt_sr_seq, cnt_sr_step1;
  int cnt_fro [4];

  // ------------------------------------------------------------ code
  function automatic void pw_construct(int n, int k);
    real w [];
    int  rank;
    n_code = n;
    w      = new[n];
    frozen = new[n];
    for (int i = 0; i < n; i++) begin
      w[i] = 0.0;
      for (int b = 0; b < 16; b++)
        if ((i >> b) & 1) w[i] += 2.0 ** (real'(b) / 4.0);
    end
    for (int i = 0; i < n; i++) begin
      rank = 0;
      for (int j = 0; j < n; j++)
        if (w[j] < w[i] || (w[j] == w[i] && j < i)) rank++;
      frozen[i] = (rank < n - k);
    end
  endfunction

  function automatic int nfrozen(int j, int b);
    int c = 0;
    for (int i = 0; i < (1 << j); i++) c += frozen[b + i];
    return c;
  endfunction

  // Number of leading frozen bits if the node is "b0 frozen, then all
  // information" with b0 <= 3, else -1.
  function automatic int src_fro(int j, int b);
    int b0 = 0;
    while (b0 < (1 << j) && frozen[b + b0]) b0++;
    for (int i = b0; i < (1 << j); i++) if (frozen[b + i]) return -1;
    if (b0 > 3) return -1;
    return b0;
  endfunction

  function automatic bit is_rep(int j, int b);
    if (frozen[b + (1 << j) - 1]) return 0;
    return nfrozen(j, b) == (1 << j) - 1;
  endfunction

  // Repetition sequence l of an SR node at level j with source level r;
  // eta_lvl[k] = 1 where the left child at level k+1 is a repetition node.
  function automatic logic [P_REF-1:0] rep_seq(int j, int r, bit rep_at [8], int l);
    logic [P_REF-1:0] s = '0;
    int rank = 0;
    bit eta [8];
    for (int k = r; k < j; k++) begin
      eta[k] = 0;
      if (rep_at[k]) begin
        eta[k] = (l >> rank) & 1;
        rank++;
      end
    end
    for (int m = 0; m < (1 << (j - r)); m++)
      for (int k = r; k < j; k++)
        if (((m >> (j - 1 - k)) & 1) == 0) s[m] ^= eta[k];
    return s;
  endfunction

  function automatic bit try_leaf(int j, int b, int p, output instr_t ins);
    int l1 = $clog2(2 * p);
    int k, c, w, fro;
    bit rep_at [8];
    seqs_t sq;
    ins = '0;
    if (j < 1 || j > l1) return 0;
    if (nfrozen(j, b) == 0) begin          // Rate-1
      ins.sr_stage = 3'(j); ins.src_stage = 3'(j);
      return 1;
    end
    if (nfrozen(j, b) == (1 << j)) begin   // Rate-0
      ins.sr_stage = 3'(j); ins.src_stage = 3'd1; ins.fro_num = 2'd2;
      return 1;
    end
    k = j; c = b; w = 0;
    for (int i = 0; i < 8; i++) rep_at[i] = 0;
    while (k >= 1) begin
      fro = src_fro(k, c);
      if (fro >= 0 && !(k == 1 && fro > 2) && !(fro == 0 && k == j) &&
          w <= 2 && (j + w) <= l1 && (j == k || (k + w) <= 4) &&
          !(fro == 3 && w > 0) && !(fro == 2 && w > 1)) begin
        ins.sr_stage = 3'(j); ins.src_stage = 3'(k);
        ins.fro_num = 2'(fro); ins.seq_num = 2'(w);
        ins.node_type = '0;
        if (w > 0) begin
          int t;
          t = -1;
          sq = '0;
          for (int l = 0; l < (1 << w); l++) sq[l] = rep_seq(j, k, rep_at, l);
          for (int i = 0; i < rs_cnt; i++) if (rs_tab[i] == sq) t = i;
          if (t < 0) begin
            if (rs_cnt >= 7) return 0;
            rs_tab[rs_cnt] = sq;
            t = rs_cnt;
            rs_cnt++;
          end
          ins.node_type = 3'(t + 1);
        end
        return 1;
      end
      if (k < 2) break;
      if (nfrozen(k - 1, c) == (1 << (k - 1))) rep_at[k - 1] = 0;
      else if (is_rep(k - 1, c)) begin rep_at[k - 1] = 1; w++; end
      else break;
      c = c + (1 << (k - 1));
      k--;
    end
    return 0;
  endfunction

  function automatic void compile(int n, int p);
    int stk_j [$], stk_b [$];
    int j, b;
    instr_t ins;
    prog.delete(); rs_cnt = 0;
    cnt_rate0 = 0; cnt_rate1 = 0; cnt_sr = 0; cnt_sr_seq = 0; cnt_sr_step1 = 0;
    for (int i = 0; i < 4; i++) cnt_fro[i] = 0;
    stk_j.push_back($clog2(n)); stk_b.push_back(0);
    while (stk_j.size() > 0) begin
      j = stk_j.pop_back(); b = stk_b.pop_back();
      if (try_leaf(j, b, p, ins)) begin
        prog.push_back(ins);
        if (ins.fro_num == 2'd0 && ins.seq_num == 0 && ins.sr_stage == ins.src_stage) cnt_rate1++;
        else if (ins.fro_num == 2'd2 && ins.src_stage == 3'd1 && ins.seq_num == 0) cnt_rate0++;
        else begin
          cnt_sr++;
          cnt_fro[ins.fro_num]++;
          if (ins.seq_num != 0) cnt_sr_seq++;
          if (ins.sr_stage != ins.src_stage) cnt_sr_step1++;
        end
      end else begin
        if (j == 0) $fatal(1, "leaf of one bit at %0d cannot be coded", b);
        stk_j.push_back(j - 1); stk_b.push_back(b + (1 << (j - 1)));
        stk_j.push_back(j - 1); stk_b.push_back(b);
      end
    end
  endfunction

  // ------------------------------------------------------------ encoder
  function automatic void encode(input bit u [], output bit x []);
    int n = u.size();
    bit t [];
    x = new[n];
    foreach (u[i]) x[i] = u[i];
    for (int s = 0; (1 << s) < n; s++) begin   // nodes of 2^s bits -> 2^(s+1)
      t = new[n];
      for (int base = 0; base < n; base += (1 << (s + 1)))
        for (int k = 0; k < (1 << s); k++) begin
          t[base + 2*k]     = x[base + k] ^ x[base + (1 << s) + k];
          t[base + 2*k + 1] = x[base + (1 << s) + k];
        end
      x = t;
    end
  endfunction

  // ------------------------------------------------------------ arithmetic
  function automatic int sat(int v, int m);
    return (v > m) ? m : ((v < -m) ? -m : v);
  endfunction
  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction
  function automatic int ff(int a, int b);
    int m = (iabs(a) < iabs(b)) ? iabs(a) : iabs(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction
  function automatic int gg(int a, int b, bit beta);
    return sat((beta ? -a : a) + b, 31);
  endfunction
  function automatic bit hd(int a);
    return a < 0;
  endfunction

  // Pairwise tree sum of v[lo .. lo+len-1], saturating each layer at +-lim.
  function automatic int tree_sum(int v [], int lo, int len, int lim);
    int t [];
    t = new[len];
    for (int i = 0; i < len; i++) t[i] = v[lo + i];
    while (len > 1) begin
      for (int i = 0; i < len / 2; i++) t[i] = sat(t[2*i] + t[2*i+1], lim);
      len = len / 2;
    end
    return t[0];
  endfunction

  // ------------------------------------------------------------ SR node
  // Decodes one SR node from its 2^SRstage LLRs a[]; returns 2^SRstage bits.
  function automatic void ref_sr(input int a [], input instr_t ins, input seqs_t sq,
                                 output bit est []);
    int j = ins.sr_stage, r = ins.src_stage, w = ins.seq_num, fro = ins.fro_num;
    int d = j - r;
    int src [], msum [4], blk [], lhat, spc_len, nspc, fv [4], mp [4], minpos, par_sum;
    bit h [], par;
    src = new[(1 << (r + w))];
    blk = new[(1 << d)];
    for (int l = 0; l < (1 << w); l++)
      for (int k = 0; k < (1 << r); k++) begin
        for (int m = 0; m < (1 << d); m++) begin
          blk[m] = sq[l][m] ? -a[k * (1 << d) + m] : a[k * (1 << d) + m];
        end
        src[l * (1 << r) + k] = (d == 0) ? a[k] : tree_sum(blk, 0, (1 << d), 31);
      end
    // Step 3: sum of magnitudes per sequence, largest wins (lowest index on a tie)
    lhat = 0;
    if (w > 0) begin
      int mags [];
      mags = new[(1 << (r + w))];
      foreach (src[i]) mags[i] = iabs(src[i]);
      for (int l = 0; l < (1 << w); l++) msum[l] = tree_sum(mags, l * (1 << r), (1 << r), 63);
      for (int l = 1; l < (1 << w); l++) if (msum[l] > msum[lhat]) lhat = l;
    end
    // Step 2: hard decision, SPC parity check, flip the least reliable bit
    h = new[src.size()];
    foreach (src[i]) h[i] = hd(src[i]);
    if (fro > 0) begin
      spc_len = 1 << (r + 1 - fro);
      nspc    = src.size() / spc_len;
      for (int g = 0; g < nspc; g++) begin
        fv[g] = src[g * spc_len];
        minpos = g * spc_len;
        for (int i = 1; i < spc_len; i++) begin
          fv[g] = ff(fv[g], src[g * spc_len + i]);
          if (iabs(src[g * spc_len + i]) < iabs(src[minpos])) minpos = g * spc_len + i;
        end
        mp[g] = minpos;
      end
      par = 0;
      if (fro == 3) begin
        par_sum = sat(sat(fv[0] + fv[1], 31) + sat(fv[2] + fv[3], 31), 31);
        par = hd(par_sum);
      end
      for (int g = 0; g < nspc; g++) begin
        bit p;
        p = 0;
        for (int i = 0; i < spc_len; i++) p ^= h[g * spc_len + i];
        if (p != par) h[mp[g]] = ~h[mp[g]];
      end
    end
    est = new[(1 << j)];
    for (int k = 0; k < (1 << r); k++)
      for (int m = 0; m < (1 << d); m++)
        est[k * (1 << d) + m] = h[lhat * (1 << r) + k] ^ sq[lhat][m];
  endfunction

  // Decodes one leaf (Rate-0, Rate-1 or SR node).
  function automatic void ref_leaf(input int a [], input instr_t ins, output bit est [],
                                   output int cyc);
    int j = ins.sr_stage;
    est = new[(1 << j)];
    if (ins.fro_num == 2'd0 && ins.seq_num == 0 && ins.sr_stage == ins.src_stage) begin
      foreach (est[i]) est[i] = hd(a[i]);
      cyc = 1;
    end else if (ins.fro_num == 2'd2 && ins.src_stage == 3'd1 && ins.seq_num == 0) begin
      foreach (est[i]) est[i] = 0;
      cyc = 1;
    end else begin
      seqs_t sq;
      sq = '0;
      for (int t = 1; t < 8; t++) if (int'(ins.node_type) == t) sq = rs_tab[t - 1];
      ref_sr(a, ins, sq, est);
      cyc = 1 + SR_LAT;
    end
  endfunction

  // ------------------------------------------------------------ decoder
  // Whole-frame model following the SC schedule of the instruction list.
  // Returns the codeword and the number of cycles the decoder should take.
  function automatic void ref_decode(input int ch [], input int p, output bit cw [],
                                     output int cycles);
    int n = ch.size(), ln = $clog2(n);
    int alpha [][];
    bit bl [][];
    bit cur_b [], t [];
    int cur, idx, pc, s, lvl, c, gl;
    bit est [];
    alpha = new[ln + 1];
    bl    = new[ln + 1];
    for (int l = 0; l <= ln; l++) begin
      alpha[l] = new[(1 << l)];
      bl[l]    = new[(1 << l)];
    end
    foreach (ch[i]) alpha[ln][i] = ch[i];
    cur = ln; idx = 0; pc = 0; cycles = 0;
    forever begin
      s = prog[pc].sr_stage;
      while (cur > s) begin
        for (int k = 0; k < (1 << (cur - 1)); k++)
          alpha[cur-1][k] = ff(alpha[cur][2*k], alpha[cur][2*k+1]);
        cycles += ((1 << cur) > 2 * p) ? (1 << cur) / (2 * p) : 1;
        cur--;
      end
      begin
        int a [];
        a = new[(1 << s)];
        foreach (a[i]) a[i] = alpha[s][i];
        ref_leaf(a, prog[pc], est, c);
        cycles += c;
      end
      cur_b = est;
      lvl = s;
      while (lvl < ln) begin
        if ((idx >> lvl) & 1) begin
          t = new[(1 << (lvl + 1))];
          for (int k = 0; k < (1 << lvl); k++) begin
            t[2*k]   = bl[lvl][k] ^ cur_b[k];
            t[2*k+1] = cur_b[k];
          end
          cur_b = t;
          lvl++;
        end else begin
          for (int k = 0; k < (1 << lvl); k++) bl[lvl][k] = cur_b[k];
          break;
        end
      end
      if (lvl == ln) begin
        cw = cur_b;
        return;
      end
      idx += (1 << s);
      pc++;
      gl = 1;
      while (((idx >> (gl - 1)) & 1) == 0) gl++;
      for (int k = 0; k < (1 << (gl - 1)); k++)
        alpha[gl-1][k] = gg(alpha[gl][2*k], alpha[gl][2*k+1], bl[gl-1][k]);
      cycles += ((1 << gl) > 2 * p) ? (1 << gl) / (2 * p) : 1;
      cur = gl - 1;
    end
  endfunction

  // Gaussian sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1 << 30, 1)) ) / real'(1 << 30);
    u2 = (real'($urandom_range(1 << 30, 0)) ) / real'(1 << 30);
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK over AWGN at Eb/N0 (dB) for rate k/n; channel LLRs quantised to
  // integers in [-7, 7] (4-bit sign and magnitude, no fraction bits).
  function automatic void channel(input bit x [], input real ebn0_db, input real rate,
                                  output int llr []);
    real sigma, y, l;
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    llr = new[x.size()];
    foreach (x[i]) begin
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      l = 2.0 * y / (sigma * sigma);
      llr[i] = sat(int'(l), 7);
    end
  endfunction

  function automatic llr_t to_llr(int v);
    llr_t r;
    r.s = v < 0;
    r.m = MW'(iabs(v));
    return r;
  endfunction

endpackage
