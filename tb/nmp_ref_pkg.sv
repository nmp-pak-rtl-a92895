// nmp_ref_pkg: reference model for the testbenches. It works on DNA text
// (SystemVerilog strings of A, C, T, G) rather than on the packed 2-bit
// numbers the hardware uses, so expected values are computed independently
// of the append/shift arithmetic in the design.
package nmp_ref_pkg;
  import nmp_pkg::*;

  localparam string ALPHA = "ACTG";   // code 0..3

  function automatic int code(byte c);
    for (int i = 0; i < 4; i++) if (ALPHA[i] == c) return i;
    return -1;
  endfunction

  function automatic string rand_dna(int n);
    string s = "";
    for (int i = 0; i < n; i++) s = {s, string'(ALPHA[$urandom % 4])};
    return s;
  endfunction

  // text -> hardware encodings
  function automatic kmer_t s2kmer(string s);
    kmer_t k = '0;
    for (int i = 0; i < s.len(); i++) k = (k << 2) | kmer_t'(code(s[i]));
    return k;
  endfunction

  function automatic ext_t s2ext(string s);
    ext_t e = '0;
    e.len = 6'(s.len());
    for (int i = 0; i < s.len(); i++) e.bases = (e.bases << 2) | 58'(code(s[i]));
    return e;
  endfunction

  function automatic string ext2s(ext_t e);
    string s = "";
    for (int i = int'(e.len) - 1; i >= 0; i--) s = {s, string'(ALPHA[e.bases[2*i +: 2]])};
    return s;
  endfunction

  function automatic string kmer2s(kmer_t k);
    string s = "";
    for (int i = KM1 - 1; i >= 0; i--) s = {s, string'(ALPHA[k[2*i +: 2]])};
    return s;
  endfunction

  // lexicographic a > b with A < C < T < G
  function automatic bit greater(string a, string b);
    for (int i = 0; i < a.len() && i < b.len(); i++)
      if (code(a[i]) != code(b[i])) return code(a[i]) > code(b[i]);
    return a.len() > b.len();
  endfunction

  // A MacroNode as text.
  typedef struct {
    string   kmer;
    bit      valid;
    int      npre, nsuf;
    string   pre [MAXE];
    string   suf [MAXE];
    int      pcnt [MAXE];
    int      scnt [MAXE];
    int      wiring [MAXE][MAXE];
    int      pnbr [MAXE];
    int      snbr [MAXE];
  } rmn_t;

  // Words 0..19 of the slot.
  function automatic void mn2words(rmn_t m, ref word_t w [20]);
    for (int i = 0; i < 20; i++) w[i] = '0;
    w[0] = {2'b0, s2kmer(m.kmer)};
    w[1] = {m.valid, 55'b0, 4'(m.npre), 4'(m.nsuf)};
    for (int i = 0; i < MAXE; i++) begin
      w[2+i] = (i < m.npre) ? s2ext(m.pre[i]) : '0;
      w[6+i] = (i < m.nsuf) ? s2ext(m.suf[i]) : '0;
      w[10][16*i +: 16] = 16'(m.pcnt[i]);
      w[11][16*i +: 16] = 16'(m.scnt[i]);
      for (int j = 0; j < MAXE; j++) w[12+i][16*j +: 16] = 16'(m.wiring[i][j]);
      w[16 + i/2][32*(i%2) +: 32] = 32'(m.pnbr[i]);
      w[18 + i/2][32*(i%2) +: 32] = 32'(m.snbr[i]);
    end
  endfunction

  function automatic void words2mn(word_t w [20], ref rmn_t m);
    m.kmer  = kmer2s(w[0][KMER_W-1:0]);
    m.valid = w[1][63];
    m.npre  = int'(w[1][7:4]);
    m.nsuf  = int'(w[1][3:0]);
    for (int i = 0; i < MAXE; i++) begin
      m.pre[i]  = ext2s(ext_t'(w[2+i]));
      m.suf[i]  = ext2s(ext_t'(w[6+i]));
      m.pcnt[i] = int'(w[10][16*i +: 16]);
      m.scnt[i] = int'(w[11][16*i +: 16]);
      for (int j = 0; j < MAXE; j++) m.wiring[i][j] = int'(w[12+i][16*j +: 16]);
      m.pnbr[i] = int'(w[16 + i/2][32*(i%2) +: 32]);
      m.snbr[i] = int'(w[18 + i/2][32*(i%2) +: 32]);
    end
  endfunction

  // Neighbours as text.
  function automatic string pred_s(string k, string p);
    string s = {p, k};
    return s.substr(0, KM1 - 1);
  endfunction
  function automatic string succ_s(string k, string x);
    string s = {k, x};
    return s.substr(s.len() - KM1, s.len() - 1);
  endfunction

  // Reference invalidation rule.
  function automatic bit ref_invalidate(rmn_t m, output bit guarded);
    bit largest = 1, elig, fits;
    int mp = 0, ms = 0;
    elig = m.valid && m.npre > 0 && m.nsuf > 0;
    for (int i = 0; i < m.npre; i++) begin
      if (m.pre[i].len() == 0) elig = 0;
      if (!greater(m.kmer, pred_s(m.kmer, m.pre[i]))) largest = 0;
      if (m.pre[i].len() > mp) mp = m.pre[i].len();
    end
    for (int i = 0; i < m.nsuf; i++) begin
      if (m.suf[i].len() == 0) elig = 0;
      if (!greater(m.kmer, succ_s(m.kmer, m.suf[i]))) largest = 0;
      if (m.suf[i].len() > ms) ms = m.suf[i].len();
    end
    fits    = (mp + ms) <= EXT_MAX;
    guarded = elig && largest && !fits;
    return elig && largest && fits;
  endfunction

  // Reference TransferNode in text form.
  typedef struct {
    bit    upd_prefix;
    int    dst_idx;
    string dst_kmer;
    string match_ext;
    string new_ext;
    int    count;
    int    new_nbr;
  } rtn_t;

  function automatic bit tn_equal(tn_t t, rtn_t r);
    return (t.kind == (r.upd_prefix ? TN_UPD_PREFIX : TN_UPD_SUFFIX))
        && (int'(t.dst_idx) == r.dst_idx) && (kmer2s(t.dst_kmer) == r.dst_kmer)
        && (ext2s(t.match_ext) == r.match_ext) && (ext2s(t.new_ext) == r.new_ext)
        && (int'(t.count) == r.count) && (int'(t.new_nbr) == r.new_nbr);
  endfunction

  // The TransferNodes an invalidated MacroNode must produce, in wiring order.
  function automatic void ref_extract(rmn_t m, ref rtn_t out [$]);
    out.delete();
    for (int i = 0; i < MAXE; i++)
      for (int j = 0; j < MAXE; j++)
        if (i < m.npre && j < m.nsuf && m.wiring[i][j] != 0) begin
          rtn_t a, b;
          string tail, head;
          tail = m.kmer.substr(KM1 - m.pre[i].len(), KM1 - 1);
          head = m.kmer.substr(0, m.suf[j].len() - 1);
          a = '{0, m.pnbr[i], pred_s(m.kmer, m.pre[i]), tail, {tail, m.suf[j]}, m.wiring[i][j], m.snbr[j]};
          b = '{1, m.snbr[j], succ_s(m.kmer, m.suf[j]), head, {m.pre[i], head}, m.wiring[i][j], m.pnbr[i]};
          out.push_back(a);
          out.push_back(b);
        end
  endfunction

  // PaK-graph of a genome read with coverage cov: one MacroNode per distinct
  // (k-1)-mer, indexed in ascending (k-1)-mer order; each has the preceding
  // base as prefix and the following base as suffix (none at the two ends).
  // ok is 0 if some (k-1)-mer occurs twice (the caller then draws again).
  function automatic void build_graph(string g, int cov, ref rmn_t nodes [$], output int start_idx, output bit ok);
    kmer_t keys [$];
    kmer_t at [$];
    int    idx_of [kmer_t];
    int    pos_of [kmer_t];
    int    n;
    ok = 1;
    n  = g.len() - KM1 + 1;
    nodes.delete();
    for (int p = 0; p < n; p++) begin
      kmer_t k;
      k = s2kmer(g.substr(p, p + KM1 - 1));
      if (pos_of.exists(k)) begin ok = 0; return; end
      pos_of[k] = p;
      keys.push_back(k);
      at.push_back(k);
    end
    keys.sort();
    foreach (keys[i]) idx_of[keys[i]] = i;
    foreach (keys[i]) begin
      rmn_t m;
      int   p;
      p = pos_of[keys[i]];
      m.kmer  = g.substr(p, p + KM1 - 1);
      m.valid = 1;
      m.npre  = (p > 0) ? 1 : 0;
      m.nsuf  = (p < n - 1) ? 1 : 0;
      for (int a = 0; a < MAXE; a++) begin
        m.pre[a] = ""; m.suf[a] = ""; m.pcnt[a] = 0; m.scnt[a] = 0; m.pnbr[a] = 0; m.snbr[a] = 0;
        for (int b = 0; b < MAXE; b++) m.wiring[a][b] = 0;
      end
      if (p > 0)     begin m.pre[0] = g.substr(p - 1, p - 1);    m.pcnt[0] = cov; m.pnbr[0] = idx_of[at[p-1]]; end
      if (p < n - 1) begin m.suf[0] = g.substr(p + KM1, p + KM1); m.scnt[0] = cov; m.snbr[0] = idx_of[at[p+1]]; end
      if (p > 0 && p < n - 1) m.wiring[0][0] = cov;
      nodes.push_back(m);
    end
    start_idx = idx_of[at[0]];
  endfunction
endpackage
