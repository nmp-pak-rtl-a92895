// nmp_pkg: types, memory layout and append arithmetic shared by the
// near-memory Iterative Compaction processing elements.
//
// DNA bases are 2-bit codes A=0, C=1, T=2, G=3 (the order used when the
// invalidation check compares (k-1)-mers). A string of bases is held as an
// unsigned number with its first base in the most significant position, so
// appending string b to string a is (a << 2*len(b)) | b, and comparing two
// (k-1)-mers lexicographically is a plain unsigned compare. k = 32, so a
// (k-1)-mer is 31 bases, 62 bits.
//
// A prefix or suffix ("extension") is one 64-bit word: 6-bit length and up to
// 29 bases, right aligned. A length of 0 means "no neighbour on this side".
//
// Each MacroNode owns a fixed 32-word (256-byte) slot in DRAM at word address
// idx*32. The first ten words are "MN data1" (the (k-1)-mer, a header and
// the prefixes and suffixes); the next ten are "MN data2" (counts, internal
// wiring and the indices of the neighbouring MacroNodes):
//   w0        {2'b0, (k-1)-mer}
//   w1        [63] valid, [7:4] number of prefixes, [3:0] number of suffixes
//   w2..w5    prefix extensions 0..3
//   w6..w9    suffix extensions 0..3
//   w10       prefix counts, 16 bits each, entry 0 in bits 15:0
//   w11       suffix counts
//   w12..w15  wiring: word 12+i holds the count of prefix i wired to suffix j
//             in bits 16j+15:16j
//   w16..w17  index of the MacroNode reached through prefix 0..3 (32 bits each)
//   w18..w19  index of the MacroNode reached through suffix 0..3
// The (k-1)-mer, the base order, the prefix/suffix/count/wiring content and
// the split into data1/data2 follow the paper; the slot size, the field
// packing, the limit of four extensions per side and the neighbour indices
// are this design's choices.
package nmp_pkg;

  localparam int unsigned K         = 32;           // k-mer size
  localparam int unsigned KM1       = K - 1;        // (k-1)-mer length in bases
  localparam int unsigned KMER_W    = 2 * KM1;      // 62 bits
  localparam int unsigned EXT_MAX   = 29;           // bases in one extension word
  localparam int unsigned MAXE      = 4;            // prefixes (and suffixes) per MacroNode
  localparam int unsigned WORD_W    = 64;
  localparam int unsigned SLOT_WORDS  = 32;         // 256-byte MacroNode slot
  localparam int unsigned DATA1_OFF   = 0;
  localparam int unsigned DATA1_WORDS = 10;
  localparam int unsigned DATA2_OFF   = 10;
  localparam int unsigned DATA2_WORDS = 10;
  localparam int unsigned HDR_WORD    = 1;
  localparam int unsigned PRE_WORD    = 2;
  localparam int unsigned SUF_WORD    = 6;
  localparam int unsigned PCNT_WORD   = 10;
  localparam int unsigned SCNT_WORD   = 11;
  localparam int unsigned WIRE_WORD   = 12;
  localparam int unsigned PNBR_WORD   = 16;
  localparam int unsigned SNBR_WORD   = 18;

  typedef logic [KMER_W-1:0]  kmer_t;
  typedef logic [31:0]        mn_idx_t;
  typedef logic [15:0]        cnt_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [39:0]        addr_t;   // DRAM word address

  typedef struct packed {
    logic [5:0]  len;
    logic [57:0] bases;
  } ext_t;

  // Base codes as printed in the invalidation-check example.
  typedef enum logic [1:0] {BASE_A = 2'd0, BASE_C = 2'd1, BASE_T = 2'd2, BASE_G = 2'd3} base_t;

  // MN data1: what P1 reads.
  typedef struct packed {
    kmer_t              kmer;
    logic               valid;
    logic [3:0]         npre;
    logic [3:0]         nsuf;
    ext_t [MAXE-1:0]    pre;
    ext_t [MAXE-1:0]    suf;
  } mn_data1_t;

  // MN data2: what P2 adds.
  typedef struct packed {
    cnt_t [MAXE-1:0]            pre_cnt;
    cnt_t [MAXE-1:0]            suf_cnt;
    cnt_t [MAXE-1:0][MAXE-1:0]  wiring;    // wiring[i][j]: prefix i -> suffix j
    mn_idx_t [MAXE-1:0]         pre_nbr;
    mn_idx_t [MAXE-1:0]         suf_nbr;
  } mn_data2_t;

  typedef enum logic {TN_UPD_SUFFIX = 1'b0, TN_UPD_PREFIX = 1'b1} tn_kind_t;

  // TransferNode: tells one neighbouring MacroNode how to replace one of its
  // extensions once the MacroNode between them is invalidated.
  typedef struct packed {
    tn_kind_t kind;       // which side of the destination is updated
    mn_idx_t  dst_idx;    // destination MacroNode index
    kmer_t    dst_kmer;   // destination (k-1)-mer ("pred_node" in the paper)
    ext_t     match_ext;  // extension to find ("pred_ext")
    ext_t     new_ext;    // its replacement ("new_ext")
    cnt_t     count;      // new count
    mn_idx_t  new_nbr;    // MacroNode now reached through that extension
  } tn_t;

  // DRAM port of one pipeline stage. Reads are answered in order, writes are
  // not answered.
  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    word_t wdata;
  } mem_req_t;

  typedef struct packed {
    logic  valid;
    word_t rdata;
  } mem_rsp_t;

  // Per-PE event counters.
  typedef struct packed {
    logic [31:0] checked;      // MacroNodes through P1
    logic [31:0] invalidated;  // MacroNodes sent to P2
    logic [31:0] guarded;      // largest among neighbours, kept: merged extension too long
    logic [31:0] tn_made;      // TransferNodes produced by P2
    logic [31:0] tn_local;     // delivered to the own scratchpad
    logic [31:0] tn_xbar;      // sent to another PE of this DIMM
    logic [31:0] tn_bridge;    // sent to another DIMM
    logic [31:0] updated;      // MacroNodes rewritten by P3
    logic [31:0] unmatched;    // TransferNodes whose extension was not found
  } pe_stats_t;

  function automatic addr_t slot_addr(mn_idx_t idx, int unsigned off);
    return addr_t'(idx) * addr_t'(SLOT_WORDS) + addr_t'(off);
  endfunction

  // a followed by b
  function automatic ext_t ext_append(ext_t a, ext_t b);
    ext_t r;
    r.len   = a.len + b.len;
    r.bases = (a.bases << (2 * b.len)) | b.bases;
    return r;
  endfunction

  // (k-1)-mer of the MacroNode reached through prefix p: first k-1 bases of p.K
  function automatic kmer_t pred_kmer(kmer_t km, ext_t p);
    logic [KMER_W+58-1:0] s;
    s = ({58'b0, km}) | ({p.bases, {KMER_W{1'b0}}});
    s = s >> (2 * p.len);
    return s[KMER_W-1:0];
  endfunction

  // (k-1)-mer of the MacroNode reached through suffix x: last k-1 bases of K.x
  function automatic kmer_t succ_kmer(kmer_t km, ext_t x);
    logic [KMER_W+58-1:0] s;
    s = ({58'b0, km} << (2 * x.len)) | {{KMER_W{1'b0}}, x.bases};
    return s[KMER_W-1:0];
  endfunction

  // Last n bases of K: the predecessor's suffix that leads to K.
  function automatic ext_t kmer_tail(kmer_t km, logic [5:0] n);
    ext_t  r;
    kmer_t m;
    m       = (kmer_t'(1) << (2 * n)) - kmer_t'(1);
    r.len   = n;
    r.bases = 58'(km & m);
    return r;
  endfunction

  // First n bases of K: the successor's prefix that leads back to K.
  function automatic ext_t kmer_head(kmer_t km, logic [5:0] n);
    ext_t r;
    r.len   = n;
    r.bases = 58'(km >> (KMER_W - 2 * n));
    return r;
  endfunction

  function automatic mn_data1_t unpack_data1(word_t [DATA1_WORDS-1:0] w);
    mn_data1_t d;
    d.kmer  = w[0][KMER_W-1:0];
    d.valid = w[HDR_WORD][63];
    d.npre  = w[HDR_WORD][7:4];
    d.nsuf  = w[HDR_WORD][3:0];
    for (int i = 0; i < MAXE; i++) begin
      d.pre[i] = w[PRE_WORD+i];
      d.suf[i] = w[SUF_WORD+i];
    end
    return d;
  endfunction

  function automatic mn_data2_t unpack_data2(word_t [DATA2_WORDS-1:0] w);
    mn_data2_t d;
    for (int i = 0; i < MAXE; i++) begin
      d.pre_cnt[i] = w[PCNT_WORD-DATA2_OFF][16*i +: 16];
      d.suf_cnt[i] = w[SCNT_WORD-DATA2_OFF][16*i +: 16];
      for (int j = 0; j < MAXE; j++)
        d.wiring[i][j] = w[WIRE_WORD-DATA2_OFF+i][16*j +: 16];
      d.pre_nbr[i] = w[PNBR_WORD-DATA2_OFF+i/2][32*(i%2) +: 32];
      d.suf_nbr[i] = w[SNBR_WORD-DATA2_OFF+i/2][32*(i%2) +: 32];
    end
    return d;
  endfunction

endpackage
