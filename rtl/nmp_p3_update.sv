// nmp_p3_update: stage P3 ALU that applies a TransferNode from the
// TransferNode scratchpad to its destination MacroNode.
//
// Steps (the paper's "update MacroNode" example: find the MacroNode, locate
// the extension equal to pred_ext, set it to new_ext, set its count):
//   1. read words 0..19 of the destination MacroNode ("Target MN");
//   2. check that it is valid and that its (k-1)-mer is the one the
//      TransferNode names, then search the suffixes (update_suffix) or the
//      prefixes (update_prefix) for the extension equal to match_ext;
//   3. write back ("Updated MN") the three words that change: the extension,
//      the count word and the neighbour-index word.
// A TransferNode whose MacroNode or extension is not found changes nothing
// and is reported on ev_unmatched.
//
// Only the changed words are written back, and the wiring of the destination
// is left as it is because the replaced extension keeps its slot; both are
// this design's choices. One TransferNode is handled at a time; because each
// MacroNode is owned by exactly one PE, updates to one MacroNode are
// serialised here without locks.
//
// Timing: 20 read requests (one per cycle when the port is ready), the read
// latency, 1 cycle to decide, 3 write cycles.
module nmp_p3_update
  import nmp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  tn_t      in_tn,
  output mem_req_t mem_req,
  input  logic     mem_ready,
  input  mem_rsp_t mem_rsp,
  output logic     busy,
  output logic     ev_updated,
  output logic     ev_unmatched
);
  localparam int unsigned NW = DATA1_WORDS + DATA2_WORDS;
  localparam int unsigned CW = $clog2(NW + 1);

  typedef enum logic [2:0] {IDLE, READ, MATCH, WRITE} state_t;
  state_t             state;
  tn_t                tn;
  word_t [NW-1:0]     w;
  logic  [CW-1:0]     n_req, n_rsp;
  logic  [1:0]        n_wr;
  logic  [$clog2(MAXE)-1:0] sel;

  mn_data1_t d1;
  logic      hit;
  logic [$clog2(MAXE)-1:0] hit_j;
  word_t     ext_w, cnt_w, nbr_w;
  addr_t     ext_a, cnt_a, nbr_a;
  int unsigned ext_o, cnt_o, nbr_o;

  assign in_ready = (state == IDLE);
  assign busy     = (state != IDLE);

  // Search.
  always_comb begin
    d1    = unpack_data1(w[DATA1_WORDS-1:0]);
    hit   = 1'b0;
    hit_j = '0;
    for (int j = MAXE - 1; j >= 0; j--) begin
      if (tn.kind == TN_UPD_SUFFIX) begin
        if (4'(j) < d1.nsuf && d1.suf[j] == tn.match_ext) begin hit = 1'b1; hit_j = j[$clog2(MAXE)-1:0]; end
      end else begin
        if (4'(j) < d1.npre && d1.pre[j] == tn.match_ext) begin hit = 1'b1; hit_j = j[$clog2(MAXE)-1:0]; end
      end
    end
    hit = hit && d1.valid && (d1.kmer == tn.dst_kmer);
  end

  // The three words written back for the selected extension.
  always_comb begin
    ext_o = (tn.kind == TN_UPD_SUFFIX) ? SUF_WORD  : PRE_WORD;
    cnt_o = (tn.kind == TN_UPD_SUFFIX) ? SCNT_WORD : PCNT_WORD;
    nbr_o = (tn.kind == TN_UPD_SUFFIX) ? SNBR_WORD : PNBR_WORD;
    ext_w = tn.new_ext;
    cnt_w = w[cnt_o];
    cnt_w[16*sel +: 16] = tn.count;
    nbr_w = w[nbr_o + int'(sel) / 2];
    nbr_w[32*(int'(sel) % 2) +: 32] = tn.new_nbr;
    ext_a = slot_addr(tn.dst_idx, ext_o + int'(sel));
    cnt_a = slot_addr(tn.dst_idx, cnt_o);
    nbr_a = slot_addr(tn.dst_idx, nbr_o + int'(sel) / 2);
  end

  always_comb begin
    mem_req = '0;
    if (state == READ && n_req < CW'(NW)) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = slot_addr(tn.dst_idx, 0) + addr_t'(n_req);
    end else if (state == WRITE) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      unique case (n_wr)
        2'd0:    begin mem_req.addr = ext_a; mem_req.wdata = ext_w; end
        2'd1:    begin mem_req.addr = cnt_a; mem_req.wdata = cnt_w; end
        default: begin mem_req.addr = nbr_a; mem_req.wdata = nbr_w; end
      endcase
    end
  end

  assign ev_updated   = (state == MATCH) && hit;
  assign ev_unmatched = (state == MATCH) && !hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      tn    <= '0;
      w     <= '0;
      n_req <= '0;
      n_rsp <= '0;
      n_wr  <= '0;
      sel   <= '0;
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          tn    <= in_tn;
          n_req <= '0;
          n_rsp <= '0;
          state <= READ;
        end
        READ: begin
          if (mem_req.valid && mem_ready) n_req <= n_req + CW'(1);
          if (mem_rsp.valid) begin
            w[n_rsp] <= mem_rsp.rdata;
            n_rsp    <= n_rsp + CW'(1);
            if (n_rsp == CW'(NW - 1)) state <= MATCH;
          end
        end
        MATCH: begin
          sel   <= hit_j;
          n_wr  <= '0;
          state <= hit ? WRITE : IDLE;
        end
        WRITE: if (mem_ready) begin
          n_wr <= n_wr + 2'd1;
          if (n_wr == 2'd2) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
