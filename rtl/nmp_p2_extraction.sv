// nmp_p2_extraction: stage P2 (TransferNode Extraction) ALU and its
// "Reg for current MN".
//
// Input is one entry of the P2 MacroNode buffer: the index and MN data1 of a
// MacroNode that P1 chose for invalidation, plus the MN data2 words (counts,
// wiring, neighbour indices) the P2 load unit fetched. For every internal
// wire (prefix p_i wired to suffix x_j with count c > 0) two TransferNodes are
// made with the append operation:
//   to the predecessor (first k-1 bases of p_i.K): find its suffix equal to
//     the last |p_i| bases of K, replace it by that string followed by x_j,
//     set its count to c and its neighbour to the MacroNode behind x_j;
//   to the successor (last k-1 bases of K.x_j): find its prefix equal to the
//     first |x_j| bases of K, replace it by p_i followed by that string,
//     set its count to c and its neighbour to the MacroNode behind p_i.
// This is the pred_node / pred_ext / new_ext / count rule of the paper's
// worked example, applied to both sides.
//
// Before extracting, the unit marks the MacroNode invalid in DRAM by
// rewriting its header word with the valid bit cleared (deletion itself is
// postponed to after compaction, as in the paper). That write, the wire
// visiting order and the one-wire-side-per-cycle rate are this design's
// choices.
//
// Timing: 1 cycle to load, 1+ cycles for the header write, then 2*MAXE*MAXE
// cycles to visit every wire side (one TransferNode per cycle at most; a
// stalled TransferNode buffer holds the unit).
module nmp_p2_extraction
  import nmp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,     // "complete": pops the P2 MacroNode buffer
  input  mn_idx_t   in_idx,
  input  mn_data1_t in_data1,
  input  mn_data2_t in_data2,
  // header write port (muxed with the P2 load unit onto the P2 DRAM port)
  output mem_req_t  mem_req,
  input  logic      mem_ready,
  // TransferNodes to the TransferNode buffer
  output logic      tn_valid,
  input  logic      tn_ready,
  output tn_t       tn
);
  localparam int unsigned NSTEP = 2 * MAXE * MAXE;

  typedef enum logic [1:0] {IDLE, INVAL, EMIT} state_t;
  state_t     state;
  mn_idx_t    idx;
  mn_data1_t  d1;
  mn_data2_t  d2;
  logic [$clog2(NSTEP)-1:0] step;

  logic [$clog2(MAXE)-1:0] wi, wj;
  logic side;          // 0: to predecessor, 1: to successor
  logic live;          // this wire exists
  ext_t tail, head;

  assign in_ready = (state == IDLE);

  always_comb begin
    wi   = step[$clog2(NSTEP)-1 -: $clog2(MAXE)];
    wj   = step[$clog2(MAXE):1];
    side = step[0];
    live = (4'(wi) < d1.npre) && (4'(wj) < d1.nsuf) && (d2.wiring[wi][wj] != '0);
    tail = kmer_tail(d1.kmer, d1.pre[wi].len);
    head = kmer_head(d1.kmer, d1.suf[wj].len);
    tn   = '0;
    if (!side) begin
      tn.kind      = TN_UPD_SUFFIX;
      tn.dst_idx   = d2.pre_nbr[wi];
      tn.dst_kmer  = pred_kmer(d1.kmer, d1.pre[wi]);
      tn.match_ext = tail;
      tn.new_ext   = ext_append(tail, d1.suf[wj]);
      tn.new_nbr   = d2.suf_nbr[wj];
    end else begin
      tn.kind      = TN_UPD_PREFIX;
      tn.dst_idx   = d2.suf_nbr[wj];
      tn.dst_kmer  = succ_kmer(d1.kmer, d1.suf[wj]);
      tn.match_ext = head;
      tn.new_ext   = ext_append(d1.pre[wi], head);
      tn.new_nbr   = d2.pre_nbr[wi];
    end
    tn.count = d2.wiring[wi][wj];
    tn_valid = (state == EMIT) && live;

    mem_req       = '0;
    mem_req.valid = (state == INVAL);
    mem_req.we    = 1'b1;
    mem_req.addr  = slot_addr(idx, HDR_WORD);
    mem_req.wdata = {1'b0, 55'b0, d1.npre, d1.nsuf};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      idx   <= '0;
      d1    <= '0;
      d2    <= '0;
      step  <= '0;
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          idx   <= in_idx;
          d1    <= in_data1;
          d2    <= in_data2;
          step  <= '0;
          state <= INVAL;
        end
        INVAL: if (mem_ready) state <= EMIT;
        EMIT: if (!live || tn_ready) begin
          step <= step + 1'b1;
          if (step == ($clog2(NSTEP))'(NSTEP - 1)) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
