// nmp_p1_invalidation: stage P1 (Invalidation Check) ALU and its
// "Reg for current MN".
//
// The head entry of the P1 MacroNode buffer (index + MN data1) is moved into
// the current-MacroNode register. In the next cycle the ALU forms the (k-1)-mer
// of every neighbour by appending: for a prefix p the first k-1 bases of p.K,
// for a suffix x the last k-1 bases of K.x (shift and OR, see nmp_pkg). The
// MacroNode is the target for invalidation when its own (k-1)-mer is strictly
// larger than every neighbour's. Then the entry is either handed to P2
// (out_valid) or dropped, and "complete" pops the next entry.
//
// Following the paper: neighbour computation by appending, comparison, the
// "largest among neighbours" rule, forwarding {MN_idx, MN data1} to P2.
// This design's own choices: all neighbours are compared in one cycle; a
// MacroNode is only a candidate when it is valid, has at least one prefix and
// one suffix and no empty (terminal) extension; and a candidate is kept
// ("guarded") when its longest prefix plus its longest suffix would exceed the
// 29 bases an extension word holds, since P2 would have to merge them.
//
// Timing: one MacroNode every two cycles (load register, decide), plus any
// cycles P2 is not ready.
module nmp_p1_invalidation
  import nmp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,     // "complete": pops the MacroNode buffer
  input  mn_idx_t   in_idx,
  input  mn_data1_t in_data1,
  output logic      out_valid,    // invalidate decision, to the P2 load unit
  input  logic      out_ready,
  output mn_idx_t   out_idx,
  output mn_data1_t out_data1,
  output logic      ev_checked,   // one pulse per MacroNode decided
  output logic      ev_invalidate,
  output logic      ev_guarded
);
  logic      cur_valid;
  logic      largest, eligible, fits, invalidate;
  logic [5:0] max_pre, max_suf;

  // Decision on the current register.
  always_comb begin
    largest  = 1'b1;
    eligible = out_data1.valid && (out_data1.npre != '0) && (out_data1.nsuf != '0)
               && (out_data1.npre <= 4'(MAXE)) && (out_data1.nsuf <= 4'(MAXE));
    max_pre  = '0;
    max_suf  = '0;
    for (int i = 0; i < MAXE; i++) begin
      if (4'(i) < out_data1.npre) begin
        if (out_data1.pre[i].len == '0) eligible = 1'b0;
        if (pred_kmer(out_data1.kmer, out_data1.pre[i]) >= out_data1.kmer) largest = 1'b0;
        if (out_data1.pre[i].len > max_pre) max_pre = out_data1.pre[i].len;
      end
      if (4'(i) < out_data1.nsuf) begin
        if (out_data1.suf[i].len == '0) eligible = 1'b0;
        if (succ_kmer(out_data1.kmer, out_data1.suf[i]) >= out_data1.kmer) largest = 1'b0;
        if (out_data1.suf[i].len > max_suf) max_suf = out_data1.suf[i].len;
      end
    end
    fits       = (7'(max_pre) + 7'(max_suf)) <= 7'(EXT_MAX);
    invalidate = eligible && largest && fits;
  end

  assign out_valid     = cur_valid && invalidate;
  assign in_ready      = !cur_valid;
  assign ev_checked    = cur_valid && (!invalidate || out_ready);
  assign ev_invalidate = cur_valid && invalidate && out_ready;
  assign ev_guarded    = cur_valid && eligible && largest && !fits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      out_idx   <= '0;
      out_data1 <= '0;
    end else begin
      if (!cur_valid) begin
        if (in_valid) begin
          cur_valid <= 1'b1;
          out_idx   <= in_idx;
          out_data1 <= in_data1;
        end
      end else if (!invalidate || out_ready) begin
        cur_valid <= 1'b0;
      end
    end
  end
endmodule
