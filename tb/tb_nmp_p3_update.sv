// tb_nmp_p3_update: self-checking test of the P3 MacroNode update with the
// DRAM model. Random MacroNodes are placed in memory; random TransferNodes
// are applied, most naming an existing extension of their destination, some
// naming a missing extension, a wrong (k-1)-mer or an invalid MacroNode.
// After each one the whole slot is read back and compared with the text
// model updated the same way (extension, count and neighbour replaced, all
// else unchanged). Also checks the event outputs and the cycle count
// without stalls (20 reads, read latency, decide, 3 writes).
module tb_nmp_p3_update;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  localparam int unsigned LAT = 4, NMN = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, busy, ev_updated, ev_unmatched;
  tn_t in_tn;
  mem_req_t req [1];
  logic [0:0] ready;
  mem_rsp_t rsp [1];
  int checks = 0, failures = 0, n_upd = 0, n_unm = 0;
  rmn_t mns [NMN];

  nmp_p3_update dut (.clk, .rst_n, .in_valid, .in_ready, .in_tn,
    .mem_req(req[0]), .mem_ready(ready[0]), .mem_rsp(rsp[0]), .busy, .ev_updated, .ev_unmatched);
  nmp_dram_model #(.NPORTS(1), .LAT(LAT), .STALL(0)) mem (.clk, .rst_n, .req, .ready, .rsp);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic store(int i);
    word_t w [20];
    mn2words(mns[i], w);
    for (int k = 0; k < 20; k++) mem.wr(addr_t'(i * SLOT_WORDS + k), w[k]);
  endtask

  initial begin
    tn_t t;
    in_valid = 0; in_tn = '0;
    for (int i = 0; i < NMN; i++) begin
      mns[i].kmer = rand_dna(KM1); mns[i].valid = ($urandom % 10) != 0;
      mns[i].npre = 1 + $urandom % MAXE; mns[i].nsuf = 1 + $urandom % MAXE;
      for (int a = 0; a < MAXE; a++) begin
        mns[i].pre[a] = rand_dna(1 + a); mns[i].suf[a] = rand_dna(1 + a);   // distinct lengths: no duplicates
        mns[i].pcnt[a] = $urandom % 1000; mns[i].scnt[a] = $urandom % 1000;
        mns[i].pnbr[a] = $urandom; mns[i].snbr[a] = $urandom;
        for (int b = 0; b < MAXE; b++) mns[i].wiring[a][b] = $urandom % 9;
      end
      store(i);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int d, j, cyc, kind;
      bit hit, saw_u, saw_m;
      word_t w [20];
      rmn_t got, exp;
      d = $urandom % NMN;
      kind = $urandom % 2;
      exp = mns[d];
      j = $urandom % (kind ? exp.npre : exp.nsuf);
      t = '0;
      t.kind = kind ? TN_UPD_PREFIX : TN_UPD_SUFFIX;
      t.dst_idx = d; t.dst_kmer = s2kmer(exp.kmer);
      t.match_ext = s2ext(kind ? exp.pre[j] : exp.suf[j]);
      t.new_ext = s2ext(rand_dna(1 + $urandom % 20));
      t.count = 16'($urandom); t.new_nbr = $urandom;
      case ($urandom % 8)
        0: t.match_ext = s2ext(rand_dna(6 + $urandom % 10));      // no such extension
        1: t.dst_kmer  = s2kmer(rand_dna(KM1));                    // wrong MacroNode
        default: ;
      endcase
      hit = exp.valid && (t.dst_kmer == s2kmer(exp.kmer));
      hit = hit && (t.match_ext == s2ext(kind ? exp.pre[j] : exp.suf[j]));
      if (hit) begin
        if (kind) begin exp.pre[j] = ext2s(t.new_ext); exp.pcnt[j] = t.count; exp.pnbr[j] = int'(t.new_nbr); end
        else      begin exp.suf[j] = ext2s(t.new_ext); exp.scnt[j] = t.count; exp.snbr[j] = int'(t.new_nbr); end
      end
      @(negedge clk);
      in_valid = 1; in_tn = t;
      check(in_ready && !busy, "idle");
      @(negedge clk); in_valid = 0; cyc = 1; saw_u = 0; saw_m = 0;
      while (busy) begin
        #1; if (ev_updated) saw_u = 1; if (ev_unmatched) saw_m = 1;
        @(negedge clk); cyc++;
      end
      check(saw_u == hit && saw_m == !hit, "event");
      if (hit) n_upd++; else n_unm++;
      // 20 reads, model latency LAT+1, last word, decide, then 3 writes
      check(cyc == (hit ? 20 + LAT + 3 + 3 : 20 + LAT + 3),
            $sformatf("%0d cycles", cyc));
      for (int k = 0; k < 20; k++) w[k] = mem.rd(addr_t'(d * SLOT_WORDS + k));
      words2mn(w, got);
      for (int a = 0; a < MAXE; a++) begin
        if (a < exp.npre) check(got.pre[a] == exp.pre[a] && got.pcnt[a] == exp.pcnt[a] && got.pnbr[a] == exp.pnbr[a], "prefix");
        if (a < exp.nsuf) check(got.suf[a] == exp.suf[a] && got.scnt[a] == exp.scnt[a] && got.snbr[a] == exp.snbr[a], "suffix");
        for (int b = 0; b < MAXE; b++) check(got.wiring[a][b] == exp.wiring[a][b], "wiring unchanged");
      end
      check(got.kmer == exp.kmer && got.valid == exp.valid && got.npre == exp.npre && got.nsuf == exp.nsuf, "header");
      mns[d] = exp;
    end
    check(n_upd > 100 && n_unm > 50, $sformatf("coverage %0d updated %0d unmatched", n_upd, n_unm));
    $display("updated %0d unmatched %0d", n_upd, n_unm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
