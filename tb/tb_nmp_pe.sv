// tb_nmp_pe: end-to-end test of one processing element running Iterative
// Compaction alone (one PE, one DIMM: every TransferNode goes to the PE's own
// scratchpad). A random genome's PaK-graph is written into the DRAM model;
// the testbench issues every valid MacroNode each iteration, waits for busy
// to fall, and repeats until nothing is invalidated. Checks that the
// compacted graph spells the genome, that nothing leaves through the
// crossbar port, that the counters agree (TransferNodes made = delivered
// locally = applied), that invalidation, guarding and DRAM back-pressure all
// happened, and that P1, P2 and P3 were busy in the same cycle (the
// pipeline overlaps MacroNodes).
module tb_nmp_pe;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  localparam int unsigned GLEN = 300, COV = 2, LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       tbl_we = 0;
  logic [0:0] tbl_addr = '0, my_dimm = '0, my_pe = '0, xbar_out_port;
  kmer_t      tbl_kmer = '1;
  logic       cmd_valid, cmd_ready, xbar_out_valid, xbar_in_ready, busy;
  mn_idx_t    cmd_idx;
  mem_req_t   req [3];
  logic [2:0] ready;
  mem_rsp_t   rsp [3];
  tn_t        xbar_out_tn;
  pe_stats_t  stats;
  int checks = 0, failures = 0, overlap = 0, xbar_used = 0;

  nmp_pe #(.NPE(1), .NDIMM(1)) dut (
    .clk, .rst_n, .my_dimm, .my_pe, .tbl_we, .tbl_addr, .tbl_kmer,
    .cmd_valid, .cmd_ready, .cmd_idx, .mem_req(req), .mem_ready(ready), .mem_rsp(rsp),
    .xbar_out_valid, .xbar_out_ready(1'b1), .xbar_out_port, .xbar_out_tn,
    .xbar_in_valid(1'b0), .xbar_in_ready, .xbar_in_tn('0), .busy, .stats);
  nmp_dram_model #(.NPORTS(3), .LAT(LAT), .STALL(6)) u_dram (.clk, .rst_n, .req, .ready, .rsp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int cq [$];
  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) void'(cq.pop_front());
    if (xbar_out_valid) xbar_used++;
    if (req[0].valid && (req[1].valid || dut.u_p2.state != 0) && req[2].valid) overlap++;
    #1;
    cmd_valid = cq.size() != 0;
    cmd_idx   = (cq.size() != 0) ? mn_idx_t'(cq[0]) : '0;
  end

  initial begin
    rmn_t nodes [$];
    string genome, walk;
    int start_idx, iter, prev, nn;
    bit ok;
    cmd_valid = 0; cmd_idx = '0;
    do begin genome = rand_dna(GLEN); build_graph(genome, COV, nodes, start_idx, ok); end while (!ok);
    nn = nodes.size();
    foreach (nodes[i]) begin
      word_t w [20];
      mn2words(nodes[i], w);
      for (int k = 0; k < 20; k++) u_dram.wr(slot_addr(mn_idx_t'(i), k), w[k]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    iter = 0; prev = -1;
    while (prev != int'(stats.invalidated) && iter < 60) begin
      prev = int'(stats.invalidated);
      for (int i = 0; i < nn; i++) if (u_dram.rd(slot_addr(mn_idx_t'(i), HDR_WORD))[63]) cq.push_back(i);
      repeat (3) @(negedge clk);
      while (busy || cq.size() != 0) @(negedge clk);
      iter++;
    end
    begin
      int cur, steps;
      word_t w [20];
      rmn_t m;
      cur = start_idx; steps = 0;
      for (int k = 0; k < 20; k++) w[k] = u_dram.rd(slot_addr(mn_idx_t'(cur), k));
      words2mn(w, m);
      walk = m.kmer;
      while (m.nsuf > 0 && steps < nn) begin
        check(m.valid, "walk visits valid MacroNodes");
        walk = {walk, m.suf[0]};
        cur  = m.snbr[0];
        for (int k = 0; k < 20; k++) w[k] = u_dram.rd(slot_addr(mn_idx_t'(cur), k));
        words2mn(w, m);
        steps++;
      end
      check(walk == genome, "compacted graph spells the genome");
      check(steps < nn / 4, $sformatf("compacted to %0d of %0d MacroNodes", steps + 1, nn));
      $display("%0d MacroNodes -> %0d after %0d iterations", nn, steps + 1, iter);
    end
    $display("checked %0d invalidated %0d guarded %0d tn %0d local %0d updated %0d overlap %0d stalls %0d",
             stats.checked, stats.invalidated, stats.guarded, stats.tn_made, stats.tn_local, stats.updated, overlap, u_dram.stall_cycles);
    check(xbar_used == 0 && stats.tn_xbar == 0 && stats.tn_bridge == 0, "nothing leaves a lone PE");
    check(stats.tn_made == 2 * stats.invalidated, "two TransferNodes per invalidated chain MacroNode");
    check(stats.tn_made == stats.tn_local && stats.updated == stats.tn_made && stats.unmatched == 0, "every TransferNode applied");
    check(stats.invalidated > 0 && stats.guarded > 0, "invalidation and guard happened");
    check(u_dram.stall_cycles > 0, "DRAM back-pressure happened");
    check(overlap > 0, "P1, P2 and P3 active in the same cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
