// tb_nmp_buffer_chip_pe32: end-to-end test of Iterative Compaction with 32
// PEs per buffer chip (a 33x33 crossbar), the per-channel PE count the
// evaluation starts from before settling on 16, in a system of 2 DIMMs. It
// is the same test as tb_nmp_buffer_chip with NPE overridden; a 1600-base
// genome gives about 25 MacroNodes per PE.
//
// A random genome is cut into (k-1)-mers; the PaK-graph is built (one
// MacroNode per (k-1)-mer, sorted, spread evenly over the DIMMs) and written
// into DRAM, and the mapping table of every PE is loaded. The testbench then
// plays the host: each iteration it issues every valid MacroNode index to
// its owning PE (index mod NPE on the DIMM holding it) and waits until all
// PEs are idle and no TransferNode is in flight, as the iteration lockstep
// requires. It stops when an iteration invalidates nothing.
//
// Checks: the compacted graph, walked from the first MacroNode along its
// suffixes, spells the genome exactly; every DRAM access of a PE stays
// inside MacroNodes that DIMM and PE own; every bridge TransferNode is for
// another DIMM; the number of MacroNodes falls. Mechanisms counted, each must
// occur: invalidation, guarded (extension too long), TransferNodes to the own
// scratchpad, through the crossbar, and over the bridge, MacroNode updates,
// DRAM back-pressure, and a full command path (host stalled by the PE).
module tb_nmp_buffer_chip_pe32;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  localparam int unsigned NPE = 32, NDIMM = 2, GLEN = 1600, COV = 3, LAT = 6;
  localparam int unsigned PW = $clog2(NPE + 1), DW = (NDIMM > 1) ? $clog2(NDIMM) : 1;
  localparam int unsigned NPORT = NDIMM * NPE * 3;
  localparam longint WATCHDOG = 2_000_000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- chips ----
  logic                tbl_we;
  logic [DW-1:0]       tbl_addr;
  kmer_t               tbl_kmer;
  logic [NPE-1:0]      cmd_valid [NDIMM], cmd_ready [NDIMM], busy [NDIMM];
  mn_idx_t             cmd_idx   [NDIMM][NPE];
  mem_req_t            creq      [NDIMM][NPE][3];
  logic [2:0]          cready    [NDIMM][NPE];
  mem_rsp_t            crsp      [NDIMM][NPE][3];
  logic                bo_valid [NDIMM], bo_ready [NDIMM], bi_valid [NDIMM], bi_ready [NDIMM];
  tn_t                 bo_tn [NDIMM], bi_tn [NDIMM];
  pe_stats_t           stats [NDIMM][NPE];

  for (genvar d = 0; d < NDIMM; d++) begin : g_dimm
    nmp_buffer_chip #(.NPE(NPE), .NDIMM(NDIMM)) u_chip (
      .clk, .rst_n, .my_dimm(DW'(d)), .tbl_we, .tbl_addr, .tbl_kmer,
      .cmd_valid(cmd_valid[d]), .cmd_ready(cmd_ready[d]), .cmd_idx(cmd_idx[d]),
      .mem_req(creq[d]), .mem_ready(cready[d]), .mem_rsp(crsp[d]),
      .br_out_valid(bo_valid[d]), .br_out_ready(bo_ready[d]), .br_out_tn(bo_tn[d]),
      .br_in_valid(bi_valid[d]), .br_in_ready(bi_ready[d]), .br_in_tn(bi_tn[d]),
      .busy(busy[d]), .stats(stats[d]));
  end

  // ---- DRAM ----
  mem_req_t          req [NPORT];
  logic [NPORT-1:0]  ready;
  mem_rsp_t          rsp [NPORT];
  nmp_dram_model #(.NPORTS(NPORT), .LAT(LAT), .STALL(5)) u_dram (.clk, .rst_n, .req, .ready, .rsp);
  always_comb
    for (int d = 0; d < NDIMM; d++)
      for (int p = 0; p < NPE; p++)
        for (int s = 0; s < 3; s++) begin
          req[(d*NPE+p)*3+s]   = creq[d][p][s];
          cready[d][p][s]      = ready[(d*NPE+p)*3+s];
          crsp[d][p][s]        = rsp[(d*NPE+p)*3+s];
        end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- graph ----
  rmn_t  nodes [$];
  int    start_idx, per_dimm, nnodes;
  string bound [NDIMM];
  string genome;

  function automatic int owner_dimm(int idx);
    return (idx / per_dimm < NDIMM) ? idx / per_dimm : NDIMM - 1;
  endfunction

  // Every DRAM access stays in MacroNodes of its own DIMM and PE.
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < NDIMM; d++)
      for (int p = 0; p < NPE; p++)
        for (int s = 0; s < 3; s++)
          if (creq[d][p][s].valid && cready[d][p][s]) begin
            int idx;
            idx = int'(creq[d][p][s].addr / SLOT_WORDS);
            if (!(owner_dimm(idx) == d && idx % NPE == p)) check(0, $sformatf("DIMM %0d PE %0d touched MacroNode %0d", d, p, idx));
          end

  // ---- network bridge model ----
  tn_t   brq [NDIMM][$];
  logic acc_bi [NDIMM], acc_bo [NDIMM];
  logic [NPE-1:0] acc_cmd [NDIMM];
  int    n_bridge = 0, n_dram_stall = 0, n_cmd_stall = 0;
  function automatic int ref_dimm(string k);
    for (int d = 0; d < NDIMM; d++) if (!greater(k, bound[d])) return d;
    return NDIMM - 1;
  endfunction
  initial for (int d = 0; d < NDIMM; d++) begin
    bo_ready[d] = 1; bi_valid[d] = 0; bi_tn[d] = '0; acc_bi[d] = 0; acc_bo[d] = 0; acc_cmd[d] = '0;
  end
  // Handshakes are sampled at the falling edge, where every signal already
  // holds the value it has at the next rising edge.
  always @(negedge clk)
    for (int d = 0; d < NDIMM; d++) begin
      acc_bi[d]  = bi_valid[d] && bi_ready[d];
      acc_bo[d]  = bo_valid[d] && bo_ready[d];
      acc_cmd[d] = cmd_valid[d] & cmd_ready[d];
    end
  always @(posedge clk) begin
    for (int d = 0; d < NDIMM; d++) begin
      if (acc_bi[d]) void'(brq[d].pop_front());
      if (acc_bo[d]) begin
        int t;
        t = ref_dimm(kmer2s(bo_tn[d].dst_kmer));
        check(t != d, "bridge TransferNode for another DIMM");
        brq[t].push_back(bo_tn[d]);
        n_bridge++;
      end
    end
    #1;
    for (int d = 0; d < NDIMM; d++) bo_ready[d] = ($urandom % 4) != 0;
    for (int d = 0; d < NDIMM; d++) begin
      bi_valid[d] = brq[d].size() != 0;
      if (brq[d].size() != 0) bi_tn[d] = brq[d][0];
    end
  end

  // ---- host command queues ----
  int cq [NDIMM][NPE][$];
  always @(posedge clk) begin
    for (int d = 0; d < NDIMM; d++)
      for (int p = 0; p < NPE; p++) begin
        if (acc_cmd[d][p]) void'(cq[d][p].pop_front());
        else if (cmd_valid[d][p]) n_cmd_stall++;
      end
    #1;
    for (int d = 0; d < NDIMM; d++)
      for (int p = 0; p < NPE; p++) begin
        cmd_valid[d][p] = cq[d][p].size() != 0;
        cmd_idx[d][p]   = (cq[d][p].size() != 0) ? mn_idx_t'(cq[d][p][0]) : '0;
      end
  end

  function automatic bit all_idle();
    for (int d = 0; d < NDIMM; d++) begin
      if (busy[d] != '0 || brq[d].size() != 0 || bo_valid[d]) return 0;
      for (int p = 0; p < NPE; p++) if (cq[d][p].size() != 0) return 0;
    end
    return 1;
  endfunction

  function automatic longint total(int f);
    longint t = 0;
    for (int d = 0; d < NDIMM; d++)
      for (int p = 0; p < NPE; p++)
        case (f)
          0: t += stats[d][p].invalidated;
          1: t += stats[d][p].guarded;
          2: t += stats[d][p].tn_local;
          3: t += stats[d][p].tn_xbar;
          4: t += stats[d][p].tn_bridge;
          5: t += stats[d][p].updated;
          6: t += stats[d][p].unmatched;
          7: t += stats[d][p].tn_made;
          default: t += stats[d][p].checked;
        endcase
    return t;
  endfunction

  initial begin
    bit ok;
    int iter, nvalid, prev_inv;
    string walk;
    tbl_we = 0; tbl_addr = '0; tbl_kmer = '0;
    for (int d = 0; d < NDIMM; d++) begin cmd_valid[d] = '0; for (int p = 0; p < NPE; p++) cmd_idx[d][p] = '0; end
    do begin
      genome = rand_dna(GLEN);
      build_graph(genome, COV, nodes, start_idx, ok);
    end while (!ok);
    nnodes   = nodes.size();
    per_dimm = (nnodes + NDIMM - 1) / NDIMM;
    foreach (nodes[i]) begin
      word_t w [20];
      mn2words(nodes[i], w);
      for (int k = 0; k < 20; k++) u_dram.wr(slot_addr(mn_idx_t'(i), k), w[k]);
    end
    for (int d = 0; d < NDIMM; d++) bound[d] = nodes[(d + 1) * per_dimm - 1 < nnodes ? (d + 1) * per_dimm - 1 : nnodes - 1].kmer;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < NDIMM; d++) begin
      @(negedge clk); tbl_we = 1; tbl_addr = DW'(d); tbl_kmer = s2kmer(bound[d]);
    end
    @(negedge clk); tbl_we = 0;
    // iterations
    iter = 0;
    prev_inv = -1;
    while (prev_inv != int'(total(0)) && iter < 60) begin
      prev_inv = int'(total(0));
      nvalid = 0;
      for (int i = 0; i < nnodes; i++)
        if (u_dram.rd(slot_addr(mn_idx_t'(i), HDR_WORD))[63]) begin
          cq[owner_dimm(i)][i % NPE].push_back(i);
          nvalid++;
        end
      @(negedge clk);
      repeat (2) @(negedge clk);
      while (!all_idle()) @(negedge clk);
      repeat (4) @(negedge clk);
      iter++;
      $display("iteration %0d: %0d valid MacroNodes in, %0d invalidated so far", iter, nvalid, total(0));
    end
    // walk the compacted graph
    begin
      int cur, steps;
      word_t w [20];
      rmn_t m;
      cur = start_idx; steps = 0;
      for (int k = 0; k < 20; k++) w[k] = u_dram.rd(slot_addr(mn_idx_t'(cur), k));
      words2mn(w, m);
      walk = m.kmer;
      while (m.nsuf > 0 && steps < nnodes) begin
        check(m.valid, $sformatf("walk reaches valid MacroNode %0d", cur));
        walk = {walk, m.suf[0]};
        cur  = m.snbr[0];
        for (int k = 0; k < 20; k++) w[k] = u_dram.rd(slot_addr(mn_idx_t'(cur), k));
        words2mn(w, m);
        steps++;
      end
      check(walk == genome, "compacted graph spells the genome");
      check(steps < nnodes / 4, $sformatf("walk of %0d MacroNodes, from %0d", steps + 1, nnodes));
      $display("genome %0d bases, %0d MacroNodes -> walk over %0d MacroNodes after %0d iterations", GLEN, nnodes, steps + 1, iter);
    end
    n_dram_stall = int'(u_dram.stall_cycles);
    $display("bridge model %0d;  invalidated %0d guarded %0d tn_made %0d local %0d xbar %0d bridge %0d updated %0d unmatched %0d dram_stall %0d cmd_stall %0d",
             n_bridge, total(0), total(1), total(7), total(2), total(3), total(4), total(5), total(6), n_dram_stall, n_cmd_stall);
    check(total(0) > 0, "invalidation happened");
    check(total(1) > 0, "guarded happened");
    check(total(2) > 0, "local scratchpad delivery happened");
    check(total(3) > 0, "crossbar delivery happened");
    check(total(4) > 0 && n_bridge == int'(total(4)), "bridge delivery happened");
    check(total(5) > 0, "update happened");
    check(total(7) == total(2) + total(3) + total(4), "every TransferNode routed once");
    check(total(5) + total(6) == total(7), "every TransferNode applied or reported");
    check(n_dram_stall > 0, "DRAM back-pressure happened");
    check(n_cmd_stall > 0, "command back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
