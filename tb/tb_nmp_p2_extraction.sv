// tb_nmp_p2_extraction: self-checking test of P2 TransferNode extraction.
// Random MacroNodes with random wiring go in; the TransferNodes that come
// out are compared, in order, with those the text-based reference derives
// (predecessor/successor (k-1)-mer, extension to match, merged extension,
// count, new neighbour). Also checks the header write that clears the valid
// bit, and the cycle count: 2 + 2*MAXE*MAXE when never stalled.
module tb_nmp_p2_extraction;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, mem_ready, tn_valid, tn_ready;
  mn_idx_t in_idx;
  mn_data1_t in_data1;
  mn_data2_t in_data2;
  mem_req_t mem_req;
  tn_t tn;
  int checks = 0, failures = 0, n_tn = 0;

  nmp_p2_extraction dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    word_t w [20];
    word_t [DATA1_WORDS-1:0] p1;
    word_t [DATA2_WORDS-1:0] p2;
    in_valid = 0; tn_ready = 1; mem_ready = 1; in_idx = '0; in_data1 = '0; in_data2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      rmn_t m;
      rtn_t exp [$];
      int got, cyc;
      bit stall_free, saw_wr;
      m.kmer = rand_dna(KM1); m.valid = 1;
      m.npre = 1 + $urandom % MAXE; m.nsuf = 1 + $urandom % MAXE;
      for (int i = 0; i < MAXE; i++) begin
        m.pre[i] = rand_dna(1 + $urandom % 12); m.suf[i] = rand_dna(1 + $urandom % 12);
        m.pcnt[i] = $urandom % 100; m.scnt[i] = $urandom % 100;
        m.pnbr[i] = $urandom; m.snbr[i] = $urandom;
        for (int j = 0; j < MAXE; j++) m.wiring[i][j] = ($urandom % 3 == 0) ? 0 : 1 + $urandom % 60000;
      end
      ref_extract(m, exp);
      mn2words(m, w);
      for (int i = 0; i < 10; i++) begin p1[i] = w[i]; p2[i] = w[10+i]; end
      stall_free = (t % 2) == 0;
      @(negedge clk);
      in_valid = 1; in_idx = mn_idx_t'(t * 7); in_data1 = unpack_data1(p1); in_data2 = unpack_data2(p2);
      check(in_ready, "idle before MacroNode");
      @(negedge clk);
      in_valid = 0;
      got = 0; cyc = 1; saw_wr = 0;
      while (!in_ready) begin
        tn_ready  = stall_free || ($urandom % 3 != 0);
        mem_ready = stall_free || ($urandom % 2 != 0);
        #1;
        if (mem_req.valid && mem_ready) begin
          saw_wr = 1;
          check(mem_req.we && mem_req.addr == addr_t'(t * 7) * SLOT_WORDS + HDR_WORD
                && mem_req.wdata == {1'b0, 55'b0, 4'(m.npre), 4'(m.nsuf)}, "invalidating header write");
        end
        if (tn_valid && tn_ready) begin
          check(got < exp.size() && tn_equal(tn, exp[got]), $sformatf("TransferNode %0d of MN %0d", got, t));
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      n_tn += got;
      check(saw_wr, "header written");
      check(got == exp.size(), $sformatf("%0d TransferNodes, expected %0d", got, exp.size()));
      if (stall_free) check(cyc == 2 + 2 * MAXE * MAXE, $sformatf("%0d cycles", cyc));
    end
    $display("TransferNodes checked %0d", n_tn);
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
