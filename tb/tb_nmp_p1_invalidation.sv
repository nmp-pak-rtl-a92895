// tb_nmp_p1_invalidation: self-checking test of the P1 invalidation check.
// Random MacroNodes (random (k-1)-mers, often starting with G so that some
// are the largest among their neighbours; random prefixes and suffixes,
// sometimes empty or long) are decided by the DUT and by the text-based
// reference rule. Checks the decision, the forwarded index and data1, the
// guarded event, and that each MacroNode takes 2 cycles when P2 is ready.
module tb_nmp_p1_invalidation;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  mn_idx_t in_idx, out_idx;
  mn_data1_t in_data1, out_data1;
  logic ev_checked, ev_invalidate, ev_guarded;
  int checks = 0, failures = 0, n_inv = 0, n_grd = 0;

  nmp_p1_invalidation dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic rmn_t rand_mn();
    rmn_t m;
    m.kmer  = (($urandom % 2) != 0) ? {"G", rand_dna(KM1 - 1)} : rand_dna(KM1);
    m.valid = ($urandom % 8) != 0;
    m.npre  = ($urandom % 10 == 0) ? 0 : 1 + $urandom % MAXE;
    m.nsuf  = ($urandom % 10 == 0) ? 0 : 1 + $urandom % MAXE;
    for (int i = 0; i < MAXE; i++) begin
      int lp = ($urandom % 6 == 0) ? 14 + $urandom % 10 : 1 + $urandom % 3;
      int ls = ($urandom % 6 == 0) ? 14 + $urandom % 10 : 1 + $urandom % 3;
      if ($urandom % 30 == 0) lp = 0;
      m.pre[i] = rand_dna(lp);
      m.suf[i] = rand_dna(ls);
      m.pcnt[i] = 0; m.scnt[i] = 0; m.pnbr[i] = 0; m.snbr[i] = 0;
      for (int j = 0; j < MAXE; j++) m.wiring[i][j] = 0;
    end
    return m;
  endfunction

  initial begin
    word_t w [20];
    word_t [DATA1_WORDS-1:0] pw;
    in_valid = 0; out_ready = 1; in_idx = '0; in_data1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      rmn_t m;
      bit exp_inv, exp_grd;
      int cyc;
      bit rdy0;
      m = rand_mn();
      exp_inv = ref_invalidate(m, exp_grd);
      mn2words(m, w);
      for (int i = 0; i < DATA1_WORDS; i++) pw[i] = w[i];
      @(negedge clk);
      in_valid = 1; in_idx = mn_idx_t'(t); in_data1 = unpack_data1(pw);
      out_ready = ($urandom % 4) != 0;
      rdy0 = out_ready;
      check(in_ready, "register free");
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      #1;
      check(out_valid == exp_inv, $sformatf("decision for %s: got %0d expected %0d", m.kmer, out_valid, exp_inv));
      check(ev_guarded == exp_grd, "guarded event");
      if (exp_inv) n_inv++;
      if (exp_grd) n_grd++;
      if (out_valid) check(out_idx == mn_idx_t'(t) && out_data1 == unpack_data1(pw), "forwarded data");
      while (!(ev_checked)) begin @(negedge clk); out_ready = 1; cyc++; #1; end
      check(ev_invalidate == exp_inv, "invalidate event");
      if (rdy0 && cyc != 1) check(0, "decision took more than one cycle with P2 ready");
      @(negedge clk);
      check(in_ready, "register released after decision");
    end
    check(n_inv > 50 && n_grd > 5, $sformatf("coverage: %0d invalidated, %0d guarded", n_inv, n_grd));
    $display("invalidated %0d guarded %0d", n_inv, n_grd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
