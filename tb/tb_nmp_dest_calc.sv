// tb_nmp_dest_calc: self-checking test of the mapping-table lookup. Writes a
// random ascending table of per-DIMM maximum (k-1)-mers, then checks random
// keys (and keys equal to / one above each boundary) against a linear search
// over the text form, for every (my_dimm, my_pe) pair: destination DIMM,
// crossbar port (PE = idx mod NPE, or NPE for the bridge) and the local flag.
module tb_nmp_dest_calc;
  import nmp_pkg::*;
  import nmp_ref_pkg::*;
  localparam int unsigned NPE = 16, NDIMM = 8;
  logic clk = 0, rst_n = 0;
  logic tbl_we;
  logic [2:0] tbl_addr, my_dimm, dst_dimm;
  kmer_t tbl_kmer, dst_kmer;
  logic [4:0] my_pe, dst_port;
  mn_idx_t dst_idx;
  logic is_local;
  int checks = 0, failures = 0;
  string bound [NDIMM];

  nmp_dest_calc #(.NPE(NPE), .NDIMM(NDIMM)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_dimm(string k);
    for (int d = 0; d < NDIMM; d++) if (!greater(k, bound[d])) return d;
    return NDIMM - 1;
  endfunction

  task automatic probe(string k);
    int d, p;
    dst_kmer = s2kmer(k);
    dst_idx  = $urandom;
    my_dimm  = 3'($urandom % NDIMM);
    my_pe    = 5'($urandom % NPE);
    #1;
    d = ref_dimm(k);
    p = (d == int'(my_dimm)) ? int'(dst_idx % NPE) : NPE;
    check(int'(dst_dimm) == d, $sformatf("DIMM of %s: %0d expected %0d", k, dst_dimm, d));
    check(int'(dst_port) == p, "port");
    check(is_local == (p == int'(my_pe)), "local flag");
  endtask

  initial begin
    string s [$];
    tbl_we = 0; tbl_addr = 0; tbl_kmer = 0; dst_kmer = 0; dst_idx = 0; my_dimm = 0; my_pe = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      s.delete();
      for (int d = 0; d < NDIMM; d++) s.push_back(rand_dna(KM1));
      // sort ascending (insertion sort on the text)
      for (int i = 1; i < NDIMM; i++)
        for (int j = i; j > 0 && greater(s[j-1], s[j]); j--) begin string x = s[j]; s[j] = s[j-1]; s[j-1] = x; end
      for (int d = 0; d < NDIMM; d++) begin
        bound[d] = s[d];
        @(negedge clk); tbl_we = 1; tbl_addr = 3'(d); tbl_kmer = s2kmer(s[d]);
      end
      @(negedge clk); tbl_we = 0;
      for (int i = 0; i < 200; i++) probe(rand_dna(KM1));
      for (int d = 0; d < NDIMM; d++) begin
        probe(bound[d]);
        if (bound[d] != "GGGGGGGGGGGGGGGGGGGGGGGGGGGGGGG") probe(kmer2s(s2kmer(bound[d]) + 1));
      end
      // sweep my_pe to reach the local case
      for (int p = 0; p < NPE; p++) begin
        dst_kmer = s2kmer(bound[0]); my_dimm = 0; my_pe = 5'(p); dst_idx = mn_idx_t'(p + NPE * r);
        #1 check(is_local && int'(dst_port) == p, "own PE is local");
      end
    end
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
