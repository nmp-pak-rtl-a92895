// tb_nmp_crossbar: self-checking test of the (NPE+1)x(NPE+1) TransferNode
// crossbar at the paper's size (17x17). Every input sends random
// TransferNodes to random outputs while outputs apply random back-pressure.
// Each TransferNode carries its source and sequence number in its payload;
// checks that every one arrives exactly once, at the right output, in order
// per source, that an output never holds a TransferNode longer than needed,
// and that with all outputs ready 17 inputs to 17 distinct outputs all pass
// in one cycle.
module tb_nmp_crossbar;
  import nmp_pkg::*;
  localparam int unsigned NPE = 16, NP = NPE + 1;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [4:0] in_port [NP];
  tn_t in_tn [NP], out_tn [NP];
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;
  logic [NP-1:0] acc;
  int next_seq [NP][NP];   // [src][dst] next expected sequence
  int tx_seq [NP][NP];

  nmp_crossbar #(.NPE(NPE)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic new_tn(int i);
    int d = $urandom % NP;
    in_port[i] = 5'(d);
    in_tn[i] = '0;
    in_tn[i].dst_idx = mn_idx_t'(i);           // source
    in_tn[i].new_nbr = mn_idx_t'(tx_seq[i][d]); // sequence per (src,dst)
    in_tn[i].count   = 16'(d);
  endtask

  initial begin
    for (int i = 0; i < NP; i++) for (int d = 0; d < NP; d++) begin next_seq[i][d] = 0; tx_seq[i][d] = 0; end
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NP; i++) begin in_port[i] = 0; in_tn[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // one-cycle permutation: input i -> output (i+3) mod NP
    out_ready = '1;
    for (int i = 0; i < NP; i++) begin in_valid[i] = 1; in_port[i] = 5'((i + 3) % NP); in_tn[i] = '0; in_tn[i].count = 16'(i); end
    #1 check(in_ready == '1, "permutation passes in one cycle");
    @(negedge clk);
    in_valid = '0;
    for (int o = 0; o < NP; o++) check(out_valid[o] && int'(out_tn[o].count) == (o + NP - 3) % NP, "permutation output");
    @(negedge clk);
    // random traffic
    for (int i = 0; i < NP; i++) new_tn(i);
    for (int c = 0; c < 6000; c++) begin
      for (int i = 0; i < NP; i++) in_valid[i] = (c < 5000) && ($urandom % 3 != 0);
      out_ready = NP'({$urandom, $urandom});
      #1;
      acc = in_valid & in_ready;
      for (int o = 0; o < NP; o++)
        if (out_valid[o] && out_ready[o]) begin
          int s;
          s = int'(out_tn[o].dst_idx);
          check(int'(out_tn[o].count) == o, "right output");
          check(int'(out_tn[o].new_nbr) == next_seq[s][o], $sformatf("order src %0d dst %0d", s, o));
          next_seq[s][o]++;
          recv++;
        end
      @(negedge clk);
      for (int i = 0; i < NP; i++)
        if (acc[i]) begin
          tx_seq[i][int'(in_port[i])]++;
          sent++;
          new_tn(i);
        end
    end
    out_ready = '1;
    repeat (3) begin
      #1;
      for (int o = 0; o < NP; o++) if (out_valid[o]) begin recv++; next_seq[int'(out_tn[o].dst_idx)][o]++; end
      @(negedge clk);
    end
    check(sent == recv && sent > 10000, $sformatf("sent %0d received %0d", sent, recv));
    for (int i = 0; i < NP; i++) for (int d = 0; d < NP; d++) check(tx_seq[i][d] == next_seq[i][d], "all delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
