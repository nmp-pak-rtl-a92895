// tb_nmp_load_unit: self-checking test of nmp_load_unit with the DRAM model
// (latency 4, random back-pressure). Loads random MacroNode indices and
// checks index, payload, every word, and the time from accepting the index
// to presenting the entry: NWORDS requests + LAT, plus stalled cycles.
module tb_nmp_load_unit;
  import nmp_pkg::*;
  localparam int unsigned NW = DATA2_WORDS, OFF = DATA2_OFF, LAT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  mn_idx_t in_idx, out_idx;
  logic [7:0] in_payload, out_payload;
  word_t [NW-1:0] out_words;
  mem_req_t req [1];
  logic [0:0] ready;
  mem_rsp_t rsp [1];
  int checks = 0, failures = 0;

  nmp_load_unit #(.OFFSET(OFF), .NWORDS(NW), .PAYLOAD(8)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_idx, .in_payload,
    .mem_req(req[0]), .mem_ready(ready[0]), .mem_rsp(rsp[0]),
    .out_valid, .out_ready, .out_idx, .out_payload, .out_words);
  nmp_dram_model #(.NPORTS(1), .LAT(LAT), .STALL(4)) mem (.clk, .rst_n, .req, .ready, .rsp);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_idx = '0; in_payload = '0;
    for (int i = 0; i < 64; i++)
      for (int w = 0; w < SLOT_WORDS; w++) mem.wr(addr_t'(i * SLOT_WORDS + w), {32'(i), 32'(w)} ^ 64'hA5A5_0000_0000_5A5A);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int idx, cyc;
      longint st0;
      idx = $urandom % 64; cyc = 0;
      @(negedge clk);
      in_valid = 1; in_idx = idx; in_payload = 8'(t);
      st0 = mem.stall_cycles;
      @(posedge clk);
      check(in_ready, "accepts index when idle");
      @(negedge clk); in_valid = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      check(out_idx == mn_idx_t'(idx) && out_payload == 8'(t), "index and payload");
      for (int w = 0; w < NW; w++)
        check(out_words[w] == ({32'(idx), 32'(OFF + w)} ^ 64'hA5A5_0000_0000_5A5A), $sformatf("word %0d of MN %0d", w, idx));
      check(cyc <= NW + LAT + 1 + int'(mem.stall_cycles - st0), $sformatf("latency %0d cycles", cyc));
      check(cyc >= NW + LAT - 1, $sformatf("latency %0d not below bound", cyc));
      out_ready = 1; @(negedge clk); out_ready = 0;
      check(!out_valid && in_ready, "idle after hand-off");
    end
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
