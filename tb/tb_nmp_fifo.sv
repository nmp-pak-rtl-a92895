// tb_nmp_fifo: self-checking test of nmp_fifo. Random pushes and pops
// against a queue model; checks order, full (DEPTH entries accepted, then
// in_ready low), empty, the count output, and that the depth derived from
// BYTES is BYTES*8/WIDTH.
module tb_nmp_fifo;
  localparam int unsigned WIDTH = 40, BYTES = 80;   // 16 entries
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];

  nmp_fifo #(.WIDTH(WIDTH), .BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; in_data = WIDTH'($urandom) ^ WIDTH'(i << 20);
      @(posedge clk);
      if (in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    check(model.size() == 16, $sformatf("accepted %0d entries, expected 16", model.size()));
    check(!in_ready && count == 16, "full");
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = WIDTH'({$urandom, $urandom});
      #1;
      if (out_valid) check(model.size() != 0 && out_data == model[0], "order");
      check(out_valid == (model.size() != 0), "valid matches model");
      check(int'(count) == model.size(), "count");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    // drain
    in_valid = 0; out_ready = 1;
    while (model.size() != 0) begin
      #1 check(out_valid && out_data == model[0], "drain order");
      @(posedge clk); void'(model.pop_front()); @(negedge clk);
    end
    check(!out_valid, "empty at end");
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
