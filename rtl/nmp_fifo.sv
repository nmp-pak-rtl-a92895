// nmp_fifo: synchronous first-in first-out buffer used for every on-PE
// buffer: the MacroNode buffers ("Buffer for next MNs") of stages P1 and P2,
// and the TransferNode buffer and TransferNode scratchpad of stage P3.
//
// The paper sizes these buffers in bytes (MacroNode buffer 4 KB, TransferNode
// buffer/scratchpad 1 KB); the number of entries is BYTES*8 divided by the
// entry width, rounded down. Storage is a plain array (a memory macro after
// synthesis) with a write and a read pointer; any depth of two or more works.
//
// Interface: valid/ready on both sides. An entry pushed in cycle t can be
// popped from cycle t+1 (registered storage, output read from the array at
// the read pointer). Push and pop may happen in the same cycle. The queue
// discipline and the handshake are this design's choices; the paper only
// names and sizes the buffers.
module nmp_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned BYTES = 1024,
  parameter int unsigned DEPTH = (BYTES * 8) / WIDTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  initial assert (DEPTH >= 2) else $error("nmp_fifo: DEPTH %0d too small", DEPTH);

  // A pop never happens on an empty queue, a push never on a full one.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> count < ($clog2(DEPTH+1))'(DEPTH));
endmodule
