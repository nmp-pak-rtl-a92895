// nmp_dram_model: behavioural model of the DIMM's DRAM as seen by the PE
// pipeline stages (not synthesizable; testbench only).
//
// NPORTS request/response ports share one word-addressed memory (a sparse
// associative array, unwritten words read as 0). A read accepted in cycle t
// returns the value the word has at time t, in order, LAT cycles later.
// Writes take effect when accepted. When STALL is non-zero, each port is
// made not-ready in a random 1 of STALL cycles to exercise back-pressure;
// stall_cycles counts those refusals while a request was waiting.
module nmp_dram_model
  import nmp_pkg::*;
#(
  parameter int unsigned NPORTS = 3,
  parameter int unsigned LAT    = 4,
  parameter int unsigned STALL  = 0
) (
  input  logic              clk,
  input  logic              rst_n,    // requests are ignored while low
  input  mem_req_t          req   [NPORTS],
  output logic [NPORTS-1:0] ready,
  output mem_rsp_t          rsp   [NPORTS]
);
  word_t mem [addr_t];
  typedef struct { longint due; word_t d; } pend_t;
  pend_t  q [NPORTS][$];
  longint cyc = 0;
  longint stall_cycles = 0;

  function automatic word_t rd(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic wr(addr_t a, word_t d);
    mem[a] = d;
  endtask

  initial begin
    ready = '1;
    for (int p = 0; p < NPORTS; p++) rsp[p] = '0;
  end

  always @(posedge clk) begin
    cyc++;
    for (int p = 0; p < NPORTS; p++) begin
      if (!rst_n) begin
      end else if (req[p].valid && ready[p]) begin
        if (req[p].we) mem[req[p].addr] = req[p].wdata;
        else           q[p].push_back('{due: cyc + LAT, d: rd(req[p].addr)});
      end else if (req[p].valid) begin
        stall_cycles++;
      end
    end
    for (int p = 0; p < NPORTS; p++) begin
      if (q[p].size() != 0 && q[p][0].due <= cyc) begin
        rsp[p] <= '{valid: 1'b1, rdata: q[p][0].d};
        void'(q[p].pop_front());
      end else begin
        rsp[p] <= '0;
      end
      ready[p] <= (STALL == 0) ? 1'b1 : (($urandom % STALL) != 0);
    end
  end
endmodule
