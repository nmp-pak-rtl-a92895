// nmp_load_unit: the "Load Unit" in front of the MacroNode buffer of stages
// P1 and P2.
//
// It accepts one MacroNode index (plus an opaque side payload that travels
// with it, e.g. the data1 words already read by P1), reads NWORDS consecutive
// 64-bit words of that MacroNode's DRAM slot starting at word OFFSET, and
// presents {index, payload, words} as one buffer entry. P1 uses it with
// OFFSET 0 to read "MN data1"; P2 with OFFSET 10 to read only "MN data2", so
// the data1 words P1 already holds are reused (as the paper describes).
//
// Timing: reads are issued one per cycle as long as the DRAM port is ready,
// without waiting for answers; answers come back in order after any latency.
// The unit takes a new index once the previous entry has been accepted by the
// buffer. The read request format and this one-index-at-a-time policy are
// this design's choices.
module nmp_load_unit
  import nmp_pkg::*;
#(
  parameter int unsigned OFFSET  = 0,
  parameter int unsigned NWORDS  = DATA1_WORDS,
  parameter int unsigned PAYLOAD = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // index in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  mn_idx_t              in_idx,
  input  logic [PAYLOAD-1:0]   in_payload,
  // DRAM port
  output mem_req_t             mem_req,
  input  logic                 mem_ready,
  input  mem_rsp_t             mem_rsp,
  // entry out
  output logic                 out_valid,
  input  logic                 out_ready,
  output mn_idx_t              out_idx,
  output logic [PAYLOAD-1:0]   out_payload,
  output word_t [NWORDS-1:0]   out_words
);
  localparam int unsigned CW = $clog2(NWORDS + 1);

  typedef enum logic [1:0] {IDLE, FETCH, DONE} state_t;
  state_t          state;
  logic [CW-1:0]   n_req, n_rsp;

  assign in_ready  = (state == IDLE);
  assign out_valid = (state == DONE);

  always_comb begin
    mem_req       = '0;
    mem_req.valid = (state == FETCH) && (n_req < CW'(NWORDS));
    mem_req.we    = 1'b0;
    mem_req.addr  = slot_addr(out_idx, OFFSET) + addr_t'(n_req);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      n_req       <= '0;
      n_rsp       <= '0;
      out_idx     <= '0;
      out_payload <= '0;
      out_words   <= '0;
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          out_idx     <= in_idx;
          out_payload <= in_payload;
          n_req       <= '0;
          n_rsp       <= '0;
          state       <= FETCH;
        end
        FETCH: begin
          if (mem_req.valid && mem_ready) n_req <= n_req + CW'(1);
          if (mem_rsp.valid) begin
            out_words[n_rsp] <= mem_rsp.rdata;
            n_rsp            <= n_rsp + CW'(1);
            if (n_rsp == CW'(NWORDS - 1)) state <= DONE;
          end
        end
        DONE: if (out_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   mem_rsp.valid |-> (state == FETCH && n_rsp < n_req + CW'(mem_req.valid && mem_ready)));
endmodule
