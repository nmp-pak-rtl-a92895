// nmp_pe: one pipelined systolic Processing Element for Iterative Compaction.
//
// Three stages work on different MacroNodes at the same time:
//   P1 Invalidation Check   load unit (reads MN data1) -> MacroNode buffer
//                           -> current-MN register + ALU (nmp_p1_invalidation)
//   P2 TransferNode Extr.   load unit (reads only MN data2, reuses P1's data1)
//                           -> MacroNode buffer -> current-MN register + ALU
//                           (nmp_p2_extraction) -> TransferNode buffer
//   P3 Routing and Update   destination PE/DIMM lookup (nmp_dest_calc): own
//                           scratchpad, crossbar to another PE, or crossbar
//                           to the network bridge; TransferNode scratchpad
//                           (fed locally and from the crossbar) -> ALU that
//                           rewrites the target MacroNode (nmp_p3_update)
// Only MacroNodes that P1 marks for invalidation enter P2. Each stage has its
// own DRAM port, as drawn in the paper's PE figure; the P2 port is shared by
// the P2 load unit and the header write of the P2 ALU (the write wins).
// Buffer sizes are the paper's: 4 KB MacroNode buffers, 1 KB TransferNode
// buffer and scratchpad.
//
// Interface: cmd_* takes MacroNode indices from the host's memory controller
// (valid/ready). xbar_out_* sends a TransferNode with its crossbar port;
// xbar_in_* receives one from the crossbar. busy is high while any
// MacroNode or TransferNode is inside the PE; the host waits for all PEs to
// be idle before starting the next iteration. stats counts the pipeline
// events. Local/crossbar arbitration into the scratchpad (local first),
// the counters and busy are this design's choices.
module nmp_pe
  import nmp_pkg::*;
#(
  parameter int unsigned NPE         = 16,
  parameter int unsigned NDIMM       = 8,
  parameter int unsigned MN_BUF_BYTES = 4096,
  parameter int unsigned TN_BUF_BYTES = 1024,
  localparam int unsigned PW = $clog2(NPE + 1),
  localparam int unsigned DW = (NDIMM > 1) ? $clog2(NDIMM) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [DW-1:0]   my_dimm,
  input  logic [PW-1:0]   my_pe,
  // mapping table write
  input  logic            tbl_we,
  input  logic [DW-1:0]   tbl_addr,
  input  kmer_t           tbl_kmer,
  // MacroNode indices from the host
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  mn_idx_t         cmd_idx,
  // DRAM ports of P1, P2, P3
  output mem_req_t        mem_req   [3],
  input  logic [2:0]      mem_ready,
  input  mem_rsp_t        mem_rsp   [3],
  // crossbar
  output logic            xbar_out_valid,
  input  logic            xbar_out_ready,
  output logic [PW-1:0]   xbar_out_port,
  output tn_t             xbar_out_tn,
  input  logic            xbar_in_valid,
  output logic            xbar_in_ready,
  input  tn_t             xbar_in_tn,
  // status
  output logic            busy,
  output pe_stats_t       stats
);
  localparam int unsigned E1_W = $bits(mn_idx_t) + $bits(mn_data1_t);
  localparam int unsigned E2_W = $bits(mn_idx_t) + $bits(mn_data1_t) + DATA2_WORDS * WORD_W;

  // ---------------- P1 ----------------
  logic                   lu1_valid, lu1_ready;
  mn_idx_t                lu1_idx;
  logic [0:0]             lu1_pay;
  word_t [DATA1_WORDS-1:0] lu1_words;
  logic                   b1_valid, b1_ready;
  logic [E1_W-1:0]        b1_data;
  logic [$clog2((MN_BUF_BYTES*8)/E1_W+1)-1:0] b1_count;
  mn_idx_t                p1_out_idx;
  mn_data1_t              p1_out_d1;
  logic                   p1_out_valid, p1_out_ready, p1_in_ready;
  logic                   ev_chk, ev_inv, ev_grd;

  nmp_load_unit #(.OFFSET(DATA1_OFF), .NWORDS(DATA1_WORDS), .PAYLOAD(1)) u_lu1 (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_idx(cmd_idx), .in_payload(1'b0),
    .mem_req(mem_req[0]), .mem_ready(mem_ready[0]), .mem_rsp(mem_rsp[0]),
    .out_valid(lu1_valid), .out_ready(lu1_ready), .out_idx(lu1_idx),
    .out_payload(lu1_pay), .out_words(lu1_words));

  nmp_fifo #(.WIDTH(E1_W), .BYTES(MN_BUF_BYTES)) u_mn_buf1 (
    .clk, .rst_n,
    .in_valid(lu1_valid), .in_ready(lu1_ready), .in_data({lu1_idx, unpack_data1(lu1_words)}),
    .out_valid(b1_valid), .out_ready(b1_ready), .out_data(b1_data), .count(b1_count));

  nmp_p1_invalidation u_p1 (
    .clk, .rst_n,
    .in_valid(b1_valid), .in_ready(p1_in_ready),
    .in_idx(b1_data[E1_W-1 -: 32]), .in_data1(b1_data[$bits(mn_data1_t)-1:0]),
    .out_valid(p1_out_valid), .out_ready(p1_out_ready), .out_idx(p1_out_idx), .out_data1(p1_out_d1),
    .ev_checked(ev_chk), .ev_invalidate(ev_inv), .ev_guarded(ev_grd));
  assign b1_ready = p1_in_ready;

  // ---------------- P2 ----------------
  mem_req_t               lu2_req, p2_req;
  logic                   lu2_valid, lu2_ready;
  mn_idx_t                lu2_idx;
  mn_data1_t              lu2_d1;
  word_t [DATA2_WORDS-1:0] lu2_words;
  logic                   b2_valid, b2_ready;
  logic [E2_W-1:0]        b2_data;
  logic [$clog2((MN_BUF_BYTES*8)/E2_W+1)-1:0] b2_count;
  logic                   tn_valid, tn_ready;
  tn_t                    tn_p2;

  nmp_load_unit #(.OFFSET(DATA2_OFF), .NWORDS(DATA2_WORDS), .PAYLOAD($bits(mn_data1_t))) u_lu2 (
    .clk, .rst_n,
    .in_valid(p1_out_valid), .in_ready(p1_out_ready), .in_idx(p1_out_idx), .in_payload(p1_out_d1),
    .mem_req(lu2_req), .mem_ready(mem_ready[1] && !p2_req.valid), .mem_rsp(mem_rsp[1]),
    .out_valid(lu2_valid), .out_ready(lu2_ready), .out_idx(lu2_idx),
    .out_payload(lu2_d1), .out_words(lu2_words));

  nmp_fifo #(.WIDTH(E2_W), .BYTES(MN_BUF_BYTES)) u_mn_buf2 (
    .clk, .rst_n,
    .in_valid(lu2_valid), .in_ready(lu2_ready), .in_data({lu2_idx, lu2_d1, lu2_words}),
    .out_valid(b2_valid), .out_ready(b2_ready), .out_data(b2_data), .count(b2_count));

  nmp_p2_extraction u_p2 (
    .clk, .rst_n,
    .in_valid(b2_valid), .in_ready(b2_ready),
    .in_idx(b2_data[E2_W-1 -: 32]),
    .in_data1(b2_data[DATA2_WORDS*WORD_W +: $bits(mn_data1_t)]),
    .in_data2(unpack_data2(b2_data[DATA2_WORDS*WORD_W-1:0])),
    .mem_req(p2_req), .mem_ready(mem_ready[1]),
    .tn_valid(tn_valid), .tn_ready(tn_ready), .tn(tn_p2));

  assign mem_req[1] = p2_req.valid ? p2_req : lu2_req;

  // ---------------- P3 ----------------
  logic                   tb_valid, tb_ready;
  tn_t                    tb_tn;
  logic [$clog2((TN_BUF_BYTES*8)/$bits(tn_t)+1)-1:0] tb_count, sp_count;
  logic [DW-1:0]          dst_dimm;
  logic [PW-1:0]          dst_port;
  logic                   dst_local;
  logic                   sp_in_valid, sp_in_ready, sp_valid, sp_ready;
  tn_t                    sp_in_tn, sp_tn;
  logic                   p3_busy, ev_upd, ev_unm;

  nmp_fifo #(.WIDTH($bits(tn_t)), .BYTES(TN_BUF_BYTES)) u_tn_buf (
    .clk, .rst_n,
    .in_valid(tn_valid), .in_ready(tn_ready), .in_data(tn_p2),
    .out_valid(tb_valid), .out_ready(tb_ready), .out_data(tb_tn), .count(tb_count));

  nmp_dest_calc #(.NPE(NPE), .NDIMM(NDIMM)) u_dest (
    .clk, .rst_n, .tbl_we, .tbl_addr, .tbl_kmer, .my_dimm, .my_pe,
    .dst_kmer(tb_tn.dst_kmer), .dst_idx(tb_tn.dst_idx),
    .dst_dimm(dst_dimm), .dst_port(dst_port), .is_local(dst_local));

  // Route: own scratchpad (local first) or crossbar.
  assign xbar_out_valid = tb_valid && !dst_local;
  assign xbar_out_port  = dst_port;
  assign xbar_out_tn    = tb_tn;
  assign sp_in_valid    = (tb_valid && dst_local) || xbar_in_valid;
  assign sp_in_tn       = (tb_valid && dst_local) ? tb_tn : xbar_in_tn;
  assign tb_ready       = dst_local ? sp_in_ready : xbar_out_ready;
  assign xbar_in_ready  = sp_in_ready && !(tb_valid && dst_local);

  nmp_fifo #(.WIDTH($bits(tn_t)), .BYTES(TN_BUF_BYTES)) u_tn_scratch (
    .clk, .rst_n,
    .in_valid(sp_in_valid), .in_ready(sp_in_ready), .in_data(sp_in_tn),
    .out_valid(sp_valid), .out_ready(sp_ready), .out_data(sp_tn), .count(sp_count));

  nmp_p3_update u_p3 (
    .clk, .rst_n,
    .in_valid(sp_valid), .in_ready(sp_ready), .in_tn(sp_tn),
    .mem_req(mem_req[2]), .mem_ready(mem_ready[2]), .mem_rsp(mem_rsp[2]),
    .busy(p3_busy), .ev_updated(ev_upd), .ev_unmatched(ev_unm));

  // ---------------- status ----------------
  assign busy = !cmd_ready || (b1_count != '0) || !p1_in_ready || !p1_out_ready
             || (b2_count != '0) || !b2_ready || (tb_count != '0) || (sp_count != '0) || p3_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      stats.checked     <= stats.checked     + 32'(ev_chk);
      stats.invalidated <= stats.invalidated + 32'(ev_inv);
      stats.guarded     <= stats.guarded     + 32'(ev_grd);
      stats.tn_made     <= stats.tn_made     + 32'(tn_valid && tn_ready);
      stats.tn_local    <= stats.tn_local    + 32'(tb_valid && dst_local && sp_in_ready);
      stats.tn_xbar     <= stats.tn_xbar     + 32'(xbar_out_valid && xbar_out_ready && dst_port != PW'(NPE));
      stats.tn_bridge   <= stats.tn_bridge   + 32'(xbar_out_valid && xbar_out_ready && dst_port == PW'(NPE));
      stats.updated     <= stats.updated     + 32'(ev_upd);
      stats.unmatched   <= stats.unmatched   + 32'(ev_unm);
    end
  end
endmodule
