// nmp_buffer_chip: the near-memory processing logic placed in the buffer
// chip of one DIMM (top of this design).
//
// It holds NPE processing elements (nmp_pe) and one (NPE+1)x(NPE+1)
// TransferNode crossbar (nmp_crossbar). Crossbar ports 0..NPE-1 are the PEs;
// port NPE is the network bridge that links the buffer chips of the DIMMs
// of the system. TransferNodes that arrive from the bridge are steered to the
// PE that owns their destination MacroNode (index mod NPE).
//
// Outside this module, and brought out as ports: the DRAM of the DIMM (three
// request/response ports per PE, one per pipeline stage), the network
// bridge (one TransferNode stream each way, valid/ready), and the host, which
// writes the mapping table (tbl_*), issues MacroNode indices to each PE
// (cmd_*), and starts iteration i+1 only when every PE of every DIMM reports
// busy low.
//
// The defaults are the paper's main configuration: 16 PEs per buffer chip
// (a 17x17 crossbar) and 8 DIMMs, one per DDR4 channel. my_dimm is the
// DIMM's position in the (k-1)-mer order.
module nmp_buffer_chip
  import nmp_pkg::*;
#(
  parameter int unsigned NPE          = 16,
  parameter int unsigned NDIMM        = 8,
  parameter int unsigned MN_BUF_BYTES = 4096,
  parameter int unsigned TN_BUF_BYTES = 1024,
  localparam int unsigned PW = $clog2(NPE + 1),
  localparam int unsigned DW = (NDIMM > 1) ? $clog2(NDIMM) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DW-1:0]       my_dimm,
  // mapping table
  input  logic                tbl_we,
  input  logic [DW-1:0]       tbl_addr,
  input  kmer_t               tbl_kmer,
  // MacroNode indices, one stream per PE
  input  logic [NPE-1:0]      cmd_valid,
  output logic [NPE-1:0]      cmd_ready,
  input  mn_idx_t             cmd_idx   [NPE],
  // DRAM: [pe][stage]
  output mem_req_t            mem_req   [NPE][3],
  input  logic [2:0]          mem_ready [NPE],
  input  mem_rsp_t            mem_rsp   [NPE][3],
  // network bridge
  output logic                br_out_valid,
  input  logic                br_out_ready,
  output tn_t                 br_out_tn,
  input  logic                br_in_valid,
  output logic                br_in_ready,
  input  tn_t                 br_in_tn,
  // status
  output logic [NPE-1:0]      busy,
  output pe_stats_t           stats     [NPE]
);
  logic [NPE:0]    xi_valid, xi_ready, xo_valid, xo_ready;
  logic [PW-1:0]   xi_port [NPE+1];
  tn_t             xi_tn   [NPE+1];
  tn_t             xo_tn   [NPE+1];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    nmp_pe #(.NPE(NPE), .NDIMM(NDIMM), .MN_BUF_BYTES(MN_BUF_BYTES), .TN_BUF_BYTES(TN_BUF_BYTES)) u_pe (
      .clk, .rst_n, .my_dimm, .my_pe(PW'(p)),
      .tbl_we, .tbl_addr, .tbl_kmer,
      .cmd_valid(cmd_valid[p]), .cmd_ready(cmd_ready[p]), .cmd_idx(cmd_idx[p]),
      .mem_req(mem_req[p]), .mem_ready(mem_ready[p]), .mem_rsp(mem_rsp[p]),
      .xbar_out_valid(xi_valid[p]), .xbar_out_ready(xi_ready[p]),
      .xbar_out_port(xi_port[p]), .xbar_out_tn(xi_tn[p]),
      .xbar_in_valid(xo_valid[p]), .xbar_in_ready(xo_ready[p]), .xbar_in_tn(xo_tn[p]),
      .busy(busy[p]), .stats(stats[p]));
  end

  // Bridge input: destination PE from the MacroNode index.
  assign xi_valid[NPE] = br_in_valid;
  assign br_in_ready   = xi_ready[NPE];
  assign xi_port[NPE]  = PW'(br_in_tn.dst_idx % NPE);
  assign xi_tn[NPE]    = br_in_tn;
  // Bridge output.
  assign br_out_valid  = xo_valid[NPE];
  assign xo_ready[NPE] = br_out_ready;
  assign br_out_tn     = xo_tn[NPE];

  nmp_crossbar #(.NPE(NPE)) u_xbar (
    .clk, .rst_n,
    .in_valid(xi_valid), .in_ready(xi_ready), .in_port(xi_port), .in_tn(xi_tn),
    .out_valid(xo_valid), .out_ready(xo_ready), .out_tn(xo_tn));
endmodule
