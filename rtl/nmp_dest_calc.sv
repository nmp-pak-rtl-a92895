// nmp_dest_calc: "Calculate destination PE/DIMM" of stage P3, with the
// per-DIMM mapping table.
//
// MacroNodes are stored in ascending (k-1)-mer order across the DIMMs, DIMM 0
// holding the smallest. The table holds, for every DIMM, the (k-1)-mer of the
// largest MacroNode it stores. The destination DIMM of a TransferNode is the
// first DIMM whose entry is greater than or equal to the destination
// (k-1)-mer (a key above every entry goes to the last DIMM). This is the
// paper's static mapping table; the compare-all-entries-in-parallel form and
// the "greater or equal" boundary are this design's reading of it.
//
// Inside a DIMM, MacroNode idx belongs to PE (idx mod NPE), the PE that also
// runs its P1/P2. This generalises the paper's walkthrough, where
// consecutive MacroNodes sit on consecutive PEs and a TransferNode is applied
// by the PE holding its destination; the paper gives no general rule. The result is one of three routes:
// the PE's own scratchpad, crossbar port PE, or crossbar port NPE (the
// network bridge).
//
// The table is written by the host through tbl_we/tbl_addr/tbl_kmer (one
// entry per cycle). The lookup itself is combinational.
module nmp_dest_calc
  import nmp_pkg::*;
#(
  parameter int unsigned NPE   = 16,
  parameter int unsigned NDIMM = 8,
  localparam int unsigned PW   = $clog2(NPE + 1),
  localparam int unsigned DW   = (NDIMM > 1) ? $clog2(NDIMM) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tbl_we,
  input  logic [DW-1:0]     tbl_addr,
  input  kmer_t             tbl_kmer,
  input  logic [DW-1:0]     my_dimm,
  input  logic [PW-1:0]     my_pe,
  input  kmer_t             dst_kmer,
  input  mn_idx_t           dst_idx,
  output logic [DW-1:0]     dst_dimm,
  output logic [PW-1:0]     dst_port,   // crossbar output: PE number, or NPE for the bridge
  output logic              is_local    // own scratchpad
);
  kmer_t table_q [NDIMM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NDIMM; d++) table_q[d] <= '1;
    end else if (tbl_we) begin
      table_q[tbl_addr] <= tbl_kmer;
    end
  end

  always_comb begin
    logic found;
    found    = 1'b0;
    dst_dimm = DW'(NDIMM - 1);
    for (int d = 0; d < NDIMM; d++) begin
      if (!found && dst_kmer <= table_q[d]) begin
        found    = 1'b1;
        dst_dimm = DW'(d);
      end
    end
    if (dst_dimm != my_dimm) dst_port = PW'(NPE);
    else                     dst_port = PW'(dst_idx % NPE);
    is_local = (dst_port == my_pe);
  end
endmodule
