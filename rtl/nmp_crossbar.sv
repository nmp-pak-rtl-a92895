// nmp_crossbar: the TransferNode crossbar switch of one buffer chip.
//
// NP = NPE + 1 ports (17 x 17 for 16 PEs, as in the paper). Input i < NPE
// is the TransferNode output of PE i, input NPE is the network bridge
// (TransferNodes arriving from other DIMMs). Output o < NPE feeds the
// TransferNode scratchpad of PE o, output NPE goes to the network bridge
// (TransferNodes leaving for other DIMMs). Each input carries its
// destination port number with the TransferNode.
//
// Every output has a round-robin arbiter over the inputs that request it and
// one output register; a granted input sees in_ready in the same cycle.
// Different outputs work in parallel, so up to NP TransferNodes move per
// cycle. Port count and port assignment follow the paper; arbitration,
// the output register and the valid/ready handshake are this design's.
//
// Latency: one cycle from an accepted input to the output register.
module nmp_crossbar
  import nmp_pkg::*;
#(
  parameter int unsigned NPE = 16,
  localparam int unsigned NP = NPE + 1,
  localparam int unsigned PW = $clog2(NP)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NP-1:0]  in_valid,
  output logic [NP-1:0]  in_ready,
  input  logic [PW-1:0]  in_port [NP],
  input  tn_t            in_tn   [NP],
  output logic [NP-1:0]  out_valid,
  input  logic [NP-1:0]  out_ready,
  output tn_t            out_tn  [NP]
);
  logic [PW-1:0] rr    [NP];   // input with highest priority next, per output
  logic [NP-1:0] grant [NP];   // grant[o][i]
  logic [NP-1:0] take;         // output o loads its register this cycle
  logic [PW-1:0] gsel  [NP];

  function automatic logic [PW-1:0] rr_index(logic [PW-1:0] base, int unsigned k);
    return PW'((int'(base) + k) % NP);
  endfunction

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      grant[o] = '0;
      gsel[o]  = '0;
      take[o]  = 1'b0;
      for (int k = 0; k < NP; k++) begin
        if ((!out_valid[o] || out_ready[o]) && !take[o]
            && in_valid[rr_index(rr[o], k)] && int'(in_port[rr_index(rr[o], k)]) == o) begin
          take[o]                     = 1'b1;
          grant[o][rr_index(rr[o], k)] = 1'b1;
          gsel[o]                     = rr_index(rr[o], k);
        end
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NP; o++) in_ready = in_ready | grant[o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NP; o++) begin
        rr[o]     <= '0;
        out_tn[o] <= '0;
      end
    end else begin
      for (int o = 0; o < NP; o++) begin
        if (take[o]) begin
          out_valid[o] <= 1'b1;
          out_tn[o]    <= in_tn[gsel[o]];
          rr[o]        <= (gsel[o] == PW'(NP - 1)) ? '0 : gsel[o] + PW'(1);
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  // Every input port number names an existing output.
  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_port_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   in_valid[i] |-> int'(in_port[i]) < NP);
  end
endmodule
