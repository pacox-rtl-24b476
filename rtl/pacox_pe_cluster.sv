// pacox_pe_cluster: a group of PES_PER_CLUSTER (4) processing elements.
//
// The paper groups four PEs so that one 128-bit DMA beat carries one result
// entry from each of them. The cluster broadcasts the context, start and the
// readout address to its PEs, reports done when all of them are done, and
// packs their readout data into one word: lane q (bits 32q+31 .. 32q) holds
// the 21-bit entry {k, m} of PE number CLUSTER_ID*4 + q, zero-extended.
// Readout timing: ro_re/ro_addr at edge t give ro_data after edge t.
// The zero-extension to 32-bit lanes is this design's choice.
module pacox_pe_cluster
  import pacox_pkg::*;
#(
  parameter int unsigned CLUSTER_ID      = 0,
  parameter int unsigned PES_PER_CLUSTER = 4,
  parameter int unsigned LOG2_PES        = 5,
  parameter int unsigned LDM_DEPTH       = 16384,
  parameter int unsigned AW              = $clog2(LDM_DEPTH)
)(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              ctx_load,
  input  context_t                          ctx_in,
  input  logic                              start,
  output logic                              busy,
  output logic                              done,
  input  logic                              ro_re,
  input  logic [AW-1:0]                     ro_addr,
  output logic [PES_PER_CLUSTER*LANE_W-1:0] ro_data
);
  logic   [PES_PER_CLUSTER-1:0] pe_busy, pe_done;
  entry_t                       pe_data [PES_PER_CLUSTER];

  for (genvar q = 0; q < PES_PER_CLUSTER; q++) begin : g_pe
    pacox_pe #(
      .PE_ID(CLUSTER_ID*PES_PER_CLUSTER + q), .LOG2_PES(LOG2_PES),
      .LDM_DEPTH(LDM_DEPTH), .AW(AW)
    ) u_pe (
      .clk, .rst_n, .ctx_load, .ctx_in, .start,
      .busy(pe_busy[q]), .done(pe_done[q]),
      .ro_re, .ro_addr, .ro_data(pe_data[q])
    );
    assign ro_data[q*LANE_W +: LANE_W] = LANE_W'(pe_data[q]);
  end

  assign busy = |pe_busy;
  assign done = &pe_done;
endmodule
