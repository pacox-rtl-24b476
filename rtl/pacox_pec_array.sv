// pacox_pec_array: the processing-element cluster array.
//
// NUM_CLUSTERS (8) clusters of 4 PEs: the paper's 32 PEs. All PEs receive
// the same context and start pulse and run in lock step on their own segments
// of the result (PE p holds rows p*2^(n-5) .. (p+1)*2^(n-5)-1 when n >= 5).
// done is high when every PE has finished (the "computation finished" signal
// to the processing system). For readout, cluster c is read when ro_re[c] is
// high; the address is shared, and each cluster's 128-bit data appears one
// cycle later on ro_data[c] for the Read Arbiter to select.
module pacox_pec_array
  import pacox_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS    = 8,
  parameter int unsigned PES_PER_CLUSTER = 4,
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
  input  logic [NUM_CLUSTERS-1:0]           ro_re,
  input  logic [AW-1:0]                     ro_addr,
  output logic [PES_PER_CLUSTER*LANE_W-1:0] ro_data [NUM_CLUSTERS]
);
  localparam int unsigned LOG2_PES = $clog2(NUM_CLUSTERS*PES_PER_CLUSTER);

  logic [NUM_CLUSTERS-1:0] c_busy, c_done;

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_cluster
    pacox_pe_cluster #(
      .CLUSTER_ID(c), .PES_PER_CLUSTER(PES_PER_CLUSTER), .LOG2_PES(LOG2_PES),
      .LDM_DEPTH(LDM_DEPTH), .AW(AW)
    ) u_cluster (
      .clk, .rst_n, .ctx_load, .ctx_in, .start,
      .busy(c_busy[c]), .done(c_done[c]),
      .ro_re(ro_re[c]), .ro_addr, .ro_data(ro_data[c])
    );
  end

  assign busy = |c_busy;
  assign done = &c_done;
endmodule
