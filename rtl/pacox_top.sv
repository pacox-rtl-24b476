// pacox_top: PACOX, the Pauli-composer accelerator (programmable-logic part).
//
// For an n-qubit Pauli string x the operator P(x) = s_{x(n-1)} (x) ... (x) s_{x0}
// has exactly one non-zero element per row j, at column k[j], with value
// m[j] in {+1, -1, +i, -i}. The accelerator computes all 2^n pairs
// (k[j], m[j]) from a 46-bit context word with the recurrence
//   k[j + 2^l] = k[j] -/+ 2^l,  m[j + 2^l] = m[j] or -m[j]   (j < 2^l),
// spread over 32 processing elements (8 clusters of 4) that each expand their
// own 2^(n-5)-entry segment in a local memory at one entry per cycle.
// Blocks: AXI Mapper (64-bit AXI4-Lite control/context port, 128-bit
// AXI4-Stream result port), Context Global Buffer, PE Cluster Array and Read
// Arbiter, connected as in the paper's architecture figure.
// Use: write the context to register 0x08 (this starts the computation),
// wait for irq (or STATUS bit 1), write 1 to register 0x00 and take
// 2^n / 4 beats (at least one) from the stream, the last with tlast.
// Timing at the default 32 PEs and n >= 5: the computation takes
// 2^(n-5) + 3*(n-5) + 8 cycles from the context write to done (about 66 us
// for n = 19 at 250 MHz), the readout one beat per cycle while tready is high.
module pacox_top
  import pacox_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS    = 8,
  parameter int unsigned PES_PER_CLUSTER = 4,
  parameter int unsigned LDM_DEPTH       = 16384,
  parameter int unsigned AXI_AW          = 8,
  parameter int unsigned AW              = $clog2(LDM_DEPTH),
  parameter int unsigned CW              = $clog2(NUM_CLUSTERS)
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave (PS general-purpose port)
  input  logic [AXI_AW-1:0]     s_axi_awaddr,
  input  logic                  s_axi_awvalid,
  output logic                  s_axi_awready,
  input  logic [PIO_W-1:0]      s_axi_wdata,
  input  logic [PIO_W/8-1:0]    s_axi_wstrb,
  input  logic                  s_axi_wvalid,
  output logic                  s_axi_wready,
  output logic [1:0]            s_axi_bresp,
  output logic                  s_axi_bvalid,
  input  logic                  s_axi_bready,
  input  logic [AXI_AW-1:0]     s_axi_araddr,
  input  logic                  s_axi_arvalid,
  output logic                  s_axi_arready,
  output logic [PIO_W-1:0]      s_axi_rdata,
  output logic [1:0]            s_axi_rresp,
  output logic                  s_axi_rvalid,
  input  logic                  s_axi_rready,
  // AXI4-Stream master (to the PS DMA engine)
  output logic [DMA_W-1:0]      m_axis_tdata,
  output logic [DMA_W/8-1:0]    m_axis_tkeep,
  output logic [CW+AW-1:0]      m_axis_tuser,
  output logic                  m_axis_tlast,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic                  irq
);
  localparam int unsigned DW = PES_PER_CLUSTER * LANE_W;

  logic     ctx_wr, ctx_load, start, cfg_error;
  context_t ctx_wdata, ctx;
  logic     comp_busy, comp_done, pe_done, status_busy;

  logic                       ro_go, ro_busy, ro_valid, ro_ready, ro_last;
  logic [DW-1:0]              ro_data;
  logic [PES_PER_CLUSTER-1:0] ro_lanes;
  logic [CW+AW-1:0]           ro_addr;

  logic [NUM_CLUSTERS-1:0] pe_re;
  logic [AW-1:0]           pe_addr;
  logic [DW-1:0]           pe_data [NUM_CLUSTERS];

  pacox_axi_mapper #(
    .AXI_AW(AXI_AW), .SW($clog2(PES_PER_CLUSTER)), .UW(CW+AW)
  ) u_axi_mapper (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .m_axis_tdata, .m_axis_tkeep, .m_axis_tuser, .m_axis_tlast,
    .m_axis_tvalid, .m_axis_tready,
    .ctx_wr, .ctx_wdata, .ctx_rdata(ctx), .cfg_error,
    .comp_busy(status_busy), .comp_done,
    .ro_go, .ro_busy, .ro_valid, .ro_ready, .ro_data, .ro_lanes, .ro_addr, .ro_last,
    .irq
  );

  pacox_context_global_buffer u_ctx_gbuf (
    .clk, .rst_n,
    .wr(ctx_wr), .wdata(ctx_wdata), .array_busy(comp_busy || ro_busy),
    .ctx, .ctx_load, .start, .cfg_error
  );

  pacox_pec_array #(
    .NUM_CLUSTERS(NUM_CLUSTERS), .PES_PER_CLUSTER(PES_PER_CLUSTER),
    .LDM_DEPTH(LDM_DEPTH), .AW(AW)
  ) u_pec_array (
    .clk, .rst_n, .ctx_load, .ctx_in(ctx), .start,
    .busy(comp_busy), .done(pe_done),
    .ro_re(pe_re), .ro_addr(pe_addr), .ro_data(pe_data)
  );

  // The PEs keep done high from their last run until the next start; hide it
  // from the host while a newly accepted context is on its way to them, so
  // that irq and STATUS never report the previous result as the new one.
  assign comp_done   = pe_done && !ctx_wr && !ctx_load && !start;
  assign status_busy = comp_busy || ctx_wr || ctx_load || start;

  pacox_read_arbiter #(
    .NUM_CLUSTERS(NUM_CLUSTERS), .PES_PER_CLUSTER(PES_PER_CLUSTER), .AW(AW)
  ) u_read_arbiter (
    .clk, .rst_n,
    .go(ro_go && comp_done), .qubits(ctx.qubits), .busy(ro_busy),
    .ro_re(pe_re), .ro_addr(pe_addr), .ro_data(pe_data),
    .out_valid(ro_valid), .out_ready(ro_ready), .out_data(ro_data),
    .out_lanes(ro_lanes), .out_addr(ro_addr), .out_last(ro_last)
  );
endmodule
