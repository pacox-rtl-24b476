// pacox_axi_mapper: the accelerator's connection to the processing system.
//
// Control and configuration arrive over a 64-bit AXI4-Lite slave (the
// paper's 64-bit programmed-I/O path from the PS general-purpose port); the
// results leave over a 128-bit AXI4-Stream master that feeds the PS DMA
// engine towards DDR. Register map (byte addresses, 64-bit registers):
//   0x00 CTRL     write: bit 0 = 1 starts the readout of the results
//   0x08 CONTEXT  write: context word in bits 45..0 (qubits[45:40],
//                 n_Y[39:38], Value[37:19], Row[18:0]); the write starts the
//                 computation. read: the context currently held.
//   0x10 STATUS   read: bit 0 computing, bit 1 computation done,
//                 bit 2 readout running, bit 3 context rejected (n too large)
// Other addresses read as zero and ignore writes; all responses are OKAY and
// write strobes are ignored (writes are whole 64-bit words). irq is high while
// the computation is done (the "finished" signal to the PS). Stream beats
// carry tkeep (4 bytes per valid lane), tuser = {cluster, LDM address} and
// tlast on the final beat.
// Write channel: AW and W are taken together in one cycle when both are
// valid and no response is pending; B follows in the next cycle. Read: AR is
// taken when no R is pending and R follows one cycle later.
// The register map, the use of AXI4-Lite/AXI4-Stream and the handshake
// details are this design's choices; the paper gives the 64-bit PIO width,
// the 128-bit DMA width and the unit's role.
module pacox_axi_mapper
  import pacox_pkg::*;
#(
  parameter int unsigned AXI_AW = 8,
  parameter int unsigned SW     = 2,      // PES_PER_CLUSTER (lanes per beat)
  parameter int unsigned UW     = 17      // tuser width: cluster + LDM address bits
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave, 64-bit
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
  // AXI4-Stream master, 128-bit, to the DMA
  output logic [DMA_W-1:0]      m_axis_tdata,
  output logic [DMA_W/8-1:0]    m_axis_tkeep,
  output logic [UW-1:0]         m_axis_tuser,
  output logic                  m_axis_tlast,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  // to the accelerator core
  output logic                  ctx_wr,
  output context_t              ctx_wdata,
  input  context_t              ctx_rdata,
  input  logic                  cfg_error,
  input  logic                  comp_busy,
  input  logic                  comp_done,
  output logic                  ro_go,
  input  logic                  ro_busy,
  input  logic                  ro_valid,
  output logic                  ro_ready,
  input  logic [DMA_W-1:0]      ro_data,
  input  logic [(1<<SW)-1:0]    ro_lanes,
  input  logic [UW-1:0]         ro_addr,
  input  logic                  ro_last,
  output logic                  irq
);
  localparam logic [AXI_AW-1:0] A_CTRL    = AXI_AW'('h00);
  localparam logic [AXI_AW-1:0] A_CONTEXT = AXI_AW'('h08);
  localparam logic [AXI_AW-1:0] A_STATUS  = AXI_AW'('h10);
  localparam int unsigned LANES = 1 << SW;
  localparam int unsigned LANE_BYTES = DMA_W / 8 / LANES;

  logic wr_fire, rd_fire;

  // ---- write channel ----
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;
  assign s_axi_bresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      ctx_wr       <= 1'b0;
      ctx_wdata    <= '0;
      ro_go        <= 1'b0;
    end else begin
      ctx_wr <= 1'b0;
      ro_go  <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_awaddr == A_CONTEXT) begin
          ctx_wr    <= 1'b1;
          ctx_wdata <= s_axi_wdata[CTX_W-1:0];
        end
        if (s_axi_awaddr == A_CTRL && s_axi_wdata[0]) ro_go <= 1'b1;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
    end
  end

  // ---- read channel ----
  assign s_axi_arready = !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (rd_fire) begin
      s_axi_rvalid <= 1'b1;
      case (s_axi_araddr)
        A_CONTEXT: s_axi_rdata <= PIO_W'(ctx_rdata);
        A_STATUS:  s_axi_rdata <= PIO_W'({cfg_error, ro_busy, comp_done, comp_busy});
        default:   s_axi_rdata <= '0;
      endcase
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  // ---- result stream ----
  always_comb begin
    m_axis_tdata  = ro_data;
    m_axis_tuser  = ro_addr;
    m_axis_tlast  = ro_last;
    m_axis_tvalid = ro_valid;
    ro_ready      = m_axis_tready;
    for (int q = 0; q < LANES; q++)
      m_axis_tkeep[q*LANE_BYTES +: LANE_BYTES] = {LANE_BYTES{ro_lanes[q]}};
  end

  assign irq = comp_done;

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid)
    else $error("AXI-Stream valid dropped before ready");
endmodule
