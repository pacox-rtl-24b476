// tb_pacox_axi_mapper: checks the AXI4-Lite register interface and the
// stream port: a CONTEXT write produces one ctx_wr pulse with bits 45..0,
// a CTRL write with bit 0 one ro_go pulse, reads return CONTEXT, STATUS and
// zero elsewhere, B and R handshakes hold under back-pressure, and the
// stream carries data, tuser, tlast and a tkeep of four bytes per valid lane.
module tb_pacox_axi_mapper;
  import pacox_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]   s_axi_awaddr = '0, s_axi_araddr = '0;
  logic         s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic [63:0]  s_axi_wdata = '0, s_axi_rdata;
  logic [7:0]   s_axi_wstrb = '1;
  logic         s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]   s_axi_bresp, s_axi_rresp;
  logic [127:0] m_axis_tdata;
  logic [15:0]  m_axis_tkeep;
  logic [16:0]  m_axis_tuser;
  logic         m_axis_tlast, m_axis_tvalid, m_axis_tready = 0;
  logic         ctx_wr, ro_go, ro_ready, irq;
  context_t     ctx_wdata, ctx_rdata = '0;
  logic         cfg_error = 0, comp_busy = 0, comp_done = 0, ro_busy = 0, ro_valid = 0, ro_last = 0;
  logic [127:0] ro_data = '0;
  logic [3:0]   ro_lanes = '0;
  logic [16:0]  ro_addr = '0;
  int checks = 0, failures = 0;
  int n_ctx_wr = 0, n_ro_go = 0;
  context_t last_ctx;

  pacox_axi_mapper dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ctx_wr) begin n_ctx_wr++; last_ctx = ctx_wdata; end
    if (ro_go) n_ro_go++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("%s failed at %0t", what, $time); end
  endtask

  task automatic axi_write(input logic [7:0] addr, input logic [63:0] data, input int bdelay);
    s_axi_awaddr = addr; s_axi_wdata = data; s_axi_awvalid = 1; s_axi_wvalid = 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    #1 s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat (bdelay) begin
      @(posedge clk); #1;
      check(s_axi_bvalid, "bvalid held");
    end
    s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    #1 s_axi_bready = 0;
    check(s_axi_bresp == 2'b00, "bresp");
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [63:0] data, input int rdelay);
    s_axi_araddr = addr; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    #1 s_axi_arvalid = 0;
    repeat (rdelay) begin
      @(posedge clk); #1;
      check(s_axi_rvalid, "rvalid held");
    end
    s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    #1 s_axi_rready = 0;
  endtask

  initial begin
    logic [63:0] d, v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      v = {$urandom, $urandom};
      axi_write(8'h08, v, t % 3);
      @(negedge clk);
      check(n_ctx_wr == t + 1 && last_ctx == v[45:0], "context write");
    end
    axi_write(8'h00, 64'h0, 0);
    @(negedge clk);
    check(n_ro_go == 0, "CTRL bit0=0 does nothing");
    axi_write(8'h00, 64'h1, 1);
    @(negedge clk);
    check(n_ro_go == 1, "CTRL start readout");
    axi_write(8'h18, 64'h1, 0);
    check(n_ro_go == 1 && n_ctx_wr == 20, "unmapped write ignored");
    ctx_rdata = context_t'({$urandom, $urandom});
    axi_read(8'h08, d, 2);
    check(d == 64'(ctx_rdata), "read CONTEXT");
    for (int s = 0; s < 16; s++) begin
      {cfg_error, ro_busy, comp_done, comp_busy} = 4'(s);
      axi_read(8'h10, d, s % 2);
      check(d == 64'(s), "read STATUS");
      check(irq == comp_done, "irq");
    end
    axi_read(8'h28, d, 0);
    check(d == 0, "unmapped read");
    // stream
    for (int t = 0; t < 50; t++) begin
      // a new beat only when the previous one was taken (stream rule)
      if (!(ro_valid && !m_axis_tready)) begin
        ro_valid = 1'($urandom); ro_data = {$urandom, $urandom, $urandom, $urandom};
        ro_lanes = 4'($urandom); ro_addr = 17'($urandom); ro_last = 1'($urandom);
      end
      m_axis_tready = 1'($urandom);
      #1;
      check(m_axis_tvalid == ro_valid && m_axis_tdata == ro_data && m_axis_tuser == ro_addr &&
            m_axis_tlast == ro_last && ro_ready == m_axis_tready, "stream");
      for (int q = 0; q < 4; q++)
        check(m_axis_tkeep[4*q +: 4] == {4{ro_lanes[q]}}, "tkeep");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
