// Shared body of the end-to-end testbenches: clock, AXI host tasks, result
// collection and checking. Included inside a module that imports pacox_pkg
// and pacox_tb_pkg, defines TB_AW (log2 of the LDM depth) and then
// instantiates pacox_top as dut with (.*).

  logic clk = 0, rst_n = 0;
  logic [7:0]   s_axi_awaddr = '0, s_axi_araddr = '0;
  logic         s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0;
  logic         s_axi_arvalid = 0, s_axi_rready = 0;
  logic [63:0]  s_axi_wdata = '0, s_axi_rdata;
  logic [7:0]   s_axi_wstrb = '1;
  logic         s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]   s_axi_bresp, s_axi_rresp;
  logic [127:0] m_axis_tdata;
  logic [15:0]  m_axis_tkeep;
  logic [TB_AW+2:0] m_axis_tuser;
  logic         m_axis_tlast, m_axis_tvalid, m_axis_tready = 0;
  logic         irq;

  int checks = 0, failures = 0;
  int n_stalls = 0, n_idle_pe_runs = 0, n_partial_beats = 0, n_rejected = 0, n_busy_drops = 0;
  int n_runs = 0;
  bit random_ready = 1'b1;

  always #2 clk = ~clk;   // 250 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic axi_write(input logic [7:0] addr, input logic [63:0] data);
    @(negedge clk);
    s_axi_awaddr = addr; s_axi_wdata = data; s_axi_awvalid = 1; s_axi_wvalid = 1; s_axi_bready = 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [63:0] data);
    @(negedge clk);
    s_axi_araddr = addr; s_axi_arvalid = 1; s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    data = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  function automatic digits_t identity_string();
    digits_t x;
    foreach (x[l]) x[l] = 2'd0;
    return x;
  endfunction

  // cycles from the start pulse to done
  int run_cycles;
  bit counting;
  always @(posedge clk) begin
    if (dut.start) begin run_cycles = 0; counting = 1'b1; end
    else if (counting && !irq) run_cycles++;
    else if (counting) counting = 1'b0;
  end

  task automatic run_string(input digits_t x, input int n, input bit check_timing);
    context_t c;
    logic [63:0] st;
    int p, s, rows, beats, guard;
    bit seen [];
    c = make_context(x, n);
    p = (n < 5) ? n : 5;
    s = n - p;
    rows = 1 << n;
    seen = new[rows];
    axi_write(8'h08, 64'(c));
    guard = 0;
    while (!irq && guard < 2 * expected_pe_cycles(n, 5) + 50) begin @(negedge clk); guard++; end
    check(irq, $sformatf("irq for n=%0d", n));
    axi_read(8'h10, st);
    check(st[1:0] == 2'b10, "STATUS done");
    axi_read(8'h08, st);
    check(st == 64'(c), "CONTEXT readback");
    if (check_timing)
      check(run_cycles + 1 == expected_pe_cycles(n, 5),
            $sformatf("run time n=%0d: %0d cycles, want %0d", n, run_cycles + 1, expected_pe_cycles(n, 5)));
    if (n < 5) n_idle_pe_runs++;
    axi_write(8'h00, 64'h1);
    beats = 0;
    guard = 0;
    forever begin
      @(negedge clk);
      m_axis_tready = random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
      #1;
      if (m_axis_tvalid && !m_axis_tready) n_stalls++;
      if (m_axis_tvalid && m_axis_tready) begin
        int cl, a;
        cl = int'(m_axis_tuser[TB_AW +: 3]);
        a  = int'(m_axis_tuser[TB_AW-1:0]);
        if (m_axis_tkeep != 16'hFFFF) n_partial_beats++;
        for (int q = 0; q < 4; q++) begin
          if (m_axis_tkeep[4*q]) begin
            int j;
            j = ((4*cl + q) << s) + a;
            check(j < rows && !seen[j], $sformatf("row %0d once", j));
            if (j < rows) begin
              seen[j] = 1'b1;
              check(m_axis_tdata[32*q +: 32] == 32'(ref_entry(x, n, j)),
                    $sformatf("n=%0d row %0d: got %h want %h", n, j,
                              m_axis_tdata[32*q +: 32], ref_entry(x, n, j)));
            end
          end
        end
        beats++;
        if (m_axis_tlast) break;
      end
      guard++;
      if (guard > 8 * rows + 100) begin
        check(1'b0, $sformatf("tlast for n=%0d", n));
        break;
      end
    end
    @(negedge clk);
    m_axis_tready = 0;
    foreach (seen[j]) check(seen[j], $sformatf("row %0d delivered", j));
    check(beats == ((rows + 3) / 4), "beat count");
    n_runs++;
  endtask

  task automatic reject_oversize();
    context_t c;
    logic [63:0] st;
    c = '0;
    c.qubits = QUBIT_W'(MAX_QUBITS + 1);
    axi_write(8'h08, 64'(c));
    repeat (4) @(negedge clk);
    axi_read(8'h10, st);
    check(st[3] && !st[0], "oversized context refused");
    if (st[3]) n_rejected++;
  endtask

  // a second context written while the first is being computed is dropped
  task automatic busy_drop(input int n);
    digits_t x, y;
    logic [63:0] st;
    x = random_string();
    y = random_string();
    axi_write(8'h08, 64'(make_context(x, n)));
    axi_read(8'h10, st);
    if (st[0]) begin
      axi_write(8'h08, 64'(make_context(y, n)));
      axi_read(8'h08, st);
      check(st == 64'(make_context(x, n)), "busy write dropped");
      if (st == 64'(make_context(x, n))) n_busy_drops++;
    end
    guard_wait_irq(n);
    // the first string's result is intact: rerun it through the full path
    run_string(x, n, 1'b1);
  endtask

  task automatic guard_wait_irq(input int n);
    int g;
    g = 0;
    while (!irq && g < 2 * expected_pe_cycles(n, 5) + 50) begin @(negedge clk); g++; end
    check(irq, "irq after busy drop");
  endtask

  task automatic reset_and_wait();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
  endtask

  task automatic finish_test();
    $display("runs=%0d stalls=%0d idle_pe_runs=%0d partial_beats=%0d rejected=%0d busy_drops=%0d",
             n_runs, n_stalls, n_idle_pe_runs, n_partial_beats, n_rejected, n_busy_drops);
    check(n_stalls > 0, "stream stall happened");
    check(n_idle_pe_runs > 0, "run with idle PEs happened");
    check(n_partial_beats > 0, "partial beat happened");
    check(n_rejected > 0, "oversized context rejected");
    check(n_busy_drops > 0, "busy context dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
