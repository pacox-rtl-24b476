// tb_pacox_read_arbiter: checks the readout sequence and the stream.
// The testbench models the cluster array as memories with one cycle of read
// latency whose words encode (cluster, address). For every n it checks the
// order of the beats (cluster-major, address-minor), the data of each beat,
// the lane mask, the address sideband, tlast on the final beat only, that a
// beat is never lost or repeated under random back-pressure, and that with
// ready held high the 2^n/4 beats end 2^n/4 + 3 cycles after go (one beat
// per cycle after a two-cycle start-up).
module tb_pacox_read_arbiter;
  import pacox_pkg::*;
  localparam int NC = 8;
  localparam int AW = 8;

  logic             clk = 0, rst_n = 0, go = 0;
  logic [QUBIT_W-1:0] qubits = '0;
  logic             busy;
  logic [NC-1:0]    ro_re;
  logic [AW-1:0]    ro_addr;
  logic [127:0]     ro_data [NC];
  logic             out_valid, out_ready = 0, out_last;
  logic [127:0]     out_data;
  logic [3:0]       out_lanes;
  logic [2+AW:0]    out_addr;
  int checks = 0, failures = 0;
  int stalls = 0;

  pacox_read_arbiter #(.NUM_CLUSTERS(NC), .AW(AW)) dut (.*);

  function automatic logic [127:0] pattern(input int c, input int a);
    logic [127:0] w;
    for (int q = 0; q < 4; q++) w[32*q +: 32] = 32'hA000_0000 | (c << 20) | (q << 16) | a;
    return w;
  endfunction

  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++)
      if (ro_re[c]) ro_data[c] <= pattern(c, int'(ro_addr));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%s failed at %0t", what, $time);
    end
  endtask

  task automatic run(input int n, input bit random_ready);
    int p, nclus, naddr, total, got, cyc, c, a;
    logic [3:0] mask;
    p     = (n < 5) ? n : 5;
    nclus = (p >= 2) ? (1 << (p - 2)) : 1;
    naddr = 1 << (n - p);
    mask  = (p == 0) ? 4'b0001 : (p == 1) ? 4'b0011 : 4'b1111;
    total = nclus * naddr;
    qubits = QUBIT_W'(n);
    @(negedge clk) go = 1;
    @(negedge clk) go = 0;
    got = 0; cyc = 1;
    while (got < total && cyc < 100000) begin
      out_ready = random_ready ? 1'($urandom) : 1'b1;
      #1;
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        c = got / naddr; a = got % naddr;
        check(out_data == pattern(c, a), "data");
        check(out_lanes == mask, "lanes");
        check(out_addr == {3'(c), AW'(a)}, "addr");
        check(out_last == (got == total - 1), "last");
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    out_ready = 1'b0;
    if (!random_ready) check(cyc == total + 3, $sformatf("throughput n=%0d: %0d cycles for %0d beats", n, cyc, total));
    repeat (3) @(negedge clk);
    check(!busy && !out_valid, "idle after run");
  endtask

  initial begin
    for (int c = 0; c < NC; c++) ro_data[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n <= 13; n++) begin
      run(n, 1'b0);
      run(n, 1'b1);
    end
    check(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(ro_re)) failures++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
