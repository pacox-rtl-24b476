// tb_pacox_pe_cluster: cluster 3 of 8 (PEs 12..15) at a reduced LDM depth.
// Checks done, the run time, and that lane q of every readout word holds the
// entry of row (12+q)*2^(n-P) + a zero-extended to 32 bits (zero for a PE
// without data).
module tb_pacox_pe_cluster;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int CID = 3;
  localparam int DEPTH = 128;
  localparam int AW = 7;

  logic          clk = 0, rst_n = 0, ctx_load = 0, start = 0, ro_re = 0;
  context_t      ctx_in = '0;
  logic          busy, done;
  logic [AW-1:0] ro_addr = '0;
  logic [127:0]  ro_data;
  int checks = 0, failures = 0;

  pacox_pe_cluster #(.CLUSTER_ID(CID), .LOG2_PES(5), .LDM_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic run(input int n);
    digits_t x;
    int p, cyc;
    x = random_string();
    p = (n < 5) ? n : 5;
    ctx_in = make_context(x, n);
    @(negedge clk) ctx_load = 1;
    @(negedge clk) ctx_load = 0; start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ((4*CID < (1 << p)) ? expected_pe_cycles(n, 5) : 1)) begin
      failures++;
      $display("n=%0d: %0d cycles", n, cyc);
    end
    for (int a = 0; a < (1 << (n - p)); a++) begin
      ro_re = 1; ro_addr = AW'(a);
      @(negedge clk);
      ro_re = 0;
      for (int q = 0; q < 4; q++) begin
        int pe;
        logic [31:0] want;
        pe = 4*CID + q;
        want = (pe < (1 << p)) ? 32'(ref_entry(x, n, (pe << (n - p)) + a)) : 32'd0;
        checks++;
        if (ro_data[32*q +: 32] != want) begin
          failures++;
          if (failures < 10) $display("n=%0d a=%0d lane %0d: got %h want %h", n, a, q, ro_data[32*q +: 32], want);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n <= 12; n++) begin run(n); run(n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
