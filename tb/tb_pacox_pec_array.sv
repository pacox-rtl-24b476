// tb_pacox_pec_array: all 32 PEs at a reduced LDM depth (64 entries, n up to
// 11). After each run every row j of the operator must be found in PE
// j >> (n-P) at address j mod 2^(n-P); the array's done must follow the
// per-PE latency of the slowest PE.
module tb_pacox_pec_array;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int NC = 8;
  localparam int DEPTH = 64;
  localparam int AW = 6;

  logic          clk = 0, rst_n = 0, ctx_load = 0, start = 0;
  context_t      ctx_in = '0;
  logic          busy, done;
  logic [NC-1:0] ro_re = '0;
  logic [AW-1:0] ro_addr = '0;
  logic [127:0]  ro_data [NC];
  int checks = 0, failures = 0;

  pacox_pec_array #(.NUM_CLUSTERS(NC), .LDM_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic run(input int n);
    digits_t x;
    int p, cyc, s;
    x = random_string();
    p = (n < 5) ? n : 5;
    s = n - p;
    ctx_in = make_context(x, n);
    @(negedge clk) ctx_load = 1;
    @(negedge clk) ctx_load = 0; start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expected_pe_cycles(n, 5)) begin
      failures++;
      $display("n=%0d: %0d cycles", n, cyc);
    end
    for (int j = 0; j < (1 << n); j++) begin
      int pe;
      logic [31:0] got;
      pe = j >> s;
      ro_re = '0; ro_re[pe / 4] = 1'b1; ro_addr = AW'(j % (1 << s));
      @(negedge clk);
      ro_re = '0;
      got = ro_data[pe / 4][32*(pe % 4) +: 32];
      checks++;
      if (got != 32'(ref_entry(x, n, j))) begin
        failures++;
        if (failures < 10) $display("n=%0d j=%0d: got %h want %h", n, j, got, ref_entry(x, n, j));
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n <= 11; n++) run(n);
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
