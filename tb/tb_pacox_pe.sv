// tb_pacox_pe: one processing element end to end.
// For random Pauli strings of every size the PE supports at a reduced LDM
// depth (256 entries, so n up to 13 with 32 PEs), it loads the context,
// starts the PE, checks the run time against
// P + 3 + 2^(n-P) + 3(n-P) cycles and reads the LDM back through the readout
// port, comparing each entry with the reference operator.
module tb_pacox_pe;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int PE_ID = 13;
  localparam int DEPTH = 256;
  localparam int AW = 8;

  logic          clk = 0, rst_n = 0, ctx_load = 0, start = 0, ro_re = 0;
  context_t      ctx_in = '0;
  logic          busy, done;
  logic [AW-1:0] ro_addr = '0;
  entry_t        ro_data;
  int checks = 0, failures = 0;

  pacox_pe #(.PE_ID(PE_ID), .LOG2_PES(5), .LDM_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic run(input int n);
    digits_t x;
    int p, cyc, seg;
    x = random_string();
    p = (n < 5) ? n : 5;
    ctx_in = make_context(x, n);
    @(negedge clk) ctx_load = 1;
    @(negedge clk) ctx_load = 0; start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ((PE_ID < (1 << p)) ? expected_pe_cycles(n, 5) : 1)) begin
      failures++;
      $display("n=%0d: %0d cycles", n, cyc);
    end
    seg = 1 << (n - p);
    for (int a = 0; a < seg; a++) begin
      entry_t want;
      ro_re = 1; ro_addr = AW'(a);
      @(negedge clk);
      ro_re = 0;
      want = (PE_ID < (1 << p)) ? ref_entry(x, n, (PE_ID << (n - p)) + a) : '0;
      checks++;
      if (ro_data != want) begin
        failures++;
        if (failures < 10) $display("n=%0d a=%0d: got %h want %h", n, a, ro_data, want);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n <= 13; n++) begin run(n); run(n); end
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
