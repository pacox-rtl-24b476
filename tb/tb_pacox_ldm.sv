// tb_pacox_ldm: checks the Local Data Memory against a shadow array.
// Random writes and reads at the default depth (2^14), one-cycle read
// latency, output held while re is low, and old data on a read of the
// address written in the same cycle.
module tb_pacox_ldm;
  import pacox_pkg::*;
  localparam int DEPTH = 16384;
  localparam int AW = 14;

  logic          clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  entry_t        wdata = '0, rdata;
  entry_t        shadow [DEPTH];
  logic          written [DEPTH];
  int            checks = 0, failures = 0;

  pacox_ldm #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  task automatic check(input entry_t got, input entry_t want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("%s: got %h want %h", what, got, want);
    end
  endtask

  initial begin
    entry_t expv, held;
    foreach (written[i]) written[i] = 1'b0;
    // fill a random set of locations
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      we    = 1'b1;
      waddr = AW'($urandom);
      wdata = entry_t'($urandom);
      shadow[waddr]  = wdata;
      written[waddr] = 1'b1;
    end
    @(negedge clk) we = 1'b0;
    // read back with one cycle of latency
    for (int t = 0; t < 5000; t++) begin
      do raddr = AW'($urandom); while (!written[raddr]);
      re   = 1'b1;
      expv = shadow[raddr];
      @(negedge clk);
      re = 1'b0;
      check(rdata, expv, "read");
      // output holds while re is low
      held = rdata;
      @(negedge clk);
      check(rdata, held, "hold");
    end
    // read of the address being written returns the old value
    do raddr = AW'($urandom); while (!written[raddr]);
    waddr = raddr; wdata = ~shadow[raddr]; we = 1'b1; re = 1'b1;
    expv = shadow[raddr];
    @(negedge clk);
    we = 1'b0; re = 1'b0;
    check(rdata, expv, "read-during-write");
    re = 1'b1;
    @(negedge clk);
    re = 1'b0;
    check(rdata, wdata, "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
