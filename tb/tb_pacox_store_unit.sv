// tb_pacox_store_unit: checks that each input becomes a write one cycle
// later at address in_addr + offset with the same data, and nothing else.
module tb_pacox_store_unit;
  import pacox_pkg::*;
  localparam int AW = 14;
  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0;
  logic [AW-1:0] in_addr = '0, offset = '0;
  entry_t        in_data = '0;
  logic          we, busy;
  logic [AW-1:0] waddr;
  entry_t        wdata;
  int            checks = 0, failures = 0;

  pacox_store_unit #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    logic          pv;
    int unsigned   pa;
    entry_t        pd;
    repeat (2) @(negedge clk);
    rst_n = 1;
    pv = 0; pa = 0; pd = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (we != pv || busy != pv || (pv && (int'(waddr) != pa || wdata != pd))) begin
        failures++;
        if (failures < 10) $display("cycle %0d: we=%0b waddr=%0d wdata=%h, want %0b %0d %h",
                                    t, we, waddr, wdata, pv, pa, pd);
      end
      in_valid = 1'($urandom);
      in_addr  = AW'($urandom_range(0, (1 << (AW-1)) - 1));
      offset   = AW'(1 << $urandom_range(0, AW-1));
      in_data  = entry_t'($urandom);
      pv = in_valid; pa = (int'(in_addr) + int'(offset)) % (1 << AW); pd = in_data;
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
