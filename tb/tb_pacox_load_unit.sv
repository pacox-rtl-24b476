// tb_pacox_load_unit: checks read-port arbitration and the read tag.
// Random requests from both users; the LDM address must come from the
// computation when it reads, and rd_valid/rd_addr must repeat the previous
// cycle's computation read.
module tb_pacox_load_unit;
  localparam int AW = 14;
  logic          clk = 0, rst_n = 0;
  logic          comp_re = 0, ro_re = 0;
  logic [AW-1:0] comp_addr = '0, ro_addr = '0;
  logic          ldm_re, rd_valid;
  logic [AW-1:0] ldm_raddr, rd_addr;
  int            checks = 0, failures = 0;

  pacox_load_unit #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%s failed at %0t", what, $time);
    end
  endtask

  initial begin
    logic          prev_re;
    logic [AW-1:0] prev_addr, last_tag;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(rd_valid == 1'b0, "reset");
    prev_re = 0; prev_addr = '0; last_tag = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // tag of the previous cycle's computation read
      check(rd_valid == prev_re, "rd_valid");
      if (prev_re) last_tag = prev_addr;
      check(!rd_valid || rd_addr == last_tag, "rd_addr");
      comp_re   = 1'($urandom);
      ro_re     = 1'($urandom);
      comp_addr = AW'($urandom);
      ro_addr   = AW'($urandom);
      #1;
      check(ldm_re == (comp_re | ro_re), "ldm_re");
      if (comp_re)    check(ldm_raddr == comp_addr, "comp priority");
      else if (ro_re) check(ldm_raddr == ro_addr, "readout address");
      prev_re = comp_re; prev_addr = comp_addr;
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
