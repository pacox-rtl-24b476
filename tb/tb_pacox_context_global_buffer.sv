// tb_pacox_context_global_buffer: checks the load/start sequence (ctx_load
// one cycle after the write, start one cycle later), that writes while the
// array is busy or back to back are dropped, and that an oversized qubit
// count is refused with cfg_error.
module tb_pacox_context_global_buffer;
  import pacox_pkg::*;
  logic     clk = 0, rst_n = 0, wr = 0, array_busy = 0;
  context_t wdata = '0, ctx;
  logic     ctx_load, start, cfg_error;
  int checks = 0, failures = 0;

  pacox_context_global_buffer dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("%s failed at %0t", what, $time); end
  endtask

  initial begin
    context_t c, c2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      c = context_t'({$urandom, $urandom});
      c.qubits = QUBIT_W'($urandom_range(0, MAX_QUBITS));
      wdata = c; wr = 1;
      @(negedge clk);
      wr = 0;
      check(ctx_load && !start && ctx == c, "ctx_load after write");
      // a second write right behind the first is dropped
      c2 = ~c; c2.qubits = 3; wdata = c2; wr = 1;
      @(negedge clk);
      wr = 0;
      check(!ctx_load && start && ctx == c, "start, second write dropped");
      @(negedge clk);
      check(!ctx_load && !start && !cfg_error, "quiet");
      // write while busy is dropped
      array_busy = 1; wdata = c2; wr = 1;
      @(negedge clk);
      wr = 0; array_busy = 0;
      check(!ctx_load && ctx == c, "busy write dropped");
      // too many qubits
      c2.qubits = QUBIT_W'($urandom_range(MAX_QUBITS + 1, 63));
      wdata = c2; wr = 1;
      @(negedge clk);
      wr = 0;
      check(!ctx_load && cfg_error && ctx == c, "oversize refused");
      @(negedge clk);
      check(!start && cfg_error, "no start after refusal");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
