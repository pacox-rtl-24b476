// tb_pacox_context_buffer: checks the registered context and the values
// derived from it (m0, P, n-P, active) for three PE numbers and all n.
module tb_pacox_context_buffer;
  import pacox_pkg::*;
  localparam int NB = 3;
  localparam int IDS [NB] = '{0, 6, 31};

  logic     clk = 0, rst_n = 0, ctx_load = 0;
  context_t ctx_in = '0;
  context_t           ctx [NB];
  logic [M_W-1:0]     m0 [NB];
  logic [QUBIT_W-1:0] seed_bits [NB], local_iters [NB];
  logic               active [NB];
  int checks = 0, failures = 0;

  for (genvar b = 0; b < NB; b++) begin : g
    pacox_context_buffer #(.PE_ID(IDS[b]), .LOG2_PES(5)) dut (
      .clk, .rst_n, .ctx_load, .ctx_in,
      .ctx(ctx[b]), .m0(m0[b]), .seed_bits(seed_bits[b]),
      .local_iters(local_iters[b]), .active(active[b])
    );
  end

  always #5 clk = ~clk;

  initial begin
    context_t c, old;
    int p;
    logic [1:0] want_m0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n <= MAX_QUBITS; n++) begin
      for (int r = 0; r < 4; r++) begin
        c = context_t'({$urandom, $urandom});
        c.qubits = QUBIT_W'(n);
        c.ny = 2'(r);
        old = ctx[0];
        ctx_in = c;
        @(negedge clk);
        // not loaded without ctx_load
        checks++;
        if (ctx[0] != old) failures++;
        ctx_load = 1;
        @(negedge clk);
        ctx_load = 0;
        ctx_in = '0;
        // m0 = (-i)^ny coded: 0:+1 1:-i 2:-1 3:+i
        want_m0 = (r == 0) ? 2'd0 : (r == 1) ? 2'd3 : (r == 2) ? 2'd1 : 2'd2;
        p = (n < 5) ? n : 5;
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (ctx[b] != c || m0[b] != want_m0 || int'(seed_bits[b]) != p ||
              int'(local_iters[b]) != n - p || active[b] != (IDS[b] < (1 << p))) begin
            failures++;
            if (failures < 10)
              $display("PE %0d n=%0d ny=%0d: m0=%0d P=%0d I=%0d act=%0b", IDS[b], n, r,
                       m0[b], seed_bits[b], local_iters[b], active[b]);
          end
        end
      end
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
