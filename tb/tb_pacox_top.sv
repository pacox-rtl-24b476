// tb_pacox_top: the accelerator end to end through its AXI ports.
// It plays the host: writes a context over AXI4-Lite, waits for irq, starts
// the readout and takes the result stream with random back-pressure. Each
// beat's lanes are mapped back to rows j = (4*cluster + lane)*2^(n-P) + addr
// and compared with the reference operator; every row must arrive exactly
// once. Strings come from the benchmark families (two-local XX/YY/ZZ
// terms, stabilizer Z_j, transverse-field Ising ZZ and X terms, LiH-like
// mixed terms) and random strings, for every n the reduced memories hold.
// The run time from the start pulse to irq is checked against the PE
// latency formula. Counted mechanisms, each of which must occur: stream
// stalls, runs with idle PEs (n < 5), beats with partial lanes (n < 2),
// rejected oversized contexts, contexts dropped while busy.
module tb_pacox_top;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int TB_AW = 8;           // LDM depth 256: n up to 13
  localparam int MAXN = 13;
`include "tb_pacox_top_body.svh"

  pacox_top #(.LDM_DEPTH(1 << TB_AW)) dut (.*);

  initial begin
    digits_t x;
    reset_and_wait();
    for (int n = 0; n <= MAXN; n++) begin
      x = random_string();
      run_string(x, n, 1'b1);
    end
    for (int n = 2; n <= MAXN; n += 3) begin
      for (int j = 0; j + 1 < n; j += 4) begin
        for (int p = 1; p <= 3; p++) begin   // two-local X X, Y Y, Z Z at j
          x = identity_string(); x[j] = 2'(p); x[j+1] = 2'(p);
          run_string(x, n, 1'b1);
        end
        x = identity_string(); x[j] = 2'd3; run_string(x, n, 1'b1);   // stabilizer Z_j
        x = identity_string(); x[j] = 2'd1; run_string(x, n, 1'b0);   // TFIM X_j
      end
    end
    // LiH-like terms on 4..12 qubits: Z2 Z3, X0 Z1 X2, Y0 Z1 Z2 Y3
    for (int n = 4; n <= 12; n += 4) begin
      x = identity_string(); x[2] = 2'd3; x[3] = 2'd3; run_string(x, n, 1'b1);
      x = identity_string(); x[0] = 2'd1; x[1] = 2'd3; x[2] = 2'd1; run_string(x, n, 1'b1);
      x = identity_string(); x[0] = 2'd2; x[1] = 2'd3; x[2] = 2'd3; x[3] = 2'd2; run_string(x, n, 1'b1);
    end
    reject_oversize();
    busy_drop(MAXN);
    finish_test();
  end
endmodule
