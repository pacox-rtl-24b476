// tb_pacox_top_full: the accelerator at its default size (32 PEs, 2^14
// entries per PE, n up to 19), driven through its AXI ports.
// It computes 19-qubit strings from each benchmark family (random, two-local
// Y Y, stabilizer Z, Ising Z Z and X, a LiH-like Y Z Z Y term) and one
// random string for every n = 3 .. 18, checks all rows of each against the
// reference operator and the run time (16,434 cycles from start to done at
// n = 19), and also runs n = 1, an oversized context and a context written
// while busy, so that every counted mechanism occurs at full size too.
module tb_pacox_top_full;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int TB_AW = 14;
`include "tb_pacox_top_body.svh"

  pacox_top dut (.*);

  initial begin
    digits_t x;
    reset_and_wait();
    x = random_string();
    run_string(x, 19, 1'b1);
    x = identity_string(); x[7] = 2'd2; x[8] = 2'd2;
    run_string(x, 19, 1'b1);
    random_ready = 1'b0;     // full-rate readout: one beat per cycle
    x = identity_string(); x[18] = 2'd3;
    run_string(x, 19, 1'b1);
    // TFIM terms and a LiH-like term at 19 qubits
    x = identity_string(); x[4] = 2'd3; x[5] = 2'd3;
    run_string(x, 19, 1'b1);
    x = identity_string(); x[11] = 2'd1;
    run_string(x, 19, 1'b1);
    x = identity_string(); x[0] = 2'd2; x[1] = 2'd3; x[2] = 2'd3; x[3] = 2'd2;
    run_string(x, 19, 1'b1);
    random_ready = 1'b1;
    // the evaluated range: one random string for each n = 3 .. 18
    for (int n = 3; n <= 18; n++) run_string(random_string(), n, 1'b1);
    run_string(random_string(), 1, 1'b1);
    reject_oversize();
    busy_drop(12);
    finish_test();
  end
endmodule
