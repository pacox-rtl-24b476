// pacox_ldm: Local Data Memory of one processing element.
//
// A simple dual-port memory of DEPTH entries of 21 bits ({k, m}), one write
// port and one read port on the same clock, written as an array so that an
// FPGA tool maps it to block RAM. The 32 LDMs together form the paper's
// n-Pauli Matrix Memory (32 x 2^14 = 2^19 entries, enough for n = 19).
// Timing: a write is performed at the clock edge where we is high; a read
// issued with re at edge t presents rdata after edge t (one cycle of
// latency), and rdata holds its value while re is low. Reading an address in
// the same cycle it is written returns the old contents (the controller never
// does this). The memory is not reset: every location is written before it is
// read.
module pacox_ldm
  import pacox_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  entry_t        wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output entry_t        rdata
);
  entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
