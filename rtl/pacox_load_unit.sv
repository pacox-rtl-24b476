// pacox_load_unit: read side of a processing element's Local Data Memory.
//
// The LDM has one read port, shared by two users: the PE's own computation
// (reads of the entries an iteration expands) and the Read Arbiter (reads of
// results for the DMA transfer, the paper's "read signal"). This unit
// arbitrates the port, computation first, and tracks the one-cycle memory
// latency: rd_valid/rd_addr tell, in the cycle the data appears on the LDM's
// rdata, that a computation read was issued one cycle earlier and from which
// address. The Store Unit uses that address to place the result.
// Fixed priority and the tag pipeline are this design's choices; the paper
// only names the unit.
module pacox_load_unit
  import pacox_pkg::*;
#(
  parameter int unsigned AW = 14
)(
  input  logic          clk,
  input  logic          rst_n,
  // computation reads from PE Control
  input  logic          comp_re,
  input  logic [AW-1:0] comp_addr,
  // result reads from the Read Arbiter
  input  logic          ro_re,
  input  logic [AW-1:0] ro_addr,
  // to the LDM read port
  output logic          ldm_re,
  output logic [AW-1:0] ldm_raddr,
  // tag of the computation read whose data is on the LDM output now
  output logic          rd_valid,
  output logic [AW-1:0] rd_addr
);
  always_comb begin
    ldm_re    = comp_re | ro_re;
    ldm_raddr = comp_re ? comp_addr : ro_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_addr  <= '0;
    end else begin
      rd_valid <= comp_re;
      if (comp_re) rd_addr <= comp_addr;
    end
  end
endmodule
