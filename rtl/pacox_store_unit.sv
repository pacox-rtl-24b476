// pacox_store_unit: write side of a processing element's Local Data Memory.
//
// It registers each result of the ALU together with its destination and
// writes it into the LDM one cycle later. The destination of the result of
// input address a is a + offset, where offset is the current number of valid
// entries in the LDM (2^l in the local iteration l), so that the outputs are
// appended behind the inputs: the paper's In/Out merging. The same path writes
// the PE's seed entry (offset 0, address 0) before the first iteration.
// Timing: in_valid at edge t gives we at edge t+1. busy is high while a write
// is pending, so PE Control can wait for the pipeline to drain.
// The paper names this unit; its single register stage is this design's
// choice.
module pacox_store_unit
  import pacox_pkg::*;
#(
  parameter int unsigned AW = 14
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,    // address the input entry was read from
  input  logic [AW-1:0] offset,     // distance from input to output entry
  input  entry_t        in_data,    // ALU result
  output logic          we,
  output logic [AW-1:0] waddr,
  output entry_t        wdata,
  output logic          busy
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
    end else begin
      we <= in_valid;
      if (in_valid) begin
        waddr <= in_addr + offset;
        wdata <= in_data;
      end
    end
  end

  assign busy = we;
endmodule
