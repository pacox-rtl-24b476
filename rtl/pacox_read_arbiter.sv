// pacox_read_arbiter: reads the results out of the PE cluster array.
//
// After go, it walks the clusters that hold data (cluster-major) and, within
// each, the LDM addresses 0 .. 2^(n-P)-1 (P = min(n, log2 of the PE count)),
// issuing one cluster read per cycle. Each read returns four entries, one per
// PE of the cluster, which leave as one beat of a 128-bit stream with
// valid/ready flow control, so the DMA gets four entries per cycle, the
// paper's reason for clusters of four. Every beat carries:
//   data   lane q (bits 32q+20 .. 32q) = {k[j], m[j]} of row
//          j = (4*cluster + q) * 2^(n-P) + addr;
//   lanes  which of the four lanes hold a row (all, unless n < 2);
//   addr   {cluster, LDM address}, the paper's PEC ADDR_O;
//   last   on the final beat.
// Reads are only issued while the two-entry output FIFO can take their data
// (the memories have one cycle of read latency), so the stream runs at one
// beat per cycle when ready stays high and never loses a beat when it drops.
// The order of the beats, the FIFO and the lane mask are this design's
// choices; the paper gives the unit's name, its 32 PE inputs and its data and
// address outputs.
module pacox_read_arbiter
  import pacox_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS    = 8,
  parameter int unsigned PES_PER_CLUSTER = 4,
  parameter int unsigned AW              = 14,
  parameter int unsigned CW              = $clog2(NUM_CLUSTERS),
  parameter int unsigned DW              = PES_PER_CLUSTER*LANE_W
)(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       go,
  input  logic [QUBIT_W-1:0]         qubits,
  output logic                       busy,
  // to and from the cluster array
  output logic [NUM_CLUSTERS-1:0]    ro_re,
  output logic [AW-1:0]              ro_addr,
  input  logic [DW-1:0]              ro_data [NUM_CLUSTERS],
  // result stream
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [DW-1:0]              out_data,
  output logic [PES_PER_CLUSTER-1:0] out_lanes,
  output logic [CW+AW-1:0]           out_addr,
  output logic                       out_last
);
  localparam int unsigned LOG2_PES = $clog2(NUM_CLUSTERS*PES_PER_CLUSTER);
  localparam int unsigned LOG2_PPC = $clog2(PES_PER_CLUSTER);

  typedef struct packed {
    logic [DW-1:0]              data;
    logic [PES_PER_CLUSTER-1:0] lanes;
    logic [CW+AW-1:0]           addr;
    logic                       last;
  } beat_t;

  // run parameters, fixed at go
  logic [QUBIT_W-1:0]         p_bits;
  logic [CW:0]                n_clusters;
  logic [AW:0]                n_addr;
  logic [PES_PER_CLUSTER-1:0] lane_mask;

  logic          running;
  logic [CW-1:0] cur_c;
  logic [AW-1:0] cur_a;
  logic          issue, issue_last;

  // read in flight
  logic          inf_valid, inf_last;
  logic [CW-1:0] inf_c;
  logic [AW-1:0] inf_a;

  // two-entry output FIFO
  beat_t      fifo [2];
  logic       rd_ptr, wr_ptr;
  logic [1:0] count;
  logic       push, pop;
  beat_t      in_beat;

  always_comb begin
    p_bits = (qubits < QUBIT_W'(LOG2_PES)) ? qubits : QUBIT_W'(LOG2_PES);
  end

  assign pop   = out_valid && out_ready;
  assign push  = inf_valid;
  assign issue = running && ((32'(count) + 32'(inf_valid) - 32'(pop)) <= 1);
  assign issue_last = ((CW+1)'(cur_c) == n_clusters - 1'b1) && ((AW+1)'(cur_a) == n_addr - 1'b1);

  always_comb begin
    ro_re = '0;
    if (issue) ro_re[cur_c] = 1'b1;
    ro_addr = cur_a;
  end

  always_comb begin
    in_beat.data  = ro_data[inf_c];
    in_beat.lanes = lane_mask;
    in_beat.addr  = {inf_c, inf_a};
    in_beat.last  = inf_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      cur_c      <= '0;
      cur_a      <= '0;
      n_clusters <= '0;
      n_addr     <= '0;
      lane_mask  <= '0;
      inf_valid  <= 1'b0;
      inf_last   <= 1'b0;
      inf_c      <= '0;
      inf_a      <= '0;
    end else begin
      if (go && !busy) begin
        running    <= 1'b1;
        cur_c      <= '0;
        cur_a      <= '0;
        n_addr     <= (AW+1)'(1) << (qubits - p_bits);
        if (p_bits >= QUBIT_W'(LOG2_PPC)) begin
          n_clusters <= (CW+1)'(1) << (p_bits - QUBIT_W'(LOG2_PPC));
          lane_mask  <= '1;
        end else begin
          n_clusters <= (CW+1)'(1);
          lane_mask  <= PES_PER_CLUSTER'((32'd1 << (32'd1 << p_bits)) - 1);  // 2^P PEs hold data
        end
      end else if (issue) begin
        if (issue_last) begin
          running <= 1'b0;
        end else if ((AW+1)'(cur_a) == n_addr - 1'b1) begin
          cur_a <= '0;
          cur_c <= cur_c + 1'b1;
        end else begin
          cur_a <= cur_a + 1'b1;
        end
      end
      inf_valid <= issue;
      if (issue) begin
        inf_c    <= cur_c;
        inf_a    <= cur_a;
        inf_last <= issue_last;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= 1'b0;
      wr_ptr <= 1'b0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= ~wr_ptr;
      if (pop)  rd_ptr <= ~rd_ptr;
      count <= count + 2'(push) - 2'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= in_beat;
  end

  assign out_valid = (count != 0);
  assign out_data  = fifo[rd_ptr].data;
  assign out_lanes = fifo[rd_ptr].lanes;
  assign out_addr  = fifo[rd_ptr].addr;
  assign out_last  = fifo[rd_ptr].last;
  assign busy      = running || inf_valid || (count != 0);

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push && !pop |-> count < 2)
    else $error("read arbiter FIFO overflow");
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("stream beat changed while stalled");
endmodule
