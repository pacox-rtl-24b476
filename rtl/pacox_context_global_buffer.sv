// pacox_context_global_buffer: entry point of the context into the PL.
//
// The processing system writes the 46-bit context word (qubit count, n_Y mod
// 4, Value and Row bit strings) once per Pauli string. On such a write the
// buffer registers the word, copies it into every PE's Context Buffer with a
// one-cycle ctx_load pulse and, in the next cycle, pulses start: as the paper
// puts it, the PE array starts computing once the Context Global Buffer has
// received the configuration. A write while the array is busy, or one whose
// qubit count exceeds MAX_QUBITS, is not taken; the latter raises cfg_error
// until the next accepted write.
// Timing: wr at edge t -> ctx_load high in cycle t+1 -> start high in t+2.
// Rejecting bad or overlapping writes is this design's choice.
module pacox_context_global_buffer
  import pacox_pkg::*;
#(
  parameter int unsigned MAX_N = MAX_QUBITS
)(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr,
  input  context_t wdata,
  input  logic     array_busy,
  output context_t ctx,
  output logic     ctx_load,
  output logic     start,
  output logic     cfg_error
);
  logic accept, pending;

  assign accept = wr && !array_busy && !ctx_load && !pending
                  && (wdata.qubits <= QUBIT_W'(MAX_N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx       <= '0;
      ctx_load  <= 1'b0;
      start     <= 1'b0;
      pending   <= 1'b0;
      cfg_error <= 1'b0;
    end else begin
      ctx_load <= accept;
      start    <= ctx_load;
      pending  <= ctx_load;
      if (accept) begin
        ctx       <= wdata;
        cfg_error <= 1'b0;
      end else if (wr && (wdata.qubits > QUBIT_W'(MAX_N))) begin
        cfg_error <= 1'b1;
      end
    end
  end

  a_start_after_load: assert property (@(posedge clk) disable iff (!rst_n)
                                       start |-> $past(ctx_load))
    else $error("start without a preceding context load");
endmodule
