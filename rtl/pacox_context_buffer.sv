// pacox_context_buffer: per-PE copy of the context word.
//
// Each processing element keeps its own registered copy of the 46-bit
// context, loaded from the Context Global Buffer when ctx_load is high. The
// paper introduces these buffers to cut the fan-out from the PS-facing
// logic into the 32 PEs. Besides the raw fields, the buffer registers the
// values its PE derives from them, so that PE Control starts from registers:
//   m0          coded value of m[0] = (-i)^(n_Y mod 4);
//   seed_bits   P = min(n, log2 NUM_PES): the top P bits of the row index
//               select the PE, and the PE builds its first entry over them;
//   local_iters n - P iterations of the recurrence run inside the PE;
//   active      PE_ID < 2^P (for n < 5 only the first 2^n PEs hold data).
// Timing: outputs change one cycle after ctx_load. Reset clears them.
// Splitting the row index into a PE number (high bits) and an LDM address
// (low bits) is this design's choice of how the vector is partitioned.
module pacox_context_buffer
  import pacox_pkg::*;
#(
  parameter int unsigned PE_ID    = 0,
  parameter int unsigned LOG2_PES = 5
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ctx_load,
  input  context_t           ctx_in,
  output context_t           ctx,
  output logic [M_W-1:0]     m0,
  output logic [QUBIT_W-1:0] seed_bits,
  output logic [QUBIT_W-1:0] local_iters,
  output logic               active
);
  logic [QUBIT_W-1:0] p_bits;

  always_comb begin
    p_bits = (ctx_in.qubits < QUBIT_W'(LOG2_PES)) ? ctx_in.qubits : QUBIT_W'(LOG2_PES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx         <= '0;
      m0          <= '0;
      seed_bits   <= '0;
      local_iters <= '0;
      active      <= 1'b0;
    end else if (ctx_load) begin
      ctx         <= ctx_in;
      m0          <= initial_m(ctx_in.ny);
      seed_bits   <= p_bits;
      local_iters <= ctx_in.qubits - p_bits;
      active      <= (32'(PE_ID) >> p_bits) == 0;
    end
  end
endmodule
