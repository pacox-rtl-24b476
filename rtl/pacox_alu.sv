// pacox_alu: the arithmetic logic unit of a processing element.
//
// It performs one step of the Pauli-composer recurrence on one entry:
//   k_out = k_in - 2^l  when ctrl_sub is set (the qubit l factor is X or Y),
//   k_out = k_in + 2^l  otherwise (I or Z);
//   m_out = m_in ^ 1    when ctrl_neg is set (factor Y or Z: value negated),
//   m_out = m_in        otherwise.
// As in the paper's ALU figure, 2^l comes from a left shifter on l, an adder
// and a subtractor both work on k and a multiplexer picks one, while m goes
// through an XOR with the constant 1 and a second multiplexer. The output is
// the 21-bit entry {k, m}. Purely combinational: the paper states the ALU
// finishes in one clock cycle; the register after it belongs to the Store
// Unit. Using two control bits (one per multiplexer) is this design's choice.
module pacox_alu
  import pacox_pkg::*;
(
  input  logic [L_W-1:0] l,         // iteration index (bit position)
  input  entry_t         in,        // {k, m}
  input  logic           ctrl_sub,  // select k - 2^l
  input  logic           ctrl_neg,  // select m ^ 1
  output entry_t         out
);
  logic [K_W-1:0] step, k_add, k_sub;

  always_comb begin
    step  = K_W'(1) << l;
    k_add = in.k + step;
    k_sub = in.k - step;
    out.k = ctrl_sub ? k_sub : k_add;
    out.m = ctrl_neg ? (in.m ^ M_W'(1)) : in.m;
  end
endmodule
