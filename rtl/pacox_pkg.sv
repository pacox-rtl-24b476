// pacox_pkg: types and constants shared by the Pauli-composer accelerator.
//
// A Pauli string x of n qubits is described to the hardware by a context word
// (four fields, most significant first: qubit count, n_Y mod 4, Value bit
// string, Row bit string). The accelerator expands it into 2^n entries
// (k[j], m[j]): k[j] is the column of the single non-zero element in row j of
// the 2^n x 2^n operator, and m[j] is that element's value, coded in 2 bits as
// 0:+1, 1:-1, 2:+i, 3:-i, so that negation is an XOR with 1.
// Field widths (6/2/19/19 for the context, 19/2 for an entry) follow the
// paper's memory organisation; the bit order within the 64-bit PIO word
// (context right-aligned) is this design's choice.
package pacox_pkg;

  parameter int unsigned MAX_QUBITS = 19;   // largest n the memories hold
  parameter int unsigned QUBIT_W    = 6;    // width of the qubit-count field
  parameter int unsigned K_W        = 19;   // width of k[j]
  parameter int unsigned M_W        = 2;    // width of the coded value m[j]
  parameter int unsigned ENTRY_W    = K_W + M_W;   // 21 bits per entry
  parameter int unsigned L_W        = 5;    // width of the iteration index l
  parameter int unsigned PIO_W      = 64;   // PS-to-PL programmed-I/O width
  parameter int unsigned DMA_W      = 128;  // PL-to-PS DMA stream width
  parameter int unsigned LANE_W     = 32;   // one entry per 32-bit lane of a DMA beat

  // Coded element values
  typedef enum logic [M_W-1:0] {
    M_POS_ONE = 2'd0,
    M_NEG_ONE = 2'd1,
    M_POS_I   = 2'd2,
    M_NEG_I   = 2'd3
  } mval_e;

  // Context word as stored in the Context (Global) Buffer: 46 bits
  typedef struct packed {
    logic [QUBIT_W-1:0] qubits;  // n
    logic [1:0]         ny;      // number of Y factors, mod 4
    logic [K_W-1:0]     value;   // bit l = V~[x_l], V~ = [1,1,0,0] for I,X,Y,Z
    logic [K_W-1:0]     row;     // bit l = X~[x_l], X~ = [0,1,1,0] for I,X,Y,Z
  } context_t;

  parameter int unsigned CTX_W = $bits(context_t);

  // One entry of the n-Pauli matrix memory
  typedef struct packed {
    logic [K_W-1:0] k;
    logic [M_W-1:0] m;
  } entry_t;

  // m[0] = (-i)^(n_Y mod 4), coded: (-i)^0=+1, (-i)^1=-i, (-i)^2=-1, (-i)^3=+i
  function automatic logic [M_W-1:0] initial_m(input logic [1:0] ny);
    case (ny)
      2'd0:    return M_POS_ONE;
      2'd1:    return M_NEG_I;
      2'd2:    return M_NEG_ONE;
      default: return M_POS_I;
    endcase
  endfunction

endpackage
