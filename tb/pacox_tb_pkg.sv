// pacox_tb_pkg: reference model shared by the testbenches.
//
// A Pauli string is held as an array of digits x[l] in {0,1,2,3} = {I,X,Y,Z},
// x[0] being the least significant qubit. ref_entry() evaluates row j of
// P(x) = s_x[n-1] (x) ... (x) s_x[0] directly from the 2x2 Pauli matrices:
// for each qubit it looks up the one non-zero element of s_x[l] in row j_l,
// which gives bit l of the column and a factor i^e; the factors multiply.
// It does not use the recurrence the hardware uses, so it checks it.
// make_context() encodes a string the way the host software would.
package pacox_tb_pkg;
  import pacox_pkg::*;

  typedef logic [1:0] digits_t [MAX_QUBITS];

  // coded value of i^e
  function automatic logic [1:0] code_of_phase(input int e);
    case (e % 4)
      0:       return 2'd0;  // +1
      1:       return 2'd2;  // +i
      2:       return 2'd1;  // -1
      default: return 2'd3;  // -i
    endcase
  endfunction

  function automatic entry_t ref_entry(input digits_t x, input int n, input int unsigned j);
    entry_t e;
    int     phase;
    logic   r;
    e     = '0;
    phase = 0;
    for (int l = 0; l < n; l++) begin
      r = j[l];
      case (x[l])
        2'd0: e.k[l] = r;                                   // I = [[1,0],[0,1]]
        2'd1: e.k[l] = ~r;                                  // X = [[0,1],[1,0]]
        2'd2: begin e.k[l] = ~r; phase += r ? 1 : 3; end    // Y = [[0,-i],[i,0]]
        default: begin e.k[l] = r; phase += r ? 2 : 0; end  // Z = [[1,0],[0,-1]]
      endcase
    end
    e.m = code_of_phase(phase);
    return e;
  endfunction

  function automatic context_t make_context(input digits_t x, input int n);
    context_t c;
    int       ny;
    c  = '0;
    ny = 0;
    c.qubits = QUBIT_W'(n);
    for (int l = 0; l < n; l++) begin
      c.row[l]   = (x[l] == 2'd1) || (x[l] == 2'd2);
      c.value[l] = (x[l] == 2'd0) || (x[l] == 2'd1);
      if (x[l] == 2'd2) ny++;
    end
    c.ny = 2'(ny);
    return c;
  endfunction

  function automatic digits_t random_string();
    digits_t x;
    foreach (x[l]) x[l] = 2'($urandom_range(0, 3));
    return x;
  endfunction

  // Cycles from the start pulse to done for one PE (see pacox_pe_control).
  function automatic int expected_pe_cycles(input int n, input int log2_pes);
    int p, it;
    p  = (n < log2_pes) ? n : log2_pes;
    it = n - p;
    return p + 3 + (1 << it) + 3 * it;
  endfunction
endpackage
