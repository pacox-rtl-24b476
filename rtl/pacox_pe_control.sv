// pacox_pe_control: sequencer of one processing element.
//
// PE number p of 2^LOG2_PES owns the rows j whose top P bits equal p
// (P = min(n, LOG2_PES)), i.e. the contiguous segment [p*S, (p+1)*S) of the
// result with S = 2^(n-P); LDM address a holds row p*S + a.
// After start it runs three phases:
//   SEED     builds the entry of row p*S from the context: starting from
//            (k[0], m[0]) = (Row bit string, (-i)^n_Y) it applies the ALU once
//            for every set bit b of p, with l = n-P+b (one cycle per bit,
//            P cycles);
//   SEED_WR  writes that entry to LDM address 0;
//   ITER/DRAIN  for l = 0 .. n-P-1 reads addresses 0 .. 2^l-1 (one per
//            cycle), and the ALU/Store Unit write the results to 2^l .. 2^(l+1)-1;
//            this is line 11-12 of the paper's parallel algorithm applied to
//            the PE's own segment. DRAIN waits until the read tag and the
//            pending write are gone before the next iteration reads.
// done is high from the end of the run until the next start; busy in between.
// An inactive PE (n < LOG2_PES and p >= 2^n) goes straight to done.
// Latency from the start cycle to the first done cycle:
//   P + 3 + 2^(n-P) + 3*(n-P) cycles for an active PE (16,434 for n = 19).
// The paper says only that each PE has its own control logic for
// synchronisation and pipelining; this sequencing, the seeding of each PE
// from the context instead of moving data between PEs, and the drain gap are
// this design's choices.
module pacox_pe_control
  import pacox_pkg::*;
#(
  parameter int unsigned PE_ID    = 0,
  parameter int unsigned AW       = 14
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  // from the Context Buffer
  input  context_t           ctx,
  input  logic [M_W-1:0]     m0,
  input  logic [QUBIT_W-1:0] seed_bits,
  input  logic [QUBIT_W-1:0] local_iters,
  input  logic               active,
  // ALU control and the seed register
  output logic [L_W-1:0]     alu_l,
  output logic               alu_sub,
  output logic               alu_neg,
  output logic               alu_src_seed,
  output entry_t             seed,
  input  entry_t             alu_out,
  // Load Unit
  output logic               comp_re,
  output logic [AW-1:0]      comp_addr,
  input  logic               rd_valid,
  input  logic [AW-1:0]      rd_addr,
  // Store Unit
  output logic               st_valid,
  output logic               st_use_seed,
  output logic [AW-1:0]      st_addr,
  output logic [AW-1:0]      st_offset,
  input  logic               st_busy,
  // status
  output logic               busy,
  output logic               done
);
  typedef enum logic [2:0] {S_IDLE, S_SEED, S_SEED_WR, S_ITER, S_DRAIN, S_DONE} state_e;

  state_e             state;
  logic [QUBIT_W-1:0] bitn;      // seed bit being applied
  logic [QUBIT_W-1:0] it;        // current local iteration l
  logic               after_iter;
  logic [AW-1:0]      addr;
  logic [AW:0]        len;       // 2^it, entries valid before this iteration
  logic [L_W-1:0]     seed_l;
  logic               pe_bit;

  always_comb begin
    len    = (AW+1)'(1) << it;
    seed_l = L_W'(local_iters + bitn);
    pe_bit = ((32'(PE_ID) >> bitn) & 32'd1) != 0;
    alu_src_seed = (state == S_SEED);
    alu_l   = alu_src_seed ? seed_l : L_W'(it);
    alu_sub = ctx.row[alu_l];
    alu_neg = ~ctx.value[alu_l];
    comp_re   = (state == S_ITER);
    comp_addr = addr;
    st_use_seed = (state == S_SEED_WR);
    st_valid    = st_use_seed | rd_valid;
    st_addr     = st_use_seed ? '0 : rd_addr;
    st_offset   = st_use_seed ? '0 : len[AW-1:0];
    busy = (state != S_IDLE) && (state != S_DONE);
    done = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      bitn       <= '0;
      it         <= '0;
      after_iter <= 1'b0;
      addr       <= '0;
      seed       <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            seed       <= '{k: ctx.row, m: m0};
            bitn       <= '0;
            it         <= '0;
            addr       <= '0;
            after_iter <= 1'b0;
            if (!active)             state <= S_DONE;
            else if (seed_bits == 0) state <= S_SEED_WR;
            else                     state <= S_SEED;
          end
        end
        S_SEED: begin
          if (pe_bit) seed <= alu_out;
          bitn <= bitn + 1'b1;
          if (bitn == seed_bits - 1'b1) state <= S_SEED_WR;
        end
        S_SEED_WR: state <= S_DRAIN;
        S_ITER: begin
          addr <= addr + 1'b1;
          if ((AW+1)'(addr) == len - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!rd_valid && !st_busy) begin
            addr <= '0;
            if (after_iter) begin
              it <= it + 1'b1;
              state <= (it + 1'b1 == local_iters) ? S_DONE : S_ITER;
            end else begin
              state <= (local_iters == 0) ? S_DONE : S_ITER;
            end
            after_iter <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

// A computation read only touches entries already valid (below 2^l).
  a_read_valid_entry: assert property (@(posedge clk) disable iff (!rst_n)
                                       comp_re |-> ((AW+1)'(comp_addr) < len))
    else $error("PE %0d reads address %0d beyond %0d valid entries", PE_ID, comp_addr, len);
endmodule
