// pacox_pe: one processing element of the Pauli-composer accelerator.
//
// Structure (as in the paper's PE figure): a Context Buffer, PE Control, an
// ALU, a Local Data Memory and a Load and a Store Unit. PE Control reads
// entries of the PE's segment out of the LDM through the Load Unit, the ALU
// applies the step of iteration l, and the Store Unit writes the result
// behind the inputs, one entry per clock cycle. See pacox_pe_control for the
// sequence and its latency.
// Interface: ctx_load copies ctx_in into the Context Buffer; start (at least
// one cycle after ctx_load) begins a run; done stays high when it has ended.
// For readout, ro_re/ro_addr read LDM address ro_addr and ro_data shows the
// entry one cycle later; ro_data is zero for a PE that holds no data for the
// current n. Readout must only be used while done is high.
module pacox_pe
  import pacox_pkg::*;
#(
  parameter int unsigned PE_ID     = 0,
  parameter int unsigned LOG2_PES  = 5,
  parameter int unsigned LDM_DEPTH = 16384,
  parameter int unsigned AW        = $clog2(LDM_DEPTH)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ctx_load,
  input  context_t      ctx_in,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic          ro_re,
  input  logic [AW-1:0] ro_addr,
  output entry_t        ro_data
);
  context_t           ctx;
  logic [M_W-1:0]     m0;
  logic [QUBIT_W-1:0] seed_bits, local_iters;
  logic               active;

  logic [L_W-1:0] alu_l;
  logic           alu_sub, alu_neg, alu_src_seed;
  entry_t         seed, alu_in, alu_out;

  logic          comp_re, rd_valid;
  logic [AW-1:0] comp_addr, rd_addr;
  logic          ldm_re, ldm_we;
  logic [AW-1:0] ldm_raddr, ldm_waddr;
  entry_t        ldm_rdata, ldm_wdata;

  logic          st_valid, st_use_seed, st_busy;
  logic [AW-1:0] st_addr, st_offset;
  entry_t        st_data;

  pacox_context_buffer #(.PE_ID(PE_ID), .LOG2_PES(LOG2_PES)) u_ctx (
    .clk, .rst_n, .ctx_load, .ctx_in,
    .ctx, .m0, .seed_bits, .local_iters, .active
  );

  pacox_pe_control #(.PE_ID(PE_ID), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start,
    .ctx, .m0, .seed_bits, .local_iters, .active,
    .alu_l, .alu_sub, .alu_neg, .alu_src_seed, .seed, .alu_out,
    .comp_re, .comp_addr, .rd_valid, .rd_addr,
    .st_valid, .st_use_seed, .st_addr, .st_offset, .st_busy,
    .busy, .done
  );

  assign alu_in  = alu_src_seed ? seed : ldm_rdata;
  assign st_data = st_use_seed ? seed : alu_out;

  pacox_alu u_alu (
    .l(alu_l), .in(alu_in), .ctrl_sub(alu_sub), .ctrl_neg(alu_neg), .out(alu_out)
  );

  pacox_load_unit #(.AW(AW)) u_load (
    .clk, .rst_n,
    .comp_re, .comp_addr, .ro_re, .ro_addr,
    .ldm_re, .ldm_raddr, .rd_valid, .rd_addr
  );

  pacox_store_unit #(.AW(AW)) u_store (
    .clk, .rst_n,
    .in_valid(st_valid), .in_addr(st_addr), .offset(st_offset), .in_data(st_data),
    .we(ldm_we), .waddr(ldm_waddr), .wdata(ldm_wdata), .busy(st_busy)
  );

  pacox_ldm #(.DEPTH(LDM_DEPTH), .AW(AW)) u_ldm (
    .clk, .we(ldm_we), .waddr(ldm_waddr), .wdata(ldm_wdata),
    .re(ldm_re), .raddr(ldm_raddr), .rdata(ldm_rdata)
  );

  assign ro_data = active ? ldm_rdata : '0;
endmodule
