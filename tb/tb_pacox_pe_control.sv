// tb_pacox_pe_control: checks the PE sequencer against a behavioural model
// of the rest of the PE.
// The testbench plays the Local Data Memory (one-cycle read latency), the
// Load Unit tag, the ALU and the Store Unit register itself, so that the
// controller alone decides what is computed. After each run the model memory
// must hold rows PE_ID*2^(n-P) + a of the reference operator, and done must
// come exactly P + 3 + 2^(n-P) + 3(n-P) cycles after start (1 cycle for a PE
// without data).
module tb_pacox_pe_control;
  import pacox_pkg::*;
  import pacox_tb_pkg::*;
  localparam int PE_ID = 5;
  localparam int AW = 14;

  logic clk = 0, rst_n = 0, start = 0;
  context_t           ctx = '0;
  logic [M_W-1:0]     m0 = '0;
  logic [QUBIT_W-1:0] seed_bits = '0, local_iters = '0;
  logic               active = 0;
  logic [L_W-1:0]     alu_l;
  logic               alu_sub, alu_neg, alu_src_seed;
  entry_t             seed, alu_out, alu_in;
  logic               comp_re;
  logic [AW-1:0]      comp_addr;
  logic               rd_valid = 0;
  logic [AW-1:0]      rd_addr = '0;
  logic               st_valid, st_use_seed;
  logic [AW-1:0]      st_addr, st_offset;
  logic               st_busy;
  logic               busy, done;
  int checks = 0, failures = 0;

  pacox_pe_control #(.PE_ID(PE_ID), .AW(AW)) dut (.*);

  // behavioural rest of the PE
  entry_t        mem [1 << AW];
  entry_t        rdata = '0;
  logic          we = 0;
  logic [AW-1:0] waddr = '0;
  entry_t        wdata = '0;

  assign alu_in  = alu_src_seed ? seed : rdata;
  assign alu_out = '{k: alu_sub ? alu_in.k - (K_W'(1) << alu_l) : alu_in.k + (K_W'(1) << alu_l),
                     m: alu_neg ? {alu_in.m[1], ~alu_in.m[0]} : alu_in.m};
  assign st_busy = we;

  always_ff @(posedge clk) begin
    rd_valid <= comp_re;
    if (comp_re) begin
      rd_addr <= comp_addr;
      rdata   <= mem[comp_addr];
    end
    we <= st_valid;
    if (st_valid) begin
      waddr <= st_addr + st_offset;
      wdata <= st_use_seed ? seed : alu_out;
    end
    if (we) mem[waddr] <= wdata;
  end

  always #5 clk = ~clk;

  task automatic run(input int n);
    digits_t x;
    context_t c;
    int p, cyc, want;
    x = random_string();
    c = make_context(x, n);
    p = (n < 5) ? n : 5;
    ctx = c;
    m0 = (c.ny == 0) ? 2'd0 : (c.ny == 1) ? 2'd3 : (c.ny == 2) ? 2'd1 : 2'd2;
    seed_bits = QUBIT_W'(p);
    local_iters = QUBIT_W'(n - p);
    active = PE_ID < (1 << p);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin
      checks++;
      if (!busy) failures++;
      @(negedge clk);
      cyc++;
    end
    want = active ? expected_pe_cycles(n, 5) : 1;
    checks++;
    if (cyc != want) begin
      failures++;
      $display("n=%0d: done after %0d cycles, want %0d", n, cyc, want);
    end
    if (active) begin
      for (int a = 0; a < (1 << (n - p)); a++) begin
        entry_t e;
        e = ref_entry(x, n, (PE_ID << (n - p)) + a);
        checks++;
        if (mem[a] != e) begin
          failures++;
          if (failures < 10) $display("n=%0d a=%0d: got %h want %h", n, a, mem[a], e);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (done || busy) failures++;
    for (int n = 0; n <= 14; n++) run(n);
    run(16);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
