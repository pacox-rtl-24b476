# PACOX in SystemVerilog: a hardware Pauli-string composer

An n-qubit Pauli string x = x(n-1) … x(0), with x(l) ∈ {I, X, Y, Z}, stands for the
2^n × 2^n operator P(x) = σ(x(n-1)) ⊗ … ⊗ σ(x(0)). Building that matrix outright needs
4^n elements. But every row j of P(x) holds exactly one non-zero element. It sits at some
column k[j] and its value m[j] is one of +1, −1, +i, −i. So the whole operator is the list
of 2^n pairs (k[j], m[j]).

PACOX ("Pauli Composer Accelerator") computes that list on an FPGA. Its starting point is
this recurrence. For every qubit l, with L = 2^l:

    k[j + L] = k[j] − L   if x(l) ∈ {X, Y},   k[j] + L   if x(l) ∈ {I, Z}
    m[j + L] = −m[j]      if x(l) ∈ {Y, Z},   m[j]       if x(l) ∈ {I, X}      (0 ≤ j < L)

The recurrence starts from k[0], which has bit l set where x(l) ∈ {X, Y}, and from
m[0] = (−i)^(number of Y factors). Each step doubles the list. The ± on k never carries,
because bit l of k[j] is known, so it is really an XOR. The values are kept in a 2-bit
code in which negation is an XOR with 1. The hardware is therefore adders and XORs working
through memories, spread over 32 processing elements (PEs). The RTL here describes that
accelerator as the programmable-logic half of a Zynq-class SoC. Its defaults are those of
the published 250 MHz ZCU102 build: 32 PEs in 8 clusters of 4, with 2^14 entries of local
memory per PE, for strings of up to 19 qubits.

The RTL follows the architecture of the PACOX paper (Le, Vu, Le, Pham, Nakashima). Much of
that paper is given at block level only. The last section but one lists what was taken
from it and what was decided here.

## Encoding

The host describes a string with one **context word** of 46 bits:

| bits   | field      | meaning                                                     |
|--------|------------|-------------------------------------------------------------|
| 45..40 | qubits     | n (0 … 19 accepted)                                         |
| 39..38 | n_Y        | number of Y factors, mod 4                                  |
| 37..19 | Value bits | bit l = 1 when x(l) ∈ {I, X} (the factor does *not* negate) |
| 18..0  | Row bits   | bit l = 1 when x(l) ∈ {X, Y}; this is k[0]                  |

Each result entry is 21 bits, `{k[18:0], m[1:0]}`. The value code is:

| code | value |
|------|-------|
| 0    | +1    |
| 1    | −1    |
| 2    | +i    |
| 3    | −i    |

Negating a value flips bit 0 of its code. The context buffer converts n_Y into the code of
m[0] = (−i)^n_Y. For n_Y = 0, 1, 2, 3 that gives codes 0, 3, 1, 2.

**Example, X ⊗ Z (n = 2).** The context is Row = 0b10, Value = 0b10, n_Y = 0, so
k[0] = 2 and m[0] = +1. Step l = 0 (Z) adds 1 and negates: (k[1], m[1]) = (3, −1). Step
l = 1 (X) subtracts 2 and keeps the sign: (k[2], m[2]) = (0, +1) and (k[3], m[3]) = (1, −1).
This matches X ⊗ Z = [[0, Z], [Z, 0]].

## How the work is divided among the PEs

This is the part of the design that most needs explaining. The paper writes the
recurrence as a loop over l. Inside each step, the 32 PEs each take 1/32 of the current L
entries and write their outputs L places further on. Taken literally, every step would
re-deal the data among the PEs. Each PE's data lives in its own Local Data Memory (LDM),
so that would mean copying between memories. The paper also says that each PE keeps its
inputs and outputs together in local memory and merges them for the next step. The RTL
takes that statement as the rule and arranges the index space so that no entry ever moves
between PEs:

* Let P = min(n, 5) and S = 2^(n−P). **PE p owns rows p·S … (p+1)·S − 1** of the result.
  Row j sits in PE j >> (n−P), at LDM address j mod S. When the computation is done, the
  32 PEs hold the 32 contiguous segments of the list.
* **Seed phase.** The top P bits of every row in PE p's segment are p. The PE therefore
  first builds the entry of row p·S alone. It starts from (k[0], m[0]) in a register and
  runs one ALU step with l = n−P+b for every set bit b of p. This takes P cycles. The
  result is written to LDM address 0. Order does not matter, because the steps commute.
* **Expansion phase.** For l = 0 … n−P−1, the PE reads LDM addresses 0 … 2^l − 1, one per
  cycle. It applies step l and writes each result 2^l addresses higher. This is the
  paper's "In/Out merging": the outputs are appended behind the inputs, and together they
  are the input of the next step.

All active PEs run the same schedule in lock step. For n < 5 only PEs 0 … 2^n − 1 hold a
row: each builds its one entry in the seed phase and runs no expansion step. The others
report done at once and read out as zero.

## Inside a processing element

```
 Context Buffer ─► PE Control ──addr──► Load Unit ──► LDM (2^14 × 21) ──► rdata
                        │                                  ▲               │
                        └─ l, sub, neg ─► ALU ◄────────────┼───────────────┘
                                           │               │
                                           └─► Store Unit ─┘  (write to addr + 2^l)
```

* **ALU** (`pacox_alu`) is combinational. A left shift makes 2^l. An adder and a
  subtractor work on k, and a multiplexer picks one of them (`ctrl_sub` = Row bit l). An
  XOR with 1 on m is picked by a second multiplexer (`ctrl_neg` = NOT Value bit l).
* **Load Unit** (`pacox_load_unit`) shares the one LDM read port between the PE's own
  reads and the readout reads, with the PE's reads taking priority. It also carries the
  read address along with the one cycle of memory latency.
* **Store Unit** (`pacox_store_unit`) registers the ALU result. It writes the result one
  cycle later to the read address plus 2^l.
* **PE Control** (`pacox_pe_control`) is a state machine with the states IDLE, SEED,
  SEED_WR, ITER, DRAIN and DONE. DRAIN waits for the two-stage read/write pipeline to
  empty before the next step reads entries the previous step wrote.

**Timing.** Count cycles from the start pulse (cycle 0) to the first cycle with done high.
A PE holding data takes

    P + 3 + 2^(n−P) + 3·(n−P)  cycles

For n = 19 this is 16,434 cycles, or 65.7 µs at 250 MHz. The 2^(n−5) term is the actual
work, at one entry per PE per cycle. The rest is the seed, the seed write and three drain
cycles per step. Counted from the cycle of the context write, add 2 cycles: the context is
loaded into the PEs one cycle after the write, and start follows a cycle later.

## Getting the results out

Four PEs form a **cluster**, so that one 128-bit beat of the DMA stream carries one entry
from each of them. Lane q of a beat (bits 32q+20 … 32q) holds the entry of PE 4c+q,
zero-extended to 32 bits.

The **Read Arbiter** walks the clusters that hold data, cluster by cluster. Within a
cluster it walks the LDM addresses 0 … S−1, and it issues one cluster read per cycle. A
two-entry FIFO covers the memory latency, so the stream runs at one beat per cycle while
`tready` is high and loses nothing when `tready` drops. Every beat carries:

* `tdata`, the four lanes;
* `tkeep`, four bytes per lane that holds a row (all lanes unless n < 2);
* `tuser` = {cluster, LDM address};
* `tlast` on the last of the max(1, 2^n/4) beats.

The row of lane q is j = (4·cluster + q)·S + address. A host that writes the beats to
memory in order can rebuild the row of every entry from the beat number alone.

## Host interface

The top (`pacox_top`) has two ports: a 64-bit AXI4-Lite slave for control and context,
and a 128-bit AXI4-Stream master for the results, which feeds a DMA engine. Registers are
64 bits wide and use byte addresses:

| addr | name    | access | content                                                         |
|------|---------|--------|-----------------------------------------------------------------|
| 0x00 | CTRL    | W      | bit 0 = 1: start the readout (only acted on once done)          |
| 0x08 | CONTEXT | W/R    | context word in bits 45..0; a write starts the computation      |
| 0x10 | STATUS  | R      | bit 0 computing, bit 1 done, bit 2 readout running, bit 3 context refused |

The sequence for one string:

1. Write CONTEXT.
2. Wait for `irq`, which follows STATUS bit 1.
3. Write 1 to CTRL.
4. Take beats until `tlast`.

Writes are whole 64-bit words; the write strobes are ignored. A CONTEXT write is ignored while a computation or readout is running. A context with more
than 19 qubits is refused and sets STATUS bit 3. The done flag is hidden from the moment a
new context is accepted, so the host never mistakes the previous result for the new one.
A Hamiltonian that is a sum of strings is processed one string at a time.

## Parameters and size

| parameter         | default | meaning                                         |
|-------------------|---------|-------------------------------------------------|
| `NUM_CLUSTERS`    | 8       | clusters; the PE count is 4× this, a power of 2 |
| `PES_PER_CLUSTER` | 4       | PEs per cluster (4 × 32-bit lanes = 128 bits)   |
| `LDM_DEPTH`       | 16384   | entries per PE; the largest n is log2(32·depth) |
| `AXI_AW`          | 8       | AXI4-Lite address width                         |

The entry and context widths (19-bit k, 6-bit qubit count) live in `pacox_pkg`. They fix
the largest supported n at 19. At the defaults the 32 LDMs hold 11,010,048 bits,
2^19 entries of 21 bits. Outside the memories, coarse synthesis counts about 3,600
flip-flops and about 3,200 word-level cells. The paper's FPGA build reports 10,934
flip-flops. Its internal registers, for example any pipelining towards 250 MHz, are not
described, so the two numbers cannot be matched. Every PE keeps its own context copy and its
own controller, as the paper's PE does.

Every workload family the paper evaluates fits in the default build: random strings,
two-local XX/YY/ZZ terms, stabilizer Z_j, transverse-field Ising and LiH terms, all for
n = 3 … 19. The largest case, n = 19, needs 2^19 entries, exactly what the memories hold.

## What comes from the paper and what was decided here

From the paper:

* the recurrence and the value encoding;
* the four blocks of the top and the structure of a PE;
* 32 PEs in clusters of four;
* the 2^14 × (19 + 2)-bit local memories;
* the fields of the context word;
* the ALU's shifter, adder, subtractor, XOR and multiplexers;
* single-cycle ALU operation;
* a 64-bit programmed-I/O path and 128-bit DMA beats;
* the computation starting as soon as the context arrives.

Decided here, since the paper does not give it:

* **Partitioning.** The paper partitions the current L entries at every step, which would
  need data exchange between PEs. Here, segments are fixed by the high row bits and every
  PE seeds its own first entry (see above). The results are the same. The order in which
  bit positions are processed differs from the paper's loop.
* **Pipeline.** The LDM port structure, the one-cycle read latency and the three-cycle
  drain between steps are all choices made here. So is the exact cycle count that
  follows from them.
* **Bus protocols.** The bus protocols (AXI4-Lite, AXI4-Stream), the register map, the
  beat order, the lane layout, `tuser`, the lane mask and the read FIFO.
* **Error handling and reset.** Refusing oversized or overlapping contexts, hiding stale
  done, zero readout from idle PEs, and an active-low asynchronous reset that clears
  control state but not memories.
* **Context bit order.** The left-to-right order of the context fields comes from the
  paper. Their bit positions in the 64-bit register do not.
* **Start path.** The paper's architecture figure draws a control-signal path from the
  AXI interface straight to the clusters. Here the PEs are started by the Context Global
  Buffer once it holds the context, as the paper's text describes. The host's only other
  command, the readout start, goes to the Read Arbiter.
* **Scaling.** Raising `LDM_DEPTH` alone does not take the design past n = 19. The 19-bit
  k field and the 19-bit strings in `pacox_pkg` must grow with it.

The paper's measured execution time at n = 19 is about 115 µs. It was measured on the
board and includes software overhead, so it cannot be compared cycle for cycle with the
65.7 µs above. The processing system (CPU, DMA controller, DDR) and the host software are
not part of this RTL. The testbenches play their role.

## Simulation

Each module has a self-checking testbench in `tb/`. The reference model (`pacox_tb_pkg`)
does not use the recurrence. It evaluates each row of the tensor product directly from
the 2×2 Pauli matrices. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pacox_pkg.sv tb/pacox_tb_pkg.sv tb/tb_pacox_top.sv --top-module tb_pacox_top
./obj_dir/Vtb_pacox_top
```

Every testbench prints `TB_RESULT checks=N failures=M`.

* `tb_pacox_top` drives the top through its AXI ports with reduced memories (n ≤ 13). It
  runs random strings and terms from the benchmark families. It checks every row, that
  every row arrives once, and the run time. It also counts stream stalls, runs with idle
  PEs, partial beats, refused contexts and contexts dropped while busy, and fails if any
  of these never happened.
* `tb_pacox_top_full` runs the default configuration. It checks 19-qubit strings from
  every benchmark family completely (2^19 rows each), plus one random string for each
  n = 3 … 18. That takes under ten seconds of simulation.
* The block testbenches check the ALU, LDM, Load and Store Units, Context Buffer, PE
  Control, PE, cluster, cluster array, Context Global Buffer, Read Arbiter and AXI
  interface on their own. Where a latency is defined, they check it.

## Files

`rtl/pacox_pkg.sv` holds the types and widths. It is followed, bottom-up, by `pacox_alu`,
`pacox_ldm`, `pacox_load_unit`, `pacox_store_unit`, `pacox_context_buffer`,
`pacox_pe_control`, `pacox_pe`, `pacox_pe_cluster`, `pacox_pec_array`,
`pacox_context_global_buffer`, `pacox_read_arbiter`, `pacox_axi_mapper` and `pacox_top`.
Each file opens with a description of its function, interface and timing.
`tb/tb_pacox_top_body.svh` holds the host model shared by the two end-to-end testbenches.
