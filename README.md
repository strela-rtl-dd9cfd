# STRELA: an elastic, streaming CGRA for a microcontroller-class SoC

STRELA is a small coarse-grained reconfigurable array (CGRA) that a RISC-V
microcontroller hands its inner loops to. Its main idea is to do without a
schedule. Every link in the array carries a 32-bit token with a valid/ready
handshake, and every stage can hold its token. A kernel is a dataflow graph
laid out on the PEs. Each operation fires when its operands arrive and its
consumers can accept the result, so the graph runs at whatever rate the
memory system and its feedback loops allow, with no compiler-computed timing.
Data do not sit in scratchpads inside the accelerator. Eight memory nodes
stream vectors straight from and to the SoC's main memory, and the CPU only
writes a handful of registers per kernel. Three levels of clock gating switch
off whatever a kernel does not use.

This repository holds synthesizable SystemVerilog for the accelerator itself:
the control unit, the memory nodes, the configuration path and the 4x4 PE
array, down to the buffers and multiplexers inside a PE. It also holds a
self-checking testbench for every part and an end-to-end testbench that runs
kernels on the whole accelerator. The host platform is left out. That means
the CPU, the bus crossbar, the memory banks and the power manager. The
accelerator reaches them through plain bus ports.

## The accelerator at a glance

```
        CPU (MMIO)                 system bus (8 master ports)
            |                    |  |  |  |            |  |  |  |
      +-----v------+          +--v--v--v--v--+      +--^--^--^--^--+
      | control    |--start-->| input memory |      | output memory|
      | unit       |<--done---| nodes 0..3   |      | nodes 0..3   |
      +-----+------+          +--+--+--+--+--+      +--^--^--^--^--+
            | array clock        |  |  |  | north       |  |  |  | south
            | enable, init   +---v--v--v--v---------------+--+--+--+---+
            +--------------->|      4 x 4 elastic PE array          |
     IMN0 words -> config    |  (N/E/S/W mesh, border wraparound)   |
     deserializer ---------->|      PE packets broadcast by ID      |
                             +--------------------------------------+
```

| File | What it is |
|---|---|
| `rtl/strela_pkg.sv` | widths, enums, the PE configuration struct, bus structs, register offsets |
| `rtl/strela_top.sv` | the accelerator |
| `rtl/control_unit.sv` | MMIO registers and kernel sequencer, interrupt |
| `rtl/input_memory_node.sv`, `rtl/output_memory_node.sv` | streaming DMA-like nodes |
| `rtl/node_fifo.sv` | the FIFO inside each memory node |
| `rtl/config_deserializer.sv` | 32-bit words to 160-bit PE packets |
| `rtl/cgra_array.sv` | the 4x4 mesh and its borders, array-level clock gate |
| `rtl/pe.sv` | one processing element |
| `rtl/pe_input.sv`, `rtl/pe_output.sv` | PE input port (buffer + fork) and output port (muxes) |
| `rtl/fu_data_input.sv`, `rtl/fu_control_input.sv` | operand and control inputs of the FU |
| `rtl/fu.sv` | functional unit: join/merge, ALU, comparator, mux, output stage |
| `rtl/elastic_buffer.sv`, `rtl/fork_sender.sv`, `rtl/join_merge.sv` | elastic primitives |
| `rtl/clock_gate.sv` | latch-based clock gate cell |

## Elastic tokens: the three primitives

Everything in the array is built from three small circuits. Their behaviour
decides whether kernels deadlock, so it is spelled out here.

**Elastic buffer** (`elastic_buffer`). A two-slot buffer, a main register and
a skid register. Its `ready` output depends only on its own state (skid slot
empty), never on the downstream ready. So a long chain of buffers has no
combinational ready path, and it still moves one token per cycle. When the
consumer stalls, the token already in flight lands in the skid slot. A
buffer sits at each PE input and at each FU data input. Crossing one costs
one cycle.

**Fork sender** (`fork_sender`). One producer, up to six consumers picked by a
mask. The token is shown to every selected consumer only when all of them are
ready (`valid_o = valid_i & ready_o`, `ready_o = AND(ready | ~mask)`). Thus it
leaves everywhere in the same cycle, and no per-consumer "already taken"
state is needed. This is the simplest fork that is correct. The price is
that one slow consumer holds up the others.

**Join / merge** (`join_merge`). This joins the FU's operands in one of three
modes:
- *Join* waits for both data operands.
- *Join with control* also waits for the control input, a 1-bit condition token.
- *Merge* takes whichever operand is present and reports which one it was.

The readies are lazy: an input is only acknowledged when the other inputs of
the join are valid too. A token is never consumed without its partners.

## Inside a PE

```
   N E S W inputs                                       N E S W outputs
      |                                                      ^
   [elastic buffer] -> [fork: FU1 FU2 FUc + 3 other sides] --+--> output muxes
      |                       |     |    |                   |   (data 1-of-4,
      v                       v     v    v                   |    valid 1-of-7)
                       FU1 mux+EB  FU2 mux+EB  FUc mux       |
                              \     |     /                  |
                         join/merge -> ALU | CMP | MUX       |
                              -> output register + v_FU/v_B1/v_B2
                              -> fork: FU1 FU2 N E S W ------+
                              -> delay counter -> vout_FU_d
```

- **Four input ports** (`pe_input`). Each is a buffer followed by a fork.
  From there a token can go to the two FU operands, to the FU control input,
  and straight through to any of the three other sides. A single input can
  feed an operand and a pass-through route at the same time.
- **FU data inputs** (`fu_data_input`). A multiplexer selects the data from
  one of:
  - a PE input;
  - the FU's own output, for loops through the FU;
  - a configured constant.

  A second multiplexer selects the valid from one of:
  - a PE input;
  - `vout_FU`;
  - constant 1, which makes a constant operand;
  - `vout_B1` or `vout_B2`, the two Branch sides.

  An elastic buffer follows. The **control input** (`fu_control_input`) has
  only the multiplexers. Its 1-bit condition comes from bit 0 of the selected
  source.
- **The FU** (`fu`) computes three results in one cycle:
  - ALU: add, sub, mul, sll, srl, and, or, xor. Operand 1 can be replaced by
    the FU's own output register, for accumulations.
  - Comparator on op1 − op2: equal to zero, or signed greater than zero.
  - 2-to-1 multiplexer: selected by the control bit (if/else), or by the merge.

  One of the three results is written to the output register. It is written
  together with three valid bits:
  - `v_FU`: a token is present.
  - `v_B1` / `v_B2`: the token belongs to the true or false side of a
    *Branch*. These are only set in join-with-control mode.

  A fork then offers the result to the FU's own operand inputs and to the
  four sides. A **delay counter** raises `vout_FU_d` on every (delay+1)-th
  token that leaves. A reduction commits its result this way: the
  accumulator keeps adding, and only every n-th running sum is passed on.
  Loops end the same way.
- **Four output ports** (`pe_output`). These are pure multiplexers:
  - Data comes from the FU or from one of the three other inputs.
  - Valid comes from one of the FU's four valids (`vout_FU`, `vout_FU_d`,
    `vout_B1`, `vout_B2`), from one of the three other inputs, or is "never".

  An output has no register, so a straight route through a PE costs exactly
  one cycle: the input buffer.

Some control patterns, all expressed with these parts:
- **Branch** uses join-with-control, with `vout_B1` and `vout_B2` routed to
  two different consumers.
- **Merge** is the merge mode driving the multiplexer.
- **If/else selection**, as in ReLU, is join-with-control driving the
  multiplexer.
- **Accumulation with a commit** is feedback on operand 1 plus the delay
  counter.

### Configuration of a PE

A PE holds one `pe_cfg_t` word of 148 bits (`strela_pkg`). Its fields are:
- operation and modes;
- a 32-bit initial data value and three initial valid bits;
- the FU fork mask and the delay;
- the operand and control selects;
- a 32-bit constant;
- a 6-bit fork mask per input port;
- data and valid selects per output port.

The initial values are loaded into the FU output stage by the one-cycle
*init* that opens every kernel. This is how an accumulator starts from zero,
or a loop starts with a token already present.

Configuration travels as a stream. For each PE to be configured the CPU puts
five 32-bit words in memory. Together they form a 160-bit packet, with word
k holding bits [32k+31:32k]:

| bits | field |
|---|---|
| 159:154 | PE ID (row*4 + column) |
| 153:148 | clock-enable bits: 4 input buffers, 2 FU operand buffers |
| 147:0 | `pe_cfg_t` |

The control unit starts input node 0 in configuration mode. The node reads
CFG_SIZE words and passes them, one per cycle, to `config_deserializer`. The
deserializer broadcasts each complete packet to all PEs, and the PE with the
matching ID keeps it. Only the PEs a kernel uses need a packet: 16 PEs take
80 words, which is about 87 cycles on an uncontended bus. A PE that has no
configuration drives valid 0 and ready 0 on all its ports, so no token can be
lost into it.

## Clock gating in three levels

1. **Array.** The control unit enables the array clock only during a
   kernel's init cycle and while it executes. It is off while the CPU is
   reprogramming the nodes between runs of a multi-run kernel.
2. **PE.** A PE's datapath clock runs only if the PE holds a configuration.
3. **Buffer.** Each of the six elastic buffers of a PE has its own enable
   bit in the packet. A buffer the kernel does not route through never
   toggles.

The init cycle forces levels 2 and 3 open, so every register is emptied or
initialised before a kernel. The configuration registers themselves are on
the ungated clock. The gate cell (`clock_gate`) is the usual
latch-plus-AND. A technology library would replace it with its own ICG cell.

## Memory nodes

An **input memory node** streams `size` words from `addr`, `addr+stride`, and
so on. The stride is in bytes, so the node also walks columns and
sub-matrices. It issues word reads on its own bus master port into a 4-entry
FIFO. A read is only issued when the FIFO is guaranteed room for it once
every outstanding read has returned. This lets the node keep four reads in
flight and absorb bus contention without ever dropping data. An **output
memory node** puts the tokens from a south output into the same kind of FIFO
and writes them at `addr + k*stride`. It reports done once all `size` writes
are acknowledged. A stride of 0 makes successive tokens overwrite one
location. That is useful when only the last of several committed values
matters.

The bus ports use a simple request/grant, response-valid protocol:
`obi_req_t {req, we, be, addr, wdata}` and `obi_rsp_t {gnt, rvalid, rdata}`.
The request is held until `gnt`, and the response comes one or more cycles
later, in order. With four interleaved 32-bit banks, eight active nodes can
be served on at most four accesses per cycle. This bus limit, not the array,
bounds a feedback-free kernel at about 2 outputs per cycle.

## The control unit and a kernel run

Registers, as byte offsets on the MMIO port:

| offset | register |
|---|---|
| 0x00 | CTRL (write): bit 0 run a kernel, bit 1 load a configuration first |
| 0x04 | STATUS: bit 0 busy, bit 1 done (write 1 to clear; this also drops the interrupt) |
| 0x08 / 0x0C | CFG_ADDR / CFG_SIZE (words) |
| 0x10 + 16i | input node i: ADDR, SIZE, STRIDE at +0, +4, +8 |
| 0x50 + 16i | output node i: ADDR, SIZE, STRIDE at +0, +4, +8 |

Writes are granted at once and reads answer the next cycle. A command
written while the unit is busy is ignored.

The sequence runs `IDLE → CONF → CONF_END → INIT → EXEC → DONE → IDLE`:
1. **CONF.** This state is entered only when CTRL bit 1 is set. It clears
   every PE configuration and streams the new one in. CONF_END then waits
   one cycle for the last packet to land.
2. **INIT.** This is the one-cycle initialisation of the array. Every node
   with a non-zero size is started in this state.
3. **EXEC.** The unit stays here until every output node with a non-zero
   size is done.
4. **DONE.** The array clock stops, STATUS.done is set and `irq_o` rises.

A multi-run kernel, such as a matrix product computed a few dot products at
a time, reloads only the node registers and writes CTRL = 1. The
configuration stays in the PEs.

## The mesh and its borders

PE (r,c) connects to its four neighbours. Row 0's north inputs come from the
input nodes, and row 3's south outputs go to the output nodes. The east and
west borders are connected too. The border output of row r feeds the border
input of row r−1, on the same side. Data routed out of the array's side thus
climbs one row and comes back in, which gives the extra south-to-north
routes that feedback-heavy mappings need. Row 0's border output and row 3's
border input have no partner. Unconnected inputs see valid 0.

## How far to trust it

What follows the source architecture closely:
- the set of blocks and how they connect;
- the PE's internal organisation: input buffer plus fork, muxed FU inputs
  with buffers on the data operands only, and a mux-only output;
- the join/merge modes, the FU's three results and three valid registers,
  immediate feedback and the delayed valid;
- the memory nodes with address/size/stride and FIFOs, and configuration
  through input node 0;
- the 160-bit per-PE packet with ID and clock-enable bits;
- the three-level clock gating;
- the 4x4 size with four input and four output nodes.

What is this design's own, because the source does not say:
- the bus protocol;
- the register map and command bits;
- the FSM states;
- the FIFO depth of 4;
- all encodings: opcodes, select codes, the field order in `pe_cfg_t`;
- the 6-bit delay field, so one commit per 1 to 64 tokens;
- the counter form of the delay;
- the comparator's use of op1 − op2;
- which control value selects which Branch side;
- the lazy join;
- the all-ready fork;
- the behaviour of an unconfigured PE;
- the credit rule in the input node;
- the output-node end condition.

Known departures and open points:
- **Configuration size.** The source gives per-PE totals that do not add up
  with its own field counts. A 144-bit word plus ID and gate bits is quoted
  as 152 and 158 bits in different places. The word here is 148 bits,
  because it carries every field the PE needs. The packet is padded to
  exactly five bus words.
- **Border direction.** The text describes the wraparound as running south
  to north. One mapping figure can be read the other way. The text is
  followed.
- **Not built.** The following belong to the host SoC: the RISC-V CPU, the
  bus crossbar and memory banks, and the power manager with power-gating
  switches. Power gating of the accelerator is therefore outside this RTL.
  Only clock gating is inside.
- **Workloads.** Dense matrix multiplication runs on the whole accelerator
  in `tb_strela_mm`. It uses the three-dot-products-at-a-time mapping:
  multipliers in row 0 and feedback accumulators in row 1, restarted with new
  node addresses ceil(n/3) times per row of C. The testbench computes a full
  16x16 product, the first rows of a 64x64 product, and 80-long dot products
  committed in two delay periods, where an output-node stride of 0 keeps the
  final sum. Every element is checked. The 16x16 product takes about 5,600
  cycles, including configuration and register writes. The source reports
  12,105 cycles with real firmware between runs. `tb_strela_conv2d` runs
  the 3x3 convolution of a 64x64 image as three kernels, one per filter row.
  In each run, shifted image streams feed constant multipliers and an adder
  chain, and the partial sums are read and rewritten in place. It checks every
  output pixel and takes 16,773 cycles in total. The source reports 13,931.
  Here five active nodes share four memory banks. The other benchmarks (fft,
  relu, dither, find2min, and the Polybench gemm, gemver, gesummv, 2mm
  and 3mm at their small sizes) were checked only by counting PEs, nodes and
  reduction lengths against the array. They were not simulated, because their
  exact mappings are not published. The end-to-end test runs kernels of the
  same kinds: a 16-PE stream, ReLU, a MAC reduction, and branch/merge.
- **Performance.** The end-to-end stream kernel reaches 1.92 outputs per
  cycle against a 4-bank memory model. The source reports about 1.95 for its
  fft. Area, power and frequency have not been evaluated.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M`, has a watchdog, and uses only `$urandom`
for stimulus. Verilator 5 runs them directly, for example:

```
verilator --binary --timing --assert --top-module tb_strela_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/strela_pkg.sv tb/strela_tb_pkg.sv tb/tb_strela_top.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`tb/strela_tb_pkg.sv` has helpers that build PE configurations:
- `pass` routes input p to output q.
- `in_to_fu1` connects an input to FU operand 1.
- `const_fu2` makes FU operand 2 a constant.
- `fu_to_out` sends the FU result to an output.
- `pack` forms a 160-bit packet.

`tb/mem_model.sv` is the memory used by the end-to-end test: eight ports,
four word-interleaved banks, rotating priority and one-cycle responses.

| Testbench | What it establishes |
|---|---|
| `tb_strela_top` | full accelerator at default size, driven through MMIO like firmware would. It configures 16 PEs from memory and runs four kernels: 4-column stream, ReLU, MAC with feedback and delayed commit, branch/merge. Results are checked in memory. It counts that every mechanism occurred: configuration words, bus stalls, back-pressure, skid-slot use, join with control, both branch sides, merge, feedback, delayed valid, array clock off, PE and buffer clocks gated, interrupt. |
| `tb_strela_mm` | matrix products as sequences of partial kernels (16x16 in full, rows of 64x64, 80-long reductions), cycle counts |
| `tb_strela_conv2d` | 3x3 convolution of a 64x64 image in three runs with in-place partial sums, cycle count |
| `tb_cgra_array` | mesh wiring including a south-to-north border route, array clock enable |
| `tb_pe` | ID matching, a join-add forked to two sides plus a pass-through route, unconfigured PE silent |
| `tb_control_unit` | register file, command sequencing, starts only for non-zero sizes, array clock window, interrupt and clear |
| `tb_input_memory_node` / `tb_output_memory_node` | address sequences, sizes, FIFO bound on outstanding reads, back-pressure, configuration mode |
| `tb_config_deserializer` | packet slicing, partial packets dropped on clear |
| `tb_fu`, `tb_fu_data_input`, `tb_fu_control_input`, `tb_pe_input`, `tb_pe_output` | PE sub-blocks against reference models |
| `tb_elastic_buffer`, `tb_fork_sender`, `tb_join_merge`, `tb_node_fifo`, `tb_clock_gate` | primitives under random traffic, one token per cycle where promised |

The full-size test, `tb_strela_mm` and `tb_strela_conv2d` each run in under half a minute. The others take seconds.
