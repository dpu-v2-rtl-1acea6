# A tree-datapath processor for irregular dataflow graphs

Many workloads are a fixed graph of small arithmetic operations. Examples are
probabilistic circuits (sum-product networks) and sparse triangular solves.
Each node adds or multiplies two values, and the edges connect nodes with
almost no regularity. CPUs and GPUs run such graphs poorly:

- each node does very little work;
- the operands are scattered, so caches and vector units are mostly idle;
- synchronising parallel threads costs more than the arithmetic.

This RTL describes a processor built for these graphs. It is a parameterised
SystemVerilog model of the DPU-v2 architecture. It rests on four ideas:

1. **Trees of processing elements.** The datapath is a set of small binary
   trees of processing elements (PEs), each D layers deep. Within a tree, the
   result of one node goes straight into the next layer without touching a
   register. A graph is cut into tree-shaped pieces, and one instruction runs
   every tree at once.
2. **A banked register file behind a crossbar.** There are B single-ported
   register banks, one per tree input. A full B×B crossbar lets any bank feed
   any tree input, so data does not have to sit in a particular bank to reach
   a particular PE.
3. **Banks that choose their own write address.** Instructions never name
   where a result goes. Each bank writes into its lowest empty register, and
   instructions mark a register empty on its last read. Because the compiler
   knows the whole schedule, it can predict every address. This saves about
   log2(R) bits per bank in every instruction.
4. **Long, variable-length instructions packed without gaps.** An `exec`
   instruction is about a thousand bits and a `nop` is four. All instructions
   are stored back to back, and a shifter realigns them as they are fetched.

The default configuration is the one the architecture's authors found to have
the lowest energy-delay product: D = 3, B = 64 and R = 32. That gives
8 trees of 7 PEs, 56 PEs in total, and 2048 registers.

## Organisation

```
            +-------------+    +---------+    +---------+
 imem_* --> | instr_mem   |--->| instr_  |--->| decoder |---> control, delayed
            | 4096 x IL   |    | fetch   |<---| (len)   |     per stage by
            +-------------+    +---------+    +---------+     pipe_delay
                                                   |
   +-------------------- B register banks ---------+-----------------------+
   | reg_bank x B  (R regs, valid bits, wr_addr_gen, write-through)        |
   +-----------+---------------------------------------------^------------+
               | B read ports                                | B write ports
          input_xbar (B x B)                          write-back mux:
               |                                      exec / load / copy
        input register p0 ----> xfer delay (D) ---> copy and store data
               |                                             ^
      pe_tree x T  (D registered layers)           output_interconnect
               |----- aligned PE results ----------> (one PE per layer
                                                      per bank, D:1 mux)
 dmem_* --> data_mem (2048 rows x B words, word mask) <--> loads / stores
```

| Module | Role |
|---|---|
| `dpu_pkg` | Default sizes, opcode and PE-operation enums, and the instruction-length functions. |
| `pe` | Computes add, multiply, pass a or pass b. Combinational. |
| `pe_tree` | One tree: 2^D inputs and 2^D − 1 PEs, with a register after every PE and alignment delays on the lower layers. |
| `input_xbar` | The B×B crossbar from bank read ports to tree inputs. |
| `output_interconnect` | For each bank, a D:1 multiplexer over the PEs it is wired to. |
| `wr_addr_gen` | Priority encoder that finds the lowest empty register. |
| `reg_bank` | R registers with valid bits, automatic write address, release on read and write-through. |
| `data_mem` | B words per row, with a word-level write mask. |
| `instr_mem` | Rows of IL bits, where IL is the length of the longest instruction. |
| `instr_fetch` | Current/Next row registers and a shifter. Issues one instruction per cycle. |
| `decoder` | Splits an instruction into the control fields of every stage. |
| `pipe_delay` | Register chain that carries control and data to later stages. |
| `dpu_top` | Connects everything, runs a program and provides the host ports. |

## The datapath in one instruction

An `exec` instruction carries the following fields:

- **Per bank:** one read address and one `valid_rst` bit.
- **Per tree input:** one crossbar select, which names the source bank.
- **Per PE:** a 2-bit operation: add, multiply, pass a or pass b.
- **Per bank:** a write enable and a layer select, which say which PE result
  the bank stores.

The instruction moves through the datapath as follows:

1. All B banks are read in the same cycle.
2. The crossbar arranges the B read values onto the B tree inputs. One
   register may go to several inputs (broadcast).
3. Each tree computes its D layers.
4. Every enabled bank takes one PE result through the output interconnect.

The pass operations let a value skip a layer. A node can then sit higher in
the tree than its depth in the graph would suggest.

### The output interconnect

A full crossbar on the output side would be expensive, and it is not needed.
Bank k of a tree (k = 0 … 2^D − 1) is wired to exactly one PE in each layer:

    layer l  ->  PE  (k >> (l+1))  of that layer

The tree's root therefore reaches all 2^D banks of its tree, and each leaf PE
reaches the two banks above its own inputs. The layer select of the bank picks
among these D wires. A select above D − 1 means the root.

Why this choice: it is the cheapest topology that still lets every PE write
somewhere. The compiler avoids the resulting bank conflicts when it assigns
values to banks. A result that is needed in a bank it cannot reach is moved
with `copy_4`.

## Register banks and the automatic write address

This is the least conventional part of the design, and the one a programmer
or compiler writer must get exactly right.

Each register has a valid bit, and the bank applies three rules:

- **Write:** an incoming word goes to the lowest register whose valid bit is
  0, and that bit is set. `wr_addr_gen` is the priority encoder that finds
  the register.
- **Release:** a read with `valid_rst = 1` is the last use of the value. It
  clears the valid bit at the end of the read cycle.
- **Same register in one cycle:** if a register is written and released in
  the same cycle, the release wins. This happens only when an instruction
  reads a value, through write-through, in the very cycle it is written, and
  that read is the value's last use. The register is then free again at once.

Two further behaviours are specific to this implementation:

- **Write-through.** If a bank writes the register that is being read in the
  same cycle, the read returns the new word. This is why a consumer needs to
  be only D + 1 instructions after its producer (see the pipeline section).
- **Overflow.** A write into a full bank is dropped and raises `overflow` for
  that cycle. The top keeps a sticky copy of the flag, and an assertion in
  `dpu_top` reports it in simulation. A correct program never overflows: the
  compiler spills to the data memory first.

`start` empties every bank before a program runs. The write address is
therefore a pure function of the program order. A compiler predicts it by
replaying, cycle by cycle, the writes (which land at stage s + D + 1) and the
releases (which happen at stage s) against a model of the valid bits.
`tb_dpu_top` contains exactly such a model.

## Pipeline and timing

One instruction enters per cycle. There are no stalls, no hazard detection and
no interlocks: the schedule is static. For an instruction issued in cycle s:

| Cycle | Work |
|---|---|
| s | Aligned instruction decoded. Banks read, with write-through. Crossbar. Releases applied at the clock edge. |
| s+1 … s+D | PE layer 0 … D−1, each followed by a register. `copy_4` and store data travel beside the trees in a D-deep delay line. |
| s+D | A `load` reads its data-memory row. The read is synchronous, so the data arrives one cycle later. |
| s+D+1 | Write-back of exec results (output interconnect), load data or copy data into the banks. Store data is written into the data memory. |

Every instruction writes back in the same stage, so writes from different
instructions never collide. The lower-layer PE results are held in extra
registers (D − 1 − l of them for layer l) so that all PE results of one
instruction reach the output interconnect together.

Rules the program must follow:

- **Dependent instructions must be at least D + 1 instructions apart.** At
  the defaults that is 4. Closer pairs read stale data: there is no
  interlock.
- **A store reads the banks at stage s and writes memory at s + D + 1.** A
  `load` reads memory at s + D. A load issued right after a store to the same
  row therefore sees the old row unless the two are two or more instructions
  apart.
- **Only one data source may write back in a cycle.** A single instruction
  never mixes exec, load and copy writes, and the shared stage means two
  instructions never write back in the same cycle.

Program timing at the top level:

1. `start` (one cycle, while idle) clears the banks and starts fetching at
   bit 0 of instruction row 0.
2. The first instruction is decoded three cycles later.
3. After the last instruction the pipeline drains for D + 1 cycles.
4. `done` pulses once and `busy` falls.

A program of N instructions therefore takes N + D + 5 cycles from `start` to
`done`.

## Instruction set and encoding

All fields are packed from bit 0 upwards, and the 4-bit opcode comes first.
In the table, LR = log2 R, LB = log2 B, MA = log2 of the data-memory rows,
and LSEL = max(1, ⌈log2 D⌉).

| Instruction | Opcode | Fields after the opcode | Bits at defaults |
|---|---|---|---|
| `nop` | 0 | none | 4 |
| `exec` | 1 | B × {read addr (LR), valid_rst}; B × crossbar select (LB); #PE × op (2); B × {write enable, layer select (LSEL)} | 1076 |
| `load` | 2 | word mask (B), row (MA) | 79 |
| `store` | 3 | word mask (B), row (MA), B × {read addr (LR), valid_rst} | 463 |
| `store_4` | 4 | row (MA), 4 × {bank (LB), read addr (LR), valid_rst} | 63 |
| `copy_4` | 5 | 4 × {source bank (LB), read addr (LR), valid_rst, destination bank (LB)} | 76 |

Semantics:

- **`load`** writes word j of a data-memory row into bank j, for every set
  mask bit. Each bank uses its own automatic address.
- **`store`** writes the register read from bank j into word j of a row,
  under the mask.
- **`store_4`** is the same as `store` for up to four banks. It is much
  shorter when only a few values leave.
- **`copy_4`** moves up to four values between banks. It uses the crossbar:
  the crossbar output of the destination bank selects the source bank. The
  four source banks must differ from each other, and so must the four
  destination banks.
- **Opcodes 6 to 15** are not defined and execute as `nop`.

The memory word of bank j is always word j of a row. Data that must move
between banks goes through `copy_4`, not through memory.

### Fetching packed instructions

The instruction memory is IL = 1076 bits wide, which is the length of `exec`.
Instructions are written into it back to back, and one may start anywhere in a
row and run into the next. `instr_fetch` works as follows:

1. It holds two consecutive rows, Current and Next.
2. It shifts the 2·IL-bit window {Next, Current} right by the bit offset of
   the current instruction. The low IL bits then always hold a whole
   instruction.
3. The decoder reports the length, and the offset advances by that amount.
4. When the offset passes the end of Current, Next becomes Current, and the
   row already requested from memory becomes Next.

Because IL equals the longest instruction, one row read per cycle always keeps
up. The program length is given in bits (`prog_bits`), and fetching stops
there.

## Memories and the host interface

| Memory | Size at defaults | Ports |
|---|---|---|
| Data | 2048 rows × 64 words × 32 bits (512 KB) | One synchronous read port, one masked write port |
| Instruction | 4096 rows × 1076 bits (about 550 KB) | One read port, one write port |

Both memories are plain arrays, which synthesis maps to memory cells. In
silicon they are SRAM macros.

The host uses the memories only while `busy` is low:

- `imem_we/imem_waddr/imem_wdata` write instruction rows.
- `dmem_en/dmem_we/dmem_addr/dmem_wmask/dmem_wdata` write a data row.
  `dmem_rdata` returns a read one cycle after `dmem_en` with `dmem_we = 0`.
- `prog_bits` and a one-cycle `start` run the program.
- After `done`, results are read back from the data memory.

## Numbers

Words are 32-bit unsigned integers. Add and multiply wrap modulo 2^32, and a
product keeps its low 32 bits. This is a placeholder arithmetic. A real
deployment for probabilistic circuits would use a floating-point or posit PE,
which is a change to `pe.sv` and `W` only.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `D` | 3 | PE layers per tree. There are 2^D inputs and 2^D − 1 PEs per tree. |
| `B` | 64 | Register banks, which is also the number of tree inputs. B must be a multiple of 2^D, and there are T = B / 2^D trees. |
| `R` | 32 | Registers per bank. |
| `W` | 32 | Word width. |
| `DMEM_DEPTH` | 2048 | Data-memory rows. |
| `IMEM_DEPTH` | 4096 | Instruction-memory rows. |

Every instruction length, and IL itself, follows from these parameters
through the functions in `dpu_pkg`.

## What follows the source architecture and what is this design's own

Taken from the architecture description:

- the tree datapath with a register after every PE;
- the PE functions (+, ×, bypass);
- the B×B input crossbar;
- the "one PE per layer" output interconnect;
- banks with valid bits and writes to the lowest empty register;
- the `valid_rst` release bit;
- data-memory rows of B words with a word mask;
- the six instruction kinds and their field lists;
- dense packing of instructions, and a fetch unit built from Current/Next
  registers and a shifter;
- D + 1 pipeline stages, with dependent instructions kept D + 1 apart;
- the default D, B and R.

Chosen here, because the description does not fix them:

- the bit-level encoding and opcode values;
- the word format;
- the memory depths, chosen to match the published area of the two memories
  (about 1.2 mm² each in 28 nm);
- where loads and stores sit in the pipeline;
- write-through forwarding and the write/release tie rule;
- clearing the banks at `start`;
- the fetch start-up sequence and the `prog_bits` end condition;
- the host ports.

Known differences:

- **Instruction lengths.** The published example lengths (for a 16-bank
  configuration) do not match this encoding. The field lists are the same,
  but the exact packing and the widths of the per-bank fields differ. Treat
  the lengths in the table above as this implementation's.
- **Larger configuration not built.** A larger variant uses 2 MB of data
  memory, 256 registers per bank and instructions streamed from off-chip.
  Only its sizes are reachable through the parameters. Instruction streaming
  is not implemented: programs must fit in the instruction memory.
- **Store and copy path timing.** The architecture drawing takes store and
  copy data from the crossbar right after its register, and it does not show
  whether further registers sit on that path. Here the data is delayed to the
  common write-back stage, so that every kind of write lands in the same
  cycle. A store therefore reaches memory D cycles later than the drawing
  might suggest.
- **No compiler.** The compiler that decomposes graphs into tree-shaped
  blocks, allocates banks, predicts write addresses, spills and reorders
  instructions is software and is not part of this RTL. The top-level
  testbench contains a random program generator that respects the same
  rules.

## What fits

Capacity at the defaults is about 4.4 Mbit of program and 131,072 data words.

The published throughput (4.2 GOPS at 300 MHz) means about 14 graph nodes per
instruction. Programs at this design's lengths therefore cost roughly 43 to
77 bits per node:

- **Up to about 57k nodes:** the graph fits comfortably. This covers the
  probabilistic circuits and triangular systems of 8k to 55k nodes.
- **Around 79k nodes:** the graph sits at the edge. It fits or not depending
  on the instruction mix.
- **0.6M to 3.3M nodes:** the large probabilistic circuits need the streamed
  larger variant, which is not built.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_pe` | All four operations on random operands. |
| `tb_pe_tree` | Random trees against a reference model. Also checks the D-cycle latency and the alignment of all layers. |
| `tb_input_xbar`, `tb_output_interconnect` | Random selects against the index formulas. |
| `tb_wr_addr_gen` | Random valid vectors, including full and empty banks. |
| `tb_reg_bank` | Reduced R = 8. Random reads, writes and releases against a model. Covers write-through, the tie rule and overflow. |
| `tb_data_mem`, `tb_instr_mem` | Reduced sizes. Masked writes and read latency. |
| `tb_instr_fetch` | Reduced IL = 64. Random variable-length streams, including instructions that straddle rows. Checks one instruction per cycle, the three-cycle start-up, `done` timing and a second run. |
| `tb_decoder` | Default sizes. Every instruction kind is encoded from the field table and every decoded field is compared. |
| `tb_pipe_delay` | Delay depth and reset. |
| `tb_dpu_top` | Full default configuration; see below. |

`tb_dpu_top` runs the full default configuration:

1. It generates a random program of 600 instructions (about 290 kbit, 271
   rows) together with a cycle-level model of the banks and memories. The
   program uses every instruction kind and respects the D + 1 distance and
   bank capacity.
2. It loads the program and the data through the host ports and runs it.
3. It checks:
   - the cycle count (N + D + 5);
   - the overflow flag;
   - every bank's valid bits;
   - every live register;
   - every stored data row.
4. It counts each mechanism and reports a failure for any that never
   happened. The mechanisms are the six instruction kinds, the four PE
   operations, writes from each layer, crossbar broadcast, write-through
   reads, register reuse after release, and instructions straddling two
   rows.

`tb_sum_product` runs a small workload of the target kind, also at full size.
The workload is a two-level sum-product network: 63 nodes over 64 leaves,
evaluated for 32 input samples. The program is scheduled by hand, the way a
compiler would emit it, in 13 instructions per sample:

1. One `load`.
2. An `exec` in which all eight trees multiply leaf pairs and sum them.
3. An `exec` in which the crossbar gathers the eight partial sums into one
   tree.
4. A `store_4`.
5. `nop`s between these steps to keep the D + 1 distance.

Every operand is read in the cycle it is written back, and every value is
released on its last read. The banks are therefore empty after each sample.
The test checks:

- each result against a direct evaluation;
- that the other words of the output rows are untouched;
- the cycle count;
- that the banks are empty at the end.

Real graphs of thousands of nodes need the compiler, which is not part of
this RTL.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/dpu_pkg.sv tb/tb_dpu_top.sv --top-module tb_dpu_top -o sim
./obj_dir/sim
```

Replace `tb_dpu_top` with any other testbench name. The full-size run builds
in about a minute and a half and simulates in well under a second.

Lint warnings that remain are unused parameters from the shared package and
unused high bits of the fetch window. There is also one SYNCASYNCNET note,
because the reset of the overflow assertion in `dpu_top` uses the
asynchronous reset. None of these affects the circuit.
