# SPN processor: trees of processing elements over banked registers

A sum-product network (SPN, also called an arithmetic circuit) is a directed
acyclic graph of sums and products over input probabilities. Evaluating one is
a long list of scalar operations, each reading two earlier results from
arbitrary places (`A[i] = A[B[i]] op A[C[i]]`). Spread over many threads, this
pattern stalls on synchronisation and on shared-memory bank conflicts.

This processor handles that pattern with three hardware features:

* **Trees of processing elements (PEs).** A result that feeds a parent node
  goes straight up a binary tree of PEs. It does not go back through a
  register file. One tree with 4 levels evaluates a 16-input, 15-operation
  sub-graph.
* **Private banked register files behind a crossbar.** Each tree writes its
  results into its own register file of independently addressed banks. A
  combinational crossbar lets every tree input read any bank of any tree.
  This is how sub-graphs on different trees exchange results.
* **Vector data memory.** Loads and stores always move one word per bank, all
  at the same memory address. So the only irregular accesses are to the
  register banks, which can take them.

Every part of the datapath is set by a very long instruction word (VLIW), one
per clock. There is no hardware scheduling and no interlock. A compiler must
place operations on PEs, pick banks and respect the pipeline latencies. That
compiler is not part of this RTL.

The RTL is built in the "Ptree" configuration:

* 2 trees of 4 PE levels, 30 PEs in all
* 32 register banks of 64 words of 32 bits (2K registers)
* 64 KB of data memory

## Block diagram

```
                 +--------------------- crossbar (32 x 32, combinational) <---------------+
                 |  tree inputs 0..15          tree inputs 16..31                          |
                 v                             v                                           |
           +-----------+                 +-----------+                                     |
           | PE tree 0 |                 | PE tree 1 |      15 PEs each: 8 + 4 + 2 + 1     |
           +-----------+                 +-----------+                                     |
              | 15 PE outputs               | 15 PE outputs                                |
              v                             v                                              |
   +---------------------+      +---------------------+                                    |
   | register file 0     |      | register file 1     |   16 banks x 64 words each        |
   | banks 0..15         |      | banks 16..31        |------------------------------------+
   +---------------------+      +---------------------+   (read port of every bank)
              ^   |                     ^   |
              |   +---- store vector ---|---+----> +-------------------------+
              +-------- load register --+--------- | data memory 512 x 32 x 32b| <-> host word port
                                                    +-------------------------+
   instruction memory (1024 x 744 b) --> control unit --> control word of every block
```

| Module | Role |
|---|---|
| `spn_pkg` | Sizes, operation encodings, the instruction word `instr_t` |
| `pe` | One PE: add, multiply, forward a or forward b, with a registered output |
| `pe_tree` | A binary tree of `pe` with `LEVELS` levels |
| `register_file` | The 16 banks of one tree, with the fixed mapping of PE outputs to bank writes |
| `crossbar` | Connects every tree input to the read port of any bank |
| `data_memory` | A banked vector memory with a load register and a host word port |
| `instruction_memory` | The program store |
| `control_unit` | Start/halt sequencing and fetch; supplies the control word of each cycle |
| `spn_processor` | The top level |

## What happens in one cycle

This is the part to understand before writing a program. Instruction *k*
executes in one clock cycle. Every field applies to that cycle only.

1. **Read.** Each bank `b` is read at `raddr[b]`. Reads are combinational.
2. **Route.** Tree input `i` receives the word of bank `xbar_sel[i]`. Inputs
   0–15 feed tree 0 and inputs 16–31 feed tree 1. Several inputs may pick the
   same bank: each bank has one read port, so they all get the same word.
3. **Compute.**
   * Leaf PE `j` of tree `t` works on inputs `2j` and `2j+1`.
   * PE `j` of level `l > 0` works on the *registered* outputs of PEs `2j` and
     `2j+1` of level `l-1`. Those are the values computed in the previous
     cycle.
   * Every PE runs its own `pe_op` and registers the result at the clock edge.
4. **Write.** Each bank with `wr[b].en` set writes one word to `wr[b].addr` at
   the clock edge. The word comes from one of two places:
   * the data-memory load register (`from_mem`), or
   * the registered output of the PE at tree level `wr[b].level` that sits
     above that bank. This is the value that PE produced in an earlier cycle.

   A read and a write of the same address in one cycle return the old word.
5. **Memory.**
   * `MEM_LOAD` copies vector `mem_addr` into the load register at the clock
     edge. The register holds it until the next load.
   * `MEM_STORE` writes to vector `mem_addr` the 32 words that the banks read
     in step 1.

Latencies follow from these steps:

| Event | Cycle |
|---|---|
| Operands read, leaves compute | t |
| Level-l result in its register | end of t+l |
| Earliest write of that result to a bank | t+l+1 |
| Earliest read of it by any tree | t+l+2 |
| A load issued | u |
| Banks can copy the loaded vector | u+1 or later |
| Stored data (the banks' read data) | taken in the same cycle |

Each instruction sets the operation of every level. So several batches of
operands can move up a tree at once: in cycle *c*, level *l* works on operands
that entered the leaves in cycle *c−l*. A program that fills every level in
every cycle reaches 30 operations per cycle. Any data dependence inside the
four-cycle tree pipeline is the program's concern. The hardware checks
nothing.

### Example: one 32-leaf SPN

The end-to-end testbench runs this schedule. Two 16-leaf sub-networks are
joined by a sum node.

| Instr. | Action |
|---|---|
| 0 | load vector 0 (32 leaf values) |
| 1 | every bank writes the load register into its register 0 |
| 2 | all banks read register 0; crossbar input i ← bank i; the leaf PEs compute |
| 3 | level 1 computes (the level-1 ops of this instruction) |
| 4 | level 2 computes; level-1 results of tree 0 are written to banks 2, 6, 10, 14 |
| 5 | level 3 (root) computes; level-2 results are written to banks 1, 9 |
| 6 | root of tree 0 → bank 0 reg 1; root of tree 1 → bank 16 reg 1 |
| 7 | tree 0 inputs 0, 1 ← banks 0, 16 (a read across trees); leaf PE 0 adds |
| 8 | leaf PE 0 result → bank 0 reg 2 |
| 9 | store, to vector 1, the words each bank reads; halt |

The run takes 11 clocks from `start` to `done`.

## Which PE can write which bank

A tree with *L* levels has 2^L inputs and is paired with 2^L banks. The tree
sits over its banks like a binary tree over its leaves:

| Level | PE | Banks it can write | Example |
|---|---|---|---|
| 0 (leaves) | j | 2j, 2j+1 | leaf PE 3 → banks 6, 7 |
| 1 | j | 4j … 4j+3 | |
| 2 | j | 8j … 8j+7 | |
| 3 (root) | 0 | all 16 banks of its tree | |

For bank `b` and level `l`, only one PE qualifies: PE `b >> (l+1)` of that
level. That is why a write needs only a *level* to name its source.

Each bank has one write port. So in one cycle a bank takes at most one word,
either from one of its four candidate PEs or from the load register. A PE
output can be written to any number of its banks in the same cycle.

A tree can *read* every bank, including the other tree's. It can *write*
only its own banks. To move a value to a bank a PE cannot reach:

1. read it through the crossbar;
2. forward it up the tree with `PE_PASS_A`/`PE_PASS_B`;
3. write it from a PE that covers the target bank.

The root covers every bank of its tree. This forward path is also how data is
copied between banks. There is no separate copy datapath.

## Instruction word

`spn_pkg::instr_t` is a packed struct of 744 bits, most significant field
first:

| Bits | Field | Meaning |
|---|---|---|
| 743 | `halt` | last instruction of the run |
| 742:741 | `mem_op` | `MEM_NONE`=0, `MEM_LOAD`=1, `MEM_STORE`=2 |
| 740:732 | `mem_addr` | vector address (0–511) |
| 731:672 | `pe_op[tree][pe]` | 2 bits per PE: `PE_ADD`=0, `PE_MUL`=1, `PE_PASS_A`=2, `PE_PASS_B`=3 |
| 671:512 | `xbar_sel[input]` | 5 bits per tree input: the bank it reads |
| 511:320 | `raddr[bank]` | 6 bits per bank: read address |
| 319:0 | `wr[bank]` | 10 bits per bank: `en`, `from_mem`, `level[1:0]`, `addr[5:0]` |

Array element 0 holds the least significant bits of each field. PEs are
numbered level by level within a tree:

* indices 0–7: leaves
* indices 8–11: level 1
* indices 12–13: level 2
* index 14: the root

## Number format

Every word is an unsigned fixed-point number with 1 integer bit and 31
fraction bits, so 1.0 is `32'h8000_0000`. It covers probabilities and their
sums up to just under 2.

* A sum saturates at `32'hFFFF_FFFF`.
* A product is truncated to 31 fraction bits and saturates the same way.

The format is set by `spn_pkg::FRAC_W`. The `pe` module takes `DATA_W` and
`FRAC_W` as parameters. For long products of small probabilities, a
log-domain or floating-point PE could replace `pe` without changing any
other block.

## Host interface and run control

These signals are used only while `busy` is low:

* **Program.** `imem_we`, `imem_waddr` and `imem_wdata` write one instruction
  per clock.
* **Data.** The word port uses `h_addr = {vector[8:0], bank[4:0]}`.
  * A write (`h_en`, `h_we`) takes effect at the clock edge.
  * A read (`h_en` alone) returns `h_rdata` one clock later.

A one-cycle `start` fetches address 0, and instruction *k* then executes in
clock *k+1* after `start`. `exec_pc` shows which instruction is executing.
The instruction with `halt` set is executed; `busy` then falls and `done`
pulses for one cycle. A run of *N* instructions therefore takes *N+1* clocks
from `start` to `done`.

Reset (`rst_n` low, synchronous) clears:

* the PE output registers;
* the load register;
* the sequencer.

The register banks, the data memory and the instruction memory are not
reset.

Assertions flag these misuses:

* host access while busy;
* a load together with a store in the data memory;
* a `start` while running.

## Sizes and where they come from

| Quantity | Value | Origin |
|---|---|---|
| Trees × levels | 2 × 4 (30 PEs) | published configuration |
| Banks × depth × width | 32 × 64 × 32 b | published configuration |
| Banks per tree | 16 | follows from the output-to-bank mapping of a 4-level tree |
| Data memory | 64 KB = 512 vectors of 32 words | published size; vector = one word per bank is this design's reading |
| Crossbar | 32 bank ports → 32 tree inputs | follows from the above |
| Instruction memory | 1024 × 744 b | own choice |
| Number format | unsigned 1.31, saturating | own choice |

The sizes are constants in `spn_pkg`. The generic blocks (`pe`, `pe_tree`,
`register_file`, `crossbar`, `data_memory`, `instruction_memory`) also take
them as module parameters.

## Relation to the published architecture

Taken from the published description:

* the PE with +, ×, forward-a and forward-b operations and a registered
  output;
* trees of PEs;
* a private banked register file per tree, with 2/4/8/… banks writable per
  tree level;
* one access per bank per cycle;
* a combinational crossbar from all banks to all tree inputs;
* vector-only load/store between all register files and a single data-memory
  address;
* one VLIW instruction per cycle that configures trees and crossbar;
* the Ptree sizes.

This design's own choices, where the description gives no detail:

* the number format;
* the instruction encoding;
* each instruction setting all tree levels for its own cycle, not one
  operation wave skewed across cycles;
* one write port per bank, with the source picked by tree level;
* the synchronous data-memory read into a holding load register;
* copying between banks by forwarding through the PEs;
* the instruction memory depth;
* the start/halt/done sequencing;
* the host ports;
* several tree inputs receiving the same bank's word in one cycle. The
  published description says that multiple inputs cannot access the same
  bank in a cycle. Here each bank still has one read port, so it delivers
  one register per cycle, but the crossbar may send that word to several
  inputs. A program that never does so behaves exactly as described.

Not included:

* The SPN compiler: bank allocation, PE placement, reordering for the tree
  latency, spilling to data memory.
* The "Pvect" comparison configuration (16 PEs with no trees). With
  `pe_tree` set to `LEVELS = 1` it is a set of independent PEs, but no top
  level for it is provided.

The published evaluation used nine standard SPN benchmark data sets
(Netflix, BBC, Bio response, Audio, CPU, MSNBC, EEG-eye, KDDCup2k,
Banknote). It did not give their network sizes, and none of them is
reproduced here. A network fits if:

* its live intermediate values fit in 2048 registers plus 16K words of data
  memory, and
* its schedule fits in 1024 instructions (at most 30 operations each).

## Simulation

Every testbench in `tb/` is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `pe_tb` | every operation, corner cases, saturation, one-clock latency |
| `pe_tree_tb` | all 15 PE outputs every cycle against a cycle model; 4-clock root latency |
| `register_file_tb` | random reads/writes from every level and from memory against a model |
| `crossbar_tb` | random selects, including many inputs on one bank |
| `data_memory_tb` | host writes/reads, vector loads/stores, load-register hold |
| `instruction_memory_tb` | random program writes and read-back |
| `control_unit_tb` | fetch order, timing, halt, done, no-op control word when idle |
| `spn_processor_tb` | end to end at full size (below) |
| `spn_workload_tb` | a compiled 600-node random SPN at full size (below) |

`spn_processor_tb` runs in two parts:

1. It evaluates a random 32-leaf SPN as scheduled above. It compares the
   root and the intermediate nodes with the same SPN evaluated as a list of
   operations, and checks the cycle count.
2. It fills all 2048 registers, runs 300 random VLIW instructions, dumps
   every register, and compares the whole data memory with an
   instruction-level reference model.

It also counts how often each mechanism was used and fails if one never was:

* loads and stores;
* register writes from memory and from each level;
* reads across trees;
* each PE operation;
* saturation;
* halts.

`spn_workload_tb` runs an irregular network on the full-size processor: a
random DAG with 512 leaves and 600 sum/product nodes, mostly tree-shaped
but with shared sub-graphs. The testbench has its own small greedy
scheduler, which is one example of the compiler this architecture relies
on. It does the following:

* loads the leaves into the banks by vector loads;
* issues ready operations to leaf PEs, avoiding two reads of different
  registers of one bank in a cycle;
* pairs sibling PEs so that a consumer can run on the parent PE in the next
  cycle;
* forwards an operand to another bank (`PE_PASS_A`) when both operands of an
  operation sit in the same bank;
* writes only the results that are still needed, into the least-filled
  reachable bank;
* frees registers after their last read.

The root read back from the data memory must equal the network evaluated as
a list of operations. With the default seed the schedule reaches about 14
operations per cycle, and some operations run on level-1 and level-2 PEs
without a trip through the register file. This scheduler is deliberately
simple. The throughput it reaches says little about what a
production compiler would reach on real benchmark networks.

To run a testbench with Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/spn_pkg.sv rtl/*.sv tb/spn_processor_tb.sv --top-module spn_processor_tb -o sim
./obj_dir/sim
```

Substitute any other testbench name. The full-size end-to-end test
simulates in well under a second.
