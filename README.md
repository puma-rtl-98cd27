# PUMA node in SystemVerilog

PUMA is an inference accelerator built around memristor crossbars. A crossbar
stores a weight matrix as cell conductances. It performs a whole
matrix-vector multiplication in one analog step: input voltages drive the rows,
and each column current is the dot product of the input with that column's
weights. Crossbars alone can only multiply matrices by vectors. PUMA places
them inside small programmable in-order cores, so that the rest of a neural
network also runs next to the weights. That rest includes vector arithmetic,
activation functions, control flow and data exchange. The networks targeted are
multi-layer perceptrons, LSTMs and CNNs.

This RTL describes one PUMA node at its published size:

| level | contents | size |
|---|---|---|
| node | tiles on an on-chip mesh network | 138 tiles, 7 x 5 routers, 4 tiles per router |
| tile | cores, shared memory, tile control unit, receive buffer | 8 cores, 64 KB (32K 16-bit words), 16 FIFOs of depth 2 |
| core | MVM units, vector unit, scalar unit, register file, instruction memory | 2 MVMUs, 1 vector lane, 512-word register file, 4 KB instructions |
| MVMU | bit-sliced crossbars with DACs, ADCs and shift-and-add | 8 crossbars of 128 x 128 two-bit cells = 128 x 128 16-bit weights |

One node holds 138 x 8 x 2 x 128 x 128 = 36.2 M weights (69 MiB).

All data words are 16-bit signed fixed point in Q8.8 format (8 fraction
bits). Every size is a parameter or a constant in `puma_pkg`, and its default
is the published value. The analog crossbar is the only part written as a
behavioural model. Everything else is synthesizable.

## Matrix-vector multiplication unit (`puma_mvmu`, `puma_xbar`)

A 16-bit weight cannot sit in one cell, because a cell stores only 2 bits. The
weight is therefore bit-sliced over eight crossbars. Slice k holds weight bits
2k+1..2k, and all eight slices share the input registers (XbarIn).

Inputs are applied bit-serially through 1-bit DACs, least significant bit
first. For each input bit:

1. Every row whose input bit is 1 is driven.
2. Each slice's ADC steps across the 128 columns, one column per cycle. It
   reads the column sum of the driven rows.
3. A shift-and-add stage combines the eight slice values, weighted by 4^k.
   It adds the result into a 40-bit accumulator for that column, weighted by
   2^bit.

Bit 15 of the input has weight -2^15 (two's complement), so its partial sum
is subtracted.

Conductances cannot be negative, so weights are stored offset by +2^15. The
offset is removed digitally: 2^15 times the number of driven rows is
subtracted. After the last input bit:

1. The accumulators are shifted back to Q8.8.
2. They are saturated to 16 bits.
3. They are written into the XbarOut registers.

One MVM takes 16 x 128 + 1 = 2049 cycles. The published figure is 2304 ns.

Convolutions reuse a weight matrix on a sliding window. To support this, the
unit has input shuffling: DAC row r reads XbarIn[(r + filter x stride) mod
128]. A shifted window can then be applied without moving data.

`puma_xbar` is the analog part. It stores the 2-bit cells and returns one
column's sum of cell values over the driven rows, as an ideal ADC would. Noise,
conductance variation and ADC resolution are not modelled.

## Core (`puma_core`)

### Pipeline

The core has three in-order stages: fetch, decode and execute. A `jmp` or a
taken `brn` is resolved in the first execute cycle and kills the two younger
instructions.

Vector instructions use *temporal SIMD*. The instruction carries a vector
width, and the operand steer logic walks through its elements, one per cycle,
through the single-lane vector unit.

An `mvm` instruction starts every MVMU selected by its 2-bit mask (MVM
coalescing) and retires at once, while the MVMUs keep working in the
background. A scoreboard stalls any of the following until the MVMU is idle:

- a later instruction that reads or writes that MVMU's XbarIn or XbarOut;
- a second `mvm` to a busy MVMU;
- `halt`.

### Register address space

A register address is 10 bits:

| addresses | contents |
|---|---|
| 0-511 | general-purpose register file |
| 512-767 | XbarIn of MVMU 0, then MVMU 1 |
| 768-1023 | XbarOut of MVMU 0, then MVMU 1 (read-only to programs) |

`load` and `store` move data between shared memory and any register. `copy`
moves data between registers, for example XbarIn to XbarIn.

### Instructions

All instructions are 56 bits (seven bytes):

| bits | field |
|---|---|
| 55:51 | opcode |
| 50:47 | ALU op, branch condition, or MVM mask |
| 46:37 | dest |
| 36:27 | src1 |
| 26:11 | 16-bit immediate; src2 is bits 26:17 |
| 10:0 | vector width, or target pc |

| instruction | operation |
|---|---|
| `mvm mask, filter, stride` | start the masked MVMUs |
| `alu op, d, s1, s2, vw` | vector op: add, sub, mul, div, shift, and, or, invert, relu, min, max, random, sigmoid, tanh, log, exp |
| `alui op, d, s1, imm, vw` | the same with a scalar immediate |
| `aluint op, d, s1, s2` | scalar integer add, sub, or compare |
| `set d, imm` | write an immediate to a register |
| `copy d, s1, vw` | register-to-register vector copy |
| `load d, addr, vw` / `store addr, s1, count, vw` | shared-memory transfer, one word per access |
| `jmp pc` / `brn cond, s1, s2, pc` | unconditional and conditional branch (eq, gt, ne) |
| `halt` | stop; the core reports halted |

The opcode numbers and field positions are this design's own. The
testbench package `tb/puma_asm_pkg.sv` contains one assembler function per
instruction.

### Register file with embedded ROM (`puma_regfile`)

Sigmoid, tanh, log and exp are computed by table look-up. The table is stored
in the same SRAM array as the register file, so it costs almost no area. Each
cell's access transistor is wired to one of two word lines, and that wiring is
the ROM bit.

A ROM read of a row takes four steps, one per cycle:

1. Copy the row to a buffer.
2. Write ones with both word lines active.
3. Write zeros with only the second word line active. The row now holds the
   ROM word.
4. Read the row, and restore the buffered RAM contents at the end of the
   same cycle.

The register contents are therefore unchanged after a look-up.

Each table has 128 entries, and each entry is the function value at the
centre of its input bin:

- For sigmoid, tanh and exp, the bins cover [-8, 8) in steps of 1/8:
  x = (i - 64)/8 + 1/16. Inputs outside the range are clamped to the end bins.
- For log, the bins cover [0, 16): x = i/8 + 1/16.

Values are saturated to Q8.8. The tables are in `rtl/puma_rom.hex`, which is
read with `$readmemh("rtl/puma_rom.hex")`, so simulate from the directory that
contains `rtl/`. Row 128f + i holds function f (0 sigmoid, 1 tanh, 2 log,
3 exp) at bin i.

### Other core blocks

- `puma_vfu`: the vector functional unit. It has a `LANES` parameter, set to
  1 as in the published configuration.
- `puma_sfu`: scalar integer operations and branch conditions.
- `puma_imem`: instruction memory, written at configuration time, with
  asynchronous read.

## Shared memory and synchronisation (`puma_shmem`)

Cores on a tile exchange data only through the tile's shared memory. Each
16-bit word carries two attributes, *valid* and *count*:

- A read of an invalid word blocks until the word is written.
- A write to a valid word blocks until the word has been read `count` times.
- A write sets valid and stores the count given by the `store` instruction.
- Each read decrements the count. The last read clears valid.
- Count 0 marks a constant: the word stays valid for any number of reads.

The memory controller grants one access per cycle, round-robin among the
requesters whose access the attributes allow. There are 8 core ports plus one
port for the tile control unit. A read returns its data in the grant cycle.

This producer-consumer protocol is the only synchronisation in the design.
There are no locks or barriers.

## Tile control unit, receive buffer and network

### Tile control unit (`puma_tile_cu`)

Each tile has a control unit with its own 8 KB instruction memory, which runs
`send` and `recv` instructions in program order:

- `send addr, fifo, target, vw` reads vw words from shared memory (waiting on
  their valid bits). It sends each word as one 32-bit flit to the target
  tile's receive FIFO.
- `recv addr, fifo, count, vw` takes vw words from a local FIFO and writes
  them to shared memory with the given consumer count.

The flit layout is 4 reserved bits, an 8-bit target tile, a 4-bit FIFO id and
a 16-bit data word.

Both instructions block. A tile that sends to itself must therefore send at
most one FIFO's depth (2 words) before it receives, or it deadlocks.

### Receive buffer (`puma_recv_buf`)

The receive buffer has 16 FIFOs of depth 2. An arriving flit is placed in the
FIFO named by its FIFO id. If that FIFO is full, the flit waits in the
network.

### Network (`puma_router`, `puma_noc`)

`puma_router` has four mesh ports (N, E, S, W) and four local ports
(concentration 4). It uses:

- XY routing;
- a two-entry FIFO on each input;
- round-robin arbitration per output;
- valid/ready handshakes on all links.

`puma_noc` connects 7 x 5 routers. That gives 140 local ports, of which
138 are used. Tile t is attached to router t / 4, local port t mod 4.

## Configuration and running (`puma_node`)

The node has one host port, `cfg` of type `host_cfg_t`. It writes one item
per cycle into the tile selected by `cfg.tile`. The item kind is one of:

| kind | writes |
|---|---|
| `H_CORE_IMEM` | one core instruction |
| `H_TILE_IMEM` | one tile-control-unit instruction |
| `H_WEIGHT` | one 16-bit weight W[row][col] of one MVMU |
| `H_SHMEM` | one shared-memory word, with its valid bit and count |

A one-cycle `start` pulse starts every core and every tile control unit at
pc 0. `done` rises when all of them have executed `halt`. Results are read
through `rd_tile`/`rd_addr`/`rd_data` without changing the attributes.

Every core and control unit must be given a program that ends in `halt`.
This includes the unused ones: an all-zero instruction memory is a loop of
`nop` and never halts.

A complete run, as in `tb/tb_puma_node.sv`:

1. Load weights, programs and input vectors through `cfg`.
2. Pulse `start`.
3. Wait for `done`.
4. Read the outputs.

## Where this RTL departs from the published design

- **Off-chip network.** The node-to-node link (HyperTransport class) is not
  included, so a model must fit in one node's 69 MiB of weights. Of the
  evaluated networks, only the two MLPs (5 M and 21 M parameters) fit. The
  LSTMs and VGG nets need 3 to 24 nodes.
- **Vector unit width.** The configuration table gives a VFU width of 1. The
  design-space discussion calls 4 lanes the sweet spot. This RTL follows the
  table (`LANES = 1`) and can be widened with the parameter.
- **MVM latency.** An MVM takes 2049 cycles here. The published figure is
  2304 ns. DAC width (1 bit), ADC behaviour (lossless) and the offset-binary
  weight encoding are this design's own choices.
- **Memory bus width.** The shared memory moves one 16-bit word per cycle. The
  published bus is 384 bits wide.
- **Operands and operations not implemented.**
  - The core does not implement the third source operand or the load/store
    width operands.
  - The vector "subsampling" operation is not implemented, because its
    semantics are not specified.
  - The tile control unit sends one word per flit and ignores the
    send/receive width operands.
- **Own choices where the published description is silent.** These include:
  - instruction encoding and opcode numbers;
  - the `halt` instruction;
  - the Q8.8 fixed-point format;
  - attribute count width (8 bits) and the meaning of count 0;
  - round-robin arbitration;
  - mesh shape (7 x 5) and XY routing;
  - flit layout;
  - the host configuration port;
  - the start/done handshake.
- **Not modelled.** Crossbar weights are written one at a time through the
  host port. Write latency, endurance and device non-idealities are not
  modelled.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
with a reference computed in the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_puma_xbar`, `tb_puma_mvmu` | column sums; MVMs with random weights and inputs against an integer reference, including shuffling, saturation and the 2049-cycle latency |
| `tb_puma_regfile` | RAM reads and writes; every ROM row against the table formula; RAM contents after look-ups |
| `tb_puma_vfu`, `tb_puma_sfu`, `tb_puma_imem` | each operation on random operands |
| `tb_puma_core` | a program using every instruction class, with stalls on a busy MVMU, branch kills and memory waits |
| `tb_puma_shmem` | the valid/count protocol, blocked reads and writes, arbitration |
| `tb_puma_recv_buf`, `tb_puma_router`, `tb_puma_noc` | routing, ordering and loss-freedom under random traffic and back-pressure, with the full 138-tile mesh in `tb_puma_noc` |
| `tb_puma_tile_cu`, `tb_puma_tile` | send and receive; cores handing data through shared memory with blocked reads and writes |
| `tb_puma_node` | end to end on a reduced node (5 tiles on 2 routers, 2 cores per tile) |

The `tb_puma_node` run does the following:

1. A core computes an MVM and a sigmoid.
2. A second core consumes the results through blocking shared-memory words.
3. The tile sends them across routers to another tile.
4. A core on that tile applies ReLU.

The testbench counts MVMs, stalls, kills, ROM look-ups, blocked reads, blocked
writes and inter-router flits, and fails if any of them never occurs.

The full-size node (138 tiles of 8 cores) has not been simulated as a whole.
Verilator turns a tile of 8 cores, each with 16 crossbars of 128 x 128 cells,
into several hundred megabytes of C++, which takes hours to compile. The
largest sizes simulated are:

- one full-size core (`tb_puma_core`, two 128 x 128 MVMUs);
- a tile of 2 cores (`tb_puma_tile`);
- the full 138-tile, 7 x 5 router network on its own (`tb_puma_noc`);
- a node of 5 tiles with 2 cores each (`tb_puma_node`).

All blocks are instantiated at their published sizes in these runs, except for
the number of cores per tile, the number of tiles, and the shared-memory
depth. Those three are parameters.

To simulate with Verilator from the directory that contains `rtl/` and `tb/`:

    verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl -y tb \
        rtl/puma_pkg.sv tb/puma_asm_pkg.sv tb/tb_puma_node.sv --top-module tb_puma_node
    obj_dir/Vtb_puma_node

Simulation is two-state. All state that is read is reset or initialised.
