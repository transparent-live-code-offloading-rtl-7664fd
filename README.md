# DFE: a data-flow overlay for transparent code off-loading to an FPGA

Building an FPGA accelerator for a loop normally means hours of synthesis and
place and route. This design avoids that. The FPGA carries one fixed
bitstream: a **data-flow engine (DFE)**, which is a grid of identical,
run-time programmable cells. A software run-time on the host finds a hot loop
body. It extracts the body's data-flow graph (DFG), places and routes that
graph onto the grid in software, and writes the result into the FPGA as a
configuration. It then streams the loop's operands through PCIe and reads the
results back. Switching to another kernel costs one configuration load, not a
new bitstream.

This repository holds the FPGA side of that system as synthesizable
SystemVerilog:

* the DFE itself: a `ROWS x COLS` mesh of cells (default 18 x 18);
* the configuration memory and the small state machine that loads it into
  the mesh and resets the mesh;
* the two host data paths. Host words carry a tag: the input path delivers
  each tagged word to the right DFE input, and the output path tags each
  result with the output it came from.

The host software (JIT compiler, profiler, DFG extraction, place and route)
and the PCIe endpoint are not included. The endpoint's user side appears as
plain ports on `dfe_top`.

## From a loop body to a configuration

Take this loop body:

```c
if (A[i][j] > B[i][j]) C[i][j] = A[i][j] + 3*B[i][j] + 1;
else                   C[i][j] = A[i][j] - 5*B[i][j] - 2;
```

Its DFG has no control flow. Both branches are computed, and a MUX node picks
one, chosen by a comparison node:

```
 t1 = 3*B   t2 = A+t1   t3 = t2+1
 u1 = -5*B  u2 = A+u1   u3 = u2+(-2)
 g  = A > B             C  = g ? t3 : u3
```

Each DFG node is placed on one cell, which runs it in its functional unit
(FU). Each DFG edge becomes a chain of cell-to-cell hops. Every cell on the
way passes the value from one side to another, and a cell can route values
while its FU is busy with a node. The literals 3, 1, -5 and -2 are sent once
and then stay inside the cells that use them (see "Constant inputs" below).
Operands A and B then stream in once per loop iteration. The run-time may send
A to two different perimeter inputs if that makes routing easier.

`tb/dfe_tb_pkg.sv` holds this kernel placed by hand on a 4 x 4 corner of the
mesh (`K_BRANCH`, 8 FUs and 6 pure routing cells). It also holds two other
hand placements. `K_AXPY` computes the simpler `C = A + 3B + 1` on three
cells in a row. `K_FIR8` is an 8-tap convolution `y = bias + sum w[i]*x[i]`:
a row of 8 multipliers over a row of 8 adders. Its weights climb from the
south edge and its result runs to the east edge, so it also uses long routes.
The package's header comment draws all three placements.

Nothing ties one DFG to the whole mesh. Two independent graphs placed in
disjoint regions can run side by side, because each uses its own perimeter
ports and tags. The testbenches do not exercise this case.

## The cell

Everything interesting happens in `rtl/dfe_cell.sv`. A cell has one input and
one output on each of its four sides (N, E, S, W) and an FU in the middle.
Neighbouring cells are wired point to point: the east output of one cell is
the west input of the next, and so on. There are no separate routing
channels.

### What the configuration selects

| Field | Meaning |
|---|---|
| `op` | FU operation: none, add, sub, mul, gt, ge, lt, le, eq, ne, sel |
| `src_a`, `src_b` | which input side feeds FU input 1 / input 2 |
| `src_s` | which input side feeds the selection input (used by `sel` only) |
| `out_src[side]` | per output: off, the FU result, or the input of one of the *other three* sides |
| `const_en[side]` | per input: treat this input as a constant |

The cell therefore works as an operator, a router, or both. For example, it
can compute `A*3` while also passing `A` south and a different value from
north to west. An input never turns back out of the side it came in on.

### FU

The FU works on 32-bit signed integers: add, subtract, multiply (low 32 bits
of the product), the six signed comparisons (which give 1 or 0), and `sel`,
which returns input 1 when the selection input is non-zero and input 2
otherwise. There is no division, no remainder and no floating point. The
result is registered (`rtl/dfe_fu.sv`).

### Constant inputs

An input marked constant takes the **first** token that reaches it and keeps
it. From then on, every FU firing sees that value as present, and nothing is
consumed from the link. Later tokens arriving on that side are left waiting.
In hardware this is nothing more than masking the input's valid/ready
handshake behind a loaded flag. It means loop-invariant operands cross PCIe
once, not once per iteration. A constant input feeds only the FU. To bring a
constant to a cell deep in the mesh, route it there as an ordinary token
through other cells, and mark only the final input as constant. A DFE clear
(reset or reconfiguration) forgets all constants.

### Elastic data flow: why a DFG with unequal paths still works

Paths through a placed DFG have different lengths. In `K_BRANCH`, operand A
reaches the comparator in one hop, but the `+1` branch only after three FUs.
The mesh therefore has no global schedule. Every link carries a token with
valid/ready handshaking, and each cell decides locally:

* **Join.** The FU fires when every input it uses holds a token, and when
  every *other* consumer of those inputs can also take the token in that
  cycle. It also needs its own result register to be free or being emptied.
* **Lazy fork.** An input token that feeds several consumers (FU operands
  and/or outputs) is removed only in a cycle in which all of them take it
  together. An input with no consumer is never removed.
* **Output buffers.** Each output has a two-entry FIFO. A neighbour sees only
  its registered "not empty" and "not full" flags. So no combinational path
  crosses more than one cell boundary, however large the mesh. A two-entry
  FIFO still passes one token per cycle.

The short branch of a reconvergent pair therefore fills up and waits for the
long branch; it neither overtakes it nor loses data. Tokens on every link stay
in order, so result *k* always belongs to operand set *k*. Backpressure
travels hop by hop back to the host: a full output FIFO stops the cell, which
stops its feeders, and so on up to the Tx buffers and the input FIFO.

Latency: a routing hop costs one cycle (the output FIFO). A hop through the
FU costs two (FU register, then output FIFO). `K_AXPY` (three FUs in a row)
delivers a result seven cycles after its operands are offered. Throughput in
steady state is one result per cycle. The limit is how fast the host can send
operands.

## Mesh and perimeter (`rtl/dfe_array.sv`)

The mesh is `ROWS x COLS` cells; row 0 is the north edge and column 0 the west
edge. The free sides of the edge cells are the DFE's only I/O. That gives
`2*(ROWS+COLS)` inputs and the same number of outputs, 72 of each at 18 x 18.
Both inputs and outputs are numbered by `dfe_pkg::border_port`:

| side | port numbers | ordered by |
|---|---|---|
| north | `0 .. COLS-1` | column |
| east  | `COLS .. COLS+ROWS-1` | row |
| south | `COLS+ROWS .. 2*COLS+ROWS-1` | column |
| west  | `2*COLS+ROWS .. 2*(COLS+ROWS)-1` | row |

A placement must therefore keep DFG inputs and outputs near the edge. Each
edge cell offers one input and one output on each of its free sides.

## Configuration

**Word format.** Each cell has a 26-bit `cell_cfg_t` (see `rtl/dfe_pkg.sv`),
stored in the low bits of a 32-bit word:

```
[25:22] const_en[W,S,E,N]   [21:10] out_src[W,S,E,N] (3 bits each)
[9:8] src_s   [7:6] src_b   [5:4] src_a   [3:0] op
```

Output source codes: `0` off, `1` FU, `4..7` input N/E/S/W. Side codes:
`0` N, `1` E, `2` S, `3` W. All-zero means the cell is unused.

**Memory and controller.** The host writes the word of cell (r,c) to address
`r*COLS + c` of `dfe_config_mem`, at any time. A `cmd_configure` pulse starts
`dfe_controller`, which:

1. clears the mesh for one cycle;
2. reads the memory one word per cycle and writes each word into its cell
   over a broadcast bus;
3. releases the mesh.

It stays busy for `NCELL + 2` cycles (326 at 18 x 18, about 2 us at
160 MHz). The mesh is held in clear for that whole time. `cmd_reset` clears
the mesh (tokens and constants) for one cycle and keeps the configuration.
Commands that arrive while busy are ignored.

## Host data path

The host-side protocol is deliberately simple. Every 32-bit datum travels in
its own 128-bit word, together with a tag:

```
[127:48] zero   [47:32] tag = perimeter port number   [31:0] datum
```

This puts 32 payload bits in every 128, so three quarters of the link
bandwidth is overhead. The price buys a very small interface.

* **Host to DFE** (`h2d_*`). A 512-word FIFO feeds `dfe_data_tx`. Tx looks at
  the tag and pushes the datum into a two-word buffer in front of that
  perimeter input. The buffers let the operands of one element arrive in any
  order: an operand waiting for its partner does not block the partner's word
  behind it. The host must not run more than `PORT_DEPTH` (two) words ahead
  on one port of a kernel. If it does, the head word of the input FIFO waits
  for a full buffer whose tokens wait for their partners further back in the
  same FIFO, and the stream deadlocks. Sending the operands element by
  element, as the run-time does, never causes this.
  A word whose tag names no perimeter input is dropped and sets the sticky
  `tag_error`. Tx takes one word per cycle unless the target buffer is full.
  The input FIFO is not read while the controller is busy.
* **DFE to host** (`d2h_*`). `dfe_data_rx` scans the perimeter outputs round
  robin, starting after the one it served last. It takes one result per
  cycle, tags it with its port number, and pushes it into a 512-word output
  FIFO. When the host stops reading, that FIFO fills and the whole mesh
  stalls.

A typical off-load from the host's point of view:

1. write the cell words;
2. pulse `cmd_configure` and wait for `busy` to fall;
3. send each constant once, tagged with its perimeter input;
4. stream operand words;
5. read result words, whose tag names the output that produced them.

## Top-level ports (`rtl/dfe_top.sv`)

| port | dir | width | use |
|---|---|---|---|
| `cfg_wr_en`, `cfg_wr_addr`, `cfg_wr_data` | in | 1, clog2(ROWS*COLS), 32 | configuration memory write |
| `cmd_configure`, `cmd_reset` | in | 1, 1 | controller commands (one-cycle pulses) |
| `busy`, `configured`, `tag_error` | out | 1 each | status |
| `h2d_valid`, `h2d_ready`, `h2d_data` | in/out/in | 1, 1, 128 | host-to-DFE words |
| `d2h_valid`, `d2h_ready`, `d2h_data` | out/in/out | 1, 1, 128 | DFE-to-host words |

The clock is single, and `rst_n` is an active-low asynchronous reset. The
configuration memory and FIFO storage are not reset.

## Sizes

| parameter | default | origin |
|---|---|---|
| `ROWS` x `COLS` | 18 x 18 | size of the DFE built on the Virtex-7 xc7vx485t board of the original prototype. Other builds of the same overlay range from 3 x 3 to 24 x 18 |
| data width | 32 bit signed | as the original |
| host word | 128 bit per datum | as the original |
| tag field | 16 bit at [47:32] | own choice |
| `FIFO_DEPTH` (host FIFOs) | 512 | own choice |
| `OUT_DEPTH` (cell outputs) | 2 | own choice |
| `PORT_DEPTH` (Tx buffers) | 2 | own choice |

For comparison, the original overlay reached about 167 MHz at 18 x 18 on that
device, using 324 DSP slices (one multiplier per cell).

## What follows the original design and what does not

Taken from the original description:

* the cell structure (four inputs, four outputs, an FU with two operand
  inputs and a selection input, any input to any FU input, any other input
  or the FU to any output);
* the added comparison and MUX operations and the constant-input masking;
* 32-bit signed integers with no division;
* a mesh of cells with no routing nodes and with I/O only on the perimeter;
* a controller state machine for configuration switch and reset;
* separate input and output data engines with per-datum destination and
  source tags in 128-bit words.

Choices made here, where the original is silent:

* the elastic valid/ready scheme with lazy fork and two-entry output buffers.
  The original only says the overlay is fully pipelined; it builds on an
  earlier elastic overlay whose details are not given.
* one pipeline register in the FU;
* the operation encoding and the order of the `sel` operands;
* constants capture the first token and feed only the FU;
* the configuration word layout, memory organisation (one configuration held
  on chip) and controller timing;
* the port numbering, tag position and width, bad-tag handling, round-robin
  output arbitration, and FIFO depths;
* the PCIe endpoint and DMA are not included. The ports of `dfe_top` stand
  where its user interface would connect.

Not modelled: several configurations cached on chip (the original keeps its
configuration cache in host software) and the DMA threshold logic, which
belongs to the PCIe side.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it shows |
|---|---|
| `tb_dfe_fu` | every operation against a 64-bit reference, corner operands, latency 1, result held under stall, clear |
| `tb_dfe_fifo` | random traffic against a queue model, flags, count, full throughput at depth 2, clear |
| `tb_dfe_config_mem` | random writes and read-back, one-cycle latency, data held without read enable |
| `tb_dfe_controller` | each cell written once and in order with its word; NCELL+2 busy cycles; writes only while clear; reset; commands ignored while busy |
| `tb_dfe_data_tx` | tag decode, per-port order, stall when a port buffer is full, bad tags dropped and flagged |
| `tb_dfe_data_rx` | datum and tag of every word, per-port order, one grant per cycle, round-robin order against a model |
| `tb_dfe_cell` | routing with fork, MUL with a constant input, SEL, GT with concurrent pass-through, random backpressure; routing latency 1, FU latency 2, stall and clear |
| `tb_dfe_array` | both kernels on a 4 x 5 mesh with random result stalls, reconfiguration, no stray outputs, 7-cycle `K_AXPY` latency |
| `tb_dfe_top` | end to end on 4 x 4: configure, stream, host backpressure, bad tag, DFE reset, configuration switch; MUX taking both branches; counts each mechanism |
| `tb_dfe_top_full` | one complete off-load of `K_BRANCH` (200 elements) on the default 18 x 18 top |
| `tb_dfe_conv` | the 8-tap convolution `K_FIR8` slid over 96 pixels on the default 18 x 18 top; one result per 8 host words |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dfe_pkg.sv tb/dfe_tb_pkg.sv tb/tb_dfe_top.sv --top-module tb_dfe_top
./obj_dir/Vtb_dfe_top
```

The same command works for the others: give the package files first, then
the testbench. Verilator finds the remaining modules in `rtl/` by file name.
Each of the two full-size testbenches takes about two minutes to build and under a second
to run.

**Limits of the evidence.** Both kernels were placed and routed by hand; no
place and route tool was run against this RTL. Timing closure and resource
use on an FPGA were not measured. Configuration errors, such as an FU result
that no output takes or an input that nothing consumes, stall the affected
path rather than being reported.
