# Azul on RTL: a grid of small RISC-V tiles for sparse iterative solvers

Iterative solvers for sparse linear systems (conjugate gradient and its
relatives) spend almost all their time in two kernels: sparse matrix-vector
multiplication (SpMV) and sparse triangular solves (SpTRSV). Each solver
iteration walks through the whole matrix and uses every nonzero exactly once.
On a CPU or GPU the matrix does not stay in cache from one iteration to the
next, so the kernels run at main-memory speed and reach well under one
percent of peak arithmetic throughput.

Azul removes main memory from the loop. The matrix is cut into blocks once,
and each block is kept for the whole solve in the SRAM of one tile of a large
grid. Every tile has a small processor right next to its SRAM. Tiles never
share memory; they exchange 64-bit messages over a network on chip. Work is
written as short **tasks**: a message can start a task on a tile, a task can
block waiting for a message, and a task can send messages that write into
another tile's memory or start a task there. Chains of such tasks follow the
data dependences of SpMV and SpTRSV at a fine grain. This gives dataflow-style
parallelism without a global schedule.

This repository is synthesizable SystemVerilog for that machine as it was
proposed for FPGAs:

- 16 x 16 tiles on a 2D torus.
- Each tile has a five-stage RV32I core with a single-precision floating-point
  unit, 64 KB of instruction memory and 64 KB of data memory.
- Each tile also has a 16-entry task table, network queues and a five-port
  router.

## Messages

Everything that moves between tiles, and between the host and the grid, is a
64-bit message made of two 32-bit words. The first word is metadata that says
where the message goes and what it does. The second is data.

| metadata bits | field | meaning |
|---|---|---|
| 5:0   | row  | destination row (a row >= ROWS means "the host") |
| 11:6  | col  | destination column (a column >= COLS also means "the host") |
| 15:12 | type | 0 write instruction memory, 1 write data memory, 2 write task table, 3 start task |
| 31:16 | addr | byte address for the writes; task number for the task-table write and for start |

The bit positions are those of the original description. The numeric type
codes are this design's choice (see *Departures*). In software the metadata
word is an ordinary 32-bit integer: a task builds it in a register, or loads a
prepared one from data memory, and passes it to `send`.

## Tasks and the idle tile

A tile is either idle or running one task. While it is idle, its **input FSM**
(`azul_input_fsm`) takes one message per cycle from the input queue and acts
on it:

- **write instruction memory / data memory**: store the data word at
  `addr[15:2]`. These messages are how a program and a matrix block are loaded.
- **write task table**: entry `addr[3:0]` of the task table (`azul_task_lut`)
  becomes the data word's low 16 bits, the task's start address.
- **start task**: look up entry `addr[3:0]` and start the core at that
  address. The FSM then switches to its run state.
- other type codes are dropped.

While a task runs, the FSM does not interpret messages. The head of the input
queue belongs to the core's `recv` instruction. Each `recv` takes the head
message, whatever its type field says, so a running task can only receive
data. Messages that the task does not `recv` stay in order in the queue and
are processed as writes or starts after the task returns. If the queue fills,
the network backs up behind it. The programmer must therefore make sure that
a tile is sent exactly as many data messages as its running task receives.

A task ends with a jump or taken branch to address 0. This is the "pc ← 0,
the PE idles" rule. The core sets `ra` (x1) to 0 when it starts a task, so a
task written as an ordinary function ends with a plain `ret`. Once the
pipeline has drained, `busy` falls and the input FSM goes back to processing
messages. Instruction address 0 is therefore never executed; programs are
loaded above it.

## The processing element

`azul_core` is a classic in-order five-stage pipeline:

| stage | work |
|---|---|
| F | the PC addresses instruction memory (synchronous, one-cycle read) |
| D | the instruction word arrives, is decoded, and the register file is read |
| E | ALU, floating-point unit, branch resolution, load/store address, store data, `send`/`recv` |
| M | load data arrives from the synchronous data memory and is aligned and extended |
| W | write back to the register file |

Operands are forwarded from M and W into E. The register file writes through
to its read ports. There are therefore no data-hazard stalls, loads included.
This works because the data memory is read at the end of E and its result is
forwarded from M. Jumps and taken branches resolve in E and squash the two
instructions behind them, with no branch prediction. The only stalls are
network stalls: `send` holds E while the output path is full, and `recv` holds
E while the input queue is empty. A stalled E stage keeps refreshing its
operands from the forwarding paths, so results that complete during the stall
are not lost.

The instruction set is RV32I without CSRs, `ecall` or traps. It has these
additions:

- `send rs1, rs2`: custom-0 opcode `0001011`, funct3 0. Sends the message
  {metadata = rs1, data = rs2}.
- `recv rd, rs2`: custom-0 opcode, funct3 1. Takes the next input message,
  writes its metadata to `rd` and its data to the register named in the `rs2`
  field. This needs the register file's second write port (`azul_regfile`
  has two).
- `fadd.s` and `fmul.s`: the standard OP-FP encodings (funct7 `0000000` and
  `0001000`), but they read and write the *integer* registers. There is no
  separate floating-point register file.

`azul_fmac` is the floating-point unit. It handles IEEE-754 binary32,
rounding toward zero, with subnormal inputs and outputs flushed to zero, a
single canonical NaN (`7fc00000`) and no exception flags. Because rounding is
toward zero, an overflow gives the largest finite number, not infinity. Both
operations take one cycle. A multiply-accumulate takes two instructions.

`azul_alu` is the RV32I integer ALU. There is no multiplier or divider.

## Memories

Each tile's SRAM is split as follows:

| byte range (per tile) | contents | module |
|---|---|---|
| 0 - 64 KB   | instruction memory, 16 K x 32 | `azul_sram` |
| 64 - 128 KB | data memory, 16 K x 32, byte enables | `azul_sram` |
| above       | 16-entry task table, 32-entry register file | `azul_task_lut`, `azul_regfile` |

Instruction and data memory are separate arrays with separate ports, so the
core fetches and loads in the same cycle.

- Both memories use the byte addresses 0-64 K that the core and the messages
  use.
- Reads are synchronous, with one cycle of latency.
- When read and write hit the same word, the read returns the old data.
- Memory contents are not reset.
- The task table and register file have asynchronous reads and are reset to
  zero.

The data memory has one write port. Core stores and input-FSM writes share it
without arbitration, because the FSM only writes while the core is idle. An
assertion in `azul_tile` checks that they never collide.

## The network

Each tile has one `azul_router` with five ports: LOCAL, NORTH, EAST, SOUTH and
WEST. Tile (r, c) links east to (r, c+1) and south to (r+1, c). With
`TORUS = 1` the links wrap around at the edges. With `TORUS = 0` the edge
links are tied off and the grid is a mesh.

**Routing** is dimension-ordered:

- A message first travels along its row until it reaches the destination
  column, then along the column.
- On a torus each ring is traversed the shorter way.
- Each router computes this from its own position (`my_row`, `my_col` are
  inputs, so all routers and tiles are identical), so no routing table is
  needed.
- A destination outside the grid is routed as if to tile (0,0).

**Flow control** is a valid/ready handshake carrying a whole 64-bit message
per cycle:

- Each incoming link has a two-entry buffer.
- Each output has a round-robin arbiter.
- Once an output offers a message it keeps offering that same message until
  the neighbour takes it. An assertion checks this.

**Deadlock.** There are no virtual channels. Deadlock freedom on the torus
rings is not guaranteed, which matches the original design's explicit
statement that it provides no such guarantee. Software has to keep cyclic
traffic bounded by the queue space. The test programs do this.

**Tile interface.** Inside a tile (`azul_tile`) the path runs:

- router LOCAL output → input queue (`azul_fifo`, 16 messages) → input FSM or
  `recv`;
- `send` → output FSM → output queue (16 messages) → router LOCAL input.

The output FSM (`azul_output_fsm`) is a one-message holding register. It
gives the core a `send` ready signal that is registered, not one that depends
on the whole network combinationally.

## The host port

The grid is driven by an outside controller. It loads programs, task tables
and matrix blocks, starts tasks and collects results. The controller itself is
not part of this RTL. `azul_top` brings out its two streams:

- `host_in_*`: messages the controller sends. They enter the network at tile
  (0,0), through that tile's router LOCAL input. There they alternate with
  tile (0,0)'s own output queue; once one source is offered, the choice is
  held until the router takes the message.
- `host_out_*`: messages whose destination row or column lies outside the
  grid. The router delivers them to tile (0,0), which passes them to this port
  instead of its own input queue. A task reports to the host by sending to,
  for example, row 63.

`tile_busy[r*COLS + c]` shows which tiles are running a task.

## How far to trust it

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops with a watchdog if it hangs. The
testbenches draw random stimulus with `$urandom` and compare against models
written independently in the testbench:

- `tb_azul_fifo`: random push/pop against a queue model, full and empty
  behaviour, and ordering.
- `tb_azul_sram`, `tb_azul_regfile`, `tb_azul_task_lut`: reference-array
  models, byte enables, write-through, x0, read-during-write.
- `tb_azul_alu`: every operation against a behavioural reference.
- `tb_azul_fmac`: random normal operands are converted exactly to double
  precision. The result must lie within one unit in the last place of the
  exact result and must not exceed it in magnitude (rounding toward zero).
  Also special cases: zeros, infinities, NaN, exact cancellation, overflow
  and flush-to-zero.
- `tb_azul_core`: the core against small programs that cover:
  - loads and stores of every width;
  - forwarding;
  - taken and not-taken branches, and jumps;
  - FP operations;
  - `send` and `recv` under back-pressure and starvation;
  - task return;
  - the pipelining of back-to-back sends.
- `tb_azul_input_fsm`, `tb_azul_output_fsm`: random message streams and
  stalls.
- `tb_azul_router`: a torus router and a mesh router with random traffic,
  random back-pressure and off-grid destinations. Each message's output port
  is checked against an independently computed route, and order per
  input-output pair is checked.
- `tb_azul_tile`: one tile loaded entirely through its host port. A
  neighbour writes its data memory over a link. A task combines a loaded
  value with a received one and sends results to the host, east and south.
- `tb_azul_top` (4 x 4 torus) and `tb_azul_top_full` (the default 16 x 16
  torus, no parameter overrides) share `tb_azul_e2e`. They run two kernels
  whose results are checked against the testbench's own computation:
  - **SpMV**: y = alpha · A · x on a random sparse matrix in CSR form. Each
    tile owns 1 to 3 rows, except tile 0, which owns 24 so that its output
    backs up.
  - **SpTRSV**: a triangular chain. Each tile solves one row, writes its x
    into the next tile's memory and starts that tile's task by message.

  The end-to-end test also counts each mechanism: `recv` stalls, `send`
  stalls, link back-pressure, wrap-around hops, host back-pressure and task
  starts and returns. It fails if any of them never happened. The full-size
  run takes about 30 s to simulate once built, and about 4 minutes to build.

Each testbench has also been run against a deliberately broken copy of its
module, and each broken copy made it fail.

Not verified:

- timing closure or resource use on a real FPGA;
- floating-point results for subnormal inputs or outputs, beyond checking
  that they flush to zero;
- real SuiteSparse matrices. Only random matrices sized for the simulated
  grid have been run.

## Departures from the original description, and choices it left open

These parts follow the original description:

- 16 x 16 tiles on a 2D torus;
- 64 KB instruction and 64 KB data memory per tile;
- 32 registers and a 16-entry task table;
- a five-stage RISC-V core with one ALU and a floating-point unit;
- 64-bit messages with the metadata layout above;
- the four message types;
- `send`/`recv` with separate metadata and data registers;
- the idle loop that processes messages and starts tasks through the task
  table;
- tasks that end by returning to address 0.

Choices made here where the description is silent:

- Numeric type codes (0-3) and the `send`/`recv` encodings (custom-0
  opcode).
- Treating a jump to address 0 as the end of a task, and setting `ra` to 0 at
  task start.
- The router: routing order, arbitration, buffer depths and the handshake.
  The torus topology itself is given; the drawing of the grid shows a mesh,
  which `TORUS = 0` reproduces.
- Queue depths of 16 messages. Unknown message types are dropped.
- `recv` owning the input queue for the whole time a task runs.
- The floating-point unit's scope. The description calls it a multiplier in
  the text and an FMAC in the drawing. Here it does `fmul.s` and `fadd.s` on
  integer registers, rounding toward zero and flushing subnormals.
- The host port at tile (0,0) and off-grid addressing for results.
- Only the low 16 bits of a core memory address are used, in line with
  "16-bit addresses".

The original description maps each memory to a specific FPGA primitive (URAM,
BRAM, LUTRAM, RAM32M). Here each memory is a plain array that a synthesis tool
can map as it sees fit.

## Evaluated matrices against the built machine

The built grid has 256 x 64 KB = 16.8 MB of data memory. Stored in CSR, a
matrix needs about 8 bytes per nonzero plus 12 bytes per row. Of the 21
SuiteSparse matrices the design was evaluated on, the smaller or sparser ones
fit by that estimate: bundle1, raefsky4, msc23052, crystm03, cvxbqp1,
Andrews, qa8fm and t_dm. The others (about 3 to 10 million nonzeros) do not.
They would need a larger grid, or the matrix streamed in pieces.

## Simulating with verilator

All testbenches are plain top modules with no ports. The package and helper
files must come first. From the repository root:

```sh
# one block, e.g. the router
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/azul_pkg.sv tb/tb_azul_router.sv --top-module tb_azul_router -Mdir obj_router
./obj_router/Vtb_azul_router

# the core (uses the small assembler package)
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/azul_pkg.sv tb/tb_rv_asm.sv tb/tb_azul_core.sv --top-module tb_azul_core -Mdir obj_core

# the whole machine, 4 x 4 or full size (swap tb_azul_top for tb_azul_top_full)
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/azul_pkg.sv tb/tb_rv_asm.sv tb/tb_azul_prog.sv tb/tb_azul_e2e.sv \
  tb/tb_azul_top.sv --top-module tb_azul_top -Mdir obj_top
./obj_top/Vtb_azul_top
```

`-Wno-fatal` keeps width and unused-signal warnings from stopping the build.
Each run ends with a `TB_RESULT` line; `failures=0`
means it passed.

To write your own tasks, use the testbench helpers:

- `tb/tb_rv_asm.sv` encodes RV32I instructions, `send`/`recv`, `fadd.s`,
  `fmul.s`, and metadata words (`META(row, col, type, addr)`).
- `tb/tb_azul_prog.sv` shows complete SpMV and triangular-chain tasks, and
  the data layout they expect.

A program reaches the machine as write-instruction-memory messages, one per
word. It then needs a task-table write, the data-memory writes and a start
message. `tb_azul_e2e` shows the full sequence.

## Files

| file | contents |
|---|---|
| `rtl/azul_pkg.sv` | widths, message and metadata structs, type codes, port numbering, opcodes |
| `rtl/azul_top.sv` | the grid and host port |
| `rtl/azul_tile.sv` | one tile |
| `rtl/azul_router.sv` | five-port router |
| `rtl/azul_fifo.sv` | input/output queues and link buffers |
| `rtl/azul_input_fsm.sv`, `rtl/azul_output_fsm.sv` | message handling between network and core |
| `rtl/azul_core.sv` | five-stage core |
| `rtl/azul_alu.sv`, `rtl/azul_fmac.sv` | integer and floating-point units |
| `rtl/azul_regfile.sv`, `rtl/azul_task_lut.sv`, `rtl/azul_sram.sv` | storage |
| `tb/tb_*.sv` | testbenches and the helper packages described above |
