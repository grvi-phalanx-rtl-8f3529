# GRVI Phalanx in SystemVerilog

GRVI Phalanx is a way to put hundreds of small RISC-V processors on one FPGA
and keep them all busy. Its three ideas are:

* a **very small RV32I core** (GRVI) that leaves out everything a kernel
  rarely needs — the shifter, the byte/halfword load/store logic — and
  shares those parts between two cores;
* a **cluster** of eight such cores around one shared, banked memory, so
  that every core has a 4 KB instruction RAM and a slice of a 32 KB data
  RAM with no caches anywhere;
* a **300-bit Hoplite network** (a bufferless, deflection-routed 2D torus)
  that moves whole 32-byte lines from one cluster's memory into another's
  in a single cycle per hop.

The default configuration is the 400-core array: 10 rows by 5 columns of
clusters, 8 cores per cluster. This RTL describes that system from the core
pipeline up to the array, as synthesizable SystemVerilog-2017, with a
self-checking testbench for each block.

## Hierarchy

```
grvi_phalanx                    COLS x ROWS clusters on a torus (default 5 x 10)
└─ grvi_cluster (x50)           8 PEs, 4 IRAMs, 32 KB CRAM, NOC interface, router
   ├─ grvi_core (x8)            2-stage RV32I pipeline
   │  ├─ grvi_regfile           32 x 32, 2 read / 1 write
   │  ├─ grvi_alu               add, sub, and, or, xor, pass
   │  └─ grvi_cmp               branch conditions and SLT/SLTU
   ├─ grvi_iram (x4)            1K x 32 instruction RAM per PE pair
   ├─ grvi_shifter (x4)         barrel shifter per PE pair
   ├─ grvi_concentrator (x4)    2:1 memory port per PE pair, sub-word logic
   ├─ grvi_xbar                 4 x 4 crossbar (+ memory-mapped NOC target)
   ├─ grvi_cram                 8 x 1K x 32 shared RAM, 4 PE ports + 256-bit port
   ├─ grvi_noc_itf              message send / receive, IRAM load, run control
   └─ hoplite_router            one torus router, 300-bit links
grvi_pkg                        shared types, opcodes, message format
```

## The core

`grvi_core` is a two-stage pipeline behind a synchronous-read IRAM. The IRAM's
read register acts as the fetch stage: the core presents `imem_addr`, the
instruction appears one cycle later. In **decode** the register file is read
and the two operand multiplexers pick register, immediate, PC or the result
being written back in the same cycle (full forwarding, so back-to-back
dependent instructions do not stall). **Execute** holds the ALU, the separate
comparator, the PC unit and the result multiplexer, and writes the register
file at the end of the cycle.

Costs, as the core testbench measures them: one cycle for an ALU
instruction, one bubble for a taken branch or jump (resolved in execute, the
instruction behind it is squashed), at least two cycles for a load (one to
be granted, one for the RAM read), at least one for a store, and at least one
for a shift (waits for the pair's shifter). Whenever execute waits, decode
and fetch hold.

What the core does **not** contain:

* **Shifts.** SLL/SRL/SRA and their immediate forms are sent to
  `grvi_shifter`, one per pair of cores, which grants one requester per cycle
  in round-robin order and answers combinationally in the same cycle.
* **Sub-word memory access.** The core sends the byte address, the size and
  the signedness; `grvi_concentrator` (one per pair) steers store bytes into
  the right lanes with byte enables and extracts and extends load bytes.

FENCE, ECALL, EBREAK and CSR instructions execute as no-ops; there are no
traps. There is no multiplier.

## The cluster memory system

Each pair of cores shares one **IRAM** (a 1K x 32 dual-port RAM): port A
serves the even core, port B the odd core, and port B is also the write port
used when a kernel is loaded from the network. During a load the odd core
simply sees its fetch not granted.

Data requests go **core → concentrator → crossbar → CRAM bank**:

* The concentrator merges its two cores onto one crossbar port, round robin
  when both ask in the same cycle; the loser stalls.
* The crossbar routes each request by address: bank = `addr[3:2]` for the
  shared RAM (word interleaving over four banks), or the NOC interface when
  `addr[31:30] = 01`. Each target has its own round-robin arbiter. Two
  concentrators addressing the same bank in one cycle is a *bank conflict*:
  one is granted, the other holds its request.
* Read data returns one cycle after the grant.

The **CRAM** is eight 1K x 32 RAMs, 32 KB in all. A byte address's word
`w = addr[14:2]` lives in RAM `w[2:0]`, row `w[12:3]`. The PE port for bank
`b` therefore covers RAMs `b` and `b+4`, chosen by `addr[4]`. The other
port of all eight RAMs, side by side, forms one 256-bit port that reads or
writes a whole 32-byte line (row) in one cycle; the NOC interface uses it.

Memory map seen by a core:

| Address             | Meaning                                          |
|---------------------|--------------------------------------------------|
| `addr[31:30] != 01` | the cluster's 32 KB CRAM, byte address `addr[14:0]` |
| `addr[31:30] == 01`, store | send a CRAM line as a NOC message |
| `addr[31:30] == 01`, load  | `{busy[31], x[9:7], y[6:3], pe[2:0]}` |

Instruction addresses index the core's IRAM (`pc[11:2]`); the IRAM is not
visible to loads and stores.

## Messages between clusters

A message (`noc_msg_t`, 300 bits) is `valid`, destination column `dx` (3 bits)
and row `dy` (4 bits), `kind` (2 bits), a 10-bit `addr`, 256 bits of data and
24 reserved bits.

**Sending.** A core writes its 32 bytes into a CRAM line, then stores one
word to the memory-mapped region. The store address bits `[14:5]` name the
local line, the store data names the destination: `[9:0]` remote line or
IRAM word, `[13:10]` row, `[16:14]` column, `[18:17]` kind. The NOC
interface accepts the store when idle, reads the line through the 256-bit
port, and offers the message to the router until it is taken. A second send
store meanwhile is not granted and stalls its core; a core can also poll
bit 31 of the id register.

**Receiving** never pushes back. By kind:

| kind | name | effect at the destination cluster |
|------|------|-----------------------------------|
| 0 | CRAM | write the 32 bytes into line `addr` |
| 1 | IRAM | write `data[31:0]` into word `addr` of all four IRAMs |
| 2 | CTRL | set the eight cores' run enables to `data[7:0]` (a stopped core is held in reset, PC 0) |
| 3 | HOST | pass the message out of the cluster's external port |

A received write has priority over a pending send on the 256-bit port.

After reset every core is stopped. A host loads a kernel with IRAM messages
(1024 messages for a full 4 KB kernel), initialises data with CRAM messages
and starts the cores with a CTRL message.

## The Hoplite router

`hoplite_router` has two ring inputs, `xi` from the west and `yi` from the
north, a client input, and two registered outputs, `xo` east and `yo` south.
It has no buffers. Messages travel along their row (X) to the destination
column, then down the column (Y):

* A message on `yi` has priority for the south output.
* A message on `xi` that has reached its column turns south if the south
  output is free; otherwise it is **deflected** east and goes once more
  around the row.
* The client may inject only into an output that no ring message claims;
  `ci_rdy` tells it whether the message was taken.
* A message leaving through the south output in its own row is delivered to
  the client instead.

Each hop costs one cycle, and delivery takes one further cycle.

In `grvi_phalanx` the routers are wired into a torus: `xi` of (x,y) comes
from `xo` of (x-1,y), `yi` from `yo` of (x,y-1), both modulo the array size.
The external port (`ext_inj`, `ext_inj_rdy`, `ext_dlv`) of cluster (0,0) is
the array's port to a host or I/O device; it shares that router's client
input with the cluster's own sends and has priority over them. HOST messages
reaching cluster (0,0) leave on `ext_dlv`.

## Parameters

| Parameter | Default | Where |
|-----------|---------|-------|
| `COLS`, `ROWS` | 5, 10 | `grvi_phalanx` |
| cores per cluster | 8 (fixed by the wiring) | `grvi_cluster` |
| IRAM words | 1024 | `grvi_iram` `WORDS` |
| CRAM | 8 RAMs x 1024 rows x 32 bit | `grvi_cram` |
| NOC link | 300 bits | `grvi_pkg::NOC_W` |

The message header holds 3 bits of column and 4 of row, so arrays up to
8 x 16 clusters can be built by changing `COLS` and `ROWS`.

## Where this departs from the published design

* **No multicast.** The original loads every IRAM of the device in 1024
  cycles with multicast Hoplite. Here an IRAM message reaches the four IRAMs
  of one cluster, so a full load of 50 clusters takes 50 x 1024 messages.
* **No three-stage option.** The core is built only as the two-stage
  pipeline; the optional instruction fetch latch is left out.
* **No accelerator.** The CRAM's eight wide-side ports are used only as one
  256-bit port for messages; no per-bank accelerator ports are brought out.
* **No multiplier, no I/O cores** (PCIe, Ethernet, DRAM): the external port
  at (0,0) stands in for them.
* The original core is hand-mapped into FPGA LUTs and relationally placed;
  this RTL is portable behavioural code and says nothing about placement,
  LUT count or clock rate.
* The arbitration policies (round robin), the message kinds, the memory map,
  the header bit layout, the run-control and id registers and the
  request/grant handshakes are choices made for this RTL.

## Testbenches

Every module has a testbench `tb/tb_<module>.sv` that checks it against an
independent model and prints `TB_RESULT checks=<n> failures=<n>`. The
interesting ones:

* `tb_grvi_core` runs small programs (assembled by the functions in
  `tb/rv_asm_pkg.sv`) against behavioural memories and checks registers,
  memory and the cycle count of a loop.
* `tb_grvi_cluster` loads a kernel over the router's client port (checking
  the 1024-cycle load), runs it on all eight cores and checks the results in
  CRAM and the messages it sends; it counts bank conflicts, concentrator and
  shifter contention and IRAM fetch steals during loading.
* `tb_grvi_phalanx` runs the array end to end at 3 rows x 2 columns
  (48 cores): kernel load, CRAM clear and start through the external port,
  then every core sends one HOST message back to (0,0). It checks that each
  of the 48 messages arrives once with the right contents, and requires that
  deflections, bank conflicts and shifter contention each occurred.
* `tb_grvi_phalanx_full` is the same test on the default 10 x 5 array,
  400 cores and 400 converging messages.

The test kernel (`tb/grvi_test_kernel_pkg.sv`) is 40 instructions: every
core reads its id, sums a loop using shifts, writes words, bytes and a
shifted value into CRAM, waits for its seven neighbours' flags, and sends the
line holding the eight results.

To simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/grvi_pkg.sv tb/rv_asm_pkg.sv tb/grvi_test_kernel_pkg.sv \
    tb/tb_grvi_phalanx.sv --top-module tb_grvi_phalanx
./obj_dir/Vtb_grvi_phalanx
```

Run from the directory that holds `rtl/` and `tb/`, since the array
testbenches include `tb/grvi_phalanx_tb_body.svh` by that path. The
default-size test is large: it takes several minutes to compile.
