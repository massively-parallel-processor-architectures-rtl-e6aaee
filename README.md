# Invasive tightly coupled processor array (TCPA) in SystemVerilog

A tightly coupled processor array is a grid of small VLIW processors, the
processing elements (PEs), that hand values to their neighbours over a
circuit-switched mesh. A value made in one PE can be used by the next PE in
the following cycle. Such arrays run loop kernels from signal and image
processing at one iteration per cycle per PE. The *invasive* array adds
resource awareness in hardware. An application does not own the whole array.
Instead it:

1. **invades** a region of PEs, grown hop by hop by small controllers in the
   PEs;
2. runs on that region;
3. **retreats**, which releases the region.

Several applications can share the array at once. The same invade and retreat
signals switch the power of the PEs, so unclaimed parts of the array stay off.
An application that needs reliability can claim two or three copies of its
region and vote over them in a voter functional unit built into each PE.

This RTL builds a 4x4 array with:

- VLIW PEs, each with an ALU, a multiplier and a voter FU;
- an interconnect wrapper around every PE;
- an invasion controller (iCtrl) in every PE;
- power management units (PMUs) that switch the iCtrl and PE power domains;
- 16 I/O buffers around the border, each usable as FIFOs or as RAM with an
  address generator.

The control processor that sits outside the array is not built. Its signals
are ports of `tcpa_top`.

## Block map

```
 tcpa_top
 ├─ 4x4 × tile
 │   ├─ processing_element ── instruction_memory, instruction_decoder,
 │   │                        register_file, alu_fu, mul_fu, voter_fu,
 │   │                        branch_unit, flags register
 │   ├─ interconnect_wrapper  (data network 2×16 bit, control network 1 bit,
 │   │                         per direction)
 │   └─ ictrl                 (invasion network, separate mesh)
 ├─ pmu × (16 / PMU_SIDE²)    (one iCtrl domain per group, one PE domain per PE)
 └─ io_buffer × 16            (one per border PE and side; each has 2 banks
                               and 2 agu)
```

All shared types are in `rtl/tcpa_pkg.sv`: the instruction word, the
register map, the invasion messages and the enums.

## The invasion protocol

This is the most involved part of the design. Read `rtl/ictrl.sv` with this
section.

Each iCtrl has five links: N, E, S, W and a local link (index 4). The local
link is wired to the control processor only at the four corner PEs, the
*seeds*: 0 = NW, 1 = NE, 2 = SW, 3 = SE. Each link carries two kinds of
message:

- **Requests** travel from the initiator towards the edge of the region.
  They are `inv_req_t`: kind, `n`, `h`, `col_only`, and the row and column
  directions `dx_w` and `dy_n`. Requests use valid/ready. The sender holds a
  request until the receiver takes it. This matters because the receiver may
  be unpowered and must first wake up.
- **Responses** travel back towards the initiator. They are `inv_rsp_t`:
  CONFIRM with a count, REJECT, or RET_ACK. A response is a single-cycle
  pulse that the receiver always accepts.

Each iCtrl has four states:

```
 FREE ──invade──► WAIT_CONF ──all children answered──► CLAIMED
  ▲  (forwards to children,      (sends CONFIRM(1+Σ) to parent)     │
  │   or confirms at once)                                          │ retreat
  └──────────── all children acked (sends RET_ACK) ◄── WAIT_RACK ◄──┘
```

An iCtrl that is not FREE rejects any new invade at once.

### Linear invasion

A linear invasion builds a chain of PEs, suited to 1-D kernels such as FIR
filters. Field `n` is the number of PEs still wanted. A PE that takes the
request keeps one PE for itself. If more are wanted, it forwards `n-1` to one
neighbour, trying directions in this order:

1. along the current row direction;
2. along the column direction;
3. and 4. the two opposite directions.

When the chain turns into the next row, it flips its row direction. The
result is a serpentine that fills the array row by row.

If a neighbour rejects the request (busy, or off the edge), the next
direction is tried. If none is left, the chain ends early. The count that
comes back to the seed is the number of PEs actually claimed, so the control
processor learns of a partial grant. The end-to-end test asks for 16 PEs
while 8 are held, and gets 8.

### Rectangular invasion

A rectangular invasion claims a block of PEs, suited to 2-D kernels such as
image filters. Fields `n` and `h` give the width and height still wanted.

- A PE in the first row forwards `n-1` along the row, and `h-1` down its
  column with `col_only` set.
- A `col_only` PE only forwards down the column.

A PE confirms with 1 plus the sum of its children's counts once all of them
have answered. A full w×h grant therefore reports w·h. A rectangle that hits
a busy PE or the border reports fewer.

### Retreat

A retreat enters at the seed and follows the recorded child links, the same
paths the invasion took. Leaves answer RET_ACK. Inner PEs answer when all
their children have. Each PE becomes FREE as it sends its acknowledgement.

### Timing

- Each hop costs one cycle in each direction, plus wake-up time (below) if
  the receiver's domain is off.
- An iCtrl accepts one request per cycle, lowest link index first.
- An assertion in `ictrl` checks that every request stays stable until it is
  taken.

### Design choices

The message fields and encoding, the direction orders, and the rule that a
PE counts as claimed from the cycle it sends its CONFIRM are all this
design's choices. The controller is a fixed FSM. A programmable controller is
the alternative approach and is not built.

## Power gating driven by invasion

`rtl/pmu.sv` serves one group of PMU_SIDE × PMU_SIDE PEs:

- **iCtrl domain.** There is one per group. `ictrl_pwr_en` rises as soon as
  any request waits on a link into the group. `ictrl_pwr_ok` follows
  ICTRL_ON_CYC = 2 cycles later, which models switch settling. Until then,
  requests are held by the valid/ready handshake. The domain switches off
  when no iCtrl in the group is busy and no request waits.
- **PE domain.** There is one per PE. It is on while the PE's iCtrl is
  claimed, and becomes usable PE_ON_CYC = 4 cycles later.
- **While a PE domain is not usable:**
  - the PE is held in reset;
  - writes to its instruction memory are dropped;
  - its status shows it as off.

  So a retreat really loses the PE's program and state, as switching off its
  power would.

With `PMU_SIDE = 1` (the default) every iCtrl has its own domain. This is the
finest grain, with the most switching delay. With `PMU_SIDE = 2`, the iCtrls
of each 2x2 block share one domain. Fewer switches are needed and fewer
wake-ups fall on the invasion's path, but idle iCtrls are powered too.
`tb/tmr_loop_tb.sv` runs with `PMU_SIDE = 2`.

The interconnect wrappers and I/O buffers are not gated. A route through an
unclaimed PE's wrapper therefore still works, and `tmr_loop_tb` uses this.
The power switches themselves are analog and not modelled. The `*_pwr_en`
outputs of the top are their enables.

## The processing element and its instruction set

A PE executes one VLIW word per cycle and is not pipelined:

1. Fetch reads the instruction memory asynchronously (32 words).
2. Decode, register read and the three FUs are combinational.
3. Results, flags, the PC and the rotating-register base update on the next
   rising edge.

A branch tests the flags as they stood at the start of the cycle, that is,
the flags written by earlier words.

One instruction word (`instr_t`, packed, in order) holds:

| slot | fields |
|---|---|
| ALU | op (NOP, ADD, SUB, AND, OR, XOR, SHL, SHR, SRA, MOV), dst, a, b |
| MUL | op (NOP, LO = low 16 bits of a·b), dst, a, b |
| voter | op (NOP, TMR, DMR), dst, a, b, c |
| branch | op (NEXT, JMP, IF, IFN, HALT), condition (Z, N, C, VERR, IC0, IC1), target |
| rotate | advance the rotating-register base after this word |
| imm | 16-bit immediate, read as register 31 |

The register addresses are:

| address | name | notes |
|---|---|---|
| 0–7 | RD0–RD7 | general purpose |
| 8–11 | RR0–RR3 | rotating: RRi means physical (base+i) mod 4 |
| 12–15 | ID0–ID3 | input ports from the wrapper, read only |
| 16–19 | OD0–OD3 | output port registers to the wrapper |
| 20–21 | IC0–IC1 | 1-bit control inputs, read only |
| 22–23 | OC0–OC1 | 1-bit control outputs, bit 0 of the written value |
| 31 | — | the word's immediate |

More rules:

- Writes to read-only addresses are dropped by the decoder.
- If two slots write the same register in one word, the voter wins over the
  multiplier, and the multiplier over the ALU.
- The ALU sets Z, N and C. A voter operation sets VERR.
- Conditions IC0 and IC1 let a PE wait on a neighbour or on an I/O buffer's
  `avail` bit.

The FU mix, register counts, memory depth, encoding and single-cycle timing
are this design's choices. The architecture treats all of them as template
parameters. Most are constants in `tcpa_pkg`.

## The interconnect

Each wrapper has one select register for every output:

- 8 outgoing data channels (4 directions × 2) and 4 PE data inputs;
- 4 outgoing control bits and 2 PE control inputs.

Each select register picks any incoming channel or any PE output port. The
numbering is:

- data: `dir*2 + ch` for the directions (0 = N, 1 = E, 2 = S, 3 = W), then
  `8 + k` for PE port k;
- control: `dir`, then `4 + k`;
- the reset value 15 means "unconnected" and drives 0.

The switch is combinational, so a route through several wrappers costs no
cycle. Only the PE's output registers and the buffers are clocked.

Lint reports the wrapper mesh as a combinational loop (UNOPTFLAT), because
neighbouring wrappers feed each other. The loop only closes if a route is
configured to return to the wrapper it came from. Such a configuration is
invalid. `tcpa_top.sv` explains this in its header.

## I/O buffers

Each border PE has one buffer per outside edge: a corner PE has two. Buffer
indices are:

| side | index |
|---|---|
| N | c |
| E | 4 + r |
| S | 8 + c |
| W | 12 + r |

Each buffer has two banks of 256 words, one per data channel. Configuration
register 0 holds, per channel:

- mode: FIFO or RAM;
- direction: to the array or from it;
- a concatenation bit, which joins both banks into one 512-word memory on
  channel 0.

Registers `1+3c`, `2+3c` and `3+3c` hold base, stride and length for channel
c's address generator (`agu`). RAM mode uses these addresses.

On the array side:

- The PE's outgoing control bit on that edge strobes the buffer. Each strobe
  moves one word: a FIFO pops or pushes, a RAM reads or writes at the AGU
  address and the AGU steps.
- The control bit into the array is `avail`. It is high when a to-array FIFO
  has a word or a from-array FIFO has room.

The control processor reaches every buffer through the `buf_*` port: write,
read, pop and fill level.

## Redundancy on demand

Replication uses invasion. Claim three copies of a region, load the same
loop into each, and route the three results to one PE. There a single VLIW
slot votes:

- **TMR** takes the bitwise majority of three registers.
- **DMR** compares two registers.

Both raise VERR on any disagreement. VERR can be branched on. `voter_fu`
itself is combinational, and its operands can be any registers, including
input ports.

`tb/tmr_loop_tb.sv` runs a small loop of this kind:

1. It claims a 3x3 rectangle, with three replica rows of a pipeline that
   passes values one hop east per cycle.
2. The voter sits at the end of the middle row.
3. It streams 64 samples with one bit upset in one replica.
4. It checks that every voted output is correct, that VERR is raised, and
   that the rate is one sample per cycle.

The reaction to a detected error is not built. That includes halting,
rewinding to an earlier iteration or to the start of a buffer, and migrating
to a new region. The flag is as far as the hardware goes.

## Using the top

Ports of `tcpa_top` (ROWS = COLS = 4, PMU_SIDE = 1, BUF_DEPTH = 256 by
default):

- **Seeds:** `seed_req_valid/seed_req/seed_req_ready` and
  `seed_rsp_valid/seed_rsp`, each an array of 4.
- **Configuration:** `cfg_we` with `cfg_row`, `cfg_col` and `cfg_target`:
  - target 0 writes instruction `cfg_imem_data` at `cfg_imem_addr`;
  - target 1 writes a wrapper select (`cfg_wr_ctrl`, `cfg_wr_sink`,
    `cfg_wr_src`);
  - target 2 sets the PE's `run` bit to `cfg_run`.
- **Buffers:** `buf_sel`, `buf_cfg_*`, `buf_we/re/chan/addr/wdata`,
  `buf_rdata` and `buf_level`.
- **Status:** `pe_busy`, `pe_claimed`, `pe_halted`, `pe_verr`, `pe_pwr_en`
  per PE, and `ictrl_pwr_en` per group.

A typical sequence:

1. Invade and wait for CONFIRM.
2. Wait for the PE domains to come up.
3. Write the programs and routes.
4. Fill the buffers.
5. Set `run`.
6. Drain the results.
7. Clear `run` and retreat.

`tb/tcpa_top_tb.sv` does all of this at the default size, with two
applications at once, a partial grant, a 300-sample pipeline and a TMR vote
into a RAM buffer.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog. With Verilator 5,
put the package first and then the other sources:

```
verilator --binary --timing -Wno-fatal --top-module tcpa_top_tb \
    rtl/tcpa_pkg.sv $(ls rtl/*.sv | grep -v tcpa_pkg) tb/tcpa_top_tb.sv \
    -o sim && ./obj_dir/sim
```

There is one testbench per block (`tb/<block>_tb.sv`), plus the two
array-level ones. The simulator has only two states, so all state that is
read is reset. The reset is synchronous and active low.

## What follows the architecture and what is assumed

These follow the architecture:

- the 4x4 array with I/O buffers around it;
- VLIW PEs with parallel FUs, a register file of general purpose, rotating,
  input and output registers, flags, and a branch unit;
- two 16-bit data channels and one 1-bit control channel per direction;
- circuit-switched wrappers;
- buffers that work as FIFO or RAM, with concatenation and address
  generators;
- a distributed iCtrl per PE doing linear and rectangular invasion, with
  count-carrying confirmations and retreat along the invasion path;
- power gating of the iCtrl on invade, of the PE on claim, and of both on
  retreat, with optional 2x2 grouping of iCtrl domains;
- a programmable TMR/DMR voter FU.

These are this design's own choices:

- all encodings and register maps;
- the register, memory and buffer sizes;
- the single-cycle PE;
- the direction orders of the two invasion strategies;
- corner seeds;
- switch settling times;
- which blocks are power gated (not the wrappers or buffers);
- the control-bit strobe protocol of the buffers;
- the host-side configuration ports.

These are not built:

- the control processor, which chooses seeds and loads configurations;
- the RISC host and operating-system path;
- programmable invasion controllers;
- topologies other than the mesh;
- the analog power switches;
- the fault reaction (halt, rewind, migrate);
- the compiler that replicates loops and places voters.
