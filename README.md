# SENECA-style neuromorphic mesh in SystemVerilog

A spiking neural network is mostly idle. At any moment only a few neurons
fire. Each spike touches one row of weights, and each weight update is a
short multiply-add. This processor is built around that pattern. Many small
identical cores sit in a 2-D mesh and exchange spikes as packets. Inside a
core, work is split across three levels of control:

1. A general-purpose RISC-V controller decides what a spike means.
2. A small loop controller runs the inner loops.
3. Eight BF16 neural processing elements (NPEs) do the arithmetic in lock-step.

The RISC-V never touches individual synapses. It turns an incoming spike into
a few register writes ("value is v, weight row starts at address a"), starts
a stored loop program, and goes back to waiting for packets.

Packets carry no destination. They carry a *label*, typically the ID of the
source layer. Every router has a small table that maps (input port, label) to
a set of output ports. A packet that must reach a whole layer spread over
several cores is copied at the routers where the paths split. The sender
never has to know who listens.

This repository holds synthesizable RTL for the core tile and the mesh. It
has self-checking testbenches for each block and an end-to-end test of the
full 8 x 8 array running a small two-layer network.

## Contents

| file | what it is |
|---|---|
| `rtl/seneca_pkg.sv` | shared types: NPE and loop-controller instruction formats, spike packet, bus structs |
| `rtl/bf16_mul.sv`, `rtl/bf16_add.sv` | combinational BF16 multiplier and adder |
| `rtl/npe.sv` | one NPE: 16 x BF16 registers, 4-stage pipeline, hazard detection |
| `rtl/npe_array.sv` | eight NPEs in lock-step plus the wide data-memory port |
| `rtl/loop_controller.sv` | loop sequencer with its own register-file program memory |
| `rtl/data_mem.sv` | 2 Mb dual-width data memory (32-bit port A, 128-bit port B) |
| `rtl/inst_mem.sv` | 256 Kb RISC-V instruction memory |
| `rtl/noc_fifo.sv`, `rtl/noc_router.sv` | five-port label-routed mesh router with input FIFOs |
| `rtl/core_bus.sv` | decoder for the RISC-V data port |
| `rtl/seneca_core.sv` | one tile: everything above, minus the RISC-V itself |
| `rtl/seneca_array.sv` | top: `MESH_X` x `MESH_Y` tiles (default 8 x 8) |
| `tb/*.sv` | testbenches; `tb/bf16_ref_pkg.sv` is the real-number BF16 reference |

The RISC-V controller is an existing open-source RV32 core (Ibex). It is not
included. Each tile brings out its instruction-fetch port, its data port and
an interrupt, so an Ibex instance can be wired on directly. The testbenches
instead drive these ports with bus-functional tasks.

## The tile

```
            mesh N/E/S/W links
                   |
             +-----------+   eject FIFO   +-----------+
             | noc_router|--------------->|           |
             | 5 in-FIFOs|<---------------|  core_bus |<==== RISC-V data port
             +-----------+  (core input)  |           |
                                          +-----------+
                                            |   |   |
                 routing-table writes ------'   |   '---- port A (32 b)
                                                |             |
                                  +-----------------+   +-----------+
                                  | loop_controller |   | data_mem  |
                                  |  program, AR,   |   |  2 Mb     |
                                  |  PARAM, stack   |   +-----------+
                                  +-----------------+         | port B (8 x 16 b)
                                          | instr + address   |
                                  +---------------------------------+
                                  |  npe_array: NPE0 ... NPE7       |
                                  +---------------------------------+
```

The data memory holds the weights and neuron states. Both ports see the same
storage:

- Port-B word `w` is 128 bits. Lane `i` (bits `16i+15:16i`) belongs to NPE `i`.
- Port-A word `k` is the 32-bit slice `k mod 4` of port-B word `k / 4`.

So the RISC-V sees NPE lanes `2j` and `2j+1` of port-B word `w` at byte
address `16w + 4j`. Both ports read synchronously, one cycle after the request.

## Control hierarchy in practice

A fully connected layer, updated event by event, looks like this on one core:

1. A spike arrives. The RISC-V reads it from the eject FIFO (address `0x6_0000`).
2. It writes three parameters into the loop controller: the spike value, the
   port-B address of that input's weight row, and the address of the state words.
3. It writes 1 to the loop controller's control register.
4. The loop controller runs a program like this one:

   ```
   SETAR ar0 = PARAM1          ; weight pointer
   SETAR ar1 = PARAM2          ; state pointer (load)
   SETAR ar2 = PARAM2          ; state pointer (store)
   NPE   LDI r2 = PARAM0       ; spike value, same in all NPEs
   LOOP  4 instructions, N times
     NPE LD  r1, [ar0++]
     NPE LD  r3, [ar1++]
     NPE MAC r3 += r1 * r2     ; binary spikes: ADD r3 = r3 + r1
     NPE ST  r3, [ar2++]
   END                         ; waits for the NPE pipelines to drain
   ```

5. `irq` pulses. The RISC-V may then run a threshold program, where `THR` sets
   each NPE's fire flag and writes back the reset value. It reads the eight
   fire flags from the status register and sends one packet per fired neuron.

Each pass of the loop updates 8 neurons. The RISC-V's cost per spike is a
handful of bus writes, whatever the layer size.

## NPE pipeline and instruction set

Every NPE has 16 BF16 registers and the same four stages:

| stage | work |
|---|---|
| S1 | read `rs1`, `rs2` (and `rd` for MAC). An LD, LDQ or ST uses port B in this cycle: the array drives the address, and store data is `rs1`. |
| S2 | BF16 multiply. LD and LDQ data return from memory. |
| S3 | BF16 add or subtract, compare, result select |
| S4 | write `rd` |

There is no forwarding. An instruction that reads a register written by an
instruction still in S1 to S3 is held at issue. All NPEs see the same
instruction, so they stall together. The array's `in_ready` goes low and the
loop controller waits. Two dependent instructions back to back cost three
bubble cycles. Independent instructions issue one per cycle.

| op | code | effect (per NPE) |
|---|---|---|
| NOP | 0 | nothing |
| LD  | 1 | `rd <- mem[addr].lane` |
| ST  | 2 | `mem[addr].lane <- rs1` |
| LDI | 3 | `rd <- imm` |
| ADD / SUB / MUL | 4 / 5 / 6 | `rd <- rs1 op rs2` |
| MAC | 7 | `rd <- rd + rs1*rs2`, rounded after the multiply and after the add |
| MAX | 8 | `rd <- max(rs1, rs2)` (ReLU with `rs2 = 0`) |
| THR | 9 | `flag <- rs1 >= rs2`; `rd <- flag ? 0 : rs1` |
| LDQ | 10 | `rd <- bf16(int)`, where the integer is a signed 4-bit nibble (`imm[2] = 0`, nibble `imm[1:0]`) or a signed byte (`imm[2] = 1`, byte `imm[0]`) of `mem[addr].lane` |

LDQ is how low-resolution weights are used. A lane can hold four 4-bit or
two 8-bit weights, so a 128-bit port-B word holds 32 or 16 of them. The
integer becomes an exact BF16 number in S3. Any weight scale is folded into
the other operand, usually the spike value.

BF16 rules:

- Rounding is to nearest, ties to even.
- Subnormal inputs and results are flushed to zero.
- Overflow gives infinity.
- `inf - inf` and `inf * 0` give the quiet NaN `0x7FC0`.

## Loop controller

The program memory has 32 entries of 47 bits. Each entry is written as two
words: the low 32 bits, then the upper 15.

| bits | 46:44 | 43:40 | 39:36 | 35:32 | 31:28 | 27:25 | 24 | 23:16 | 15:0 |
|---|---|---|---|---|---|---|---|---|---|
| field | op | NPE op | rd | rs1 | rs2 | ar | psel | inc | imm |

| op | code | meaning |
|---|---|---|
| END | 0 | wait until the NPEs are idle, set `done`, pulse `done_irq` |
| NPE | 1 | issue the NPE op with `addr = AR[ar]` and `imm = psel ? PARAM[imm] : imm`; then `AR[ar] += sign-extended inc` |
| LOOP | 2 | run the next `inc` instructions `imm` times (0 skips them) |
| SETAR | 3 | `AR[ar] <- psel ? PARAM[imm] : imm` |
| ADDAR | 4 | `AR[ar] <- AR[ar] + imm` |

Loops nest up to four deep and use a hardware stack of (start, end, remaining
count).

- Several loops may end on the same instruction. The controller walks the
  stack from the innermost loop outward, pops finished loops, and jumps back
  for the first one that still has iterations left.
- The jump back costs no cycle.
- A zero-count loop and a LOOP instruction must not be the last instruction
  of an enclosing loop.

Register map (word index as seen from the RISC-V at `0x4_0000 + 4*index`):

| index | register |
|---|---|
| `0x00-0x3F` | program entry `index/2`, low (even) or high (odd) half |
| `0x40-0x47` | PARAM0-7 (16 bits) |
| `0x48-0x4F` | AR0-7 (16 bits) |
| `0x50` | write bit 0 = start at entry 0. Read: `{npe_flags[7:0], 6'b0, done, busy}` |
| `0x51` / `0x52` / `0x53` | NPE instructions issued / cycles stalled on NPE hazards / loop jumps (cleared at start) |

## Spike packets and routing

A packet is one 32-bit flit: `{label[5:0], neuron_id[9:0], value[15:0]}`. The
value is a BF16 number. For binary spikes the receiving program ignores it.

Each router has five ports: 0 core, 1 North, 2 East, 3 South, 4 West. Each
input has a 4-deep FIFO. The head of each FIFO looks up
`table[input port][label]`, a 5-bit output set (bit `i` = port `i`).

- Each output port picks one of the heads that still want it, round-robin,
  and sends it when the link is ready.
- A head that wants several ports sends each copy as soon as that port is
  free. It leaves its FIFO when the last copy has gone.
- An empty set drops the packet. The router's `drop[i]` output pulses.

Deadlock rules:

- A FIFO's `in_ready` depends only on its fill level. No combinational path
  runs from one router through another.
- The mesh is not protected against routing cycles. Table entries must not
  send a label around a loop.

Tables reset to empty. The RISC-V writes entry `{port, label}` at
`0x5_0000 + 4*(port*64 + label)`.

For example, a layer spread along a row is reached from the West by entries
`(West, L) -> {Core, East}` on every core but the last, and
`(West, L) -> {Core}` on the last.

## RISC-V data-port map

The protocol is Ibex's: hold `req`, `we`, `addr` and `wdata` until `gnt`.
`rvalid` and `rdata` follow one cycle later.

| byte address | target |
|---|---|
| `0x0_0000-0x3_FFFF` | data memory port A |
| `0x4_0000 + 4i` | loop controller register `i` |
| `0x5_0000 + 4i` | routing-table entry `i` (write only) |
| `0x6_0000` | write: send a packet (`gnt` waits while the router's core FIFO is full). Read: take the oldest received packet, 0 if none |
| `0x6_0004` | read `{send FIFO has room, packet waiting}` |

## The mesh

`seneca_array` places core `(x, y)` at index `y*MESH_X + x`, with `y = 0` the
northern row. It links each East port to the West port of the core to the
right, and each South port to the North port of the core below.

The border links come out as `north_*[x]`, `south_*[x]`, `west_*[y]` and
`east_*[y]`. Inputs such as sensor spikes enter there, and results leave there.

Every core's RISC-V ports come out as arrays indexed by core.

## How far this follows the published architecture

These parts follow the published architecture:

- the array of tiles with one router each, in a mesh;
- label-based (source-based) routing with tables indexed by input port and
  label, whose entries are output-port sets including the core;
- per-core 256 Kb instruction memory and 2 Mb data memory, with a 32-bit
  RISC-V port and a 16-bit-per-NPE port;
- eight BF16 NPEs running one instruction stream, with a 4-stage pipeline
  that suffers on hazards;
- a loop controller with a register-file program memory that handles loop
  indices, nesting and address calculation;
- the RISC-V / loop controller / NPE hierarchy.

Choices of this design, where the description is silent:

- every encoding: the NPE and loop-controller instruction sets, the packet
  format and the bus map;
- register counts, loop depth and FIFO depths;
- rounding and special-value rules;
- multicast handling in the router;
- the dual-port address mapping;
- the 8 x 8 array size, read from a platform drawing of four 4 x 4 groups.

Not built:

- The RISC-V core itself (an existing design).
- Flex-point parameters, and integer or flex-point arithmetic, in the NPEs.
  Integer weights are only loaded (LDQ) and converted; all arithmetic is
  BF16. An LDQ still reads a whole port-B word, so 4-bit weights save memory
  space but not memory energy.
- The further accelerators that later versions of the architecture added.

Spike grouping, event-driven depth-first convolution and hard attention are
RISC-V software techniques. The hardware here can run them, and grouping is
just a loop program that loads the states once and applies several spikes.
None of them is part of this RTL.

## Simulating

Everything runs on plain Verilator 5. Each testbench prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/seneca_pkg.sv tb/bf16_ref_pkg.sv tb/tb_seneca_array.sv \
    --top-module tb_seneca_array -Mdir obj_array
obj_array/Vtb_seneca_array
```

Use `+verilator+seed+N +verilator+rand+reset+2` to change the random stimulus
and the initial values of unreset state.

| testbench | what it checks |
|---|---|
| `tb_npe` | every op against the real-number model on random operands; a dependent store waits exactly three cycles, a partly overlapped one two; overflow, flush to zero, cancellation, THR flag |
| `tb_npe_array` | an FC update for a graded spike across 8 lanes; one-per-cycle issue; stalls; fire flags |
| `tb_loop_controller` | nested loops sharing an end instruction, address post-increment, ADDAR, parameter immediates, the exact issued stream and cycle count, then the same under random NPE back-pressure |
| `tb_data_mem`, `tb_inst_mem` | both ports against a model at full size: lane placement, read latency, same-cycle write rule; fetch during a load |
| `tb_noc_router` | random traffic with multicast and drops; blocked outputs; partial multicast; FIFO full |
| `tb_seneca_core` | a full-size tile driven over the bus: memories, loop-back and mesh packets, backpressure, drops, graded and binary FC updates, interrupts |
| `tb_seneca_array` | end to end on the default 8 x 8 array at full memory sizes (see below) |
| `tb_kws_layer` | a 390 x 256 fully connected layer in one full-size core, 40 graded spikes, processed one by one, grouped four at a time, and with 4-bit weights (a quarter of the memory); all exact against their model; grouping halves the memory accesses (measured: 38 % fewer cycles) |

`tb_seneca_array` runs two network layers on five cores:

- Eight graded input spikes enter at the West border of row 1.
- The routers multicast each spike into the four layer-1 cores.
- Those cores update 64 neurons with MACs and test thresholds.
- Fired neurons send binary spikes over two hops to one layer-2 core.
- The layer-2 core adds weights, fires, and sends its results out of the
  East border.

A real-number model predicts every flag, state and output. The test counts
multicast copies, drops, link and border backpressure, NPE stalls, loop
jumps, graded and binary updates and interrupts. It fails if any of them
never happened. It builds in under a minute and runs in about a second.

Each testbench has a watchdog. Numbers in the testbenches come from
`$urandom`. The BF16 reference computes in double precision and rounds once,
so it checks the RTL's rounding independently of its bit-level algorithm.

## Known limits

- NaN inputs are not modelled beyond the `inf - inf` and `inf * 0` cases.
  `THR` and `MAX` treat `+0` and `-0` as equal.
- The data memory is a behavioural array standing in for SRAM macros.
- The loop controller reads its program combinationally from flip-flops, as
  a register-file memory would.
- Routing cycles are not detected.
- A packet that arrives for a label whose table entry is empty is silently
  dropped. Only the `drop` pulse reports it.
- Verilator reports `SYNCASYNCNET` on `rst_n`. Reset is asynchronous for
  the flip-flops. The same net also appears in the concurrent assertions'
  `disable iff`, which Verilator counts as a synchronous use. This is not a
  circuit problem.
