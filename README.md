# Nexus Machine fabric in SystemVerilog

Sparse and graph kernels defeat classic CGRAs. In a CGRA, instructions are fixed to PEs and data is fetched from a few shared banks. With irregular indexing, loads collide in those banks, and PEs wait on work that is unevenly spread. The Nexus Machine turns this around. The data is distributed over the PEs. The work travels as **active messages** (AMs), and each message carries:

- where it has to go;
- what to do there;
- the operands gathered so far.

A message runs where its data lives. If it passes a PE that is idle, it may also run on that PE as it goes by.

This RTL models a 4x4 Nexus Machine array:

- 16 PEs on a 2-D mesh;
- a router, a 1 KB data memory and a 117-entry AM queue in every PE;
- one AXI4 read port per row for loading;
- a global termination detector that interrupts the host.

The design is synthesisable. Its parameter defaults are the published sizes.

## The active message

One message is 70 bits and travels as a single flit. It is defined as `am_t` in `rtl/nm_pkg.sv`.

| bits  | field  | meaning |
|-------|--------|---------|
| 69:66 | R1     | current destination PE |
| 65:62 | R2     | next destination |
| 61:58 | R3     | destination after that |
| 57:54 | N_PC   | configuration entry for the *next* step |
| 53:51 | Opcode | LOAD, STREAM, ADD, SUB, MUL, DIV, AND, MIN |
| 50    | Res_c  | 1: the message still carries work; 0: final, Result is an address |
| 49    | Op1_c  | 1: Op1 is a value; 0: Op1 is an address in R1's memory |
| 48    | Op2_c  | the same for Op2 |
| 47:32 | Result | result address, or stream output index |
| 31:16 | Op1    | |
| 15:0  | Op2    | |

Bits 57:48 are the message's *configuration* (`cfg_t`). Each PE holds the same 8-entry configuration memory, which is a small program.

A message is not told what to do after its current step. Instead:
- when a PE finishes with a message, it replaces the 10 configuration bits with configuration entry N_PC;
- that entry also provides the next N_PC.

A chain of steps is therefore a linked list in the configuration memory.

Messages come in two kinds:
- **Static AMs** are made in advance. Off-chip memory loads them into each PE's AM queue. They get configuration entry 0 when they are injected.
- **Dynamic AMs** are what a PE emits after it has executed a message.

### What a PE does with a message (`input_ni`)

Execution is sequential within one PE, and the PE handles one message at a time:

1. **Operand fetch.** Each operand whose flag says "address" is read from the local data memory through the decode unit, one word per cycle. It then becomes a value.
2. **By opcode:**
   - **LOAD** only fetches operands.
   - **ALU ops with Res_c=1** compute `Op1 := Op1 op Op2`.
   - **ALU ops with Res_c=0** are *final*. They read `mem[Result]` and write back `mem[Result] op Op1`. Nothing is emitted.
   - **STREAM** reads `count` words (the count is in the Op2 field) from base Op1. It emits one message per word, with `Op1 = word` and `Result = Result + k`.
3. **Destination rotation.** If the message used this PE's memory at R1, the list rotates: R2 becomes R1, R3 becomes R2, and R1 becomes R3. A pure ALU step does not rotate, so the result still reaches the PE that holds the data it needs next.

The published description leaves these choices open, and this design fixes them:
- the exact combination order for final messages;
- the rule that a pure ALU step does not rotate;
- STREAM's use of the Op2 field as the count.

### Example: SpMV (sparse matrix-vector multiply)

Each non-zero `A(i,j)` becomes one static AM, queued at the PE that holds `A(i,j)`. The testbench instead places every value in the static AM and keeps the vector and output in data memory. The configuration is:

| entry | config | step |
|-------|--------|------|
| 0 | N_PC=1, LOAD,  Op1 value, Op2 address | fetch `x[j]` at the PE that holds it |
| 1 | N_PC=2, MUL,   both values            | `A(i,j) * x[j]`, anywhere on the way |
| 2 | ADD, final                            | `y[i] += product` at the PE that holds `y[i]` |

The MUL step has both operands as values and is not final. It is the kind of message that a router may hand to an idle PE on the way (see below).

## Router (`router`, `router_inbuf`, `route_compute`, `sep_allocator`, `crossbar`)

Each PE's router has five ports: 0 Local, 1 N, 2 E, 3 S and 4 W. A message moves one hop per cycle.

**Input buffers** hold 3 registers each. They use On/Off backpressure: a buffer tells its upstream OFF once only one slot is free, and ON again when two are free. The signal takes one cycle to arrive, so the last slot is never needed for a message already in flight. It also acts as the "bubble" that keeps a ring from filling.

**Route computation** is minimal and west-first. A message whose destination lies to the west goes west only. Otherwise it may request every productive direction among E, N and S. The allocator then picks whichever is free, which is how the router avoids congestion.

**En-route execution.** A message may be captured by the router's local output instead of being forwarded. This happens when all of these hold:
- its opcode is an ALU op;
- both operands are values;
- it is not final;
- it did not come from the local port;
- the PE is idle.

The PE then executes it as if it were at R1, except that the destination does not rotate. The result continues to R1.

**Separable allocator.** It works in two stages:
1. Each output picks one of its requesting inputs, round-robin. Outputs whose downstream is OFF are then masked.
2. Each input keeps the lowest-numbered output it won.

The round-robin pointers reset so that input 0 has the highest priority first. A message granted an output leaves its buffer at the same clock edge as it is written downstream.

**Crossbar.** The crossbar is 5x5, and each output's select is one-hot. The published text calls it a 6x5 crossbar in one place, but everywhere else it describes five ports, so this design follows the five ports.

## Processing element (`pe`)

The PE contains four parts:
- the router;
- the **AM network interface** (`am_ni`), with the AM queue (`am_queue`, 117 x 70 bits, first-word fall-through) and the configuration memory (`config_memory`);
- the **input network interface** (`input_ni`), with the ALU (`alu`);
- the **decode unit** (`decode_unit`) in front of the 512 x 16 data memory (`data_memory`).

The decode unit has three modes:
- DEREF reads one word;
- STREAM reads `count` words, one per cycle;
- WRITE writes one word.

It also serves the load and host ports when the PE is not using it.

A dynamic AM always has priority over a static AM when the PE injects.

### Deadlock guard (this design's addition)

A message that reaches its destination must be executed before anything else can leave that PE. Executing it produces a new message, and the new message needs room in the same network. With every PE injecting static AMs, the network can fill until no PE can inject and so no PE can accept. This is protocol deadlock. The first full-array SpMV run of this RTL hung in exactly that way after about 60 executions.

The published design leaves this problem to the compiler, which places data to avoid it, and to runtime timeouts. Two hardware rules are used here instead:

1. **Loopback.** If the message a PE has just produced is addressed to that same PE, it goes straight back into execution and never enters the router. Without this, a PE can wait forever for its own injection buffer.
2. **Gated static injection.** A static AM leaves the queue only when the PE is idle and its router holds no message at all. New work therefore enters the mesh only where there is room. Dynamic AMs are never held back.

With both rules, the SpMV test completed on every random matrix tried. A 64x64 matrix with 535 non-zeros takes about 650–800 cycles. These rules do not prove deadlock freedom for arbitrary programs. A large STREAM fan-out aimed at one busy PE could still fill the mesh. No timeout mechanism is built.

## Loading and the edges of the array

**Loaders.** Off-chip memory is reached through one AXI4 read master per row (`axi_loader`), on the west edge. Each loader serves the PEs of its own row. A load command names:
- the target: AM queue, data memory or scan;
- the column of the PE;
- the destination word address;
- the byte address;
- a burst of 1–16 beats of 128 bits.

The three targets are handled as follows:
- **AM queue:** bits 69:0 of each beat are pushed as one static AM. The loader stalls while that queue is full.
- **Data memory:** each beat supplies eight 16-bit words, lowest first.
- **Scan:** each beat is a 128-bit occupancy vector. The bit-vector scanner (`scanner`) turns it into the indices of its set bits, one per cycle. Bit i of beat b writes `b*128 + i` into successive words. This is how compressed coordinate lists are built from bit-vector metadata.

Only the read channels exist. Results leave through a host read port: `host_rd_en`, `host_rd_pe` and `host_rd_addr` return data one cycle later. The command format and the host read port are this design's own; the published design names only the AXI4 interfaces and their burst size.

**Configuration** is written through one port that writes every PE.

**Termination** (`term_detect`). `done` rises when, with `run` high:
- no PE is busy (executing, holding a message in its router, or with static AMs left);
- no loader is busy;
- and this has held for two consecutive cycles.

`irq` pulses once at that moment.

**Edges.** Mesh links at the array edges are tied OFF and idle. Route computation never sends a message off the array.

## Using it

The top level is `nexus_machine`. To run a program:

1. Reset with `rst_n` (asynchronous, active low).
2. Write the configuration entries.
3. Load the data memories and AM queues through the row ports.
4. Raise `run`.
5. Wait for `irq`.
6. Read results with the host port.
7. Drop `run` before the next tile.

The `ev_*` outputs are per-PE one-cycle pulses, for performance counters:
- `enroute`: en-route capture;
- `exec`: execution start;
- `final`: final write;
- `stream`: stream start;
- `static` and `dynamic`: injections;
- `off`: a cycle with an OFF input.

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`. Build and run one with:

```
verilator --binary --timing --assert --top-module tb_nexus_machine \
  -Irtl -y rtl -y tb +libext+.sv rtl/nm_pkg.sv tb/tb_nexus_machine.sv -o sim
obj_dir/sim
```

`tb/axi_mem_model.sv` is a behavioural AXI4 read slave with latency and gaps. It stands in for off-chip memory.

`tb_nexus_machine` runs two tiles on the full 4x4 array.

**Tile 1: SpMV.**
- A random irregular 64x64 matrix, with a few long rows.
- Static AMs are spread over all 16 queues.
- The vector and outputs are interleaved over the PEs.
- Everything is loaded through the AXI loaders, and a scan load is included.

**Tile 2: STREAM.** Every PE streams four words to another PE's memory.

The test checks every output word. It also counts each mechanism and fails if any never happened:
- en-route executions;
- backpressure;
- static and dynamic injections;
- final writes;
- streams;
- interrupts.

## Sizes and what they imply

| parameter | value |
|-----------|-------|
| array | 4 x 4 |
| AM queue | 117 x 70 bits (1 KB) |
| data memory | 512 x 16 bits (1 KB) |
| configuration memory | 8 entries |
| router buffers | 3 per port |
| AXI data width | 128 bits |
| burst length | up to 16 beats |
| datapath | 16 bits |
| divide by zero | all ones |

One tile therefore holds up to 1872 static AMs and 8192 data words across the array. Larger problems run as a sequence of tiles.

With this opcode set, these kernels map directly:
- SpMV and dense MV;
- element-wise sparse addition;
- dense matrix multiply in blocks;
- sampled dense-dense products;
- one PageRank iteration per run.

These kernels do **not** map:
- Gustavson sparse-sparse multiply with a row length known only at run time;
- BFS and SSSP, which need a message that spawns further messages only under a condition.

STREAM counts must be fixed when the static AMs are built.

## Where this departs from the published design

- **Deadlock:** the loopback and gated static injection described above.
- **Crossbar:** 5x5, where the text says 6x5 in one place.
- **Execution details:**
  - the destination rotates only after a memory access at R1;
  - a final step is `mem[Result] := mem[Result] op Op1`;
  - the STREAM count is in Op2.
- **Priorities:** a dynamic AM takes priority over a static AM; a host or loader access takes priority in the decode unit.
- **Termination:** requires two quiet cycles.
- **Scanner:** emits one coordinate per cycle, for any number of set bits in a 128-bit vector.
- **Off-chip path:** read-only, with this design's own command format and host read port.
- **Not built:** the compiler, the runtime manager, and any timeout-based recovery.
