# TensorDIMM / TensorNode: near-memory embedding lookups and tensor reductions in SystemVerilog

Recommendation models keep huge embedding tables, often far larger than GPU memory. What they do
with them is simple and memory-bound: *gather* a batch of embedding vectors by index, then
*reduce* them element by element (add, subtract, multiply or average). A GPU or CPU that does
this over a narrow memory channel spends most of its time waiting for data.

A **TensorDIMM** is a buffered DDR4 DIMM with a small **near-memory processing (NMP) core** on
its buffer. A **TensorNode** is a memory node of many TensorDIMMs, 32 by default, reached by the
GPU over a fast link. The key idea is the **address map**. Every embedding vector is cut into
64-byte blocks, and consecutive blocks go to consecutive DIMMs. Each DIMM therefore holds the
same 64-byte slice of every vector. So one instruction can be broadcast to all DIMMs. Each NMP
core then works only on its own slice, in its own DRAM, and the node's usable bandwidth grows
with the number of DIMMs instead of being capped by one channel.

This RTL implements the digital part of that design:

- the **TensorNode** broadcast logic;
- for each DIMM, the **protocol engine** that shares the DRAM bus between host and NMP core;
- the **NMP-local memory controller**: instruction sequencer, DRAM command controller and the
  three SRAM queues A, B and C;
- the 16-lane **vector ALU**, with a fixed-point datapath and a single-precision floating-point
  one.

The DDR PHY, the DRAM chips, the NVLink-style link and the GPU are not included. The testbenches
stand in for the DRAM with a behavioural DDR4 model that also checks timing.

## The address map

A node-wide byte address is split as follows. N = `NODE_DIM` = 32, so RB = log2(N) = 5.

| bits (N = 32) | field | meaning |
|---|---|---|
| 2..0 | byte in 8-byte beat | never sent to the DRAM |
| 5..3 | burst column | the 8 beats of one 64 B burst |
| 10..6 | rank | **which TensorDIMM** |
| 14..11 | bank | 16 DDR4 banks |
| 20..15 | column, high part | |
| 41..21 | row | 21 bits, so 2^31 blocks = 128 GB per DIMM |

The field order comes from the published map for 16 ranks, where rank sits at bits 9..6. Here the
rank field is `RANK_BITS = $clog2(NODE_DIM)` wide, so the default 32 DIMMs get a 5-bit rank and
every field above it moves up one bit. `addr_map.sv` does the split. It also gives each DIMM's
local block number, `{row, colhi, bank}`.

The address in an instruction is a **global 64-byte block number** *g*. Block *g* lives in DIMM
`g mod N`, at local block `g / N`. The k-th block of a strided operand that starts at `base` is
`base + k*N + tid`, where `tid` is the DIMM's index. A 2 KB embedding (512 x 32-bit elements) is
therefore exactly one block per DIMM.

## TensorISA

`tdimm_pkg.sv` defines one instruction as the packed struct `tisa_instr_t`:

```
{ opcode[7:0], input_base[39:0], aux[39:0], output_base[39:0], count[39:0] }  // 168 bits
```

| opcode | value | input_base | aux | count | per DIMM |
|---|---|---|---|---|---|
| `OP_NOP` | 0 | – | – | – | nothing; done at once |
| `OP_GATHER` | 1 | tableBase | idxBase (DIMM-local block) | number of lookups | for each lookup e with index x: read `tableBase + x*N + tid`, write `outputBase + e*N + tid` |
| `OP_REDUCE_ADD/SUB/MUL` | 2/3/4 | inputBase1 | inputBase2 | number of pairs | read `in1 + i*N + tid` and `in2 + i*N + tid`, write `A op B` to `out + i*N + tid` |
| `OP_AVERAGE` | 5 | inputBase | averageNum (low 32 bits) | number of outputs | read `in + (i*avg + j)*N + tid` for j < avg, write their mean |
| `OP_FREDUCE_ADD/SUB/MUL`, `OP_FAVERAGE` | 0x12–0x14, 0x15 | as above | as above | as above | the same on IEEE single-precision elements |

Bit 4 of the opcode selects floating point. The sequencer ignores that bit, because the memory
access pattern does not depend on the element format. Only the ALU looks at it.

Opcodes not in the table are treated like `OP_NOP`: the instruction finishes at once.

**Index lists.** An index block is 64 B holding sixteen 32-bit indices. For GATHER, every DIMM
reads index block i from its *own* local block `idxBase + i`. The host must therefore write the
same index list into every DIMM. A count that is not a multiple of 16 uses the first entries of
the last index block.

**Alignment.** Bases must be multiples of N. The sequencer asserts this.

## Inside one TensorDIMM

```
 host DDR port ──► ddr_protocol_engine ──► DRAM command bus (dram_cmd / dram_wdata / dram_rdata)
 instruction ───►        │    ▲
                         ▼    │ NMP commands
                 nmp_mem_ctrl ─┴─ tisa_sequencer ─► dram_cmd_ctrl (addr_map)
                         │ queues A, B (in)   ▲ queue C (out)
                         ▼                    │
                      vector_alu ─────────────┘
```

### Protocol engine: host mode and NMP mode

The DRAM bus has two masters, and `ddr_protocol_engine` switches it between them:

1. **HOST.** The host memory controller's commands are passed to the DRAM, and read data goes
   back to it. The DIMM acts as an ordinary buffered DIMM.
2. **QUIESCE.** An instruction arrives. The host is stalled (`host_ready` low; a waiting host
   command must be held). The engine waits until no host read is still in flight, and until
   `T_SWITCH` cycles have passed since the last host command.
3. **NMP.** The instruction is handed to the NMP controller, which now owns the bus.

After the NMP controller reports done, the host stays stalled for another `T_SWITCH` cycles, so
its first ACT meets tRP after the NMP's final precharge. `nmp_core` sets `T_SWITCH = T_RAS`. That
covers a row the host had just opened, which must stay open for tRAS before the NMP controller's
opening PREA.

### Sequencer (`tisa_sequencer`)

The sequencer turns one instruction into a stream of 64-byte reads and writes. Its states are
IDLE → OPEN → RUN → DRAIN → CLOSE:

- **OPEN** and **CLOSE** issue a precharge-all, so the host always finds the banks closed.
- **RUN** issues the reads and writes.
- **DRAIN** waits for the last result.

Each cycle it chooses one request:

- A **write** of the head of queue C goes first, whenever C holds a result.
- Otherwise a **read** is issued, but only if its queue has room. The check is
  `queue count + reads already in flight to that queue < DEPTH`. Returning data can therefore
  never overflow a queue, and the DRAM never has to be stalled.
- REDUCE alternates reads into A and B. GATHER first reads an index block into the register X,
  then reads the 16 table rows it names into A. AVERAGE reads averageNum blocks into A for each
  output.

Every read carries a tag (`TAG_IDX`, `TAG_QA`, `TAG_QB`). The tag returns with the data and
decides where the data goes.

### DRAM command controller (`dram_cmd_ctrl`)

This is a strictly in-order, open-page controller. One request becomes:

- ACT (if the row is not open) → RD or WR, on a row hit;
- PRE → ACT → RD/WR on a row conflict.

Each bank has counters for tRCD, tRAS, tRP, tWR→PRE and tRTP, and the controller waits on them.
The timings are parameters, in clock cycles: `T_RCD = 4`, `T_RP = 4`, `T_RAS = 9`, `T_WR = 4`,
`T_RTP = 2`. Set them to the DDR4 speed bin and clock you target.

Bus timing:

- One command per cycle, and one 64-byte burst per cycle.
- Write data travels in the same cycle as WR.
- Read data returns on `dram_rvalid`, a fixed number of cycles later. That number is set by the
  DRAM, not by this controller.
- Up to `MAX_RD` reads may be in flight. A FIFO of tags records them in order.
- Refresh is not generated.

### SRAM queues and vector ALU

A, B and C are `sram_queue` FIFOs of `DEPTH = 8` entries of 64 B, so 0.5 KB each. That is the
size that covers 25.6 GB/s of DRAM bandwidth over about 20 ns of latency. The storage is a plain
register array.

`vector_alu` has 16 lanes of 32-bit two's-complement fixed point. `FRAC_BITS` sets where the
binary point is; the default is 0, i.e. integers. Its behaviour by operation:

- **GATHER:** copies A to C.
- **REDUCE:** pops one A and one B when both are present and C has room, and pushes `A op B`.
  Add and subtract wrap. Multiply keeps bits `[FRAC_BITS +: 32]` of the 64-bit product.
- **AVERAGE:** sums averageNum blocks in a 16 x 32-bit accumulator, with 32-bit wrap. It then
  pushes `sum / averageNum`, a signed division that truncates toward zero. averageNum = 0 is
  treated as 1.

The floating-point operations use the same handshakes and the same accumulator register. Their
arithmetic is in `vector_fpu`, 16 lanes of the functions in `fp32_pkg`:

- Rounding is to nearest, ties to even.
- Subnormal inputs are read as zero, and results below the normal range become a signed zero.
- Any NaN input gives `0x7FC00000`. Overflow gives infinity. `inf - inf` and `0 * inf` give NaN.
- Subtraction is addition with the sign of B flipped.
- FP AVERAGE adds the blocks one at a time in arrival order, rounding after each add. It then
  divides by the exact integer averageNum. It does not multiply by a rounded reciprocal.

Both datapaths are single-cycle and combinational. The floating-point adder, the multiplier and
the 59-by-32-bit mantissa divider are deep logic. A design aiming at a high clock would pipeline
them; this RTL does not. Each lane has its own divider, so a 32-DIMM node holds 512 of them. That
makes a gate-level synthesis of the whole node slow and memory-hungry. The rest of the node is
small: without the floating-point lanes, the 32-DIMM node is about 25,000 generic cells and 67,000
flip-flop bits, plus the queue memories.

## TensorNode: broadcast and completion

`tensor_node` is the top module. It has NODE_DIM `nmp_core`s, each with `tid` = its position.

An instruction on `isa_valid/isa_instr` is offered to all cores at once. Cores take it in
different cycles, because each first drains its own host traffic. The node keeps a bitmask of the
cores that have taken it. It raises `isa_ready` in the cycle the last core takes it. It then keeps
a bitmask of the cores still running, and pulses `done` when the last one finishes. `busy` is high
in between.

Its ports are plain arrays indexed by DIMM:

- `host_cmd / host_wdata / host_ready / host_rvalid / host_rdata`: the host side of each DIMM;
- `dram_cmd / dram_wdata / dram_rvalid / dram_rdata`: each DIMM's DRAM;
- `nmp_mode`: which DIMMs currently have their bus in NMP mode.

`host_rdata` is the DRAM read data passed straight through, as in a buffered DIMM. Synthesis
therefore reports those bits as wired to an input.

## Throughput, as measured in simulation

These figures were measured with the DRAM model at CL = 5:

- **GATHER and AVERAGE:** one read per cycle on row hits.
- **REDUCE:** about 3 cycles per pair on row hits, for two reads plus one write. 64 pairs took
  269 cycles, including 16 first-touch bank activations.

Bank conflicts cost a full PRE-ACT-tRCD sequence, because the controller is in order. This
happens when operands share a bank but sit in different rows, and it is the main place where
this controller is simpler than a real one.

## How far it follows the published design

Taken from the published design:

- the block structure (protocol engine, NMP-local memory controller with input queues A, B and
  output queue C, 16-wide vector ALU with fixed-point and single-precision parts);
- the rank-interleaved address map;
- the three instruction types and their address formulas;
- broadcast to every DIMM;
- 32 DIMMs;
- 0.5 KB queues;
- 64-byte ALU operands.

Choices made here, where the published design gives no detail:

- instruction encoding and field widths (8-bit opcode, 40-bit fields), and a separate
  valid/ready instruction port;
- how host and NMP traffic hand over the bus (QUIESCE and T_SWITCH);
- the in-order open-page controller and its timing values; no refresh;
- the credit rule for reads and write priority;
- precharge-all at the start and end of each instruction;
- index lists stored once per DIMM; partial index blocks;
- the fixed-point format, the truncating divider, and averageNum = 0 treated as 1;
- a single clock for everything. The published ALU runs at 150 MHz next to DDR4-3200; here one
  64 B burst and one ALU result per clock are modelled.

Differences to be aware of:

- The floating-point unit is only named in the published design. Its opcode encoding, rounding
  and special-case rules are this design's.
- The published AVERAGE pseudo code clears a 256-bit register, but the operand registers are
  64 bytes. The accumulator here is 512 bits.
- The published map is drawn for 16 ranks; the rank field here is widened for 32.
- Embeddings larger than NODE_DIM x 64 B need one GATHER per 2 KB slice.

## Files

| file | contents |
|---|---|
| `rtl/tdimm_pkg.sv` | widths, instruction struct, opcodes, DDR command struct, ALU op mapping |
| `rtl/fp32_pkg.sv` | single-precision add, multiply and divide-by-integer functions |
| `rtl/vector_fpu.sv` | 16-lane floating-point datapath used inside the vector ALU |
| `rtl/addr_map.sv` | address split |
| `rtl/sram_queue.sv` | queues A/B/C |
| `rtl/vector_alu.sv` | 16-lane ALU: queue handshakes, fixed-point datapath, AVERAGE accumulator |
| `rtl/dram_cmd_ctrl.sv` | in-order DRAM command controller |
| `rtl/tisa_sequencer.sv` | instruction FSM and address generation |
| `rtl/nmp_mem_ctrl.sv` | sequencer + command controller + three queues |
| `rtl/ddr_protocol_engine.sv` | host/NMP bus ownership |
| `rtl/nmp_core.sv` | one TensorDIMM's buffer logic |
| `rtl/tensor_node.sv` | top: NODE_DIM cores, broadcast, completion |
| `tb/ddr4_dram_model.sv` | behavioural DRAM: sparse memory, CL, timing checker, command counters |
| `tb/tdimm_tb_pkg.sv` | test data pattern and reference arithmetic; the float reference goes through `real` and its own rounding routine |
| `tb/tb_<block>.sv` | one self-checking testbench per block |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/tdimm_pkg.sv rtl/fp32_pkg.sv tb/tdimm_tb_pkg.sv rtl/*.sv tb/ddr4_dram_model.sv tb/tb_tensor_node.sv \
  --top-module tb_tensor_node -Mdir obj_tb_tensor_node
./obj_tb_tensor_node/Vtb_tensor_node
```

Replace `tb_tensor_node` to run another testbench. The DRAM model is only needed by
`tb_dram_cmd_ctrl`, `tb_nmp_mem_ctrl`, `tb_nmp_core` and `tb_tensor_node`.

`tb_tensor_node` runs the full 32-DIMM node at default parameters. It takes about four minutes,
most of it compilation. It executes one of each of GATHER (including a partial index block),
REDUCE_ADD, REDUCE_SUB, REDUCE_MUL and AVERAGE. It then runs FREDUCE_MUL, FREDUCE_SUB and
FAVERAGE on floating-point data. It checks every output block against a reference
computed in the testbench, and checks the DRAM timing of all 32 DIMMs. It also makes these
mechanisms happen and counts them:

- host commands in HOST mode;
- host stalls while an instruction is pending;
- cores taking the broadcast in different cycles;
- read-credit stalls, provoked by giving DIMM 0 a slower DRAM;
- NMP precharges.

The other testbenches test one block each with random traffic.
