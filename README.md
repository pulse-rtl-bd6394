# PULSE pointer-traversal accelerator: RTL

SystemVerilog RTL for PULSE, an accelerator that runs pointer traversals
(linked lists, hash chains, B+Tree descents) next to disaggregated memory.
It contains the per-memory-node accelerator and the rack-level routing that
carries a traversal from one memory node to the next.

## What is built

```
pulse_rack                      top: switch routing + NMN accelerators
├── switch_router               range -> memory node map, re-routing, CPU port
└── pulse_accel  x NMN (4)      one accelerator per memory node
    ├── net_stack               packet parse / deparse
    ├── scheduler               workspace states, dispatch, MAX_ITER
    ├── range_xlate             range translation + protection (TCAM function)
    ├── mem_pipeline x NMP (4)  write-back, translate, burst load
    ├── workspace_bank x NLP    iterator workspaces of one logic pipeline
    └── logic_pipeline x NLP (3)
        └── alu                 ADD SUB MUL DIV AND OR NOT, compare flags
```

Shared types and constants are in `rtl/pulse_pkg.sv`.

Not built:
- the CPU-side dispatch engine (compiler, offload decision, retransmission),
  which is software;
- the Ethernet MAC/PHY, TCAM IP, memory interconnect, DDR4 controllers and
  DRAM, which are vendor parts. The memory pipelines' DRAM ports are brought
  out, and the testbenches drive them with a behavioural DRAM model;
- the switch ASIC itself. Only its routing function is built.

## Iterator model and ISA

An offloaded traversal is an iterator with three parts:
- **cur_ptr**: the current pointer;
- **scratch_pad**: 32 64-bit words of state and return values;
- **code**: up to 64 instructions.

Each iteration works as follows:
1. A memory pipeline loads up to 256 B at cur_ptr into the workspace's data
   line. This is the single aggregated LOAD.
2. The logic pipeline runs the code over the workspace.
3. The code ends with NEXT_ITER, which starts another iteration at the new
   cur_ptr, or with RETURN, which sends the response.

Instructions are 64 bits wide: `{op[3:0], cond[2:0], rsv, dst[7:0], a[7:0], b[7:0], imm[31:0]}`.
- An operand specifier `{class[1:0], index[5:0]}` names one of:
  - a scratch_pad word;
  - a data-line word;
  - cur_ptr;
  - the sign-extended immediate.
- Instructions operate directly on workspace state. There is no register file.

| class | instructions | notes |
|---|---|---|
| memory | LOAD, STORE | LOAD imm = bytes to load (≤ 256), executed by the memory pipeline before the code runs; STORE writes a data word and marks the line dirty |
| ALU | ADD SUB MUL DIV AND OR NOT | 1 cycle each; DIV is unsigned, XLEN+2 = 66 cycles, x/0 = all ones |
| register | MOVE | |
| branch | COMPARE, JUMP cond (AL EQ NE LT GE LTU GEU) | forward jumps only; a backward or zero jump ends the iterator as ILLEGAL |
| terminal | RETURN, NEXT_ITER | |

Results may be written to scratch_pad words or cur_ptr. STORE is the only
instruction that writes the data line.

## Packets

Requests and responses use the same 13-beat format of 512-bit beats:
- beat 0 is the header: `req_id`, `cur_ptr`, `iter_cnt`, `status` and `node`;
- beats 1–4 are the scratch_pad;
- beats 5–12 are the code.

`status` takes these values:

| Status | Meaning |
|---|---|
| REQ | New or re-routed request. |
| DONE | RETURN was reached. |
| MAX_ITER | The iteration bound was reached. |
| NOT_LOCAL | cur_ptr is not on this memory node. |
| PROT | Permission or range violation. |
| ILLEGAL | Bad instruction or jump. |
| INVALID | The switch found no memory node for cur_ptr. |

`iter_cnt` travels with the packet, so MAX_ITER counts iterations across
memory nodes.

## Accelerator (pulse_accel)

Parameters and their defaults:
- NLP = 3 logic pipelines;
- NMP = 4 memory pipelines;
- NWS = 7 workspaces;
- NENT = 16 translation entries;
- MAX_ITER = 1024.

Workspace *g* belongs to logic pipeline *g mod NLP*, so the banks hold 3, 2
and 2 workspaces.

**Receiving a request.**
- The network stack takes a request only when a workspace is free. Until then
  it holds `rx_ready` low, so the request stalls.
- It writes cur_ptr, the scratch_pad and the code into the workspace.
- It takes the LOAD size from the code's first instruction.

**Scheduling.** The scheduler tracks each workspace through these states:
`FREE → RX → WMEM → MEM → WLOG → LOG → (WMEM | WTX) → TX → FREE`.
- Dispatch is work-conserving. Any idle memory pipeline takes a waiting
  workspace in round-robin order, and each idle logic pipeline takes one of
  its own ready workspaces.

**Memory pipeline.** A memory pipeline does the following for each job:
- If the line is dirty, it first writes back the loaded beats to the address
  they came from.
- It translates cur_ptr through `range_xlate`. This is a range table where the
  lowest index wins, with read/write permission and limit checks.
- It bursts the line into the workspace.

A translation miss ends the iterator with NOT_LOCAL. A permission or limit
failure ends it with PROT.

**Ending an iterator.**
- A NEXT_ITER after MAX_ITER iterations ends it with MAX_ITER.
- A finished iterator with a dirty line gets one final write-back before its
  response is sent.

**Timing.** Counted in clock cycles, with the 28-cycle DRAM model used by
the testbenches:
- a load job takes 3 + 28 + beats cycles: 32 for one 64 B beat, 35 for a full
  256 B line. At a 250 MHz pipeline clock that is about 140 ns, close to the
  roughly 130 ns per memory access the PULSE evaluation reports;
- logic runs one instruction per cycle (DIV 66). A 6-instruction hash-chain
  step takes 24 ns at 250 MHz; the evaluation reports about 10 ns;
- a single-iteration find, from the first request beat in to the last response
  beat out, takes 67 cycles. That includes 26 cycles of packet transfer.

## Rack (pulse_rack)

The rack has NMN = 4 memory nodes. Switch port 0 is the CPU node, and port
*k+1* is memory node *k*.
- **Switch map.** The switch holds the coarse range → node map (NRANGE = 8
  entries).
- **Node tables.** Each node's `range_xlate` holds that node's fine-grained
  translation.
- **New requests.** A REQ packet goes to the node that owns its cur_ptr.
- **NOT_LOCAL.** The packet is re-routed, as REQ, to the owner of its new
  cur_ptr. Re-routing skips the CPU entirely.
- **No owner.** If no node owns cur_ptr, or the owner is the node that just
  returned the packet, the packet goes to the CPU with INVALID.
- **Finished packets** go to the CPU.
- **Output arbitration.** Each switch output is granted round-robin and stays
  locked for a whole packet.

The top's ports are plain signals, packed structs and unpacked arrays:
- the CPU packet stream (`cpu_in_*`, `cpu_out_*`);
- the switch table write port (`rt_cfg_*`);
- a translation-table write port with one write enable per node (`xl_cfg_*`);
- all 16 DRAM ports, where index *n·NMP+p* is node *n*, pipeline *p*;
- event counters: re-routes, INVALIDs, and per-node iterations and memory jobs.

## Design choices that differ from the described hardware

- **Clock.** One clock for everything. The described hardware runs its
  pipelines at 250 MHz and its network at 322 MHz.
- **Links.** Packets move as 512-bit ready/valid beat streams. The described
  hardware uses Ethernet links.
- **Configuration.** NLP/NMP = 3/4 with 7 workspaces, following the stated
  implementation (η = 0.75). A 1/4 split is also reported as area-optimal for
  the hash-table workload, and it is a parameter change.
- **Sizes not given in the description.** These are this design's choices:
  - scratch_pad of 32 words;
  - code of 64 instructions;
  - MAX_ITER = 1024;
  - translation table of 16 entries;
  - switch map of 8 entries;
  - the instruction encoding.
- **Scheduler.** The scheduling policy is this design's work-conserving
  round-robin.
- **Workspace storage.** Workspaces are stored as 512-bit-beat memories, one
  per region. Fills and packet transfers move whole beats. The execute port
  writes a single 64-bit word of a beat.

## Workload fit (defaults)

| Workload | Per-iteration data | Code | Iterations | Fits |
|---|---|---|---|---|
| Hash-table lookup (web service) | one 64 B node | ~9 instr. | ~48 | yes |
| B+Tree range query, 8 B keys / 240 B values | ≤ 256 B node | ~51 instr. (16-way node search, unrolled forward jumps) | ~25 | yes |
| B+Tree time-series aggregation | ≤ 256 B node | sum/min/max/avg, one final DIV | 38–227 | yes (< 1024) |

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog. Shared testbench
code:
- `tb/pulse_asm_pkg.sv`: the instruction assembler, test programs and packet
  builder;
- `tb/dram_model.sv`: the DRAM model.

| testbench | what it exercises |
|---|---|
| tb_alu | random and corner operands for every op, compare flags, divider latency |
| tb_workspace_bank | every port against a shadow copy, dirty-bit set/clear rules |
| tb_logic_pipeline | programs, jump rules, ILLEGAL cases, cycles per instruction |
| tb_range_xlate | hits, misses, permissions and range overruns on every port against a model |
| tb_mem_pipeline | full and short loads with latency, miss, protection, write-back then load, refused write-back |
| tb_scheduler | timed neighbour models: in-flight bound, iteration counts, MAX_ITER, NOT_LOCAL, write-back job, pipeline ownership, memory utilisation |
| tb_net_stack | packet round trip, back-pressure, LOAD size decode |
| tb_switch_router | routing, re-route, INVALID, per-output packet locking |
| tb_pulse_accel | find/sum/update/illegal/NOT_LOCAL/MAX_ITER, stall, latency, DRAM contents |
| tb_pulse_rack | full-size rack, lists spread over 4 nodes; fails unless stall, back-pressure, re-route, INVALID, MAX_ITER, write-back, ILLEGAL and PROT each occur |

`tb_pulse_rack` instantiates the top with its default parameters.

Each testbench was also run against a copy of its module with one deliberate
bug (for example, swapped jump conditions, or a switch lock that is never
set). Every such copy fails its testbench.

Simulation uses Verilator (`--binary --timing --assert`). For example, from
`tb/`:

```
verilator --binary --timing --assert -I../rtl ../rtl/pulse_pkg.sv pulse_asm_pkg.sv \
  ../rtl/*.sv dram_model.sv tb_pulse_rack.sv --top tb_pulse_rack
```

## Known limitations

- **Lint warnings.** Verilator reports width-truncation warnings where a
  global workspace index is narrowed to a bank-local index. It also reports
  unused bits of packed structs.
- **Iteration order.** Iterations of one iterator run strictly in order. Only
  different iterators overlap.
- **No retransmission.** A lost packet is not recovered.
- **Load alignment.** A LOAD starts at the 64 B boundary at or below cur_ptr.
  Node layouts in the tests are 64 B aligned.
