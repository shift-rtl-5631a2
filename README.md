# SHIFT: compute relocation for a wafer-scale chiplet fabric, in SystemVerilog

## The idea

In a large grid of chiplets, moving operands to the chiplet that happens to hold an instruction can
cost more than moving the instruction to where its operands already are. SHIFT makes that choice at
run time. Before an instruction fetches anything, its functional chiplet (FC) sends a 128-bit
*instruction intent packet* (IIP) to the utility chiplet (UC) of its tile and waits. The UC checks
where the operands live. If they are close, it lets the instruction run where it is. If they are far,
it estimates the transfer cost on every candidate FC and, when a candidate beats the original by a
margin, it sends a short command sequence that moves the instruction and its operands there. The
FCs keep computing. All relocation logic lives in the UCs, and the UCs tell each other about congestion
so that busy regions are avoided.

This repository holds the fabric that does this: the UC router, the UC's decision engine, congestion
sensing and gossip, the FC side of the protocol, and a top level that wires a full grid. The FC compute
cores, scratchpads and HBM memory chiplets are outside the RTL. They connect through plain ports, and
the testbenches model them.

## Grid, places and names

- **Tile.** A tile is a 3 x 3 group of chiplets, numbered row-major 0..8:
  - place 4 (the centre) is the UC;
  - place 3 is the tile's memory chiplet (MC);
  - the other seven places are FCs.
- **Tile types.** With `MBW = 1`, tiles in the right half of the grid are high-bandwidth tiles. In
  those, place 5 is a second MC, which leaves six FCs.
- **Default size.** The default grid is 6 x 6 tiles: 36 UCs, 18 x 7 + 18 x 6 = 234 FCs and
  18 + 36 = 54 MCs. This is the multi-bandwidth (MBW) configuration used for the LLM evaluation.
  `MBW = 0` on the same 6 x 6 grid gives the all-general-purpose 252-FC configuration.
- **Node id.** A node id is 10 bits, `{tile[5:0], place[3:0]}`.
- **UC id.** A UC id in an IIP is `tile + 1`, because UC id 0 means "any UC".
- **Operand id.** An operand id is 12 bits, `{tile, place, region[1:0]}` of the chiplet holding the
  data. 0 means "no operand". An operand is used when both its id and its length are nonzero.
- **Slot.** At the top level every per-chiplet port array is indexed by slot `s = tile*9 + place`.

## Packets

`shift_pkg` defines two formats.

**The IIP** (`iip_t`, 128 bits) follows the published bit map:

| Bits | Field |
|---|---|
| [15:0] | instruction id (also the transaction id, TID) |
| [20:16] | instruction type |
| [31:21] | zero pad |
| [41:32] | source FC |
| [51:42] | destination FC (where the result goes) |
| [57:52] | source UC |
| [63:58] | destination UC |
| [75:64] / [87:76] / [95:88] | operand 0: id / offset / length in 64-byte blocks |
| [107:96] / [119:108] / [127:120] | operand 1: id / offset / length |

**The flit** (`flit_t`) carries every message in one piece. It has:
- a packet type;
- destination and source node;
- the TID;
- an auxiliary node (the target named by `SHIFT_TO`);
- a 256-bit payload, the general-purpose packet width.

The packet types are:

| Type | Direction | Meaning |
|---|---|---|
| `IIP` | FC → UC | intent packet in the payload |
| `EXECUTE` | UC → FC | run this instruction here; the IIP is the metadata |
| `SHIFT_TO` | UC → source FC and operand holders | send the instruction or the data to `aux` |
| `KILL` | UC → source FC | drop the local copy |
| `COMMIT` | executing FC → UC, and → source FC when relocated | execution done |
| `INSTR` | source FC → new FC | the instruction itself |
| `RD_REQ` / `RD_DATA` | FC ↔ holder | operand fetch and its data |
| `WR_DATA` | executing FC → destination node | result write-back |
| `GOSSIP` | UC → UC | congestion state of a tile |

## A relocation, end to end

1. The FC's core offers an instruction. `fc_shift_agent` sends its IIP to the tile UC and raises
   `stalled`. It keeps the instruction.
2. The UC router hands the IIP to `shift_engine`, which queues it in an 8-deep FIFO.
3. The engine decodes the IIP. Malformed packets are dropped: nonzero pad, a source that is not an FC
   place, or an operand off the grid.
4. **Filter.** If any used operand sits in the source FC, or anywhere in the source tile, the engine
   sends `EXECUTE` to the source and is done.
5. **Estimate.** Otherwise the latency estimator scores every candidate FC (see below). This yields
   the best candidate cost `C_shift` and the cost of staying home, `C_base`.
6. **Decide.**
   - If `C_shift < C_base - MARGIN`, the engine relocates. In order, one flit per cycle, it sends:
     `SHIFT_TO(aux = new FC)` to the source, `SHIFT_TO(aux = new FC)` to each operand holder,
     `EXECUTE` to the new FC, then `KILL` to the source.
   - Otherwise it rejects the relocation and sends `EXECUTE` to the source.
   - Either way the TID goes into the 16-entry transaction table. While the table is full, the engine
     leaves the next IIP in its FIFO.
7. **Move.** The source FC answers `SHIFT_TO` by sending the instruction (`INSTR`) to the new FC.
   Holders answer by pushing the operand (`RD_DATA`). An MC's link is a port of the top level, so the
   memory model answers for MCs.
8. **Execute.** The new FC collects the `EXECUTE`, the instruction and the operands in any order, in
   per-TID slots. It then runs the instruction on its core and writes the result to the IIP's
   destination node.
9. **Commit.** The executing FC sends `COMMIT` to the UC, which frees the table entry. For a relocated
   instruction it also sends `COMMIT` to the source FC, which leaves the stall.
   - When the instruction stays home, the FC fetches its own operands with `RD_REQ`, executes, writes
     back, commits to the UC and clears its own stall.

## UC router (`uc_router`)

The router has 13 ports:
- 0..8 are the places of the tile (port 4 is the router core, where the engine sits);
- 9..12 are the long-range links to the UCs of the west, east, north and south tiles.

Each input has a `DEPTH`-flit FIFO (default 4). Routing works like this:
- A flit for another tile goes east or west until the column matches, then north or south.
  This is dimension order at tile granularity.
- In the destination tile it leaves on the port of its place.
- A flit for a tile off the grid is sent to the core port, which drops it.

A round-robin arbiter (`rr_arbiter`) per output picks among the inputs that want that output. An idle
router moves a flit from input to output in one cycle. The router also reports its total buffer
occupancy, which is the congestion measure.

All traffic goes through the UC router, including traffic between FCs of the same tile. The
short-range links between FCs and the mid-range links from the UC to the tile corners appear in the
cost model (below) but not as separate wires.

## Decision engine (`shift_engine`)

The engine is the hardware form of the UC firmware. It is a small state machine around five blocks:
- `sync_fifo` holds the queued IIPs;
- `iip_decoder` checks and unpacks an IIP;
- `reloc_predictor` applies the filter and the decision rule;
- `latency_estimator` scores the candidates;
- `transaction_table` tracks open instructions.

The engine also handles `COMMIT` and `GOSSIP` flits that arrive for the UC. Between decisions it sends
queued gossip messages to the four neighbouring UCs.

Timing:
- A local decision takes 4 cycles from FIFO head to `EXECUTE`.
- An evaluated decision adds the estimator's run time.
- Commands leave at one flit per cycle.

Counters report each path taken. `uc_stats` entries:

| Index | Counter |
|---|---|
| 0 | IIPs received |
| 1 | operand in the source FC (L1) |
| 2 | operand in the source tile |
| 3 | evaluated |
| 4 | relocated |
| 5 | rejected |
| 6 | commits |
| 7 | gossip sent |
| 8 | dropped |
| 9 | congestion events |
| 10 | searches run |

### Filter and decision rule (`reloc_predictor`)

The filter has three outcomes:
- **Local (L1).** A used operand's home is the source FC itself.
- **Local (tile).** A used operand's home is in the source tile.
- **Evaluate.** Anything else.

An instruction with no operands is local. Once the estimator has run, the predictor compares
`C_shift` with `C_base - MARGIN` (`MARGIN` = 1 hop).

### Cost model (`latency_estimator`)

For a candidate FC X:

```
C1 = hops(operand 0 -> X)      0 if operand 0 is unused
C2 = hops(operand 1 -> X)      0 if operand 1 is unused
C3 = hops(source FC -> X)
C_total(X) = max(C1, C2, C3) + OVERHEAD          (OVERHEAD = 1)
C_base     = max(hops(operand 0 -> source), hops(operand 1 -> source))
```

Rules of the search:
- Transfers run in parallel, so the slowest one sets the cost. That is why the cost is a maximum.
- The candidates are the FCs inside the bounding box of the source and the operand holders, outside
  congested tiles. The source itself is not a candidate.
- Candidates are scored lowest grid index first; on a tie the earlier candidate wins.
- A candidate that cannot be reached costs `COST_INF`.
- Each hop count comes from one run of `bidir_search`. A candidate costs up to three searches plus one
  cycle.
- A search takes about half the endpoint distance in cycles, plus two.

### Path search (`bidir_search`)

The network map is the whole chiplet mesh, `3*TILES_X` x `3*TILES_Y` nodes, with three kinds of edge:
- short-range edges between orthogonal neighbours;
- mid-range edges from each UC to the four corners of its tile;
- long-range edges between UCs of adjacent tiles.

A search runs as follows:
1. **Start.** The search takes the bounding box with the two endpoints on opposite corners. It removes
   the masked nodes: MCs and the chiplets of congested tiles. The endpoints themselves are never
   masked.
2. **Grow.** It grows two visited sets, one from each end. In one clock it expands the source side by
   one hop, checks for overlap, expands the destination side by one hop and checks again.
3. **Finish.** The first common node is the meeting point, and the returned cost is the hop count
   through it. If a frontier runs dry, the search reports "not found".

All edges cost one hop. The visited sets are bit vectors, so each expansion is one wide combinational
step. This is the largest logic in the design: at 6 x 6 tiles the map has 324 nodes, one engine per
UC.

### Transaction table (`transaction_table`)

The table has 16 entries keyed by TID:
- It refuses a TID that is already present, and a new TID when it is full.
- `COMMIT` removes an entry. An unknown TID is ignored.

## Congestion sensing and gossip (`traffic_monitor`)

Each UC compares its router's buffer occupancy with two thresholds:
- the tile becomes congested at `CONG_HI` = 12 flits;
- it clears at `CONG_LO` = 4 flits or below.

Each change of state queues a gossip message `{tile, congested, 4-bit sequence}` for the four
neighbouring UCs. A UC that receives a message newer than the one it holds for that tile updates its
congestion map and forwards the message. In this way one change floods the grid once and stops.
`PERIOD` adds a periodic report; it is 0 (off) by default.

The map masks congested tiles from both the candidate list and the path search. The gossip queue is
4 messages deep. A full queue drops new messages and counts the drops.

## FC side (`fc_shift_agent`)

Every FC has an agent between its core and its link to the UC. The agent has three parts.
- **Issue side.** Sends the IIP and holds `stalled` until the commit. It answers `SHIFT_TO` by sending
  the instruction to the named FC, and answers `KILL` by dropping its copy.
- **Executor.** Queues `EXECUTE` commands (2 deep) and gathers the instruction and operands in 4
  per-TID slots. Pieces may arrive before the `EXECUTE`. When everything is present it hands the
  instruction to the core (`exec_valid`, `exec_op0/1` until `exec_done`). It then writes the result
  back and sends the commits.
- **Data holder.** Serves `RD_REQ` and data `SHIFT_TO` from the FC's scratchpad (`spad_rd_*`). It
  stores arriving `WR_DATA` through `spad_wr_*`.

Outgoing flits are chosen by fixed priority: holder, then executor, then issue side. An FC has one
instruction of its own in flight at a time.

## Top level (`shift_noif_top`) and its ports

`shift_noif_top` instantiates one `uc_node` per tile (`uc_router` + `shift_engine` +
`traffic_monitor`) and one `fc_shift_agent` per FC. It wires the short- and long-range links. Its
parameters are `TILES_X`, `TILES_Y`, `MBW`, `DEPTH`, `CONG_HI` and `CONG_LO`.

Per-slot ports:

| Group | Ports | Meaning |
|---|---|---|
| FC core | `fc_issue_valid/iip/ready` | offer an instruction |
| | `fc_stalled` | the FC is waiting on relocation |
| | `fc_exec_valid/iip/op0/op1`, `fc_exec_done/result` | run an instruction |
| FC scratchpad | `fc_spad_rd_valid/op/data` | read, answered in the same cycle |
| | `fc_spad_wr_valid/tid/data` | write |
| | `fc_stats` | issued, executed at home, hosted, shifted away, killed |
| MC | `mc_rx_*` / `mc_tx_*` | the raw flit link of each MC; the memory model answers `RD_REQ` and `SHIFT_TO` with `RD_DATA` and takes `WR_DATA` |
| UC | `uc_congested`, `uc_stats` | each UC's congestion map and counters |

Entries of slots that are not of the port's kind are unused: inputs are ignored and outputs are zero.
Reset is active-low and asynchronous. There is one clock.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a `TB_RESULT checks=N failures=M`
line and has a watchdog. Reference models shared between testbenches are in `tb_ref_pkg`: a
breadth-first search over the same map, and the cost model.

| Testbench | What it checks |
|---|---|
| `tb_sync_fifo` | random push/pop against a queue model, including full and empty |
| `tb_rr_arbiter` | one grant, fairness, rotation |
| `tb_uc_router` | random traffic on all 13 ports of a middle tile: every flit leaves once on the port that dimension-order routing names, in order per input/output pair |
| `tb_iip_decoder` | field extraction and every drop rule |
| `tb_reloc_predictor` | the three filter outcomes and the margin rule |
| `tb_bidir_search` | hop counts against breadth-first search, with random masks |
| `tb_latency_estimator` | best candidate and costs against the model |
| `tb_transaction_table` | insert, duplicate, full, commit, against a model |
| `tb_traffic_monitor` | thresholds, hysteresis, sequence numbers, forwarding |
| `tb_shift_engine` | exact command flits for local, relocated and rejected IIPs against the model; table-full stall; gossip in and out |
| `tb_fc_shift_agent` | the agent as source, executor at home, host of a relocated instruction and data holder |
| `tb_uc_node` | a corner UC driven from all ports: local, relocated and rejected paths, commits, gossip, and congestion raised by blocking an output |
| `tb_shift_noif_top` | end to end on 3 x 3 tiles (below) |
| `tb_shift_noif_top_full` | the same at the default 6 x 6 MBW size |

### End-to-end testbenches

The end-to-end testbenches model every FC core, scratchpad and MC:
- a scratchpad word is a function of the operand id;
- the result is a function of the operands.

So every result written back can be checked. They run two phases:
1. **Mixed.** Six random instructions per FC. Operands are placed in the FC, its tile or far tiles.
2. **Hotspot.** One MC holds back its answers for 600 cycles, so its UC becomes congested and gossips.

They check that:
- every instruction commits exactly once with the correct result at the correct node;
- each counter agrees with the testbench's own counts;
- each mechanism was exercised at least once: stall, local L1, local tile, evaluated, relocated,
  rejected, hosted, killed, congestion event and gossip.

A 3 x 3 run issues 456 instructions, of which 46 are relocated and 236 evaluated but rejected.
The default-size run (6 x 6 tiles, 234 FCs) issues 1872 instructions. Of these, 236 stay home for
an L1 operand and 309 for a tile operand. The other 1327 are evaluated, with 528 relocated and 799
rejected. The run also records 8 congestion events and 557 gossip messages. It passes 7502 checks
with no failures. On one thread it simulates in about 100 s of wall-clock time, after a build of about 7 minutes.

### Fault tests

Each block was also checked against a deliberately broken copy, and its testbench catches each one.
Examples:
- a FIFO count that ignores simultaneous push and pop;
- an arbiter that never rotates;
- a router that sends east traffic west;
- a missing west long-range edge in the search;
- an `EXECUTE` always sent to the source;
- a missing commit to the source FC.

## Parameters and where their values come from

| Parameter | Default | Source |
|---|---|---|
| `TILES_X` x `TILES_Y` | 6 x 6 | 36 UCs of the MBW configuration |
| `MBW` | 1 | 54 MCs of the MBW configuration |
| IIP width and fields | 128 bits | the published IIP layout |
| payload width | 256 bits | general-purpose packet size |
| router `DEPTH` | 4 | design choice |
| IIP FIFO | 8 | design choice |
| transaction table | 16 | design choice |
| `MARGIN`, `OVERHEAD` | 1 hop each | design choice |
| `CONG_HI` / `CONG_LO` | 12 / 4 | design choice; 12 is reachable with 13 inputs of depth 4 |
| agent `SLOTS` / `TASKQ` | 4 / 2 | design choice |

## Where this design departs from the SHIFT description

- **Cost is a maximum, not a sum.** One cost equation in the description sums the transfer costs. Its
  algorithm, and its definition of latency as the slowest transfer, use the maximum. The maximum is
  built.
- **"Local" covers the whole tile.** The filter treats an operand anywhere in the source tile as local.
  The algorithm names only the tile's MC; the prose says "the tile's memory space".
- **One channel.** There is no escape virtual channel and no adaptive routing. Routing between tiles is
  fixed dimension order on a single channel, and every message is one flit. Simulations never
  deadlocked, but freedom from deadlock is not proven.
- **Unit edge costs.** All links cost one hop. Per-range link latencies and bandwidths are not modelled.
- **The path is not used for routing.** The search returns the cost and the meeting node. Packets
  still follow dimension order.
- **No MLP predictor.** The optional learned per-hop predictor is not built.
- **No prefetch.** The IIP prefetch by the UC core when idle is not built.
- **No link utilisation.** Congestion is measured by buffer occupancy only, not by link utilisation.
- **Guessed layout details.** Which tiles are high-bandwidth, and where the second MC sits, are not
  given. This design uses the right half of the grid and place 5. The high-bandwidth figure shows a
  different tile split from the configuration table; the table's 234/36/54 counts are followed.
- **The node id split is a guess.** The IIP's note on the 10-bit FC id is ambiguous. This design uses
  6 bits of tile and 4 bits of place.
- **Nothing outside the fabric.** The FC compute cores, scratchpads, HBM chiplets, SerDes/PHY links and
  the router's programmable core are outside the RTL. The testbenches model the first three at their
  ports.

## Workload fit

At its defaults the design is the MBW configuration exactly: 234 FCs, 36 UCs and 54 MCs. The smaller
random-traffic configurations all fit on it:

| Configuration | FCs | UCs | Tiles |
|---|---|---|---|
| A | 7 | 1 | 1 |
| B | 14 | 2 | 2 |
| I | 28 | 4 | 4 |
| II | 63 | 9 | 9 |
| III | 84 | 12 | 12 |
| IV | 112 | 16 | 16 |

Their exact all-general-purpose layout is the same RTL with the grid size set and `MBW = 0`.
Configuration V (252 FCs) needs `MBW = 0` on the default 6 x 6 grid.

Instruction counts fit:
- The 100-instruction and 10,000-instruction runs are streamed.
- At most 36 x 16 = 576 transactions are open at once.
- The 16-bit TID allows 65,536 ids.

The LLM benchmarks cannot be placed on this RTL. The parameter counts below come from general
knowledge, not from the SHIFT description:

| Model | Parameters | FP16 weights |
|---|---|---|
| LLaMA-2-7B | 7B | 14 GB |
| GPT3-175B | 175B | 350 GB |
| BLOOM-176B | 176B | 352 GB |

All three are below the 720 GB of HBM in the MBW configuration. But the memory and the compute cores
are outside the RTL, and no instruction traces are available, so running these models is not
simulated. One IIP moves at most two operands of up to 255 x 64 B = 16 KB each.

## Files

- `rtl/`: one module per file, listed by layer:
  - package: `shift_pkg`;
  - building blocks: `sync_fifo`, `rr_arbiter`;
  - UC: `uc_router`, `iip_decoder`, `reloc_predictor`, `bidir_search`, `latency_estimator`,
    `transaction_table`, `traffic_monitor`, `shift_engine`, `uc_node`;
  - FC: `fc_shift_agent`;
  - top: `shift_noif_top`.
- `tb/`: one testbench per module, plus `tb_ref_pkg` (reference models) and
  `tb_shift_noif_top_full` (default size).

Simulate with any IEEE 1800-2017 simulator that supports timing controls in the testbench. For
example, with Verilator:

```
verilator --binary --timing -Wno-fatal rtl/shift_pkg.sv tb/tb_ref_pkg.sv -y rtl -y tb \
          tb/tb_uc_node.sv --top-module tb_uc_node
```
