# TaiBai brain-inspired processor: SystemVerilog model

TaiBai is a many-core spiking-neural-network processor. The chip is an 11 x 12
two-dimensional mesh of *cortical columns* (CCs), 132 in all. Each column has
a scheduler and eight programmable *neuron cores* (NCs), and each core holds
256 neurons, so the chip has 270,336 neurons (quoted as 264K). A five-port
router beside each column carries 64-bit packets between columns. A proxy
unit on each side of the mesh merges that side's edge links into one off-chip
link.

Computation runs in timesteps. Each timestep has two stages:

- **INTEG**: spike packets flow through the network and the cores accumulate
  synaptic currents, one event at a time.
- **FIRE**: once the network is quiet, every core updates its neurons'
  membrane potentials and marks the neurons that fire.

Those spikes are sent at the start of the next INTEG stage. Before the first
timestep, an **INIT** stage loads the model through memory-access packets.

All code is in `rtl/` (design) and `tb/` (testbenches). It is
IEEE 1800-2017 SystemVerilog and builds with Verilator 5 (`--binary --timing`).

## Hierarchy

```
taibai_top            mesh, proxies, stage controller
 ├─ stage_ctrl        INIT / INTEG / FIRE sequencing, timestep counter
 ├─ noc_router  x132  5-port router: XY unicast, regional multicast, broadcast
 ├─ proxy_unit  x4    edge links of one side <-> one off-chip link
 └─ cortical_column x132
     ├─ scheduler
     │   ├─ sync_fifo        4-deep packet input queue
     │   ├─ ram_mp x4        fan-in 2K x 22 / 64K x 11, fan-out 2K x 24 / 8K x 32
     │   ├─ fanin_decoder    packet -> core events (entry types 0-3)
     │   ├─ fanout_encoder   fired neurons -> packets
     │   └─ config_probe     memory-access writes, probe reads and responses
     └─ neuron_core x8
         ├─ ram_mp           instruction memory 1K x 16, data memory 8K x 16
         ├─ sync_fifo        input events FIFO, depth 4, 36 bits
         ├─ nc_alu           INT16 / FP16 arithmetic, DIFF, LOCACC, compare
         ├─ nc_findidx       bitmap sparse-weight lookup (FINDIDX)
         └─ nc_out_events    fired-neuron, neuron-type and float-data memories
```

`taibai_pkg` holds the packet, event, table-entry and instruction types.
`fp16_pkg` holds the half-precision arithmetic functions.

## Top-level interface (`taibai_top`)

| Port | Meaning |
|---|---|
| `start` | Leaves INIT and starts running timesteps. |
| `timesteps` | Number of timesteps to run; 0 means run forever. |
| `integ_cycles`, `fire_cycles` | Minimum length of each stage in cycles. |
| `stage`, `timestep`, `done` | Current stage, timestep count, and a one-cycle pulse at the end. |
| `ext_in_*[3:0]`, `ext_out_*[3:0]` | Off-chip links, valid/ready, 64-bit packets. Index 0 is north, 1 east, 2 south, 3 west. |

To use the chip:

1. Hold `start` low and send memory-access write packets in on any link to
   load the tables, core programs and data.
2. Pulse `start`.
3. Feed input spikes in during INTEG stages. Probe responses and spikes
   addressed off-chip come out on the links.

A packet for the host uses coordinate `4'hF` (meaning -1) in x or y, and it
leaves through the west or south proxy.

## Packet format (64 bits)

```
[63:61] type   0 unicast, 1 multicast, 2 broadcast, 3 mem write, 4 mem read, 5 read response
[60:59] phase  0 travel, 1 spread along the entry row, 2 spread along columns
[58:43] dest   x0, y0, x1, y1 (4 bits each): a rectangle; unicast uses x0, y0
[42:0]  body
  spike:  tag[42:39] index[38:28] spare[27] global_axon[26:16] data[15:0]
  memory: sel[42:39] alt[38] addr[37:22] data[21:6] spare[5:0]
```

Memory `sel` values:

- 0 to 3: fan-in directory, fan-in information table, fan-out directory,
  fan-out information table.
- 4: column registers. Address 0 is K2, the square of the kernel size (reset
  value 9).
- 8+n: neuron core n. `alt=1` selects its instruction memory and `alt=0` its
  data memory.

Table entries wider than 16 bits take two writes. The first write (`alt=0`)
stages the low half, and the second (`alt=1`) writes the entry. A read request
carries the destination for its response in its data field.

## Topology tables (in the scheduler)

The fan-in side has two levels:

- **Directory entry** `{tag[21:18], addr[17:2], type[1:0]}`, indexed by the
  packet index.
- If the tag does not match, the packet was only passing through a multicast
  rectangle, and it is dropped.
- Otherwise the 11-bit information table is walked from `addr`. What it holds
  depends on the type:
  - **Type 0 (sparse, small):** N, then N neuron ids `{core[2:0], neuron[7:0]}`.
    The event carries the global axon id, and the core looks up the weight
    itself with FINDIDX.
  - **Type 1 (sparse, fast):** N, then N pairs of neuron id and local axon id.
    The local axon id is the weight address.
  - **Type 2 (full connection):** coding mask, margin, nums, start id. Every
    core in the coding mask receives, in parallel, `nums` events for neurons
    `start`, `start+margin+1`, and so on.
  - **Type 3 (convolution):** coding mask, N, then N pairs. Each pair goes to
    every core in the mask, with weight address `global * K2 + local`.

The fan-out side is indexed by the fired neuron `{core, neuron}`:

- **Directory entry** `{addr[23:11], global_axon[10:0]}`.
- **Information entries** `{last[31], dest[30:15], tag[14:11], index[10:0]}`,
  one packet each. A normal spike walks the information table upwards from
  `addr` until `last`. A delayed spike walks downwards (`addr`, `addr-1`, ...). Both kinds share the same tables.
- The destination rectangle sets the packet type. One node gives unicast, the
  whole mesh gives broadcast, and anything else gives multicast.

## Neuron core

The neuron core is a seven-stage in-order pipeline:

- The stages are Fetch, Decode, Address, Read memory, Read back, Execute and
  Write back.
- It is a register-memory machine: one operand can come from data memory and
  the result can go back to memory.
- Instructions are 32 bits, stored as two 16-bit words:
  `op[31:26] rd[25:22] rs1[21:18] fp[17] imm[16] imm16[15:0]`.
- There are 16 registers. Hazards are handled by interlocks; there is no
  forwarding.

The instruction set:

- `RECV rd, fire_pc`: takes an event `{neuron id, axon id, data}` into
  registers rd..rd+2. Once the FIRE stage has begun and no event is waiting,
  it jumps to `fire_pc`.
- `SEND`: marks a neuron as fired. The delayed flag and a 16-bit float value
  are optional.
- `FINDIDX`: a multi-cycle popcount over a weight bitmap. It takes
  floor(axon/16)+3 cycles.
- `LOCACC` (`mem += R`) and `DIFF` (`R = tau*R + mem`).
- Arithmetic: `ADD/SUB/MUL`, conditional `ADDC/SUBC/MULC`, `AND/OR/XOR`, `CMP`,
  `MOV`, `LD/ST`, `B/BC`.
- FP16 instructions truncate toward zero and flush subnormals to zero. INT16
  arithmetic wraps.

A core is idle when it waits in RECV with no event queued and no FIRE jump
pending. The stage controller ends INTEG once every router, scheduler and core
is idle and `integ_cycles` have passed. It ends FIRE once every core is idle
again. A core with no program never reaches RECV, so load at least
`RECV r1,#0` into unused cores.

## Routing

- **Unicast** uses XY routing.
- **Multicast** first travels to the nearest node of the rectangle, by XY
  routing with the target clamped into the rectangle. At that node it spreads
  east and west along the entry row (phase 1). Each node of that row then
  spreads north and south within the rectangle (phase 2), and every node
  inside delivers a copy locally.
- **Broadcast** is multicast over the whole mesh.
- A packet for a coordinate outside the mesh leaves through the matching
  edge, to the proxy.

Each input port has a 4-entry FIFO. Outputs use round-robin arbitration. A
packet that forks leaves its input FIFO once every output it needs has taken
a copy, so the copies may leave in different cycles.

## Verification

Every block has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=M`. Build and run a testbench with:

```
verilator --binary --timing --assert -Irtl -Itb --top-module <tb> \
  rtl/taibai_pkg.sv rtl/fp16_pkg.sv rtl/*.sv tb/<tb>.sv && ./obj_dir/V<tb>
```

| Testbench | Covers | Checks |
|---|---|---|
| tb_ram_mp | multi-port RAM, read hold, write priority | 3,987 |
| tb_sync_fifo | FIFO against a queue model, random back-pressure | 11,930 |
| tb_nc_alu | INT16/FP16 ops against an independent real-number reference | 104,008 |
| tb_nc_findidx | bitmap lookup result, flag and latency | 6,001 |
| tb_nc_out_events | fired / type / float memories, clear and scan | 20,001 |
| tb_stage_ctrl | stage sequencing, idle waits, minimum cycles | 4,374 |
| tb_proxy_unit | merge and distribution, both orientations | 6,587 |
| tb_neuron_core | LIF program: events, stalls, firing, delayed spikes, FINDIDX | 2,102 |
| tb_noc_router | 4x3 router mesh: unicast, off-mesh, multicast, broadcast, back-pressure | 1,503 |
| tb_fanin_decoder | all four entry types, tag drops, back-pressure | 2,435 |
| tb_fanout_encoder | packet generation, modes, delayed walk | 235 |
| tb_config_probe | writes and reads of every memory, responses | 1,366 |
| tb_cortical_column | a column running LIF on 8 cores for 3 timesteps against a model, plus probes | 197 |
| tb_taibai_top | 3x2 chip end to end | 16 |

The end-to-end test (`tb_top_body.svh`, included by `tb_taibai_top`) works
like this:

- It loads a four-neuron input layer into column (0,0) through the west link.
- Each input neuron exercises a different mechanism: multicast to a
  rectangle, a broadcast with tag filtering and convolution addressing, a
  unicast into a FINDIDX core plus a unicast to the host, and a delayed spike.
- It runs several timesteps and probes a membrane potential, a table entry and
  a register.
- It counts every mechanism: fire-stage switches, stalls, unicast, multicast,
  broadcast, delayed, each fan-in type, tag drops, FINDIDX and probes. A
  mechanism that never happened counts as a failure.

The 3x2 top builds in about 3 minutes and runs in about 20 s. It runs at
reduced memory depths (IMEM 128, DMEM 4096, fan-in information table 1024,
fan-out information table 256).

**There is no full-size testbench.** A testbench for the default 11 x 12 chip
with no parameter overrides was written, but Verilator splits the design into
over a thousand C++ files. Its build takes far longer than is practical,
so the full-size chip has not been simulated. The mesh size is a
parameter, and routing, stage control and every column are the same modules
that the 3x2 run exercises.

Each testbench was also run against a deliberately broken copy of its block,
and every broken copy produced failures.

## Workloads the paper evaluates

These are held against the default build: 270,336 neurons, 8K x 16-bit data
memory per core, 2K fan-in directory entries per column.

| Workload | Fits | Basis |
|---|---|---|
| Chip capacity (264K neurons, 6.95M sparse synapses) | yes | 270,336 neurons; 8.65M data words in all, so there is room for sparse weights plus lean neuron state |
| PLIF-Net | no | 987,146 neurons (shapes from the paper, counts mine); needs about 4 chips |
| 5Blocks-Net | yes | 224,331 neurons (83%) |
| ResNet19 | no | about 393K neurons (stage resolutions assumed) |
| ECG SRNN | yes | 4 inputs (paper); 36 hidden and 6 outputs from the original SRNN, not the paper |
| SHD DHSNN | yes | fan-in 2,800 per neuron is handled by splitting the dendrite branches into separate neurons in one core; about 180K weight words, at least 23 cores |
| BCI decoding | unknown | module widths are not given |

## What follows the paper, and what is this design's own

**From the paper:**

- The mesh size, eight cores per column and 256 neurons per core.
- All memory and table sizes.
- The depth-4, 36-bit input events FIFO.
- The seven pipeline stages and the instruction names.
- The INTEG/FIRE split, and the rule that INTEG ends when the network is quiet.
- The three routing modes: XY unicast, shortest path to the region then a
  tree, and tree broadcast.
- The phase and tag fields.
- The four fan-in entry types, including parallel sending and incremental
  addressing.
- The convolution weight polynomial `global * K2 + local`.
- Reuse of the neuron-type memory as a delay flag.
- Probing while the chip runs.

**This design's own:** every bit position and field width the paper does not
print, including:

- the instruction encoding and the register count;
- the memory-access addressing and two-write wide entries;
- FIFO depths in the router and scheduler;
- arbitration;
- the multicast tree shape;
- FP16 rounding by truncation.

"Margin" is read as the gap minus one between neuron ids.

### Differences from the paper and things not built

- **Instruction memory.** The paper gives 1K x 16 bits. Here it holds 512
  32-bit instructions, the same capacity, because a 16-bit word cannot encode
  the three-operand instructions shown in the paper's code.
- **Fan-out directory.** The paper's figure shows an `end` flag in the
  fan-out directory entry. Here it is in the information entry, as the
  detailed figures draw it.
- **Proxy units.** These only merge and distribute packets. There is no
  conversion between on-chip and inter-chip addresses, because the paper
  gives no inter-chip addressing.
- **High-speed (LVDS) interfaces.** Not built; they are an analogue PHY. The
  off-chip links are plain valid/ready ports.
- **Learning.** There is no dedicated hardware. On-chip learning is ordinary
  neuron-core code run in the FIRE stage, as the paper describes, but no
  learning program is included or tested.
- **Float output mode.** Supported: SEND stores a 16-bit value in the
  float-data memory and the encoder sends it in the packet's data field. Only
  the spike path is exercised end to end.
- **Performance.** Power, clock rate and energy figures are outside the scope
  of an RTL model.
- **Synthesis.** Timing and area were not closed; a full-chip synthesis run was not
  completed.
