# Octopus: a spatial accelerator that schedules machine-learning workflows from the inside

A machine-learning *workflow* is a chain of models: a detector feeding a tracker feeding a recogniser, for
example. The number of items passed between stages changes from input to input (one frame holds
two faces, the next holds twenty). A spatial accelerator normally gets a fixed placement of
stages onto processing tiles from the compiler. It stays fixed until a central controller
notices an imbalance. By then, queues have overflowed in one place while tiles idle elsewhere.

Octopus spreads the scheduling over the chip instead. Two kinds of tiles alternate in a
checkerboard:

* **TBUs** (task block units) compute. Each is a 32 x 32 PE array that runs one *task block*
  (TB), a configured piece of one stage.
* **CBUs** (control block units) sit at the corners of every TBU. Each holds the queues of
  packets travelling between TBs. It also runs the *control blocks* (route, merge, expand,
  collapse), and it makes all scheduling decisions.

Scheduling happens at three levels, each with its own hardware:

1. **TBU level, reactive.** A TBU reports when its input has run dry or its output is stuck.
   The CBU answers with the index of a better TB, and the TBU reloads itself.
2. **Cluster level, proactive.** TBUs are grouped into clusters, and all TBUs of a cluster work
   on one *sub-OWG* (a sub-graph of the workflow). When a trigger fires, the cluster's leader
   CBU compares the queued load of each sub-OWG and switches the whole cluster to the longest
   one.
3. **Chip level, diffusive.** At a fixed period, each cluster compares its per-sub-OWG load with
   its four neighbouring clusters. When it holds the largest or second-largest load, it ships
   part of that load to the least-loaded neighbour. Imbalance thus spreads out locally, with no
   central controller and no long transfers.

This repository holds synthesizable SystemVerilog for one Octopus chiplet. At the default
parameters that is 8 x 8 TBUs of 32 x 32 PEs and 9 x 9 CBUs, each CBU with a 4 MB queue store,
plus the two on-chip networks and the DRAM ports on the chip edges. It also holds self-checking
testbenches.

## Geometry and addressing

```
   TF port (0,j)   CBU(1,j) -- CBU(2,j) -- ... -- CBU(9,j)   TF port (10,j)
                      |  TBU(0,j) |  TBU(1,j) |       |
                   CBU(1,j+1) -- ...
```

* CBU grid position (i, j) has network address (i+1, j), with i, j = 0..8.
  * The west TF port of row j has address (0, j).
  * The east TF port of row j has address (10, j).
  * Plain X-then-Y routing therefore reaches both ports. The bottom CBU row has no ports.
* TBU (i, j) touches four CBUs. Its corner d (0 NW, 1 NE, 2 SW, 3 SE) is CBU (i + d%2, j + d/2).
  * That CBU sees the TBU at its own corner 3-d.
  * A TBU exchanges data only with its corner CBUs, and those CBUs are linked by the mesh.
* Two networks with the same mesh shape connect the CBUs:
  * the **data network** carries 52-bit flits `{dx, dy, queue, last, tag[8], data[32]}`;
  * the **control network** carries 48-bit messages (load exchange, load report, cluster
    trigger, cluster configuration).
* The host writes every configuration register through one broadcast bus (`cfg_bus_t`). The bus
  is addressed by unit coordinates and a kind field.

## Packets, streams and queues

The unit of work is a 41-bit word: 32 data bits, an 8-bit tag and a `last` flag that closes a
*stream*.

Each CBU has a **TF queue** (`tf_queue`) with 8 logical FIFOs of 131072 words, about 4 MB of
data in total.
* The FIFOs sit in 4 single-port-per-direction SRAM banks. Queue q lives in bank q mod 4.
* Six clients share it: the four corner TBUs, the network port and the CB engine.
* Each bank grants one push and one pop per cycle, with rotating client priority.
* Pop data appears one cycle after the grant.

Queue numbers are chosen by the configuration. Queue s (for s < 4) holds the input of sub-OWG s;
the load balancer reads the load from it.

The **CB engine** (`cb_engine`) applies up to four rules:
* *route*: send a packet to one of two queues by comparing it with a threshold;
* *merge*: join whole streams from two queues, alternating;
* *expand*: one packet becomes `data[31:28]` packets `{j, data[27:0]}`;
* *collapse*: sum a stream into one packet.

## The TBU and its reconfiguration loop

A TBU (`tbu`) has a data plane and a control plane.

**Data plane:** a data port, a staging SRAM, the compute fabric and a configuration memory with
16 TB configurations.

**Compute fabric** (`compute_fabric`):
* A 32 x 32 mesh in which every PE computes `op(A, B)`.
* A and B each come from the west neighbour, the north neighbour, the PE's register or a
  constant.
* Row r receives each packet r cycles late, so its west and north operands belong to the same
  packet. A packet therefore crosses the array as a diagonal wavefront.
* The result leaves the bottom-right PE ROWS+COLS-1 = 63 cycles later. The fabric is fully
  pipelined.

**Data port** (`tbu_data_port`):
* It prefetches from the input queue of one corner CBU into staging.
* It issues one packet every `ii` cycles. If the configuration sets `dyn`, it also waits
  `data[31:28]` extra cycles, which models data-dependent run time.
* It reserves an output slot before issuing, so the fabric never has to stall.

**Control plane:**
* The **TB status checker** raises a report after 16 consecutive cycles in which the running TB
  is starved (idle) or blocked (congested). Congested wins when both hold.
* The **control port** sends the report to the CBU that owns the current input queue.
* The CBU answers with a configuration index.
* The **TF trigger** then acts on the answer:
  * if the index is new: it waits until the fabric has drained, loads the 32 configuration rows
    one per cycle (clearing PE registers) and restarts;
  * if the index is the same: it only acknowledges, so the status checker can report again.

The CBU side is the **adaptive TBU scheduler** (`adaptive_tbu_scheduler`):
* It keeps up to 8 entries `{config index, input queue, output queue, sub-OWG}`.
* It answers a report with the entry of the cluster's active sub-OWG whose input queue holds the
  most packets and whose output queue is not full.
* When the cluster switches sub-OWG, it pushes a command to every TBU it owns (`own_mask`).

## Clusters: leader, members and triggers

The cluster control unit (`cluster_cu`) of every CBU holds a `cl_cfg_t`:
* an enable bit;
* whether this CBU is the leader;
* the leader's address;
* the leader CBUs of up to four neighbouring clusters (N, E, S, W).

The leader also holds a member table. The CBU owning most of a cluster's TBUs is the natural
leader.

**Trigger.** A CBU raises a cluster trigger in three cases, and at most once per 256 cycles:
* the input queue of the active sub-OWG is empty;
* any queue is full;
* the TBU streams that ended since the last trigger reach a threshold (64).

A member first sends its four sub-OWG loads to the leader (`M_LOAD_RPT`), then an `M_TRIG`
message.

**Decision.** The leader's **proactive cluster scheduler** (`cluster_scheduler`) works as
follows:
* It adds the member loads to its own.
* The **sub-OWG arbiter** (`subowg_arbiter`) picks the largest total. Ties go to the lower index,
  and an all-zero load keeps the current choice.
* The leader applies the choice and broadcasts it to the members (`M_CL_CFG`).
* Every CBU of the cluster then sets its active sub-OWG, and its TBU scheduler reconfigures the
  TBUs it owns.

## Diffusive load balancing

The balancer (`subowg_balancer`) of a leader runs one round every `PERIOD` cycles (default
100000). Each round has three steps:

1. **Exchange.** It sends its four sub-OWG loads to each configured neighbour leader
   (`M_LOAD_XCHG`) and collects theirs. The round waits until all neighbours have answered or
   1024 cycles have passed.
2. **Decide.** For each sub-OWG, it counts the neighbours with a larger load. At most one larger
   neighbour means "largest or second largest". In that case the target is the least-loaded
   neighbour and the amount is `min(VOLUME, (own - min) / 2)`. Halving prevents ping-pong.
3. **Move.** The move goes to the CBU data port (`cbu_data_port`). The port pops the sub-OWG's
   queue and sends the packets over the data network into the same queue of the neighbour
   leader. It keeps going to the end of the current stream when it can, and it stops when the
   queue runs empty. Moves from the balancer take priority over host moves.

The period, volume and range can all be changed by configuration:
* period and volume through `CK_CBU_PARAM` registers;
* range through the neighbour table.

## Memory ports

Each edge has a **TF port control unit** (`tf_port_cu`), which queues host commands for the
eight **TF ports** (`tf_port`) of that edge.
* A *load* command reads `len` DRAM words and sends them as one stream to a queue of any CBU.
  Up to four reads can be outstanding.
* A *store-base* command sets the address at which packets arriving at the port are written.

The host drains results by ordering a CBU to move a queue to a port's address
(`CK_CBU_MOVE`). DRAM itself is outside the design. The testbenches use a behavioural model
(`tb/dram_model.sv`): fixed latency, in order.

## Configuration bus summary (`cfg_bus_t.kind`)

| kind | target | addr | data |
|---|---|---|---|
| `CK_TBU_HDR` | TBU | config index | `tb_hdr_t`: input corner and queue, output corner and queue, `ii`, `dyn`, sub-OWG |
| `CK_TBU_ROW` | TBU | `{index, row}` | 32 x 16-bit `pe_cfg_t` `{op, a, b, wr_reg, imm[7]}`, PE c at bits `16c+15:16c` |
| `CK_TBU_START` | TBU | config index | load and start this configuration |
| `CK_CBU_ENTRY` | CBU | entry | `sched_ent_t` |
| `CK_CBU_RULE` | CBU | rule | `cb_rule_t` |
| `CK_CBU_CLUST` | CBU | 0, or 1+m | 0: `cl_cfg_t`; 1+m: member m `{valid, x, y}` |
| `CK_CBU_MOVE` | CBU | - | `move_t`: source queue, count, destination address and queue |
| `CK_CBU_PARAM` | CBU | 0..3 | period, volume, task threshold, own-mask of TBU corners |

## Where this design departs from the paper, or fills gaps

The paper describes the blocks and the scheduling policies but gives no micro-architecture. The
following are this design's choices:
* PE operation set, operand selection and the wavefront schedule with a single output point;
* configuration format and queue count (8 per CBU, 4 banks);
* router (two-entry input FIFOs, XY routing, round-robin arbitration);
* message formats;
* thresholds: 16 cycles for status reports, 64 tasks and a 256-cycle minimum gap for cluster
  triggers, halving of the load difference;
* 16 TB configurations per TBU;
* 4 sub-OWG slots per cluster;
* one TF port per CBU row on each edge.

Points to know when trusting the numbers:

* **TBU SRAM size.** The default is 4 MB (1M words), following the evaluation setup's statement
  that each TBU has 4 MB. Elsewhere the text gives 4 MB to each CBU, and the area table makes the
  TBU SRAM much smaller than the CBU queue store. The parameter `TSRAM` sets it. The SRAM is used
  as a staging FIFO between the data port and the fabric.
* **No real network layers run on the PEs.** The PEs do 32-bit integer ALU work (add, sub, mul,
  logic, shifts, max, min, with one accumulator register). A TB here is any dataflow of those
  operations, not a convolution or attention kernel.
* **Workload fit.** With 16 configurations per TBU and 4 sub-OWGs per cluster, the evaluated
  workflows (4 to 10 TBs, 3 to 5 sub-OWGs, clusters of 4 or 8 TBUs) fit, except one with 5
  sub-OWGs. Raising `NSUB` in the package would lift that limit.
* **Wafer-scale systems** made of many chiplets are not designed. There are no inter-chiplet
  links.
* **Streams may be split** by a move when local TBUs pop the same queue at the same time. This
  is harmless for packet-wise TBs but would break a collapse that spans the split.
* **Simulation size.** The full chip has 65536 PEs and about 6 Gbit of SRAM arrays. It
  elaborates and lints, but no testbench simulates it at full size: compiling and running a cycle model of 65536 PEs and several gigabits of SRAM would take far longer than a ten-minute test and more memory than a workstation typically has. The end-to-end test uses a
  4 x 2 TBU chip with 4 x 4 PEs and 64-entry queues. Every block's logic is the same at any
  size.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_octopus_top`: end-to-end test of a reduced chip (4 x 2 TBUs of 4 x 4 PEs, two clusters of
  2 x 2 TBUs).
  * Workflow: raw packets go through a CB-engine *expand*, then TB0 (`3x+1`), then a slow,
    data-dependent TB1 (`(x xor 0x55) + 5x`). A second sub-OWG runs TB2 (`x-7`).
  * All input enters the left cluster through one west TF port. The right cluster gets work only
    through diffusive balancing. The host drains results to both edges.
  * Results are checked as a multiset against a software model (count, sum and hash).
  * The test fails if any of these never happened: idle or congested reports, TB switches,
    reconfigurations, member-raised cluster triggers, leader decisions, balancing rounds,
    balancing moves, work in the right cluster, CB engine work, TF port loads.
* `tb_compute_fabric`: the full 32 x 32 fabric with random configurations against a model.
  Also checks the 63-cycle latency.
* `tb_tf_queue`: six clients on random queues against eight model FIFOs. Also checks the
  count, full and empty flags and the bank limits.
* `tb_mesh_router`: five inputs under random back-pressure. Checks the routing port, exactly-once
  delivery and per-pair order.
* `tb_tb_status_checker`: report timing (exactly 16 cycles), priority and hand-shake.
* `tb_subowg_arbiter`: longest queue and tie rule.

To run one with verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/octopus_pkg.sv tb/tb_octopus_top.sv \
          --top-module tb_octopus_top -o sim && obj_dir/sim
```

## File map

`rtl/octopus_pkg.sv` holds all widths, structs and enums. Every other file in `rtl/` holds one
module of the same name:
* chip: `octopus_top`;
* TBU parts: `tbu`, `compute_fabric`, `tbu_sram`, `config_memory`, `tbu_data_port`,
  `tf_trigger`, `tb_status_checker`, `tbu_control_port`;
* CBU parts: `cbu`, `tf_queue`, `cb_engine`, `cbu_data_port`, `adaptive_tbu_scheduler`,
  `cluster_cu`, `cluster_scheduler`, `subowg_balancer`, `subowg_arbiter`, `cbu_control_port`;
* networks and edges: `mesh_router`, `tf_port`, `tf_port_cu`;
* helpers: `sram_2p`, `sync_fifo`.

Each file opens with a description of its function, interface and timing.
