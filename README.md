# Learned page and computation remapping for a near-memory-processing cube network

Near-memory processing (NMP) systems execute simple operations such as
`*dest += *src1 OP *src2` inside a network of 3D-stacked memory cubes instead of on the host
processor. Where those operations run, and where their pages live, decides how many network hops
each operand travels. It also decides how evenly the cubes' compute logic is used. A static mapping
cannot follow a program whose access pattern changes over time.

This design adds a hardware agent that learns the mapping while the program runs. At a fixed
interval it reads a compact picture of the system:
- the load and row-buffer hit rate of each cube
- the queue depth of each memory controller
- the recent history of one heavily used page

A small dueling deep Q-network (DQN) then picks one of eight actions. It can move that page
(migration), move where its operations are computed (compute remapping), or change how often
the agent itself is invoked. The reward is whether operations per cycle (OPC) went up or down
since the last decision. Transitions are stored in a replay buffer for training.

The RTL covers everything between the memory network and the host's operating system:
- the per-cube NMP operation tables and status registers
- the four memory controllers (MCs), with their page information caches and compute remap tables
- the migration queue and the DMA engine that copies pages
- the state builder, the reward unit and the interval controller
- the inference engine, the action selection and the replay buffer

The memory network, the DRAM, the host cores and the OS page allocator stay outside and appear as ports.
Weight training (backpropagation) is also outside. The weights are written through a port, and the
replay buffer can be read through a port.

## System shape

- 16 memory cubes in a 4x4 mesh. Cube id `c` has x = `c[1:0]` and y = `c[3:2]`.
- 4 memory controllers at the mesh corners. MC `m` serves the 2x2 quadrant of cubes
  nearest to it: cube `c` belongs to MC `{c[3],c[1]}` and is its slot `{c[2],c[0]}`.
- A page is named by its 22-bit physical frame number, and the frame's low 4 bits give its host cube.
  Migrating a page therefore means choosing a new frame whose low bits name the target cube. The
  OS supplies that frame.
- Hop counts are Manhattan distances on the mesh (`aimm_pkg::hops`).

All shared types and constants are in `rtl/aimm_pkg.sv`:
- features are Q8.8 16-bit fixed point (`feat_t`)
- `action_e`, `nmp_op_t`, `nmp_pkt_t`, `mig_req_t` and `page_info_t`

## Path of one NMP operation

1. The host hands an operation to its MC (`op_valid/op_ready`, one MC per port).
2. The MC queues it (16 entries). If a blocking migration has locked any of its three pages, the
   head of the queue waits. Every waiting cycle is counted in `mc_stall_cycles`.
3. The scheduler (`nmp_op_scheduler`) chooses the compute cube:
   - By default this is the host cube of the destination page.
   - If the compute remap table holds an entry for the destination page, its cube is used instead,
     and the packet is marked `remapped`.
   - The scheduler also gives the hop counts of the three operands to the compute cube.
4. The packet leaves on `pkt_*`. The network model delivers it to the compute cube's NMP-op table
   (`cube_alloc_*`, 512 entries):
   - The table returns a tag.
   - The operands arrive later with that tag (`cube_opnd_*`).
   - When both sources are present, the entry computes `acc + (src1 OP src2)` and offers it on
     `cube_res_*`.
   - A full table refuses new entries, which backs up the network.
5. The ACK returns to the MC with the packet latency (`ack_*`). The MC counts the ACK as a
   completed operation for the OPC reward.
6. Each operation leaves a record in the MC's page information cache. The three updates are
   written one per cycle, so the MC accepts at most one operation every three cycles:
   - an access count
   - a hop count, as a history of the last 8 values
   - the packet latency, when the ACK returns

## The page information cache

Each MC keeps 128 entries. Each entry holds one page's history:
- its accesses, its migrations, and whether it has been written
- its host cube, and the host cube of the first source operand of its latest operation
- four 8-deep histories: hop count, packet latency, migration latency and actions applied to the page

Replacement is least-frequently-used. The cache continuously reports its most-accessed entry
(`top_info`) and the MC's total access count. This "representative page" is the page the agent
observes and acts on.

## Agent loop and its timing

`interval_ctrl` raises `invoke` every 100, 125, 167 or 250 cycles. It starts at 100 cycles. The
INC_INT and DEC_INT actions move it one step up or down, and it stays put at either end.

At an invocation where the state builder and agent are both idle (`sample`), four things happen:
- The reward unit compares this window's OPC with the previous window's. It uses cross
  multiplication, so no division is needed, and gives +1, -1 or 0.
- Each MC's completed-operation counter restarts.
- The state builder starts. It takes the MCs in round-robin order, one MC per invocation, and
  assembles a 78-feature state:

  | features | count |
  |---|---|
  | NMP-table occupancy of each cube | 16 |
  | row-buffer hit rate of each cube | 16 |
  | MC queue occupancy | 4 |
  | global action history | 8 |
  | representative page's access rate (accesses / MC total) | 1 |
  | migrations per access | 1 |
  | hop, latency, migration-latency and action histories, 8 each | 32 |

  The two ratios come from a 32-cycle sequential divider. The state is ready 70 cycles after `sample`.
- The agent accepts the state and runs the Q-network.

  The network has:
  - fully connected layers of 256, 128, 64, 32 and 16 ReLU units
  - a 9-output head: eight advantages and one value
  - output Q = V + A − max(A)

  `dqn_engine` computes it with LANES parallel multiply-accumulate units. For each group of
  LANES output neurons it streams one input per cycle, then spends one cycle adding the bias,
  saturating and applying ReLU. Latency in cycles is
  `Σ_layers ceil(OUT/LANES)·(IN+1) + 2`. That is 582 cycles at the default 256 lanes, and 4018
  cycles at 16 lanes.

  `action_select` takes the arg-max of Q. With probability 26/256 it takes a random action instead
  (epsilon-greedy, using a 16-bit LFSR).

  The transition (previous state, action, reward, new state), 2501 bits in all, is written to the
  replay buffer. That buffer is a ring of 120,736 entries, about 36 MB.

Invocations that arrive while this chain is still busy are skipped and counted
(`skipped_invocations`). At 256 lanes the chain takes about 650 cycles, so the agent effectively
acts every 700 cycles or so. The OPC window is then the time between accepted invocations.

## What the actions do

Each action is applied by the MC whose page was observed (`act_mc`), and concerns that MC's
representative page:

| action | effect |
|---|---|
| DEFAULT | nothing |
| NEAR_DATA | migrate the page to a pseudo-randomly chosen neighbour of its current compute cube |
| FAR_DATA | migrate the page to the cube diagonally opposite its current compute cube |
| NEAR_COMP | compute the page's operations at a neighbour of the current compute cube |
| FAR_COMP | compute them at the opposite cube |
| SRC_COMP | compute them at the host cube of the page's most recent first-source operand |
| INC_INT / DEC_INT | lengthen or shorten the agent interval |

A neighbour move that would leave the mesh is reflected back into it. The current compute cube is
taken from the compute remap table if the page is there, and otherwise from the page's host.
Compute actions write the remap table: 64 entries, fully associative, round-robin replacement.
Every action is also recorded in the page's action history and in the global action history.

## Migration

Data actions place `{page, new_cube, blocking}` on the shared migration queue (128 entries). The
four MCs reach the queue through a fixed-priority arbiter.

A page that has been written is migrated in blocking mode. Its page is locked for the whole copy,
and the MCs hold back any operation touching it. A read-only page is migrated without blocking.

The DMA engine then:
1. asks the OS for a free frame in the target cube (`frame_req`/`frame_gnt`)
2. copies the page's 256 lines of 16 bytes, in chunks of 64 lines, through a 1 KB buffer
   (`mig_rd_*`, in-order responses, `mig_wr_*`)
3. waits for the new host's acknowledgement (`mig_ack`)
4. reports the migration latency to the MC and raises `os_irq` with old and new frame numbers so the
   OS can update the page table
5. for a non-blocking migration only: waits until the old frame has no outstanding accesses
   (`old_frame_busy` low), then returns it to the free pool (`frame_free_valid`)

## Using the RTL

Compile any testbench with plain Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_aimm_top \
        rtl/aimm_pkg.sv tb/tb_aimm_top.sv -o sim && obj_dir/sim

Every testbench prints `TB_RESULT checks=N failures=M` and finishes.

The block testbenches are `tb/tb_<module>.sv`, and the migration queue is tested by
`tb_sync_fifo`. They compare the block against reference values computed independently in the
testbench. Where the design defines a latency, they also check the cycle count.

`tb_dqn_engine` and `tb_rl_agent` run at 16 lanes, to keep the weight load short. The
weight-memory address formula they use is given at the top of `rtl/dqn_engine.sv`.

`tb_aimm_top` runs the whole design at its default sizes: 256 lanes, 512-entry tables and the full
replay buffer. Around the design it models:
- the host
- the network and cubes
- the DRAM row buffers
- the OS and the migration memory

It loads small random weights. Then, after every action, it rewrites the advantage-head biases so
that the greedy choice steps through all eight actions. It checks that each of these happened at
least once:
- all eight actions
- skipped invocations and interval changes
- positive and negative rewards
- blocking and non-blocking migrations, each with a line-exact copy
- frame release and lock stalls
- remapped packets
- a full NMP table
- cube status reports and replay draws

This takes about 270,000 cycles, roughly 20 seconds of simulation.

### Main parameters of `aimm_top`

| parameter | default | meaning |
|---|---|---|
| NMP_ENTRIES | 512 | NMP-op table entries per cube |
| PIC_ENTRIES | 128 | page information cache entries per MC |
| MQ_DEPTH | 128 | migration queue entries |
| LANES | 256 | parallel MACs in the Q-network engine |
| RDEPTH | 120736 | replay buffer entries (36 MB / 2501 bits) |
| TX_PERIOD | 100 | cycles between a cube's status reports to its MC |
| BUF_LINES | 64 | DMA buffer lines (1 KB) |

## Where this design follows its source and where it chooses

Taken from the published design:
- the 4x4 mesh with four corner MCs
- the NMP operation format
- the per-cube NMP table with 512 entries, and the occupancy/hit-rate registers reported to the MC
- the running-average system counters
- the page information cache with its histories (history length 8)
- the compute remap table and its use by the scheduler
- the eight actions
- the interval set 100/125/167/250
- the unit OPC reward
- the dueling DQN layer sizes
- epsilon-greedy selection
- a 36 MB replay buffer
- blocking and non-blocking migration with a 1 KB DMA buffer and OS interrupt
- the 128-entry migration queue

This design's own choices:
- Q8.8 arithmetic, and the MAC-array organisation of the inference engine
- epsilon = 26/256
- running-average weights (1/16 in the cubes, 1/4 at the MC)
- LFU replacement in the page cache
- the size (64) and replacement of the compute remap table
- the MC queue depth (16)
- the round-robin choice of which MC's page is observed
- dropping invocations while busy
- the fixed-priority migration arbiter
- in-order DMA read responses
- the exact meaning of the near and far moves
- the 4-bit cube field in the frame number

The source gives two page-cache sizes, 128 entries in its configuration table and 256 in its
sensitivity study. This design uses 128.

Known differences and limits:
- Training is not in hardware. The replay buffer can be sampled (`draw_*`) and the weights
  written (`w_*`), but the gradient step belongs to whoever drives those ports.
- The design is built for the 4x4 mesh only. An 8x8 mesh needs wider cube ids and a longer state
  vector.
- The status reports from cubes to MCs are modelled as dedicated wires, not network packets.
- There is no separate target network.
- No timing constraints or physical design are given. The replay buffer is a plain array, which an
  implementation would map to external or stacked memory.
