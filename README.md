# Compute-aware in-switch merging for tensor-parallel GPUs

In tensor-parallel LLM layers every GPU repeatedly reads the same remote
tiles (the gather before a GEMM) and adds partial results into the same
remote tiles (the reduce after it). When each GPU does this with ordinary
loads and atomic adds, the switch between the GPUs carries the same line
up to seven times in each direction. This RTL puts a *merge unit* in every
port of the switch. A load or reduction marked as mergeable opens a short
*session* for its 128 B line in the switch port that leads to the line's
owner, its *home GPU*.

- **Loads.** The first load of a line goes to the home GPU. Later loads of
  the same line wait in the session or are answered from the copy cached
  there.
- **Reductions.** Contributions are summed in the switch, and a single sum
  goes to the home GPU.
- **Alignment.** A small synchronisation protocol between GPUs and switches
  makes the GPUs' requests arrive close together in time, so sessions stay
  short and the tables small.

The code is SystemVerilog (IEEE 1800-2017). It is synthesizable except for
the testbenches and the GPU model in `tb/`, and it simulates with plain
Verilator.

## 1. System

```
  GPU g ── gpu_synchronizer ─┐
      │                      ├─ hub_router ── link to switch 0 … N_SWITCH-1
      └── memory traffic ────┘
  cais_switch s: port g per GPU (cais_port + merge_unit), routing table,
                 switch_arbiter + crossbar, group_sync_table
```

`cais_system` (the top) instantiates:
- `N_GPU` = 8 GPU-side pairs, each a `gpu_synchronizer` and a `hub_router`;
- `N_SWITCH` = 4 `cais_switch`es.

This is the DGX-H100 shape: every GPU has one link to every switch, and
port *g* of every switch leads to GPU *g*. The GPUs themselves (SMs,
caches, memory) are not part of the RTL. Their memory traffic and their
TB/warp-scheduler hooks are ports of the top:
- `gpu_tx_*`/`gpu_rx_*` carry the memory traffic;
- `sched_sync_*`/`sched_notify_*` are the scheduler hooks.

### Packets

Everything that crosses a link is one `cais_pkg::pkt_t` (1092 bits), moved
whole, one per cycle per link:

| field | bits | meaning |
|---|---|---|
| `ptype` | 3 | LD_REQ, LD_RESP, RED_REQ, ST_REQ, SYNC_REQ, SYNC_REL |
| `cais`  | 1 | mergeable: set by `ld.cais` / `red.cais` |
| `src`, `dst` | 3+3 | requesting GPU, GPU the packet is routed to |
| `tag` | 10 | requester's tag, echoed in the response |
| `addr` | 48 | byte address. Sync packets carry `{phase, group}` in bits [16:0] |
| `data` | 1024 | 128 B payload, read as 32 FP32 lanes by the reduction ALU |

The home GPU of an address is given by its top three bits, `addr[47:45]`.

### Which switch, which port

All requests for one line must meet in one merge unit. Two rules ensure
this:
- **Switch.** The hub picks the switch from a fixed hash of the line
  address: an XOR-fold of `addr[47:7]` into log2(N_SWITCH) bits. A
  response carries the same address, so it returns through the same
  switch.
- **Port.** Inside that switch, a request is routed to the port of its
  home GPU, and the merge unit sits on that port's egress side.

So for every line there is exactly one merge unit in the system.

Sync packets are hashed on their `{phase, group}` key instead. This sends
all GPUs' sync requests for one group to the same Group Sync Table.

## 2. The merge unit

`merge_unit` joins four parts:
- `cam_lookup_table`, which searches sessions;
- `merging_table`, which holds each session's state and content;
- `merge_ctrl`, which runs the rules below;
- `vec_alu`, 32 FP32 adders.

The CAM and the table have 320 rows each. A row holds 128 B, so a port
stores 40 KB. Row *i* of the CAM and row *i* of the table belong to the
same session.

| table | per row |
|---|---|
| CAM | valid, `{line address, is_load}` key, age timer |
| Merging table | status (Reduction / Load-Wait / Load-Ready), Count, 128 B content, pend bit |

While a load session waits for data, its content row holds the waiting
requesters' `{src, tag}` pairs (13 bits each, up to 78 of them). Once the
data has arrived, the row holds the data itself. A reduction session's
row holds the running sum.

### Load session (`ld.cais`)

| event | action |
|---|---|
| request, no session | Forward the request to the home GPU. Open a row `{Load-Wait, Count=1, requester in slot 0}`. |
| request, Load-Wait | Store `{src, tag}` in slot Count. Count+1. |
| request, Load-Ready | Answer from the cached line in the same cycle. Count+1. At Count = N_GPU-1, free the row. |
| response from home | Answer the stored requesters one per cycle. Then cache the data and set Load-Ready. If Count is already N_GPU-1, free the row instead. |

Count stops at N_GPU-1 because the home GPU reads its own copy locally.
When every other GPU has been served, nobody else will ask for the line.

### Reduction session (`red.cais`)

| event | action |
|---|---|
| request, no session | Open a row `{Reduction, Count=1, data}`. Nothing is sent. |
| request, session | Row = row + packet (FP32, lane-wise). Count+1. At N_GPU-1, send the sum to the home GPU as a plain reduction and free the row. |

The home GPU adds the arriving sum to its own memory. So it receives one
packet per line instead of N_GPU-1.

`vec_alu` rounds to nearest even and flushes subnormals to zero. Infinities
and NaNs propagate, and a NaN result is the quiet NaN 0x7fc00000.

### When the table is full, and timeouts

A new session may need a row when none is free. The row with the largest
age is then the victim:

- **Reduction victim.** Its partial sum goes to the home GPU, and the row
  is freed. Later contributions to that line open a new session, and the
  home GPU adds all the partial sums it receives. The final value is the
  same.
- **Load-Ready victim.** Dropped. Later loads open a new session, or go to
  the home GPU.
- **Load-Wait victim.** It cannot be dropped, because its requesters still
  need the data. Its pend bit is set, so the row is freed as soon as the
  data arrives. The new request bypasses the unit: it goes to the home GPU
  with its CAIS flag cleared, so its response travels as an ordinary
  response. Only one row is marked per bypass, so the table never thrashes.

Every row has a timer that restarts on each access. A Reduction or
Load-Ready row whose timer reaches `TIMEOUT` (4096 cycles) is evicted in
the same way. This guarantees progress when a GPU never sends its share,
for example after its earlier request was bypassed. Load-Wait rows never
time out.

### Timing and priorities

`merge_ctrl` does one thing per cycle. In priority order:
1. answer a stored requester;
2. evict a timed-out row;
3. take a response from the home GPU;
4. take a new request.

The lookup, the decision and the table write happen in the same cycle.
A request that triggers an eviction is not consumed in that cycle; it is
looked up again in the next one.

A fill with *W* waiting requesters takes *W*+1 cycles. A load that hits
Load-Ready is answered in the cycle it is accepted. Every output is a
valid/ready stream, and a stalled output holds the action.

## 3. Switch port, VCs and arbitration

`cais_port` has an ingress side (packets from the GPU) and an egress side
(packets to the GPU).

**Ingress.** Packets from the GPU are sorted:
- CAIS load responses from the home GPU go to the merge unit;
- sync requests go to the Group Sync Table;
- everything else goes to *Route*.

Route also takes the load responses the merge unit produces. It looks up
the output port and writes the packet into one of eight 256-deep virtual
channels, according to its class:

| VC | class |
|---|---|
| 0 | `ld.cais` |
| 1 | `ld` |
| 2 | load response |
| 3 | `red.cais` |
| 4 | `red` |
| 5 | store |
| 6 | sync request |
| 7 | other |

**Arbitration.** `switch_arbiter` is a separable allocator with
round-robin in both stages:
1. each input picks one of its VCs whose output has room;
2. each output picks one of the inputs that chose it.

The crossbar then moves up to one packet per output per cycle. A blocked
class never holds up the other VCs of its input.

**Egress.** The egress side keeps two 2-deep queues:
- one for CAIS requests waiting for the merge unit;
- one for everything else.

The separation matters. With a single queue, two ports can deadlock: each
port's merge unit waits to hand a response to the other port, while that
port's queue is blocked by a request for its own busy merge unit. The
arbiter is told, per VC, which queue has room.

The port's output multiplexer picks round-robin among three sources:
- group releases;
- merge-unit output (forwarded requests, sums);
- unmerged traffic.

## 4. Thread-block group synchronisation

Merging only helps if all GPUs ask for a line within a short time of each
other. Before a thread block (TB) of a merge group is launched
(*pre-launch*), and again before its first mergeable access
(*pre-access*), the scheduler registers `{group, phase, metadata}` with the
GPU's `gpu_synchronizer`. Then:

1. The synchronizer stores it in a 16-row table and sends one `SYNC_REQ`
   packet.
2. The switch's `group_sync_table` counts requests per `{group, phase}`.
   When all N_GPU GPUs have arrived, it frees the row and broadcasts a
   release to every port in the same cycle.
3. Each synchronizer marks its row released and notifies the scheduler,
   returning the metadata (for example, which TB to dispatch).

One synchronisation costs one packet each way per GPU.

The Group Sync Table handles one request per cycle. If its table is full,
a request for a new group waits. The table's round-robin pointer moves on
even when the chosen request cannot be taken, so a request that would
complete an open group is never stuck behind one that needs a new row.

## 5. Parameters

| parameter | default | where from |
|---|---|---|
| `N_GPU` | 8 | DGX-H100 configuration |
| `N_SWITCH` | 4 | DGX-H100 configuration |
| `ENTRIES` (merge rows per port) | 320 | 40 KB / 128 B per port |
| `NUM_VC` | 8 | per input port |
| `VC_DEPTH` | 256 | packets per VC (unit chosen here) |
| `TIMEOUT` | 4096 cycles | chosen here |
| `GST_ENTRIES` | 64 | chosen here |
| `SYNC_ENTRIES` | 16 | chosen here |
| `TAG_W`, `GPU_ID_W`, `ADDR_W` | 10, 3, 48 | chosen here (`cais_pkg`) |

`NUM_VC` must stay 8, because the VC classes are fixed in `cais_pkg::vc_of`.
`N_SWITCH` must be a power of two.

## 6. Where this RTL departs from, or adds to, the described design

- **Flits and links.** Packets move whole; the 16 B flit framing and the
  250 ns link latency are not modelled. VC depth is counted in packets.
- **Group membership.** Every TB group spans all GPUs, and each GPU sends
  one sync request per group and phase.
- **Reduction format.** Reductions are FP32 only.
- **Encodings and sizes chosen here:** the address map (home GPU in the
  top bits), the hash, the VC classes, the timeout value, the table sizes
  of the sync logic and the packet encodings.
- **Handling choices for cases the described design leaves open:**
  - the priorities inside the merge controller;
  - re-looking-up a request after an eviction;
  - clearing the CAIS flag of bypassed requests;
  - passing on a response that finds no waiting session;
  - bypassing a load that finds a full Load-Wait session.
- **Added for deadlock freedom:** the two egress queues and the
  round-robin rule of the Group Sync Table.
- **Not built:**
  - TB-aware request throttling (described only as feedback from the
    switch's per-address state through a small control interface);
  - the GPU pipeline and the decoding of `ld.cais`/`red.cais`;
  - the NVLink PHY;
  - the compiler and scheduling software.

## 7. Files

`rtl/` holds one module or package per file:
- `cais_pkg.sv` (types and helper functions);
- `fp32_add`, `vec_alu`, `cam_lookup_table`, `merging_table`,
  `merge_ctrl`, `merge_unit`;
- `sync_fifo`, `rr_arbiter`, `vc_buffer`, `routing_table`,
  `switch_arbiter`, `crossbar`;
- `cais_port`, `group_sync_table`, `cais_switch`;
- `gpu_synchronizer`, `hub_router`, `cais_system`.

`tb/` holds a self-checking testbench `tb_<module>.sv` for each block. The
switch and system tests share `gpu_model.sv`, a behavioural GPU. It acts as
a home memory and as a requester running one tensor-parallel step:
1. pre-launch sync;
2. an AllGather-style `ld.cais` phase;
3. pre-access sync;
4. a ReduceScatter-style `red.cais` phase, in which one GPU holds back half
   of its contributions.

Every testbench prints `TB_RESULT checks=N failures=M` at the end.

- **`tb_cais_system`**: 4 GPUs, 2 switches, 4-row tables, short timeout.
  It checks every load's data and every reduction sum exactly. It also
  counts each mechanism and fails if one never occurs: load session
  opened, hit on Load-Wait, hit on Load-Ready, fill, release, reduction
  opened, merged, released, LRU eviction, timeout eviction, deferred
  eviction, bypass, and group release.
- **`tb_cais_system_full`**: the top at its default size (8 GPUs, 4
  switches, 320-row tables, 256-deep VCs). Here the tables never fill, so
  only the paths that need full tables (LRU, deferral, bypass) are exempt
  from its mechanism check.

To run a testbench:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl -Itb \
          rtl/cais_pkg.sv tb/tb_cais_system.sv --top-module tb_cais_system
./obj_dir/Vtb_cais_system
```

The other modules are found in `rtl/` and `tb/` by their file names. For
another testbench, change the name. Some testbenches draw lint warnings
(unused bits, widths); add `-Wno-fatal` so that these do not stop the
build. The full-size test takes a few minutes to compile and about half a
minute to run.

## 8. Fit to the evaluated models

The merge tables hold only *open* sessions, not tensors, so model size does
not decide whether a workload fits. A GPU can have at most 1024 requests in
flight (10-bit tag). The hash and the home GPU spread these over 28 merge
units, roughly 37 rows each against 320 available.

The system-wide capacity is 32 ports × 40 KB = 1280 KB. This is the same
figure given as the system-wide requirement for an 8-GPU machine,
independent of the model. The three evaluated models therefore fit:

| model | hidden | FFN | seq × batch |
|---|---|---|---|
| Mega-GPT-4B | 2048 | 8192 | 1024 × 16 |
| Mega-GPT-8B | 3072 | 12288 | 1024 × 12 |
| LLaMA-7B | 4096 | 11264 | 3072 × 3 |

Each one only streams more lines through the tables. Configurations with
more than 8 GPUs need a wider `GPU_ID_W`.
