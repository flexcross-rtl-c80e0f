# FlexCross: packet processing through a crosspoint-queued crossbar

A NIC or switch that runs in-network functions has to send each flow through its own
chain of tasks. One flow needs checksum, firewall, encryption and load balancing; another
needs firewall, NAT, encryption and routing. Two common answers both fall short. A fixed
pipeline is fast but serves only the chains it was built for. A central scheduler that
sends packets to offload units one at a time is flexible but slow.

FlexCross is a third answer. It puts every processing engine on one port of a crossbar.
Each packet carries its task list in the AXI4-Stream sideband (TUSER). After each task,
the packet goes back into the crossbar and is steered to the next engine on its list,
until the list says "exit" and the packet leaves towards the MAC or DMA side. The crossbar
is crosspoint-queued, with one FIFO for every (input, output) pair. Every output
therefore schedules on its own, with no global arbitration. A packet that would not fit
in its queue is dropped, never held back, so congestion at one engine cannot back up into
the others.

This repository is synthesizable SystemVerilog for that core at its main configuration:

- a 512-bit data path at 200 MHz, which is 102.4 Gbit/s;
- a 7x7 crossbar with 128-word (8 KB) queues;
- six processing engines: CRC, firewall, NAT, AES, IPv4 router and load balancer.

Self-checking testbenches cover every block and the whole core.

## 1. Data flow

```
 MAC rx ──► Parser ──► xbar in 0                          xbar out 0 ──► MAC / DMA (tx_*)
                       xbar in k ◄── Engine k ◄── xbar out k        (k = 1..6)
```

| crossbar port | engine (input side) | units | unit width |
|---|---|---|---|
| 0 | Parser in / MAC-DMA out | – | – |
| 1 | CRC check | 2, external | 256 |
| 2 | firewall | 1, `pu_firewall` | 512 |
| 3 | NAT | 1, `pu_nat` | 512 |
| 4 | AES en-/decryption | 4, external | 128 |
| 5 | IPv4 router | 1, `pu_router` | 512 |
| 6 | load balancer | 1, `pu_lb` | 512 |

A task number is the crossbar port of the engine that performs the task. Task 0 means
"exit" and sends the packet to port 0.

The CRC and AES cores are third-party designs and are not included. Their engines'
unit-side streams are brought out as `crc_tx_*/crc_rx_*` and `aes_tx_*/aes_rx_*` on
`flexcross_top`. Whatever you attach there must:

- accept beats of the unit width (256 or 128 bits);
- return the packet's beats in order, with TKEEP, TLAST and TUSER passed through.

The testbenches attach a pass-through model (`tb/unit_model.sv`) with configurable
latency and random stalls.

### Metadata (`flexcross_pkg::meta_t`, 84 bits of TUSER)

Every beat carries the metadata unchanged, so any block can act on any beat without
first seeing the packet head.

| field | bits | meaning |
|---|---|---|
| `pkt_len` | 16 | frame length in bytes, Ethernet header included |
| `flow_type` | 4 | index into the Parser's flow table |
| `prio` | 3 | priority class, TOS / traffic-class bits 7:5 |
| `task_seq` | 7 x 3 | the task list; slot *i* is the *i*-th engine to visit, 0 ends the list |
| `step` | 3 | number of tasks done so far |
| `next_task` | 3 | `task_seq[step]`: where the crossbar sends the packet next |
| `eth_port` | 2 | Ethernet port chosen by the router or load balancer |
| `timestamp` | 32 | Parser cycle counter when the first beat entered |

`flexcross_pkg::advance_task` steps a packet on to its next task. It sets `step+1` and
`next_task = task_seq[step+1]`, and returns "exit" after the seventh slot. Every engine
applies it at its egress.

## 2. Parser (`parser.sv`)

The Parser has one register stage. It reads the first beat of each frame and fills in
the metadata:

- **`pkt_len`**: the IPv4 total length + 14, or the IPv6 payload length + 54. Any other
  frame gets 1518.
- **`flow_type`**: the TCP/UDP destination port mod `NUM_FLOWS`. It is 0 for other
  protocols.
- **`task_seq`**: read from the flow table. After reset the table holds the four
  sequences below, and `cfg_flow_we/cfg_flow/cfg_flow_seq` can rewrite any entry while
  traffic runs. The entry is read at each packet's first beat, so a rewrite affects the
  next packets of that flow and never one already in flight.

| flow | sequence |
|---|---|
| 0 | CRC → firewall → AES → load balancer → NAT |
| 1 | firewall → NAT → AES → router |
| 2 | CRC → AES → router |
| 3 | CRC → load balancer |

The metadata of the first beat is held for the rest of the frame.

## 3. The crossbar (`xbar.sv`)

Each of the N inputs has:

- an input register (`axis_reg`);
- a **Controller** (`xbar_controller`);
- a **DEMUX** (`xbar_demux`) that feeds row *i* of the N×N queue matrix (`axis_fifo`,
  `QDEPTH` words each).

Each of the N outputs has:

- a **Scheduler** (`sched_rr`, `sched_lqf` or `sched_fcfs`, chosen by the `SCHED`
  parameter);
- a **MUX** (`xbar_mux`) over column *j*;
- an output register.

### Drop, don't stall

The Controller decides once per packet, at its first beat. Let `need` be the number of
64-byte beats in `pkt_len`, and let `target` be the packet's `next_task`:

```
fits = fill[target] <= QDEPTH  &&  need <= QDEPTH - fill[target]
```

If the packet fits, the DEMUX is steered to queue `target` for the whole packet. If it
does not fit, or `target` is not a valid port:

- the DEMUX holds TVALID low towards every queue;
- it holds TREADY high towards the sender;
- the beats are discarded as they arrive, and `drop_count[i]` counts the packet.

The queue is only ever written by this one DEMUX, so space checked at the first beat is
still there at the last. Reads at the other end can only add room, so the DEMUX never
waits for a queue. This holds even though the output starts reading a packet as soon as
its first beat lands (virtual cut-through).

Each queue word is a whole beat: 512 data, 64 keep, 1 last and 84 metadata bits, 661
bits in all. A 128-word queue therefore holds 8 KB of packet data. Five maximum-size
Ethernet frames of 24 beats fit with room to spare.

### Schedulers

All three schedulers make a new decision in the same cycle a packet's last beat leaves.
Back-to-back minimum-size packets therefore go out at one per cycle. All three also lock
onto a queue from a packet's first beat to its last, so packets never interleave on an
output.

- **Round robin (`sched_rr`)**: serves the first non-empty queue at or after a pointer.
  When the packet ends, the pointer moves to the queue after the one served. It is
  starvation-free.
- **Longest queue first (`sched_lqf`)**: a combinational comparator tree over the queue
  fill levels, padded to a power of two. Each level keeps the fuller queue of each pair;
  ties go to the lower index. It gives the lowest drop rate, but a queue can starve.
- **First come, first served (`sched_fcfs`)**: a FIFO of queue indices. When a packet's
  first beat enters queue *k* of the column, *k* is appended. Several queues starting in
  the same cycle are appended in ascending order. The head index picks the queue, and is
  removed at that packet's last beat. Packets leave in arrival order.
  - The index FIFO must hold every packet that can sit in the column at once:
    N·(QDEPTH+1) = 903, rounded up to 1024.

### Latency

A beat takes 4 cycles from a crossbar input to the matching output when that output is
idle: input register, queue write, queue output register, output register. The tests
check this.

## 4. Processing Engines (`proc_engine.sv`)

An engine with `NUM_UNITS` units of width `UNIT_W` is built from these parts:

1. **Load balancer (`pe_load_balancer`)**: at each packet's first beat, picks the unit
   whose ingress queue is least full. Ties go to the lower index. It keeps that unit for
   the whole packet.
2. **Per-unit ingress queue**: `IQ_DEPTH` = 32 beats, enough for one maximum-size
   packet. It is followed by a 512→`UNIT_W` downsizer (`axis_downsize`). On the last beat
   the downsizer sends only the segments that hold data.
3. **The unit** (internal or external).
4. **`UNIT_W`→512 upsizer (`axis_upsize`)**: closes a beat when it is full or at TLAST.
5. **Per-unit egress queue**: `EQ_DEPTH` = 32 beats, present only when `NUM_UNITS > 1`.
   It offers a packet to the arbiter only once the whole packet is in it.
6. **Round-robin egress arbiter (`pe_arbiter`)**: packet by packet, built from the
   crossbar's own RR scheduler and MUX.
7. **`advance_task`** on the metadata, then an output register.

The egress queue is this design's own addition. Without it, a 128-bit AES unit part-way
through a packet would hold the arbiter while it produced one beat every four cycles.
The whole engine would then run at a quarter of line rate. With it, four AES units
together keep up with 512 bits per cycle. The line-rate test in `tb_proc_engine` shows
this.

### Processing units

All four units are 512 bits wide, have one register stage, and take their tables
through `cfg_*` ports. Reset clears the tables.

| unit | what it does |
|---|---|
| `pu_firewall` | drops a whole packet whose TCP/UDP source port is on an 8-entry block list; `drop_count` counts them |
| `pu_nat` | replaces the IPv4 destination address by exact match in an 8-entry table (lowest index wins); `xlate_count` counts rewrites; the IP header checksum is **not** updated |
| `pu_router` | longest-prefix match of the IPv4 destination over 8 (prefix, length 0–32, port) entries; writes `eth_port`; no match, or not IPv4, gives `DEFAULT_PORT` = 0 |
| `pu_lb` | writes `eth_port` = packet count mod 4 (round robin over the four Ethernet ports) |

The router and load balancer report their choice in the metadata and do not change the
data. The Ethernet ports themselves are outside this core.

## 5. Top level (`flexcross_top.sv`)

The top has four groups of ports:

- **Data:** `rx_*` (from the MAC, no TUSER) and `tx_*` (to the MAC / DMA, with `meta_t`
  in TUSER).
- **Configuration:** `cfg_flow_*`, `cfg_fw_*`, `cfg_nat_*` and `cfg_rt_*`.
- **External units:** the CRC and AES unit streams.
- **Counters:**
  - per crossbar input: forwarded and dropped packets;
  - firewall drops and NAT rewrites;
  - per-unit packet counts for the CRC and AES engines.

Reset is synchronous and active high on `rst`. There is one clock.

Parameters and their defaults:

| parameter | default |
|---|---|
| `QDEPTH` | 128 |
| `SCHED` | `SCHED_RR` |
| `IQ_DEPTH` | 32 |
| `NUM_FLOWS` | 4 |
| `CRC_UNITS` × `CRC_W` | 2 × 256 |
| `AES_UNITS` × `AES_W` | 4 × 128 |
| `TAB_ENTRIES` | 8 |

At the defaults, the crossbar queues hold 49 × 128 × 661 bits = 4.15 Mbit, and the whole
core about 4.5 Mbit of memory.

## 6. How far it follows the source design, and where it departs

These points follow the published design:

- the architecture: Parser, a 7x7 crosspoint-queued crossbar, six engines, and an
  output to MAC/DMA;
- metadata carried in TUSER;
- 8 KB queues;
- dropping a packet by holding TVALID low and TREADY high;
- cut-through reads;
- the three schedulers as described: RR polling, an LQF comparator tree, and an FCFS
  index FIFO;
- per-engine least-loaded load balancing and a round-robin egress arbiter;
- the "next task" update at each engine's egress;
- the unit counts and widths (CRC 2×256, AES 4×128);
- the four flow sequences;
- a 4-cycle traversal.

These are choices of this design, where the source says nothing:

- **Metadata:** the field widths, the 7-slot task list with a step counter, and the
  `eth_port` field.
- **Parser:** `flow_type` = destination port mod `NUM_FLOWS`, and 1518 as the length of
  non-IP frames.
- **Drop rule:** the Controller measures the packet in 64-byte beats, because the queue
  holds whole beats.
- **Reset:** synchronous and active high.
- **Engine queues:** the ingress and egress queue depths, and the egress queue itself
  (see §4).
- **Unit tables:** the table forms and sizes, and NAT not fixing the IP checksum.
- **Priority:** `prio` is carried but no block acts on it. The published evaluation uses
  equal priority throughout.

These parts are not included:

- the MAC, PHY, DMA engine and PCIe;
- the CRC and AES cores, which are only interfaces here.

A 14x14 crossbar does not fit the task numbering. The `xbar` module takes any `N`, but
`meta_t` carries 3-bit task numbers, which address at most 8 ports. Widening
`PORT_W` and `N_PORTS` in `flexcross_pkg` and extending the top's port map is required.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Shared helpers:

- `tb_pkt_pkg.sv` builds Ethernet/IPv4/UDP frames, with a packet id at bytes 42..45.
- `unit_model.sv` stands in for the CRC and AES units.
- `xbar_harness.sv`, `pe_harness.sv` and `workload_harness.sv` hold one parameterised
  test each. `tb_xbar`, `tb_proc_engine` and `tb_flexcross_workload` instantiate them at
  several settings.

What the larger tests check:

- **`tb_xbar`:** the full 7x7 crossbar with each of the three schedulers, 32-word queues
  and random traffic with random backpressure.
  - It checks every packet against a reference model: byte-exact data, order per
    (input, output) pair, drops equal to what the model skipped, and the 4-cycle
    latency.
  - It also checks that 32 back-to-back 1-beat packets leave in 32 cycles.
- **`tb_proc_engine`:** engines of 4×128, 2×256 and 1×512 units with stalling units,
  plus a 4×128 engine at line rate. It checks integrity, no interleaving, the task
  advance, and that the line-rate case keeps up.
- **`tb_flexcross_top`:** the whole core at its default parameters. It sends 2,200 frames
  of 64–1518 bytes over all four flows, in four phases:
  1. mixed load with the MAC side randomly stalled;
  2. a burst of 300 back-to-back minimum frames, which must leave in about 300 cycles;
  3. an overload with the MAC side stopped, which must cause crossbar drops;
  4. traffic after a run-time rewrite of a flow's task sequence.

  A reference model walks each frame's task list (firewall verdict, NAT rewrite, route
  lookup) and predicts the bytes and metadata that come out. The test also checks that
  frames received + firewall drops + crossbar drops = frames sent. It counts each
  mechanism and fails if one never happened:
  - crossbar drop, firewall drop, NAT rewrite, and a non-default route;
  - all four load-balancer ports, and every CRC and AES unit;
  - the flow-table rewrite, back-to-back packets, and MAC backpressure.

### Evaluation workloads (`tb_flexcross_workload`)

This test runs the core under the two traffic scenarios it was designed for. It uses
three cores side by side (`workload_harness`, one per scheduler type), with every other
parameter at its default.

- **Scenario 1:** each frame gets one of the four flow types above, chosen uniformly.
- **Scenario 2:** each frame gets its own random order of all six engines. The flow-table
  entry a frame will use is rewritten while the frame before it is sent.

Each run has these settings:

- 52,000 frames;
- sizes drawn uniformly from {64, 128, 256, 512, 1024, 1518} bytes;
- random idle gaps that set the offered load as a share of the 102.4 Gbit/s line;
- pass-through CRC and AES models at full rate;
- latency measured from Parser entry to the MAC/DMA side, in cycles of 5 ns.

| scheduler | scenario | load | dropped | out (Gbit/s) | latency mean / min / max |
|---|---|---|---|---|---|
| RR | 1 | 60 / 80 / 100 % | 0 / 0 / 2 | 61.9 / 81.8 / 101.8 | 106 / 31 / 312 · 122 / 31 / 326 · 193 / 31 / 448 |
| LQF | 1 | 60 / 80 / 100 % | 0 / 0 / 0 | 62.0 / 81.9 / 101.8 | 107 / 31 / 300 · 125 / 31 / 401 · 216 / 31 / 550 |
| FCFS | 1 | 60 / 80 / 100 % | 0 / 0 / 0 | 62.0 / 81.8 / 101.8 | 106 / 31 / 275 · 121 / 31 / 289 · 198 / 44 / 373 |
| RR | 2 | 60 / 80 / 100 % | 0 / 0 / 414 (0.80 %) | 62.0 / 81.8 / 99.9 | 212 / 81 / 516 · 313 / 109 / 784 · 1073 / 81 / 2447 |
| LQF | 2 | 60 / 80 / 100 % | 0 / 0 / 110 (0.21 %) | 61.8 / 81.6 / 101.0 | 229 / 81 / 678 · 367 / 81 / 1163 · 1987 / 82 / 4130 |
| FCFS | 2 | 60 / 80 / 100 % | 0 / 0 / 213 (0.41 %) | 62.0 / 81.8 / 100.8 | 212 / 81 / 466 · 313 / 97 / 659 · 1368 / 112 / 2047 |

Below saturation nothing is dropped, and throughput equals the offered load. At 100 %
load, scenario 2 sends every packet through all six engines. Each engine's input then
runs at line rate, queues build up, and a small share of packets is dropped rather than
stalling the crossbar.

The three schedulers trade off as their designs suggest:

- LQF drains the fullest queue, so it drops least, but some packets wait longest.
- FCFS keeps arrival order, so its worst-case latency is the lowest.
- RR sits in between on latency but drops most.

The published evaluation shows the same ordering, with about 0.2 % drops at full load.
Its processing units have their own latencies, which the pass-through models here do
not reproduce.

Each harness checks every frame byte for byte, and checks that received + dropped =
sent. It requires less than 1 % drops at loads up to 80 %. It also requires the delivered
throughput to be at least 95 % of the offered load less the drops; the margin covers the
start and end of each run. The test takes about two minutes of simulation after the
build.

## Running the tests

To run a test with Verilator (5.x):

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/flexcross_pkg.sv tb/tb_pkt_pkg.sv tb/tb_flexcross_top.sv --top-module tb_flexcross_top
./obj_dir/Vtb_flexcross_top
```

The full-size core test builds in about two minutes and runs in seconds. The scheduler
type is a top-level parameter, for example `flexcross_top #(.SCHED(SCHED_LQF))`.
