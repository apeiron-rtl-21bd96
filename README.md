# APEIRON node in SystemVerilog

APEIRON joins a set of FPGAs into one direct network for trigger and data
acquisition. There is no central switch and no host in the data path. Each
FPGA is a node at a coordinate in a small multi-dimensional grid. Its
neighbours are reached over point-to-point serial links.

Inside every node, up to four processing tasks sit on the ports of a packet
switch. A task talks to any other task through a two-call interface:

- `send(msg, size, dest_node, task_id, ch_id)` pushes a message toward a task
  on some node.
- `receive(ch_id)` blocks until a message arrives on one of that task's 128
  logical channels.

Everything in between is hardware: packetising, routing, buffering, flow
control and delivery into the right channel.

This RTL builds one such node, with one task built in. That task is
FPGA-RICH, a small fixed-point neural network that classifies events from
the RICH detector of the NA62 experiment. The network is 64 → 64 → 16 → 4.

The node is written to be tiled. The six link ports of one instance
connect to the neighbouring instances. The three free task ports take
further kernels.

## The node at a glance

```
          host register port (cfg_*)
                  │
            ┌─────┴─────┐   local coordinate, ring sizes, torus bit,
            │ cfg_regs  │   FPGA-RICH result destination, counters
            └─────┬─────┘
                  │ config                       net_in[0..5] / net_out[0..5]
 ┌────────────────┴──────────────────────────┐   (+X −X +Y −Y +Z −Z)
 │ routing_ip: 10 ports × 2 VCs              ├─── 6 inter-node links
 │  vc_input_buffer → route_unit → rr_arbiter│
 │  → crossbar, credit counters per egress   │
 └──┬──────────┬──────────┬──────────┬───────┘
  port 0     port 1     port 2     port 3        intra-node ports
 dispatcher dispatcher dispatcher dispatcher  (switch → task, by ch_id)
 aggregator aggregator aggregator aggregator  (task → switch, packetising)
    │          │          │          │
 rich_pid_kernel   └─ rx_*/tx_* brought out for other tasks
 (nn_dense_core)
```

| Module | Role |
|---|---|
| `apeiron_pkg` | Flit, header, footer and link types; sizes |
| `route_unit` | Egress port and egress VC of a header (dimension order, dateline) |
| `rr_arbiter` | Round-robin choice among the packets wanting one egress |
| `vc_input_buffer` | Two FIFOs per port, one per virtual channel; one credit back per flit read |
| `crossbar` | Registered multiplexer per egress |
| `routing_ip` | The switch: buffers, route units, allocation, crossbar, credit counters |
| `cfg_regs` | Host-visible configuration and status registers |
| `dispatcher` | Switch → task: checks the packet, writes payload into the channel FIFO picked by `ch_id` |
| `aggregator` | Task → switch: cuts messages into packets, builds header and footer |
| `nn_dense_core` | The 64-64-16-4 network, pipelined to take one event every 8 cycles |
| `rich_pid_kernel` | FPGA-RICH task: gathers an event, runs the core, sends a result message |
| `apeiron_node` | Top level |
| `sync_fifo` | FIFO used throughout |

## Packets

Every transfer is a packet of 128-bit flits. A packet has:

- one header flit;
- 1 to 16 payload flits;
- one footer flit.

`sop` and `eop` travel beside each flit. On a link each flit also carries
its virtual-channel (VC) number.

Header fields, as bit ranges of the 128-bit word:

| Bits | Field |
|---|---|
| 6:0 | destination `ch_id` |
| 8:7 | destination `task_id` |
| 20:9 | destination node: x in 12:9, y in 16:13, z in 20:17 |
| 25:21 | payload length in flits |
| 26 | last packet of the message |
| 28:27 | source `task_id` |
| 40:29 | source node |
| 56:41 | marker 0xA9E1 |
| 127:57 | reserved, zero |

Footer fields:

| Bits | Field |
|---|---|
| 31:0 | checksum: XOR of all 32-bit lanes of all payload flits |
| 36:32 | length |
| 52:37 | marker 0xF007 |

The sizes of `task_id` (four tasks per node) and `ch_id` (128 channels)
are given. Everything else in the format is this design's choice:

- 128-bit flits;
- three dimensions with 4-bit coordinates (up to 4096 nodes);
- a 16-flit maximum payload;
- the footer contents.

All of these are constants in `apeiron_pkg`.

## Routing, and why there are two virtual channels

### Switch ports

The switch has ten ports:

- Ports 0–3 are the intra-node ports. Port *t* holds the task with
  `task_id` *t*.
- Port `4 + 2d` is the plus link of dimension *d*.
- Port `4 + 2d + 1` is the minus link of dimension *d*.

So `net_in[0]`/`net_out[0]` is +X, `[1]` is −X, `[2]` is +Y, and so on.

### Port choice

`route_unit` resolves the destination one coordinate at a time: first X,
then Y, then Z (dimension-order routing). While some coordinate differs
from the local one, the packet leaves on a link of the first such
dimension. When all coordinates match, it goes to the intra-node port
named by `task_id`.

A dimension can be an open line (a mesh) or a ring:

- In a mesh the direction is given by the sign of the difference.
- In a ring the packet takes the shorter way round. A tie goes the plus way.

A single bit in the configuration registers selects the ring closure for
all dimensions. Register 0x01 holds the ring sizes: the last coordinate of
each dimension.

### VC choice

Dimension-order routing on a mesh cannot deadlock. On a ring it can:
packets circling a ring can each hold a buffer the next one needs.

Deadlock freedom comes from two virtual channels per link. The rule used
here is the classic dateline:

- a packet that crosses a wrap-around link (highest to lowest coordinate,
  or back) moves to VC1;
- a packet keeps its VC while it continues in the same dimension;
- a packet starts on VC0 in each new dimension, and when it leaves a task.

No ring's channel-dependency graph can then close on itself.

With the torus bit clear, no packet crosses a wrap link, so all link
traffic stays on VC0. VC1 is then used only between a task port and the
switch: aggregators inject on both VCs, and a packet delivered inside the
node keeps the VC it came in on. The switch treats both VCs alike.

This is the hardest part to follow in the RTL. `route_unit.sv` has it in
about forty lines. The testbench compares it with an independent integer
model, over random positions and ring sizes.

## Virtual cut-through and credits

`routing_ip` is an input-buffered switch with one FIFO per (port, VC):
20 FIFOs of 32 flits each.

### Allocation

The header at the head of each FIFO goes to its own `route_unit`. It
*requests* its egress port when all of these hold:

- the egress is free;
- the FIFO is not already sending a packet;
- the credit counter of the chosen downstream VC shows room for the whole
  packet (`len + 2` flits).

This is virtual cut-through. A packet is never started unless it can be
stored completely in the next buffer. Once started, it never waits for buffer space in the
middle.

One `rr_arbiter` per egress picks among the requesters.

### Forwarding

The winner holds the egress from header to footer. Its flits go through
the registered `crossbar` at one flit per cycle while its FIFO has data.
The footer frees the egress. The next packet can be granted in the same
cycle the footer leaves, so a busy egress carries packets back to back. The
credit check then counts the footer flit as already sent.

Packets therefore never interleave on a link. Two packets on different VCs
of the same link take turns, whole packet by whole packet.

### Credits

Each egress keeps one credit counter per downstream VC:

- it starts at the downstream depth, 32;
- it goes down once per flit sent;
- it goes up once per credit pulse returned.

A `vc_input_buffer` returns one credit pulse on the VC where it read a
flit, in the same cycle.

The 32-flit depth holds the largest packet (18 flits) with room for a
second. An assertion in the buffer flags any write into a full FIFO. Such
a write would mean a credit error upstream.

### Latency and throughput

A header written into an input FIFO at clock edge 0:

- requests after edge 1;
- is granted at edge 2;
- appears on the egress after edge 3.

After that, one flit follows per cycle. Every egress can forward in
parallel.

`pkt_sent` gives one pulse per packet per egress. It feeds the counters in
`cfg_regs`.

## Intra-node ports

### Aggregator (send side)

The task's output channels are AXI-Stream-like streams: valid, ready, data,
last. Each stream has a destination sideband: node, `task_id`, `ch_id`.

Each stream has:

- a word FIFO (32 words);
- a small descriptor FIFO.

A descriptor is written when a message ends, or when 16 words have been
written since the last descriptor. A message longer than 16 words becomes
several packets. Only the last packet has the header `last` bit set, and
all of them carry the destination of the message's first word.

A round-robin arbiter picks a stream that has a complete packet. Stream
*c* always injects on VC *c* mod 2. Both input FIFOs of the switch port are
used, and the packets of one stream cannot overtake each other. The packet
goes out when its VC of the switch input has credits for the whole of it.
The aggregator builds the header, sends the payload, and appends the footer
with the running checksum.

The VC used for injection does not matter to deadlock freedom. The first
hop of a packet starts a dimension, so the router puts it on VC0 (or on VC1
if that hop wraps around).

### Dispatcher (receive side)

The egress flits first enter a two-VC input buffer, like any switch input.
The dispatcher then alternates between VCs at packet boundaries.

It reads the header and writes each payload word, with a `last` mark, into
the message FIFO of the header's `ch_id` (16 words per channel). The mark
is set on the final word of a packet whose header has `last` set.

If that channel's FIFO is full, the dispatcher stops. It waits for the
task to read, holding the rest of the packet in the VC buffer. The switch
then holds back the next packets through the credit counters.

This is head-of-line blocking. Packets for other channels that sit behind
the stalled one wait too. A task must therefore keep reading every channel
it expects data on, as a kernel with one process per input channel does.
A task that reads one channel to the end before touching another can
deadlock once a message is longer than a channel FIFO.

The footer is checked for marker, length and checksum. A packet that fails
gives one `err_pulse`. So does a packet with a `ch_id` beyond the channels
that exist; its payload is dropped.

The task side is `receive(ch_id)` in hardware: the task drives `rx_ch`,
and the dispatcher answers with `rx_valid`/`rx_data`/`rx_last` from that
channel's FIFO.

## Configuration and status registers

The register bus is 32 bits wide. A write takes effect at the clock edge.
A read is combinational.

| Address | Register |
|---|---|
| 0x00 | Local coordinate (x in 3:0, y in 7:4, z in 11:8) |
| 0x01 | Last coordinate of each dimension (reset: 15,15,15) |
| 0x02 | Bit 0: close every dimension into a ring |
| 0x03 | Destination of FPGA-RICH results (`dest_t`, 21 bits) |
| 0x04 | Packets received with a bad footer or channel (read only) |
| 0x10+p | Packets forwarded by switch egress p (read only) |

At the top level, `cfg_addr[15]` selects the weight memory of the network.
`cfg_addr[12:0]` is the weight index and `cfg_wdata[7:0]` the value.

## FPGA-RICH

### The network

`nn_dense_core` is a fully connected network:

- 64 input features;
- layers of 64, 16 and 4 neurons;
- weights and biases in `<8,1>` fixed point (8 bits, 7 fraction bits);
- activations in `<16,6>` (16 bits, 10 fraction bits).

The source describes "three layers of 64, 16 and 4 neurons" on up to 64
input features. Its diagram draws three dense blocks after the input, so
the 64 inputs feed a first layer of 64 neurons.

Each neuron adds its products and its bias, aligned to 17 fraction bits.
It then keeps bits 22:7, which means truncation with wrap-around on
overflow. ReLU follows layers 1 and 2.

The four outputs score the charged-particle multiplicity classes 0, 1, 2
and 3+. The core reports the four scores and the index of the largest;
ties go to the lower class.

### Schedule

Per event:

- Layer 1 runs 8 neurons per cycle for 8 cycles, using 512 multipliers.
- Layer 2 runs 2 neurons per cycle for 8 cycles.
- Layer 3 runs 1 neuron per cycle for 4 cycles.
- A two-step argmax follows.

Each layer has its own input register, so three events are in flight at
once. An event accepted at edge 0 has its result after edge 22, and a new
event is accepted every 8 cycles. At 150 MHz that is 146.7 ns and
18.75 M events/s, against the required 10 MHz.

### Weights

Weights are registers written over the register port, in this order:

| Index | Content |
|---|---|
| 0–4095 | Layer-1 weights, neuron × 64 + input |
| 4096–4159 | Layer-1 biases |
| 4160–5183 | Layer-2 weights, neuron × 64 + input |
| 5184–5199 | Layer-2 biases |
| 5200–5263 | Layer-3 weights, neuron × 16 + input |
| 5264–5267 | Layer-3 biases |

No trained weights come with the design. The testbenches generate
pseudo-random ones and check against a software model of the same
arithmetic.

### The kernel

`rich_pid_kernel` is the task on port 0 (`task_id` 0). It reads channel 0.
An event is one message of up to 8 words; each word holds eight 16-bit
features, feature 0 in the low bits. Shorter events are padded with zeros.

For each event the kernel sends a one-word message to the destination in
register 0x03:

| Bits | Content |
|---|---|
| 1:0 | Class |
| 79:16 | The four scores, 16 bits each, class 0 lowest |
| 127:96 | Event sequence number |

A 4-entry result FIFO is reserved ahead of each inference. So a receiver
that stops reading only stalls the kernel's input; no result is lost.

## Top-level ports

`apeiron_node` has:

- `clk` and `rst_n`, an active-low asynchronous reset;
- the register port `cfg_we`, `cfg_addr[15:0]`, `cfg_wdata`, `cfg_rdata`;
- six inter-node links, `net_in`/`net_out` (`link_fwd_t`: valid, VC, sop,
  eop, 128-bit data), with credit pulses `net_in_credit`/`net_out_credit`
  per VC;
- for intra-node ports 1–3 (array index 0–2):
  - the receive side `rx_ch`, `rx_ready`, `rx_valid`, `rx_data`, `rx_last`;
  - four send streams `tx_valid`, `tx_ready`, `tx_data`, `tx_last`,
    `tx_dest`.

To join nodes, wire one node's `net_out[2d]` to the next node's
`net_in[2d+1]` along dimension *d*, and the credits the opposite way.

Configure registers 0x00–0x03 and load the weights before sending traffic.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`. The reference models in
`tb/apn_tb_pkg.sv` (routing, packet building) and `tb/nn_ref_pkg.sv`
(network arithmetic, weight generator) are written independently of the
RTL.

| Testbench | What it shows |
|---|---|
| `tb_route_unit` | 20 000 random headers against the integer router model, plus hand-worked wrap cases |
| `tb_rr_arbiter` | Round-robin order against a model |
| `tb_vc_input_buffer` | FIFO order per VC and one credit per read |
| `tb_crossbar` | Every egress carries the selected input one cycle later |
| `tb_cfg_regs` | Register map and counters |
| `tb_routing_ip` | Ten senders at once, mesh then torus; see below |
| `tb_dispatcher` | Channels, the `last` mark, a full-channel stall, checksum errors |
| `tb_aggregator` | Four streams, messages up to 40 words (split packets), credit waits |
| `tb_nn_dense_core` | Scores and class bit-exact against the model; 22-cycle latency and 8-cycle interval checked |
| `tb_rich_pid_kernel` | Full and short events; result spacing of 8 cycles; a stalled receiver |
| `tb_apeiron_node` | The whole node at default parameters; see below |
| `tb_apeiron_mapping` | Four nodes in a 2×2 mesh running a five-task graph (A→C, A→D, B→D, C→E, D→E) |

`tb_routing_ip` checks several things while all ten ports send:

- every packet's port and VC against the model;
- flit order;
- the cycle count through the switch.

It also counts contention, packets waiting for credits, VC1 traffic, local
deliveries and transit packets.

`tb_apeiron_node` runs the whole node at its default parameters. It:

- loads all 5268 weights;
- places the node at (3,1,0) in a 4×4×4 torus;
- sends at the same time:
  - 40 events (some short) to the kernel;
  - 40 transit packets;
  - 16 messages from task 1 to task 2 of the same node, a third of them
    long enough to be split;
  - 30 messages to remote nodes;
  - one packet with a bad checksum.

The link receivers return credits slowly for a while. The testbench checks:

- every result, bit-exact and in order, arrives on the +X wrap link on VC1;
- every other packet leaves on the port and VC the model predicts;
- the error counter reads 1;
- the +X packet counter matches the number of packets seen.

It also counts switch contention, cut-through waits, dispatcher stalls and
split messages. If any of these never happens, the test fails.

A final phase sends 24 full events back to back on one link. Each event
is a 10-flit packet (header, 8 words, footer). The results must come out
no more than 10 cycles apart on average, which is the link rate. That is
15 M events/s at 150 MHz. The network core alone could take one event
every 8 cycles.

At the same time, two packets arrive in the same cycle on the two Z links
for the same egress, so the arbiter always has contention to resolve.

`tb_apeiron_mapping` wires four nodes as a 2×2 mesh with the torus bit
clear. It places five tasks on them:

| Node | Tasks |
|---|---|
| (0,0) | A |
| (1,0) | B |
| (0,1) | C |
| (1,1) | D and E |

The dataflow is:

- A sends each message to both C and D;
- B sends messages to D;
- C XORs every word with a key and passes the message to E;
- D adds A's and B's words and passes the sum to E, inside the node.

E checks both results word by word. Messages run up to 40 words, so some
are split into several packets.

To run a testbench with Verilator 5 from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/apeiron_pkg.sv tb/apn_tb_pkg.sv tb/nn_ref_pkg.sv \
    tb/tb_apeiron_node.sv --top-module tb_apeiron_node
./obj_dir/Vtb_apeiron_node
```

Replace the testbench name to run another.

Synthesis with Yosys (slang front end) maps the node to about 17 000 cells
and 10 000 flip-flops, plus about 1 Mbit of memory. Most of that memory is
the message-input FIFOs of the three general task ports: 128 channels ×
16 words × 129 bits each, about 790 kbit. Lowering `N_IN_CH` or
`MSG_IN_DEPTH` shrinks it directly. The network weights take 42 kbit. No
timing closure or place-and-route
has been done. The 150 MHz figure above is a cycle count scaled to the
clock the network was reported at, not a result of this RTL.

## What follows the source design and what does not

These points follow the published APEIRON description:

- the node structure: a switch with configuration/status registers, and
  intra-node ports with a dispatcher and an aggregator;
- dimension-order routing;
- virtual cut-through;
- two VCs per link;
- header, payload and footer packets;
- four tasks per node and 128 channels;
- the send/receive semantics;
- the FPGA-RICH layer sizes, number formats, first-layer ReLU, latency and
  throughput.

These are this design's own choices:

- all widths and depths;
- the packet and register formats;
- credit flow control;
- the dateline VC rule and the ring option;
- round-robin arbitration;
- whole-packet ownership of an egress;
- splitting long messages into 16-flit packets;
- the layer schedule inside the network;
- ReLU after layer 2, and argmax in place of an unnamed output activation;
- the event and result word layouts;
- how the kernel gets its result destination.

The published network infers two quantities, the charged multiplicity and
the number of electrons. Only the four-class multiplicity output drawn in
the network diagram is built.

These parts are not here:

- the serial transceivers of the links;
- the host bus interface (PCIe);
- external memory;
- fault tolerance, which the source design also leaves out;
- any kernels other than FPGA-RICH.

The link ports and the register port are where the transceivers and the
host interface would attach.
