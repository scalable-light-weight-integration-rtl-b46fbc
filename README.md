# Many accelerators behind one network port

A chip multiprocessor whose cores talk over a mesh network-on-chip can gain an
FPGA as one more network node. The FPGA holds many hardware accelerators
(HWAs). Any core may call any of them at any time, and several cores may call
the same one. The RTL here is the logic that sits between that single router
port and the accelerators. It has two parts:

* **Interface block.** A small shared front end: buffers that cross between
  the router clock and the FPGA clock, packet receivers that distribute
  incoming packets, and a packet sender that merges outgoing ones.
* **HWA channels.** One per accelerator. Each channel holds all the
  per-invocation state itself: a request queue, a grant controller, task
  buffers, the accelerator's controller, and a result buffer. Nothing is
  shared between channels except the front end and, for chaining, the
  buffers of a small group of channels.

The design stays light because every decision is local. A channel grants a
processor a task buffer only when one is free, so data never arrives that
cannot be stored, and the network never backs up into the FPGA. Results of
one accelerator can be passed directly to the next accelerator in its group
(*chaining*). They then never leave the FPGA, which saves a round trip
through the network per stage of a pipeline such as a JPEG decoder.

The default configuration has:

* 32 HWA channels.
* Eight packet receivers, each serving 4 channels ("PR4").
* A two-level packet sender: eight first-level senders for 4 channels each,
  then one second-level sender ("PS4").
* Two task buffers per channel.
* Chaining groups of four channels.

The published evaluation found these strategies the fastest.

## Flits

Everything moves as 137-bit flits. A packet is one head flit, optionally
followed by body flits; the last flit is marked as the tail. Every flit
carries the destination node (bits 136:130) and the head/tail marks (129:128).
Body flits carry 128 data bits. The head flit carries the invocation header
(`hwa_pkg::head_flit_t`):

| bits    | field            | use in this RTL |
|---------|------------------|-----------------|
| 136:130 | route            | destination mesh node |
| 129/128 | packet head/tail | packet framing |
| 127:125 | source ID        | requesting processor |
| 124:120 | HWA ID           | target channel (in requests and payload); producing channel (in chained and result packets) |
| 119     | type             | 1 = command (request, grant, notify), 0 = payload/result |
| 118/117 | task head/tail   | first/last packet of a multi-packet task |
| 116:115 | TB ID            | task buffer named by the grant, echoed in the payload |
| 114:113 | chaining depth   | hops still to go after the current HWA |
| 112:107 | chaining index   | three 2-bit HWA indexes within the group |
| 106:105 | priority         | used by the packet sender for result packets |
| 104:103 | direction        | bit 0: input comes from memory; bit 1: results go to memory |
| 102:71  | start address    | carried through; identifies the task |
| 70:61   | data size        | carried through |
| 60:0    | payload          | for commands, bits 1:0 = REQUEST 0, GRANT 1, NOTIFY 2 |

The bit positions are those of the original architecture. The encodings
inside the fields are this implementation's choice. These include the command
codes, the meaning of the direction bits and the node numbers. The FPGA is
node 4 of a 3×3 mesh, and the memory/MMU node is 9. Processor `s` sits on
node `s`, or on node `s+1` from the FPGA node onward (`proc_node()`).

## One invocation, end to end

1. A processor sends a one-flit **request** naming the HWA.
2. The packet receiver that owns that HWA ID writes it to the channel's
   **request buffer** (RB). If the RB is empty and a task buffer is free, the
   request bypasses the RB and is granted in the next cycle.
3. The **local grant controller** (LGC) marks a free task buffer busy. It then
   writes a one-flit **grant** with that TB ID into the **local grant buffer**
   (LGB).
   * The grant goes back to the processor (direct access).
   * If the request said the input is in memory, the grant goes to the memory
     node instead. The memory's DMA answers with the payload in the same way.
4. The processor (or memory) sends the **payload** as one or more packets
   whose head flits name the HWA and the TB. The receiver writes them straight
   into that task buffer.
5. Once a buffer holds a whole task, the **task arbiter** (TA) offers it. The
   **HWA controller** (HWAC) streams the task's data words into the
   accelerator and frees the task buffer, which lets the LGC grant it again.
6. When the accelerator is done, the **packet generator** (PG) collects its
   results into the **packet output buffer** (POB) as one result packet.
   * The packet goes to the requester, or to memory.
   * After a memory-bound result the PG also sends a one-flit **notify** to
     the requester.
7. The **packet sender** (PS) sends the packet through the router input
   buffer.

A processor therefore never sends data that the FPGA cannot hold. The
request/grant exchange is the flow control.

## Interface block

**Router buffers** (`async_fifo`): 16-entry dual-clock FIFOs with
Gray-coded pointers, each passed through two register stages into the other
clock domain. The sender side uses `walmost_full`, which leaves one free
entry, because the sender's output is registered.

**Packet receivers** (`packet_receiver`): all eight watch the same output of
the router output buffer.
* In its idle state, a receiver claims a head flit whose HWA ID lies in its
  range of four channels. It routes a command to the RB, or a payload head to
  the named TB. Until the tail it keeps taking the body flits of that packet
  and sends them to the same TB.
* At most one receiver takes a flit in any cycle. A receiver waits, leaving
  the flit in the FIFO, while its target buffer is short of room.
* Writes are registered: a command reaches the RB one cycle after it is taken
  from the FIFO.

**Packet sender** (`packet_sender` = `ps_level1` × 8 + `ps_level2`):
* Command packets (grants and notifications, one flit each) always go before
  result packets.
* Commands are served round-robin.
* Result packets are served by their priority field, highest first, then
  round-robin among equals.
* Each first-level sender registers its best command candidate and its best
  result candidate. The second level chooses one of them and answers with
  `go_cmd` or `go_res`. The chosen first-level sender then streams its packet,
  one flit per cycle, until the tail. The second level registers every flit
  into the router input buffer.
* A packet is never interleaved with another.
* From an idle sender, a packet of N flits is fully written after N+4
  cycles.

## Inside an HWA channel

`hwa_channel` wires the following blocks together.

* **RB and LGB** (`sync_fifo`, 8 entries each).
* **LGC** (`local_grant_controller`):
  * Keeps a busy bit per task buffer.
  * Grants the oldest waiting request (RB head first, else the bypassing
    request) when a buffer is free and the LGB has room.
  * Between grants, passes the PG's notify flits into the LGB.
  * A grant cannot be issued while no task buffer is free.
* **Task buffers** (`pkt_fifo`, two per channel, 512 flits each). A buffer
  counts as "ready" when it holds a complete task. A task is complete when the
  tail flit of the packet whose head carried *task tail* has been stored. The
  FIFO stores an end-of-task mark with each entry and counts the complete
  tasks it holds, so ready is known without scanning.
* **TA** (`task_arbiter`): round-robin over ready buffers that are not being
  read. The offer is registered, so it takes one cycle.
* **HWAC** (`hwa_controller`):
  * When the accelerator is idle and the PG is free, it takes chained work if
    any is offered, and a task buffer otherwise.
  * It reads the head flit into a header register. It then streams the data
    words (`hwa_in_valid/data/last`). The head flits of later packets of the
    same task are dropped.
  * It releases the task buffer at the task's last flit, then waits for
    `hwa_done` and hands the header to the PG.
* **PG** (`packet_generator`):
  * With chaining depth 0 it writes a result head flit and then one body flit
    per result word into the POB.
  * With a non-zero depth it writes into the channel's chaining buffer (CB)
    instead, as described below.
  * It takes one result word per cycle while the target buffer has room.
* **POB** (`pkt_fifo`, 512 flits): `D_rdy` is set while a whole result packet
  is stored.

## Chaining

Chaining lets an invocation name up to four accelerators in sequence, for
example JPEG zig-zag → quantise → IDCT → shift/bound. The processor sends one
request and one payload to the first HWA and gets one result back from the
last.

The header carries two fields:

* **Chaining depth** `d`: how many HWAs still follow the current one (0–3).
* **Chaining index**: three 2-bit slots. Slot `k` names, inside the chaining
  group, the HWA that runs when `k` hops remain after it.

A chaining group is four consecutive channels (HWA IDs 4g … 4g+3). For a
chain A→B→C→D the processor sends the request to A with `d = 3` and sets the
slots as follows:

* slot 2 = B
* slot 1 = C
* slot 0 = D

How a chained invocation moves:

1. A's PG sees `d ≠ 0`. It writes the header, with `d` decreased by one and
   its own HWA ID as producer, into A's **chaining buffer**. The results
   follow as body flits.
2. The head flit of every CB is visible to the four **chaining controllers**
   (`chaining_controller`) of its group.
3. Each controller works out the next HWA of every visible head: the
   producer's group bits, joined with the index slot selected by the depth in
   that head. It flags the buffers addressed to its own channel and offers one
   of them, round-robin, with a one-cycle registered offer.
4. The chosen channel's HWAC prefers this offer over its task buffers. That
   keeps chains moving and stops chaining buffers from filling up. The HWAC
   reads the CB through the group wiring.
5. The last HWA sees `d = 0` and sends a normal result packet.

A chained step uses no grant: a CB is written only if it has room, and it is
drained by whichever channel the chain names.

Two details matter for correctness:

* While a reader is in the middle of a CB packet, the CB's ready flag is held
  low, using the lock in `hwa_channel`. Otherwise another controller could
  decode a data flit at the head of the CB as a header.
* A chain may name the same HWA twice, or itself. That works because a
  channel's CB is just another member of its own group.

## Accelerator port contract

The accelerators themselves are not part of this RTL. The top brings out
one set of ports per channel:

| signal | dir (top) | meaning |
|---|---|---|
| `hwa_idle[c]` | in | the accelerator can accept a new invocation |
| `hwa_in_valid/data/last[c]` | out | input words, 128 bits, one per cycle, `last` on the final word; no back-pressure |
| `hwa_done[c]` | in | results are ready; stays high until they have been read |
| `hwa_out_valid/data/last[c]` | in | result words |
| `hwa_out_ready[c]` | out | the PG takes a result word |

`tb/hwa_model.sv` is a behavioural accelerator with this contract. It adds
`ID+1` to every word after a configurable latency.

## Timing

Measured latencies compared with the figures published for the original
implementation (N = flits of the packet):

| part | here | published |
|---|---|---|
| LGC: request to grant written | 1 | 1 |
| TA, CC: ready to offer | 1 | 1 |
| PR: command | 1 | 1 |
| PR: payload packet | N+2 at most (1 per flit + registered write) | 2+N |
| HWAC: task into the HWA | 2+N | 4+N |
| PG: results into POB/CB | N+1 after the first result | 4+N |
| PS: result packet | N+4 | 4+N |
| PS: command | 4 | 1 |

The command latency of the packet sender is longer than published. That comes
from the registers between the two sender levels and at the output. They keep
the wide 32-channel multiplexers short, but commands pay for them too.

## Departures from the original architecture

* **One clock per channel set.** In the original, every HWA with its HWAC and
  PG may run at its own clock, and the TB, POB and CB are dual-clock FIFOs.
  Here all channels share the interface clock `clk`, and those three buffers
  are single-clock FIFOs. The router side does cross clocks (`clk_noc`).
  Making TB, POB and CB dual-clock would be a local change: swap `pkt_fifo`
  for a dual-clock variant that keeps the end-of-task count.
* **Buffer sizes.**
  * TB, POB and CB are 512 flits each, which is what two 36-kbit block RAMs
    hold at 137 bits. This matches the published block-RAM counts: four per
    channel for the two TBs, two for the POB, two for chaining.
  * RB and LGB hold 8 flits each. The router buffers hold 16 flits each.
    These sizes were not published.
* **Field encodings.** Command codes, direction bits, node numbers, the
  chaining index slot rule and the group size of four are this
  implementation's choices. The chaining group size follows from the 2-bit
  index slots.
* **Notification ordering.** Because commands outrank results in the sender,
  a notify could overtake its own result packet. The PG therefore holds the
  notify until its POB is empty.
* **Statistics outputs.** The `ev_*` ports pulse on design events: a bypass,
  a request waiting for a TB, chained data taken/written, a result written,
  and a command winning over a waiting result. They are for observation only.

## Files and parameters

`rtl/`

* `hwa_pkg.sv`: flit types, field widths, command codes, node numbers,
  `proc_node()`, `chain_slot()`.
* `fpga_accel_top.sv`: the top. Parameters:

  | parameter | default |
  |---|---|
  | `NUM_CH` | 32 |
  | `PR_CH` | 4 |
  | `PS_CH` | 4 |
  | `NUM_TB` | 2 |
  | `GRP` | 4 |
  | `TB_DEPTH`, `POB_DEPTH`, `CB_DEPTH` | 512 |
  | `RB_DEPTH`, `LGB_DEPTH` | 8 |
  | `RBUF_DEPTH` | 16 |

  `NUM_CH` must be a multiple of `PR_CH`, `PS_CH` and `GRP`.
* `packet_receiver.sv`, `packet_sender.sv`, `ps_level1.sv`, `ps_level2.sv`.
* `hwa_channel.sv`, `local_grant_controller.sv`, `task_arbiter.sv`,
  `hwa_controller.sv`, `packet_generator.sv`, `chaining_controller.sv`.
* `sync_fifo.sv`, `pkt_fifo.sv`, `async_fifo.sv`.

`tb/`

* One self-checking testbench per block, named `tb_<block>.sv`. The two
  packet-sender levels are tested through `tb_packet_sender`.
* `tb_fpga_accel_top.sv`: the end-to-end test at the default size.
* `hwa_model.sv`: the behavioural accelerator.

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog.

To simulate, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hwa_pkg.sv tb/tb_fpga_accel_top.sv \
          --top-module tb_fpga_accel_top -j 4
./obj_dir/Vtb_fpga_accel_top +verilator+rand+reset+2
```

Replace the testbench name to run any other.

## What the tests establish

The end-to-end test plays all processors and the memory node at the router
port, against the full 32-channel design. It runs:

* every channel once;
* a burst of requests to one channel, so requests queue and wait for task
  buffers;
* 3-flit and 18-flit payloads (the GSM and JPEG sizes);
* chains of depth 0 to 3 in two groups;
* memory-side invocations with notifications;
* multi-packet tasks;
* priorities;
* a random mix of 80 invocations.

It checks every result word against the sum of the chain's transforms. It
also counts each mechanism and fails if any never happened: bypass,
request waiting, chaining in and out at every depth, command-first
arbitration, priority results, memory grants and notifies.

The block testbenches check the details against independent models:

* round-robin order;
* priority choice;
* the chaining index rule;
* FIFO contents under random traffic, including the clock crossing;
* latencies from the timing table;
* back-pressure from the router input buffer;
* the bypass;
* first-come-first-served granting.

Each testbench was also run against a deliberately broken copy of its
block, and each such copy was caught.
