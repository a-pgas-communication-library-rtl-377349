# GAScore: an Active Message engine for PGAS on FPGAs

In a Partitioned Global Address Space (PGAS) cluster every node owns one slice of a
global memory, and any kernel may read or write any slice. Access to a remote slice is
*one-sided*: only the initiating kernel takes part, the remote side's runtime does the
work. Shoal (Sharma and Chow, "A PGAS Communication Library for Heterogeneous
Clusters") provides this for mixed clusters of CPUs and FPGAs on top of the Galapagos
framework. On an FPGA, the runtime is a hardware block, the **GAScore**. It sits between
the hardware kernels, the network, and the FPGA's shared memory.

This repository holds synthesizable SystemVerilog for the GAScore, plus a
self-checking testbench for every block. The block structure and the job of each
block follow the published GAScore. That description gives no message formats,
widths, buffer sizes or register maps, so those are this design's own choices. They
are marked as such below and at the top of each source file.

## Active Messages

Kernels talk through Active Messages (AMs). An AM is a packet whose arrival also
triggers an action at the receiver. There are three classes:

| class | payload | what the receiver's GAScore does |
|---|---|---|
| Short | none | raises a handler event for the destination kernel |
| Medium | up to a packet | passes header and payload to the destination kernel |
| Long | up to a packet | writes the payload into its shared memory at a given address |

Medium and Long each come in two flavours, which differ only at the sender. In the
*FIFO* flavour (Medium FIFO, Long FIFO) the kernel streams the payload itself. In the
plain flavour (Medium, Long) the kernel names an address in its node's memory, and the
sending GAScore reads the payload from there. There are also two *gets*. A Medium get
asks the remote node to send back a Medium message read from its memory. A Long get
asks it to write a block of its memory into the requester's memory. Finally, a
*Strided* Long scatters its payload into equal blocks a fixed stride apart, and a
*Vectored* Long into segments each with its own address and length.

Every received AM is answered with a **reply**, unless the sender marked it
*asynchronous*. A reply is a Short AM. Its handler increments a counter at the original
sender. A kernel can therefore send N messages and then wait until its counter
reaches N. Each local kernel has one such counter, the built-in *handler*. Kernels read
and decrement it over their own AXI-Lite port.

## Message format (this design's choice)

All streams are 64 bits wide. Every AM starts with one header word:

```
 63        48 47        32 31        16 15     8 7      0
+------------+------------+------------+--------+--------+
|   words    |    dst     |    src     | flags  |  type  |
+------------+------------+------------+--------+--------+
flags: bit 0 = asynchronous (no reply), bit 1 = reply
type:  1 Short, 2 Medium FIFO, 3 Medium, 4 Long FIFO, 5 Long, 6 Medium get, 7 Long get,
       8 Strided Long, 9 Vectored Long
words: payload length in 64-bit words (for Strided and Vectored: the total of all
       segments, descriptors not counted);   src, dst: 16-bit kernel IDs
```

What a kernel sends (a *command*) and what travels on the network can differ:

| type | command from the kernel | packet on the network |
|---|---|---|
| Short | `[hdr]` | `[hdr]` |
| Medium FIFO | `[hdr][payload...]` | `[hdr][payload...]` |
| Medium | `[hdr][src_addr]` | `[hdr][payload read from src_addr...]` |
| Long FIFO | `[hdr][dst_addr][payload...]` | `[hdr][dst_addr][payload...]` |
| Long | `[hdr][src_addr][dst_addr]` | `[hdr][dst_addr][payload read from src_addr...]` |
| Medium get | `[hdr][remote src_addr]` | same; answered with an async Medium |
| Long get | `[hdr][remote src_addr][local dst_addr]` | same; answered with an async Long |
| Strided Long | `[hdr][dst_addr][stride,blk,nblk][payload...]` | same |
| Vectored Long | `[hdr][addr,len][payload...][addr,len][payload...]...` | same |

The Strided descriptor word is `{stride[63:32] (bytes), blk[31:16] (words per block),
nblk[15:0]}`; block *i* goes to `dst_addr + i*stride`, and `nblk*blk` must equal
`words`. A Vectored descriptor is `{addr[63:32], len[31:16], 0[15:0]}`, and segments
follow until `words` payload words have been carried; a descriptor with `len = 0` is
skipped. Both kinds take their payload from the kernel (FIFO flavour).

Addresses are byte addresses in 64-bit words of their own. A reply is
`[Short hdr, flags = reply|async, src and dst swapped, words = 0]`. A get is answered
with a Medium or Long whose source is the answering kernel, whose destination is the
requester and whose flags say asynchronous. So a get costs two packets and no reply.

Each stream beat is a packed struct `axis_t {data[63:0], last, dest[15:0], user[15:0]}`.
It carries valid/ready beside it, as in AXI4-Stream. `dest` is the destination kernel
ID, which the network layer routes on. `user` (TUSER) carries the packet length in
words on the network output.

## Structure

```
 From Kernels -> FIFO -> xpams_tx --+--> [arb] -> am_tx -> add_size -> To Network
                           |  |     |              |  ^
                           |  |     |      rd cmd FIFO |rd data        (DataMover
                           |  |     |              v  |                 read side)
 To Kernels <- [arb] <-----+  |     |
                 ^            |     +----------------------------+
 handlers <- [arb] <----------+                                  |
   ^  ^                                                          |
   |  +---------------------------- xpams_rx <- hold_buffer <- am_rx <- From Network
   |                                  |  |                       |  ^
   +----------------------------------+  +-> To-Kernels arb      v  |  (DataMover
                                                      wr cmd FIFO, wr data, status)
```

Each of the three arbiters merges one stream from xpams_tx with one from xpams_rx.

### Egress: from a kernel to the network

1. **FIFO** (`axis_fifo`, 512 deep) decouples the kernels from the GAScore.
2. **xpams_tx** decodes the header. Two cases need no memory and no network, and it
   serves them itself:
   * a Short to a local kernel becomes a handler event for that kernel;
   * a Medium FIFO to a local kernel is copied, header and payload, to To-Kernels.

   If such a local message is not asynchronous, xpams_tx then raises a handler event for
   the *sending* kernel. This takes the place of the reply packet (a shortcut of this
   design). Every other command, local or remote, goes unaltered to am_tx. A kernel is
   local when `KERNEL_BASE <= id < KERNEL_BASE + NUM_KERNELS`.
3. **am_tx** passes FIFO-flavour messages and gets straight through. For Medium and
   Long it swallows `src_addr` and issues one DataMover read command `{src_addr,
   8*words bytes}`. For a Long it then forwards `dst_addr`. Finally it appends the
   `words` beats that the DataMover returns, setting `last` on the final one. The header
   passes without an added cycle.
4. **add_size** must write the length on TUSER of *every* beat, including the first.
   So it stores each packet whole (a 2048-word data FIFO and a small FIFO of lengths)
   before sending it. This costs one packet of latency and no throughput.

### Ingress: from the network to kernels and memory

1. **am_rx** parses the header.
   * For a Long or Long FIFO it sends a DataMover write command `{dst_addr, 8*words}`,
     streams the payload into the write-data port, and forwards **only the header word**,
     tagged `held`.
   * A Strided or Vectored Long is cut into segments (one per block or descriptor). Each
     segment gets its own write command, with `last` on its final word. Again only the
     header is forwarded, tagged `held`.
   * When a memory message's final word is accepted, am_rx notes how many write
     commands it used in a small FIFO (16 messages). It counts the returning write
     statuses, and once the count covers the message at the head of that FIFO it
     issues one *release*.
   * Every other known packet is forwarded whole, untagged. Unknown types are dropped.
2. **hold_buffer** is an ordinary FIFO (2048 words) with one extra rule, and this rule
   is the subtle part of the design. A tagged beat leaves only when a *release credit*
   is available. am_rx produces one credit for each memory message whose write statuses
   have all returned, and the DataMover returns statuses in command order. Together
   these mean a Long's header reaches xpams_rx only after all of its payload is in
   memory. So a handler event or reply
   can never overtake the data it announces. Credits may arrive before the header
   (short payloads, fast memory). They are counted, not lost. Everything behind a held
   header waits too, which keeps messages in order.
3. **xpams_rx** acts on each message:
   * reply: handler event for the destination kernel;
   * Short and every Long kind: handler event, then a reply unless asynchronous;
   * Medium, Medium FIFO: header and payload to To-Kernels, then a reply unless
     asynchronous;
   * Medium get / Long get: builds the answer command and sends it to am_tx, which
     reads the memory.

### Handlers

`handler_wrapper` holds one `handler` per local kernel. It steers each handler event by
kernel ID. Each handler is a 32-bit counter behind an AXI-Lite slave:

| offset | read | write |
|---|---|---|
| 0x0 | current count | subtract the written value |
| other | 0 | ignored |

Subtracting, rather than writing, means an event that lands in the same cycle is not
lost. The kernel reads N and writes N back to consume N replies. Responses are always
OKAY. Reads answer one cycle after the address.

### Memory side

The published GAScore uses a vendor AXI DataMover to turn stream commands into AXI4
memory bursts. The DataMover is not part of this RTL. `gascore` exposes its three
stream groups instead: read command and read data; write command, write data and write
status. The command is reduced to `{addr[31:0], btt[22:0]}` (btt = bytes to transfer).
Testbenches use a behavioural model, `tb/datamover_model.sv`.

## Top-level interface (`gascore`)

| group | signals | direction |
|---|---|---|
| clock, reset | `clk`, `rst_n` (synchronous, active low) | in |
| From Kernels | `s_kern_valid/ready/data` (`axis_t`) | in |
| To Kernels | `m_kern_valid/ready/data` | out |
| From Network | `s_net_valid/ready/data` (TUSER ignored) | in |
| To Network | `m_net_valid/ready/data` (TUSER = length in words) | out |
| DataMover read | `dm_rdcmd_*` (`dm_cmd_t`), `dm_rd_valid/ready/data` | out / in |
| DataMover write | `dm_wrcmd_*`, `dm_wr_valid/ready/data/last`, `dm_wrsts_valid/ready/okay` | out / in |
| Handlers | `h_count[k]` and one AXI-Lite slave per kernel: `h_aw*`, `h_w*`, `h_b*`, `h_ar*`, `h_r*` (arrays over kernels) | |

| parameter | default | meaning |
|---|---|---|
| `KERNEL_BASE` | 0 | ID of the first local kernel |
| `NUM_KERNELS` | 1 | local kernels (handlers and AXI-Lite ports); one kernel is the configuration whose FPGA resource use was published |
| `KFIFO_DEPTH` | 512 | From-Kernels FIFO, words |
| `CMD_DEPTH` | 16 | each DataMover command FIFO |
| `BUF_DEPTH` | 2048 | add_size and hold_buffer, words |

Packets up to 2048 words fit. A Galapagos packet is at most 9000 bytes (1125 words).
A longer packet would block add_size for good.

## Timing

Every block moves one beat per cycle when its neighbours allow. Headers cost one cycle
in xpams_tx and xpams_rx, where the header is latched and re-issued. They cost none in
am_tx, am_rx and the arbiters. Each FIFO adds one cycle. add_size adds a whole packet,
since it stores and forwards. A memory-sourced message waits for the DataMover's read
latency before its payload. A Long's handler event and reply wait for the DataMover's
write status.

## Where this design departs from, or adds to, the published GAScore

* **Formats and encodings**: all the header fields, type codes, command layouts and
  reply and get-answer formats are this design's own.
* **Local replies**: for local Short and Medium FIFO messages the reply is a direct
  handler event to the sender, not a reply packet.
* **Long arrivals** raise a handler event at the destination kernel as well as a reply.
* **Strided and Vectored Long messages** use this design's own layouts (none is
  published). Only the FIFO flavour exists: the sender does not gather a strided or
  vectored payload from its own memory.
* **User-defined handlers** are not supported, and the published hardware does not
  support them either. The only handler is the reply counter.
* **Write status errors** are not acted on. A failed write still releases its header.
* **Barriers** are not a separate block. A barrier is built from Short messages and
  the reply counter.
* **Resources**: the published numbers are for a vendor FPGA flow with an HLS
  implementation. Nothing here reproduces them.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops.
With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl rtl/shoal_pkg.sv tb/tb_gascore.sv \
  --top-module tb_gascore -o sim && ./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_gascore` | The whole GAScore at default parameters. Every AM type in both directions, including Strided and Vectored Long: its network output is looped back for local kernel 0, and the testbench plays remote kernel 5. Checks memory, kernel deliveries, network packets and TUSER, the AXI-Lite counter, a burst with arbitration conflicts, and that each mechanism (local delivery, memory read/write, header hold, replies, gets, loopback, back-pressure) occurred. |
| `tb_axis_fifo`, `tb_axis_arb` | FIFO order and full/empty flags; packet-atomic round-robin arbitration |
| `tb_xpams_tx`, `tb_xpams_rx` | exact output sequences for every message type |
| `tb_am_tx`, `tb_am_rx` | packet building with memory reads; Long, Strided and Vectored writes, held tags, one release per message |
| `tb_add_size`, `tb_hold_buffer` | TUSER length and store-and-forward; hold and release rules |
| `tb_handler`, `tb_handler_wrapper` | counter against a model under random events and AXI-Lite traffic; per-kernel steering |

All external streams in the testbenches see random valid gaps and random ready drops.
