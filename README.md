# NaNet-1 receive datapath in SystemVerilog

A GPU-based low-level trigger has a problem a CPU-based one does not.
Readout boards send detector data over the network, and every copy between
the wire and the GPU adds latency. Worse, it adds latency *jitter* from the
operating system's network stack. NaNet is a PCIe network interface card that
removes those copies. It terminates the network protocols in FPGA logic and
writes the payload of each packet, by RDMA, straight into receive buffers in
GPU memory. When a buffer is complete, the card posts an event, and the
application launches the trigger kernel on that buffer.

This repository holds synthesizable RTL for the receive side of the NaNet-1
configuration, with self-checking testbenches for every block and for the
whole path. NaNet-1 has:

* one Gigabit Ethernet channel carrying UDP;
* up to three APElink channels, the 34 Gb/s proprietary link of the APEnet+
  3D-torus NIC that NaNet descends from.

This RTL is a reconstruction from a published architecture description, not
the original source. Where that description stops, the choices made here are
marked as such in this file and in the header comment of each source file.

## The receive path at a glance

```
 Ethernet MAC (Avalon-ST, 32 bit)                  APElink link controllers
        |                                             (APEnet+ packets, 128 bit)
        v                                                     |
 +---------------+  non-UDP frames -> uc_* (microcontroller)  |
 | udp_offloader |                                            |
 +---------------+                                            |
        | UDP payload, 32 bit + length                        |
        v                                                     |
 +---------------+                                            |
 |  nanet_ctrl   |  32 -> 128 bit, APEnet+ header/footer      |
 +---------------+                                            |
        | channel 0                              channels 1..3 |
        v                                                     v
 +------------------------------------------------------------------+
 |                        nanet_router (round robin)                |
 +------------------------------------------------------------------+
        | one APEnet+ packet at a time, channel number in the header
        v
 +------------------------------------------------------------------+
 | rx_block                                                          |
 |   clop_vagen : which buffer, which virtual address               |
 |   nanet_tlb  : virtual -> physical, GPU or host                  |
 +------------------------------------------------------------------+
        | dma_* write beats (physical address, byte enables, 16 bytes)
        | ev_*  buffer-complete events
        v
   PCIe core / GPU I/O accelerator (outside this RTL)
```

The top module is `nanet1_top`. All of it runs on one clock. The numbers
below assume 200 MHz, the clock of the NaNet-1 microcontroller.

| Stage | Width | Rate at 200 MHz |
|---|---|---|
| GbE channel (offloader, controller input) | 32 bit/clock | 6.4 Gb/s, six times a GbE link |
| Router, RX block | 128 bit/clock | 25.6 Gb/s |

## Packet formats

### Ethernet/IPv4/UDP as the MAC delivers it

The MAC is assumed to run with its 16-bit receive shift on. It puts two pad
bytes in front of the destination MAC address. This makes the IPv4 header
start at word 4 of the 32-bit stream, and a UDP payload behind a 20-byte IP
header start 32-bit aligned. The first byte on the wire is in bits [31:24]
of a word. `empty` counts the unused low-order bytes of the last word.

`udp_offloader` accepts a frame as UDP only if all of these hold:

* the EtherType is 0x0800;
* the IP version is 4 and the IHL is at least 5;
* the packet is not a fragment (MF clear, fragment offset 0);
* the protocol is 17.

It honours IP options: the IHL field moves the UDP header. The payload
length comes from the UDP length field, and Ethernet padding after the
payload is discarded. Frames that fail any check leave unchanged, word for
word, on the `uc_*` stream to the microcontroller. ARP and ICMP take this
path, for example. The offloader buffers the first words of a frame (at most
the header) until it has decided, then replays them on the microcontroller
path if the frame is not UDP.

### APEnet+ packets

An APEnet+ packet is:

* a 128-bit header;
* up to 4096 payload bytes in 128-bit words;
* a 128-bit footer.

Those sizes are fixed by the APEnet+ protocol. The field layout inside
header and footer is not published. The one used here is this design's own
(`nanet_pkg`):

| Word | Bits | Field |
|---|---|---|
| header | [127:120] | kind = 0xA5 |
| | [119:112] | channel number, stamped by the router |
| | [111:96] | UDP destination port (GbE), free for APElink |
| | [95:80] | payload length in bytes, 1..4096 |
| | [79:64] | sequence number |
| footer | [127:120] | kind = 0x5A |
| | [95:80] | payload length, repeated |
| | [79:64] | sequence number, repeated |
| | [63:32] | sum mod 2^32 of the 32-bit payload words |

Payload byte *p* of a packet is in 32-bit lane *p*/4 of its 128-bit word,
at bits [31-8(p mod 4) : 24-8(p mod 4)] of that lane. Bytes past the end of
the payload are zero.

`nanet_ctrl` is cut-through. The offloader gives the UDP length with the
first payload word, so the header leaves before the payload has arrived. A
UDP payload longer than 4096 bytes (jumbo frames only) becomes several
packets with consecutive sequence numbers. A packet of N 32-bit words
occupies the controller's input for N+3 clocks.

## Receive buffers: CLOPs, address generation and translation

This is the part of the design that needs the most explanation.

### What software sets up

For each channel, the application registers a **CLOP**: a circular list of
persistent receive buffers, in GPU or host memory. Each buffer is described
by its virtual base address and size (`cfg_buf_we`, `cfg_clop`, `cfg_idx`,
`cfg_base`, `cfg_size`). Writing the number of buffers (`cfg_nbufs_we`,
`cfg_nbufs`) starts the list at buffer 0, offset 0. A CLOP with zero buffers
is off, and packets for it are dropped. Software also fills the TLB with
page mappings (`tlb_wr_*`): a virtual page number, a physical page number,
and whether the page is in GPU or host memory.

In NaNet-1 as built, firmware on the card's microcontroller did both jobs
for every packet: it found the destination virtual address and translated
it to a physical one. That cost about 1.6 µs per packet and added jitter.
The planned improvement was a TLB plus a hardware virtual-address
generator. This RTL implements that planned version: `clop_vagen` and
`nanet_tlb` inside `rx_block`. How they fill buffers is this design's own
choice.

### How a buffer fills (`clop_vagen`)

* A packet's length is rounded up to 16 bytes, so every payload starts on a
  128-bit boundary of its buffer.
* If the packet does not fit in what is left of the current buffer, that
  buffer is **closed**. The packet goes to offset 0 of the next buffer in the
  list. After the last buffer comes buffer 0 again.
* If a committed packet leaves the buffer exactly full, the buffer is closed
  at once. It does not wait for the next packet.
* A packet larger than the buffer it would land in is refused. A packet is
  never split across buffers.
* Closing a buffer posts an event `rx_event_t` on `ev_*`:
  * CLOP (channel) number;
  * buffer index;
  * buffer base address;
  * number of bytes written, including the round-up padding.

  Requests wait while an event has not been taken.

The address is handed out when the header arrives (`alloc`). The fill state
changes only when the footer has been checked (`commit`).

### Translation (`nanet_tlb`)

* Fully associative, 32 entries, 64 KB pages by default.
* A lookup is combinational. The published target was about 200 ns; this
  lookup is a single clock.
* On a miss, `rx_block` stops and raises `tlb_miss`, showing the virtual
  address on `tlb_miss_va`. It resumes once software (or a page-table walker
  outside this RTL) has written a matching entry. Nothing is lost while it
  waits: the router and the channels behind it are back-pressured.

### Writing (`rx_block`)

For each payload word, `rx_block` translates the running virtual address and
emits one `dma_beat_t`:

* a 64-bit physical address;
* a GPU/host flag;
* 16 byte enables;
* 16 data bytes.

The data bytes are reordered so that byte *i* of the beat belongs at
address addr+*i*. Byte enables cover only real payload bytes. Towards the
PCIe side this is the whole RDMA write interface. Building PCIe TLPs, and
the GPU peer-to-peer protocol, are left to the PCIe core and GPU I/O
accelerator, which are outside this RTL.

The footer is checked against the header: its kind and its length. A packet
that ends early, or whose footer does not match, still commits what was
written, and is counted in `len_errors`. The following packets are
dropped and counted in `pkts_dropped` (the header's payload length is then
not written):

* packets whose header is not a header;
* packets for a channel with no CLOP;
* packets with a length outside 1..4096;
* packets too large for their buffer.

With TLB hits and a ready PCIe side, a packet of N payload words passes in
N+2 clocks. A 4096-byte packet therefore takes 258 clocks, about 15.9 bytes
per clock.

## Router

`nanet_router` arbitrates at packet boundaries. Among the channels that
present a header, it grants the next one after the last winner (round
robin). It keeps that grant until the footer has passed, so packets are
never interleaved. The grant is combinational, so there is no dead clock
between packets. On the way through, it writes the input channel number into
header bits [119:112]. The RX block uses that number to choose the CLOP.
Channel 0 is GbE, and channels 1..3 are APElink.

## Top-level ports of `nanet1_top`

| Group | Signals | Towards |
|---|---|---|
| GbE input | `mac_data/valid/sop/eop/empty/ready` | Ethernet MAC, Avalon-ST |
| Non-UDP frames | `uc_data/valid/sop/eop/empty/ready` | microcontroller |
| APElink input | `apelink_beat[3]`, `apelink_valid`, `apelink_ready` | APElink link controllers |
| RDMA writes | `dma`, `dma_valid`, `dma_ready` | PCIe core |
| Events | `ev`, `ev_valid`, `ev_ready` | host/GPU event queue |
| Configuration | `cfg_*`, `tlb_wr_*` | microcontroller or host registers |
| Miss service | `tlb_miss`, `tlb_miss_va` | microcontroller |
| Statistics | `udp_frames`, `other_frames`, `gbe_pkts`, `router_pkts[4]`, `pkts_ok`, `pkts_dropped`, `len_errors`, `miss_stalls` | status registers |

Parameters, with their defaults:

* `N_APELINK` = 3;
* `MAX_BUFS` = 32 buffers per CLOP;
* `N_TLB` = 32 entries;
* `PAGE_BITS` = 16.

Only `N_APELINK` comes from the NaNet-1 description. The others are this
design's choice. Reset is asynchronous and active low. Every valid/ready
handshake follows the usual rule, and assertions check it: data is held
while valid is high and ready is low.

## What is not here

These parts of NaNet-1 sit around this RTL. Their signals are the top-level
ports.

* **Vendor IP and external parts.** They are used as they are, not designed:
  * the Triple-Speed Ethernet MAC and the SGMII PHY;
  * the PCIe Gen2 x8 core;
  * the on-board DRAM and its controller;
  * the Nios II microcontroller.
* **APElink physical layer.** The transceivers, 8b/10b coding, the
  word-stuffing protocol and link control come from APEnet+. They are not
  described in enough detail to rebuild.
* **Transmit side.** The TX (packet injection) path and the GPU I/O
  accelerator's read side are not included. NaNet's trigger use is receive
  only.
* **Custom logic.** The block for application-specific data manipulation is
  not included, because what it does depends on the experiment.
* **Later configurations.** The 10 GbE channel of NaNet-10 and the
  deterministic-latency links of NaNet³ are not included.

## Where this RTL departs from the published design

* The receive-buffer bookkeeping and the address translation are done in
  hardware (`clop_vagen`, `nanet_tlb`), as in the announced improvement. In
  the measured NaNet-1 they ran in microcontroller firmware, so the latency
  of this RTL is not that of the measured card. The TLB has a single-clock
  lookup, where about 200 ns was announced.
* The header and footer field layout, the footer checksum, and the way
  packets are placed in buffers (16-byte alignment, close when the next
  packet does not fit) are this design's own.
* The 16-bit MAC receive shift, the 200 MHz single clock, and the TLB
  geometry are assumptions.
* Latency figures measured on the real card (the GbE and APElink benchmarks)
  cannot be compared with this RTL, because they include the host, the
  firmware and PCIe.

## Capacity against the trigger workloads

The testbenches take 64-byte events.

* **GbE-fed RICH level-0 trigger.** Buffers of 128 to 1024 events (8 to
  64 KB). About 1.7 Mevents/s, which is 0.87 Gb/s. The GbE path of this RTL
  carries 4 bytes per clock. It measured 3.79 B/clock with 1024-byte
  datagrams, where the link needs 0.625.
* **APElink-fed trigger.** Buffers of 4 to 5 kevents (256 to 320 KB), about
  20 Gb/s, which is 12.5 B/clock. The router and RX path carry 16 B/clock.
  They measured 15.88 B/clock with 4096-byte packets.
* **Buffer-size sweeps.** GbE buffers of 16 to 4096 events (1 to 256 KB)
  and APElink buffers of 16 to 16384 events (1 KB to 1 MB). Two 1 MB buffers
  use exactly the 32 TLB entries of 64 KB. Because a packet never spans two
  buffers, packets must not be larger than the buffer; below 64 events the
  APElink test sends one packet per buffer. The rate stays at 3.78 to 3.79
  B/clock on GbE, and at 15.4 (1 KB packets) to 15.9 B/clock on APElink.
* **The 10 Mevents/s experiment requirement.** This is 640 MB/s, 3.2
  B/clock. One APElink channel carries it. One GbE link cannot; the limit
  is the link, not this logic.

## Simulating

Everything runs with plain Verilator 5, with `--timing` for the testbenches'
delays. Give the package files first. For example:

```sh
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nanet_pkg.sv tb/tb_eth_pkg.sv tb/tb_ape_pkg.sv \
  rtl/udp_offloader.sv rtl/nanet_ctrl.sv rtl/nanet_router.sv \
  rtl/clop_vagen.sv rtl/nanet_tlb.sv rtl/rx_block.sv rtl/nanet1_top.sv \
  tb/tb_nanet1_top.sv --top-module tb_nanet1_top
./obj_dir/Vtb_nanet1_top
```

To run one block's test, swap the last file and the top module name. Extra
source files do no harm. Every testbench:

* ends by printing `TB_RESULT checks=<n> failures=<m>`;
* has a watchdog;
* draws its stimulus from `$urandom`, so `+verilator+seed+<n>` changes the
  traffic.

Variables that are not reset start at whatever Verilator picks. Use
`+verilator+rand+reset+2` to make them random.

| Testbench | What it checks |
|---|---|
| `tb_udp_offloader` | Random UDP datagrams (with and without IP options, lengths 1 to 1472) mixed with ARP, ICMP and fragments. Checks payload bytes, the length and port given to the controller, and that non-UDP frames pass word for word. |
| `tb_nanet_ctrl` | Payload streams of 1 to 9000 bytes, so long ones are split. Checks them against an independent packing model: header, words, zeroed tail, footer checksum. Also checks the N+3 clock timing. |
| `tb_nanet_router` | Four busy channels. Checks no interleaving, every packet delivered intact and in order, the channel stamp, and, when saturated, round-robin order 0,1,2,3 at one word per clock. |
| `tb_clop_vagen` | Random allocate/commit traffic on several CLOPs against a reference model. Covers wrap-to-next-buffer, exactly-full closes, a disabled CLOP, and packets too large for their buffer. |
| `tb_nanet_tlb` | Random mappings. Checks hits, misses, invalidation and the GPU flag. |
| `tb_rx_block` | Packets from several channels into a byte-level memory model. Predicts every write beat (address, GPU flag, byte enables, data) and event. Includes TLB misses served by the testbench, pages crossed mid-packet, drops, a footer length error, and N+2 clock timing. |
| `tb_nanet1_top` | The whole path at default parameters. GbE frames (UDP and not) and three APElink channels at once. Covers drops before a CLOP is registered, exactly-full buffers, TLB misses, and the 4096-byte-packet timing. It counts each mechanism and fails if one never happened. |
| `tb_workload_rich` | Trigger-style traffic: 64-byte events into the buffer sizes above, on GbE and APElink, including the full size sweeps. Checks every buffer's contents and event, and measures bytes per clock. |
