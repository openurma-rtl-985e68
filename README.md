# OpenURMA NIC — SystemVerilog implementation

This is synthesizable SystemVerilog for a Unified Bus network interface. It follows the
OpenURMA design: a transaction layer built on Jetties, a transport layer built on TP Channels,
and a load/store bypass path. The top module is `urma_nic`. It has plain ports:

- table write ports;
- a doorbell;
- completion polling;
- a receive-queue pop port;
- a CPU load/store port;
- a 64-bit wire with `valid`/`ready`/`last` in each direction;
- a statistics read port.

## Data movement

Every element passes one packet per valid/ready handshake as a packed `pkt_t` (`urma_pkg`).
The packet is ten 64-bit words in wire order:

- Ethernet header;
- network header (NTH);
- two words of transaction header (BTAH);
- a payload word;
- two words of reliable transport header (RTPH);
- a selective-ack bitmap;
- a compare operand.

A reliable frame is the 10 words plus an FCS word. A bypass frame sends only the first
6 words plus the FCS. Payload is limited to one 8-byte word per packet. The paper's flit
format and field positions are not given, so the bit layout is our own.

**Latency convention.** A stage has latency 1 when a packet accepted on one clock edge is
presented at its output on the next edge.

### Transmit side (initiator)

`doorbell` (1 cycle) takes the WQE from the host.

`jsched` (5 cycles) is the Jetty scheduler. It does a round-robin scan over the
per-Jetty work queues and assigns the transaction sequence number. The paper quotes II=2 for it; this design issues at most one request every 4 cycles.

`ord_ini` (1 cycle) is the initiator order tracker. It holds a work request behind:
- a fence, until that Jetty's outstanding operations are complete;
- a strong-order request, under ROI.

`btah_b` (1 cycle) builds the transaction header.

`tx_mux` merges the request path with responses generated for remote initiators.

Next come the transport stages:
- `tpc_tx` (1 cycle) picks a TP Channel by destination and assigns the PSN.
- `tpg` is the TP-group lane dispatcher. It sprays unordered traffic round-robin and pins ordered traffic to one lane.
- `cwnd` (1 cycle) applies an AIMD window, from 65536 down to a 4096 floor, and stalls when the window is full.
- `retrans` (1 cycle) keeps a 64-slot ring per channel. It supports go-back-N or selective retransmission, chosen by a bit in the TP table.
- `rto` drives retransmit timeouts.
- `rtph_b` (1 cycle) adds the reliable header.
- `nth_b` (1 cycle) adds the network header.

`ethenc` (11 cycles to the first word) frames the packet and appends a CRC-32. A cold WRITE
therefore reaches the wire 24 cycles after its doorbell.

### Receive side (target)

`ethdec` checks the FCS and rebuilds the packet.

`nth_p` splits reliable from bypass traffic and drops frames addressed to another node.

`rtph_p` separates ACK/SACK events, which go back to `retrans` and `cwnd`, from data.

`tpc_rx` and `reorder` check the PSN:
- duplicates are dropped;
- out-of-order packets are held in a small window, which also feeds the SACK bitmap.

`cong_echo` reflects FECN marks into the ECE bit of the ACK, and `tpack` builds the ACK or
SACK. When a WRITE or SEND under ROL or UNO is delivered, the transport ACK also carries the
transaction ACK (the "fused" bit). In that case `taack` generates no separate TAACK.

`btah_p` validates the transaction header.

`ord_tgt` applies target-side ordering under ROT. A strong-order request waits in a hold
buffer while earlier requests of the same (node, Jetty) pair are still executing.

`jg_dispatch` rewrites the destination Jetty when it names a Jetty Group. A group has up to
8 members and uses hash, round-robin or least-depth selection.

Four inputs meet in `dispatch_mux`: ordered requests, bypass requests, fused acks and bypass
responses. `dispatch` sends each opcode class to its executor:
- `hbm_rd` for READ and LOAD;
- `hbm_wr` for WRITE and STORE;
- `atom` for the nine atomics, one every 4 cycles;
- `jrecv` for SEND into per-Jetty receive queues.

`hbm_rd`, `hbm_wr` and `atom` check memory-region bounds, token and permission against
`mr_tab`, then access the 64 KB on-chip `nic_mem`.

`taack` turns results into READ_RESP, ATOMIC_RESP, TAACK, LOAD_RESP or STORE_ACK and sends
them back through the transmit side.

Responses arriving back at the initiator go through the completion stages:
- `comp_gen` builds a CQE;
- `comp_reord` enforces issue-order completion for Jetties that ask for it;
- `comp_notify_tee` signals the order trackers;
- `cqe_stream` keeps per-completion-queue rings that the host polls.

### Load/store bypass

`ldst_bypass` turns a CPU load or store into one bypass frame. The first word is on the wire
8 cycles after the request. Up to 16 loads can be outstanding, each with its own context tag
and a timeout. The response comes back through the bypass receive parser. `wire_arb` merges
its frames with the reliable path, one whole frame at a time.

### State tables

There are three tables. `jt_tab` and `tp_tab` default to 1024 entries each; `mr_tab` defaults to 64:
- `jt_tab`: Jetty records (the paper budgets 20 bytes each; this design stores 15);
- `tp_tab`: TP Channel configuration (the paper budgets 56 bytes per channel, which also covers the PSN, window and ring state that this design keeps in the transport stages);
- `mr_tab`: memory-region records (32 bytes each in the paper; 100 bits here), 64 entries.

With the paper's record sizes, (1024, 1024) gives 1024·(20+56+32) B = 110.6 KB; the RTL stores less than that.

## Parameters

The `urma_nic` defaults are the paper's numbers:
- 1024 Jetties and 1024 TP Channels;
- a 64-slot retransmit ring;
- window 65536 / 4096;
- 64 KB memory;
- 8-member Jetty Groups.

Other sizes have no number in the paper, so these are our own choices:
- work-queue depth;
- receive-queue depth;
- completion queues;
- reorder window;
- timeout values.

## What is not implemented

- **Off-chip parts.** The Ethernet MAC/PHY, the host CPU, host DRAM and memory bus, and the switch fabric are outside the chip. They have no RTL. The system testbench uses a small behavioural two-node wire model (`tb/nic_pair.sv`). It can drop, FECN-mark, reorder or stall frames.
- **Wire rate.** The design does not reach the paper's ~141 WR/µs per-WR rate. The wire here is a single 64-bit word per cycle, so a full frame takes 11 cycles, which is about 29 WR/µs at 322 MHz. The paper does not give its datapath width.
- **Payloads.** Multi-word payloads, and so bulk transfers larger than 8 bytes, are not modelled.
- **Target-side strong-order hold.** The end-to-end test does not force it. It is exercised in the `ord_tgt` unit testbench.

## Verification

Each block has a self-checking testbench in `tb/<block>_tb.sv`. It checks function and, where
the paper gives one, the cycle latency. Every testbench prints one `TB_RESULT` line.

`tb/urma_nic_tb.sv` runs two reduced-size NICs through the wire model. It covers:
- the cold path (24 cycles);
- the bypass (8 cycles);
- LOAD/STORE, READ, FAA and CAS;
- fences and ordering modes;
- Jetty Groups;
- memory-region faults;
- drops with timeout recovery;
- reordering with SACK;
- congestion marking.

At the end it fails if any counted mechanism never happened.

`tb/urma_nic_full_tb.sv` connects two default-size NICs back to back with no parameter
overrides.
