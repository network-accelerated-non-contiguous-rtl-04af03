# A packet-processing accelerator for non-contiguous receives

When a message described by an MPI derived datatype arrives, its bytes do not
belong in one contiguous buffer: a vector type, for instance, puts every block
of `B` bytes at a stride of `S` bytes. A receiver normally lands the message
in a staging buffer and copies it apart on the host CPU. In the sPIN model the
network card runs a small *payload handler* on each packet as it arrives, and
the handler writes the packet's pieces straight to their final places in host
memory, so the unpack overlaps with the transfer and the host never touches
the data.

This RTL is the hardware that runs those handlers on the NIC: four clusters of
eight 32-bit cores (the cores attach through ports, see below), each with a
1 MiB single-cycle scratchpad and a DMA engine, a shared 8 MiB L2, a 256-bit
network input and a 256-bit output towards the host's PCIe link, all at one
clock (1 GHz in the target technology). It is sized so that 200 Gbit/s of
packets can flow in from the network and back out to the host at the same
time.

## The chip at a glance

```
                 256                       256
  network ==> ni_port ===+           +=== host_port ==> PCIe (FIFO of writes)
                         |           |
                    +----+-----------+-----+
                    |       soc_xbar       |   9 masters, 3 slaves, 256 bit
                    +--+--+----------+--+--+
               l2 bank 0   l2 bank 1      \  two 256-bit lines per cluster
               (4 MiB)     (4 MiB)         \
                                    dwc_buf x2 per cluster (64 <-> 256)
                                           |  ch0: reads + core accesses
                                           |  ch1: DMA writes
                              +------------+-------------+
                              | pulp_cluster (x4)        |
                              |  cluster_ext_xbar        |
                              |   ^          ^           |
                              |  core_demux  dma_engine  |
                              |  (x8)   \    /  rd+wr    |
                              |        l1_xbar           |
                              |   16 x l1_spm_bank       |
                              |   (64 KiB, 32 bit)       |
                              +--------------------------+
                                 ^ core_req_i/core_rsp_o (8 per cluster)
```

| Module | What it is |
|---|---|
| `spin_accel` | top: four clusters, two L2 banks, system crossbar, NI and host ports |
| `pulp_cluster` | one cluster without its cores |
| `l1_spm_bank`, `l2_spm_bank` | single-cycle SRAM banks (arrays with byte enables) |
| `l1_xbar` | cores and DMA to the 16 word-interleaved L1 banks |
| `core_demux` | routes each core access to L1, the DMA registers or out of the cluster |
| `cluster_ext_xbar` | merges outgoing core accesses and DMA traffic onto the cluster port |
| `dma_engine` | four-channel DMA, 64 bit/cycle in each direction |
| `dwc_buf` | 64-to-256-bit width converter with line packing |
| `soc_xbar` | the 256-bit system crossbar |
| `ni_port` | network input: packets into an L2 ring, one notice per packet |
| `host_port` | host output FIFO |
| `mem_xbar`, `rr_arb` | the generic crossbar and arbiter every interconnect above is built from |
| `spin_pkg` | bus types, sizes and the address map |

## Life of a packet

1. A packet arrives on `ni_*` as 256-bit beats (`ni_last_i` on its last).
   `ni_port` writes each beat to the next 32 bytes of a 1 MiB ring at the
   base of L2 and, at the last beat, posts `{address, length}` on `pkt_*`.
2. Whatever schedules handlers (in the tests, the testbench) gives the packet
   to one core. The core programs its cluster's DMA to copy the packet from
   L2 into its part of L1 and polls until the copy is done.
3. The handler works out where the packet's bytes belong. For a vector type
   with block `B` and stride `S` the packet at message offset `off` starts at
   host offset `(off / B) * S`, and every following block is `S` further on.
   For each block it starts a DMA copy from L1 to the host window and moves on
   without waiting.
4. The DMA's writes cross the system crossbar to `host_port`, which emits
   them on `host_*` as `(address, 256-bit data, byte enables)`.

A handler ends by waiting for its core's pending-copy count to reach zero.

## Bandwidth: where the 256 bits per cycle go

Line rate is 200 Gbit/s, or 200 bit/cycle at 1 GHz. The fabric gives every
stage at least 256 bit/cycle. Several parts of the design exist only to keep
that true, and they are the least obvious parts:

* **Two L2 banks.** Each payload byte is written to L2 once (by the NI) and
  read once (by a cluster DMA), so L2 must take 2 x 256 bit/cycle. The two
  banks are interleaved on 32-byte lines (address bit 5) and are separate
  slaves of the crossbar.
* **A duplex cluster port.** Each cluster carries a quarter of the traffic,
  64 bit/cycle in and 64 bit/cycle out at the same time. The cluster port is
  therefore two 64-bit request channels. Channel 0 carries DMA reads from
  outside the cluster plus any outgoing core access. Channel 1 carries DMA
  writes leaving the cluster.
* **A DMA with two issue pipelines.** One pipeline serves copies whose source
  is outside the cluster (L2 to L1: data coming in). The other serves copies
  whose source is the cluster's L1 (L1 to host: data going out). Each
  pipeline issues one 8-byte read per cycle and has its own in-order tracker.
  A single shared read slot would cap a cluster at 32 bit/cycle each way.
  Where both pipelines target the same write port, they take turns.
* **Line packing in the width converter.** The crossbar moves 256-bit lines,
  but a cluster produces 64-bit beats. If each beat became its own crossbar
  transfer, the host port and the L2 banks would fill up at a quarter of
  their width. `dwc_buf` merges consecutive writes to one 32-byte line into
  one wide write. For reads, it answers consecutive reads of one line from a
  single fetch. The DMA helps by keeping a channel's turn until the channel
  reaches a line boundary, so its beats come in runs of four. This does the
  job AXI bursts and an AXI upsizer do in a PULP system.
* **L1 ports for the DMA.** In `l1_xbar` the DMA has a read pair and a write
  pair of 32-bit master ports, with fixed priority over the cores. A pair
  covers two neighbouring banks, i.e. one 64-bit beat. If the read pair would
  hit the same banks as the write pair in the same cycle, the read waits.

Measured with the end-to-end testbench at full size (256 B blocks, 512 B
stride, 2 KiB packets, runs of 4 packets per core, host always ready), a
512 KiB message is unpacked at 163 bit/cycle. This figure includes the
handlers' register writes. On top of the raw paths, the limit comes from
START stalls: eight cores share four DMA channels, and each core waits for
its inbound copy before it issues its outbound ones.

## Bus protocol

All on-chip links use one request/response handshake, defined in `spin_pkg`
at three widths (`req32_t`/`rsp32_t`, `req64_t`/`rsp64_t`,
`req256_t`/`rsp256_t`):

* The master holds `req`, `we`, `addr` (a byte address), `wdata` and `be`
  until `gnt` is high in the same cycle. `gnt` may depend on `req`
  combinationally.
* A granted read returns `rvalid` with `rdata` at least one cycle later. Reads
  return in order on each link.
* Writes get no response. Their completion is only seen by the DMA's pending
  count.

## Address map

| Range | What |
|---|---|
| `0x1000_0000 + c * 0x40_0000` | cluster `c` (0..3): L1 at offset 0 (1 MiB), DMA registers at offset `0x20_0000` |
| `0x1C00_0000` - `0x1C7F_FFFF` | L2 (8 MiB); the first 1 MiB is the NI packet ring |
| `0x8000_0000` and up | host window: writes leave on `host_*`; reads return 0 |

Within a cluster, L1 is interleaved on 32-bit words: bank = `addr[5:2]`,
row = `addr[19:6]`. An L2 line maps to bank `addr[5]`, row `addr[22:6]`. A
core always reaches its own cluster's L1 and DMA through the local paths.
Every other address goes out through the cluster port.

## Programming the DMA

Every core has its own register set at `cluster_base + 0x20_0000`:

| Offset | Write | Read |
|---|---|---|
| `0x00` | source address | source |
| `0x04` | destination address | destination |
| `0x08` | length in bytes | length |
| `0x0C` | start the copy | busy bit of each channel |
| `0x10` | - | number of this core's copies not yet complete |

A write to START is granted as soon as a channel is free. Until then the
core's store simply waits, so a handler never has to check for room. Cores
competing for START are served round-robin. A zero-length copy completes at
once. Source, destination and length must be multiples of 8 bytes.

The vector handler of the tests, in C-like form:

```
dma(pkt_l2_addr, my_l1_buf, pkt_len);    // SRC, DST, LEN, START
while (dma_pending() != 0) ;             // read offset 0x10
host = base + (pkt_offset / B) * S;
for (b = 0; b < pkt_len / B; b++, host += S)
    dma(my_l1_buf + b * B, host, B);     // fire and forget
// next packet into the other L1 buffer; wait for pending == 0 at the end
```

## Network and host ports

`ni_port` accepts a beat when the L2 write is granted and its notice FIFO
(8 packets) has room. Otherwise `ni_ready_o` stays low. Packets are placed
back to back in the ring, which wraps at 1 MiB. Nothing stops the NI from
overwriting a packet no handler has consumed yet: the ring is sized so that
at line rate that would take over 40 microseconds. The notice is
`pkt_addr_o` (L2 byte address) and `pkt_len_o` (bytes).

`host_port` queues up to 16 writes and offers them on `host_valid_o`. The
host takes one with `host_ready_i`. When it is full the crossbar's host
slave stalls, and the backpressure reaches the DMA write pipelines.

## What follows the paper and what does not

Taken from the paper:

* four clusters of eight cores;
* 16 x 64 KiB L1 banks per cluster with single-cycle access;
* two 4 MiB L2 banks with separate crossbar ports;
* 256-bit system crossbar, NI input and host output;
* 64-bit cluster ports, a data-width converter with a buffer between each
  cluster and the crossbar, and a multi-channel DMA moving 64 bit/cycle in
  each direction;
* packets placed in L2 first, then copied to L1, then from L1 straight to
  the host.

This design's own choices, where the paper is silent:

* the bus protocol and the address map;
* the DMA register interface and its channel count (4);
* the arbitration policies;
* the NI ring and its notice FIFO;
* buffer depths;
* line packing in the width converter;
* two request channels per cluster.

Departures to be aware of:

* **Two converters per cluster.** The paper draws one converter per cluster.
  Here there is one per request channel, so two per cluster; together they
  form the duplex link.
* **DMA to L1 link.** The paper's block diagram draws it as half-duplex, but
  its text asks for 64 bit/cycle in each direction. The text is followed.
* **Network side.** The paper's own cycle-accurate testbed abstracts the
  network side as a memory region. Here it is a streaming input port that
  writes into L2.
* **Handler scheduling.** The paper dispatches handlers with a blocked
  round-robin scheduler and virtual HPUs. The hardware prototype assigns
  work to cores statically and leaves dispatch to software. No scheduler is
  built: the packet notices are brought out for whatever does the dispatch.
* **Not part of this RTL:**
  * the RISC-V cores (their data ports are `core_req_i`/`core_rsp_o`);
  * the instruction caches;
  * the PCIe and network PHYs;
  * the rest of the NIC (matching, command queues, outbound engine).
* **Throughput.** The paper reports 192 Gbit/s for 256 B blocks in a plain
  DMA copy benchmark. The 163 bit/cycle above is a full handler run with
  behavioural cores, not the same benchmark.
* **Read line reuse.** The width converter reuses a line only for reads in
  consecutive cycles. A core that polls an L2 word therefore always sees
  fresh data. A write through another port can still race with a read run
  that is under way, as with an AXI burst.

## Verification

Each module has a self-checking testbench in `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself after a fixed number
of cycles. Random stimulus uses `$urandom`. The helpers are:

* `tb/tb_check.svh`: the check and report macros;
* `tb/tb_mem_slave.sv`: a memory model with random grants and a fixed read
  latency.

What the testbenches cover:

* **Banks:** byte enables and single-cycle timing, at full size.
* **Crossbars:** random traffic from all masters against per-bank models,
  bank conflicts, DMA priority, and in-order returns.
* **`dma_engine`:** a 2 KiB L2-to-L1 copy must finish within 268 cycles (it
  takes 262), plus all channels busy with a further START held back,
  zero-length copies, and both directions at once.
* **`dwc_buf`:** 64 sequential writes must become 16 wide writes, 64 reads
  16 wide fetches at one read per cycle, and random traffic is checked
  against a reference memory.
* **`ni_port`:** ring wrap and notice-FIFO stalls. **`host_port`:** FIFO
  full.
* **`tb_spin_accel`:** runs the top at its default size and receives two
  vector-typed messages end to end.
  * Message 0: 256 packets, full rate. Message 1: 320 packets, with a host
    that stalls 60 % of the time and gaps on the network side.
  * It checks every host word and that nothing outside the blocks is
    written, and it requires at least 150 bit/cycle on the first message.
  * It fails unless each of these happened at least once: NI backpressure,
    host backpressure, a held-back DMA START, all four channels of a cluster
    busy, a DMA reading in both directions in one cycle, and traffic in
    every cluster.

To run one (from the folder holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -I. -y rtl -y tb \
  rtl/spin_pkg.sv tb/tb_spin_accel.sv --top-module tb_spin_accel -Mdir obj -o sim
./obj/sim
```

The top-level run takes about 40 s to build and a few seconds to simulate.
