# A software-defined memory bus bridge

This RTL implements a bridge that lets bus masters on one chip, such as
processors or DMA engines, read and write slaves on another chip, such as a DDR
controller, as if those slaves sat on the local AXI4 bus. The two chips are
joined by serial transceivers and, in a full installation, by a reconfigurable
circuit switch. Nothing in the path is fixed at design time. Software decides:

* which windows of a master's address space go to a remote chip;
* where each window lands in the remote chip's address map;
* which transceiver each window uses;
* how much of a transceiver's bandwidth the bridge may use.

Software can change all of this while the system runs. A datacenter
orchestrator can therefore move memory (or any other memory-mapped slave)
between machines without changing the masters, the slaves or the bus.

The design follows a published architecture for disaggregated memory built
from two FPGA SoCs. Each board had two bus masters and two slave ports towards
DDR, and the boards were linked by two 10 Gb/s transceivers. The block
structure and the software-defined parts are taken from that description. The
widths, buffer depths, flit format, response path and configuration register
map are not given there. They are this design's own choices, and each one is
noted where it appears below.

## Journey of a request

One end point (`mem_bridge`) contains both halves of the bridge. The
*master tray* sends local masters' requests out. The *slave tray* serves
requests that arrive for the local slaves. A compute node uses the first half
and a memory node the second; both are the same RTL.

```
 compute node (bus clock)          |  transceiver clock  |          memory node (bus clock)
                                   |                     |
 master --AXI4--> master_streamer  |                     |
                  (AW,W,AR -> flits)                     |
                       |           |                     |
                    memport        |                     |
        (region lookup, address rewrite, route = link)   |
                       |           |                     |
                 tx flit_switch ---+--> pkt_arbiter      |
              (crossbar + edge buffers)   |              |
                                   |  rate_limiter       |
                                   |      |              |
                                   |   transceiver ==link==> rx_steer (slave by address)
                                   |                     |      |
                                   |                     |  rx flit_switch ---> slave_streamer --AXI4--> slave
                                   |                     |                     (flits -> AW,W,AR)
```

A read proceeds as follows:

1. The master issues AR. Its streamer turns the AR into a one-flit packet and
   stamps it with the master's index (`src`).
2. The master's **memport** finds the region that holds the address. It
   replaces the address with `addr - low + offset`, the location of the data
   on the remote bus, and writes the region's transceiver number into the
   flit's `route` field.
3. The transmit crossbar puts the flit into the edge buffer for that
   transceiver and this master. The flit crosses into the transceiver clock
   there.
4. The transceiver-side arbiter picks the flit in its round-robin turn. The
   rate limiter lets it go when the transceiver's credit allows, and the flit
   goes onto the link.
5. At the far end, **rx_steer** finds the slave from the address. It also
   records which transceiver the flit arrived on (`xport`). The receive
   crossbar carries the flit into the memory node's bus clock and to that
   slave.
6. The slave streamer issues AR to the slave. The slave sees the ID
   `{xport, src, id}`.
7. The slave answers with R beats that carry the same ID. The slave streamer
   makes one flit per beat and routes it back on transceiver `xport`. The
   compute node's rx_steer sends each flit to master `src`, and the master's
   streamer presents it on R with the original `id`.

A write is the same, except that the packet is the AW flit followed by all its
W beats, and the answer is a single B flit.

The bridge keeps no table of outstanding transactions. Everything needed to
return a response travels in the flit, and then in the widened slave-side
ID. This matches the architecture's cut-through design: a switch only reads
a few forwarding bits carried on each flit.

## Flits and packets

Every unit moves `bridge_pkg::flit_t` (229 bits):

| field   | bits | meaning |
|---------|------|---------|
| chan    | 3    | AW, W, AR, R or B |
| eop     | 1    | end of packet: switches and arbiters may switch source after this flit |
| last    | 1    | AXI WLAST / RLAST |
| route   | 8    | output of the next crossbar: a transceiver (tx) or a slave / `S + master` (rx) |
| src     | 8    | index of the requesting master; carried to the remote side and back |
| xport   | 8    | on the remote side, the transceiver the request arrived on |
| id, addr, len, data, strb, resp | 6, 40, 8, 128, 16, 2 | AXI4 payload |

A write packet is one AW flit followed by the W flits. The W flit with WLAST
also has `eop` set. AR, R and B flits are packets of one flit each; an R flit
keeps RLAST in `last`. Because arbiters grant whole packets, write data never
interleaves at a slave, as AXI4 requires. R beats of different bursts may
interleave; AXI4 allows this between different IDs.

## The memport: regions, offsets and configuration

Each master has one memport, a table of `ENTRIES` (default 16) regions:

| field | role |
|-------|------|
| low, high | the region in the master's address space (both inclusive); used as the lookup index |
| offset | the address that `low` becomes on the remote bus |
| outport | the transceiver to use |
| valid | entry in use |

All entries are compared at the same time, and the lowest-numbered matching
entry wins. A master can therefore have a wide default region with smaller
exceptions above it in the table. W flits take the route of their AW. A
request that matches no entry is dropped with its write data, and
`miss_count` is incremented. The master gets no response, so software must
map a region before it is used. The memport is one register stage with full
throughput.

Configuration is written one register per cycle on the `cfg` port
(`bridge_pkg::cfg_t`). The SoC maps this port into its own address space, so
software reaches it over the same memory bus ("in band"):

| cfg.unit | cfg.idx | cfg.field | register |
|----------|---------|-----------|----------|
| m (< 128) | entry | 0 | low |
| m | entry | 1 | high |
| m | entry | 2 | offset |
| m | entry | 3 | bit 8 = valid, bits 7:0 = outport |
| 128 + t  | - | 0 | rate of transceiver t, in 1/256 flit per cycle (256 = no limit) |
| 128 + t  | - | 1 | burst of transceiver t, in flits |

An entry can be rewritten while traffic flows, and later requests use the new
value. To move a region safely, invalidate it first, write its fields, then
set it valid again. The four fields are not updated as one atomic change.

## Clock domains and edge buffers

The bus side runs in `clk`. The transceivers' user interfaces share `xclk`.
Every crossing is an **edge buffer** (`edge_fifo`), an asynchronous FIFO with
Gray-coded pointers and two-flop synchronisers. A written flit shows on the
read side about three read-clock edges later.

`flit_switch` (the "electrical crossbar") gives each (input, output) pair its
own edge buffer. A busy transceiver therefore never blocks a master's traffic
to the other transceiver. Each output has a `pkt_arbiter` that serves its
buffers round robin, one packet at a time. With every input busy, each gets an
equal share of packets.

The rate-limiter registers live in the bus clock. Each is passed to `xclk`
through a two-flop synchroniser. These are quasi-static settings: during a
change the limiter may see a mixed value for one cycle.

## No backpressure on the link

The links have no flow control and no retransmission, and the circuit network
is assumed to be lossless. Inside an end point every path has valid/ready
backpressure, up to the transceiver. A slow transceiver or a low rate setting
therefore stalls the master, through the edge buffers.

On the receiving side nothing can push back. If a flit arrives while its edge
buffer is full, the flit is lost and `drop_count[t]` is incremented. A lost
flit usually leaves an AXI transaction that never finishes. Preventing this
is software's job: the per-transceiver **rate limiter** should keep each
sender within what the receiving slaves can absorb. The rate limiter is a
credit bucket:

* Each `xclk` cycle adds `rate` credits.
* A flit costs 256 credits.
* Leftover credit carries over, so fractional rates are exact on average.
* Between flits the bucket keeps at most `burst` flits' worth of credit.

`throttled[t]` shows when the limiter is holding a flit back.

## Parameters

| module | parameter | default | origin |
|--------|-----------|---------|--------|
| mem_bridge | M (masters) | 2 | prototype |
| mem_bridge | S (slaves) | 2 | prototype |
| mem_bridge | T (transceivers) | 2 | prototype |
| mem_bridge | ENTRIES | 16 | this design |
| mem_bridge | EDGE_DEPTH (power of two, at least 4) | 16 | this design |
| mem_bridge | SLAVE_SEL_LSB | 30 | this design: local slave = `addr[..:30] mod S`, which splits 2 GiB over two slave ports |
| bridge_pkg | ADDR_W, DATA_W, ID_W | 40, 128, 6 | this design (40 bits cover the prototype's 448 GB master window) |
| bridge_pkg | ROUTE_W, SRC_W | 8, 8 | this design, up to 256 ports |

The widths are package constants because every unit shares the flit type.

## Top-level interface (`mem_bridge`)

* `clk`, `rst_n`: the bus clock and reset. `xclk`, `xrst_n`: the transceiver
  clock and reset. Both resets are active-low and asynchronous.
* `m_aw/m_w/m_ar/m_b/m_r[M]`: AXI4 ports for the local masters. The bridge is
  the slave on them. Each channel is a struct plus valid/ready.
* `s_aw/s_w/s_ar/s_b/s_r[S]`: AXI4 ports for the local slaves. The bridge is
  the master on them, and the IDs are `SID_W = 22` bits wide. A slave must
  accept AW without waiting for W.
* `tx[T]` (valid/ready) and `rx[T]` (valid only): streaming user interfaces
  of the transceivers, one flit per `xclk` cycle. Serialisation onto the lane
  is the transceiver's job.
* `cfg`: configuration writes.
* `miss_count[M]`, `drop_count[T]`, `throttled[T]`: status outputs.

With empty buffers and equal clocks, an end point adds about four cycles on
transmit (memport register plus edge buffer) and four on receive (rx_steer
register plus edge buffer). In the end-to-end test, the two links have 20
`xclk` cycles of latency each way. An idle read then completes in 33
compute-node bus cycles. The published prototype measured 134 cycles for a
round trip, but that figure includes its transceiver IP.

## Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| tb_master_streamer | write packets whole, reads only between packets, responses to the right channel |
| tb_memport | address rewrite, routing, W inheritance, priority, miss drop, reconfiguration, backpressure |
| tb_edge_fifo | order across two unrelated clocks, full at exactly DEPTH, crossing latency |
| tb_pkt_arbiter | packets never interleave (even with a gap mid-packet), per-queue order, equal shares |
| tb_flit_switch | every flit reaches the output it named, in order, packets whole, none lost |
| tb_rate_limiter | exact rates 1, 1/4, 3/8; burst after idle; stall |
| tb_rx_steer | slave decode, W following AW, response routing, drop counting |
| tb_slave_streamer | ID widening, response routing back to the arrival transceiver |
| tb_mem_bridge | two end points joined by link models; see below |
| tb_stream | the STREAM kernels over remote memory; see below |

`tb_mem_bridge` uses every parameter at its default. It builds a compute node
and a memory node with different bus clocks. The nodes are joined by two
20-cycle links (`tb/link_model.sv`), and two memory models
(`tb/axi_mem_model.sv`) sit behind the memory node. The test:

1. programs three regions;
2. measures an idle round trip (it must stay under 134 cycles);
3. runs both masters at once with write-then-read-back traffic on both links;
4. reads never-written words and checks them against the value at the remote
   address, which the test computes itself;
5. moves a region at run time;
6. sends an unmapped request;
7. rate-limits a link until the edge buffers fill;
8. stops the memory node's slaves until its receive buffers overflow.

It counts arbiter contention, edge-buffer backpressure, throttling, use of
each link, misses and drops, and fails if any of them never happened.

`tb_stream` runs the four STREAM kernels through the same two-node setup:

* copy `c = a`, scale `b = 3c`, add `c = a + b`, triad `a = b + 3c`.
* The arithmetic is integer, standing in for the processor's floating point.
* Each array has 128 elements of 64 bits.
* The kernels run first with one master, then with two masters that split
  the arrays. Each master uses its own link, and transfers are 4-beat bursts.
* After every kernel, all three arrays are read back through the bridge and
  compared with a reference.

Every access waits for the previous one, so a single master is limited by
latency. It moves about 1.6 bytes per bus cycle; two masters move about 3.2.
In a final copy, both links are limited to 1/64 flit per transceiver cycle.
Each link must then stay within that limit and be busy for at least 80 % of
it. At that point the link, not the masters, sets the pace. The published
measurements show the same saturation once more than two cores share one
10 Gb/s transceiver.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/bridge_pkg.sv tb/tb_mem_bridge.sv --top-module tb_mem_bridge
./obj_dir/Vtb_mem_bridge
```

## Departures from the published architecture and open points

* **Rate limiter placement.** The prose puts the rate limiter "at the master
  port side". The block diagram draws one in front of each transceiver. This
  design follows the diagram: one limiter per transceiver, on the sending
  end point.
* **Response path.** The published diagram shows only the path from masters
  to slaves. The return path here reuses the same blocks in the other
  direction, and the response finds its way back through the widened slave
  ID.
* **Choosing the slave at the far end.** This uses address bits
  (`SLAVE_SEL_LSB`). The architecture says only that the address identifies
  the slave port.
* **Misses** are dropped silently and only counted. No AXI error response is
  returned.
* **Overflow** on the receive side loses flits, and nothing recovers them.
  This follows the architecture's assumption of a lossless, rate-controlled
  network.
* **Ordering.** Reads with the same AXI ID from one master, sent to regions
  behind different transceivers, may complete out of order. Software should
  not map one ID stream across two transceivers.
* **Not included:** the serial transceivers and their link protocol, the
  circuit switch, the SoC (processors, interconnect, DDR controller) and the
  control-plane software. The transceiver user interface and the
  configuration port are where these attach.
