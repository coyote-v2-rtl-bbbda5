# Coyote v2 shell in SystemVerilog

A data-center FPGA is shared by several independent applications and driven by
host software. Each application should see a simple, stable view of the
machine: virtual memory shared with its host process, several data streams to
host memory, card memory (HBM) and the network, a control bus and interrupts.
It should not have to care how many other tenants exist or how the physical
links are shared. The shell described here gives that view. It sits between
the vendor hard blocks (PCIe DMA engine, HBM controllers, Ethernet MAC) and
the applications. It is split into three layers:

* **Static layer**: never changes at run time. Host DMA link, shell control
  registers, completion write-back, interrupts and the partial-reconfiguration
  controller.
* **Dynamic layer**: the services that can be swapped by reconfiguring the
  shell. Per-application virtual memory (TLB), packetization, fair sharing,
  crediting, HBM striping and network services such as the traffic filter.
* **Application layer**: the *vFPGAs*. These are independently
  reconfigurable regions, each running one user application behind a fixed
  interface.

The RTL here builds the static and dynamic logic and three vFPGAs:

* vFPGA 0 runs multi-threaded AES-128 in CBC and ECB modes.
* vFPGA 1 runs vector addition.
* vFPGA 2 runs a network traffic sniffer.

The hard blocks and the network stacks are outside and reached through the
top module's ports.

## Structure

```
                       coyote_top
 host DMA  <-->  host_arbiter (round-robin per 4 KB packet)
                    |            |             |
              vfpga_dma_path  vfpga_dma_path  vfpga_dma_path   (one per vFPGA)
               send-queue arb -> packetizer -> tlb -> crediter -> service demux
               destination queues, write queues, mem_striping (HBM)
                    |            |             |
               aes_cbc_mt     vadd_app      sniffer_app  <-- net_filter <--> stack / MAC
 shell regs (axil_regs), writeback_unit, irq_ctrl, icap_ctrl
```

| file | role |
|---|---|
| `coyote_pkg.sv` | widths, request/beat structs, AXI4-Lite structs, filter config |
| `aes_pkg.sv` | AES-128 round functions; S-box computed from its GF(2^8) definition |
| `fifo_sync.sv` | single-clock FIFO used for all queues |
| `rr_arbiter.sv` | round-robin arbiter, pointer moves only on an accepted grant |
| `packetizer.sv` | cuts requests into packets that do not cross 4 KB boundaries |
| `tlb.sv` | set-associative TLB with driver fill, invalidate and miss report |
| `crediter.sv` | per service/stream/direction credits, write-data check |
| `host_arbiter.sv` | shares the host DMA link between vFPGAs, routes data back |
| `mem_striping.sv` | maps card addresses onto HBM channels in 4 KB stripes |
| `vfpga_dma_path.sv` | per-vFPGA request and data path of the dynamic layer |
| `writeback_unit.sv` | completion counters written to host memory |
| `irq_ctrl.sv` | interrupt collection and message generation |
| `icap_ctrl.sv` | 512-bit stream to 32-bit configuration port |
| `axil_regs.sv` | AXI4-Lite register file (shell and vFPGA control buses) |
| `net_filter.sv` | filters network traffic between stack and MAC, copies matches |
| `sniffer_app.sv` | time-stamps, merges and stores captured frames |
| `aes_pipeline.sv` | 10-stage AES-128 encryption pipeline carrying a thread id |
| `aes_cbc_mt.sv` | multi-threaded CBC (and ECB) around the pipeline |
| `vadd_app.sv` | 16 x 32-bit lane vector addition |
| `coyote_top.sv` | everything wired together |

All logic runs on one clock with an asynchronous active-low reset. Data
move as 512-bit beats (64 bytes) with valid/ready handshakes.

## How a request becomes traffic

Understanding `vfpga_dma_path` is the key to the design. An application
asks for data by pushing a request into a *send queue*: virtual address,
length, service (host, card or network), stream number and direction. Data
flow on separate per-stream AXI-stream style ports. The host software can
also issue requests on a vFPGA's behalf through the shell registers. That is
how the AES and vector-addition tests move their data.

Each request goes through these stages, one packet per cycle:

1. **Arbitration.** A round-robin arbiter chooses between the read queue,
   the write queue and the host-issued request.
2. **Packetizer.** The request is cut into packets of at most 4 KB that
   never cross a 4 KB-aligned address. The first packet of an unaligned
   request is therefore shorter. Each packet remembers its stream and
   whether it is the request's last one.
3. **TLB.** The packet's virtual page is looked up in a set-associative TLB
   (16 sets x 4 ways, 2 MB pages by default). The lookup is registered and
   takes one cycle. On a miss the path raises a *page fault*, which becomes
   an interrupt carrying the faulting address, and holds the packet. The
   driver (host software) installs the translation through the shell
   registers; the lookup is then retried and the packet continues. The TLB
   is a cache of the driver's page table: hardware never walks page tables.
   The driver can invalidate an entry, and the TLB then raises a
   "TLB invalidation done" interrupt. Replacement within a set is
   round-robin.
4. **Crediter.** Every (service, stream, direction) has `CRED` credits, 2
   by default. Each credit is one packet's worth of room.
   * A read packet takes a credit, which guarantees that its data fit in the
     stream's destination queue. The credit returns when the packet's last
     beat has left the queue towards the application. An application that
     does not drain one stream therefore stops only that stream's requests
     from entering the shared links.
   * A write packet needs a credit, and also its data already waiting in the
     stream's write queue. Beats already promised to an earlier write do not
     count. So a granted write never stalls the shared link waiting for the
     application.
   * Network writes skip the data check because the network data streams are
     not part of this build.
5. **Service.** The packet goes to one of three places:
   * the host link (`host_arbiter`);
   * card memory, through `mem_striping`;
   * the network request port.

Write completions, and the last beat of each read, go to the vFPGA's
completion queue and to the write-back unit.

**The request path is in order per vFPGA.** A packet that waits for credits
or for write data holds every later packet of the same vFPGA, including
those for other streams. Other vFPGAs are not affected. Software and
applications should therefore keep the requests outstanding on one vFPGA
within the credits, or issue them in an order that drains. For example,
interleave two operand streams in requests of `CRED` packets or fewer rather
than requesting one whole operand after the other. The end-to-end testbench
does exactly this.

## Sharing the host link

`host_arbiter` takes one packet at a time from the vFPGAs that have one
ready, in round-robin order, and hands it to the host DMA engine. Packets
are 4 KB, so a vFPGA with a large transfer cannot hold the link for longer
than one packet while others wait. The DMA engine is assumed to return read
data and write acknowledgements in request order. Small tag FIFOs record
which vFPGA and stream each outstanding packet belongs to:

* read beats are routed back to the right destination queue;
* write beats are pulled from the right write queue;
* completions are sent to the right vFPGA.

## Card memory striping

Card memory is split across `N_CHAN` HBM channels (32 by default, as on
an HBM card with 32 pseudo-channels). Each 4 KB stripe of physical card
address space goes to channel `stripe mod N_CHAN`, at address
`(stripe / N_CHAN) * 4 KB + offset` inside that channel. `mem_striping`
cuts each packet at stripe boundaries. One buffer read or written by several
streams at once is thus spread across channels. Each vFPGA has its own card
request port, so there is no round-robin interleaving on this side. The
memory model assumes card memory answers one vFPGA's requests in order.

## Completions, write-back and interrupts

`writeback_unit` keeps, per vFPGA, a 32-bit count of completed reads and
one of completed writes. Whenever one changes and write-back is enabled, it
writes the count to host memory at `base + 4*(2*vfid + wr)`. Software polls
ordinary memory instead of device registers.

`irq_ctrl` collects interrupt requests, each with a vector number and a
64-bit value. It sends them one at a time in round-robin order. A source
whose previous interrupt has not been sent yet sees not-ready. Vectors in
the top:

| vector | source | value |
|---|---|---|
| 0..2 | page fault of vFPGA i | faulting virtual address |
| 3..5 | user interrupt of vFPGA i | application-defined |
| 6 | reconfiguration done | bitstream length |
| 7 | TLB invalidation done | vFPGA number |

## Shell control and reconfiguration

The shell registers are 64-bit, at byte address 8*i, on an AXI4-Lite port.
The vFPGA control buses use the same `axil_regs` block. Shell register map:

| reg | meaning |
|---|---|
| 0, 1 | TLB virtual / physical address |
| 2 | TLB command: [3:0] vFPGA, [8] invalidate. Writing it applies the update |
| 3, 4 | write-back base address, enable (bit 0) |
| 5 | reconfiguration length in bytes. Writing it starts the ICAP controller |
| 6 | host-issued request: virtual address |
| 7 | host-issued request: [27:0] length, [29:28] service, [35:32] stream, [40] write, [51:48] vFPGA. Writing it queues the request |
| 8 | read-only: bit 0 reconfiguration busy, bits [3:1] host-issued request of vFPGA 0..2 still pending |

A host-issued request written while the same vFPGA's previous one is still
pending is ignored, so software checks register 8 first.

`icap_ctrl` receives the partial bitstream as 512-bit beats and feeds the
32-bit configuration port one word per cycle, lowest word first. At a
200 MHz configuration clock that is 800 MB/s, the port's full rate. When the
programmed length has been written it pulses done, which raises vector 6.
Any bit reordering the configuration port needs is left to the software that
prepares the bitstream.

## Applications

**Multi-threaded AES (vFPGA 0).** CBC encryption is sequential: each block
is XORed with the previous ciphertext before entering the cipher. A single
message therefore uses only one of the ten pipeline stages at a time.

`aes_cbc_mt` gives each software thread (*cThread*) its own host stream.
The shell builds it with 8 threads, one per host stream; the block's own
default is 4. A round-robin arbiter feeds the shared 10-stage pipeline from
whichever threads have a block whose predecessor has left the pipeline. The
thread id travels with the block. When a block leaves the pipeline, its
ciphertext goes to that thread's output queue and is forwarded to the
thread's next input in the same cycle. One thread gets one 16-byte block
every 10 cycles, and four threads get four times that.

A 512-bit beat holds four blocks, processed in order. The key (registers
0, 1) is expanded once when written, and the IV is in registers 2 and 3.
Register 4 bit 0 selects ECB, where blocks do not depend on each other.

**Vector addition (vFPGA 1).** It adds two input streams lane by lane, 16
unsigned 32-bit lanes per beat, at one beat per cycle. At the end of every
vector it raises a user interrupt. Its register 0 counts result beats.

**Traffic sniffer (vFPGA 2 plus `net_filter`).**

`net_filter` sits on the frame streams between the network stack and the
MAC. All traffic passes through it unchanged. It also looks at the first
beat of each frame in each direction: IPv4 protocol and the TCP/UDP
destination port, each with an enable bit, plus an option to copy only the
first beat. A matching frame is copied to the sniffer.

If the sniffer cannot accept a copy, the copy is dropped and counted, while
the real traffic is never held up. A copy cut off part-way is still closed
with an empty last beat so the record stays well-formed, and it is counted
as dropped.

`sniffer_app` buffers each copied frame whole, up to `FRAME_BEATS` = 160
beats (a 9000-byte frame). It then emits a record:

* one header beat: [63:0] cycle time stamp of the first beat, [79:64]
  length in bytes, [80] direction;
* then the frame beats.

Records from RX and TX are merged round-robin. They are written through the
vFPGA's own send queue and card stream into a buffer in card memory given by
virtual address and size, so the shell's TLB translates it. Capture stops
when the buffer is full or software clears the enable bit; remaining data
are flushed.

Sniffer registers:

| reg | meaning |
|---|---|
| 0 | control: bit 0 capture on |
| 1 | filter |
| 2 | buffer address |
| 3 | buffer size |
| 4 (read-only) | bytes written |
| 5 (read-only) | frames captured |
| 6 (read-only) | frames dropped |
| 7 (read-only) | buffer full |

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `DATA_W` | 512 | package | beat width |
| `PKT_B` | 4096 | package | packet size for interleaving and credits |
| `N_HSTRM` | 8 | top | host streams per vFPGA (also the AES thread count) |
| `N_CSTRM` | 6 | top | card streams per vFPGA |
| `CRED` | 2 | top | credits (packets) per stream and direction |
| `PAGE_BITS` | 21 | top | page size 2 MB; 30 gives 1 GB pages |
| `TLB_SETS`, `TLB_WAYS` | 16, 4 | top | TLB geometry |
| `N_CHAN` | 32 | top | HBM channels for striping |
| `N_THR` | 4 | `aes_cbc_mt` | AES threads when the block is used alone (the top sets it to `N_HSTRM`) |
| `FRAME_BEATS` | 160 | `sniffer_app` | largest captured frame |

The 4 KB packet, 512-bit data path, 2 MB / 1 GB pages, ten AES stages and up
to six parallel card streams are the design's published figures. Credit
count, TLB geometry, channel count, queue depths, register and vector maps
and all record formats are choices made here.

## Where this RTL departs from the design it implements

* **Head-of-line blocking in the request path** (see above). The original
  design places credits on destination queues. This implementation serializes
  all of a vFPGA's requests through one packetizer, TLB and crediter, so a
  stalled stream blocks that vFPGA's other streams.
* **One crediter per vFPGA with separate counters per service.** The
  original design has independent crediters for host, card and network. Here
  the counters are independent but share one grant point, which is part of
  the in-order path above.
* **No migration channel.** There is no DMA path that copies buffers between
  host memory and card memory. A page fault here only asks the driver for a
  translation, and any data migration is left to software.
* **No network-side address translation.** The network stack's accesses to
  memory do not go through these TLBs, since the stacks are outside.
* **No network data streams in the vFPGAs.** Requests to the network service
  leave on a port and their completions return, but the RDMA/TCP data
  streams and the stacks themselves are not built. The filter has one
  stack-side port pair; merging the RDMA and TCP/IP stacks belongs to the
  stacks.
* **Three fixed vFPGAs.** Reconfiguring a vFPGA with a different application
  is a matter of the FPGA tools. Here the ICAP controller streams the
  bitstream but the applications are fixed instances. The published
  benchmarks use up to 4 AES tenants and up to 8 AES threads. This build has
  one AES tenant with 8 threads.
* **Moving the capture buffer to the host** is left to host-issued transfers
  rather than a dedicated path in the sniffer.
* **Card memory and host DMA are assumed to complete in order.**
* **A shortened copied frame** is both stored (closed with an empty last
  beat) and counted as dropped.
* Out of scope: the PCIe DMA engine, the ICAP primitive, HBM controllers,
  the 100G MAC, the RDMA and TCP/IP stacks, the driver and software library,
  and the HyperLogLog and neural-network kernels used as example
  applications.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Build any of them
with Verilator 5, for example:

```
verilator --binary --timing --assert --top-module tb_coyote_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/coyote_pkg.sv rtl/aes_pkg.sv tb/tb_coyote_top.sv
./obj_dir/Vtb_coyote_top
```

The testbenches work in a two-state simulator and reset or initialise
everything they read. Expected values are computed independently:

* AES against the FIPS-197 and NIST SP 800-38A vectors and a reference built
  from the round functions;
* packets, stripes, TLB contents, credits and counters against models kept in
  the testbench.

Where the design has a rate, it is checked too:

* the AES pipeline accepts one block per cycle, and CBC gets one block per
  10 cycles per thread;
* one packet per cycle;
* one ICAP word per cycle;
* one sum beat per cycle.

`tb_wl_aes_threads` measures CBC throughput against the number of threads,
encrypting a 32 KB message on each of 1 to 8 threads at once. Each message
takes 20482 cycles whatever the thread count, so throughput grows linearly.
At an assumed 250 MHz clock that is about 400 MB/s per thread. The published
hardware measures about 280 MB/s for one thread, with host transfer costs
included.

`tb_wl_fair_share` runs 1 to 4 tenants streaming from a host link modelled
at about 12 GB/s. Each tenant gets exactly 1/n of the beats, and the total
does not change with n.

`tb_wl_hbm_streams` reads 64 KB per card stream on 1 to 6 streams of one
vFPGA. The HBM model has channels that each give one beat every 8 cycles.
Because buffers are striped, more streams keep more channels busy.
Throughput rises from 0.25 to 0.90 beats per cycle at 4 streams (about
3.9 to 14.4 GB/s at 250 MHz) and then levels off at about 0.93. At that
point the in-order return of one vFPGA's card port, and the head-of-line
effect of the request path, limit it.

`tb_coyote_top` runs the whole shell at its default parameters with
behavioural models of host memory and the DMA engine, HBM, network stack,
MAC and driver:

* AES CBC on four threads (results checked against a reference AES);
* vector addition whose result page is unmapped, so a page fault is served
  by the driver model;
* an 8 KB bitstream through the ICAP controller;
* a TLB invalidation;
* a traffic capture with forced drops.

It counts each mechanism and fails if any never happened: page fault, TLB
fill, credit stall, host-link interleaving, write-back, user interrupt,
reconfiguration interrupt, ICAP words, invalidation interrupt, several AES
threads in the pipeline at once, striped card pieces on several channels,
filter drops and pass-through traffic.
