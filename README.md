# A non-coherent AXI on-chip network in SystemVerilog

Many-core accelerators move most of their data in bulk: a DMA engine copies a tile of a tensor
from off-chip memory into a cluster's scratchpad, cores then compute on it locally, and a DMA
engine copies the result out. No cache coherence is needed, but the network carrying this traffic
must keep many long bursts in flight at once, at wide data widths, without giving up the
ordering rules of the AXI protocol. This repository contains a library of small AXI building
blocks that compose into such networks, and an example system built from them: a quadrant of
four compute tiles joined by a 512-bit DMA network and a 64-bit core network.

Every block has an AXI *slave port* (where requests come in) and/or an AXI *master port*
(where requests go out). All five AXI channels (AW, W, B, AR, R) are carried as packed structs,
one request struct and one response struct per port, so a whole port is two signals. The structs
are built by the `AXI_TYPEDEF_W` macro in `rtl/axi_typedef.svh`; the flavours used in the
design (data width x ID width) are declared in `rtl/axi_cfg_pkg.sv`. Every module takes its
channel types as type parameters with defaults, so each one can be elaborated on its own.

## The ordering problem, and the one rule all blocks follow

AXI lets transactions with different IDs complete in any order, but transactions that share an
ID and a direction must complete in the order they were issued. A network that forwards a
request to one of several destinations therefore may not send a second same-ID request to a
different destination while the first is outstanding: the two answers could come back swapped.
Every block that splits or merges traffic is built around this rule:

* A **multiplexer** (`axi_mux`) merging N slave ports into one master port widens the ID by
  log2(N) bits and puts the slave-port index in the new top bits. Responses are steered back by
  those bits, which are then stripped. Because the ID is now unique per source, no table is
  needed. Commands are arbitrated round robin. Write data follows the granted AW through a FIFO
  of port indices, so W beats of different bursts never interleave.
* A **demultiplexer** (`axi_demux`) splitting one slave port over M master ports keeps, per ID
  and per direction, the port of the outstanding transactions and a counter. A new command whose
  ID is outstanding towards another port waits until the counter reaches zero. W beats follow
  their AW in lockstep, and B and R responses from the master ports are merged round robin.
* The **crossbar** (`axi_xbar`) is one demultiplexer per slave port, driven by an address
  decoder per direction, and one multiplexer per master port. Addresses that no rule matches go
  to a per-port default master port or, if none is enabled, to an internal **error slave**
  (`axi_err_slv`) that answers with DECERR and the right number of R beats. A connectivity
  matrix removes unused slave/master pairs; traffic on a removed pair also goes to the error
  slave. Optional **pipeline cuts** (`axi_cut`) register all five channels in both directions
  between the demultiplexers and the multiplexers.

## ID width management

Each multiplexer stage adds ID bits, so a network of several crossbars would grow the ID
without bound. Two blocks shrink it again:

* The **ID remapper** (`axi_id_remap`) is for sparse ID spaces, the usual case after a
  multiplexer: only a few of the many possible IDs are in use at once. It keeps a table per
  direction whose entries hold an input ID and a count of its outstanding transactions. A new
  command takes the entry that already holds its ID, or else a free entry, and leaves with the
  entry's index as its ID. The response looks its original ID up by that index, and the entry
  frees itself when its count returns to zero. With 16 entries the output ID is 4 bits wide,
  whatever the input width. A command stalls when its counter is full or no entry is free.
* The **ID serializer** (`axi_id_serialize`) is for dense ID spaces where a table would be too
  large. It maps an input ID to an output ID by `ID mod 2^MstIdWidth` and keeps, per output ID
  and direction, a FIFO of the original IDs. Responses for one output ID come back in order, so
  the head of that FIFO is the ID to restore. Different input IDs that share an output ID are
  serialized, which costs concurrency but needs no table.

The **crosspoint** (`axi_xp`) combines these into a network node with identical slave and master
ports: input queues (`axi_fifo`) on each slave port, a crossbar, and an ID remapper on each
master port that returns the crossbar's widened ID to the port width. Crosspoints can therefore
be joined into arbitrary topologies.

## Data width converters

The hardest blocks to follow are the two data width converters, because they rewrite bursts.

The **upsizer** (`axi_dw_upsizer`, narrow slave port, wide master port) turns an INCR burst of
several narrow beats into an INCR burst of wide beats. The command gets the wide beat size, and
its length is recomputed from the first and last byte addresses the narrow burst touches. On the
W path narrow beats are merged byte by byte, under their strobes, into a wide register. The wide
beat is sent when the next narrow beat falls into a new wide word or the burst ends. On the R
path each wide beat is held while the narrow beats that fall into it are taken out, one per
cycle, at the lane given by the current narrow address. Single-beat, FIXED and WRAP bursts pass
through with their original size, because a narrow-size transfer is legal on a wide bus; only the
lane changes. One write and one read transaction are converted at a time.

The **downsizer** (`axi_dw_downsizer`, wide slave port, narrow master port) does the reverse. A
transfer whose size already fits the narrow bus passes through: write data is taken from the
right lane and read data is replicated across all lanes of the wide beat. A wider INCR burst
becomes a narrow INCR burst with `(len+1)*ratio` beats. If that is more than AXI's 256 beats,
it is cut into several narrow bursts, whose B responses are merged into one (worst response
wins) and whose R beats are collected back into wide beats. A FIXED or WRAP burst wider than the
narrow bus becomes one narrow INCR burst per wide beat. One transaction per direction is in
flight at a time.

## Clock domain crossing

`axi_cdc` puts each of the five channels through an asynchronous FIFO (`cdc_fifo_gray`) with
Gray-coded read and write pointers, each synchronised into the other domain by two flip-flops.
The FIFOs are 8 entries deep by default. The crossing adds a few cycles of latency in each
direction but sustains one beat per cycle.

## DMA engine backend

`axi_dma_backend` executes one-dimensional copies (`dma_transfer_t`: source address,
destination address, byte count) on a 512-bit master port, with up to 8 outstanding bursts per
direction. Read and write sides run independently:

* Two burst generators cut the source range and the destination range into bursts that neither
  cross a 4 KiB boundary nor exceed 256 beats. Each write burst's length goes into a FIFO that
  tells the W channel where to set WLAST.
* Read data enters a buffer (3 beats by default) and then a **realigner**. When source and
  destination start at different offsets within a bus word, each output beat is a byte rotation
  of two consecutive input beats. When the destination offset is smaller than the source
  offset, the first input beat is only preloaded. The first and last write beats carry strobes
  that mask the bytes outside the destination range.
* `done_o` pulses when the last B of a transfer has arrived. Transfers are taken one at a time,
  and all bursts use ID 0, so the engine is in order.

Multi-dimensional transfers and the register interface that a real engine would have are not
part of this block: whatever issues `xfer_i` plays that role.

## Memory controllers

The **simplex controller** (`axi_to_mem`) serves a single-port memory that does one read or one
write per cycle. A write request generator and a read request generator split bursts into
per-beat memory requests, using the usual AXI address increment. A round-robin arbiter (or
write-first, by parameter) picks one per cycle. With every accepted request a FIFO stores the
direction, ID and last flag. When memory responses come back, in order, the FIFO entry tells
whether to produce an R beat or, at the end of a write burst, a B. Read responses land in a
buffer. A request is only issued if that buffer has room for everything already in flight, so
the memory side never has to stall.

The **duplex controller** (`axi_to_mem_banked`) gives a memory separate read and write paths.
All writes go to one simplex controller and all reads to another, and a memory interconnect
(`mem_interconnect`) routes the requests of both to word-interleaved banks (`sram`), with
round-robin arbitration per bank. Reads and writes to different banks proceed in the same
cycle.

## The example system: a four-tile quadrant

`axi_noc_quadrant` is the top. It wires the blocks into one quadrant of a many-core chip:

* **Tiles.** Each of the four tiles has a DMA backend and 128 KiB of L1 memory (a duplex
  controller with 2 banks of 1024 x 512 bit). The L1 has two ports: a 512-bit one from the wide
  network, and a 64-bit one from the narrow network that passes an upsizer. The two meet in a
  2:1 multiplexer in front of the controller.
* **Wide network.** An `axi_xbar` with pipeline cuts and five slave ports (four DMAs and the
  wide uplink) and six master ports: the four L1s, the wide uplink and a bridge to the narrow
  network. Uplink-to-uplink is disconnected, and unmapped addresses go to the uplink. The uplink
  and the bridge each have an ID remapper back to 6 bits. The bridge then has a 512-to-64
  downsizer.
* **Narrow network.** An `axi_xp` with six slave ports (four core ports, the narrow uplink and
  the bridge) and five master ports (the four L1s and the peripheral port, which is the default).
* **Peripheral port.** It leaves through an ID serializer (6 to 2 bits) and a clock domain
  crossing into its own clock.
* **Address map.** L1 of tile i at `0x1000_0000 + i*0x2_0000`, peripherals at `0x2000_0000`
  (256 MiB). Everything else goes to the wide uplink.

Cores are not part of the RTL; their 64-bit master ports are top-level ports (`core_req_i`).

## Where this RTL departs from the published design

* The upsizer converts one read transaction at a time. The published design can have several
  read upsizers, each serving a different ID, so that reads overlap.
* The duplex controller defaults to 2 banks; the published block diagram draws 4. `NumBanks` is a
  parameter.
* The memory interconnect arbitrates per bank with one round-robin arbiter instead of a tree.
  The function is the same, but the timing is not identical to a logarithmic tree.
* In the DMA backend, read and write burst sequences are generated independently rather than as
  paired read/write jobs. Transfers are executed one at a time.
* The demultiplexer sends W beats in lockstep with their AW. This costs an idle cycle between
  write bursts.
* Only ID, address, length, size, burst and QoS are carried on the command channels. Cache,
  protection, lock, region, user signals and atomic operations are not. QoS does not affect
  arbitration.
* The quadrant is this design's own example. In the case-study chip a tile is a cluster of eight
  cores with 32 L1 banks and two DMA engines, and there are three levels of network whose exact
  dimensions are not reproduced here.

## Verification

Each block has a self-checking testbench in `tb/tb_<module>.sv`. Most drive random traffic from
`tb_axi_rand_master` into the block and check the responses against a reference memory
(`tb_axi_mem`) or a scoreboard. Each testbench counts how often the mechanism under test occurred
(reorder stalls, remapped IDs, split bursts, realigned copies, bank conflicts) and fails if it
never did. `tb_axi_noc_quadrant` runs the top at its default parameters: DMA copies between
tiles and to the uplink, core accesses to remote L1s, peripheral accesses across the clock
crossing, and checks all data. Every testbench ends with the line
`TB_RESULT checks=<n> failures=<n>`.

To simulate a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/axi_pkg.sv rtl/axi_cfg_pkg.sv $(ls rtl/*.sv | grep -v pkg) tb/*.sv \
        --top-module tb_axi_xbar -Mdir obj_tb_axi_xbar -j 8
    ./obj_tb_axi_xbar/Vtb_axi_xbar

The packages must come first. Substitute any other testbench name. The block testbenches run in
seconds. The full quadrant testbench takes about five minutes to build and run.
