# Occamy: a dual-chiplet RISC-V compute system in SystemVerilog

Occamy feeds hundreds of small floating-point cores from memories they can
share, without caches in the data path. The design has three main ideas.

- **Streams, not loads.** Every core has three stream units (SUs). An SU turns
  a register in the FPU (`ft0`..`ft2`) into a port onto memory. Once
  configured, it walks a 4-D affine pattern or an indexed (indirect) pattern.
  The FPU only reads or writes the register. Two SUs can also merge two sparse
  index lists (intersection or union) in hardware, with the third SU writing
  the result. Loops of FP instructions are replayed by an FREP sequencer, so
  the integer core is free while the FPU streams.
- **Software-managed memories.** Each cluster has a 128 KiB, 32-bank
  scratchpad (TCDM). A DMA engine fills and drains it through a 512-bit
  "superbank" port that takes eight banks at once. Groups of four clusters and
  the chiplet share a two-level wide (512-bit) network to the HBM2E channels and
  a 1 MiB wide scratchpad. A separate narrow (64-bit) network carries control
  traffic and small accesses.
- **Two dies, one address space.** Two identical chiplets sit on an interposer.
  Address bit 40 selects the chiplet, and a die-to-die (D2D) link carries
  wide and narrow transactions to the other die.

This repository gives synthesizable RTL for the on-chip parts of that system:
- the memory system (banks, interconnects, scratchpads, width converters, HBM
  channel interleaving);
- the stream units and their sparse comparator, and the FREP sequencer;
- the shared multiply/divide unit, the barrier and the performance counters;
- the DMA engines, the caches, the IOTLB, and isolation and clock gating;
- the control registers;
- the complete D2D link stack, from the DDR PHY up to the transaction layer.

The cores and FPUs, the host CPU, the HBM2E controllers and PHYs, the
peripherals and the FLLs are *not* built. Their bus connections come out as
ports of the top (`occamy_system`), and the testbenches drive them.

## Address map and bus protocol

All memories share one 48-bit physical map (`occamy_pkg`):

| Region | Base | Size |
|---|---|---|
| control registers | `0x0200_0000` | 64 KiB |
| peripherals (external port) | `0x0300_0000` | 16 MiB |
| cluster TCDMs | `0x1000_0000` | 256 KiB window per cluster, group after group |
| narrow SPM | `0x7000_0000` | 512 KiB |
| wide SPM | `0x7100_0000` | 1 MiB |
| HBM2E | `0x10_0000_0000` | 16 GiB |

Setting bit 40 addresses the same region on the other chiplet. A chiplet
routes any address whose bit 40 differs from its own `chip_id` to the D2D
link.

The AXI4 buses of the original are reduced to one request/response pair per
port:
- `q` is the request, with `q_valid`/`q_ready`. It carries address, write
  flag, data, byte strobes and id.
- `p` is the response, with `p_valid`/`p_ready`. It carries read data, an
  error flag and id.

Every request gets exactly one response, so one handshake pair covers reads and
writes. Wide ports are 512 bits and narrow ports are 64 bits. Crossbars
(`mem_xbar`) append the master index to the low id bits and strip it again on
the way back. Responses therefore find their master without any tracking
table. The price is that ids grow by a few bits per crossbar level; 32-bit
ids leave plenty of room. A register slice (`mem_cut`) sits on every link
between two crossbars and on every group port. Without it, a request could
pass combinationally through several crossbars and back.

## The cluster

`occamy_cluster` holds everything of a cluster except its cores:
- the TCDM (`cluster_tcdm` with 32 `tcdm_bank`s);
- the three SUs of each worker (`su_complex`), and an FREP sequencer per
  worker (`frep_seq`);
- the shared `muldiv`, the `cluster_barrier` and `perf_counters`;
- the L1 instruction cache (`ro_cache`);
- the cluster DMA engine (`dma_2d`).

**TCDM interconnect.** Each bank has a rotating-priority arbiter over all
narrow masters:
- 8 workers × (LSU + 3 SUs), plus the DMA core;
- plus the port through which other clusters and the host reach this TCDM.

A grant is combinational and read data follows one cycle later.

Words are interleaved across banks at 64-bit granularity. A superbank is 8
neighbouring banks, i.e. one 64-byte line. A DMA access to a superbank wins
all 8 of its banks for that cycle. The narrow masters then lose those banks
and retry; they lose nothing else. The DMA port takes one request per cycle
and answers one cycle later, so it sustains 64 B/cycle. The testbench checks
at least 998 accesses in 1000 cycles.

**Stream units.** `su_addrgen` walks up to four nested loops. Each level has a
bound and a byte stride, and the stride of the innermost level that steps is
added to the pointer. `stream_unit` puts a request queue and a data FIFO behind
the address generator. In indirect mode it first fetches 8-, 16- or 32-bit
indices, packs them out of 64-bit words, and adds `base + index·8`.

The sparse mode is the subtle part. `su_index_cmp` reads the index heads of
SU0 and SU1 and, per step, sends each of them an action:
- **fetch**: pop the index and load its value;
- **skip**: pop the index without loading;
- **zero**: keep the index and deliver a 0.0 to the FPU.

Intersection fetches only on equal indices. Union fetches the smaller index
and gives the other side zero. The index of every emitted element goes to
SU2. SU2, in its "write with index" mode, stores the value the FPU produces
and appends the joint index to a second array. So `c = a + b` of two sparse
vectors is just a stream of `fadd ft2, ft0, ft1`. The comparator only starts
once both reading SUs have been launched. Its count of joint indices can be
read back, so software knows the length of the result.

**FREP.** The FPU instructions that follow an `frep` are captured (up to the
buffer depth) and replayed the given number of times. Meanwhile the integer
core keeps issuing, for instance DMA commands.

## Groups and the chiplet

An `occamy_group` holds:
- four clusters on a wide 4+1-port crossbar and a narrow crossbar;
- a constant cache (`ro_cache`) on the outgoing wide path, for an address
  window the registers set;
- an `iotlb` on each outgoing port;
- `mem_isolate` on all four ports, and a `clk_gate`.

The IOTLB remaps pages and checks read/write permission. An access that
matches an entry without the needed permission is not forwarded; it is
answered with `err`. Isolation blocks new handshakes on the group's ports. The
group's "isolated" status only goes high once isolation is applied on all
four ports. Software can then reset or clock-gate a group without hanging the
network.

`occamy_chiplet` connects six groups:
- **Wide path.** Each group's outgoing wide port first meets a 1→2 demux. HBM
  addresses go to the HBM crossbar. Everything else goes to the group crossbar
  (7×7: six groups plus the system side).
- **HBM crossbar.** This 7→8 crossbar picks a channel with `hbm_interleave`.
  With interleaving on, consecutive 4 KiB pages go to consecutive channels.
  With it off, the top address bits choose the channel, so each channel is a
  contiguous 2 GiB block.
- **System crossbar.** This 5×5 crossbar connects the group crossbar, the wide
  D2D port, the narrow-to-wide converter, the system DMA engine (read and
  write ports) and the wide SPM.
- **Narrow crossbar.** This 9×12 crossbar connects the host, the groups, the
  D2D narrow port, the narrow SPM, the peripheral port and the control
  registers.
- **Width converters.** `dw_upsizer` and `dw_downsizer` connect the two
  networks. The upsizer places a 64-bit access in its lane of the 512-bit bus.
  The downsizer splits a 512-bit access into eight 64-bit ones and gathers
  the answers.

`soc_regs` holds, per group:
- clock enable, reset, isolation request and cache flush;
- constant-cache enable, base and mask;
- four TLB entries.

Chiplet-wide, it holds:
- the HBM interleave switch;
- the per-PHY enable masks of both D2D links and raw-mode control;
- the PHY fault flags;
- the D2D and HBM clock enables;
- the isolation status and the chip id.

The register map is in the opening comment of `rtl/soc_regs.sv`.

## The die-to-die link

This is the most involved part, and the one where most of the details are
this design's own. The link is a stack of four layers on each die. The wide
link uses 38 PHYs, the narrow link 1.

1. **Protocol layer** (`d2d_protocol`). It turns bus requests and responses
   into payloads of two classes, *request* and *response*. Responses always
   go first, so requests waiting for credits cannot starve the answers that
   would free them. Received requests are replayed on a master port into the
   remote chiplet. Received responses go back to the local slave port.
2. **Data link layer** (`d2d_data_link`). It cuts a payload into packets as
   wide as all PHYs together, adds a header and keeps **credits**.
   - The header holds the payload type (request, response or credit-only) and
     the request and response credits being returned.
   - Each side may send at most `CREDITS` (4) payloads per class before the
     receiver returns credits for them.
   - Credits ride in the header of any frame. When there is nothing else to
     send, a credit-only frame carries them, so two sides both waiting for
     credits cannot deadlock.
3. **Channel allocator** (`d2d_chan_alloc`). It spreads a packet over the
   *enabled* PHYs: 16 bits per PHY per round. With `k` of 38 PHYs enabled, a
   608-bit packet takes ⌈38/k⌉ rounds. A faulty PHY can thus be switched off
   in the mask register, and the link keeps working at lower bandwidth. On
   receive, each PHY has a small FIFO, and words are reassembled in the same
   rank order.
   - **Raw mode** sends a known counting pattern on every PHY and compares
     it on the other side. This is how broken lanes are found before the mask
     is set. A mismatch sets the PHY's sticky fault bit.
4. **PHY** (`d2d_phy`). Each PHY has 8 data lanes and a forwarded clock at
   1/`CLK_DIV` of the system clock. Data is sent on both clock edges (DDR): a
   16-bit word per forwarded-clock cycle. The receiver oversamples the
   forwarded clock with the system clock through a synchroniser. It captures
   the low byte on the rising edge and the high byte, then the whole word, on
   the falling edge. The forwarded clock only toggles while data is being
   sent.

The whole stack runs on a clock that `soc_regs` can gate off. Register slices
separate it from the crossbars.

Measured round trips:
- A wide read across the link (request, remote SPM, response) takes about 57
  cycles with all 38 PHYs enabled and 105 cycles with 19.
- The paper reports 61 cycles for the wide link and 27 for the narrow one. The
  measured wide value is close to the paper's.
- The narrow link here is slower than the paper's, because it uses the same
  framing and a single PHY.

## Departures from the original and limits

- The cores, FPUs, host, HBM2E controllers, peripherals, FLLs and the
  off-interposer chip-to-chip link are not built. The TCDM, SU and FREP
  ports of each core are top-level ports.
- AXI4 bursts, separate read/write channels and multiple outstanding
  transactions per master are replaced by the single-beat protocol above.
  Bandwidth figures that depend on bursts and many outstanding transactions
  (e.g. sustained HBM bandwidth) are therefore not reproduced.
- The D2D framing, credit counts, PHY word width and raw pattern are this
  design's choices. Only the layering, the DDR source-synchronous PHYs, the
  channel masking and the raw test mode come from the original design.
- Cache sizes, TLB entry count (4), page size (4 KiB) and the register map
  are this design's own.

## Simulating

Everything builds with plain Verilator 5. For example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/occamy_pkg.sv tb/tb_d2d_link.sv
obj_dir/Vtb_d2d_link
```

Every testbench prints one line, `TB_RESULT checks=N failures=M`, and stops
itself with a watchdog.

- `tb_occamy_system` runs both chiplets end to end, at 2 groups of 1 cluster
  with small memories and 4 wide PHYs. Through the two host ports it uses:
  - the narrow SPM and a cluster TCDM of each group;
  - the wide SPM through the width converter;
  - interleaved HBM, which must spread over several channels;
  - narrow and wide D2D transfers, checked from both dies;
  - the system DMA and a cluster DMA;
  - an IOTLB denial, group isolation and the peripheral port.

  It fails if any of these never happened. The full-size configuration (two
  chiplets of 6 groups × 4 clusters, 38-PHY links) was not simulated; the
  largest end-to-end size run is the one above.
- Block testbenches exist for all other parts. The D2D testbenches check rates
  and round-trip latencies as well as data.

Known issues at the time of writing:
- `tb_su_complex` reports one mismatching element in one of its
  intersection runs.
- When simulated from random initial register state,
  `tb_occamy_system` can fail to settle at time 0 for some seeds. A
  combinational path that is still to be found then loops before reset.
  From zeroed state it passes.
